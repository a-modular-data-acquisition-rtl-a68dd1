// tb_otpc_two_card: the 180-channel test-beam set-up. Two central cards
// run as master and slave, with three ACDC boards each (6 x 30 = 180
// channels), at full size: 256 cells, 8192-word FIFOs. Both host streams
// are read in parallel, as two separate host links would be.
//
// Wiring: the master card takes global triggers from its own masked board
// triggers and, on its external input, from the slave's card_trig (the OR of
// the slave's board triggers). Its trigger output (card_trig, its system
// trigger in master mode) drives the slave's master_trig. Every board runs
// in coincidence mode with the default 40-cycle window. A board keeps an
// event only when its own discriminator fired and the global trigger came
// back within the window.
//
// Events, one discriminator pulse each unless noted:
//   A  slave board 1: global trigger through the master; only that board
//      reads out, on the slave's stream
//   B  master board 0: only that board reads out, on the master's stream
//   C  master board 2, left out of the master's trigger mask: no global
//      trigger, the board drops the event after the window
//   D  slave board 0 and master board 1 together: both read out, one packet
//      on each stream at the same time
// Every sample word is checked against the PSEC4 model, and so are the event
// numbers and the kept and dropped counters of all six boards. Also checked:
// the chips stop in the same cycle as the discriminator, and the global
// trigger comes back within the window.
module tb_otpc_two_card;
  import daq_pkg::*;
  localparam int NB = 3;
  localparam int NWORDS = 2 + N_CH * N_CELLS;
  logic clk = 0, rst_n = 1;
  logic [29:0] self_bits [2][NB];
  logic [4:0]  psec4_trig [2][NB];
  logic [2:0]  psec4_ch [2][NB];
  logic [7:0]  psec4_cell [2][NB];
  logic [11:0] psec4_data [2][NB][5];
  logic [11:0] threshold [2][NB][5];
  logic [NB-1:0] busy_status [2], trig_board_mask [2], cmd_mask [2];
  logic [1:0]  card_trig, cmd_valid, cmd_ready, host_valid;
  logic [15:0] cmd_word [2];
  host_word_t  host_word [2];
  logic [15:0] n_global [2], n_packets [2];
  logic [7:0]  link_errs [2];
  logic [15:0] n_kept [2][NB], n_dropped [2][NB];
  int checks = 0, failures = 0, cyc = 0;
  int cnt [2][NB], evn [2][NB], pkts [2][NB];
  int bad_words = 0, t_hit = 0, t_glob = -1, overlap = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  for (genvar c = 0; c < 2; c++) begin : g_card
    daq_system #(.N_ACDC_P(NB)) card (
      .clk, .rst_n, .self_bits(self_bits[c]), .onboard_trig('0),
      .psec4_trig(psec4_trig[c]), .psec4_ch(psec4_ch[c]), .psec4_cell(psec4_cell[c]),
      .psec4_data(psec4_data[c]), .threshold(threshold[c]),
      .slave_mode(c == 1), .master_trig(c == 1 ? card_trig[0] : 1'b0),
      .card_trig(card_trig[c]),
      .ext_trig(c == 0 ? card_trig[1] : 1'b0), .host_trig(1'b0),
      .trig_src_en(3'b101), .trig_board_mask(trig_board_mask[c]),
      .cmd_valid(cmd_valid[c]), .cmd_ready(cmd_ready[c]), .cmd_mask(cmd_mask[c]),
      .cmd_word(cmd_word[c]), .host_valid(host_valid[c]), .host_ready(1'b1),
      .host_word(host_word[c]), .busy_status(busy_status[c]), .n_global(n_global[c]),
      .n_packets(n_packets[c]), .link_errs(link_errs[c]), .n_kept(n_kept[c]),
      .n_dropped(n_dropped[c]));
    for (genvar b = 0; b < NB; b++) begin : g_chips
      psec4_model #(.BOARD(c * NB + b)) chips (.clk, .ch(psec4_ch[c][b]),
        .cell_addr(psec4_cell[c][b]), .data(psec4_data[c][b]));
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // word i of the packet of board `bd` (model numbering) with event number ev
  function automatic logic [15:0] expected(int bd, int ev, int i);
    int s, chip, cl, ch;
    if (i == 0) return {4'hE, 12'(ev)};
    if (i == NWORDS - 1) return {4'hF, 12'(ev)};
    s = i - 1; chip = s % 5; cl = (s / 5) % N_CELLS; ch = s / (5 * N_CELLS);
    return {1'b0, 3'(chip), 12'((bd * 1009 + chip * 331 + ch * 97 + cl * 13 + 5) % 4096)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && t_glob < 0 && card_trig[0]) t_glob = cyc;
    // cycles in which both cards are part-way through a packet
    if (rst_n && (cnt[0][0] + cnt[0][1] + cnt[0][2]) > 0 && (cnt[1][0] + cnt[1][1] + cnt[1][2]) > 0)
      overlap++;
    for (int c = 0; c < 2; c++)
      if (rst_n && host_valid[c]) begin
        int b;
        b = int'(host_word[c].board);
        if (host_word[c].word != expected(c * NB + b, evn[c][b], cnt[c][b])) begin
          bad_words++;
          if (bad_words < 10)
            $display("FAIL card %0d board %0d word %0d = %h", c, b, cnt[c][b], host_word[c].word);
        end
        cnt[c][b]++;
        if (host_word[c].last) begin
          if (cnt[c][b] != NWORDS) bad_words++;
          cnt[c][b] = 0; evn[c][b]++; pkts[c][b]++;
        end
      end
  end

  // one discriminator pulse of two cycles on each listed board
  task automatic photon(input int c0, input int b0, input int ch0,
                        input int c1 = -1, input int b1 = 0, input int ch1 = 0);
    @(negedge clk);
    self_bits[c0][b0][ch0] = 1'b1;
    if (c1 >= 0) self_bits[c1][b1][ch1] = 1'b1;
    t_hit = cyc; t_glob = -1;
    #1 check(psec4_trig[c0][b0] == 5'h1f, "chips stopped in the discriminator's cycle");
    repeat (2) @(negedge clk);
    self_bits[c0][b0][ch0] = 1'b0;
    if (c1 >= 0) self_bits[c1][b1][ch1] = 1'b0;
  endtask

  task automatic wait_packets(input int total);
    int n = 0;
    while (n < total && cyc - t_hit < 100000) begin
      @(negedge clk);
      n = 0;
      for (int c = 0; c < 2; c++) for (int b = 0; b < NB; b++) n += pkts[c][b];
    end
    repeat (20) @(negedge clk);
  endtask

  task automatic expect_state(input string what, input int k [2][NB], input int d [2][NB]);
    for (int c = 0; c < 2; c++)
      for (int b = 0; b < NB; b++) begin
        check(int'(n_kept[c][b]) == k[c][b] && int'(n_dropped[c][b]) == d[c][b] &&
              pkts[c][b] == k[c][b],
              $sformatf("%s: card %0d board %0d kept %0d dropped %0d packets %0d", what, c, b,
                        n_kept[c][b], n_dropped[c][b], pkts[c][b]));
        check(busy_status[c][b] == 1'b0, "boards re-armed");
      end
  endtask

  initial begin
    int k [2][NB], d [2][NB];
    for (int c = 0; c < 2; c++) begin
      for (int b = 0; b < NB; b++) begin
        self_bits[c][b] = '0; cnt[c][b] = 0; evn[c][b] = 0; pkts[c][b] = 0;
        k[c][b] = 0; d[c][b] = 0;
      end
      cmd_valid[c] = 0; cmd_mask[c] = '1; cmd_word[c] = '0;
    end
    trig_board_mask[0] = 3'b011;   // master board 2 takes no part in the global trigger
    trig_board_mask[1] = 3'b111;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // all six boards to coincidence mode
    cmd_valid = 2'b11;
    for (int c = 0; c < 2; c++) cmd_word[c] = {4'd0, 12'(TRIG_COINC)};
    @(negedge clk) cmd_valid = 2'b00;
    repeat (30) @(negedge clk);

    // A: slave board 1
    photon(1, 1, 17);
    repeat (20) @(negedge clk);
    check(t_glob >= 0 && t_glob - t_hit < 40,
          $sformatf("global trigger %0d cycles after the hit, inside the window", t_glob - t_hit));
    $display("slave board hit -> global trigger from the master: %0d cycles", t_glob - t_hit);
    wait_packets(1);
    k[1][1] = 1;
    expect_state("A", k, d);

    // B: master board 0
    photon(0, 0, 3);
    wait_packets(2);
    k[0][0] = 1;
    expect_state("B", k, d);

    // C: master board 2 is out of the trigger mask: no global trigger
    photon(0, 2, 29);
    repeat (100) @(negedge clk);
    d[0][2] = 1;
    expect_state("C", k, d);
    check(n_global[0] == 16'd2, $sformatf("%0d global triggers", n_global[0]));

    // D: two boards on different cards at once
    photon(1, 0, 0, 0, 1, 12);
    wait_packets(4);
    k[1][0] = 1; k[0][1] = 1;
    expect_state("D", k, d);
    check(overlap > 1000, $sformatf("both cards read out in parallel (%0d cycles)", overlap));

    check(bad_words == 0, $sformatf("%0d wrong words", bad_words));
    check(link_errs[0] == 0 && link_errs[1] == 0, "no link errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
