// tb_daq_system_full: the full-size system with every parameter at its
// default: one central card, eight ACDC boards, 256 cells per channel. The
// host triggers one event; every board must deliver its whole packet of
// 2 + 30*256 = 7682 words, checked word by word against the PSEC4 model.
// All boards send at once over their two data lines (about 9.4 clocks per
// word, some 72,000 clocks per packet) into the central card's FIFOs; the
// host receives the first packet as it arrives and the other seven
// afterwards at one word per clock, some 126,000 clocks in all.
module tb_daq_system_full;
  import daq_pkg::*;
  localparam int NB = N_ACDC;
  localparam int NWORDS = 2 + N_CH * N_CELLS;
  logic clk = 0, rst_n = 1;
  logic [29:0] self_bits [NB];
  logic [NB-1:0] onboard_trig = '0;
  logic [4:0] psec4_trig [NB];
  logic [2:0] psec4_ch [NB];
  logic [7:0] psec4_cell [NB];
  logic [11:0] psec4_data [NB][5];
  logic [11:0] threshold [NB][5];
  logic ext_trig = 0, host_trig = 0;
  logic slave_mode = 0, master_trig = 0, card_trig;
  logic [2:0] trig_src_en = 3'b010;
  logic [NB-1:0] trig_board_mask = '1;
  logic cmd_valid = 0, cmd_ready;
  logic [NB-1:0] cmd_mask = '0;
  logic [15:0] cmd_word = 0;
  logic host_valid, host_ready = 1;
  host_word_t host_word;
  logic [NB-1:0] busy_status;
  logic [15:0] n_global, n_packets;
  logic [7:0] link_errs;
  logic [15:0] n_kept [NB], n_dropped [NB];
  int checks = 0, failures = 0;
  int cnt [NB];
  int bad_words = 0, total_pkts = 0, cyc = 0, t_trig = 0, t_done = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  daq_system dut (.clk, .rst_n, .self_bits,
    .onboard_trig, .psec4_trig, .psec4_ch, .psec4_cell, .psec4_data, .threshold,
    .slave_mode, .master_trig, .card_trig, .ext_trig, .host_trig, .trig_src_en, .trig_board_mask, .cmd_valid, .cmd_ready,
    .cmd_mask, .cmd_word, .host_valid, .host_ready, .host_word, .busy_status,
    .n_global, .n_packets, .link_errs, .n_kept, .n_dropped);

  for (genvar b = 0; b < NB; b++) begin : g_chips
    psec4_model #(.BOARD(b)) chips (.clk, .ch(psec4_ch[b]), .cell_addr(psec4_cell[b]),
                                    .data(psec4_data[b]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] expected(int b, int i);
    int s, chip, cl, ch;
    if (i == 0) return {4'hE, 12'd0};
    if (i == NWORDS - 1) return {4'hF, 12'd0};
    s = i - 1; chip = s % 5; cl = (s / 5) % N_CELLS; ch = s / (5 * N_CELLS);
    return {1'b0, 3'(chip), 12'((b * 1009 + chip * 331 + ch * 97 + cl * 13 + 5) % 4096)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && host_valid && host_ready) begin
      int b;
      b = int'(host_word.board);
      if (host_word.word != expected(b, cnt[b])) begin
        bad_words++;
        if (bad_words < 10) $display("FAIL board %0d word %0d = %h", b, cnt[b], host_word.word);
      end
      cnt[b]++;
      if (host_word.last) begin total_pkts++; t_done = cyc; end
    end
  end

  initial begin
    for (int b = 0; b < NB; b++) begin self_bits[b] = '0; cnt[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // boards reset to self trigger mode: switch them all to external
    @(negedge clk) begin cmd_valid = 1; cmd_mask = '1; cmd_word = {4'd0, 12'(TRIG_EXTERNAL)}; end
    @(negedge clk) cmd_valid = 0;
    repeat (30) @(negedge clk);
    @(negedge clk) begin host_trig = 1; t_trig = cyc; end
    @(negedge clk) host_trig = 0;
    while (total_pkts < NB && cyc - t_trig < 200000) @(negedge clk);
    repeat (20) @(negedge clk);
    check(total_pkts == NB, $sformatf("%0d packets", total_pkts));
    for (int b = 0; b < NB; b++) check(cnt[b] == NWORDS, $sformatf("board %0d: %0d words", b, cnt[b]));
    check(bad_words == 0, $sformatf("%0d wrong words", bad_words));
    check(link_errs == 0 && busy_status == 0, "no link errors, boards re-armed");
    check(t_done - t_trig < 10 * NWORDS + NB * NWORDS, $sformatf("event read in %0d clocks", t_done - t_trig));
    $display("full-size event: %0d words from %0d boards in %0d clocks", NB * NWORDS, NB, t_done - t_trig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
