// tb_daq_system: end-to-end test of one central card with eight ACDC
// boards (4 cells per channel and 16-word link FIFOs to keep it short), each with its own PSEC4
// model. Everything goes through the serial links: the host configures the
// boards with commands, triggers are raised at the chips, the board inputs
// or the central card, and every packet that reaches the host is checked
// word by word against the PSEC4 model. Each mechanism is counted and must
// occur: config broadcast and per-board config, external trigger from the
// central card's input, host trigger, self trigger with a channel mask,
// global trigger formed from a board trigger, coincidence kept and timed
// out, software trigger, on-board trigger input, trigger off, and flow
// control stalling the boards while the host is not reading.
module tb_daq_system;
  import daq_pkg::*;
  localparam int NB = 8;
  localparam int NC = 4;
  localparam int NWORDS = 2 + 30 * NC;
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
  logic [2:0] trig_src_en = 3'b000;
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
  logic [15:0] cur [NB][$];
  int pkts [NB];
  int total_pkts = 0, stall_cycles = 0;
  bit host_stall = 0;
  // mechanism counters
  int m_cfg = 0, m_ext = 0, m_host = 0, m_self = 0, m_mask = 0, m_board_global = 0;
  int m_coinc_kept = 0, m_coinc_drop = 0, m_soft = 0, m_onboard = 0, m_off = 0, m_stall = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  daq_system #(.N_ACDC_P(NB), .N_CELLS_P(NC), .FIFO_DEPTH(16)) dut (.clk, .rst_n, .self_bits,
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

  function automatic logic [11:0] model(int b, int chip, int ch, int cl);
    return 12'((b * 1009 + chip * 331 + ch * 97 + cl * 13 + 5) % 4096);
  endfunction

  // host: collects words per board, checks each packet when its trailer arrives
  always @(posedge clk) begin
    if (host_stall) host_ready <= 0;
    else host_ready <= ($urandom_range(0, 7) != 0);
    if (rst_n && (dut.link_en != '1)) stall_cycles++;
    if (rst_n && host_valid && host_ready) begin
      int b;
      b = int'(host_word.board);
      cur[b].push_back(host_word.word);
      if (host_word.last) begin
        int ev;
        ev = pkts[b];
        check(cur[b].size() == NWORDS, $sformatf("board %0d packet length %0d", b, cur[b].size()));
        check(cur[b][0] == {4'hE, 12'(ev)}, $sformatf("board %0d header %h", b, cur[b][0]));
        for (int i = 1; i < NWORDS - 1 && i < cur[b].size(); i++) begin
          int s, chip, cl, ch;
          s = i - 1; chip = s % 5; cl = (s / 5) % NC; ch = s / (5 * NC);
          if (cur[b][i] != {1'b0, 3'(chip), model(b, chip, ch, cl)})
            check(0, $sformatf("board %0d word %0d = %h", b, i, cur[b][i]));
        end
        checks++;
        cur[b].delete();
        pkts[b]++;
        total_pkts++;
      end
    end
  end

  task automatic cmd(input logic [NB-1:0] m, input logic [3:0] a, input logic [11:0] v);
    @(negedge clk);
    cmd_valid = 1; cmd_mask = m; cmd_word = {a, v};
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 0;
    repeat (25) @(negedge clk);   // frame on the line plus decoding
  endtask

  // wait until `n` more packets arrived at the host
  task automatic wait_pkts(input int n, input string what);
    int target, t;
    target = total_pkts + n; t = 0;
    while (total_pkts < target && t < 60000) begin @(negedge clk); t++; end
    check(total_pkts == target, $sformatf("%s: %0d of %0d packets", what, total_pkts - target + n, n));
    repeat (50) @(negedge clk);
  endtask

  task automatic self_pulse(input int b, input int ch);
    self_bits[b][ch] = 1;
    repeat (6) @(negedge clk);
    self_bits[b][ch] = 0;
  endtask

  initial begin
    int pk_before [NB];
    for (int b = 0; b < NB; b++) begin self_bits[b] = '0; pkts[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // configuration: thresholds per board, then external mode everywhere
    for (int b = 0; b < NB; b++) cmd(NB'(1) << b, 4'd5, 12'(b + 1));
    cmd('1, 4'd0, 12'(TRIG_EXTERNAL));
    for (int b = 0; b < NB; b++) check(threshold[b][0] == 12'(b + 1), "per-board threshold");
    m_cfg++;

    // 1. external trigger at the central card input reaches all boards
    trig_src_en = 3'b001;
    ext_trig = 1; repeat (5) @(negedge clk); ext_trig = 0;
    wait_pkts(NB, "external trigger");
    m_ext++;

    // 2. host trigger, with the host not reading for a while (flow control)
    trig_src_en = 3'b010;
    host_stall = 1;
    @(negedge clk) host_trig = 1;
    @(negedge clk) host_trig = 0;
    repeat (3000) @(negedge clk);
    check(stall_cycles > 0 && busy_status != 0, "boards stalled by flow control");
    if (stall_cycles > 0) m_stall++;
    host_stall = 0;
    wait_pkts(NB, "host trigger");
    m_host++;

    // 3. self trigger, board 3 only channel 5 enabled
    cmd('1, 4'd0, 12'(TRIG_SELF));
    cmd(8'h08, 4'd1, 12'h020);
    cmd(8'h08, 4'd2, 12'h000);
    cmd(8'h08, 4'd3, 12'h000);
    self_pulse(3, 9);            // masked out on board 3
    repeat (100) @(negedge clk);
    check(busy_status == 0 && host_valid == 0, "masked channel does not trigger");
    m_mask++;
    self_pulse(3, 5);
    wait_pkts(1, "self trigger");
    check(pkts[3] == 3, "board 3 self-triggered");
    m_self++;

    // 4. coincidence, global trigger formed from the board triggers
    cmd('1, 4'd0, 12'(TRIG_COINC));
    cmd('1, 4'd4, 12'd20);
    trig_src_en = 3'b100;
    for (int b = 0; b < NB; b++) pk_before[b] = pkts[b];
    self_pulse(6, 12);
    wait_pkts(1, "coincidence with board-formed global trigger");
    check(pkts[6] == pk_before[6] + 1, "board 6 kept its event");
    check(n_kept[0] == 16'd2, "other boards ignore a lone system trigger");
    m_board_global++; m_coinc_kept++;

    // 5. coincidence timeout: no global trigger source enabled
    trig_src_en = 3'b000;
    self_pulse(1, 0);
    repeat (200) @(negedge clk);
    check(n_dropped[1] == 16'd1 && busy_status == 0 && host_valid == 0, "coincidence timed out");
    m_coinc_drop++;

    // 6. software trigger command to boards 0 and 7
    cmd(8'h81, 4'd10, 12'd1);
    wait_pkts(2, "software trigger");
    m_soft++;

    // 7. on-board trigger input of board 5 in external mode
    cmd(8'h20, 4'd0, 12'(TRIG_EXTERNAL));
    onboard_trig[5] = 1; repeat (3) @(negedge clk); onboard_trig[5] = 0;
    wait_pkts(1, "on-board trigger");
    m_onboard++;

    // 8. trigger off: nothing happens
    cmd('1, 4'd0, 12'(TRIG_OFF));
    trig_src_en = 3'b001;
    ext_trig = 1; repeat (5) @(negedge clk); ext_trig = 0;
    repeat (500) @(negedge clk);
    check(busy_status == 0 && host_valid == 0, "trigger off");
    m_off++;

    check(total_pkts == 2 * NB + 5 && n_packets == 16'(total_pkts),
          $sformatf("total packets %0d / %0d", total_pkts, n_packets));
    check(link_errs == 0, "no link errors");
    check(n_global == 16'd4, $sformatf("global triggers %0d", n_global));
    $display("mechanisms: cfg=%0d ext=%0d host=%0d self=%0d mask=%0d board_global=%0d coinc_kept=%0d coinc_drop=%0d soft=%0d onboard=%0d off=%0d stall=%0d (stall cycles %0d)",
             m_cfg, m_ext, m_host, m_self, m_mask, m_board_global, m_coinc_kept,
             m_coinc_drop, m_soft, m_onboard, m_off, m_stall, stall_cycles);
    check(m_cfg > 0 && m_ext > 0 && m_host > 0 && m_self > 0 && m_mask > 0 &&
          m_board_global > 0 && m_coinc_kept > 0 && m_coinc_drop > 0 && m_soft > 0 &&
          m_onboard > 0 && m_off > 0 && m_stall > 0, "every mechanism happened");
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
