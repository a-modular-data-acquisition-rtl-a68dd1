// tb_daq_crate: end-to-end test of the whole system at reduced size: a
// crate master over 3 slave central cards with 2 ACDC boards each, 4 cells
// per channel and 16-word link FIFOs. Every packet reaching the host is
// checked word by word against the PSEC4 model of its card and board.
// Each mechanism is counted and must occur: configuration with card and
// board masks, master trigger from its external input and from the host,
// a slave's own trigger input being ignored, self trigger with a channel
// mask, a global trigger formed at the master from a board trigger (via
// the card trigger) kept in coincidence mode, a coincidence timeout,
// software and on-board triggers, trigger off, and flow control stalling
// the boards while the host does not read.
module tb_daq_crate;
  import daq_pkg::*;
  localparam int NA = 3, NB = 2, NC = 4;
  localparam int NWORDS = 2 + 30 * NC;
  logic clk = 0, rst_n = 1;
  logic [29:0] self_bits [NA][NB];
  logic [NB-1:0] onboard_trig [NA];
  logic [4:0] psec4_trig [NA][NB];
  logic [2:0] psec4_ch [NA][NB];
  logic [7:0] psec4_cell [NA][NB];
  logic [11:0] psec4_data [NA][NB][5];
  logic [11:0] threshold [NA][NB][5];
  logic ext_trig = 0, host_trig = 0;
  logic [2:0] trig_src_en = 3'b000;
  logic [NA-1:0] trig_card_mask = '1, card_ext_trig = '0;
  logic [NB-1:0] trig_board_mask [NA];
  logic cmd_valid = 0, cmd_ready;
  logic [NA-1:0] cmd_card_mask = '0;
  logic [NB-1:0] cmd_mask = '0;
  logic [15:0] cmd_word = 0;
  logic out_valid, out_ready = 1;
  crate_word_t out_word;
  logic [NB-1:0] busy_status [NA];
  logic [7:0] link_errs [NA];
  logic [15:0] n_kept [NA][NB], n_dropped [NA][NB];
  logic [15:0] n_global, n_packets;
  int checks = 0, failures = 0;
  logic [15:0] cur [NA][NB][$];
  int pkts [NA][NB];
  int total_pkts = 0, stall_cycles = 0;
  bit host_stall = 0;
  int m_cfg = 0, m_ext = 0, m_host = 0, m_slave_ignored = 0, m_self = 0, m_mask = 0;
  int m_card_global = 0, m_coinc_drop = 0, m_soft = 0, m_onboard = 0, m_off = 0, m_stall = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  daq_crate #(.N_ACC_P(NA), .N_ACDC_P(NB), .N_CELLS_P(NC), .FIFO_DEPTH(16)) dut (
    .clk, .rst_n, .self_bits, .onboard_trig, .psec4_trig, .psec4_ch, .psec4_cell,
    .psec4_data, .threshold, .ext_trig, .host_trig, .trig_src_en, .trig_card_mask,
    .trig_board_mask, .card_ext_trig, .cmd_valid, .cmd_ready, .cmd_card_mask,
    .cmd_mask, .cmd_word, .out_valid, .out_ready, .out_word, .busy_status,
    .link_errs, .n_kept, .n_dropped, .n_global, .n_packets);

  for (genvar a = 0; a < NA; a++) begin : g_a
    for (genvar b = 0; b < NB; b++) begin : g_b
      psec4_model #(.BOARD(8 * a + b)) chips (.clk, .ch(psec4_ch[a][b]),
        .cell_addr(psec4_cell[a][b]), .data(psec4_data[a][b]));
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [11:0] model(int id, int chip, int ch, int cl);
    return 12'((id * 1009 + chip * 331 + ch * 97 + cl * 13 + 5) % 4096);
  endfunction

  function automatic bit any_busy();
    for (int a = 0; a < NA; a++) if (busy_status[a] != 0) return 1;
    return 0;
  endfunction

  always @(posedge clk) begin
    out_ready <= host_stall ? 1'b0 : ($urandom_range(0, 7) != 0);
    if (rst_n && (dut.g_card[0].u_card.link_en != '1)) stall_cycles++;
    if (rst_n && out_valid && out_ready) begin
      int a, b;
      a = int'(out_word.card); b = int'(out_word.board);
      cur[a][b].push_back(out_word.word);
      if (out_word.last) begin
        int ev;
        ev = pkts[a][b];
        check(cur[a][b].size() == NWORDS, $sformatf("card %0d board %0d length %0d", a, b, cur[a][b].size()));
        check(cur[a][b][0] == {4'hE, 12'(ev)}, $sformatf("card %0d board %0d header", a, b));
        for (int i = 1; i < NWORDS - 1 && i < cur[a][b].size(); i++) begin
          int s, chip, cl, ch;
          s = i - 1; chip = s % 5; cl = (s / 5) % NC; ch = s / (5 * NC);
          if (cur[a][b][i] != {1'b0, 3'(chip), model(8 * a + b, chip, ch, cl)})
            check(0, $sformatf("card %0d board %0d word %0d", a, b, i));
        end
        cur[a][b].delete();
        pkts[a][b]++;
        total_pkts++;
      end
    end
  end

  task automatic cmd(input logic [NA-1:0] cm, input logic [NB-1:0] bm,
                     input logic [3:0] adr, input logic [11:0] v);
    @(negedge clk);
    cmd_valid = 1; cmd_card_mask = cm; cmd_mask = bm; cmd_word = {adr, v};
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 0;
    repeat (25) @(negedge clk);
  endtask

  task automatic wait_pkts(input int n, input string what);
    int target, t;
    target = total_pkts + n; t = 0;
    while (total_pkts < target && t < 60000) begin @(negedge clk); t++; end
    check(total_pkts == target, $sformatf("%s: %0d of %0d packets", what, total_pkts - target + n, n));
    repeat (50) @(negedge clk);
  endtask

  task automatic self_pulse(input int a, input int b, input int ch);
    self_bits[a][b][ch] = 1;
    repeat (6) @(negedge clk);
    self_bits[a][b][ch] = 0;
  endtask

  initial begin
    for (int a = 0; a < NA; a++) begin
      onboard_trig[a] = '0; trig_board_mask[a] = '1;
      for (int b = 0; b < NB; b++) begin self_bits[a][b] = '0; pkts[a][b] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // configuration: a threshold per card and board, then external mode
    for (int a = 0; a < NA; a++)
      for (int b = 0; b < NB; b++) cmd(NA'(1) << a, NB'(1) << b, 4'd6, 12'(16 * a + b));
    cmd('1, '1, 4'd0, 12'(TRIG_EXTERNAL));
    for (int a = 0; a < NA; a++)
      for (int b = 0; b < NB; b++) check(threshold[a][b][1] == 12'(16 * a + b), "threshold");
    m_cfg++;

    // master external trigger reaches every board of every card
    trig_src_en = 3'b001;
    ext_trig = 1; repeat (5) @(negedge clk); ext_trig = 0;
    wait_pkts(NA * NB, "master external trigger");
    m_ext++;

    // a slave's own trigger input is ignored
    card_ext_trig = 3'b010; repeat (20) @(negedge clk); card_ext_trig = 0;
    repeat (50) @(negedge clk);
    check(!any_busy() && !out_valid, "slave's own trigger ignored");
    m_slave_ignored++;

    // master host trigger while the host is not reading: flow control
    trig_src_en = 3'b010;
    host_stall = 1;
    @(negedge clk) host_trig = 1;
    @(negedge clk) host_trig = 0;
    repeat (3000) @(negedge clk);
    check(stall_cycles > 0, "boards stalled by flow control");
    if (stall_cycles > 0) m_stall++;
    host_stall = 0;
    wait_pkts(NA * NB, "master host trigger");
    m_host++;

    // self trigger on card 2 board 1, only channel 7 enabled
    cmd(3'b100, 2'b10, 4'd0, 12'(TRIG_SELF));
    cmd(3'b100, 2'b10, 4'd1, 12'h080);
    cmd(3'b100, 2'b10, 4'd2, 12'h000);
    cmd(3'b100, 2'b10, 4'd3, 12'h000);
    self_pulse(2, 1, 8);
    repeat (100) @(negedge clk);
    check(!any_busy() && !out_valid, "masked channel ignored");
    m_mask++;
    self_pulse(2, 1, 7);
    wait_pkts(1, "self trigger");
    check(pkts[2][1] == 3, "card 2 board 1 self-triggered");
    m_self++;

    // coincidence everywhere; the global trigger is formed at the master
    // from the card trigger of card 1 (board 0 fired)
    cmd('1, '1, 4'd0, 12'(TRIG_COINC));
    cmd('1, '1, 4'd4, 12'd30);
    trig_src_en = 3'b100;
    self_pulse(1, 0, 20);
    wait_pkts(1, "global trigger from a card trigger");
    check(pkts[1][0] == 3 && n_kept[0][0] == 16'd2, "only the locally triggered board kept it");
    m_card_global++;

    // coincidence timeout with no global source
    trig_src_en = 3'b000;
    self_pulse(0, 1, 3);
    repeat (200) @(negedge clk);
    check(n_dropped[0][1] == 16'd1 && !any_busy() && !out_valid, "coincidence timed out");
    m_coinc_drop++;

    // software trigger to card 1, both boards
    cmd(3'b010, 2'b11, 4'd10, 12'd1);
    wait_pkts(2, "software trigger");
    m_soft++;

    // on-board trigger input, card 0 board 0 in external mode
    cmd(3'b001, 2'b01, 4'd0, 12'(TRIG_EXTERNAL));
    onboard_trig[0][0] = 1; repeat (3) @(negedge clk); onboard_trig[0][0] = 0;
    wait_pkts(1, "on-board trigger");
    m_onboard++;

    // trigger off
    cmd('1, '1, 4'd0, 12'(TRIG_OFF));
    trig_src_en = 3'b001;
    ext_trig = 1; repeat (5) @(negedge clk); ext_trig = 0;
    repeat (500) @(negedge clk);
    check(!any_busy() && !out_valid, "trigger off");
    m_off++;

    check(total_pkts == 2 * NA * NB + 5 && n_packets == 16'(total_pkts),
          $sformatf("total packets %0d / %0d", total_pkts, n_packets));
    for (int a = 0; a < NA; a++) check(link_errs[a] == 0, "no link errors");
    $display("mechanisms: cfg=%0d ext=%0d host=%0d slave_ignored=%0d self=%0d mask=%0d card_global=%0d coinc_drop=%0d soft=%0d onboard=%0d off=%0d stall=%0d",
             m_cfg, m_ext, m_host, m_slave_ignored, m_self, m_mask, m_card_global,
             m_coinc_drop, m_soft, m_onboard, m_off, m_stall);
    check(m_cfg > 0 && m_ext > 0 && m_host > 0 && m_slave_ignored > 0 && m_self > 0 &&
          m_mask > 0 && m_card_global > 0 && m_coinc_drop > 0 && m_soft > 0 &&
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
