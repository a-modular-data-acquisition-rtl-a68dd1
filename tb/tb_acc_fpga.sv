// tb_acc_fpga: the central-card logic with two boards whose link side is
// played by the testbench: per board two serializers send packets the way
// an ACDC does (alternating lines, stopping while link_en is low), and the
// config lines are decoded independently. Checks the host stream (board
// tag, words, last flag), flow control under a stalled host, the
// configuration broadcast, the system trigger from the external input,
// the busy status and the counters, and the slave mode (trigger taken
// from the master's line, board triggers reported upwards).
module tb_acc_fpga;
  import daq_pkg::*;
  localparam int NB = 2;
  logic clk = 0, rst_n = 1;
  logic [NB-1:0] cfg_line, link_en, board_trig = '0, board_busy = '0;
  logic sys_trig;
  logic [1:0] data_line [NB];
  logic ext_trig = 0, host_trig = 0;
  logic slave_mode = 0, master_trig = 0, card_trig;
  logic [2:0] trig_src_en = 3'b001;
  logic [NB-1:0] trig_board_mask = '1;
  logic cmd_valid = 0, cmd_ready;
  logic [NB-1:0] cmd_mask = '0;
  logic [15:0] cmd_word = 0;
  logic host_valid, host_ready = 1;
  host_word_t host_word;
  logic [NB-1:0] busy_status;
  logic [15:0] n_global, n_packets;
  logic [7:0] link_errs;
  logic [NB-1:0] got, bad;
  logic [15:0] word [NB];
  int checks = 0, failures = 0;
  // testbench serializers: per board a queue of words, two lanes
  logic [15:0] txq [NB][$];
  logic [15:0] expq [NB][$];
  logic [17:0] sh [NB][2];
  int left [NB][2];
  int nsent [NB];
  int cfg_seen [NB];
  int sys_cycles = 0, stall_seen = 0, cur = -1;
  bit host_stall = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  acc_fpga #(.N_ACDC_P(NB), .DEPTH(16)) dut (.clk, .rst_n, .cfg_line, .sys_trig,
    .link_en, .data_line, .board_trig, .board_busy, .slave_mode, .master_trig, .card_trig, .ext_trig, .host_trig,
    .trig_src_en, .trig_board_mask, .cmd_valid, .cmd_ready, .cmd_mask, .cmd_word,
    .host_valid, .host_ready, .host_word, .busy_status, .n_global, .n_packets,
    .link_errs);
  for (genvar b = 0; b < NB; b++) begin : g_b
    tb_sniffer #(.W(16)) snf (.clk, .line(cfg_line[b]), .got(got[b]), .word(word[b]), .bad(bad[b]));
    assign data_line[b] = {sh[b][1][17], sh[b][0][17]};
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    host_ready <= host_stall ? 1'b0 : ($urandom_range(0, 3) != 0);
    if (rst_n && sys_trig) sys_cycles++;
    if (rst_n && link_en != '1) stall_seen++;
    for (int b = 0; b < NB; b++) begin
      int l;
      l = nsent[b] % 2;
      for (int k = 0; k < 2; k++)
        if (left[b][k] > 0) begin sh[b][k] <= {sh[b][k][16:0], 1'b0}; left[b][k] <= left[b][k] - 1; end
      if (rst_n && txq[b].size() > 0 && link_en[b] && left[b][l] == 0) begin
        sh[b][l] <= {1'b1, txq[b].pop_front(), 1'b0};
        left[b][l] <= 18;
        nsent[b]++;
      end
      if (got[b]) begin check(word[b] == 16'h4123, "config word at board"); cfg_seen[b]++; end
      if (bad[b]) check(0, "config frame error");
    end
    if (rst_n && host_valid && host_ready) begin
      int b;
      b = int'(host_word.board);
      if (cur < 0) cur = b;
      check(b == cur, "whole packets");
      check(expq[b].size() > 0 && host_word.word == expq[b][0], $sformatf("board %0d word %h", b, host_word.word));
      check(host_word.last == (host_word.word[15:12] == 4'hF), "last flag");
      if (expq[b].size() > 0) void'(expq[b].pop_front());
      if (host_word.last) cur = -1;
    end
  end

  task automatic packet(int b, int ev, int n);
    txq[b].push_back({4'hE, 12'(ev)}); expq[b].push_back({4'hE, 12'(ev)});
    for (int i = 0; i < n; i++) begin
      logic [15:0] w;
      w = {1'b0, 3'(i % 5), 12'($urandom)};
      txq[b].push_back(w); expq[b].push_back(w);
    end
    txq[b].push_back({4'hF, 12'(ev)}); expq[b].push_back({4'hF, 12'(ev)});
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin
      nsent[b] = 0; cfg_seen[b] = 0;
      for (int k = 0; k < 2; k++) begin sh[b][k] = '0; left[b][k] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // configuration broadcast to both boards
    cmd_valid = 1; cmd_mask = '1; cmd_word = 16'h4123;
    @(negedge clk) cmd_valid = 0;
    repeat (30) @(negedge clk);
    check(cfg_seen[0] == 1 && cfg_seen[1] == 1, "config reached both boards");
    // external trigger -> system trigger pulse
    ext_trig = 1; repeat (3) @(negedge clk); ext_trig = 0;
    repeat (10) @(negedge clk);
    check(sys_cycles == 2 && n_global == 16'd1, "system trigger pulse");
    // busy status mirrors the boards
    board_busy = 2'b10; repeat (2) @(negedge clk);
    check(busy_status == 2'b10, "busy status");
    board_busy = 2'b00;
    // both boards send packets while the host stalls
    host_stall = 1;
    packet(0, 0, 40); packet(1, 0, 25); packet(0, 1, 10);
    repeat (1500) @(negedge clk);
    check(stall_seen > 0, "link flow control engaged");
    host_stall = 0;
    repeat (3000) @(negedge clk);
    for (int b = 0; b < NB; b++) check(expq[b].size() == 0 && txq[b].size() == 0, "all packets delivered");
    check(n_packets == 16'd3 && link_errs == 0, $sformatf("packets %0d errors %0d", n_packets, link_errs));
    // slave mode: the master's trigger line drives the boards, the card's
    // own external input does not; card_trig reports the board triggers
    slave_mode = 1; sys_cycles = 0;
    ext_trig = 1; repeat (10) @(negedge clk); ext_trig = 0;
    check(sys_cycles == 0, "own trigger ignored in slave mode");
    master_trig = 1;
    #1 check(!sys_trig, "master trigger re-timed by a register");
    @(negedge clk) check(sys_trig, "master trigger passed to the boards");
    master_trig = 0;
    @(negedge clk); @(negedge clk) check(!sys_trig, "master trigger released");
    trig_board_mask = 2'b10;
    board_trig = 2'b01; #1 check(!card_trig, "card trigger masked");
    board_trig = 2'b10; #1 check(card_trig, "card trigger to the master");
    board_trig = 2'b00;
    check(master_out_bad == 0 && master_out_hi > 0,
          $sformatf("master mode: card_trig follows sys_trig (%0d high, %0d wrong)", master_out_hi, master_out_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // in master mode the card's trigger output is its own system trigger
  int master_out_bad = 0, master_out_hi = 0;
  always @(negedge clk) if (rst_n && !slave_mode) begin
    if (card_trig !== sys_trig) master_out_bad++;
    if (card_trig) master_out_hi++;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
