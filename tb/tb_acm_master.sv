// tb_acm_master: three slave cards are played by the testbench, each
// offering board-tagged packets with random gaps while the host stalls at
// random. Checks that every packet reaches the host whole, in order per
// card and board, with card and board tags and the last flag, that cards
// are served round-robin, the master trigger from its external input and
// from a masked card trigger, and the counters.
module tb_acm_master;
  import daq_pkg::*;
  localparam int NC = 3;
  logic clk = 0, rst_n = 1;
  logic [NC-1:0] s_valid, s_ready, card_trig = '0, trig_card_mask = '1;
  host_word_t s_word [NC];
  logic master_trig;
  logic [2:0] trig_src_en = 3'b000;
  logic ext_trig = 0, host_trig = 0;
  logic out_valid, out_ready = 1;
  crate_word_t out_word;
  logic [15:0] n_global, n_packets;
  int checks = 0, failures = 0;
  host_word_t src [NC][$];
  host_word_t exp [NC][$];
  bit gap [NC];
  int cur = -1, n_pkts = 0, trig_cycles = 0;
  int order [$];

  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  acm_master #(.N_ACC_P(NC)) dut (.clk, .rst_n, .s_valid, .s_ready, .s_word,
    .card_trig, .master_trig, .trig_src_en, .trig_card_mask, .ext_trig,
    .host_trig, .out_valid, .out_ready, .out_word, .n_global, .n_packets);

  for (genvar c = 0; c < NC; c++) begin : g_src
    // gaps only inside a packet, so a card with a packet waiting is always
    // visible when the master chooses
    assign s_valid[c] = src[c].size() > 0 && !(gap[c] && src[c][0].word != 16'hE000);
    assign s_word[c]  = src[c].size() > 0 ? src[c][0] : '0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (s_valid[c] && s_ready[c]) void'(src[c].pop_front());
      gap[c] <= ($urandom_range(0, 9) == 0);
    end
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && master_trig) trig_cycles++;
    if (rst_n && out_valid && out_ready) begin
      int c;
      c = int'(out_word.card);
      if (cur < 0) cur = c;
      check(c == cur, "packets do not interleave");
      check(exp[c].size() > 0 && out_word.board == exp[c][0].board &&
            out_word.word == exp[c][0].word && out_word.last == exp[c][0].last,
            $sformatf("card %0d word %h", c, out_word.word));
      if (exp[c].size() > 0) void'(exp[c].pop_front());
      if (out_word.last) begin cur = -1; n_pkts++; order.push_back(c); end
    end
  end

  task automatic add_packet(int c, int b, int n);
    host_word_t w;
    for (int i = 0; i < n + 2; i++) begin
      w.board = 3'(b);
      w.word  = (i == 0) ? 16'hE000 : (i == n + 1) ? 16'hF000 : {4'h1, 12'($urandom)};
      w.last  = (i == n + 1);
      src[c].push_back(w); exp[c].push_back(w);
    end
  endtask

  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < NC; c++) add_packet(c, $urandom_range(0, 7), $urandom_range(1, 10));
    t = 0;
    while (n_pkts < 3 * NC && t < 5000) begin @(negedge clk); t++; end
    check(n_pkts == 3 * NC, "all packets");
    for (int i = 0; i < order.size(); i++)
      check(order[i] == i % NC, $sformatf("round robin %0d: card %0d", i, order[i]));
    for (int c = 0; c < NC; c++) check(exp[c].size() == 0, "nothing left");
    check(n_packets == 16'(3 * NC), "packet counter");
    // master trigger from the external input
    trig_src_en = 3'b001;
    ext_trig = 1; repeat (8) @(negedge clk); ext_trig = 0;
    repeat (5) @(negedge clk);
    check(trig_cycles == 2, $sformatf("external: trigger pulse of %0d clocks", trig_cycles));
    // from a card trigger, masked and unmasked
    trig_src_en = 3'b100; trig_card_mask = 3'b100; trig_cycles = 0;
    card_trig = 3'b001; repeat (8) @(negedge clk); card_trig = 0;
    check(trig_cycles == 0, "masked card trigger ignored");
    repeat (4) @(negedge clk);
    card_trig = 3'b100; repeat (8) @(negedge clk); card_trig = 0;
    check(trig_cycles == 2 && n_global == 16'd2, "card trigger forms the global trigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
