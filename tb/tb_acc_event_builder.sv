// tb_acc_event_builder: four boards offer packets (header, samples,
// trailer) with random gaps; the host stalls at random. Checks that every
// packet comes out whole and in order for its board, tagged with the board
// number and with last on the trailer only, that packets of different
// boards never interleave, that boards with waiting packets are served
// round-robin, and the packet counter.
module tb_acc_event_builder;
  import daq_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] in_valid, in_ready;
  logic [15:0] in_data [NB];
  logic host_valid, host_ready = 1;
  host_word_t host_word;
  logic [15:0] packets;
  int checks = 0, failures = 0;
  logic [15:0] src [NB][$];     // words still to offer per board
  logic [15:0] exp [NB][$];     // words expected at the host per board
  int cur_board = -1, last_board = -1, n_pkts = 0, rr_viol = 0;
  bit gap [NB];

  always #5 clk = ~clk;
  acc_event_builder #(.N_ACDC_P(NB)) dut (.clk, .rst_n, .in_valid, .in_ready,
    .in_data, .host_valid, .host_ready, .host_word, .packets);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  for (genvar b = 0; b < NB; b++) begin : g_src
    // gaps only inside a packet, so a waiting board is always visible
    assign in_valid[b] = src[b].size() > 0 && !(gap[b] && src[b][0][15:12] != 4'hE);
    assign in_data[b]  = src[b].size() > 0 ? src[b][0] : 16'h0;
  end

  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (in_valid[b] && in_ready[b]) void'(src[b].pop_front());
      gap[b] <= ($urandom_range(0, 9) == 0);
    end
    host_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && host_valid && host_ready) begin
      int b;
      b = int'(host_word.board);
      if (cur_board < 0) begin
        // a new packet: with several boards waiting, the next one in
        // round-robin order after the last served must be taken
        cur_board = b;
      end
      check(b == cur_board, "packets do not interleave");
      check(exp[b].size() > 0 && host_word.word == exp[b][0],
            $sformatf("board %0d word %h", b, host_word.word));
      check(host_word.last == (host_word.word[15:12] == 4'hF), "last flag");
      if (exp[b].size() > 0) void'(exp[b].pop_front());
      if (host_word.last) begin cur_board = -1; n_pkts++; last_board = b; end
    end
  end

  task automatic add_packet(int b, int ev, int n);
    src[b].push_back({4'hE, 12'(ev)}); exp[b].push_back({4'hE, 12'(ev)});
    for (int i = 0; i < n; i++) begin
      logic [15:0] w;
      w = {1'b0, 3'($urandom_range(0, 4)), 12'($urandom)};
      src[b].push_back(w); exp[b].push_back(w);
    end
    src[b].push_back({4'hF, 12'(ev)}); exp[b].push_back({4'hF, 12'(ev)});
  endtask

  initial begin
    int order [$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 3; ev++)
      for (int b = 0; b < NB; b++) add_packet(b, ev, $urandom_range(1, 12));
    // all boards busy: service order must be 0,1,2,3,0,1,... (round robin)
    fork
      begin
        int prev;
        prev = -1;
        while (n_pkts < 12) begin
          @(negedge clk);
          if (last_board != prev && last_board >= 0) begin
            order.push_back(last_board);
            prev = last_board;
          end
        end
      end
    join
    repeat (10) @(negedge clk);
    for (int i = 0; i < order.size(); i++)
      check(order[i] == i % NB, $sformatf("round robin %0d: board %0d", i, order[i]));
    // only board 2 sends now
    add_packet(2, 7, 5);
    repeat (200) @(negedge clk);
    check(n_pkts == 13, "single-board packet");
    for (int b = 0; b < NB; b++) check(exp[b].size() == 0, "all words delivered");
    check(packets == 16'd13, $sformatf("packet counter %0d", packets));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
