// tb_serial_rx: drives frames bit by bit onto the line (back to back and
// with gaps, plus frames with a bad stop bit) and checks every received
// word, the frame_err pulses, and that valid comes one clock after the
// stop bit.
module tb_serial_rx;
  logic clk = 0, rst_n = 0;
  logic line = 0;
  logic valid, frame_err;
  logic [15:0] data;
  int checks = 0, failures = 0;
  logic [15:0] exp_q [$];
  int n_bad_sent = 0, n_bad_seen = 0;
  int stop_time = -1, cyc = 0;

  always #5 clk = ~clk;
  serial_rx #(.W(16)) dut (.clk, .rst_n, .line, .valid, .data, .frame_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // drive one frame; the stop bit is 1 when bad
  task automatic send(input logic [15:0] w, input bit bad);
    @(negedge clk) line = 1;
    for (int i = 15; i >= 0; i--) @(negedge clk) line = w[i];
    @(negedge clk) begin line = bad; stop_time = cyc; end
    @(negedge clk) line = 0;
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (valid) begin
      check(exp_q.size() > 0 && data == exp_q[0], $sformatf("word %h", data));
      check(cyc == stop_time + 1, $sformatf("latency %0d", cyc - stop_time));
      void'(exp_q.pop_front());
    end
    if (frame_err) n_bad_seen++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      logic [15:0] w;
      bit bad;
      w   = 16'($urandom);
      bad = (i % 7 == 3);
      if (!bad) exp_q.push_back(w); else n_bad_sent++;
      // back-to-back frames: the next start bit replaces the idle bit
      send(w, bad);
      if (bad) repeat (2) @(negedge clk);
    end
    repeat (30) @(posedge clk);
    check(exp_q.size() == 0, "all words received");
    check(n_bad_seen == n_bad_sent, $sformatf("frame errors %0d/%0d", n_bad_seen, n_bad_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
