// tb_acc_link_rx: drives the two data lines like an ACDC board does (even
// words on line 0, odd on line 1, one frame start per clock at most) and
// reads the FIFO with a host that sometimes stops. Checks word order and
// content, that link_en drops when the FIFO fills (and the sender obeying
// it never overflows the FIFO), that the error counters stay zero, and
// that a word sent on the wrong line is counted as an order error.
module tb_acc_link_rx;
  logic clk = 0, rst_n = 0;
  logic [1:0] data_line;
  logic link_en, out_valid, out_ready = 1;
  logic [15:0] out_data;
  logic [7:0] order_errs, frame_errs, overflows;
  int checks = 0, failures = 0;
  // two small serializers in the testbench, one per line
  logic [17:0] sh [2] = '{'0, '0};
  int left [2] = '{0, 0};
  logic [15:0] exp_q [$];
  int n_sent = 0, n_recv = 0, n_flag_low = 0;
  bit force_lane1 = 0;

  always #5 clk = ~clk;
  acc_link_rx #(.DEPTH(16)) dut (.clk, .rst_n, .data_line, .link_en,
    .out_valid, .out_ready, .out_data, .order_errs, .frame_errs, .overflows);

  assign data_line = {sh[1][17], sh[0][17]};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // sender: starts the next word on its lane when the lane is free and
  // link_en is high
  int to_send = 0;
  always @(posedge clk) begin
    int l;
    l = force_lane1 ? 1 : n_sent % 2;
    for (int k = 0; k < 2; k++)
      if (left[k] > 0) begin sh[k] <= {sh[k][16:0], 1'b0}; left[k] <= left[k] - 1; end
    if (rst_n && to_send > 0 && link_en && left[l] == 0) begin
      logic [15:0] w;
      w = 16'($urandom);
      sh[l] <= {1'b1, w, 1'b0};
      left[l] <= 18;
      exp_q.push_back(w);
      n_sent <= n_sent + 1;
      to_send <= to_send - 1;
    end
    if (rst_n && !link_en) n_flag_low++;
    if (rst_n && out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_data == exp_q[0], $sformatf("word %h", out_data));
      void'(exp_q.pop_front());
      n_recv++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) to_send = 200;
    // host stalls for long stretches so the FIFO fills
    for (int i = 0; i < 40; i++) begin
      out_ready = 0;
      repeat ($urandom_range(50, 200)) @(negedge clk);
      out_ready = 1;
      repeat ($urandom_range(5, 60)) @(negedge clk);
    end
    out_ready = 1;
    while (to_send > 0 || exp_q.size() > 0) @(negedge clk);
    repeat (40) @(negedge clk);
    check(n_recv == 200, $sformatf("received %0d", n_recv));
    check(n_flag_low > 0, "flow-control flag dropped");
    check(overflows == 0 && frame_errs == 0 && order_errs == 0, "no errors");
    // two words on line 1 while line 0 is expected each time
    force_lane1 = 1;
    @(negedge clk) to_send = 2;
    repeat (80) @(negedge clk);
    check(order_errs == 8'd2, $sformatf("order error count %0d", order_errs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
