// tb_acc_trigger: checks each global-trigger source of acc_trigger with
// its enable on and off (external edge, host request, masked board
// trigger), the latency and length of the system-trigger pulse, that a
// held level triggers only once, and the trigger counter.
module tb_acc_trigger;
  logic clk = 0, rst_n = 0;
  logic [2:0] src_en = 0;
  logic [7:0] board_mask = 0, board_trig = 0;
  logic ext_trig = 0, host_trig = 0;
  logic sys_trig;
  logic [15:0] n_global;
  int checks = 0, failures = 0, n_exp = 0;

  always #5 clk = ~clk;
  acc_trigger #(.N_ACDC_P(8), .PULSE(2)) dut (.clk, .rst_n, .src_en, .board_mask,
    .ext_trig, .host_trig, .board_trig, .sys_trig, .n_global);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // watch sys_trig for max negedges: first high after n, high for len
  task automatic watch(input int max, output int n, output int len);
    n = -1; len = 0;
    for (int i = 1; i <= max; i++) begin
      @(negedge clk);
      if (sys_trig) begin
        if (n < 0) n = i;
        len++;
      end
    end
  endtask

  initial begin
    int n, len;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // external input, disabled then enabled
    ext_trig = 1; watch(12, n, len); ext_trig = 0;
    check(n == -1, "external disabled");
    src_en = 3'b001;
    repeat (4) @(negedge clk);
    ext_trig = 1; watch(12, n, len);
    check(n == 3 && len == 2, $sformatf("external: latency %0d length %0d", n, len));
    n_exp++;
    // held level does not re-trigger
    watch(12, n, len);
    check(n == -1, "held external level triggers once");
    ext_trig = 0; repeat (4) @(negedge clk);
    // host trigger
    host_trig = 1; @(negedge clk) host_trig = 0;
    watch(6, n, len);
    check(n == -1, "host disabled");
    src_en = 3'b010;
    host_trig = 1;
    fork
      watch(6, n, len);
      begin @(posedge clk); #1 host_trig = 0; end
    join
    check(n == 1 && len == 2, $sformatf("host: latency %0d length %0d", n, len));
    n_exp++;
    // board triggers with mask
    src_en = 3'b100; board_mask = 8'b0010_0000;
    board_trig = 8'b0000_0100; watch(12, n, len); board_trig = 0;
    check(n == -1, "masked-out board ignored");
    repeat (4) @(negedge clk);
    board_trig = 8'b0010_0000; watch(12, n, len); board_trig = 0;
    check(n == 3 && len == 2, $sformatf("board: latency %0d length %0d", n, len));
    n_exp++;
    repeat (4) @(negedge clk);
    check(n_global == 16'(n_exp), $sformatf("count %0d", n_global));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
