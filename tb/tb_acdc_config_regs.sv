// tb_acdc_config_regs: writes every register with random values and
// checks the decoded trigger settings, thresholds, the software-trigger
// pulse, the bad-address counter and the reset values.
module tb_acdc_config_regs;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_valid = 0;
  logic [15:0] cfg_word = 0;
  trig_cfg_t trig_cfg;
  logic [11:0] threshold [5];
  logic soft_trig;
  logic [7:0] bad_addr;
  int checks = 0, failures = 0;
  int n_soft = 0;

  always #5 clk = ~clk;
  acdc_config_regs dut (.clk, .rst_n, .cfg_valid, .cfg_word, .trig_cfg,
                        .threshold, .soft_trig, .bad_addr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [3:0] a, input logic [11:0] v);
    @(negedge clk) begin cfg_valid = 1; cfg_word = {a, v}; end
    @(negedge clk) cfg_valid = 0;
  endtask

  always @(posedge clk) if (rst_n && soft_trig) n_soft++;

  initial begin
    logic [29:0] m;
    logic [11:0] th [5];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(trig_cfg.mode == TRIG_SELF && trig_cfg.ch_mask == '1 &&
          trig_cfg.window == 12'd40, "reset values");
    for (int i = 0; i < 5; i++) check(threshold[i] == 12'h800, "reset threshold");
    for (int r = 0; r < 4; r++) begin
      trig_mode_e md;
      logic [11:0] win;
      md  = trig_mode_e'(r);
      m   = 30'($urandom);
      win = 12'($urandom);
      for (int i = 0; i < 5; i++) th[i] = 12'($urandom);
      wr(4'd0, {10'd0, 2'(r)});
      wr(4'd1, m[11:0]);
      wr(4'd2, m[23:12]);
      wr(4'd3, {6'd0, m[29:24]});
      wr(4'd4, win);
      for (int i = 0; i < 5; i++) wr(4'(5 + i), th[i]);
      check(trig_cfg.mode == md, "mode");
      check(trig_cfg.ch_mask == m, $sformatf("mask %h exp %h", trig_cfg.ch_mask, m));
      check(trig_cfg.window == win, "window");
      for (int i = 0; i < 5; i++) check(threshold[i] == th[i], $sformatf("threshold %0d", i));
    end
    wr(4'd10, 12'h001);
    wr(4'd10, 12'h000);
    wr(4'd10, 12'h001);
    @(negedge clk);
    check(n_soft == 2, $sformatf("soft triggers %0d", n_soft));
    wr(4'd12, 12'h123);
    wr(4'd15, 12'h123);
    @(negedge clk);
    check(bad_addr == 8'd2, "bad address count");
    check(trig_cfg.ch_mask == m, "mask untouched by bad address");
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
