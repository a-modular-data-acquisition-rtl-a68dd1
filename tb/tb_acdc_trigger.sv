// tb_acdc_trigger: exercises every trigger mode of acdc_trigger: self
// trigger on an enabled and on a masked channel, external trigger from the
// system line and from the on-board input, coincidence kept and timed out,
// software trigger and the off mode. Checks the latency of event_start,
// that a discriminator bit stops the chips with no clock delay,
// that the PSEC4 trigger lines stay high until readout_done, the release
// time after a coincidence timeout, and the event counters.
module tb_acdc_trigger;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  trig_mode_e mode = TRIG_SELF;
  logic [29:0] ch_mask = '1, self_bits = '0;
  logic [11:0] window = 12'd10;
  logic sys_trig = 0, onboard_trig = 0, soft_trig = 0, readout_done = 0;
  logic [4:0] psec4_trig;
  logic board_trig_out, event_start, busy;
  logic [15:0] n_kept, n_dropped;
  int checks = 0, failures = 0;
  int exp_kept = 0, exp_dropped = 0;

  always #5 clk = ~clk;
  acdc_trigger dut (.clk, .rst_n, .mode, .ch_mask, .window, .self_bits,
                    .sys_trig, .onboard_trig, .soft_trig, .readout_done,
                    .psec4_trig, .board_trig_out, .event_start, .busy,
                    .n_kept, .n_dropped);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // negedges from now until event_start is seen, or -1 within max
  task automatic wait_start(input int max, output int n);
    n = -1;
    for (int i = 1; i <= max; i++) begin
      @(negedge clk);
      if (event_start) begin n = i; break; end
    end
  endtask

  task automatic finish_readout();
    repeat (5) @(negedge clk);
    check(psec4_trig == 5'h1f && busy, "chips held until readout done");
    readout_done = 1;
    @(negedge clk) readout_done = 0;
    check(psec4_trig == 5'h00 && !busy, "re-armed after readout");
    self_bits = '0; sys_trig = 0; onboard_trig = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    check(psec4_trig == 0 && !busy, "armed after reset");

    // self trigger on an enabled channel: 2 sync stages + 1 decision
    mode = TRIG_SELF; ch_mask = 30'h0000_0010;
    self_bits = 30'h0000_0010;
    wait_start(10, n); exp_kept++;
    check(n == 3, $sformatf("self latency %0d", n));
    check(board_trig_out, "board trigger out follows local");
    finish_readout();

    // masked channel: nothing happens, not even board_trig_out
    self_bits = 30'h2000_0000;
    #1 check(psec4_trig == 0, "masked channel does not stop the chips");
    wait_start(20, n);
    check(n == -1 && !board_trig_out, "masked channel ignored");
    self_bits = '0;
    // system trigger ignored in self mode
    sys_trig = 1;
    wait_start(10, n);
    check(n == -1, "sys trigger ignored in self mode");
    sys_trig = 0; @(negedge clk);

    // external mode: system trigger and on-board input
    mode = TRIG_EXTERNAL; ch_mask = '1;
    self_bits = 30'h1;
    wait_start(10, n);
    check(n == -1, "local ignored in external mode");
    self_bits = '0;
    sys_trig = 1;
    wait_start(10, n); exp_kept++;
    check(n == 1, $sformatf("external latency %0d", n));
    finish_readout();
    onboard_trig = 1;
    wait_start(10, n); exp_kept++;
    check(n == 1, "on-board trigger input");
    finish_readout();

    // coincidence kept: local, then system trigger 6 cycles later
    mode = TRIG_COINC; window = 12'd10;
    // a one-cycle discriminator pulse: the chips stop with no clock delay
    // and stay stopped while the pulse passes the synchroniser
    self_bits = 30'h0400_0000;
    #1 check(psec4_trig == 5'h1f && !busy, "chips stopped at once by the fast path");
    @(negedge clk) self_bits = '0;
    n = 0;
    repeat (8) begin @(negedge clk); if (psec4_trig != 5'h1f) n++; end
    check(n == 0 && busy && !event_start, "chips stay stopped by local trigger");
    sys_trig = 1;
    wait_start(3, n); exp_kept++;
    check(n == 1, "coincidence accepted");
    finish_readout();

    // coincidence timeout: no system trigger; chips released after window
    self_bits = 30'h0400_0000;
    repeat (3) @(negedge clk);
    check(psec4_trig == 5'h1f, "held while waiting");
    n = 0;
    while (busy && n < 100) begin @(negedge clk); n++; end
    exp_dropped++;
    check(n == 10, $sformatf("released after %0d cycles", n));
    wait_start(10, n);
    check(n == -1, "no event after timeout");
    self_bits = '0;
    repeat (3) @(negedge clk);
    // system trigger alone does nothing in coincidence mode
    sys_trig = 1;
    wait_start(10, n);
    check(n == -1 && !busy, "system trigger alone ignored");
    sys_trig = 0;

    // software trigger in self mode
    mode = TRIG_SELF;
    @(negedge clk) soft_trig = 1;
    @(negedge clk) soft_trig = 0;
    check(event_start, "software trigger"); exp_kept++;
    finish_readout();

    // off mode
    mode = TRIG_OFF;
    self_bits = '1; sys_trig = 1; soft_trig = 1;
    @(negedge clk) soft_trig = 0;
    wait_start(10, n);
    check(n == -1 && !busy, "off mode");
    self_bits = '0; sys_trig = 0;

    check(n_kept == 16'(exp_kept), $sformatf("kept %0d exp %0d", n_kept, exp_kept));
    check(n_dropped == 16'(exp_dropped), $sformatf("dropped %0d", n_dropped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
