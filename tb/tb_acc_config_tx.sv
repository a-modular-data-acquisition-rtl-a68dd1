// tb_acc_config_tx: sends host commands with random board masks and
// decodes every board's config line with an independent frame decoder.
// Checks that each selected board, and only those, receives the word, that
// cmd_ready is low for the 18-clock frame, and the command counter.
module tb_acc_config_tx;
  localparam int NB = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts at once
  logic cmd_valid = 0, cmd_ready;
  logic [NB-1:0] cmd_mask = 0, cfg_line;
  logic [15:0] cmd_word = 0;
  logic [15:0] n_sent;
  logic [NB-1:0] got, bad;
  logic [15:0] word [NB];
  int checks = 0, failures = 0;
  logic [15:0] exp [NB][$];
  int busy = 0, max_busy = 0;

  always #5 clk = ~clk;
  acc_config_tx #(.N_ACDC_P(NB)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready,
    .cmd_mask, .cmd_word, .cfg_line, .n_sent);
  for (genvar b = 0; b < NB; b++) begin : g_snf
    tb_sniffer #(.W(16)) snf (.clk, .line(cfg_line[b]), .got(got[b]), .word(word[b]), .bad(bad[b]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (got[b]) begin
        check(exp[b].size() > 0 && word[b] == exp[b][0], $sformatf("board %0d word %h", b, word[b]));
        if (exp[b].size() > 0) void'(exp[b].pop_front());
      end
      if (bad[b]) check(0, "frame error");
    end
    if (rst_n && !cmd_ready) busy <= busy + 1;
    else begin if (busy > max_busy) max_busy = busy; busy <= 0; end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 25; i++) begin
      @(negedge clk);
      cmd_valid = 1;
      cmd_word  = 16'($urandom);
      cmd_mask  = (i == 0) ? '1 : NB'($urandom);
      while (!cmd_ready) @(negedge clk);
      for (int b = 0; b < NB; b++) if (cmd_mask[b]) exp[b].push_back(cmd_word);
      @(negedge clk) cmd_valid = 0;
    end
    repeat (40) @(negedge clk);
    for (int b = 0; b < NB; b++) check(exp[b].size() == 0, $sformatf("board %0d got all", b));
    check(max_busy == 18, $sformatf("busy for %0d clocks", max_busy));
    check(n_sent == 16'd25, "command count");
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
