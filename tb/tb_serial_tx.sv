// tb_serial_tx: checks that serial_tx sends each word as one 18-bit frame
// (start 1, 16 bits MSB first, stop 0), that frames can follow back to
// back, and that ready is low for exactly 18 clocks after a word is taken.
module tb_serial_tx;
  logic clk = 0, rst_n = 0;
  logic valid = 0, ready, line;
  logic [15:0] data = 0;
  logic got, bad;
  logic [15:0] word;
  int checks = 0, failures = 0;
  logic [15:0] sent [$];

  always #5 clk = ~clk;
  serial_tx #(.W(16)) dut (.clk, .rst_n, .valid, .ready, .data, .line);
  tb_sniffer #(.W(16)) snf (.clk, .line, .got, .word, .bad);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ready must stay low for exactly one frame (18 clocks) after a take
  int low_cnt = -1;
  always @(posedge clk) begin
    if (low_cnt >= 0) begin
      if (!ready) low_cnt <= low_cnt + 1;
      else begin
        check(low_cnt == 18, $sformatf("frame length %0d", low_cnt));
        low_cnt <= -1;
      end
    end
    if (rst_n && valid && ready) low_cnt <= 0;
  end
  always @(posedge clk) begin
    if (got) begin
      logic [15:0] exp;
      exp = sent.pop_front();
      check(word == exp, $sformatf("word %h exp %h", word, exp));
    end
    if (bad) check(0, "stop bit");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(ready && !line, "idle after reset");
    // back to back: 20 words, valid held
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      data  = 16'($urandom);
      valid = 1;
      while (!ready) @(negedge clk);
      sent.push_back(data);
      @(negedge clk);
      valid = 0;
      if (i % 3 == 0) repeat ($urandom_range(0, 4)) @(negedge clk);
    end
    repeat (30) @(posedge clk);
    check(sent.size() == 0, "all words seen");
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
