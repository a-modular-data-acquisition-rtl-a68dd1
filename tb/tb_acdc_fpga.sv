// tb_acdc_fpga: one ACDC control FPGA (4 cells per channel) with the PSEC4
// model. The testbench sends configuration frames on the config line,
// raises triggers, and decodes both data lines with independent frame
// decoders. Checks the thresholds and mask set over the link, a packet in
// external mode (system trigger) and in self mode (discriminator bit),
// the busy flag and PSEC4 trigger lines during readout, board_trig_out,
// and a software trigger sent as a config command.
module tb_acdc_fpga;
  import daq_pkg::*;
  localparam int NC = 4;
  localparam int NWORDS = 2 + 30 * NC;
  logic clk = 0, rst_n = 1;
  logic cfg_line = 0, sys_trig = 0, link_en = 1;
  logic [1:0] data_line;
  logic board_trig_out, busy;
  logic [29:0] self_bits = '0;
  logic onboard_trig = 0;
  logic [4:0] psec4_trig;
  logic [2:0] psec4_ch;
  logic [7:0] psec4_cell;
  logic [11:0] psec4_data [5];
  logic [11:0] threshold [5];
  logic [11:0] event_num;
  logic [15:0] n_kept, n_dropped;
  logic [1:0] got, bad;
  logic [15:0] word [2];
  logic [15:0] rx [$];
  int checks = 0, failures = 0;
  int busy_cycles = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  acdc_fpga #(.N_CELLS_P(NC)) dut (.clk, .rst_n, .cfg_line, .sys_trig, .link_en,
    .data_line, .board_trig_out, .busy, .self_bits, .onboard_trig, .psec4_trig,
    .psec4_ch, .psec4_cell, .psec4_data, .threshold, .event_num, .n_kept, .n_dropped);
  psec4_model #(.BOARD(5)) chips (.clk, .ch(psec4_ch), .cell_addr(psec4_cell), .data(psec4_data));
  for (genvar l = 0; l < 2; l++) begin : g_snf
    tb_sniffer #(.W(16)) snf (.clk, .line(data_line[l]), .got(got[l]), .word(word[l]), .bad(bad[l]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (got[0]) rx.push_back(word[0]);
    if (got[1]) rx.push_back(word[1]);
    if (|bad) check(0, "data frame error");
    if (rst_n && busy) begin
      busy_cycles++;
      if (psec4_trig != 5'h1f) check(0, "PSEC4 trigger lines follow busy");
    end
  end

  task automatic send_cfg(input logic [15:0] w);
    logic [17:0] f;
    f = {1'b1, w, 1'b0};
    for (int i = 17; i >= 0; i--) @(negedge clk) cfg_line = f[i];
    @(negedge clk) cfg_line = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic expect_packet(input int ev);
    int t;
    t = 0;
    while (rx.size() < NWORDS && t < 3000) begin @(negedge clk); t++; end
    repeat (5) @(negedge clk);
    check(rx.size() == NWORDS, $sformatf("packet length %0d", rx.size()));
    check(rx.size() > 0 && rx[0] == {4'hE, 12'(ev)}, "header");
    check(rx.size() > 0 && rx[rx.size()-1] == {4'hF, 12'(ev)}, "trailer");
    for (int i = 1; i < NWORDS - 1 && i < rx.size(); i++) begin
      int s, chip, cl, ch;
      s = i - 1; chip = s % 5; cl = (s / 5) % NC; ch = s / (5 * NC);
      check(rx[i] == {1'b0, 3'(chip), chips.value(5, chip, ch, cl)}, $sformatf("sample %0d", i));
    end
    rx.delete();
    check(!busy && psec4_trig == 0, "re-armed after packet");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // thresholds of the five chips
    for (int i = 0; i < 5; i++) send_cfg({4'(5 + i), 12'(100 * i + 7)});
    for (int i = 0; i < 5; i++) check(threshold[i] == 12'(100 * i + 7), "threshold over link");
    // external mode, system trigger
    send_cfg({4'd0, 12'd0});
    sys_trig = 1; repeat (2) @(negedge clk); sys_trig = 0;
    repeat (3) @(negedge clk);
    check(busy, "busy during readout");
    expect_packet(0);
    // self mode, channel 17 only
    send_cfg({4'd0, 12'd1});
    send_cfg({4'd1, 12'h000});
    send_cfg({4'd2, 12'h020});
    send_cfg({4'd3, 12'h000});
    self_bits[3] = 1;   // masked out
    repeat (10) @(negedge clk);
    check(!busy && !board_trig_out, "masked channel ignored");
    self_bits = '0; self_bits[17] = 1;
    repeat (4) @(negedge clk);
    check(board_trig_out && busy, "self trigger");
    self_bits = '0;
    expect_packet(1);
    // software trigger command
    send_cfg({4'd10, 12'd1});
    expect_packet(2);
    check(n_kept == 16'd3 && event_num == 12'd3, "event counters");
    check(busy_cycles > 3 * 9 * NWORDS - 100, "busy for the packet times");
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
