// tb_acdc_readout: runs acdc_readout with 4 cells per channel against the
// PSEC4 readout model and two lane models that behave like serializers
// (busy for 18 clocks after taking a word). Checks every packet word and
// its lane, the event number, the done pulse, that nothing is taken while
// link_en is low, and the packet time (9 to 10 clocks per word).
module tb_acdc_readout;
  import daq_pkg::*;
  localparam int NC = 4;
  localparam int NWORDS = 2 + 30 * NC;
  logic clk = 0, rst_n = 0;
  logic event_start = 0, link_en = 1;
  logic [2:0] psec4_ch;
  logic [7:0] psec4_cell;
  logic [11:0] psec4_data [5];
  logic [1:0] lane_valid, lane_ready;
  logic [15:0] lane_data;
  logic done;
  logic [11:0] event_num;
  int checks = 0, failures = 0;
  int busy_cnt [2] = '{0, 0};
  logic [15:0] got [$];
  int got_lane [$];
  int n_done = 0, stall_takes = 0, cyc = 0;

  always #5 clk = ~clk;
  acdc_readout #(.N_CELLS_P(NC)) dut (.clk, .rst_n, .event_start, .link_en,
    .psec4_ch, .psec4_cell, .psec4_data, .lane_valid, .lane_ready, .lane_data,
    .done, .event_num);
  psec4_model #(.BOARD(3)) chips (.clk, .ch(psec4_ch), .cell_addr(psec4_cell), .data(psec4_data));

  assign lane_ready[0] = (busy_cnt[0] == 0);
  assign lane_ready[1] = (busy_cnt[1] == 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int l = 0; l < 2; l++) begin
      if (lane_valid[l] && lane_ready[l]) begin
        got.push_back(lane_data);
        got_lane.push_back(l);
        busy_cnt[l] <= 18;
        if (!link_en) stall_takes++;
      end else if (busy_cnt[l] > 0) busy_cnt[l] <= busy_cnt[l] - 1;
    end
    if (rst_n && done) n_done++;
    if (rst_n) check(!(lane_valid[0] && lane_valid[1]), "one lane at a time");
  end

  function automatic logic [15:0] exp_word(int i, int ev);
    int s, ch, cl, chip;
    if (i == 0) return {4'hE, 12'(ev)};
    if (i == NWORDS - 1) return {4'hF, 12'(ev)};
    s = i - 1;
    chip = s % 5; cl = (s / 5) % NC; ch = s / (5 * NC);
    return {1'b0, 3'(chip), chips.value(3, chip, ch, cl)};
  endfunction

  task automatic run_event(input int ev, input bit stall);
    int t0, t1;
    got.delete(); got_lane.delete();
    @(negedge clk) event_start = 1;
    t0 = cyc;
    @(negedge clk) event_start = 0;
    if (stall) begin
      repeat (200) @(negedge clk);
      link_en = 0;
      repeat (100) @(negedge clk);
      link_en = 1;
    end
    while (!done && cyc - t0 < 5000) @(negedge clk);
    t1 = cyc;
    check(done, "done pulse");
    check(got.size() == NWORDS, $sformatf("packet length %0d", got.size()));
    for (int i = 0; i < got.size() && i < NWORDS; i++) begin
      check(got[i] == exp_word(i, ev), $sformatf("word %0d: %h exp %h", i, got[i], exp_word(i, ev)));
      check(got_lane[i] == i % 2, $sformatf("word %0d lane", i));
    end
    if (!stall)
      check(t1 - t0 >= 9 * (NWORDS - 1) && t1 - t0 <= 10 * NWORDS,
            $sformatf("packet time %0d cycles for %0d words", t1 - t0, NWORDS));
    else
      check(t1 - t0 >= 9 * (NWORDS - 1) + 90, "stall lengthens the packet");
    repeat (30) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_event(0, 0);
    check(event_num == 12'd1, "event number increments");
    run_event(1, 1);
    check(stall_takes == 0, "no word taken while link_en low");
    check(n_done == 2, "two done pulses");
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
