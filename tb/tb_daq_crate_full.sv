// tb_daq_crate_full: the whole system with every parameter at its default:
// a crate master, eight slave central cards, eight ACDC boards each, 256
// cells per channel, 1920 channels. The boards are switched to external
// trigger mode over the links, the master issues one host trigger, and all
// 64 packets of 7682 words must reach the host, each checked word by word
// against the PSEC4 model of its card and board. All boards send at once;
// the host then receives one word per clock, so the event (491,648 words)
// takes a little over half a million clocks.
module tb_daq_crate_full;
  import daq_pkg::*;
  localparam int NA = N_ACC, NB = N_ACDC;
  localparam int NWORDS = 2 + N_CH * N_CELLS;
  logic clk = 0, rst_n = 1;
  logic [29:0] self_bits [NA][NB];
  logic [NB-1:0] onboard_trig [NA];
  logic [4:0] psec4_trig [NA][NB];
  logic [2:0] psec4_ch [NA][NB];
  logic [7:0] psec4_cell [NA][NB];
  logic [11:0] psec4_data [NA][NB][5];
  logic [11:0] threshold [NA][NB][5];
  logic ext_trig = 0, host_trig = 0;
  logic [2:0] trig_src_en = 3'b010;
  logic [NA-1:0] trig_card_mask = '1, card_ext_trig = '0;
  logic [NB-1:0] trig_board_mask [NA];
  logic cmd_valid = 0, cmd_ready;
  logic [NA-1:0] cmd_card_mask = '1;
  logic [NB-1:0] cmd_mask = '1;
  logic [15:0] cmd_word = 0;
  logic out_valid, out_ready = 1;
  crate_word_t out_word;
  logic [NB-1:0] busy_status [NA];
  logic [7:0] link_errs [NA];
  logic [15:0] n_kept [NA][NB], n_dropped [NA][NB];
  logic [15:0] n_global, n_packets;
  int checks = 0, failures = 0;
  int cnt [NA][NB];
  int bad_words = 0, total_pkts = 0, cyc = 0, t_trig = 0, t_done = 0;

  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  daq_crate dut (
    .clk, .rst_n, .self_bits, .onboard_trig, .psec4_trig, .psec4_ch, .psec4_cell,
    .psec4_data, .threshold, .ext_trig, .host_trig, .trig_src_en, .trig_card_mask,
    .trig_board_mask, .card_ext_trig, .cmd_valid, .cmd_ready, .cmd_card_mask,
    .cmd_mask, .cmd_word, .out_valid, .out_ready, .out_word, .busy_status,
    .link_errs, .n_kept, .n_dropped, .n_global, .n_packets);

  for (genvar a = 0; a < NA; a++) begin : g_a
    for (genvar b = 0; b < NB; b++) begin : g_b
      psec4_model #(.BOARD(8 * a + b)) chips (.clk, .ch(psec4_ch[a][b]),
        .cell_addr(psec4_cell[a][b]), .data(psec4_data[a][b]));
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] expected(int id, int i);
    int s, chip, cl, ch;
    if (i == 0) return {4'hE, 12'd0};
    if (i == NWORDS - 1) return {4'hF, 12'd0};
    s = i - 1; chip = s % 5; cl = (s / 5) % N_CELLS; ch = s / (5 * N_CELLS);
    return {1'b0, 3'(chip), 12'((id * 1009 + chip * 331 + ch * 97 + cl * 13 + 5) % 4096)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      int a, b;
      a = int'(out_word.card); b = int'(out_word.board);
      if (out_word.word != expected(8 * a + b, cnt[a][b])) begin
        bad_words++;
        if (bad_words < 10) $display("FAIL card %0d board %0d word %0d = %h", a, b, cnt[a][b], out_word.word);
      end
      cnt[a][b]++;
      if (out_word.last) begin total_pkts++; t_done = cyc; end
    end
  end

  initial begin
    for (int a = 0; a < NA; a++) begin
      onboard_trig[a] = '0; trig_board_mask[a] = '1;
      for (int b = 0; b < NB; b++) begin self_bits[a][b] = '0; cnt[a][b] = 0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    @(negedge clk) begin cmd_valid = 1; cmd_word = {4'd0, 12'(TRIG_EXTERNAL)}; end
    @(negedge clk) cmd_valid = 0;
    repeat (30) @(negedge clk);
    @(negedge clk) begin host_trig = 1; t_trig = cyc; end
    @(negedge clk) host_trig = 0;
    while (total_pkts < NA * NB && cyc - t_trig < 1000000) @(negedge clk);
    repeat (20) @(negedge clk);
    check(total_pkts == NA * NB, $sformatf("%0d packets", total_pkts));
    for (int a = 0; a < NA; a++)
      for (int b = 0; b < NB; b++)
        check(cnt[a][b] == NWORDS, $sformatf("card %0d board %0d: %0d words", a, b, cnt[a][b]));
    check(bad_words == 0, $sformatf("%0d wrong words", bad_words));
    for (int a = 0; a < NA; a++) check(link_errs[a] == 0 && busy_status[a] == 0, "no errors, re-armed");
    check(n_global == 16'd1 && n_packets == 16'(NA * NB), "master counters");
    $display("full-size event: %0d words from %0d boards in %0d clocks", NA * NB * NWORDS, NA * NB, t_done - t_trig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
