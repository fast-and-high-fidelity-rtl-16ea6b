// tb_photon_counter -- self-checking test of the per-sub-bin photon counter.
//
// The test generates the synchronised gate, its edge strobes, a sub-bin end strobe
// every P cycles from the gate's rising edge, and PMT edge strobes. The expected count
// of sub-bin b is the number of PMT strobes in cycles b*P .. b*P+P-1 after the rise,
// for complete sub-bins only. Shots: the count pattern printed in the paper's timing
// diagram (0 1 2 0 1 0 0 0 1 3 over ten sub-bins), random shots with a cut last
// sub-bin, PMT edges on the first and last cycle of a sub-bin, a shot longer than
// MAX_BINS sub-bins (overflow), and a small-width instance for saturation.
module tb_photon_counter;
  localparam int P = 20;       // sub-bin length in cycles for this test
  localparam int MB = 10;

  logic clk = 1'b0, rst = 1'b1;
  logic gate = 0, gate_rise = 0, gate_fall = 0, pmt_rise = 0, bin_end = 0;
  logic clear, cnt_we, gate_done, overflow;
  logic [3:0] cnt_idx;
  logic [15:0] cnt_val;
  logic [7:0] n_bins;
  // saturation instance: 2-bit counts, 4 stored sub-bins
  logic clear2, cnt_we2, gate_done2, overflow2;
  logic [1:0] cnt_idx2, cnt_val2;
  logic [7:0] n_bins2;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  photon_counter dut (.clk, .rst, .gate, .gate_rise, .gate_fall, .pmt_rise, .bin_end,
                      .clear, .cnt_we, .cnt_idx, .cnt_val, .gate_done, .n_bins, .overflow);
  photon_counter #(.MAX_BINS(4), .CNT_W(2)) dut2 (
    .clk, .rst, .gate, .gate_rise, .gate_fall, .pmt_rise, .bin_end,
    .clear(clear2), .cnt_we(cnt_we2), .cnt_idx(cnt_idx2), .cnt_val(cnt_val2),
    .gate_done(gate_done2), .n_bins(n_bins2), .overflow(overflow2));

  // What the DUTs reported during a shot.
  int got   [64];
  int got2  [4];
  int n_we, n_we2, done_bins;
  logic done_seen, ovf_at_done, ovf2_at_done;
  always @(posedge clk) begin
    if (!rst) begin
      if (cnt_we) begin
        got[cnt_idx] = int'(cnt_val);
        n_we++;
      end
      if (cnt_we2) begin
        got2[cnt_idx2] = int'(cnt_val2);
        n_we2++;
      end
      if (gate_done) begin
        done_seen = 1'b1;
        done_bins = int'(n_bins);
        ovf_at_done = overflow;
        ovf2_at_done = overflow2;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One shot of `len` gate cycles; pmt[t] says whether a PMT edge arrives in cycle t.
  task automatic shot(input int len, input bit pmt[]);
    int exp_cnt[64];
    int nb;
    nb = len / P;
    foreach (exp_cnt[i]) exp_cnt[i] = 0;
    for (int t = 0; t < nb * P; t++) if (pmt[t]) exp_cnt[t / P]++;
    n_we = 0; n_we2 = 0; done_seen = 0;
    foreach (got[i]) got[i] = -1;
    foreach (got2[i]) got2[i] = -1;
    for (int t = 0; t < len; t++) begin
      gate      <= 1'b1;
      gate_rise <= (t == 0);
      bin_end   <= ((t % P) == P - 1);
      pmt_rise  <= pmt[t];
      @(posedge clk);
    end
    gate <= 1'b0; gate_rise <= 1'b0; bin_end <= 1'b0; pmt_rise <= 1'b0; gate_fall <= 1'b1;
    @(posedge clk);
    gate_fall <= 1'b0;
    @(posedge clk);
    check(done_seen, "gate_done strobe");
    check(done_bins == nb, $sformatf("n_bins %0d exp %0d", done_bins, nb));
    check(n_we == ((nb < MB) ? nb : MB), $sformatf("stores %0d", n_we));
    check(ovf_at_done == (nb > MB), "overflow flag");
    check(ovf2_at_done == (nb > 4), "overflow flag (4 bins)");
    for (int b = 0; b < nb && b < MB; b++)
      check(got[b] == exp_cnt[b], $sformatf("bin %0d got %0d exp %0d", b, got[b], exp_cnt[b]));
    for (int b = 0; b < nb && b < 4; b++)
      check(got2[b] == ((exp_cnt[b] > 3) ? 3 : exp_cnt[b]),
            $sformatf("sat bin %0d got %0d exp %0d", b, got2[b], exp_cnt[b]));
    repeat (3) @(posedge clk);
  endtask

  initial begin
    bit pmt[];
    int fig[10] = '{0, 1, 2, 0, 1, 0, 0, 0, 1, 3};
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (2) @(posedge clk);

    // Paper's timing-diagram pattern, ten complete sub-bins.
    pmt = new[10 * P];
    foreach (pmt[t]) pmt[t] = 0;
    foreach (fig[b]) for (int j = 0; j < fig[b]; j++) pmt[b * P + 3 + 4 * j] = 1;
    shot(10 * P, pmt);

    // PMT edges on the first and the last cycle of sub-bins.
    pmt = new[3 * P + 5];
    foreach (pmt[t]) pmt[t] = ((t % P) == 0) || ((t % P) == P - 1);
    shot(3 * P + 5, pmt);

    // Random shots, some longer than MAX_BINS sub-bins.
    for (int s = 0; s < 20; s++) begin
      int len;
      len = P + int'($urandom_range(0, 13 * P));
      pmt = new[len];
      foreach (pmt[t]) pmt[t] = ($urandom_range(0, 99) < 25);
      shot(len, pmt);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
