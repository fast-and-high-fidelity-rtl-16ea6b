// tb_freq_divider -- self-checking test of the gated sub-bin clock generator.
//
// Two instances run side by side: one at DIV = 10 for quick pattern checks and one at
// the default 3000 (30 us at 100 MHz) to check the sub-bin period. Expected values
// come from a cycle counter kept here, restarted with the gate: bin_end must fire
// exactly when (cycles since gate rise) mod DIV = DIV-1, clk2 must be high in the first
// DIV/2 cycles of every sub-bin, and both must stay low while the gate is low. The
// 1 us marker must be high in the MARK_CYC cycles after each bin_end, five times for a
// 160 us gate.
module tb_freq_divider;
  logic clk = 1'b0;
  logic rst = 1'b1;
  logic gate = 1'b0, gate_rise = 1'b0;
  logic clk2_s, bin_end_s, clk2_f, bin_end_f, mark_s, mark_f;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  freq_divider #(.DIV(10), .MARK_CYC(3)) dut_s (.clk, .rst, .gate, .gate_rise,
                                                .clk2(clk2_s), .bin_end(bin_end_s),
                                                .mark(mark_s));
  freq_divider dut_f (.clk, .rst, .gate, .gate_rise, .clk2(clk2_f), .bin_end(bin_end_f),
                      .mark(mark_f));

  // Marker reference: high for MARK_CYC cycles after each bin_end.
  int since_s = 1000, since_f = 100000;
  int n_mark_f = 0;
  logic mark_f_q = 0;
  always @(negedge clk) begin
    if (!rst) begin
      checks++;
      if (mark_s !== (since_s >= 1 && since_s <= 3) ||
          mark_f !== (since_f >= 1 && since_f <= 100)) begin
        failures++;
        $display("FAIL mark since_s=%0d mark_s=%b since_f=%0d mark_f=%b", since_s, mark_s,
                 since_f, mark_f);
      end
      if (mark_f && !mark_f_q) n_mark_f++;
      mark_f_q = mark_f;
      since_s = bin_end_s ? 1 : since_s + 1;
      since_f = bin_end_f ? 1 : since_f + 1;
    end
  end

  // Reference: cycles since the gate's rising edge (the rise cycle is 0).
  int t = 0;
  int n_end_s = 0, n_end_f = 0, last_end_f = -1, period_f = 0;
  always @(negedge clk) begin
    if (!rst) begin
      if (gate) begin
        checks++;
        if (bin_end_s !== ((t % 10) == 9) || clk2_s !== ((t % 10) < 5)) begin
          failures++;
          $display("FAIL small t=%0d bin_end=%b clk2=%b", t, bin_end_s, clk2_s);
        end
        checks++;
        if (bin_end_f !== ((t % 3000) == 2999) || clk2_f !== ((t % 3000) < 1500)) begin
          failures++;
          $display("FAIL full t=%0d bin_end=%b clk2=%b", t, bin_end_f, clk2_f);
        end
        if (bin_end_s) n_end_s++;
        if (bin_end_f) begin
          n_end_f++;
          if (last_end_f >= 0) period_f = t - last_end_f;
          last_end_f = t;
        end
      end else begin
        checks++;
        if (bin_end_s || clk2_s || bin_end_f || clk2_f) begin
          failures++;
          $display("FAIL outputs active with gate low");
        end
      end
    end
  end

  task automatic run_gate(input int len);
    @(posedge clk);
    gate <= 1'b1; gate_rise <= 1'b1;
    @(posedge clk);
    gate_rise <= 1'b0;
    repeat (len - 1) @(posedge clk);
    gate <= 1'b0;
    repeat (7) @(posedge clk);
  endtask

  always @(posedge clk) t <= gate_rise ? 1 : (gate ? t + 1 : 0);

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    // 53 cycles: 5 complete small sub-bins, then a cut one.
    n_end_s = 0;
    run_gate(53);
    checks++; if (n_end_s != 5) begin failures++; $display("FAIL n_end_s=%0d", n_end_s); end
    // Second shot restarts the phase from zero.
    n_end_s = 0;
    run_gate(27);
    checks++; if (n_end_s != 2) begin failures++; $display("FAIL n_end_s=%0d", n_end_s); end
    // 160 us gate at full size: five 30 us sub-bins, the last 10 us dropped.
    n_end_f = 0; last_end_f = -1;
    n_mark_f = 0;
    run_gate(16000);
    repeat (200) @(posedge clk);
    checks++; if (n_mark_f != 5) begin failures++; $display("FAIL marks=%0d", n_mark_f); end
    checks++; if (n_end_f != 5) begin failures++; $display("FAIL n_end_f=%0d", n_end_f); end
    checks++; if (period_f != 3000) begin failures++; $display("FAIL period=%0d", period_f); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
