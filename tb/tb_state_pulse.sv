// tb_state_pulse -- self-checking test of the state pin burst generator.
//
// With the defaults (3 pulses, 1 us high, 1 us low at 100 MHz) a bright trigger must
// give the pin high in cycles 1-100, 201-300 and 401-500 after the trigger cycle and low
// elsewhere; a dark trigger must leave it low. A bright trigger in the middle of a
// burst restarts it. Expected waveforms are written out here cycle by cycle.
module tb_state_pulse;
  import readout_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic trig = 1'b0;
  qubit_state_e state = STATE_DARK;
  logic pin, busy;
  int checks = 0, failures = 0;
  int n_rise;

  always #5 clk = ~clk;

  state_pulse dut (.clk, .rst, .trig, .state, .pin, .busy);

  function automatic bit expect_high(input int c);
    return (c >= 1 && c <= 100) || (c >= 201 && c <= 300) || (c >= 401 && c <= 500);
  endfunction

  // Fire a trigger, then compare the pin for `len` cycles (cycle 1 = first after trig).
  task automatic fire(input qubit_state_e s, input int len, input string name);
    int bad = 0;
    logic prev = 1'b0;
    n_rise = 0;
    @(negedge clk);
    trig = 1'b1; state = s;
    @(negedge clk);
    trig = 1'b0;
    for (int c = 1; c <= len; c++) begin
      if (pin !== ((s == STATE_BRIGHT) && expect_high(c))) bad++;
      if (pin && !prev) n_rise++;
      prev = pin;
      @(negedge clk);
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d wrong cycles", name, bad);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    fire(STATE_BRIGHT, 700, "bright");
    checks++; if (n_rise != 3) begin failures++; $display("FAIL pulses %0d", n_rise); end
    checks++; if (busy) begin failures++; $display("FAIL busy after burst"); end
    fire(STATE_DARK, 700, "dark");
    checks++; if (n_rise != 0) begin failures++; $display("FAIL dark pulses %0d", n_rise); end
    // Restart: a second bright trigger 250 cycles into a burst.
    fire(STATE_BRIGHT, 249, "first part");
    fire(STATE_BRIGHT, 700, "restarted");
    checks++; if (n_rise != 3) begin failures++; $display("FAIL restart pulses %0d", n_rise); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
