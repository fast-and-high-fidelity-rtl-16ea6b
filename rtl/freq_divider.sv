// freq_divider -- gated sub-bin clock generator (100 MHz -> 33.3 kHz).
//
// The paper's frequency divider turns the 100 MHz system clock into a ~33.3 kHz clock
// (CLK2) whose period is one 30 us sub-bin. CLK2 starts on the rising edge of the gate
// and stops on its falling edge, so the sub-bin boundaries are locked to the gate.
// Here the divider is a counter that restarts at zero on the gate's rising edge and
// wraps every DIV cycles. Instead of driving a derived clock, it keeps everything on
// the 100 MHz clock: `clk2` is the divided square wave (high for the first half of
// each sub-bin, as drawn in the paper's timing diagram) and `bin_end` is a one-cycle
// strobe in the last cycle of each complete sub-bin; the counter uses the strobe.
// While the gate is low, clk2, bin_end and the phase counter are held at zero.
// `mark` is the "sampling clock sign" seen on the oscilloscope in the paper's Fig. 6: a
// pulse of MARK_CYC cycles (1 us) starting in the cycle after each bin_end, one per
// complete sub-bin. It is for observation only; placing it at the sub-bin end is this
// design's reading of the figure.
// Interface: `gate` and `gate_rise` come from a synchroniser. Timing: the first sub-bin
// begins in the cycle where gate_rise is high; bin_end fires DIV-1 cycles later and
// then every DIV cycles while the gate stays high.
// The divide ratio (30 us at 100 MHz = 3000) follows the paper; the duty cycle and the
// strobe are this design's choices.
module freq_divider #(
  parameter int unsigned DIV      = readout_pkg::SUBBIN_DIV,
  parameter int unsigned MARK_CYC = readout_pkg::US_CYC      // 1 us
) (
  input  logic clk,        // CLK1, 100 MHz
  input  logic rst,        // RESET, synchronous, active high
  input  logic gate,       // synchronised gate level
  input  logic gate_rise,  // strobe: gate went high
  output logic clk2,       // divided clock level (sub-bin clock)
  output logic bin_end,    // strobe: last cycle of a complete sub-bin
  output logic mark        // 1 us sub-bin marker after each bin_end
);
  localparam int unsigned PW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [PW-1:0] phase;
  logic          running;

  always_ff @(posedge clk) begin
    if (rst) begin
      phase   <= '0;
      running <= 1'b0;
    end else if (!gate) begin
      phase   <= '0;
      running <= 1'b0;
    end else if (gate_rise) begin
      phase   <= PW'(1);
      running <= 1'b1;
    end else if (running) begin
      phase <= (phase == PW'(DIV - 1)) ? '0 : phase + PW'(1);
    end
  end

  // In the gate_rise cycle the phase is 0 combinationally: the sub-bin starts there.
  logic [PW-1:0] cur_phase;
  assign cur_phase = gate_rise ? '0 : phase;

  assign clk2    = gate && (gate_rise || running) && (cur_phase < PW'(DIV / 2));
  assign bin_end = gate && (gate_rise || running) && (cur_phase == PW'(DIV - 1));

  localparam int unsigned MW = $clog2(MARK_CYC + 1);
  logic [MW-1:0] mark_left;
  always_ff @(posedge clk) begin
    if (rst)                 mark_left <= '0;
    else if (bin_end)        mark_left <= MW'(MARK_CYC);
    else if (mark_left != 0) mark_left <= mark_left - MW'(1);
  end
  assign mark = (mark_left != '0);
endmodule
