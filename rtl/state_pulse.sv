// state_pulse -- drives the qubit STATE output pin.
//
// The paper signals a bright result on an output pin as a "triple 1 us pulse" right
// after the gate (its Fig. 6(b)); a dark result leaves the pin low. This module emits
// PULSES high periods of HIGH_CYC clock cycles separated by LOW_CYC low cycles when
// `trig` arrives with state = bright, and nothing for dark. A trigger that arrives while
// a burst is still running restarts the burst from its first pulse.
// Interface/timing: `trig` is a one-cycle strobe; the pin goes high in the cycle after
// it. With the defaults at 100 MHz the burst is 3 x 1 us high with 1 us gaps, 5 us in
// all. The pulse count and width follow the paper; the 1 us gap is this design's choice
// (the paper does not give it).
module state_pulse
  import readout_pkg::*;
#(
  parameter int unsigned PULSES   = 3,
  parameter int unsigned HIGH_CYC = US_CYC,   // 1 us
  parameter int unsigned LOW_CYC  = US_CYC
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         trig,
  input  qubit_state_e state,
  output logic         pin,
  output logic         busy
);
  localparam int unsigned TW = $clog2(((HIGH_CYC > LOW_CYC) ? HIGH_CYC : LOW_CYC) + 1);
  localparam int unsigned PW = $clog2(PULSES + 1);

  logic [TW-1:0] timer;   // cycles left in the current high or low phase
  logic [PW-1:0] left;    // high phases still to start after the current one
  logic          high;

  always_ff @(posedge clk) begin
    if (rst) begin
      timer <= '0;
      left  <= '0;
      high  <= 1'b0;
      busy  <= 1'b0;
    end else if (trig && state == STATE_BRIGHT) begin
      busy  <= 1'b1;
      high  <= 1'b1;
      timer <= TW'(HIGH_CYC - 1);
      left  <= PW'(PULSES - 1);
    end else if (busy) begin
      if (timer != '0) begin
        timer <= timer - TW'(1);
      end else if (high) begin
        high <= 1'b0;
        if (left == '0) busy <= 1'b0;
        else            timer <= TW'(LOW_CYC - 1);
      end else begin
        high  <= 1'b1;
        timer <= TW'(HIGH_CYC - 1);
        left  <= left - PW'(1);
      end
    end
  end

  assign pin = high;
endmodule
