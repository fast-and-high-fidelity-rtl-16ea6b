// sync_edge -- two-flop synchroniser with rising- and falling-edge strobes.
//
// The gate and the PMT TTL line arrive asynchronously to the 100 MHz logic clock. Each
// passes through two flip-flops, and a third flop keeps the previous synchronised
// level so that one-cycle strobes mark its rising and falling edges. Latency from the
// pin to `level` is two to three clock cycles; the uncertainty is one clock period
// (10 ns), the bound on the gate-to-sub-bin-clock skew that the paper states.
// Pulses shorter than a clock period may be missed; TTL pulses from a PMT
// discriminator are assumed to be at least 10 ns wide and 10 ns apart.
module sync_edge (
  input  logic clk,
  input  logic rst,       // synchronous, active high
  input  logic async_in,  // asynchronous pin
  output logic level,     // synchronised level
  output logic rise,      // one-cycle strobe on 0 -> 1
  output logic fall       // one-cycle strobe on 1 -> 0
);
  logic meta, sync_q, prev_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta   <= 1'b0;
      sync_q <= 1'b0;
      prev_q <= 1'b0;
    end else begin
      meta   <= async_in;
      sync_q <= meta;
      prev_q <= sync_q;
    end
  end

  assign level = sync_q;
  assign rise  = sync_q & ~prev_q;
  assign fall  = ~sync_q & prev_q;
endmodule
