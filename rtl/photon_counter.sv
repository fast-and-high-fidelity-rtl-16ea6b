// photon_counter -- per-sub-bin photon counter for the PMT TTL pulses.
//
// While the gate is high, every rising edge of the (synchronised) PMT signal adds one
// to the count of the current sub-bin. At the end of each complete sub-bin, marked by
// the divider's bin_end strobe, the count is handed to the register bank as
// (cnt_we, cnt_idx, cnt_val) and the next sub-bin starts from zero. The gate's rising
// edge clears the sub-bin index and raises `clear` for one cycle so the stored counts
// of the previous shot can be zeroed; its falling edge raises `gate_done` and reports
// how many complete sub-bin_q were seen. A sub-bin cut short by the gate's falling edge
// is dropped (the paper's gate is 160 us for five 30 us sub-bin_q, so the last 10 us
// are never a full sub-bin). Sub-bin_q past MAX_BINS are counted in n_bins but not
// stored, and `overflow` says so.
// Timing: a PMT edge in the bin_end cycle belongs to the sub-bin that ends there;
// cnt_we coincides with bin_end. Counts saturate at 2**CNT_W-1.
// Counting rising edges per sub-bin, gated, follows the paper's Fig. 5; the hand-off
// strobes, saturation and partial-bin rule are this design's choices.
module photon_counter #(
  parameter int unsigned MAX_BINS = readout_pkg::MAX_BINS,
  parameter int unsigned CNT_W    = readout_pkg::CNT_W,
  localparam int unsigned IW      = $clog2(MAX_BINS)
) (
  input  logic             clk,
  input  logic             rst,        // RESET, synchronous, active high
  input  logic             gate,       // synchronised gate level
  input  logic             gate_rise,
  input  logic             gate_fall,
  input  logic             pmt_rise,   // synchronised PMT rising edge
  input  logic             bin_end,    // from freq_divider
  output logic             clear,      // strobe: new shot, clear stored counts
  output logic             cnt_we,     // strobe: sub-bin count valid
  output logic [IW-1:0]    cnt_idx,    // sub-bin index of cnt_val
  output logic [CNT_W-1:0] cnt_val,    // photons in that sub-bin
  output logic             gate_done,  // strobe: gate fell, shot complete
  output logic [7:0]       n_bins,     // complete sub-bin_q in this shot (saturates at 255)
  output logic             overflow    // more complete sub-bin_q than MAX_BINS in this shot
);
  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  logic [CNT_W-1:0] cur;
  logic [7:0]       bin_q;
  logic [CNT_W-1:0] cur_plus;

  // Count including a PMT edge in this very cycle, saturating.
  always_comb begin
    cur_plus = cur;
    if (pmt_rise && cur != CNT_MAX) cur_plus = cur + CNT_W'(1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cur      <= '0;
      bin_q     <= '0;
      overflow <= 1'b0;
    end else if (gate_rise) begin
      cur      <= pmt_rise ? CNT_W'(1) : '0;
      bin_q     <= '0;
      overflow <= 1'b0;
    end else if (gate) begin
      if (bin_end) begin
        cur  <= '0;
        if (bin_q != 8'hFF) bin_q <= bin_q + 8'd1;
        if (32'(bin_q) >= MAX_BINS) overflow <= 1'b1;
      end else begin
        cur <= cur_plus;
      end
    end else begin
      cur <= '0;
    end
  end

  assign clear     = gate_rise;
  assign cnt_we    = gate && !gate_rise && bin_end && (32'(bin_q) < MAX_BINS);
  assign cnt_idx   = IW'(bin_q);
  assign cnt_val   = cur_plus;
  assign gate_done = gate_fall;
  assign n_bins    = bin_q;
endmodule
