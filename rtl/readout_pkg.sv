// readout_pkg -- shared constants and types of the trapped-ion qubit readout logic.
//
// The readout counts photomultiplier (PMT) pulses in fixed 30 us sub-bins while an
// external gate is high, stores one count per sub-bin, and classifies the count
// sequence as bright or dark with a small fully-connected network (N_in-20-2, ReLU).
// The numbers that come from the paper are the 100 MHz logic clock, the 30 us
// (33.3 kHz) sub-bin, up to 10 network inputs, 20 hidden units, 2 output units and
// the triple 1 us pulse on the state pin. Word widths, the fixed-point format of the
// weights and the register map are this design's own choices.
package readout_pkg;

  // Clocking: 100 MHz logic clock, 30 us sub-bin -> divide by 3000 (33.3 kHz).
  localparam int unsigned CLK_MHZ     = 100;
  localparam int unsigned SUBBIN_US   = 30;
  localparam int unsigned SUBBIN_DIV  = CLK_MHZ * SUBBIN_US;   // 3000
  localparam int unsigned US_CYC      = CLK_MHZ;               // cycles per microsecond

  // Network shape.
  localparam int unsigned MAX_BINS    = 10;   // input units (sub-bins) at most
  localparam int unsigned N_HID       = 20;   // hidden units
  localparam int unsigned N_OUT       = 2;    // output units y1, y2

  // Word widths (assumed).
  localparam int unsigned CNT_W       = 16;   // photon count per sub-bin, saturating
  localparam int unsigned WGT_W       = 16;   // signed weight / bias word
  localparam int unsigned FRAC        = 8;    // fractional bits of weights and hidden values
  localparam int unsigned HID_W       = 24;   // unsigned hidden activation after ReLU
  localparam int unsigned ACC_W       = 48;   // signed accumulator

  // Weight memory layout, one signed WGT_W word per entry.
  //   W1[h][i] at h*MAX_BINS + i, B1[h] after W1, W2[o][h] after B1, B2[o] last.
  localparam int unsigned W1_BASE     = 0;
  localparam int unsigned B1_BASE     = W1_BASE + N_HID * MAX_BINS;
  localparam int unsigned W2_BASE     = B1_BASE + N_HID;
  localparam int unsigned B2_BASE     = W2_BASE + N_OUT * N_HID;
  localparam int unsigned WMEM_DEPTH  = B2_BASE + N_OUT;            // 262 words
  localparam int unsigned WMEM_AW     = $clog2(WMEM_DEPTH);

  // AXI4-Lite register map (byte addresses, 32-bit registers).
  localparam int unsigned AXI_AW      = 12;
  localparam logic [AXI_AW-1:0] REG_CTRL     = 12'h000; // [0] hw_nn, [7:4] num_bins
  localparam logic [AXI_AW-1:0] REG_STATUS   = 12'h004; // see readout_regs
  localparam logic [AXI_AW-1:0] REG_IRQ      = 12'h008; // [0] bin end, [1] gate end, [2] nn done; W1C
  localparam logic [AXI_AW-1:0] REG_IRQ_EN   = 12'h00C;
  localparam logic [AXI_AW-1:0] REG_STATE    = 12'h010; // write [0]: state from software
  localparam logic [AXI_AW-1:0] REG_Y1       = 12'h014; // low 32 bits of y1 (network output 0)
  localparam logic [AXI_AW-1:0] REG_Y2       = 12'h018; // low 32 bits of y2 (network output 1)
  localparam logic [AXI_AW-1:0] REG_COUNT0   = 12'h040; // COUNT[i] at 0x040 + 4*i
  localparam logic [AXI_AW-1:0] REG_WMEM0    = 12'h400; // weight word k at 0x400 + 4*k

  typedef enum logic [1:0] {AXI_OKAY = 2'b00, AXI_SLVERR = 2'b10} axi_resp_e;

  // Qubit state as reported on the pin and in the registers.
  typedef enum logic {STATE_DARK = 1'b0, STATE_BRIGHT = 1'b1} qubit_state_e;

endpackage
