// readout_regs -- AXI4-Lite register bank between the counting logic and the processor.
//
// In the paper the counter hands each sub-bin's photon count to a register that the
// ARM processor reads over AXI, the logic interrupts the processor at the end of
// every sub-bin and at the gate's falling edge, and the processor returns the qubit
// state through a register to the output pin. This module is that register bank. It
// also holds the network's weight memory window (the paper loads pre-trained weights
// and biases before use) and the control bits of the hardware network engine.
//
// Register map (32-bit, byte addresses, see readout_pkg):
//   0x000 CTRL      RW  [0] hw_nn: 1 = the fnn_engine result drives the pin,
//                                  0 = software writes STATE (as in the paper)
//                       [7:4] num_bins: network inputs used (reset 5)
//   0x004 STATUS    RO  [7:0] complete sub-bins of the last/current shot, [8] gate,
//                       [9] sub-bin overflow, [10] engine busy, [11] a state was
//                       produced since reset, [12] last state (1 = bright)
//   0x008 IRQ       R/W1C [0] sub-bin count ready, [1] gate end, [2] engine done
//   0x00C IRQ_EN    RW  enables for the IRQ bits; irq = |(IRQ & IRQ_EN)
//   0x010 STATE     W   [0] state from software; the write fires the state pin (hw_nn = 0)
//   0x014 Y1, 0x018 Y2  RO low 32 bits of the engine outputs
//   0x040 + 4*i     RO  COUNT[i], photons in sub-bin i of the last/current shot
//   0x400 + 4*k     RW  weight memory word k (signed 16 bit, sign-extended on read)
// Counts are zeroed at the gate's rising edge. Unmapped addresses answer SLVERR.
// AXI4-Lite: a write is accepted when address and data are both valid and no response
// is pending (awready = wready, one cycle); a read is accepted when no read data is
// pending and answered in the next cycle. wstrb is ignored (full-word writes only).
// The register map, reset values and handshakes are this design's choices; the paper
// gives the register's role only.
module readout_regs
  import readout_pkg::*;
#(
  parameter int unsigned NBINS    = readout_pkg::MAX_BINS,
  parameter int unsigned NH       = readout_pkg::N_HID,
  localparam int unsigned IW      = $clog2(NBINS),
  localparam int unsigned NIW     = $clog2(NBINS + 1),
  localparam int unsigned DEPTH   = NH * NBINS + NH + N_OUT * NH + N_OUT,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst,
  // AXI4-Lite slave
  input  logic [AXI_AW-1:0]             s_awaddr,
  input  logic                          s_awvalid,
  output logic                          s_awready,
  input  logic [31:0]                   s_wdata,
  input  logic [3:0]                    s_wstrb,
  input  logic                          s_wvalid,
  output logic                          s_wready,
  output axi_resp_e                     s_bresp,
  output logic                          s_bvalid,
  input  logic                          s_bready,
  input  logic [AXI_AW-1:0]             s_araddr,
  input  logic                          s_arvalid,
  output logic                          s_arready,
  output logic [31:0]                   s_rdata,
  output axi_resp_e                     s_rresp,
  output logic                          s_rvalid,
  input  logic                          s_rready,
  output logic                          irq,
  // from photon_counter
  input  logic                          clear,
  input  logic                          cnt_we,
  input  logic [IW-1:0]                 cnt_idx,
  input  logic [CNT_W-1:0]              cnt_val,
  input  logic                          gate_done,
  input  logic [7:0]                    n_bins,
  input  logic                          overflow,
  input  logic                          gate,
  output logic [NBINS-1:0][CNT_W-1:0] counts,
  // to / from fnn_engine
  output logic                          hw_nn,
  output logic [NIW-1:0]                num_bins,
  output logic                          wmem_we,
  output logic [AW-1:0]                 wmem_waddr,
  output logic signed [WGT_W-1:0]       wmem_wdata,
  output logic [AW-1:0]                 wmem_raddr,
  input  logic signed [WGT_W-1:0]       wmem_rdata,
  input  logic                          nn_busy,
  input  logic                          nn_done,
  input  qubit_state_e                  nn_state,
  input  logic signed [ACC_W-1:0]       nn_y1,
  input  logic signed [ACC_W-1:0]       nn_y2,
  // to state_pulse
  output logic                          pin_trig,
  output qubit_state_e                  pin_state
);
  localparam int unsigned WMEM_END = 32'(REG_WMEM0) + 4 * DEPTH;
  localparam int unsigned CNT_END  = 32'(REG_COUNT0) + 4 * NBINS;

  logic [2:0]   irq_q, irq_en;
  logic         state_seen;
  qubit_state_e last_state;
  logic         sw_we;
  qubit_state_e sw_state;

  // ---------------- write channel ----------------
  logic wr_fire;
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;

  function automatic logic in_range(input logic [AXI_AW-1:0] a, input int unsigned lo,
                                    input int unsigned hi);
    return (32'(a) >= lo) && (32'(a) < hi);
  endfunction

  logic wr_ok;
  always_comb begin
    wr_ok = (s_awaddr == REG_CTRL) || (s_awaddr == REG_IRQ) || (s_awaddr == REG_IRQ_EN) ||
            (s_awaddr == REG_STATE) || in_range(s_awaddr, 32'(REG_WMEM0), WMEM_END);
  end

  assign wmem_we    = wr_fire && in_range(s_awaddr, 32'(REG_WMEM0), WMEM_END);
  assign wmem_waddr = AW'((32'(s_awaddr) - 32'(REG_WMEM0)) >> 2);
  assign wmem_wdata = WGT_W'(s_wdata);
  assign sw_we      = wr_fire && (s_awaddr == REG_STATE);
  assign sw_state   = qubit_state_e'(s_wdata[0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      s_bvalid <= 1'b0;
      s_bresp  <= AXI_OKAY;
      hw_nn    <= 1'b0;
      num_bins <= NIW'(5);
      irq_en   <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= wr_ok ? AXI_OKAY : AXI_SLVERR;
        if (s_awaddr == REG_CTRL) begin
          hw_nn    <= s_wdata[0];
          num_bins <= NIW'(s_wdata[7:4]);
        end
        if (s_awaddr == REG_IRQ_EN) irq_en <= s_wdata[2:0];
      end
    end
  end

  // ---------------- event registers ----------------
  logic [2:0] irq_set, irq_clr;
  assign irq_set = {nn_done, gate_done, cnt_we};
  assign irq_clr = (wr_fire && s_awaddr == REG_IRQ) ? s_wdata[2:0] : 3'b000;

  always_ff @(posedge clk) begin
    if (rst) begin
      irq_q      <= '0;
      counts     <= '0;
      state_seen <= 1'b0;
      last_state <= STATE_DARK;
    end else begin
      irq_q <= (irq_q & ~irq_clr) | irq_set;
      if (clear)       counts          <= '0;
      else if (cnt_we) counts[cnt_idx] <= cnt_val;
      if (pin_trig) begin
        state_seen <= 1'b1;
        last_state <= pin_state;
      end
    end
  end

  assign irq = |(irq_q & irq_en);

  // The state pin follows the engine or the software, as CTRL.hw_nn selects.
  assign pin_trig  = hw_nn ? nn_done  : sw_we;
  assign pin_state = hw_nn ? nn_state : sw_state;

  // ---------------- read channel ----------------
  assign s_arready  = !s_rvalid;
  assign wmem_raddr = AW'((32'(s_araddr) - 32'(REG_WMEM0)) >> 2);

  logic [31:0] rd_data;
  logic        rd_ok;
  always_comb begin
    rd_data = '0;
    rd_ok   = 1'b1;
    if (s_araddr == REG_CTRL)        rd_data = {24'd0, 4'(num_bins), 3'd0, hw_nn};
    else if (s_araddr == REG_STATUS) rd_data = {19'd0, last_state, state_seen, nn_busy,
                                                overflow, gate, n_bins};
    else if (s_araddr == REG_IRQ)    rd_data = {29'd0, irq_q};
    else if (s_araddr == REG_IRQ_EN) rd_data = {29'd0, irq_en};
    else if (s_araddr == REG_Y1)     rd_data = nn_y1[31:0];
    else if (s_araddr == REG_Y2)     rd_data = nn_y2[31:0];
    else if (in_range(s_araddr, 32'(REG_COUNT0), CNT_END))
      rd_data = 32'(counts[IW'((32'(s_araddr) - 32'(REG_COUNT0)) >> 2)]);
    else if (in_range(s_araddr, 32'(REG_WMEM0), WMEM_END))
      rd_data = 32'(wmem_rdata);
    else rd_ok = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= AXI_OKAY;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_data;
        s_rresp  <= rd_ok ? AXI_OKAY : AXI_SLVERR;
      end
    end
  end

  // ---------------- AXI4-Lite handshake rules ----------------
  // A master keeps a request valid, and this slave keeps a response valid and
  // unchanged, until the other side accepts it.
  a_aw_hold: assert property (@(posedge clk) disable iff (rst)
                              s_awvalid && !s_awready |=> s_awvalid);
  a_ar_hold: assert property (@(posedge clk) disable iff (rst)
                              s_arvalid && !s_arready |=> s_arvalid && $stable(s_araddr));
  a_b_hold:  assert property (@(posedge clk) disable iff (rst)
                              s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_r_hold:  assert property (@(posedge clk) disable iff (rst)
                              s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
