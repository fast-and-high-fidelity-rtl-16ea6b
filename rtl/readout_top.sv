// readout_top -- programmable-logic side of the embedded trapped-ion qubit readout.
//
// A shot works like this. An external gate pulse (e.g. 160 us) opens the detection
// window. From its rising edge the frequency divider cuts time into 30 us sub-bins
// (the 33.3 kHz CLK2 of the paper) and the photon counter counts the PMT's TTL pulses
// in each one; every finished sub-bin's count lands in the register bank and raises
// an interrupt. The gate's falling edge ends the shot and raises the gate-end
// interrupt. The bright/dark decision is then made by a fully-connected N_in-20-2 ReLU
// network: either by software reading the counts and writing the STATE register (the
// paper's arrangement, where the network runs on the ARM core), or by the fnn_engine
// here, started by the gate's falling edge (CTRL.hw_nn = 1). Either way the state pin
// then gives a triple 1 us pulse for bright and stays low for dark.
//
// Interface: clk is the 100 MHz logic clock; gate_in and pmt_in are asynchronous TTL
// inputs; rst is the synchronous active-high RESET; the processor reaches the
// registers over the AXI4-Lite slave port and is interrupted by irq. clk2 brings out
// the sub-bin clock and bin_mark a 1 us marker at each sub-bin end, both for
// observation. Timing: see the submodules; with hw_nn the pin
// starts 2-3 cycles (synchroniser) + 1 + N_HID*(n+1) + N_OUT*(N_HID+1) cycles + 1 after
// the gate falls, i.e. about 1.7 us for n = 5.
// Block split and numbers follow the paper's Fig. 5; the hardware network engine and
// all widths and encodings are this design's own.
module readout_top
  import readout_pkg::*;
#(
  parameter int unsigned DIV      = readout_pkg::SUBBIN_DIV,
  parameter int unsigned PULSES   = 3,
  parameter int unsigned HIGH_CYC = readout_pkg::US_CYC,
  parameter int unsigned LOW_CYC  = readout_pkg::US_CYC
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               gate_in,
  input  logic               pmt_in,
  output logic               state_pin,
  output logic               clk2,
  output logic               bin_mark,
  output logic               irq,
  input  logic [AXI_AW-1:0]  s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  input  logic               s_wvalid,
  output logic               s_wready,
  output axi_resp_e          s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [AXI_AW-1:0]  s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output axi_resp_e          s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready
);
  localparam int unsigned IW  = $clog2(MAX_BINS);
  localparam int unsigned NIW = $clog2(MAX_BINS + 1);

  logic gate, gate_rise, gate_fall, pmt_rise;
  logic bin_end;
  logic clear, cnt_we, gate_done, overflow;
  logic [IW-1:0]    cnt_idx;
  logic [CNT_W-1:0] cnt_val;
  logic [7:0]       n_bins;
  logic [MAX_BINS-1:0][CNT_W-1:0] counts;
  logic hw_nn;
  logic [NIW-1:0] num_bins;
  logic wmem_we;
  logic [WMEM_AW-1:0] wmem_waddr, wmem_raddr;
  logic signed [WGT_W-1:0] wmem_wdata, wmem_rdata;
  logic nn_busy, nn_done;
  qubit_state_e nn_state, pin_state;
  logic signed [ACC_W-1:0] nn_y1, nn_y2;
  logic pin_trig, pulse_busy;

  sync_edge u_gate_sync (.clk, .rst, .async_in(gate_in), .level(gate), .rise(gate_rise),
                         .fall(gate_fall));
  /* The PMT's falling-edge strobe and level are not used: only rising edges count. */
  logic pmt_level, pmt_fall;
  sync_edge u_pmt_sync  (.clk, .rst, .async_in(pmt_in), .level(pmt_level), .rise(pmt_rise),
                         .fall(pmt_fall));

  freq_divider #(.DIV(DIV)) u_div (
    .clk, .rst, .gate, .gate_rise, .clk2, .bin_end, .mark(bin_mark));

  photon_counter u_cnt (
    .clk, .rst, .gate, .gate_rise, .gate_fall, .pmt_rise, .bin_end,
    .clear, .cnt_we, .cnt_idx, .cnt_val, .gate_done, .n_bins, .overflow);

  readout_regs u_regs (
    .clk, .rst,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready, .s_rdata,
    .s_rresp, .s_rvalid, .s_rready, .irq,
    .clear, .cnt_we, .cnt_idx, .cnt_val, .gate_done, .n_bins, .overflow, .gate, .counts,
    .hw_nn, .num_bins, .wmem_we, .wmem_waddr, .wmem_wdata, .wmem_raddr, .wmem_rdata,
    .nn_busy, .nn_done, .nn_state, .nn_y1, .nn_y2, .pin_trig, .pin_state);

  fnn_engine u_nn (
    .clk, .rst, .wmem_we, .wmem_waddr, .wmem_wdata, .wmem_raddr, .wmem_rdata,
    .start(hw_nn && gate_done), .n_in(num_bins), .counts,
    .busy(nn_busy), .done(nn_done), .state(nn_state), .y1(nn_y1), .y2(nn_y2));

  state_pulse #(.PULSES(PULSES), .HIGH_CYC(HIGH_CYC), .LOW_CYC(LOW_CYC)) u_pin (
    .clk, .rst, .trig(pin_trig), .state(pin_state), .pin(state_pin), .busy(pulse_busy));
endmodule
