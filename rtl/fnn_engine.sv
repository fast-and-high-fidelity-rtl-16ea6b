// fnn_engine -- feedforward fully-connected network that classifies a photon-count shot.
//
// The paper classifies each shot with a two-layer fully-connected network: N_in inputs
// (the sub-bin counts), 20 hidden units with ReLU, and 2 output units y1, y2; the state
// is bright when y1 > y2, dark otherwise. The weights and biases are trained offline
// and loaded before use. In the paper this forward pass runs as software on the ARM
// core; this module is a hardware version of the same computation, so the logic can
// give the state without the processor (the register bank also lets software write
// the state itself, as in the paper).
//
// How it works: one signed multiply-accumulate per clock. Layer 1 computes, for each
// hidden unit h, acc = B1[h] + sum_i W1[h][i]*x[i] over the first n_in inputs, then
// stores ReLU(acc) saturated to HID_W bits. Layer 2 computes
// y[o] = (B2[o] << FRAC) + sum_h W2[o][h]*hid[h]. The counts are taken at `start`.
// Number format (this design's choice): weights and biases are signed WGT_W-bit words
// with FRAC fractional bits; counts are unsigned integers; hidden values are unsigned
// with FRAC fractional bits; y is signed with 2*FRAC fractional bits.
// Weight memory: WMEM_DEPTH words laid out as in readout_pkg (W1 row-major with
// MAX_BINS columns, then B1, W2 row-major, B2), written through wmem_we/wmem_waddr and
// readable through wmem_raddr/wmem_rdata (combinational).
// Timing: `start` is a one-cycle strobe accepted when busy is low; `done` is high for
// one cycle, N_HID*(n_in+1) + N_OUT*(N_HID+1) cycles after the start cycle (162 cycles,
// 1.62 us, for n_in = 5), with `state`, `y1`, `y2` valid from then until the next start.
// A start while busy is ignored.
module fnn_engine
  import readout_pkg::*;
#(
  parameter int unsigned MAX_IN = readout_pkg::MAX_BINS,
  parameter int unsigned NH     = readout_pkg::N_HID,
  localparam int unsigned NO    = readout_pkg::N_OUT,
  localparam int unsigned B1_B  = NH * MAX_IN,
  localparam int unsigned W2_B  = B1_B + NH,
  localparam int unsigned B2_B  = W2_B + NO * NH,
  localparam int unsigned DEPTH = B2_B + NO,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned NIW   = $clog2(MAX_IN + 1)
) (
  input  logic                            clk,
  input  logic                            rst,
  // weight memory ports
  input  logic                            wmem_we,
  input  logic [AW-1:0]                   wmem_waddr,
  input  logic signed [WGT_W-1:0]         wmem_wdata,
  input  logic [AW-1:0]                   wmem_raddr,
  output logic signed [WGT_W-1:0]         wmem_rdata,
  // shot
  input  logic                            start,
  input  logic [NIW-1:0]                  n_in,      // inputs used, 1..MAX_IN (clamped)
  input  logic [MAX_IN-1:0][CNT_W-1:0]    counts,
  output logic                            busy,
  output logic                            done,
  output qubit_state_e                    state,
  output logic signed [ACC_W-1:0]         y1,
  output logic signed [ACC_W-1:0]         y2
);
  localparam int unsigned HW  = (NH > 1) ? $clog2(NH) : 1;
  localparam int unsigned KW  = $clog2(((MAX_IN > NH) ? MAX_IN : NH) + 1);
  localparam logic [HID_W-1:0] HID_MAX = '1;

  typedef enum logic [1:0] {S_IDLE, S_L1, S_L2, S_FIN} fsm_e;

  logic signed [WGT_W-1:0] wmem [DEPTH];

  fsm_e                               fsm;
  logic [HW-1:0]                      h;      // hidden unit (layer 1) / output unit (layer 2)
  logic [KW-1:0]                      k;      // 0: bias, 1..n: term k-1
  logic [NIW-1:0]                     n_q;
  logic [MAX_IN-1:0][CNT_W-1:0]       x_q;
  logic [NH-1:0][HID_W-1:0]           hid;
  logic signed [ACC_W-1:0]            acc;

  always_ff @(posedge clk) begin
    if (wmem_we) wmem[wmem_waddr] <= wmem_wdata;
  end
  assign wmem_rdata = wmem[wmem_raddr];

  // Address of the word used this cycle, and the multiplier operands.
  logic [AW-1:0]            addr;
  logic signed [WGT_W-1:0]  w;
  logic signed [HID_W:0]    b;      // second operand, always non-negative
  logic signed [ACC_W-1:0]  prod, acc_next, bias_ext;

  always_comb begin
    addr = '0;
    b    = '0;
    if (fsm == S_L1) begin
      if (k == '0) addr = AW'(B1_B + 32'(h));
      else begin
        addr = AW'(32'(h) * MAX_IN + 32'(k) - 1);
        b    = (HID_W+1)'(x_q[k - KW'(1)]);
      end
    end else begin
      if (k == '0) addr = AW'(B2_B + 32'(h));
      else begin
        addr = AW'(W2_B + 32'(h) * NH + 32'(k) - 1);
        b    = (HID_W+1)'(hid[k - KW'(1)]);
      end
    end
    w        = wmem[addr];
    prod     = ACC_W'(w) * ACC_W'(b);
    acc_next = acc + prod;
    bias_ext = (fsm == S_L1) ? ACC_W'(w) : (ACC_W'(w) <<< FRAC);
  end

  function automatic logic [HID_W-1:0] relu_sat(input logic signed [ACC_W-1:0] v);
    if (v <= 0)                                 return '0;
    else if (v > $signed(ACC_W'(HID_MAX)))    return HID_MAX;
    else                                        return v[HID_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      fsm   <= S_IDLE;
      h     <= '0;
      k     <= '0;
      n_q   <= NIW'(1);
      acc   <= '0;
      y1    <= '0;
      y2    <= '0;
      x_q   <= '0;
      hid   <= '0;
    end else begin
      unique case (fsm)
        S_IDLE: if (start) begin
          fsm <= S_L1;
          h   <= '0;
          k   <= '0;
          x_q <= counts;
          if (n_in == '0)                n_q <= NIW'(1);
          else if (32'(n_in) > MAX_IN)   n_q <= NIW'(MAX_IN);
          else                           n_q <= n_in;
        end
        S_L1: begin
          if (k == '0) begin
            acc <= bias_ext;
            k   <= k + KW'(1);
          end else if (k == KW'(n_q)) begin
            hid[h] <= relu_sat(acc_next);
            k      <= '0;
            if (32'(h) == NH - 1) begin
              h   <= '0;
              fsm <= S_L2;
            end else h <= h + HW'(1);
          end else begin
            acc <= acc_next;
            k   <= k + KW'(1);
          end
        end
        S_L2: begin
          if (k == '0) begin
            acc <= bias_ext;
            k   <= k + KW'(1);
          end else if (k == KW'(NH)) begin
            if (h == '0) y1 <= acc_next;
            else         y2 <= acc_next;
            k <= '0;
            if (32'(h) == NO - 1) fsm <= S_FIN;
            else                  h   <= h + HW'(1);
          end else begin
            acc <= acc_next;
            k   <= k + KW'(1);
          end
        end
        S_FIN: begin
          fsm <= S_IDLE;
        end
        default: fsm <= S_IDLE;
      endcase
    end
  end

  assign busy = (fsm != S_IDLE);
  assign done  = (fsm == S_FIN);
  assign state = (y1 > y2) ? STATE_BRIGHT : STATE_DARK;
endmodule
