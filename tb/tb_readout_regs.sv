// tb_readout_regs -- self-checking test of the AXI4-Lite register bank.
//
// An AXI4-Lite master model drives the bus; the counter, engine and pin sides are
// driven and observed directly, with a small weight memory model behind the memory
// port. Checks: reset values, CTRL read-back, sub-bin counts landing in COUNT[i] and
// cleared by a new gate, the three interrupt sources with enables and write-1-to-clear,
// STATUS fields, the software STATE write firing the pin when hw_nn = 0 and the engine
// result firing it when hw_nn = 1, weight writes and reads, Y1/Y2, and SLVERR on an
// unmapped address.
module tb_readout_regs;
  import readout_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [11:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  axi_resp_e bresp, rresp;
  logic irq;
  logic clear = 0, cnt_we = 0, gate_done = 0, overflow = 0, gate = 0;
  logic [3:0] cnt_idx = '0;
  logic [15:0] cnt_val = '0;
  logic [7:0] n_bins = '0;
  logic [9:0][15:0] counts;
  logic hw_nn;
  logic [3:0] num_bins;
  logic wmem_we;
  logic [8:0] wmem_waddr, wmem_raddr;
  logic signed [15:0] wmem_wdata, wmem_rdata;
  logic nn_busy = 0, nn_done = 0;
  qubit_state_e nn_state = STATE_DARK, pin_state;
  logic signed [47:0] nn_y1 = 48'sh1234_8765_4321, nn_y2 = -48'sd77;
  logic pin_trig;

  logic signed [15:0] wm [512];
  always_ff @(posedge clk) if (wmem_we) wm[wmem_waddr] <= wmem_wdata;
  assign wmem_rdata = wm[wmem_raddr];

  int n_trig = 0;
  qubit_state_e last_pin_state;
  always @(posedge clk) if (!rst && pin_trig) begin
    n_trig++;
    last_pin_state = pin_state;
  end

  axil_bfm bfm (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp,
                .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid,
                .rready);

  readout_regs dut (
    .clk, .rst, .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr),
    .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready), .irq,
    .clear, .cnt_we, .cnt_idx, .cnt_val, .gate_done, .n_bins, .overflow, .gate, .counts,
    .hw_nn, .num_bins, .wmem_we, .wmem_waddr, .wmem_wdata, .wmem_raddr, .wmem_rdata,
    .nn_busy, .nn_done, .nn_state, .nn_y1, .nn_y2, .pin_trig, .pin_state);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    axi_resp_e r;
    bfm.write(a, d, r);
    check(r == AXI_OKAY, $sformatf("write 0x%03h resp", a));
  endtask
  task automatic rd_expect(input logic [11:0] a, input logic [31:0] e, input string what);
    logic [31:0] d;
    axi_resp_e r;
    bfm.read(a, d, r);
    check(r == AXI_OKAY && d == e, $sformatf("%s: read 0x%03h = 0x%08h exp 0x%08h", what, a, d, e));
  endtask
  task automatic pulse(ref logic s);
    @(negedge clk); s = 1'b1;
    @(negedge clk); s = 1'b0;
  endtask

  initial begin
    logic [31:0] d;
    axi_resp_e r;
    int ref_cnt[10];
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (2) @(posedge clk);

    rd_expect(REG_CTRL, 32'h50, "CTRL reset");
    rd_expect(REG_IRQ, 0, "IRQ reset");
    check(!irq, "irq low at reset");

    // Counts of a 10-sub-bin shot.
    pulse(clear);
    foreach (ref_cnt[i]) begin
      ref_cnt[i] = int'($urandom_range(0, 9));
      @(negedge clk);
      cnt_we = 1; cnt_idx = 4'(i); cnt_val = 16'(ref_cnt[i]);
      @(negedge clk);
      cnt_we = 0;
    end
    foreach (ref_cnt[i]) rd_expect(REG_COUNT0 + 12'(4 * i), 32'(ref_cnt[i]), "COUNT");
    check(counts[3] == 16'(ref_cnt[3]), "counts port");
    rd_expect(REG_IRQ, 32'h1, "bin IRQ pending");
    check(!irq, "irq masked");
    wr(REG_IRQ_EN, 32'h7);
    check(irq, "irq enabled");
    wr(REG_IRQ, 32'h1);
    rd_expect(REG_IRQ, 32'h0, "bin IRQ cleared");
    check(!irq, "irq cleared");

    // Gate end and status.
    n_bins = 8'd10; overflow = 1'b1; gate = 1'b0;
    pulse(gate_done);
    rd_expect(REG_IRQ, 32'h2, "gate IRQ");
    check(irq, "gate irq");
    rd_expect(REG_STATUS, 32'h20A, "STATUS after gate");
    wr(REG_IRQ, 32'h2);
    pulse(clear);
    rd_expect(REG_COUNT0 + 12'd8, 32'h0, "COUNT cleared");

    // Software state path (hw_nn = 0).
    n_trig = 0;
    wr(REG_STATE, 32'h1);
    check(n_trig == 1 && last_pin_state == STATE_BRIGHT, "sw bright fires pin");
    wr(REG_STATE, 32'h0);
    check(n_trig == 2 && last_pin_state == STATE_DARK, "sw dark fires pin");
    rd_expect(REG_STATUS, 32'h0800 | 32'h20A, "STATUS state seen, dark");
    nn_state = STATE_BRIGHT;
    pulse(nn_done);
    check(n_trig == 2, "engine ignored in sw mode");
    rd_expect(REG_IRQ, 32'h4, "nn IRQ");
    wr(REG_IRQ, 32'h4);

    // Hardware network path (hw_nn = 1, 7 inputs).
    wr(REG_CTRL, 32'h71);
    rd_expect(REG_CTRL, 32'h71, "CTRL readback");
    check(hw_nn && num_bins == 4'd7, "CTRL outputs");
    wr(REG_STATE, 32'h0);
    check(n_trig == 2, "sw write ignored in hw mode");
    pulse(nn_done);
    check(n_trig == 3 && last_pin_state == STATE_BRIGHT, "engine fires pin");
    rd_expect(REG_STATUS, 32'h1800 | 32'h20A, "STATUS bright");
    rd_expect(REG_Y1, 32'h8765_4321, "Y1");
    rd_expect(REG_Y2, 32'hFFFF_FFB3, "Y2");

    // Weight memory window.
    for (int k = 0; k < 262; k += 29) wr(REG_WMEM0 + 12'(4 * k), 32'(16'(k * 97 - 3000)));
    for (int k = 0; k < 262; k += 29)
      rd_expect(REG_WMEM0 + 12'(4 * k), 32'($signed(16'(k * 97 - 3000))), "WMEM");

    // Unmapped addresses.
    bfm.read(12'h300, d, r);
    check(r == AXI_SLVERR, "read SLVERR");
    bfm.write(12'hFFC, 32'h0, r);
    check(r == AXI_SLVERR, "write SLVERR");

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
