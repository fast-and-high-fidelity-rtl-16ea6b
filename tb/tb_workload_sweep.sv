// tb_workload_sweep -- runs the sub-bin sweep of the published experiment through the
// whole readout logic at its default sizes.
//
// The published evaluation varied the number of 30 us sub-bins fed to the network
// (1 to 10) at three detection laser powers (1.26, 2.95 and 5.90 uW). This test repeats
// that sweep with simulated photon statistics: for a bright ion the counts per sub-bin
// are Poisson with mean n(P) * 30 us, n(P) = n0 * (P/P0) / (1 + P/P0), n0 = 1.39e5 /s,
// P0 = 2.91 uW (the published saturation fit); for a dark ion the mean is 0.02 per
// sub-bin (a background rate assumed here). Each shot opens a gate of 30*n + 10 us,
// lets the hardware network decide (CTRL.hw_nn = 1, num_bins = n), and checks the
// counts, the network outputs and the decision against a reference computed here,
// the pin burst, and the gate-to-pin delay. The network is a hand-set threshold
// network (unit 0 sums the counts, unit 1 holds a threshold of 1.5 photons), not the
// trained one, which was not published; the printed classification rates describe
// that threshold, not the published fidelities.
module tb_workload_sweep;
  import readout_pkg::*;

  localparam int SHOTS = 20;                 // per state, power and sub-bin number

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic gate_in = 1'b0, pmt_in = 1'b0;
  logic state_pin, clk2, bin_mark, irq;
  logic [11:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  axi_resp_e bresp, rresp;

  readout_top dut (
    .clk, .rst, .gate_in, .pmt_in, .state_pin, .clk2, .bin_mark, .irq,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata),
    .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid),
    .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid),
    .s_rready(rready));

  axil_bfm bfm (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp,
                .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid,
                .rready);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  int signed wmem [262];
  function automatic void forward(input int n, input int x[10], output longint y1,
                                  output longint y2);
    longint hid[20], acc;
    for (int h = 0; h < 20; h++) begin
      acc = wmem[200 + h];
      for (int i = 0; i < n; i++) acc += longint'(wmem[h * 10 + i]) * x[i];
      hid[h] = (acc < 0) ? 0 : ((acc > 64'd16777215) ? 16777215 : acc);
    end
    y1 = longint'(wmem[260]) * 256;
    y2 = longint'(wmem[261]) * 256;
    for (int h = 0; h < 20; h++) begin
      y1 += longint'(wmem[220 + h]) * hid[h];
      y2 += longint'(wmem[240 + h]) * hid[h];
    end
  endfunction

  function automatic int poisson(input real mean);
    real l, p;
    int k;
    l = $exp(-mean);
    p = 1.0;
    k = 0;
    do begin
      k++;
      p = p * ($urandom_range(0, 1000000) / 1000001.0 + 0.5e-6);
    end while (p > l && k < 50);
    return k - 1;
  endfunction

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    axi_resp_e r;
    bfm.write(a, d, r);
    check(r == AXI_OKAY, $sformatf("write 0x%03h", a));
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    axi_resp_e r;
    bfm.read(a, d, r);
    check(r == AXI_OKAY, $sformatf("read 0x%03h", a));
  endtask

  int pin_rises = 0;
  realtime first_rise = 0.0;
  always @(posedge state_pin) begin
    if (pin_rises == 0) first_rise = $realtime;
    pin_rises++;
  end

  // One shot of n sub-bins with the given counts; returns the hardware decision.
  task automatic shot(input int n, input int cnt[10], output bit bright_hw);
    realtime t_fall, lat, lo;
    longint y1, y2;
    logic [31:0] d;
    bit bright;
    pin_rises = 0;
    #3;
    gate_in = 1'b1;
    for (int b = 0; b < n; b++) begin
      bit slot[58];
      foreach (slot[s]) slot[s] = 0;
      for (int j = 0; j < cnt[b] && j < 58; j++) begin
        int s;
        s = int'($urandom_range(0, 57));
        while (slot[s]) s = (s + 1) % 58;
        slot[s] = 1;
      end
      #500;
      foreach (slot[s]) begin                  // 58 slots of 500 ns from 0.5 us
        if (slot[s]) begin
          pmt_in = 1'b1; #20; pmt_in = 1'b0; #480;
        end else #500;
      end
      #500;
    end
    #10000;                                      // the 10 us that never make a sub-bin
    gate_in = 1'b0;
    t_fall = $realtime;
    #(10.0 * (3 + 20 * (n + 1) + 42 + 5));
    for (int b = 0; b < n; b++) begin
      rd(REG_COUNT0 + 12'(4 * b), d);
      check(int'(d) == cnt[b], $sformatf("n=%0d bin %0d count %0d sent %0d", n, b, d, cnt[b]));
    end
    forward(n, cnt, y1, y2);
    bright = (y1 > y2);
    rd(REG_Y1, d);
    check(d == y1[31:0], $sformatf("n=%0d Y1", n));
    rd(REG_STATUS, d);
    bright_hw = d[12];
    check(d[12] == bright && d[10] == 1'b0, $sformatf("n=%0d decision", n));
    #6000;
    check(pin_rises == (bright ? 3 : 0), $sformatf("n=%0d pin pulses %0d", n, pin_rises));
    if (bright) begin
      lo = (3 + 20 * (n + 1) + 42) * 10.0;
      lat = first_rise - t_fall;
      check(lat >= lo - 10.0 && lat <= lo + 10.0, $sformatf("n=%0d gate-to-pin %0.0f", n, lat));
    end
    wr(REG_IRQ, 32'h7);
    #5000;
  endtask

  initial begin
    real powers[3] = '{1.26, 2.95, 5.90};
    real mean_b;
    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (5) @(posedge clk);

    foreach (wmem[k]) wmem[k] = 0;
    for (int i = 0; i < 10; i++) wmem[i] = 256;  // unit 0: sum of counts
    wmem[201] = 384;                             // unit 1: 1.5
    wmem[220] = 256;                             // y1 = unit 0
    wmem[241] = 256;                             // y2 = unit 1
    for (int k = 0; k < 262; k++) wr(REG_WMEM0 + 12'(4 * k), 32'(wmem[k]));

    foreach (powers[p]) begin
      mean_b = 1.39e5 * (powers[p] / 2.91) / (1.0 + powers[p] / 2.91) * 30e-6;
      for (int n = 1; n <= 10; n++) begin
        int correct;
        correct = 0;
        wr(REG_CTRL, {24'd0, 4'(n), 3'd0, 1'b1});
        for (int s = 0; s < 2 * SHOTS; s++) begin
          int cnt[10];
          bit is_bright, hw;
          is_bright = (s % 2 == 0);
          foreach (cnt[i]) cnt[i] = (i < n) ? poisson(is_bright ? mean_b : 0.02) : 0;
          shot(n, cnt, hw);
          if (hw == is_bright) correct++;
        end
        $display("P=%0.2f uW  mean bright count/sub-bin=%0.2f  sub-bins=%0d  threshold-net correct %0d/%0d",
                 powers[p], mean_b, n, correct, 2 * SHOTS);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
