// tb_readout_top -- end-to-end test of the readout logic at its default sizes.
//
// The testbench plays the three outside parties of the system. As the experiment
// controller it drives the gate input: 160 us windows (five 30 us sub-bins plus 10 us
// that must be dropped), a 300 us window (ten sub-bins) and a 370 us window (twelve
// sub-bins, more than the ten stored). As the photomultiplier it sends 20 ns TTL
// pulses, a chosen number per sub-bin (including the count pattern 0 1 2 0 1 0 0 0 1 3
// printed in the paper's timing diagram). As the processor it loads the network
// weights over AXI4-Lite, takes every interrupt, reads each sub-bin's count as it
// arrives, and, in software mode, evaluates the network itself and writes the state.
//
// Every shot checks the counts read back against the pulses sent, the sub-bin number
// and overflow flag, the network outputs against a reference forward pass computed
// here, and the number of pulses on the state pin (3 for bright, 0 for dark). In
// hardware-network mode the delay from the gate's falling edge to the first pin edge
// must be (3 + 20*(n+1) + 42) clock cycles, give or take the synchroniser's one-cycle
// uncertainty. The mechanisms exercised are counted and each must occur at least once:
// sub-bin interrupts, gate-end interrupts, engine-done interrupts, software-mode
// shots, hardware-mode shots, a mode switch, bright bursts, dark results, dropped
// partial sub-bins and sub-bin overflow.
module tb_readout_top;
  import readout_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;                      // 100 MHz

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

  // Mechanism counters.
  int n_bin_irq = 0, n_gate_irq = 0, n_nn_irq = 0, n_sw_shot = 0, n_hw_shot = 0;
  int n_mode_switch = 0, n_bright = 0, n_dark = 0, n_partial = 0, n_overflow = 0;

  // ---------------- network weights (processor's copy) ----------------
  int signed wmem [262];
  initial begin
    // Unit 0 sums the counts, unit 1 is a constant 2.5; y1 = hid0, y2 = hid1, so the
    // network says bright above 2.5 photons. Units 2..19 add small random terms.
    foreach (wmem[k]) wmem[k] = 0;
    for (int i = 0; i < 10; i++) wmem[0 * 10 + i] = 256;
    wmem[200 + 1] = 640;
    for (int h = 2; h < 20; h++) begin
      for (int i = 0; i < 10; i++) wmem[h * 10 + i] = int'($urandom_range(0, 200)) - 100;
      wmem[200 + h] = int'($urandom_range(0, 1000)) - 500;
      wmem[220 + h] = int'($urandom_range(0, 4)) - 2;
      wmem[240 + h] = int'($urandom_range(0, 4)) - 2;
    end
    wmem[220 + 0] = 256;
    wmem[240 + 1] = 256;
  end

  // Reference forward pass, the same arithmetic the processor would run.
  function automatic void forward(input int n, input int x[12], output longint y1,
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

  // ---------------- state pin monitor ----------------
  int pin_rises = 0;
  realtime first_rise = 0.0;
  int marks = 0;
  always @(posedge bin_mark) marks++;
  always @(posedge state_pin) begin
    if (pin_rises == 0) first_rise = $realtime;
    pin_rises++;
  end

  // ---------------- one shot ----------------
  logic hw_mode = 1'b0;
  int   cur_bins = 5;

  task automatic shot(input int gate_us, input int cnt[12], input bit tail_pulse,
                      input string name);
    int nb, nstore;
    int got[12];
    int seen_bins;
    bit gate_seen;
    realtime t_fall;
    longint y1, y2;
    logic [31:0] d;
    bit bright;

    nb = gate_us / 30;
    nstore = (nb < 10) ? nb : 10;
    foreach (got[i]) got[i] = -1;
    seen_bins = 0; gate_seen = 0;
    pin_rises = 0; marks = 0;

    fork
      // Experiment controller and PMT.
      begin
        #3;
        gate_in = 1'b1;
        for (int b = 0; b < nb; b++) begin
          #1000;                                           // 1 us into the sub-bin
          for (int j = 0; j < cnt[b]; j++) begin
            pmt_in = 1'b1; #20; pmt_in = 1'b0; #480;       // 500 ns apart
          end
          #(29000 - 500 * cnt[b]);
        end
        if (tail_pulse) begin
          #(1000); pmt_in = 1'b1; #20; pmt_in = 1'b0; #20;
          #((gate_us - 30 * nb) * 1000 - 1040);
        end else #((gate_us - 30 * nb) * 1000);
        gate_in = 1'b0;
        t_fall = $realtime;
      end
      // Processor: service interrupts until the shot is complete.
      begin
        while (!gate_seen) begin
          logic [31:0] pend, st, c;
          wait (irq);
          rd(REG_IRQ, pend);
          wr(REG_IRQ, pend);
          if (pend[0]) begin
            n_bin_irq++;
            rd(REG_STATUS, st);
            if (st[7:0] >= 1 && st[7:0] <= 10) begin
              rd(REG_COUNT0 + 12'(4 * (int'(st[7:0]) - 1)), c);
              got[int'(st[7:0]) - 1] = int'(c);
            end
            seen_bins = int'(st[7:0]);
          end
          if (pend[1]) begin
            n_gate_irq++;
            gate_seen = 1;
          end
          if (pend[2]) n_nn_irq++;
        end
      end
    join

    // Counts as read during the shot and again afterwards.
    check(seen_bins == nstore, $sformatf("%s: %0d sub-bin interrupts seen as %0d", name,
                                         nstore, seen_bins));
    for (int b = 0; b < nstore; b++) begin
      check(got[b] == cnt[b], $sformatf("%s: bin %0d read %0d sent %0d", name, b, got[b],
                                        cnt[b]));
      rd(REG_COUNT0 + 12'(4 * b), d);
      check(int'(d) == cnt[b], $sformatf("%s: COUNT[%0d]", name, b));
    end
    rd(REG_STATUS, d);
    check(int'(d[7:0]) == nb, $sformatf("%s: STATUS sub-bins %0d exp %0d", name, d[7:0], nb));
    check(d[9] == (nb > 10), $sformatf("%s: overflow flag", name));
    if (d[9]) n_overflow++;
    if (tail_pulse && nb < 10) begin
      rd(REG_COUNT0 + 12'(4 * nb), d);
      check(d == 0, $sformatf("%s: partial sub-bin not stored", name));
      n_partial++;
    end

    begin
      int xs[12];
      foreach (xs[i]) xs[i] = (i < nstore) ? cnt[i] : 0;
      forward(cur_bins, xs, y1, y2);
    end
    bright = (y1 > y2);

    if (!hw_mode) begin
      // Software evaluates the network and writes the result.
      wr(REG_STATE, {31'd0, bright});
      n_sw_shot++;
    end else begin
      do rd(REG_STATUS, d); while (d[10]);               // engine busy
      rd(REG_Y1, d);
      check(d == y1[31:0], $sformatf("%s: Y1 0x%08h exp 0x%08h", name, d, y1[31:0]));
      rd(REG_Y2, d);
      check(d == y2[31:0], $sformatf("%s: Y2 0x%08h exp 0x%08h", name, d, y2[31:0]));
      n_hw_shot++;
    end
    #8000;                                                   // let the burst finish
    check(marks == nb, $sformatf("%s: %0d sub-bin markers", name, marks));
    check(pin_rises == (bright ? 3 : 0), $sformatf("%s: %0d pin pulses, bright=%0d", name,
                                                   pin_rises, bright));
    if (hw_mode && bright) begin
      realtime lat, lo;
      lo = (3 + 20 * (cur_bins + 1) + 42) * 10.0;
      lat = first_rise - t_fall;
      check(lat >= lo - 10.0 && lat <= lo + 10.0,
            $sformatf("%s: gate-to-pin %0.0f ns exp %0.0f +- 10", name, lat, lo));
    end
    if (bright) n_bright++; else n_dark++;
    rd(REG_STATUS, d);
    check(d[12] == bright && d[11], $sformatf("%s: STATUS state", name));
    $display("%s: %0d sub-bins, y1=%0d y2=%0d, %s", name, nb, y1, y2,
             bright ? "bright" : "dark");
    #20000;
  endtask

  initial begin
    logic [31:0] d;
    int c5b[12]   = '{2, 3, 1, 2, 4, 0, 0, 0, 0, 0, 0, 0};
    int c5d[12]   = '{0, 0, 1, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    int cfig[12]  = '{0, 1, 2, 0, 1, 0, 0, 0, 1, 3, 0, 0};
    int c12[12]   = '{1, 0, 2, 1, 0, 3, 1, 0, 0, 2, 4, 4};

    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (5) @(posedge clk);

    // Processor start-up: load the network, enable interrupts, 5 inputs, software mode.
    for (int k = 0; k < 262; k++) wr(REG_WMEM0 + 12'(4 * k), 32'(wmem[k]));
    for (int k = 0; k < 262; k += 13) begin
      rd(REG_WMEM0 + 12'(4 * k), d);
      check($signed(d) == wmem[k], $sformatf("weight %0d read back", k));
    end
    wr(REG_IRQ_EN, 32'h7);
    wr(REG_CTRL, 32'h50);
    hw_mode = 0; cur_bins = 5;

    shot(160, c5b, 1'b1, "sw bright");
    shot(160, c5d, 1'b1, "sw dark");

    // Mode switch: the hardware network drives the pin.
    wr(REG_CTRL, 32'h51);
    hw_mode = 1; n_mode_switch++;
    shot(160, c5b, 1'b1, "hw bright");
    shot(160, c5d, 1'b0, "hw dark");

    // Ten-input network on a 300 us window with the paper's count pattern.
    wr(REG_CTRL, 32'hA1);
    cur_bins = 10;
    shot(300, cfig, 1'b0, "hw 10 bins");
    // Twelve sub-bins: the last two are counted but not stored.
    shot(370, c12, 1'b0, "hw overflow");

    check(n_bin_irq > 0, "mechanism: sub-bin interrupt");
    check(n_gate_irq > 0, "mechanism: gate-end interrupt");
    check(n_nn_irq > 0, "mechanism: engine-done interrupt");
    check(n_sw_shot > 0, "mechanism: software-mode shot");
    check(n_hw_shot > 0, "mechanism: hardware-mode shot");
    check(n_mode_switch > 0, "mechanism: mode switch");
    check(n_bright > 0, "mechanism: bright burst");
    check(n_dark > 0, "mechanism: dark result");
    check(n_partial > 0, "mechanism: partial sub-bin dropped");
    check(n_overflow > 0, "mechanism: sub-bin overflow");
    $display("mechanisms: bin_irq=%0d gate_irq=%0d nn_irq=%0d sw=%0d hw=%0d switch=%0d bright=%0d dark=%0d partial=%0d overflow=%0d",
             n_bin_irq, n_gate_irq, n_nn_irq, n_sw_shot, n_hw_shot, n_mode_switch, n_bright,
             n_dark, n_partial, n_overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
