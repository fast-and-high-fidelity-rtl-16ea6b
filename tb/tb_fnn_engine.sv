// tb_fnn_engine -- self-checking test of the hardware feedforward network.
//
// Weights are written through the memory port and read back. For each case the
// expected outputs come from a reference forward pass written here with 64-bit
// integers: hidden h = min(max(B1[h] + sum_i W1[h][i]*x[i], 0), 2**24-1), then
// y[o] = B2[o]*256 + sum_h W2[o][h]*hid[h], bright when y1 > y2. Cases: a hand-worked
// network, random networks with random input counts and input numbers 1..10,
// networks that push hidden units below zero (ReLU) and above the hidden range
// (saturation), and the latency 20*(n+1) + 2*21 cycles from start to done.
module tb_fnn_engine;
  import readout_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic wmem_we = 0;
  logic [8:0] wmem_waddr = '0, wmem_raddr = '0;
  logic signed [15:0] wmem_wdata = '0, wmem_rdata;
  logic start = 0;
  logic [3:0] n_in = 4'd5;
  logic [9:0][15:0] counts = '0;
  logic busy, done;
  qubit_state_e state;
  logic signed [47:0] y1, y2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fnn_engine dut (.clk, .rst, .wmem_we, .wmem_waddr, .wmem_wdata, .wmem_raddr, .wmem_rdata,
                  .start, .n_in, .counts, .busy, .done, .state, .y1, .y2);

  int signed mem [262];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic load_weights();
    for (int k = 0; k < 262; k++) begin
      wmem_we <= 1'b1; wmem_waddr <= 9'(k); wmem_wdata <= 16'(mem[k]);
      @(posedge clk);
    end
    wmem_we <= 1'b0;
    @(posedge clk);
    for (int k = 0; k < 262; k += 37) begin
      wmem_raddr <= 9'(k);
      @(posedge clk);
      check(int'(wmem_rdata) == mem[k], $sformatf("readback %0d", k));
    end
  endtask

  task automatic run_case(input int n, input int x[10], input string name);
    longint hid[20], acc, y[2];
    int cyc, exp_cyc;
    for (int h = 0; h < 20; h++) begin
      acc = mem[200 + h];
      for (int i = 0; i < n; i++) acc += longint'(mem[h * 10 + i]) * x[i];
      hid[h] = (acc < 0) ? 0 : ((acc > 64'd16777215) ? 16777215 : acc);
    end
    for (int o = 0; o < 2; o++) begin
      y[o] = longint'(mem[260 + o]) * 256;
      for (int h = 0; h < 20; h++) y[o] += longint'(mem[220 + o * 20 + h]) * hid[h];
    end
    for (int i = 0; i < 10; i++) counts[i] <= 16'(x[i]);
    n_in <= 4'(n);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin
      @(negedge clk);
      cyc++;
    end while (!done && cyc < 1000);
    // cyc counts clock edges from the one that takes start to the one that raises done
    exp_cyc = 20 * (n + 1) + 2 * 21;
    check(cyc - 1 == exp_cyc, $sformatf("%s latency %0d exp %0d", name, cyc - 1, exp_cyc));
    check(longint'(y1) == y[0] && longint'(y2) == y[1],
          $sformatf("%s y1=%0d exp %0d y2=%0d exp %0d", name, y1, y[0], y2, y[1]));
    check(state == ((y[0] > y[1]) ? STATE_BRIGHT : STATE_DARK), {name, " state"});
    @(posedge clk);
  endtask

  initial begin
    int x[10];
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);

    // Hand-worked: hidden 0 sums the first two counts (1.0 weights), hidden 1 is
    // -1.0 * count0 (always clipped by ReLU); y1 = 2*hid0 - 3.0, y2 = 4*hid1 + 0.
    foreach (mem[k]) mem[k] = 0;
    mem[0] = 256; mem[1] = 256;              // W1[0][0..1] = 1.0
    mem[10] = -256;                          // W1[1][0] = -1.0
    mem[220] = 2; mem[241] = 4;              // W2[0][0] = 2/256, W2[1][1] = 4/256
    mem[260] = -3;                           // B2[0] = -3
    load_weights();
    x = '{1, 0, 0, 0, 0, 0, 0, 0, 0, 0};     // hid0 = 256 -> y1 = 512 - 768 < 0 = y2: dark
    run_case(5, x, "hand dark");
    check(y1 == -48'sd256 && state == STATE_DARK, "hand dark exact");
    x = '{1, 1, 0, 0, 0, 0, 0, 0, 0, 0};     // hid0 = 512 -> y1 = 1024 - 768 = 256 > 0: bright
    run_case(5, x, "hand bright");
    check(y1 == 48'sd256 && y2 == 48'sd0 && state == STATE_BRIGHT, "hand bright exact");
    x = '{1, 1, 0, 0, 0, 0, 0, 0, 0, 0};     // only one input used: hid0 = 256 -> dark
    run_case(1, x, "hand one input");
    check(state == STATE_DARK, "hand one input exact");

    // Random networks and shots.
    for (int r = 0; r < 12; r++) begin
      foreach (mem[k]) mem[k] = int'($urandom_range(0, 65535)) - 32768;
      load_weights();
      for (int s = 0; s < 8; s++) begin
        foreach (x[i]) x[i] = int'($urandom_range(0, (s < 4) ? 8 : 65535));
        run_case(int'($urandom_range(1, 10)), x, $sformatf("random %0d.%0d", r, s));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
