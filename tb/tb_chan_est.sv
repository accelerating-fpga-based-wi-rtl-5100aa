// tb_chan_est: self-checking test of the channel estimator.
// Four estimations: Legacy and HT, each with and without smoothing. The LTF
// symbols are random complex values per bin; the expected CSI is computed
// here from the 802.11 LTF sequences written out below: for Legacy
// floor((L1 + L2) / 2) * L_T exactly, for HT L * L_T exactly, zero on inactive
// bins, and for smoothing the floating-point mean of each active subcarrier
// and its neighbours in the active list (within one unit). The time from the
// last LTF sample to `done` must be below 360 cycles (3.6 us at 100 MHz) and
// equal to the documented 1 / 53 / 57 cycles.
module tb_chan_est;
  import wifi_rx_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ht = 1'b0, smooth = 1'b0, in_valid = 1'b0;
  cplx16_t in_data = '0, csi_rd;
  logic in_ready, done, csi_valid;
  logic [5:0] csi_rd_bin = '0;
  int checks = 0, failures = 0;

  chan_est dut (.*);

  always #5 clk = ~clk;

  // L-LTF, k = -26..26
  int lltf [53] = '{1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,0,
                    1,-1,-1,1,1,-1,1,-1,1,-1,-1,-1,-1,-1,1,1,-1,-1,1,-1,1,-1,1,1,1,1};

  function automatic int lt(input logic h, input int k);
    if (k >= -26 && k <= 26) return lltf[k + 26];
    if (h && (k == -28 || k == -27)) return 1;
    if (h && (k == 27 || k == 28)) return -1;
    return 0;
  endfunction

  function automatic int floor_div2(input int v);
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  task automatic expect_near(input int got, input real want, input real tol, input string what);
    checks++;
    if (real'(got) - want > tol || want - real'(got) > tol) begin
      failures++;
      if (failures < 20) $display("FAIL: %s: got %0d expected %f", what, got, want);
    end
  endtask

  task automatic run(input logic h, input logic sm);
    int l1i [64], l1q [64], l2i [64], l2q [64];
    int ri [64], rq [64];
    int act [$];
    int lat, want_lat;
    for (int b = 0; b < 64; b++) begin
      l1i[b] = $signed($urandom_range(0, 40000)) - 20000;
      l1q[b] = $signed($urandom_range(0, 40000)) - 20000;
      l2i[b] = $signed($urandom_range(0, 40000)) - 20000;
      l2q[b] = $signed($urandom_range(0, 40000)) - 20000;
    end
    @(negedge clk); start = 1'b1; ht = h; smooth = sm;
    @(negedge clk); start = 1'b0;
    for (int s = 0; s < (h ? 1 : 2); s++)
      for (int b = 0; b < 64; b++) begin
        in_valid = 1'b1;
        in_data.i = 16'(s == 0 ? l1i[b] : l2i[b]);
        in_data.q = 16'(s == 0 ? l1q[b] : l2q[b]);
        checks++;
        if (!in_ready) begin failures++; $display("FAIL: not ready"); end
        @(negedge clk);
      end
    in_valid = 1'b0;
    lat = 0;
    while (!done && lat < 1000) begin @(negedge clk); lat++; end
    want_lat = !sm ? 1 : (h ? 57 : 53);
    checks++;
    if (lat != want_lat || lat >= 360) begin
      failures++; $display("FAIL: latency %0d expected %0d", lat, want_lat);
    end else $display("chan_est ht=%0d smooth=%0d: %0d cycles after last sample", h, sm, lat);
    // raw estimate
    for (int b = 0; b < 64; b++) begin
      automatic int k = (b < 32) ? b : b - 64;
      automatic int t = lt(h, k);
      automatic logic on = (k != 0) && (h ? (k >= -28 && k <= 28) : (k >= -26 && k <= 26));
      if (!on) t = 0;
      if (h) begin ri[b] = l1i[b] * t; rq[b] = l1q[b] * t; end
      else begin ri[b] = floor_div2(l1i[b] + l2i[b]) * t; rq[b] = floor_div2(l1q[b] + l2q[b]) * t; end
      if (on) act.push_back(b);
    end
    // expected result in k order
    for (int b = 0; b < 64; b++) begin
      automatic int k = (b < 32) ? b : b - 64;
      automatic int edge_k = h ? 28 : 26;
      automatic real wi = ri[b], wq = rq[b];
      if (sm && k != 0 && k >= -edge_k && k <= edge_k) begin
        automatic int kp = (k == 1) ? -1 : k - 1;
        automatic int kn = (k == -1) ? 1 : k + 1;
        if (k == -edge_k) begin wi = (ri[b] + ri[kn & 63]) / 2.0; wq = (rq[b] + rq[kn & 63]) / 2.0; end
        else if (k == edge_k) begin wi = (ri[b] + ri[kp & 63]) / 2.0; wq = (rq[b] + rq[kp & 63]) / 2.0; end
        else begin
          wi = (ri[kp & 63] + ri[b] + ri[kn & 63]) / 3.0;
          wq = (rq[kp & 63] + rq[b] + rq[kn & 63]) / 3.0;
        end
      end
      csi_rd_bin = 6'(b);
      #1;
      expect_near(int'(csi_rd.i), wi, sm ? 1.0 : 0.0, $sformatf("ht=%0d sm=%0d bin %0d I", h, sm, b));
      expect_near(int'(csi_rd.q), wq, sm ? 1.0 : 0.0, $sformatf("ht=%0d sm=%0d bin %0d Q", h, sm, b));
    end
    checks++;
    if (!csi_valid) begin failures++; $display("FAIL: csi_valid low"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(1'b0, 1'b0);
    run(1'b0, 1'b1);
    run(1'b1, 1'b1);
    run(1'b1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
