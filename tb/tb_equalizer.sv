// tb_equalizer: self-checking test of the equalizer.
// A random channel H (magnitudes 2000..8000, random phases) is presented on
// the CSI read port. Each OFDM symbol carries random QPSK data and BPSK pilots
// whose polarity follows the 802.11 pilot sequence (rebuilt here from its
// recurrence), multiplied by H and by a phase error exp(j*(theta0 + k*delta))
// with a random common phase theta0 and a gradient delta that drifts from
// symbol to symbol. Symbols arrive as 64-sample bursts every 360 cycles (one
// short-GI symbol at 100 MHz).
// Checks, for a Legacy run and an HT run:
//   * every output equals the transmitted QPSK value * 1024 within 24 units;
//   * outputs come in increasing k over exactly the 48 / 52 data subcarriers;
//   * the reported CPE equals angle(sum over pilots of conj(X)*P*H), worked
//     out here in floating point, within 3 phase units;
//   * the equalizer is ready when each burst starts, and a symbol takes
//     221 (Legacy) / 225 (HT) cycles from its first sample to its last
//     output, under the 360 available.
module tb_equalizer;
  import wifi_rx_pkg::*;
  localparam real PI_R   = 3.14159265358979323846;
  localparam int  PERIOD = 360;
  localparam int  NSYM   = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ht = 1'b0, in_valid = 1'b0;
  logic [11:0] nof_sym = '0;
  logic [6:0] pol_start = '0, pol_nr;
  cplx16_t in_data = '0, csi_rd, out_data;
  logic busy, done, in_ready, out_valid, out_last, sym_done;
  logic [5:0] csi_rd_bin;
  sc_idx_t out_k;
  logic signed [PH_W-1:0] cpe;
  logic signed [PEG_W-1:0] acc_peg;
  int checks = 0, failures = 0;
  longint cyc = 0;

  equalizer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // channel, read combinationally like the estimator's port
  cplx16_t csi_mem [64];
  assign csi_rd = csi_mem[csi_rd_bin];

  logic pneg [127];
  real  tx_i [64], tx_q [64];   // transmitted values of the current symbol
  real  theta0;
  real  cpe_re, cpe_im;  // Eq. 2 sum for the current symbol
  int   exp_k [$];
  longint t_first;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  function automatic int kof(input int b);
    return (b < 32) ? b : b - 64;
  endfunction

  function automatic logic is_data(input logic h, input int k);
    automatic int e = h ? 28 : 26;
    return k != 0 && k >= -e && k <= e && !(k == -21 || k == -7 || k == 7 || k == 21);
  endfunction

  // output checker
  int n_out;
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int k = int'(out_k);
    automatic int b = k & 63;
    automatic int want_k = (exp_k.size() != 0) ? exp_k.pop_front() : 999;
    checks++;
    if (k != want_k) fail($sformatf("out_k %0d expected %0d", k, want_k));
    checks++;
    if (real'(out_data.i) - 1024.0 * tx_i[b] > 24.0 || 1024.0 * tx_i[b] - real'(out_data.i) > 24.0 ||
        real'(out_data.q) - 1024.0 * tx_q[b] > 24.0 || 1024.0 * tx_q[b] - real'(out_data.q) > 24.0)
      fail($sformatf("k=%0d got (%0d,%0d) expected (%f,%f)", k, out_data.i, out_data.q,
                     1024.0 * tx_i[b], 1024.0 * tx_q[b]));
    n_out++;
    if (out_last) begin
      automatic longint want_t = ht ? 225 : 221;
      checks++;
      if (cyc - t_first != want_t || cyc - t_first >= longint'(PERIOD))
        fail($sformatf("symbol took %0d cycles, expected %0d", cyc - t_first, want_t));
    end
  end

  task automatic run(input logic h, input int pol0);
    real delta = 0.0;
    real hr [64], hi [64];
    for (int b = 0; b < 64; b++) begin
      automatic real mag = 2000.0 + $urandom_range(0, 6000);
      automatic real ph  = ($urandom_range(0, 100000) / 100000.0) * 2.0 * PI_R;
      hr[b] = mag * $cos(ph);
      hi[b] = mag * $sin(ph);
      csi_mem[b].i = 16'($rtoi(hr[b]));
      csi_mem[b].q = 16'($rtoi(hi[b]));
      hr[b] = real'(csi_mem[b].i);
      hi[b] = real'(csi_mem[b].q);
    end
    @(negedge clk);
    start = 1'b1; ht = h; nof_sym = 12'(NSYM); pol_start = 7'(pol0);
    @(negedge clk);
    start = 1'b0;
    for (int s = 0; s < NSYM; s++) begin
      automatic logic p = pneg[(pol0 + s) % 127];
      automatic logic [3:0] base = 4'b1000;
      theta0 = ($urandom_range(0, 100000) / 100000.0) * 2.0 * PI_R - PI_R;
      delta  = delta + (($urandom_range(0, 1000) / 1000.0) - 0.3) * 0.004;
      for (int b = 0; b < 64; b++) begin
        automatic int k = kof(b);
        if (k == -21 || k == -7 || k == 7 || k == 21) begin
          automatic int m = (k == -21) ? 0 : (k == -7) ? 1 : (k == 7) ? 2 : 3;
          automatic logic neg = (h ? base[(s + m) % 4] : base[m]) ^ p;
          tx_i[b] = neg ? -1.0 : 1.0;
          tx_q[b] = 0.0;
        end else if (is_data(h, k)) begin
          tx_i[b] = ($urandom_range(0, 1) != 0) ? 0.7071067811865476 : -0.7071067811865476;
          tx_q[b] = ($urandom_range(0, 1) != 0) ? 0.7071067811865476 : -0.7071067811865476;
        end else begin
          tx_i[b] = 0.0;
          tx_q[b] = 0.0;
        end
      end
      // expected output order: increasing k
      for (int k = -32; k < 32; k++) if (is_data(h, k)) exp_k.push_back(k);
      checks++;
      if (!in_ready) fail($sformatf("not ready at symbol %0d", s));
      t_first = cyc;
      cpe_re = 0.0;
      cpe_im = 0.0;
      for (int b = 0; b < 64; b++) begin
        automatic real a  = theta0 + kof(b) * delta;
        automatic real yr = tx_i[b] * hr[b] - tx_q[b] * hi[b];
        automatic real yi = tx_i[b] * hi[b] + tx_q[b] * hr[b];
        automatic real xr, xi;
        in_valid  = 1'b1;
        in_data.i = 16'($rtoi(yr * $cos(a) - yi * $sin(a)));
        in_data.q = 16'($rtoi(yr * $sin(a) + yi * $cos(a)));
        xr = real'(in_data.i);
        xi = real'(in_data.q);
        if (kof(b) == -21 || kof(b) == -7 || kof(b) == 7 || kof(b) == 21) begin
          // conj(X) * P * H, P = tx_i at a pilot
          cpe_re += tx_i[b] * (xr * hr[b] + xi * hi[b]);
          cpe_im += tx_i[b] * (xr * hi[b] - xi * hr[b]);
        end
        @(negedge clk);
      end
      in_valid = 1'b0;
      repeat (PERIOD - 64) @(negedge clk);
      // CPE reported for this symbol (Eq. 2)
      begin
        automatic real d = real'(cpe) - $atan2(cpe_im, cpe_re) * 2048.0 / PI_R;
        if (d > 2048.0) d -= 4096.0;
        if (d < -2048.0) d += 4096.0;
        checks++;
        if (d > 3.0 || d < -3.0) fail($sformatf("cpe %0d, theta0 %f", cpe, theta0));
      end
      checks++;
      if (exp_k.size() != 0) begin fail("outputs missing"); exp_k.delete(); end
    end
    checks++;
    if (busy) fail("still busy after the last symbol");
  endtask

  initial begin
    logic hist [0:133];
    for (int n = 0; n < 7; n++) hist[n] = 1'b1;
    for (int n = 7; n < 134; n++) hist[n] = hist[n-7] ^ hist[n-4];
    for (int n = 0; n < 127; n++) pneg[n] = hist[n+7];
    for (int b = 0; b < 64; b++) csi_mem[b] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    n_out = 0;
    run(1'b0, 0);
    checks++;
    if (n_out != NSYM * 48) fail($sformatf("%0d Legacy outputs", n_out));
    n_out = 0;
    run(1'b1, 3);
    checks++;
    if (n_out != NSYM * 52) fail($sformatf("%0d HT outputs", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * NSYM * PERIOD + 2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
