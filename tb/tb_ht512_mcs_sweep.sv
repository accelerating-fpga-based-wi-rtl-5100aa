// tb_ht512_mcs_sweep: the receiver-sensitivity workload, run through the
// channel estimation and equalization stage at its default configuration.
//
// The sensitivity measurement sends HT packets with a 512-byte payload at
// MCS 0..7 (20 MHz, one stream). This testbench sends one such packet per MCS,
// back to back, with the data symbols spaced 360 cycles apart (short guard
// interval at 100 MHz), which is the tightest schedule the FFT can produce.
// The number of data symbols is ceil((16 + 8*512 + 6) / N_DBPS), with N_DBPS
// = 26, 52, 78, 104, 156, 208, 234, 260 for MCS 0..7 (802.11n), i.e. 159, 80,
// 53, 40, 27, 20, 18 and 16 symbols. Data subcarriers carry BPSK, QPSK,
// 16-QAM or 64-QAM points as the MCS prescribes; smoothing alternates.
// Each packet sees its own channel (gain and delay), a drifting phase error
// gradient and +-2 LSB of noise. Checks:
//   * every equalized subcarrier equals the transmitted point * 1024 within
//     40 units, in increasing k;
//   * every HT data symbol ends exactly 225 cycles after its first sample,
//     i.e. within the 360-cycle symbol period;
//   * no sample is dropped and every expected output arrives.
// Radio effects (noise at the sensitivity level, packet error rate) are not
// modelled: the point is that the stage holds and runs these packets.
module tb_ht512_mcs_sweep;
  import wifi_rx_pkg::*;
  localparam real PI_R = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pkt_start = 1'b0, fft_valid = 1'b0, fft_ready, leg_smooth = 1'b0;
  cplx16_t fft_data = '0, eq_data;
  logic sig_valid = 1'b0, sig_ht = 1'b0, htsig_valid = 1'b0, htsig_smooth = 1'b0;
  logic [11:0] sig_nsym = '0, htsig_nsym = '0;
  logic eq_valid, eq_last, eq_sym_done, eq_ht, pkt_done, csi_valid;
  sc_idx_t eq_k;
  logic signed [PH_W-1:0] cpe;
  logic signed [PEG_W-1:0] acc_peg;
  logic [15:0] dropped;
  int checks = 0, failures = 0;

  wifi_rx_chest_eq dut (.*);

  always #5 clk = ~clk;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- reference data ---------------------------------------------------------
  int lltf [53] = '{1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,0,
                    1,-1,-1,1,1,-1,1,-1,1,-1,-1,-1,-1,-1,1,1,-1,-1,1,-1,1,-1,1,1,1,1};
  int ndbps [8] = '{26, 52, 78, 104, 156, 208, 234, 260};
  int nbpsc [8] = '{1, 2, 2, 4, 4, 6, 6, 6};   // coded bits per subcarrier
  logic pneg [127];

  function automatic int lt(input logic h, input int k);
    if (k >= -26 && k <= 26) return lltf[k + 26];
    if (h && (k == -28 || k == -27)) return 1;
    if (h && (k == 27 || k == 28)) return -1;
    return 0;
  endfunction

  function automatic int kof(input int b);
    return (b < 32) ? b : b - 64;
  endfunction

  function automatic logic is_pilot(input int k);
    return k == -21 || k == -7 || k == 7 || k == 21;
  endfunction

  function automatic logic is_data(input logic h, input int k);
    automatic int e = h ? 28 : 26;
    return k != 0 && k >= -e && k <= e && !is_pilot(k);
  endfunction

  // one random PAM level of a square constellation with 2**(bits/2) levels per
  // axis, normalised to unit average power
  function automatic real pam(input int bits);
    automatic int m = 1 << (bits / 2);
    automatic int l = 2 * $urandom_range(0, m - 1) - (m - 1);
    case (bits)
      2:       return real'(l) / $sqrt(2.0);
      4:       return real'(l) / $sqrt(10.0);
      default: return real'(l) / $sqrt(42.0);
    endcase
  endfunction

  int  exp_k [$];
  real exp_i [$], exp_q [$];
  longint t_sym [$];   // first-sample cycle of each HT data symbol
  int n_out = 0, n_ht_sym = 0;
  int mod_bits = 1;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  always @(posedge clk) if (rst_n && eq_valid) begin
    automatic int  k  = int'(eq_k);
    automatic int  wk = 999;
    automatic real wi = 0.0, wq = 0.0;
    if (exp_k.size() != 0) begin
      wk = exp_k.pop_front(); wi = exp_i.pop_front(); wq = exp_q.pop_front();
    end
    n_out++;
    checks++;
    if (k != wk) fail($sformatf("eq_k %0d expected %0d", k, wk));
    checks++;
    if (real'(eq_data.i) - wi > 40.0 || wi - real'(eq_data.i) > 40.0 ||
        real'(eq_data.q) - wq > 40.0 || wq - real'(eq_data.q) > 40.0)
      fail($sformatf("k=%0d got (%0d,%0d) expected (%f,%f)", k, eq_data.i, eq_data.q, wi, wq));
    if (eq_last && eq_ht) begin
      automatic longint t0 = (t_sym.size() != 0) ? t_sym.pop_front() : cyc;
      n_ht_sym++;
      checks++;
      if (cyc - t0 != 64'd225)
        fail($sformatf("HT symbol took %0d cycles, expected 225", cyc - t0));
    end
  end

  // ---- symbol generation ------------------------------------------------------------
  real gr, gi, tau;   // current channel
  real delta;         // current phase error gradient

  function automatic void chan(input int k, output real hr, output real hi);
    automatic real a = -2.0 * PI_R * k * tau / 64.0;
    hr = gr * $cos(a) - gi * $sin(a);
    hi = gr * $sin(a) + gi * $cos(a);
  endfunction

  // kind: 0 = L-LTF, 1 = HT-LTF, 2 = Legacy-format symbol (BPSK),
  //       3 = HT data symbol (mod_bits per subcarrier), 4 = HT-STF
  task automatic send_symbol(input int kind, input int pol_idx, input int ht_n, input int period);
    real ti [64], tq [64];
    real th0;
    logic p;
    logic [3:0] base;
    th0  = 0.0;
    base = 4'b1000;
    p    = pneg[pol_idx % 127];
    if (kind >= 2) begin
      th0   = ($urandom_range(0, 100000) / 100000.0) * 2.0 * PI_R - PI_R;
      delta = delta + (($urandom_range(0, 1000) / 1000.0) - 0.5) * 0.002;
    end
    for (int b = 0; b < 64; b++) begin
      automatic int k = kof(b);
      ti[b] = 0.0; tq[b] = 0.0;
      case (kind)
        0, 1: ti[b] = real'(lt(kind == 1, k));
        4:    ti[b] = ($urandom_range(0, 1) != 0) ? 1.0 : -1.0;
        default: begin
          if (is_pilot(k)) begin
            automatic int m = (k == -21) ? 0 : (k == -7) ? 1 : (k == 7) ? 2 : 3;
            ti[b] = ((kind == 3 ? base[(ht_n + m) % 4] : base[m]) ^ p) ? -1.0 : 1.0;
          end else if (is_data(kind == 3, k)) begin
            if (kind == 2 || mod_bits == 1) begin
              ti[b] = ($urandom_range(0, 1) != 0) ? 1.0 : -1.0;
            end else begin
              ti[b] = pam(mod_bits);
              tq[b] = pam(mod_bits);
            end
          end
        end
      endcase
    end
    if (kind == 2 || kind == 3)
      for (int k = -32; k < 32; k++)
        if (is_data(kind == 3, k)) begin
          exp_k.push_back(k);
          exp_i.push_back(1024.0 * ti[k & 63]);
          exp_q.push_back(1024.0 * tq[k & 63]);
        end
    if (kind == 3) t_sym.push_back(cyc);
    for (int b = 0; b < 64; b++) begin
      automatic int  k = kof(b);
      automatic real a = th0 + k * delta;
      automatic real hr, hi, yr, yi;
      chan(k, hr, hi);
      yr = ti[b] * hr - tq[b] * hi;
      yi = ti[b] * hi + tq[b] * hr;
      fft_valid  = 1'b1;
      fft_data.i = 16'($rtoi(yr * $cos(a) - yi * $sin(a)) + $signed($urandom_range(0, 4)) - 2);
      fft_data.q = 16'($rtoi(yr * $sin(a) + yi * $cos(a)) + $signed($urandom_range(0, 4)) - 2);
      checks++;
      if (!fft_ready) fail($sformatf("sample dropped (kind %0d)", kind));
      @(negedge clk);
    end
    fft_valid = 1'b0;
    repeat (period - 64) @(negedge clk);
  endtask

  task automatic new_channel();
    gr    = 2000.0 + $urandom_range(0, 4000);
    gi    = $signed($urandom_range(0, 6000)) - 3000.0;
    tau   = ($urandom_range(0, 600) / 1000.0) - 0.3;
    delta = 0.0;
  endtask

  task automatic ht_packet(input int nsym, input logic smooth);
    new_channel();
    leg_smooth = smooth;
    @(negedge clk); pkt_start = 1'b1; @(negedge clk); pkt_start = 1'b0;
    repeat (16) @(negedge clk);
    send_symbol(0, 0, 0, 400);                                     // L-LTF1
    send_symbol(0, 0, 0, 400);                                     // L-LTF2
    fork
      send_symbol(2, 0, 0, 400);                                   // L-SIG
      begin
        wait (dut.state == dut.T_WAIT_SIG);
        repeat (20) @(negedge clk);
        sig_valid = 1'b1; sig_ht = 1'b1; sig_nsym = '0;
        @(negedge clk);
        sig_valid = 1'b0;
      end
    join
    send_symbol(2, 1, 0, 400);                                     // HT-SIG1
    fork
      send_symbol(2, 2, 0, 400);                                   // HT-SIG2
      begin
        wait (dut.state == dut.T_WAIT_HTSIG);
        repeat (20) @(negedge clk);
        htsig_valid = 1'b1; htsig_nsym = 12'(nsym); htsig_smooth = smooth;
        @(negedge clk);
        htsig_valid = 1'b0;
      end
    join
    send_symbol(4, 0, 0, 400);                                     // HT-STF
    send_symbol(1, 0, 0, 400);                                     // HT-LTF
    for (int s = 0; s < nsym; s++) send_symbol(3, 3 + s, s, 360);  // short GI
    wait (dut.state == dut.T_IDLE);
  endtask

  initial begin
    logic hist [0:133];
    int   want_out;
    for (int n = 0; n < 7; n++) hist[n] = 1'b1;
    for (int n = 7; n < 134; n++) hist[n] = hist[n-7] ^ hist[n-4];
    for (int n = 0; n < 127; n++) pneg[n] = hist[n+7];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(negedge clk);

    want_out = 0;
    for (int mcs = 0; mcs < 8; mcs++) begin
      automatic int nsym = (16 + 8 * 512 + 6 + ndbps[mcs] - 1) / ndbps[mcs];
      automatic int sym0 = n_ht_sym;
      mod_bits = nbpsc[mcs];
      ht_packet(nsym, 1'(mcs % 2));
      want_out += 3 * 48 + nsym * 52;
      repeat (50) @(negedge clk);
      $display("MCS %0d: %0d data symbols of 512-byte payload", mcs, nsym);
      checks++;
      if (n_ht_sym - sym0 != nsym) fail($sformatf("MCS %0d: %0d HT symbols", mcs, n_ht_sym - sym0));
      checks++;
      if (n_out != want_out) fail($sformatf("MCS %0d: %0d outputs, expected %0d", mcs, n_out, want_out));
    end
    checks++; if (exp_k.size() != 0) fail("outputs missing");
    checks++; if (dropped != 0) fail($sformatf("%0d samples dropped", dropped));
    checks++; if (n_ht_sym != 413) fail($sformatf("%0d HT symbols in all, expected 413", n_ht_sym));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
