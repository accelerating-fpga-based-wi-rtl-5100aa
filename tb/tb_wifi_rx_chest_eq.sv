// tb_wifi_rx_chest_eq: end-to-end test of the channel estimation and
// equalization stage, at its only (default) configuration.
//
// The testbench plays the blocks around the design: it produces the FFT
// output of whole packets (64-sample bursts, one per OFDM symbol, every 400
// cycles for long-GI Legacy symbols and every 360 cycles for short-GI HT data
// symbols at 100 MHz) and acts as the decoder that reports the signal fields.
// Each packet goes through a channel H[k] = g * exp(-j*2*pi*k*tau/64) (a
// complex gain and a delay, smooth enough for CSI smoothing) and a per-symbol
// phase error exp(j*(theta0 + k*delta)) with a drifting gradient.
// Packets:
//   1. Legacy, 6 data symbols, no smoothing;
//   2. HT, 8 data symbols, smoothing requested in HT-SIG, Legacy smoothing on,
//      and a different channel for the HT part;
//   3. Legacy, 130 data symbols, so the pilot polarity index wraps;
//   4. a stray burst while idle, which must be dropped and counted.
// Every equalized subcarrier (L-SIG, HT-SIG, data) must equal the transmitted
// QPSK value * 1024 within 40 units, and arrive in the expected order. Each
// mechanism (Legacy CE, HT CE, smoothing, equalizer restart in HT mode,
// HT-STF skip, PEG tracking, polarity wrap, dropped samples) is counted and
// must have happened.
module tb_wifi_rx_chest_eq;
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

  // ---- reference data ---------------------------------------------------------
  int lltf [53] = '{1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,1,1,-1,-1,1,1,-1,1,-1,1,1,1,1,0,
                    1,-1,-1,1,1,-1,1,-1,1,-1,-1,-1,-1,-1,1,1,-1,-1,1,-1,1,-1,1,1,1,1};
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

  // expected equalizer outputs
  int  exp_k [$];
  real exp_i [$], exp_q [$];

  // mechanism counters
  int n_leg_ce = 0, n_ht_ce = 0, n_smooth = 0, n_ht_restart = 0, n_htstf = 0;
  int n_peg = 0, n_wrap = 0, n_drop = 0, n_out = 0;

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
  end

  // mechanism observation
  logic [6:0] pol_prev = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ce.start && !dut.u_ce.ht) n_leg_ce++;
    if (dut.u_ce.start && dut.u_ce.ht) n_ht_ce++;
    if (dut.u_ce.start && dut.u_ce.smooth) n_smooth++;
    if (dut.u_eq.start && dut.u_eq.ht) n_ht_restart++;
    if (dut.state == dut.T_SKIP_HTSTF && fft_valid && dut.skip_cnt == 6'd63) n_htstf++;
    if (eq_sym_done && acc_peg != 0) n_peg++;
    if (pol_prev == 7'd126 && dut.u_eq.pol_nr == 7'd0) n_wrap++;
    pol_prev <= dut.u_eq.pol_nr;
  end

  // ---- symbol generation ------------------------------------------------------------
  real gr, gi, tau;   // current channel
  real delta;         // current phase error gradient

  function automatic void chan(input int k, output real hr, output real hi);
    automatic real a = -2.0 * PI_R * k * tau / 64.0;
    hr = gr * $cos(a) - gi * $sin(a);
    hi = gr * $sin(a) + gi * $cos(a);
  endfunction

  // kind: 0 = LTF (legacy), 1 = LTF (HT), 2 = Legacy-format symbol,
  //       3 = HT data symbol, 4 = HT-STF (not equalized)
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
      delta = delta + (($urandom_range(0, 1000) / 1000.0) - 0.3) * 0.002;
    end
    for (int b = 0; b < 64; b++) begin
      automatic int k = kof(b);
      ti[b] = 0.0; tq[b] = 0.0;
      case (kind)
        0, 1: ti[b] = real'(lt(kind == 1, k));
        4:    begin ti[b] = ($urandom_range(0, 1) != 0) ? 1.0 : -1.0; end
        default: begin
          if (is_pilot(k)) begin
            automatic int m = (k == -21) ? 0 : (k == -7) ? 1 : (k == 7) ? 2 : 3;
            ti[b] = ((kind == 3 ? base[(ht_n + m) % 4] : base[m]) ^ p) ? -1.0 : 1.0;
          end else if (is_data(kind == 3, k)) begin
            ti[b] = ($urandom_range(0, 1) != 0) ? 0.7071067811865476 : -0.7071067811865476;
            tq[b] = ($urandom_range(0, 1) != 0) ? 0.7071067811865476 : -0.7071067811865476;
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
      if (!fft_ready && kind != 5) fail($sformatf("sample dropped (kind %0d)", kind));
      @(negedge clk);
    end
    fft_valid = 1'b0;
    repeat (period - 64) @(negedge clk);
  endtask

  // decoder model: answer 20 cycles after the signal symbol has been equalized
  task automatic decoder_sig(input logic ht, input int nsym);
    repeat (20) @(negedge clk);
    sig_valid = 1'b1; sig_ht = ht; sig_nsym = 12'(nsym);
    @(negedge clk);
    sig_valid = 1'b0;
  endtask

  task automatic new_channel();
    gr    = 2000.0 + $urandom_range(0, 4000);
    gi    = $signed($urandom_range(0, 6000)) - 3000.0;
    tau   = ($urandom_range(0, 600) / 1000.0) - 0.3;
    delta = 0.0;
  endtask

  task automatic legacy_packet(input int nsym, input logic smooth);
    new_channel();
    leg_smooth = smooth;
    @(negedge clk); pkt_start = 1'b1; @(negedge clk); pkt_start = 1'b0;
    repeat (16) @(negedge clk);  // detection precedes the first L-LTF burst
    send_symbol(0, 0, 0, 400);
    send_symbol(0, 0, 0, 400);
    fork
      send_symbol(2, 0, 0, 400);                                   // L-SIG
      begin wait (dut.state == dut.T_WAIT_SIG); decoder_sig(1'b0, nsym); end
    join
    for (int s = 0; s < nsym; s++) send_symbol(2, 1 + s, 0, 400);
    wait (dut.state == dut.T_IDLE);
  endtask

  task automatic ht_packet(input int nsym, input logic smooth);
    new_channel();
    leg_smooth = 1'b1;
    @(negedge clk); pkt_start = 1'b1; @(negedge clk); pkt_start = 1'b0;
    repeat (16) @(negedge clk);  // detection precedes the first L-LTF burst
    send_symbol(0, 0, 0, 400);
    send_symbol(0, 0, 0, 400);
    fork
      send_symbol(2, 0, 0, 400);                                   // L-SIG
      begin wait (dut.state == dut.T_WAIT_SIG); decoder_sig(1'b1, 0); end
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
    new_channel();                                                 // HT part sees another channel
    send_symbol(1, 0, 0, 400);                                     // HT-LTF
    for (int s = 0; s < nsym; s++) send_symbol(3, 3 + s, s, 360);
    wait (dut.state == dut.T_IDLE);
  endtask

  initial begin
    logic hist [0:133];
    for (int n = 0; n < 7; n++) hist[n] = 1'b1;
    for (int n = 7; n < 134; n++) hist[n] = hist[n-7] ^ hist[n-4];
    for (int n = 0; n < 127; n++) pneg[n] = hist[n+7];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(negedge clk);

    legacy_packet(6, 1'b0);
    checks++; if (n_out != 7 * 48) fail($sformatf("packet 1: %0d outputs", n_out));
    ht_packet(8, 1'b1);
    checks++; if (n_out != 7 * 48 + 3 * 48 + 8 * 52) fail($sformatf("packet 2: %0d outputs", n_out));
    legacy_packet(130, 1'b0);
    checks++; if (exp_k.size() != 0) fail("outputs missing");
    checks++; if (dropped != 0) fail($sformatf("%0d samples dropped during packets", dropped));
    // stray burst while idle
    fork
      send_symbol(5, 0, 0, 100);
    join
    n_drop = int'(dropped);
    checks++; if (dropped != 64) fail($sformatf("dropped %0d, expected 64", dropped));

    $display("mechanisms: legacy CE %0d, HT CE %0d, smoothing %0d, HT restart %0d, HT-STF skip %0d,",
             n_leg_ce, n_ht_ce, n_smooth, n_ht_restart, n_htstf);
    $display("            PEG tracked %0d, polarity wrap %0d, dropped samples %0d, outputs %0d",
             n_peg, n_wrap, n_drop, n_out);
    checks++; if (n_leg_ce == 0) fail("no Legacy channel estimation");
    checks++; if (n_ht_ce == 0) fail("no HT channel estimation");
    checks++; if (n_smooth == 0) fail("no smoothing");
    checks++; if (n_ht_restart == 0) fail("no equalizer restart in HT mode");
    checks++; if (n_htstf == 0) fail("no HT-STF skip");
    checks++; if (n_peg == 0) fail("no PEG tracking");
    checks++; if (n_wrap == 0) fail("no polarity wrap");
    checks++; if (n_drop == 0) fail("no dropped samples");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
