// wifi_rx_chest_eq: channel estimation and subcarrier equalization stage of
// an 802.11a/g/n (20 MHz, single stream) OFDM receiver, with the state machine
// that walks it through the Legacy and HT frame structure.
//
// Upstream (packet detection, frequency offset correction, 64-point FFT) and
// downstream (demodulation, decoding, FCS check) blocks are not part of this
// module: the FFT output is the sample input, the equalized subcarriers are
// the output, and the decoder reports what it found in the signal fields.
//
// Sequence of one packet (each OFDM symbol arrives as a burst of 64 FFT
// samples, bin order 0..63):
//   pkt_start           -> CE_LLTF: chan_est (Legacy) takes L-LTF1 and L-LTF2.
//   L-SIG               -> equalizer, Legacy, 1 symbol, pilot index 0.
//   wait for sig_valid  (decoder has read L-SIG and checked for HT):
//     Legacy packet     -> equalizer, Legacy, sig_nsym data symbols, pilot
//                          index 1; then idle.
//     HT packet         -> equalizer, Legacy, 2 symbols (HT-SIG1/2), index 1;
//                          wait for htsig_valid (HT-SIG decoded, giving the
//                          HT symbol count and the smoothing bit);
//                          drop the HT-STF symbol;
//                          chan_est (HT) takes the HT-LTF, smoothing as
//                          recommended in HT-SIG;
//                          equalizer restarted in HT mode, htsig_nsym data
//                          symbols, pilot index 3; then idle.
// Legacy smoothing is set by the leg_smooth configuration input.
// Samples that arrive while neither block accepts them (the decoder answered
// too late) are dropped and counted in `dropped`.
//
// Timing: the channel estimate is ready at most 57 cycles after the last LTF
// sample and the equalizer needs at most 225 cycles per symbol, so at
// 100 MHz both keep up with one symbol per 3.6 us (360 cycles).
// The block split, the restart of the equalizer at the Legacy/HT switch and
// the per-symbol flow follow the paper; the handshake with the decoder and
// the handling of late samples are this design's choices.
// The start-while-busy assertion is disabled during reset, so rst_n is seen
// both as the flops' asynchronous reset and as a synchronous term there.
module wifi_rx_chest_eq
  import wifi_rx_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // from packet detection
  input  logic                    pkt_start,
  // from the FFT
  input  logic                    fft_valid,
  input  cplx16_t                 fft_data,
  output logic                    fft_ready,
  // configuration
  input  logic                    leg_smooth,
  // from the demodulator/decoder
  input  logic                    sig_valid,
  input  logic                    sig_ht,
  input  logic [11:0]             sig_nsym,
  input  logic                    htsig_valid,
  input  logic [11:0]             htsig_nsym,
  input  logic                    htsig_smooth,
  // to the demodulator/decoder
  output logic                    eq_valid,
  output cplx16_t                 eq_data,
  output sc_idx_t                 eq_k,
  output logic                    eq_last,
  output logic                    eq_sym_done,
  output logic                    eq_ht,
  output logic                    pkt_done,
  // status
  output logic                    csi_valid,
  output logic signed [PH_W-1:0]  cpe,
  output logic signed [PEG_W-1:0] acc_peg,
  output logic [15:0]             dropped
);

  typedef enum logic [3:0] {
    T_IDLE, T_CE_LLTF, T_EQ_LSIG, T_WAIT_SIG, T_EQ_LDATA, T_EQ_HTSIG,
    T_WAIT_HTSIG, T_SKIP_HTSTF, T_CE_HTLTF, T_EQ_HTDATA
  } top_state_e;
  top_state_e state;

  logic [5:0] skip_cnt;

  // ---- channel estimator -------------------------------------------------
  logic       ce_start, ce_ht, ce_smooth, ce_in_valid, ce_in_ready, ce_done;
  logic [5:0] csi_bin;
  cplx16_t    csi_rd;

  chan_est u_ce (
    .clk, .rst_n,
    .start(ce_start), .ht(ce_ht), .smooth(ce_smooth),
    .in_valid(ce_in_valid), .in_data(fft_data), .in_ready(ce_in_ready),
    .done(ce_done), .csi_valid(csi_valid),
    .csi_rd_bin(csi_bin), .csi_rd(csi_rd)
  );

  // ---- equalizer -------------------------------------------------------------
  logic        eq_start, eq_mode_ht, eq_busy, eq_done, eq_in_valid, eq_in_ready;
  logic [11:0] eq_nsym;
  logic [6:0]  eq_pol, pol_nr;

  equalizer u_eq (
    .clk, .rst_n,
    .start(eq_start), .ht(eq_mode_ht), .nof_sym(eq_nsym), .pol_start(eq_pol),
    .busy(eq_busy), .done(eq_done),
    .in_valid(eq_in_valid), .in_data(fft_data), .in_ready(eq_in_ready),
    .csi_rd_bin(csi_bin), .csi_rd(csi_rd),
    .out_valid(eq_valid), .out_data(eq_data), .out_k(eq_k), .out_last(eq_last),
    .sym_done(eq_sym_done), .cpe(cpe), .acc_peg(acc_peg), .pol_nr(pol_nr)
  );

  // ---- sample routing ----------------------------------------------------------
  logic ce_phase, eq_phase, skip_phase;
  always_comb begin
    ce_phase    = (state == T_CE_LLTF) || (state == T_CE_HTLTF);
    eq_phase    = (state == T_EQ_LSIG) || (state == T_EQ_LDATA) ||
                  (state == T_EQ_HTSIG) || (state == T_EQ_HTDATA);
    skip_phase  = (state == T_SKIP_HTSTF);
    ce_in_valid = fft_valid && ce_phase;
    eq_in_valid = fft_valid && eq_phase;
    fft_ready   = (ce_phase && ce_in_ready) || (eq_phase && eq_in_ready) || skip_phase;
  end

  // ---- sequencing ------------------------------------------------------------------
  logic [11:0] ht_nsym_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      ce_start   <= 1'b0;
      ce_ht      <= 1'b0;
      ce_smooth  <= 1'b0;
      eq_start   <= 1'b0;
      eq_mode_ht <= 1'b0;
      eq_nsym    <= '0;
      eq_pol     <= '0;
      eq_ht      <= 1'b0;
      skip_cnt   <= '0;
      ht_nsym_q  <= '0;
      pkt_done   <= 1'b0;
      dropped    <= '0;
    end else begin
      ce_start <= 1'b0;
      eq_start <= 1'b0;
      pkt_done <= 1'b0;
      if (fft_valid && !fft_ready) dropped <= dropped + 16'd1;
      case (state)
        T_IDLE: if (pkt_start) begin
          ce_start  <= 1'b1;
          ce_ht     <= 1'b0;
          ce_smooth <= leg_smooth;
          state     <= T_CE_LLTF;
        end
        T_CE_LLTF: if (ce_done) begin
          eq_start   <= 1'b1;
          eq_mode_ht <= 1'b0;
          eq_ht      <= 1'b0;
          eq_nsym    <= 12'd1;
          eq_pol     <= 7'd0;
          state      <= T_EQ_LSIG;
        end
        T_EQ_LSIG: if (eq_done) state <= T_WAIT_SIG;
        T_WAIT_SIG: if (sig_valid) begin
          eq_start   <= (sig_ht || sig_nsym != '0);
          eq_mode_ht <= 1'b0;
          eq_nsym    <= sig_ht ? 12'd2 : sig_nsym;
          eq_pol     <= 7'd1;
          state      <= sig_ht ? T_EQ_HTSIG : (sig_nsym != '0 ? T_EQ_LDATA : T_IDLE);
          pkt_done   <= !sig_ht && sig_nsym == '0;
        end
        T_EQ_LDATA: if (eq_done) begin
          pkt_done <= 1'b1;
          state    <= T_IDLE;
        end
        T_EQ_HTSIG: if (eq_done) state <= T_WAIT_HTSIG;
        T_WAIT_HTSIG: if (htsig_valid) begin
          ht_nsym_q <= htsig_nsym;
          ce_smooth <= htsig_smooth;
          skip_cnt  <= '0;
          state     <= T_SKIP_HTSTF;
        end
        T_SKIP_HTSTF: if (fft_valid) begin
          skip_cnt <= skip_cnt + 6'd1;
          if (skip_cnt == 6'd63) begin
            ce_start <= 1'b1;
            ce_ht    <= 1'b1;
            state    <= T_CE_HTLTF;
          end
        end
        T_CE_HTLTF: if (ce_done) begin
          eq_start   <= (ht_nsym_q != '0);
          eq_mode_ht <= 1'b1;
          eq_ht      <= 1'b1;
          eq_nsym    <= ht_nsym_q;
          eq_pol     <= 7'd3;
          state      <= (ht_nsym_q != '0) ? T_EQ_HTDATA : T_IDLE;
          pkt_done   <= (ht_nsym_q == '0);
        end
        T_EQ_HTDATA: if (eq_done) begin
          pkt_done <= 1'b1;
          state    <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // The equalizer is only started when idle.
  assert property (@(posedge clk) disable iff (!rst_n) eq_start |-> !eq_busy);

  logic unused_ok;
  assign unused_ok = ^pol_nr;

endmodule
