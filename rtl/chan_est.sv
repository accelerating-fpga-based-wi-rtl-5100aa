// chan_est: channel estimation (CSI per subcarrier) from the long training
// fields, with optional smoothing across subcarriers.
//
// The receiver knows the LTF values L_T[k] (+1 or -1), so the channel at
// subcarrier k is the received LTF value times the known one:
//   H[k] = L_R[k] * L_T[k].
//   Legacy: two L-LTF symbols are received; the first is buffered and, as the
//           second arrives, H[k] = ((L_R1[k] + L_R2[k]) >>> 1) * L_T[k] over the
//           52 active subcarriers.
//   HT:     one HT-LTF symbol, H[k] = L_R[k] * L_T[k] over 56 subcarriers.
// Inactive bins are set to 0. When `smooth` is set, a second pass walks the
// list of active subcarriers (increasing k, DC skipped) and replaces each H
// by the mean of itself and its two list neighbours, or of itself and its
// single neighbour at the two ends of the band. Division by 3 is a
// multiplication by 21845/65536 with rounding.
//
// Storage: `raw` holds the first L-LTF and then the unsmoothed estimate;
// `csi` holds the result and is read by the equalizer through the
// combinational port csi_rd_bin -> csi_rd.
//
// Interface: pulse `start` with `ht` and `smooth`; then feed the LTF
// symbol(s), 64 samples each in FFT bin order 0..63, one per clock while
// in_valid (in_ready is high while samples are accepted). `done` pulses when
// the estimate is complete and csi_valid stays high until the next start.
// Timing: `done` rises 1 cycle after the clock edge that takes the last LTF
// sample, or 53 (Legacy) / 57 (HT) cycles with smoothing, which walks the
// active subcarriers one per cycle; the paper requires under 3.6 us
// (360 cycles at 100 MHz) and measured 1.62/1.66 us for its own version.
// The estimation formula and optional smoothing follow the paper; the
// smoothing window, the edge handling and the memory layout are this
// design's choices.
module chan_est
  import wifi_rx_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       ht,
  input  logic       smooth,
  input  logic       in_valid,
  input  cplx16_t    in_data,
  output logic       in_ready,
  output logic       done,
  output logic       csi_valid,
  input  logic [5:0] csi_rd_bin,
  output cplx16_t    csi_rd
);

  typedef enum logic [2:0] {S_IDLE, S_LTF1, S_LTF2, S_SMOOTH, S_DONE} state_e;
  state_e state;

  logic    ht_q, smooth_q;
  logic [5:0] cnt;
  cplx16_t raw [N_FFT];
  cplx16_t csi [N_FFT];

  // ---- estimate of the sample being received ----------------------------
  logic    sc_active, neg;
  sc_idx_t k_in;
  logic signed [IQ_W:0] sum_i, sum_q;
  cplx16_t h_new;

  always_comb begin
    k_in      = sc_idx_t'($signed(cnt));
    sc_active = (k_in != 0) &&
                (ht_q ? (k_in >= -28 && k_in <= 28) : (k_in >= -26 && k_in <= 26));
    neg       = ltf_neg(ht_q, int'(k_in));
    if (ht_q) begin
      sum_i = {in_data.i, 1'b0};
      sum_q = {in_data.q, 1'b0};
    end else begin
      sum_i = (IQ_W+1)'(raw[cnt].i) + (IQ_W+1)'(in_data.i);
      sum_q = (IQ_W+1)'(raw[cnt].q) + (IQ_W+1)'(in_data.q);
    end
    h_new.i = sat16(neg ? -(64'(sum_i) >>> 1) : (64'(sum_i) >>> 1));
    h_new.q = sat16(neg ? -(64'(sum_q) >>> 1) : (64'(sum_q) >>> 1));
    if (!sc_active) h_new = '0;
  end

  // ---- smoothing pass ----------------------------------------------------
  sc_list_e   ltf_list;
  logic [5:0] j, j_prev, j_next, len;
  sc_idx_t    k_c, k_p, k_n;
  logic [5:0] b_c, b_p, b_n;
  logic       first, last;
  logic signed [IQ_W+1:0] s3_i, s3_q;
  logic signed [IQ_W+17:0] m_i, m_q;
  cplx16_t    h_smooth;

  always_comb begin
    ltf_list = ht_q ? LIST_HT_LTF : LIST_LEG_LTF;
    len      = 6'(list_len(ltf_list));
    first    = (j == 6'd0);
    last     = (j == len - 6'd1);
    j_prev   = first ? j : j - 6'd1;
    j_next   = last  ? j : j + 6'd1;
  end

  sc_index_rom u_rom_c (.sel(ltf_list), .j(j),      .k(k_c), .bin(b_c));
  sc_index_rom u_rom_p (.sel(ltf_list), .j(j_prev), .k(k_p), .bin(b_p));
  sc_index_rom u_rom_n (.sel(ltf_list), .j(j_next), .k(k_n), .bin(b_n));

  always_comb begin
    if (first || last) begin
      // two-point mean at the band edges
      s3_i = (IQ_W+2)'(raw[b_p].i) + (IQ_W+2)'(raw[b_n].i);
      s3_q = (IQ_W+2)'(raw[b_p].q) + (IQ_W+2)'(raw[b_n].q);
      m_i  = (IQ_W+18)'(s3_i) <<< 15;
      m_q  = (IQ_W+18)'(s3_q) <<< 15;
    end else begin
      s3_i = (IQ_W+2)'(raw[b_p].i) + (IQ_W+2)'(raw[b_c].i) + (IQ_W+2)'(raw[b_n].i);
      s3_q = (IQ_W+2)'(raw[b_p].q) + (IQ_W+2)'(raw[b_c].q) + (IQ_W+2)'(raw[b_n].q);
      m_i  = s3_i * 18'sd21845;
      m_q  = s3_q * 18'sd21845;
    end
    h_smooth.i = sat16((64'(m_i) + 64'sd32768) >>> 16);
    h_smooth.q = sat16((64'(m_q) + 64'sd32768) >>> 16);
  end

  // ---- control and storage -----------------------------------------------
  assign in_ready = (state == S_LTF1) || (state == S_LTF2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ht_q      <= 1'b0;
      smooth_q  <= 1'b0;
      cnt       <= '0;
      j         <= '0;
      done      <= 1'b0;
      csi_valid <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: ;
        S_LTF1: if (in_valid) begin
          cnt <= cnt + 6'd1;
          if (cnt == 6'd63) state <= S_LTF2;
        end
        S_LTF2: if (in_valid) begin
          cnt <= cnt + 6'd1;
          if (cnt == 6'd63) begin
            j     <= '0;
            state <= smooth_q ? S_SMOOTH : S_DONE;
          end
        end
        S_SMOOTH: begin
          j <= j + 6'd1;
          if (last) state <= S_DONE;
        end
        S_DONE: begin
          done      <= 1'b1;
          csi_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (start) begin
        ht_q      <= ht;
        smooth_q  <= smooth;
        cnt       <= '0;
        csi_valid <= 1'b0;
        state     <= ht ? S_LTF2 : S_LTF1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LTF1 && in_valid) raw[cnt] <= in_data;
    if (state == S_LTF2 && in_valid) begin
      raw[cnt] <= h_new;
      csi[cnt] <= h_new;
    end
    if (state == S_SMOOTH) csi[b_c] <= h_smooth;
  end

  assign csi_rd = csi[csi_rd_bin];

  // k of the smoothing neighbours is only needed through their bins
  logic unused_ok;
  assign unused_ok = ^{k_c, k_p, k_n};

endmodule
