// equalizer: per-symbol phase tracking and zero-forcing equalization of the
// OFDM symbols that follow the channel estimate (signal fields and data).
//
// For each OFDM symbol it runs, one after the other, the six steps of the
// equalizer loop:
//   1. get polarity   the sign P of the four pilots (pilot_polarity);
//   2. CPE estimation CPE = angle( sum_pilots conj(X[k]) * P[k] * H[k] );
//   3. LVPE (pilots)  the phase CPE + k*accPEG at each pilot, using the PEG
//                     accumulated over the previous symbols;
//   4. PEG estimation the pilots are rotated by that phase and
//                     Sxy = sum_pilots k * angle( conj(X'[k]) * P[k] * H[k] );
//   5. LVPE (data)    accPEG += Sxy / 980, and the phase CPE + k*accPEG of each
//                     data subcarrier;
//   6. equalize       X'[k] = X[k] * exp(j*phase[k]) and the zero-forcing
//                     Y[k] = X'[k] / H[k] = X'[k] * conj(H[k]) / |H[k]|^2,
//                     as two divisions (real and imaginary part).
// Because conj(X) is used, the measured CPE and PEG are the negated phase
// error, and rotating by +phase removes the error.
//
// The 64 samples of a symbol are first written to a buffer in FFT bin order;
// every later step walks a list of active subcarriers from sc_index_rom, so
// Legacy and HT differ only in the list (48 or 52 data subcarriers) and in
// the pilot pattern. The mode is fixed at `start`: the top level restarts the
// equalizer when a packet switches from its Legacy to its HT part.
//
// Interface:
//   start (pulse) with ht, nof_sym (symbols to process) and pol_start (index
//     into the pilot polarity sequence of the first symbol); accPEG is
//     cleared at start. busy is high until done pulses after the last symbol.
//   in_valid/in_data/in_ready: 64 frequency-domain samples per symbol, bin
//     order 0..63; in_ready is high only while a symbol is being loaded.
//   csi_rd_bin/csi_rd: combinational read port into the channel estimate.
//   out_valid/out_data/out_k/out_last: equalized data subcarriers in
//     increasing k, value 1.0 = 2**EQ_FRAC; out_last marks a symbol's last one.
//   sym_done pulses per symbol; cpe, acc_peg and pol_nr show the tracking state.
// Timing: 64 load cycles, 4 + 1 + 27 (CPE), 4 + 27 + 1 (PEG), then one data
// subcarrier per cycle into two 46-cycle dividers: the last output of a
// symbol appears 221 (Legacy) or 225 (HT) cycles after its first sample,
// below the 360 cycles (3.6 us at 100 MHz) between short-GI symbols.
// The algorithm and step order follow the paper; widths, fixed-point formats
// and the cycle schedule are this design's choices.
// The divider lockstep assertion is disabled during reset, so rst_n is seen
// both as the flops' asynchronous reset and as a synchronous term there.
module equalizer
  import wifi_rx_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    ht,
  input  logic [11:0]             nof_sym,
  input  logic [6:0]              pol_start,
  output logic                    busy,
  output logic                    done,
  input  logic                    in_valid,
  input  cplx16_t                 in_data,
  output logic                    in_ready,
  output logic [5:0]              csi_rd_bin,
  input  cplx16_t                 csi_rd,
  output logic                    out_valid,
  output cplx16_t                 out_data,
  output sc_idx_t                 out_k,
  output logic                    out_last,
  output logic                    sym_done,
  output logic signed [PH_W-1:0]  cpe,
  output logic signed [PEG_W-1:0] acc_peg,
  output logic [6:0]              pol_nr
);

  localparam int unsigned NUM_W = 2 * IQ_W + 2 + EQ_FRAC;  // 44
  localparam int unsigned DEN_W = 2 * IQ_W + 1;            // 33
  localparam int unsigned PROD_W = 2 * IQ_W + 4;           // 36, sum of 4 products

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_CPE_ACC, S_CPE_ISSUE, S_CPE_WAIT,
    S_PEG_ISSUE, S_PEG_WAIT, S_PEG_UPD, S_EQ_ISSUE, S_EQ_WAIT, S_SYM_END
  } state_e;
  state_e state;

  logic        ht_q;
  logic [11:0] nsym_q, sym_cnt;
  logic [5:0]  cnt;      // load counter / list entry
  logic [5:0]  out_cnt;  // results received
  cplx16_t     sym_buf [N_FFT];

  logic signed [PROD_W-1:0] acc_i, acc_q;
  logic signed [SXY_W-1:0]  sxy;

  // ---- subcarrier list -----------------------------------------------------
  sc_list_e   sel;
  sc_idx_t    k;
  logic [5:0] bin, len;
  logic       data_phase;

  always_comb begin
    data_phase = (state == S_EQ_ISSUE) || (state == S_EQ_WAIT);
    sel        = data_phase ? (ht_q ? LIST_HT_DATA : LIST_LEG_DATA) : LIST_PILOT;
    len        = 6'(list_len(sel));
  end

  sc_index_rom u_rom (.sel(sel), .j(cnt), .k(k), .bin(bin));

  // ---- pilot polarity --------------------------------------------------------
  logic [N_PILOT-1:0] cur_neg;
  logic               pol_neg;

  pilot_polarity u_pol (
    .clk, .rst_n,
    .start(start && !busy), .pol_start(pol_start), .ht(ht_q),
    .advance(state == S_SYM_END), .cur_neg(cur_neg), .pol_nr(pol_nr)
  );
  assign pol_neg = cur_neg[cnt[1:0]];

  // ---- shared LVPE unit and rotation ----------------------------------------
  logic signed [SPH_W-1:0] sym_phase;
  logic signed [PEG_W-1:0] peg_next;
  cplx16_t x_rd, x_rot, h;

  lvpe_correction u_lvpe (
    .cpe(cpe), .acc_peg(acc_peg), .sxy(sxy), .k(k),
    .sym_phase(sym_phase), .peg_next(peg_next)
  );

  assign csi_rd_bin = bin;
  assign h          = csi_rd;
  assign x_rd       = sym_buf[bin];

  phase_rotate #(.TH_W(SPH_W)) u_rot (.x(x_rd), .theta(sym_phase), .y(x_rot));

  // conj(X) * H (X unrotated for the CPE, rotated for the PEG), times P
  cplx16_t x_use;
  logic signed [PROD_W-1:0] p_i, p_q;
  always_comb begin
    x_use = (state == S_CPE_ACC) ? x_rd : x_rot;
    p_i = PROD_W'(x_use.i * h.i) + PROD_W'(x_use.q * h.q);
    p_q = PROD_W'(x_use.i * h.q) - PROD_W'(x_use.q * h.i);
    if (pol_neg) begin
      p_i = -p_i;
      p_q = -p_q;
    end
  end

  // ---- phase calculator ------------------------------------------------------
  logic                    ph_in_v, ph_out_v;
  logic signed [PROD_W-1:0] ph_in_i, ph_in_q;
  logic signed [PH_W-1:0]  ph_out;

  always_comb begin
    ph_in_v = (state == S_CPE_ISSUE) || (state == S_PEG_ISSUE);
    ph_in_i = (state == S_CPE_ISSUE) ? acc_i : p_i;
    ph_in_q = (state == S_CPE_ISSUE) ? acc_q : p_q;
  end

  phase_calc #(.IN_W(PROD_W)) u_phase (
    .clk, .rst_n,
    .in_valid(ph_in_v), .x_i(ph_in_i), .x_q(ph_in_q),
    .out_valid(ph_out_v), .phase(ph_out)
  );

  // pilot k of the o-th returned angle
  function automatic sc_idx_t pilot_k(input logic [1:0] o);
    case (o)
      2'd0:    return -7'sd21;
      2'd1:    return -7'sd7;
      2'd2:    return 7'sd7;
      default: return 7'sd21;
    endcase
  endfunction

  // ---- zero-forcing dividers -------------------------------------------------
  logic signed [NUM_W-1:0] num_i, num_q, quot_i, quot_q;
  logic signed [DEN_W-1:0] den;
  logic                    div_in_v, div_out_v, div_out_v2;
  logic [7:0]              div_tag, tag_i, tag_q;

  always_comb begin
    num_i    = NUM_W'(PROD_W'(x_rot.i * h.i) + PROD_W'(x_rot.q * h.q)) <<< EQ_FRAC;
    num_q    = NUM_W'(PROD_W'(x_rot.q * h.i) - PROD_W'(x_rot.i * h.q)) <<< EQ_FRAC;
    den      = DEN_W'(PROD_W'(h.i * h.i) + PROD_W'(h.q * h.q));
    div_in_v = (state == S_EQ_ISSUE);
    div_tag  = {(cnt == len - 6'd1), k};
  end

  pipe_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .TAG_W(8)) u_div_i (
    .clk, .rst_n, .in_valid(div_in_v), .num(num_i), .den(den), .in_tag(div_tag),
    .out_valid(div_out_v), .quot(quot_i), .out_tag(tag_i)
  );
  pipe_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .TAG_W(8)) u_div_q (
    .clk, .rst_n, .in_valid(div_in_v), .num(num_q), .den(den), .in_tag(div_tag),
    .out_valid(div_out_v2), .quot(quot_q), .out_tag(tag_q)
  );

  always_comb begin
    out_valid  = div_out_v;
    out_data.i = sat16(64'(quot_i));
    out_data.q = sat16(64'(quot_q));
    out_k      = sc_idx_t'(tag_i[6:0]);
    out_last   = tag_i[7];
  end

  // ---- control -----------------------------------------------------------------
  assign busy     = (state != S_IDLE);
  assign in_ready = (state == S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ht_q     <= 1'b0;
      nsym_q   <= '0;
      sym_cnt  <= '0;
      cnt      <= '0;
      out_cnt  <= '0;
      acc_i    <= '0;
      acc_q    <= '0;
      sxy      <= '0;
      cpe      <= '0;
      acc_peg  <= '0;
      done     <= 1'b0;
      sym_done <= 1'b0;
    end else begin
      done     <= 1'b0;
      sym_done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          ht_q    <= ht;
          nsym_q  <= nof_sym;
          sym_cnt <= '0;
          cnt     <= '0;
          acc_peg <= '0;
          state   <= (nof_sym == '0) ? S_IDLE : S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 6'd1;
          if (cnt == 6'd63) begin
            cnt   <= '0;
            acc_i <= '0;
            acc_q <= '0;
            state <= S_CPE_ACC;
          end
        end
        S_CPE_ACC: begin
          acc_i <= acc_i + p_i;
          acc_q <= acc_q + p_q;
          cnt   <= cnt + 6'd1;
          if (cnt == 6'(N_PILOT - 1)) state <= S_CPE_ISSUE;
        end
        S_CPE_ISSUE: state <= S_CPE_WAIT;
        S_CPE_WAIT: if (ph_out_v) begin
          cpe   <= ph_out;
          cnt   <= '0;
          state <= S_PEG_ISSUE;
        end
        S_PEG_ISSUE: begin
          cnt <= cnt + 6'd1;
          if (cnt == 6'(N_PILOT - 1)) begin
            out_cnt <= '0;
            sxy     <= '0;
            state   <= S_PEG_WAIT;
          end
        end
        S_PEG_WAIT: if (ph_out_v) begin
          sxy     <= sxy + SXY_W'(pilot_k(out_cnt[1:0]) * ph_out);
          out_cnt <= out_cnt + 6'd1;
          if (out_cnt == 6'(N_PILOT - 1)) state <= S_PEG_UPD;
        end
        S_PEG_UPD: begin
          acc_peg <= peg_next;
          cnt     <= '0;
          out_cnt <= '0;
          state   <= S_EQ_ISSUE;
        end
        S_EQ_ISSUE: begin
          cnt <= cnt + 6'd1;
          if (cnt == len - 6'd1) state <= S_EQ_WAIT;
        end
        S_EQ_WAIT: if (out_valid && out_last) state <= S_SYM_END;
        S_SYM_END: begin
          sym_done <= 1'b1;
          sym_cnt  <= sym_cnt + 12'd1;
          cnt      <= '0;
          if (sym_cnt + 12'd1 == nsym_q) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) sym_buf[cnt] <= in_data;
  end

  // Both dividers run in lockstep; their second valid and tag are redundant.
  assert property (@(posedge clk) disable iff (!rst_n) div_out_v == div_out_v2);

  logic unused_ok;
  assign unused_ok = ^{tag_q, out_cnt};

endmodule
