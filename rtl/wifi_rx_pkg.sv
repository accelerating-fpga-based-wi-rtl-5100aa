// wifi_rx_pkg: types, number formats and 802.11 constants shared by the
// channel estimator, the equalizer and their helpers.
//
// Number formats (all signed two's complement):
//   * I/Q samples and CSI: 16-bit I and 16-bit Q (cplx16_t), as delivered by
//     the 64-point FFT.
//   * Phases: "phase units" of pi/2048, so one full turn is 4096 units and a
//     phase wraps modulo 4096. A CPE fits in 16 bits, the per-subcarrier phase
//     (CPE + k*PEG) is kept in 18 bits, and the PEG regression numerator Sxy in
//     24 bits, matching the int16/int18/int24 variables of the equalizer loop.
//   * PEG: phase units per subcarrier with PEG_FRAC fractional bits.
//   * Equalized output: 1.0 is 2**EQ_FRAC.
// The subcarrier index k runs over -32..31 (-32 is the unused Nyquist bin);
// the FFT bin of subcarrier k is k mod 64, which is simply k[5:0].
package wifi_rx_pkg;

  localparam int unsigned IQ_W     = 16;   // bits per I or Q sample
  localparam int unsigned N_FFT    = 64;   // FFT size
  localparam int unsigned PH_W     = 16;   // CPE / phase_calc output width
  localparam int unsigned SPH_W    = 18;   // per-subcarrier phase width
  localparam int unsigned SXY_W    = 24;   // PEG regression numerator width
  localparam int unsigned TURN_W   = 12;   // phase wraps modulo 2**TURN_W
  localparam int          PI_PH    = 2048; // pi in phase units
  localparam int unsigned PEG_W    = 20;   // accumulated PEG width
  localparam int unsigned PEG_FRAC = 6;    // fractional bits of the PEG
  localparam int          SUM_I2   = 980;  // sum of k^2 over pilots -21,-7,7,21
  localparam int unsigned EQ_FRAC  = 10;   // equalized value 1.0 = 2**EQ_FRAC

  localparam int unsigned N_PILOT    = 4;
  localparam int unsigned LEG_DATA_N = 48;
  localparam int unsigned HT_DATA_N  = 52;
  localparam int unsigned LEG_LTF_N  = 52;
  localparam int unsigned HT_LTF_N   = 56;

  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } cplx16_t;

  typedef logic signed [6:0] sc_idx_t;  // subcarrier index k

  // Which list of active subcarriers to walk.
  typedef enum logic [2:0] {
    LIST_LEG_LTF  = 3'd0,  // 52 subcarriers, k = +-1..+-26
    LIST_HT_LTF   = 3'd1,  // 56 subcarriers, k = +-1..+-28
    LIST_LEG_DATA = 3'd2,  // 48 subcarriers, LTF list without pilots
    LIST_HT_DATA  = 3'd3,  // 52 subcarriers, LTF list without pilots
    LIST_PILOT    = 3'd4   // 4 pilots, k = -21, -7, 7, 21
  } sc_list_e;

  // L-LTF reference for k = -26..26 (bit k+26 set means the value is -1;
  // k = 0 is unused). HT-LTF extends it with +1,+1 at k = -28,-27 and
  // -1,-1 at k = 27,28 (IEEE 802.11-2020, L-LTF and HT-LTF definitions).
  localparam logic [52:0] LLTF_NEG = 53'h159f53029814c;

  // True when the LTF reference value at subcarrier k is -1.
  function automatic logic ltf_neg(input logic ht, input int k);
    if (k >= -26 && k <= 26) return LLTF_NEG[k+26];
    if (ht && (k == 27 || k == 28)) return 1'b1;
    return 1'b0;
  endfunction

  function automatic int unsigned list_len(input sc_list_e l);
    case (l)
      LIST_LEG_LTF:  return LEG_LTF_N;
      LIST_HT_LTF:   return HT_LTF_N;
      LIST_LEG_DATA: return LEG_DATA_N;
      LIST_HT_DATA:  return HT_DATA_N;
      default:       return N_PILOT;
    endcase
  endfunction

  function automatic logic is_pilot(input int k);
    return (k == -21) || (k == -7) || (k == 7) || (k == 21);
  endfunction

  // k of the j-th entry of a list, walking k upwards and skipping DC (and the
  // pilots for the data lists). Used to build ROM contents at elaboration.
  function automatic int list_k(input sc_list_e l, input int j);
    int edge_k, n;
    logic data;
    edge_k = (l == LIST_HT_LTF || l == LIST_HT_DATA) ? 28 : 26;
    data   = (l == LIST_LEG_DATA || l == LIST_HT_DATA);
    if (l == LIST_PILOT) begin
      case (j)
        0: return -21;
        1: return -7;
        2: return 7;
        default: return 21;
      endcase
    end
    n = 0;
    for (int k = -28; k <= 28; k++) begin
      if (k != 0 && k >= -edge_k && k <= edge_k && !(data && is_pilot(k))) begin
        if (n == j) return k;
        n++;
      end
    end
    return 0;
  endfunction

  // Saturate a wide signed value to IQ_W bits.
  function automatic logic signed [IQ_W-1:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767) return 16'sh7fff;
    if (v < -64'sd32768) return 16'sh8000;
    return v[IQ_W-1:0];
  endfunction

endpackage
