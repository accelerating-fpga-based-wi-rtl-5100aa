// lvpe_correction: the linearly varying phase error of one subcarrier, and
// the update of the accumulated phase error gradient (PEG).
//
// The sampling frequency offset shows up as a phase error that grows linearly
// with the subcarrier index k: LVPE[k] = CPE + k * PEG. The equalizer uses
// this unit twice per symbol, and only one instance of it exists (as in the
// paper, where its allocation is limited to one):
//   * on the pilots, with the PEG accumulated over previous symbols, to
//     remove the known part before the incremental PEG is measured;
//   * on the data subcarriers, with the accumulated PEG plus the increment
//     just measured.
// The increment is Sxy / sum(k^2) with Sxy = sum over pilots of k*angle and
// sum(k^2) = 980. The division by that constant is a multiplication by
// round(2**26 / 980) = 68478 and a rounding shift, giving the increment with
// PEG_FRAC = 6 fractional bits.
//
// Interface (all combinational):
//   cpe, acc_peg, k -> sym_phase = cpe + round(k * acc_peg / 2**PEG_FRAC)
//   acc_peg, sxy    -> peg_next  = acc_peg + round(sxy * 2**PEG_FRAC / 980)
// Formulas follow the paper (Eq. 3 and Eq. 4); the fixed-point formats and
// the reciprocal multiplication are this design's choices. Only the low
// PEG_W bits of the scaled increment are kept (its range is far smaller).
module lvpe_correction
  import wifi_rx_pkg::*;
(
  input  logic signed [PH_W-1:0]  cpe,
  input  logic signed [PEG_W-1:0] acc_peg,
  input  logic signed [SXY_W-1:0] sxy,
  input  sc_idx_t                 k,
  output logic signed [SPH_W-1:0] sym_phase,
  output logic signed [PEG_W-1:0] peg_next
);

  localparam int          RECIP_SH = 20;
  // round(2**(20+6) / 980) = 68478
  localparam logic signed [17:0] RECIP = 18'((2**(RECIP_SH+PEG_FRAC) + SUM_I2/2) / SUM_I2);

  logic signed [PEG_W+7:0]    kp;
  logic signed [SXY_W+18:0]   prod;
  logic signed [SXY_W+18:0]   inc;

  always_comb begin
    kp        = k * acc_peg + (1 <<< (PEG_FRAC - 1));
    sym_phase = SPH_W'(cpe) + SPH_W'(kp >>> PEG_FRAC);
    prod      = sxy * RECIP + (1 <<< (RECIP_SH - 1));
    inc       = prod >>> RECIP_SH;
    peg_next  = acc_peg + PEG_W'(inc);
  end

endmodule
