// phase_rotate: multiplies a complex sample by exp(j*theta), combinationally.
//
// This is the rotation used for LVPE correction: the equalizer turns every
// pilot and data subcarrier by the phase CPE + k*PEG before zero-forcing.
// As in the paper, cosine and sine come from a lookup table of limited
// integer resolution. Only a quarter wave is stored: SIN_LUT[a] holds
// round(2**14 * sin(a*pi/2048)) for a = 0..1024, and the two top bits of the
// 12-bit angle select the quadrant:
//   quadrant 0: sin =  S[a],       cos =  S[1024-a]
//   quadrant 1: sin =  S[1024-a],  cos = -S[a]
//   quadrant 2: sin = -S[a],       cos = -S[1024-a]
//   quadrant 3: sin = -S[1024-a],  cos =  S[a]
// The table is computed at elaboration with a fixed-point Taylor series of
// sin(x) on 0..pi/2.
//
// Interface: x (cplx16), theta in phase units (pi = 2048; only the low 12
// bits matter, so any wrapped value works and the upper bits are
// deliberately unused), y = round(x * exp(j*theta)) saturated to 16 bits.
// Timing: purely combinational; the caller registers the result.
// The quarter-wave layout and 2**14 amplitude are this design's choices.
module phase_rotate
  import wifi_rx_pkg::*;
#(
  parameter int unsigned TH_W = SPH_W
) (
  input  cplx16_t                x,
  input  logic signed [TH_W-1:0] theta,
  output cplx16_t                y
);

  localparam int unsigned Q_N   = 1 << (TURN_W - 2);  // 1024 steps per quadrant
  localparam int unsigned AMP_W = 14;                 // table amplitude 2**14

  typedef logic signed [IQ_W-1:0] sin_t [Q_N + 1];

  function automatic sin_t make_sin_lut();
    sin_t   t;
    longint xr, x2, term, sum;
    for (int a = 0; a <= int'(Q_N); a++) begin
      xr   = (longint'(a) * 64'sd3373259426) / (2 * Q_N);  // a*pi/2048 in Q30
      x2   = (xr * xr) >>> 30;
      term = xr;
      sum  = xr;
      for (int n = 1; n < 12; n++) begin
        term = -(((term * x2) >>> 30) / longint'((2 * n) * (2 * n + 1)));
        sum  = sum + term;
      end
      t[a] = IQ_W'((sum + (64'sd1 <<< (29 - AMP_W))) >>> (30 - AMP_W));
    end
    return t;
  endfunction

  localparam sin_t SIN_LUT = make_sin_lut();

  logic [TURN_W-3:0]      a;
  logic [1:0]             quad;
  logic signed [IQ_W-1:0] s_a, s_b, sn, cs;
  logic signed [2*IQ_W+1:0] yi, yq;

  always_comb begin
    quad = theta[TURN_W-1:TURN_W-2];
    a    = theta[TURN_W-3:0];
    s_a  = SIN_LUT[{1'b0, a}];
    s_b  = SIN_LUT[(TURN_W-1)'(Q_N) - {1'b0, a}];
    case (quad)
      2'd0:    begin sn =  s_a; cs =  s_b; end
      2'd1:    begin sn =  s_b; cs = -s_a; end
      2'd2:    begin sn = -s_a; cs = -s_b; end
      default: begin sn = -s_b; cs =  s_a; end
    endcase
    yi = (x.i * cs) - (x.q * sn) + (1 <<< (AMP_W - 1));
    yq = (x.i * sn) + (x.q * cs) + (1 <<< (AMP_W - 1));
    y.i = sat16(64'(yi >>> AMP_W));
    y.q = sat16(64'(yq >>> AMP_W));
  end

endmodule
