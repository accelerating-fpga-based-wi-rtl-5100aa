// phase_calc: angle of a complex number, pipelined, one input per clock.
//
// Used by the equalizer for the common phase error (the angle of a sum of
// pilot products) and for the pilot angles of the phase error gradient.
// Following the paper, the arc-tangent comes from a lookup table of limited
// integer resolution rather than from a floating-point math library.
//
// How it works:
//   1. Fold the input into the first octant: take |x| and |y|, swap them if
//      |y| > |x|, and remember the signs and the swap.
//   2. Normalise both magnitudes by the same shift so the larger one has its
//      top bit at bit NORM_W-1 (keeps the divider narrow for any input size).
//   3. Divide: ratio = (min << RATIO_W) / max, a value 0..2**RATIO_W
//      (the phase calculator's divider instance).
//   4. Look the ratio up in ATAN_LUT, which holds atan(r / 2**RATIO_W) in
//      phase units (pi = 2048), 0..512.
//   5. Unfold the octant. Output range is -2048..2048; an all-zero input
//      gives 0.
// The table is computed at elaboration from a fixed-point Taylor series:
//   atan(r) = sum_n (-1)^n r^(2n+1)/(2n+1) for r <= 1/2, and
//   atan(r) = pi/4 + atan((r-1)/(r+1))       for r  > 1/2.
//
// Interface: in_valid with x_i/x_q (IN_W bits each), out_valid with phase.
// Timing: latency NORM_W + RATIO_W + 5 clocks (27 by default), throughput 1/clock.
// Table size, octant folding and normalisation are this design's choices.
// Only the low NORM_W bits of the shifted magnitudes and the low RATIO_W+1
// bits of the quotient are used; the upper bits are zero by construction
// and are left unread on purpose.
module phase_calc
  import wifi_rx_pkg::*;
#(
  parameter int unsigned IN_W    = 36,
  parameter int unsigned NORM_W  = 12,
  parameter int unsigned RATIO_W = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x_i,
  input  logic signed [IN_W-1:0] x_q,
  output logic                   out_valid,
  output logic signed [PH_W-1:0] phase
);

  localparam int unsigned LUT_N = (1 << RATIO_W) + 1;
  localparam int unsigned DIV_N = NORM_W + RATIO_W + 1;  // divider numerator width
  localparam int unsigned DIV_D = NORM_W + 1;            // divider denominator width
  localparam int unsigned TAG_W = 4;

  typedef logic [9:0] lut_word_t;  // 0..512
  typedef lut_word_t lut_t [LUT_N];

  // atan(y) for |y| <= 1/2, y and result in Q30
  function automatic longint atan_q30(input longint y);
    longint y2, term, sum;
    y2   = (y * y) >>> 30;
    term = y;
    sum  = 0;
    for (int n = 0; n < 24; n++) begin
      if (n % 2 == 0) sum = sum + term / (2 * n + 1);
      else            sum = sum - term / (2 * n + 1);
      term = (term * y2) >>> 30;
    end
    return sum;
  endfunction

  function automatic lut_t make_atan_lut();
    lut_t   t;
    longint one, x, a;
    one = 64'sd1 << 30;
    for (int r = 0; r < LUT_N; r++) begin
      x = (longint'(r) <<< 30) >>> RATIO_W;
      if (2 * r <= (1 << RATIO_W)) a = atan_q30(x);
      else a = 64'sd843314857 + atan_q30(((x - one) <<< 30) / (x + one));  // pi/4 in Q30
      // radians (Q30) to phase units: * 2048/pi, constant in Q20
      t[r] = lut_word_t'((a * 64'sd683565276 + (64'sd1 <<< 49)) >>> 50);
    end
    return t;
  endfunction

  localparam lut_t ATAN_LUT = make_atan_lut();

  // ---- stage 1: fold and normalise -------------------------------------
  logic [IN_W-1:0] ax, ay, mx, mn;
  logic            swap;
  int              msb;
  logic [IN_W+NORM_W-1:0] mx_s, mn_s;

  always_comb begin
    ax   = x_i[IN_W-1] ? IN_W'(-x_i) : IN_W'(x_i);
    ay   = x_q[IN_W-1] ? IN_W'(-x_q) : IN_W'(x_q);
    swap = (ay > ax);
    mx   = swap ? ay : ax;
    mn   = swap ? ax : ay;
    msb  = 0;
    for (int b = 0; b < int'(IN_W); b++) if (mx[b]) msb = b;
    // place the top bit of mx at bit NORM_W-1 (bits above IN_W-1 are zero)
    if (msb >= int'(NORM_W) - 1) begin
      mx_s = (IN_W+NORM_W)'(mx) >> (msb - (int'(NORM_W) - 1));
      mn_s = (IN_W+NORM_W)'(mn) >> (msb - (int'(NORM_W) - 1));
    end else begin
      mx_s = (IN_W+NORM_W)'(mx) << ((int'(NORM_W) - 1) - msb);
      mn_s = (IN_W+NORM_W)'(mn) << ((int'(NORM_W) - 1) - msb);
    end
  end

  logic                    v1;
  logic signed [DIV_N-1:0] num1;
  logic signed [DIV_D-1:0] den1;
  logic [TAG_W-1:0]        tag1;  // {zero, swap, x<0, y<0}

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    num1 <= DIV_N'({mn_s[NORM_W-1:0], {RATIO_W{1'b0}}});
    den1 <= DIV_D'(mx_s[NORM_W-1:0]);
    tag1 <= {(mx == '0), swap, x_i[IN_W-1], x_q[IN_W-1]};
  end

  // ---- stage 2: ratio divider ------------------------------------------
  logic                    v2;
  logic signed [DIV_N-1:0] ratio;
  logic [TAG_W-1:0]        tag2;

  pipe_divider #(.NUM_W(DIV_N), .DEN_W(DIV_D), .TAG_W(TAG_W)) u_div (
    .clk, .rst_n,
    .in_valid(v1), .num(num1), .den(den1), .in_tag(tag1),
    .out_valid(v2), .quot(ratio), .out_tag(tag2)
  );

  // ---- stage 3: table and unfold ---------------------------------------
  logic signed [PH_W-1:0] ph_oct, ph_sw, ph_x, ph_y;
  always_comb begin
    ph_oct = PH_W'(ATAN_LUT[ratio[RATIO_W:0]]);  // ratio <= 2**RATIO_W since min <= max
    ph_sw  = tag2[2] ? PH_W'(PI_PH / 2) - ph_oct : ph_oct;
    ph_x   = tag2[1] ? PH_W'(PI_PH) - ph_sw : ph_sw;
    ph_y   = tag2[0] ? -ph_x : ph_x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      phase     <= '0;
    end else begin
      out_valid <= v2;
      if (v2) phase <= tag2[3] ? '0 : ph_y;
    end
  end

endmodule
