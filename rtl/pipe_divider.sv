// pipe_divider: fully pipelined signed integer divider, one division accepted
// and one quotient delivered per clock.
//
// The equalizer needs two of these (real and imaginary part of the
// zero-forcing division) and the phase calculator a third, for the ratio that
// addresses its arc-tangent table: the three divider instances of the design.
// Internally it is a restoring divider on magnitudes: stage 0 takes absolute
// values, then one stage per numerator bit compares the partial remainder with
// the divisor and subtracts, and the last stage restores the sign. The
// quotient is truncated towards zero (as C division). A zero divisor gives the
// largest magnitude quotient of the numerator's sign.
//
// Interface: in_valid/num/den/in_tag in, out_valid/quot/out_tag out, with
// in_tag carried alongside so callers can keep side information aligned.
// Timing: fixed latency LATENCY = NUM_W + 2 cycles, no back-pressure.
// The pipeline organisation and widths are this design's own choice; the
// paper only states that three pipelined dividers are used.
module pipe_divider #(
  parameter int unsigned NUM_W = 44,
  parameter int unsigned DEN_W = 33,
  parameter int unsigned TAG_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [NUM_W-1:0] num,
  input  logic signed [DEN_W-1:0] den,
  input  logic        [TAG_W-1:0] in_tag,
  output logic                    out_valid,
  output logic signed [NUM_W-1:0] quot,
  output logic        [TAG_W-1:0] out_tag
);

  localparam int unsigned NS = NUM_W + 1;  // register ranks 0..NUM_W

  // Per-rank state
  logic             v_q   [NS];
  logic             neg_q [NS];
  logic             dz_q  [NS];
  logic [TAG_W-1:0] tag_q [NS];
  logic [NUM_W-1:0] n_q   [NS];  // remaining numerator bits, MSB first
  logic [NUM_W-1:0] q_q   [NS];  // quotient bits so far
  logic [DEN_W:0]   r_q   [NS];  // partial remainder
  logic [DEN_W-1:0] d_q   [NS];  // divisor magnitude

  // Rank 0: magnitudes and sign
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q[0] <= 1'b0;
    end else begin
      v_q[0] <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    neg_q[0] <= num[NUM_W-1] ^ den[DEN_W-1];
    dz_q[0]  <= (den == '0);
    tag_q[0] <= in_tag;
    n_q[0]   <= num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
    d_q[0]   <= den[DEN_W-1] ? DEN_W'(-den) : DEN_W'(den);
    q_q[0]   <= '0;
    r_q[0]   <= '0;
  end

  // Ranks 1..NUM_W: one restoring step each
  for (genvar s = 1; s < NS; s++) begin : g_stage
    logic [DEN_W:0] trial;
    logic           ge;
    always_comb begin
      trial = {r_q[s-1][DEN_W-1:0], n_q[s-1][NUM_W-1]};
      ge    = (trial >= {1'b0, d_q[s-1]});
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_q[s] <= 1'b0;
      else        v_q[s] <= v_q[s-1];
    end
    always_ff @(posedge clk) begin
      neg_q[s] <= neg_q[s-1];
      dz_q[s]  <= dz_q[s-1];
      tag_q[s] <= tag_q[s-1];
      d_q[s]   <= d_q[s-1];
      n_q[s]   <= n_q[s-1] << 1;
      q_q[s]   <= {q_q[s-1][NUM_W-2:0], ge};
      r_q[s]   <= ge ? (trial - {1'b0, d_q[s-1]}) : trial;
    end
  end

  // Output rank: sign and divide-by-zero handling
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q[NUM_W];
  end

  always_ff @(posedge clk) begin
    out_tag <= tag_q[NUM_W];
    if (dz_q[NUM_W])
      quot <= neg_q[NUM_W] ? {1'b1, {(NUM_W-1){1'b0}}} + NUM_W'(1) : {1'b0, {(NUM_W-1){1'b1}}};
    else
      quot <= neg_q[NUM_W] ? -$signed(q_q[NUM_W]) : $signed(q_q[NUM_W]);
  end

endmodule
