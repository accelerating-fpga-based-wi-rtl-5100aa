// tb_pipe_divider: self-checking test of the pipelined divider.
// Feeds one random division per clock (with random gaps), including negative
// operands, small divisors and zero divisors, and compares every quotient with
// the language's own truncating signed division. Also checks that each result
// appears exactly NUM_W + 2 clocks after its operands.
module tb_pipe_divider;
  localparam int unsigned NUM_W = 44;
  localparam int unsigned DEN_W = 33;
  localparam int unsigned LAT   = NUM_W + 2;
  localparam int          N     = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  logic signed [NUM_W-1:0] num = '0, quot;
  logic signed [DEN_W-1:0] den = '0;
  logic [7:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0;
  longint cyc = 0;

  pipe_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .TAG_W(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // expected results, in issue order
  logic signed [NUM_W-1:0] exp_q [$];
  longint                  exp_t [$];
  logic [7:0]              exp_g [$];

  function automatic logic signed [NUM_W-1:0] ref_div(input logic signed [NUM_W-1:0] n,
                                                     input logic signed [DEN_W-1:0] d);
    logic signed [NUM_W-1:0] dd;
    if (d == 0) return (n < 0) ? -((NUM_W)'(2)**(NUM_W-1) - 1) : ((NUM_W)'(2)**(NUM_W-1) - 1);
    dd = NUM_W'(d);
    return n / dd;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected output");
    end else begin
      automatic logic signed [NUM_W-1:0] e = exp_q.pop_front();
      automatic longint t = exp_t.pop_front();
      automatic logic [7:0] g = exp_g.pop_front();
      if (quot !== e || out_tag !== g) begin
        failures++;
        if (failures < 10) $display("FAIL: quot %0d expected %0d (tag %0d/%0d)", quot, e, out_tag, g);
      end
      checks++;
      if (cyc - t != LAT) begin
        failures++;
        if (failures < 10) $display("FAIL: latency %0d expected %0d", cyc - t, LAT);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      automatic logic signed [NUM_W-1:0] n;
      automatic logic signed [DEN_W-1:0] d;
      automatic int sel = $urandom_range(0, 5);
      n = {$urandom, $urandom};
      n = n >>> $urandom_range(0, NUM_W - 2);
      d = {$urandom, $urandom};
      case (sel)
        0: d = 0;
        1: d = DEN_W'($signed($urandom_range(0, 20)) - 10);
        2: d = d >>> $urandom_range(0, DEN_W - 2);
        default: ;
      endcase
      if (i == 0) begin n = 44'sd1000; d = 33'sd7; end
      if (i == 1) begin n = -44'sd1000; d = 33'sd7; end
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      num = n; den = d; in_tag = 8'(i);
      if (in_valid) begin
        exp_q.push_back(ref_div(n, d));
        exp_t.push_back(cyc);
        exp_g.push_back(8'(i));
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 2 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
