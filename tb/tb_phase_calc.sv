// tb_phase_calc: self-checking test of the pipelined phase calculator.
// Drives complex values of random angle and of magnitudes from a few units up
// to the full 36-bit range, one per clock, and compares each output with
// atan2 computed in floating point and converted to phase units (pi = 2048).
// The table resolution allows an error of at most 2 units. Also checks the
// special inputs (zero, the axes) and the 27-cycle latency.
module tb_phase_calc;
  import wifi_rx_pkg::*;
  localparam int unsigned IN_W = 36;
  localparam int unsigned LAT  = 27;
  localparam int          N    = 4000;
  localparam real         PI_R = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  logic signed [IN_W-1:0] x_i = '0, x_q = '0;
  logic signed [PH_W-1:0] phase;
  int checks = 0, failures = 0;
  longint cyc = 0;

  phase_calc #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  real    exp_p [$];
  longint exp_t [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic real e = exp_p.pop_front();
    automatic longint t = exp_t.pop_front();
    automatic real d = real'(phase) - e;
    if (d > 2048.0) d -= 4096.0;
    if (d < -2048.0) d += 4096.0;
    checks++;
    if (d > 2.0 || d < -2.0) begin
      failures++;
      if (failures < 10) $display("FAIL: phase %0d expected %f", phase, e);
    end
    checks++;
    if (cyc - t != LAT) begin
      failures++;
      if (failures < 10) $display("FAIL: latency %0d", cyc - t);
    end
  end

  task automatic drive(input longint xi, input longint xq);
    @(negedge clk);
    in_valid = 1'b1;
    x_i = IN_W'(xi);
    x_q = IN_W'(xq);
    exp_p.push_back((xi == 0 && xq == 0) ? 0.0 : $atan2(real'(xq), real'(xi)) * 2048.0 / PI_R);
    exp_t.push_back(cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    drive(0, 0); drive(1000, 0); drive(0, 1000); drive(-1000, 0); drive(0, -1000);
    drive(5, 5); drive(-7, 7); drive(34359738367, -34359738367);
    for (int i = 0; i < N; i++) begin
      automatic real th  = ($urandom_range(0, 1000000) / 1000000.0) * 2.0 * PI_R - PI_R;
      automatic real mag = 2.0 ** ($urandom_range(400, 3400) / 100.0);
      drive(longint'($rtoi(mag * $cos(th))), longint'($rtoi(mag * $sin(th))));
      if ($urandom_range(0, 4) == 0) begin
        @(negedge clk) in_valid = 1'b0;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_p.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 3 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
