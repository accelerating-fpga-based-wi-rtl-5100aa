// tb_phase_rotate: self-checking test of the table-based complex rotation.
// Rotates random samples by random phases (including wrapped values beyond
// one turn and negative phases) and compares with x * exp(j*theta) computed
// in floating point. The 2**14 table amplitude and rounding allow an error of
// 3 units on values up to 16 bits; saturation is checked at full scale.
module tb_phase_rotate;
  import wifi_rx_pkg::*;
  localparam int  N    = 5000;
  localparam real PI_R = 3.14159265358979323846;

  cplx16_t x, y;
  logic signed [SPH_W-1:0] theta;
  int checks = 0, failures = 0;

  phase_rotate dut (.x(x), .theta(theta), .y(y));

  function automatic real clip(input real v);
    if (v > 32767.0) return 32767.0;
    if (v < -32768.0) return -32768.0;
    return v;
  endfunction

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check_one(input int xi, input int xq, input int th);
    real a, ei, eq;
    x.i = 16'(xi); x.q = 16'(xq); theta = SPH_W'(th);
    #1;
    a  = real'(th) * PI_R / 2048.0;
    ei = clip(real'(xi) * $cos(a) - real'(xq) * $sin(a));
    eq = clip(real'(xi) * $sin(a) + real'(xq) * $cos(a));
    checks++;
    if (absr(real'(y.i) - ei) > 3.0 || absr(real'(y.q) - eq) > 3.0) begin
      failures++;
      if (failures < 10) $display("FAIL: x=(%0d,%0d) th=%0d y=(%0d,%0d) exp=(%f,%f)", xi, xq, th, y.i, y.q, ei, eq);
    end
  endtask

  initial begin
    check_one(1000, 0, 0);
    check_one(1000, 0, 1024);
    check_one(1000, 0, 2048);
    check_one(1000, 0, -1024);
    check_one(0, 1000, 512);
    check_one(32767, 32767, 512);   // saturates
    for (int i = 0; i < N; i++)
      check_one($signed($urandom_range(0, 40000)) - 20000, $signed($urandom_range(0, 40000)) - 20000,
                $signed($urandom_range(0, 40000)) - 20000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(N * 10 + 1000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
