// tb_pilot_polarity: self-checking test of the pilot polarity tracker.
// The reference polarity sequence is built here from its recurrence
// p_neg[n] = p_neg[n-7] xor p_neg[n-4] with seven leading ones, and its first
// 16 values are also compared with the values listed in IEEE 802.11
// (1,1,1,1,-1,-1,-1,1,-1,-1,-1,-1,1,1,-1,1). Legacy symbols must show the base
// pattern {+1,+1,+1,-1} times p[n]; HT symbols the pattern rotated by the HT
// symbol number, starting at p[3]. Runs past 127 symbols to check the wrap.
module tb_pilot_polarity;
  import wifi_rx_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ht = 1'b0, advance = 1'b0;
  logic [6:0] pol_start = '0, pol_nr;
  logic [N_PILOT-1:0] cur_neg;
  int checks = 0, failures = 0;

  pilot_polarity dut (.*);

  always #5 clk = ~clk;

  logic ref_neg [127];
  logic [15:0] std16 = 16'b0000_1110_1111_0010;  // p0..p15: 1 -> -1, read left to right

  task automatic check(input logic [3:0] want, input string what);
    checks++;
    if (cur_neg !== want) begin
      failures++;
      if (failures < 10) $display("FAIL: %s: got %b expected %b", what, cur_neg, want);
    end
  endtask

  initial begin
    logic hist [0:133];
    for (int n = 0; n < 7; n++) hist[n] = 1'b1;
    for (int n = 7; n < 134; n++) hist[n] = hist[n-7] ^ hist[n-4];
    for (int n = 0; n < 127; n++) ref_neg[n] = hist[n+7];
    for (int n = 0; n < 16; n++) begin
      checks++;
      if (ref_neg[n] !== std16[15-n]) begin failures++; $display("FAIL: reference p%0d", n); end
    end

    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // Legacy, from p0, 130 symbols
    @(negedge clk); start = 1'b1; pol_start = 7'd0; ht = 1'b0;
    @(negedge clk); start = 1'b0;
    for (int n = 0; n < 130; n++) begin
      automatic logic s = ref_neg[n % 127];
      check({~s, s, s, s}, $sformatf("legacy symbol %0d", n));
      checks++;
      if (pol_nr != 7'(n % 127)) begin failures++; $display("FAIL: pol_nr %0d at %0d", pol_nr, n); end
      advance = 1'b1; @(negedge clk); advance = 1'b0;
    end
    // HT, from p3
    @(negedge clk); start = 1'b1; pol_start = 7'd3; ht = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int n = 0; n < 20; n++) begin
      automatic logic s = ref_neg[(n + 3) % 127];
      automatic logic [3:0] psi = 4'b1000;  // psi[3] = -1
      automatic logic [3:0] want;
      for (int m = 0; m < 4; m++) want[m] = psi[(n + m) % 4] ^ s;
      check(want, $sformatf("HT symbol %0d", n));
      advance = 1'b1; @(negedge clk); advance = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
