// tb_lvpe_correction: self-checking test of the LVPE / PEG-update unit.
// Random CPE, accumulated PEG, regression sum Sxy and subcarrier index k;
// the phase CPE + k*PEG and the updated PEG acc + Sxy/980 are worked out in
// floating point and must match the unit to within one unit of rounding.
module tb_lvpe_correction;
  import wifi_rx_pkg::*;
  localparam int N = 5000;

  logic signed [PH_W-1:0]  cpe;
  logic signed [PEG_W-1:0] acc_peg, peg_next;
  logic signed [SXY_W-1:0] sxy;
  sc_idx_t                 k;
  logic signed [SPH_W-1:0] sym_phase;
  int checks = 0, failures = 0;

  lvpe_correction dut (.*);

  initial begin
    for (int i = 0; i < N; i++) begin
      real e_ph, e_peg;
      cpe     = PH_W'($signed($urandom_range(0, 4096)) - 2048);
      acc_peg = PEG_W'($signed($urandom_range(0, 32768)) - 16384);
      sxy     = SXY_W'($signed($urandom_range(0, 2000000)) - 1000000);
      k       = sc_idx_t'($signed($urandom_range(0, 56)) - 28);
      #1;
      e_ph  = real'(cpe) + real'(k) * real'(acc_peg) / 64.0;
      e_peg = real'(acc_peg) + real'(sxy) * 64.0 / 980.0;
      checks++;
      if (real'(sym_phase) - e_ph > 1.0 || e_ph - real'(sym_phase) > 1.0) begin
        failures++;
        if (failures < 10) $display("FAIL: sym_phase %0d expected %f", sym_phase, e_ph);
      end
      checks++;
      if (real'(peg_next) - e_peg > 1.0 || e_peg - real'(peg_next) > 1.0) begin
        failures++;
        if (failures < 10) $display("FAIL: peg_next %0d expected %f", peg_next, e_peg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(N * 2 + 1000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
