// tb_sc_index_rom: self-checking test of the active-subcarrier ROM.
// For every list it checks the length, that entries increase, that DC is
// never listed, that data lists hold no pilot, that the band edges are
// +-26 (Legacy) or +-28 (HT), and that every active subcarrier appears; plus a
// few literal entries and the FFT bin mapping k mod 64.
module tb_sc_index_rom;
  import wifi_rx_pkg::*;

  sc_list_e   sel;
  logic [5:0] j;
  sc_idx_t    k;
  logic [5:0] bin;
  int checks = 0, failures = 0;

  sc_index_rom dut (.*);

  task automatic expect_eq(input int got, input int want, input string what);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL: %s: got %0d expected %0d", what, got, want);
    end
  endtask

  task automatic read_k(input sc_list_e l, input int e, output int kk);
    sel = l; j = 6'(e);
    #1;
    kk = int'(k);
  endtask

  initial begin
    int lens [5] = '{52, 56, 48, 52, 4};
    int edges [5] = '{26, 28, 26, 28, 21};
    int r;
    for (int l = 0; l < 5; l++) begin
      automatic int prev = -100, n = 0;
      automatic logic seen [int];
      for (int e = 0; e < lens[l]; e++) begin
        automatic int kk;
        read_k(sc_list_e'(l), e, kk);
        expect_eq(int'(kk > prev), 1, "increasing");
        expect_eq(int'(kk != 0), 1, "no DC");
        if (l == 2 || l == 3)
          expect_eq(int'(kk == -21 || kk == -7 || kk == 7 || kk == 21), 0, "no pilot in data list");
        expect_eq(int'(bin), (kk + 64) % 64, "bin mapping");
        seen[kk] = 1'b1;
        prev = kk;
        n++;
      end
      read_k(sc_list_e'(l), 0, r);
      expect_eq(r, -edges[l], "first entry");
      read_k(sc_list_e'(l), lens[l] - 1, r);
      expect_eq(r, edges[l], "last entry");
      // every subcarrier that should be active is present
      for (int kk = -edges[l]; kk <= edges[l]; kk++) begin
        automatic logic want = (kk != 0);
        if (l == 2 || l == 3) want = want && !(kk == -21 || kk == -7 || kk == 7 || kk == 21);
        if (l == 4) want = (kk == -21 || kk == -7 || kk == 7 || kk == 21);
        if (want) expect_eq(int'(seen.exists(kk)), 1, $sformatf("list %0d has k=%0d", l, kk));
      end
      expect_eq(n, lens[l], "length");
    end
    read_k(LIST_LEG_DATA, 5, r); expect_eq(r, -20, "Legacy data entry 5");
    read_k(LIST_HT_DATA, 2, r);  expect_eq(r, -26, "HT data entry 2");
    read_k(LIST_PILOT, 1, r);    expect_eq(r, -7, "pilot entry 1");
    read_k(LIST_LEG_LTF, 26, r); expect_eq(r, 1, "Legacy LTF entry 26");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
