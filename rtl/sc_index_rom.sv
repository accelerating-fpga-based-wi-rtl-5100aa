// sc_index_rom: ROM of the active-subcarrier lists.
//
// Rather than testing, sample by sample, whether a subcarrier is active, the
// channel estimator and the equalizer keep the whole OFDM symbol in a buffer
// and walk a static list of active subcarrier indices, so only the loop
// length changes between Legacy and HT. This module is that list, one ROM
// with five sections (see sc_list_e in wifi_rx_pkg):
//   Legacy LTF  k = -26..-1, 1..26                     (52 entries)
//   HT LTF      k = -28..-1, 1..28                     (56 entries)
//   Legacy data Legacy LTF list without -21,-7,7,21    (48 entries)
//   HT data     HT LTF list without -21,-7,7,21        (52 entries)
//   pilots      -21, -7, 7, 21                         (4 entries)
// Entries are in increasing k. The contents are built at elaboration from
// these rules (list_k in wifi_rx_pkg).
//
// Interface: list select and entry number j in, subcarrier k and FFT bin
// (k mod 64) out. Timing: combinational. Entries past a list's length read 0.
module sc_index_rom
  import wifi_rx_pkg::*;
(
  input  sc_list_e   sel,
  input  logic [5:0] j,
  output sc_idx_t    k,
  output logic [5:0] bin
);

  typedef sc_idx_t rom_t [5*64];  // section l, entry e at l*64+e

  function automatic rom_t make_rom();
    rom_t r;
    for (int l = 0; l < 5; l++)
      for (int e = 0; e < 64; e++)
        r[l*64+e] = (e < int'(list_len(sc_list_e'(l)))) ? sc_idx_t'(list_k(sc_list_e'(l), e)) : '0;
    return r;
  endfunction

  localparam rom_t ROM = make_rom();

  always_comb begin
    k   = (sel <= LIST_PILOT) ? ROM[{sel, j}] : '0;
    bin = k[5:0];
  end

endmodule
