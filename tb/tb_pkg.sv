// Helpers shared by the testbenches: the contents of the simulated off-chip
// memory and the reference model of one level's access pattern.
package tb_pkg;

  // word stored at an off-chip address (an integer hash, so that every word
  // differs and misplaced words are seen)
  function automatic logic [31:0] offchip_word(logic [31:0] addr);
    logic [31:0] h;
    h = addr * 32'h9E37_79B1;
    h = h ^ (h >> 15) ^ 32'h5A5A_0000;
    return h;
  endfunction

  // stream index read by pattern step k of a level running
  // (cycle length L, inter-cycle shift S, skip shift K): the window starts
  // at (cycle number / (K+1)) * S and is read from its first word on.
  function automatic longint unsigned pattern_index(longint unsigned k, int unsigned L,
                                                    int unsigned S, int unsigned K);
    longint unsigned cyc;
    cyc = k / 64'(L);
    return (cyc / (64'(K) + 1)) * 64'(S) + (k % 64'(L));
  endfunction

endpackage
