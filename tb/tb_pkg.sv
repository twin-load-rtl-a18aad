// tb_pkg: helpers shared by the testbenches: the initial contents of every
// DRAM line (a pattern computed from its address, never equal to the
// 0x5a placeholder) and small formatting helpers.
package tb_pkg;
  import tl_pkg::*;

  function automatic logic [BEAT_W-1:0] dram_pattern(int unsigned tree, int unsigned rid,
                                                     int unsigned bank, int unsigned row,
                                                     int unsigned col, int unsigned beat);
    return {8'hD1, 8'(tree), 8'(rid), 8'(bank), 16'(row), 16'(col), 8'(beat),
            24'h0C0FEE, 32'(row * 2654435761 + col * 40503 + bank * 97 + rid * 13 + tree)};
  endfunction
endpackage
