// tb_pkg -- helpers shared by the testbenches.
//
// beat_pattern(addr, w) is the content the HBM model returns for beat
// address addr: the 32-bit word {7'h5A, addr} XOR its lane number,
// repeated across the beat.  Any beat can thus be checked anywhere on chip
// without storing HBM contents.
package tb_pkg;
  import ppsched_pkg::*;

  function automatic logic [DATA_W-1:0] beat_pattern(input logic [HBM_AW-1:0] addr);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++)
      d[i*32 +: 32] = {7'h5A, addr} ^ 32'(i);
    return d;
  endfunction
endpackage
