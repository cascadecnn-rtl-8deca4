// tb_lpu: the matrix-multiplication unit as the low-precision unit: 4-bit
// arithmetic, 32 PEs of 16 MACCs, weights extracted at run time from 8-bit
// memory words.  The bank depth is reduced to 64 words to keep the run short.
module tb_lpu;
  mm_check #(.WL(4), .NUM_PE(32), .LANES(16), .KW_MAX(64)) u_check ();
endmodule
