// tb_hpu: the matrix-multiplication unit as the high-precision unit: 8-bit
// arithmetic, 16 PEs of 16 MACCs.  The bank depth is reduced to 64 words to
// keep the run short.
module tb_hpu;
  mm_check #(.WL(8), .NUM_PE(16), .LANES(16), .KW_MAX(64)) u_check ();
endmodule
