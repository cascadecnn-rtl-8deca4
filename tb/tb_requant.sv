// tb_requant: exhaustive check of the requantiser at 8 -> 4 bits (every input
// and shift 0..9) and a random check at 32 -> 8 bits, against
// floor(x / 2^shift + 0.5) computed in real arithmetic and clipped.
module tb_requant;
  int checks = 0, failures = 0;

  logic signed [7:0]  x8;
  logic        [4:0]  sh8;
  logic signed [3:0]  y4;
  logic               s4;
  requant #(.IN_W(8), .OUT_W(4)) dut4 (.x(x8), .shift(sh8), .y(y4), .sat(s4));

  logic signed [31:0] x32;
  logic        [4:0]  sh32;
  logic signed [7:0]  y8;
  logic               s8;
  requant #(.IN_W(32), .OUT_W(8)) dut8 (.x(x32), .shift(sh32), .y(y8), .sat(s8));

  function automatic void expect_q(input real xv, input int sh, input int ow,
                                   input int got, input bit gsat);
    real q;
    int  e, lo, hi;
    bit  es;
    q  = $floor(xv / (2.0 ** sh) + 0.5);
    lo = -(1 << (ow - 1)); hi = (1 << (ow - 1)) - 1;
    es = (q > hi) || (q < lo);
    e  = (q > hi) ? hi : (q < lo) ? lo : int'(q);
    checks++;
    if (got != e || gsat != es) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=%0f sh=%0d ow=%0d got=%0d/%0b exp=%0d/%0b", xv, sh, ow, got, gsat, e, es);
    end
  endfunction

  initial begin
    for (int sh = 0; sh < 10; sh++)
      for (int v = -128; v < 128; v++) begin
        x8 = 8'(v); sh8 = 5'(sh); #1;
        expect_q(real'(v), sh, 4, int'(y4), s4);
      end
    for (int i = 0; i < 4000; i++) begin
      x32 = $signed($urandom) >>> ($urandom % 24); sh32 = 5'($urandom % 20); #1;
      expect_q(real'(x32), int'(sh32), 8, int'(y8), s8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
