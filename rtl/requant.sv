// requant: dynamic fixed-point requantiser (combinational).
//
// y = saturate_OUT_W( round( x / 2^shift ) ), rounding half away from minus
// infinity (add 2^(shift-1), then arithmetic shift right).  One scaling factor
// per layer and a uniform wordlength follow the dynamic fixed-point scheme of
// the design; the rounding mode and saturation (rather than wrap-around) are
// this implementation's choice.  `sat` flags a clipped result.
//
// Uses: extracting the LPU's low-precision weights from the shared 8-bit
// weights as they are fetched, quantising activations on load, and scaling
// accumulators down to the memory wordlength on write-back.
module requant #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = 4,
  parameter int unsigned SH_W  = 5
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic        [SH_W-1:0]  shift,
  output logic signed [OUT_W-1:0] y,
  output logic                    sat
);
  // Work at 64 bits so that no shift amount can overflow the rounding term.
  localparam logic signed [63:0] MAXV = (64'sd1 <<< (OUT_W - 1)) - 64'sd1;
  localparam logic signed [63:0] MINV = -(64'sd1 <<< (OUT_W - 1));

  logic signed [63:0] xe, rnd, sh;

  always_comb begin
    xe  = 64'(x);
    rnd = (shift == '0) ? '0 : (64'sd1 <<< (shift - 1'b1));
    sh  = (xe + rnd) >>> shift;
    if (sh > MAXV) begin
      y = MAXV[OUT_W-1:0]; sat = 1'b1;
    end else if (sh < MINV) begin
      y = MINV[OUT_W-1:0]; sat = 1'b1;
    end else begin
      y = sh[OUT_W-1:0];   sat = 1'b0;
    end
  end

  initial assert (OUT_W >= 2 && IN_W <= 48) else $error("requant: bad widths");
endmodule
