// pe: processing element of the matrix-multiplication unit.
//
// LANES multiply-accumulate lanes (the "MACCs-per-PE" of the architecture)
// multiply LANES activations by LANES weights, a binary adder tree reduces
// the LANES products to one sum, and an accumulator adds that sum every cycle
// `en` is high.  This is the dot-product structure of the architecture figure:
// multipliers feeding a tree of adders.  The accumulator and its synchronous
// `clear` are this implementation's way of covering a dot product longer
// than LANES.
//
// Timing: inputs sampled on the rising edge when en=1; acc shows the new sum
// one cycle later.  clear has priority over en and sets acc to 0.
// LANES must be a power of two.  Operands are signed, WL bits each.
module pe #(
  parameter int unsigned WL    = 8,
  parameter int unsigned LANES = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        en,
  input  logic [LANES-1:0][WL-1:0]    act,
  input  logic [LANES-1:0][WL-1:0]    wgt,
  output logic signed [ACC_W-1:0]     acc
);
  localparam int unsigned LV = $clog2(LANES);
  localparam int unsigned PW = 2 * WL + LV;   // width of a full tree sum

  // Adder tree: level 0 holds the products, level l holds LANES>>l sums.
  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic signed [PW-1:0] s [LANES >> l];
    if (l == 0) begin : g_mul
      for (genvar i = 0; i < LANES; i++) begin : g_lane
        assign s[i] = PW'($signed(act[i]) * $signed(wgt[i]));
      end
    end else begin : g_add
      for (genvar i = 0; i < (LANES >> l); i++) begin : g_node
        assign s[i] = g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end

  logic signed [PW-1:0] dot;
  assign dot = g_lvl[LV].s[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= '0;
    else if (en)    acc <= acc + ACC_W'(dot);
  end

  if ((1 << LV) != LANES) begin : g_chk
    $error("pe: LANES must be a power of two");
  end
endmodule
