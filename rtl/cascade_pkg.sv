// cascade_pkg: types and constants shared by the cascaded low/high-precision
// CNN accelerator.
//
// Memory holds every operand at MEM_WL = 8 bits per element, packed LANES
// elements to a word.  The high-precision unit (HPU) computes at that
// wordlength; the low-precision unit (LPU) derives its 4-bit operands from the
// same words at run time, so both units share one copy of the weights.
//
// A layer is one matrix multiplication C = A x W, described by layer_desc_t:
//   A  : per sample, m rows of kw words (K = kw*LANES, zero-padded),
//        row r of sample s at a_base + s*a_sstride + r*a_rstride.
//        In convolution mode (conv = 1) the A rows are not stored: row r is
//        the im2col window of output pixel (r / out_w, r % out_w), gathered
//        from an input feature map stored pixel by pixel (HWC), cw words of
//        channels per pixel, pixel (y, x) of sample s at
//        a_base + s*a_sstride + (y*in_w + x)*cw.  Word k of the row is
//        channel word k % cw of kernel tap (ky, kx) = ((k/cw) / kwd,
//        (k/cw) % kwd); taps that fall into the zero padding read as zero.
//        kw must equal kh*kwd*cw.
//   W  : stored transposed, column n of W as kw words at w_base + n*kw.
//   C  : per sample, m rows of n elements, row r of sample s starting at word
//        c_base + s*c_sstride + r*c_rstride, element j in word j/LANES,
//        lane j%LANES.
// Each unit keeps its own dynamic fixed-point scaling per layer (shift_t):
// right shifts applied to weights and activations as they are loaded and to
// the accumulators as they are written back.
package cascade_pkg;

  localparam int unsigned MEM_WL = 8;   // element width in memory (HPU wordlength)
  localparam int unsigned ADDR_W = 32;  // word address width
  localparam int unsigned SH_W   = 5;   // width of a scaling shift

  typedef struct packed {
    logic [15:0]       kw;         // K in memory words (K / LANES)
    logic [15:0]       n;          // output columns (output channels / classes)
    logic [31:0]       m;          // rows per sample (output pixels; 1 for FC)
    logic [ADDR_W-1:0] a_base;
    logic [ADDR_W-1:0] a_sstride;
    logic [ADDR_W-1:0] a_rstride;
    logic [ADDR_W-1:0] w_base;
    logic [ADDR_W-1:0] c_base;
    logic [ADDR_W-1:0] c_sstride;
    logic [ADDR_W-1:0] c_rstride;
    logic              relu;       // clamp negative outputs to zero
    // convolution mode (im2col address generation)
    logic              conv;
    logic [3:0]        kh;         // kernel height
    logic [3:0]        kwd;        // kernel width
    logic [3:0]        stride;
    logic [3:0]        pad;
    logic [15:0]       in_h;       // input feature map height
    logic [15:0]       in_w;       // input feature map width
    logic [15:0]       out_w;      // output feature map width
    logic [15:0]       cw;         // channel words per input pixel
  } layer_desc_t;

  typedef struct packed {
    logic [SH_W-1:0] w_shift;      // weight: memory value >> w_shift
    logic [SH_W-1:0] a_shift;      // activation: memory value >> a_shift
    logic [SH_W-1:0] o_shift;      // output: accumulator >> o_shift
  } shift_t;

  // Configuration field numbers of one layer-table entry (cascade_ctrl).
  typedef enum logic [3:0] {
    F_KW = 4'd0, F_N = 4'd1, F_M = 4'd2, F_A_BASE = 4'd3, F_A_SSTRIDE = 4'd4,
    F_A_RSTRIDE = 4'd5, F_W_BASE = 4'd6, F_C_BASE = 4'd7, F_C_SSTRIDE = 4'd8,
    F_C_RSTRIDE = 4'd9, F_RELU = 4'd10, F_LPU_SHIFT = 4'd11, F_HPU_SHIFT = 4'd12,
    F_CONV      = 4'd13,  // [0] conv, [7:4] kh, [11:8] kwd, [15:12] stride, [19:16] pad
    F_IN_HW     = 4'd14,  // [15:0] in_w, [31:16] in_h
    F_OUT_W_CW  = 4'd15   // [15:0] out_w, [31:16] cw
  } cfg_field_e;

  // Which unit owns the memory port.
  typedef enum logic [2:0] {
    PH_IDLE = 3'd0, PH_LPU = 3'd1, PH_CEU_LPU = 3'd2, PH_HPU = 3'd3, PH_CEU_HPU = 3'd4
  } phase_e;

endpackage
