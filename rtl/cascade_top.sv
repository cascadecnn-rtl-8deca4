// cascade_top: two-stage cascaded CNN inference engine.
//
// A low-precision unit (LPU, 4-bit arithmetic, more PEs) classifies every
// sample of a batch quickly; a confidence evaluation unit (CEU) scores each
// LPU prediction with the generalised Best-vs-Second-Best metric; only the
// samples whose confidence is below the threshold are recomputed on the
// high-precision unit (HPU, 8-bit arithmetic, fewer PEs).  Both units are the
// same tiled matrix-multiplication engine (mm_unit) at different wordlengths
// and tile sizes, and both read the one 8-bit copy of the weights: the LPU
// extracts its 4-bit weights from it as it loads them.
//
//            +-----+  scores  +-----+  FAIL: sample list  +-----+
//   memory ->| LPU |--------->| CEU |-------------------->| HPU |-> memory
//            +-----+          +-----+                     +-----+
//                                | PASS: class                | class (via CEU top-1)
//                                v                            v
//                              res_*                        res_*
//
// Interface
//   cfg_*      : layer table (see cascade_ctrl), written while idle.
//   num_layers, batch, ceu_m, ceu_n, ceu_th (signed Q1.16), *_logit_frac:
//                run-time settings, held stable while busy.
//   start/busy/done, res_* : one result per sample.
//   mem_*      : one shared word-wide port to the external memory, reads
//                answered on the next cycle, writes with a per-lane mask.
// Only one unit uses the memory at a time (phase, from the controller).
//
// Parameter defaults: wordlengths 4 (LPU) and 8 (HPU) are the design's; the
// PE counts, MACCs per PE, bank depth and batch size are this
// implementation's choices (the design leaves them to a per-FPGA search).
module cascade_top
  import cascade_pkg::*;
#(
  parameter int unsigned LANES      = 16,    // MACCs per PE = elements per memory word
  parameter int unsigned LPU_WL     = 4,
  parameter int unsigned LPU_PE     = 32,
  parameter int unsigned HPU_WL     = 8,
  parameter int unsigned HPU_PE     = 16,
  parameter int unsigned KW_MAX     = 1568,  // K up to 25088 (VGG-16 fc6) at 16 lanes
  parameter int unsigned MAX_LAYERS = 16,
  parameter int unsigned MAX_BATCH  = 256,
  parameter int unsigned NMAX       = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_layer,
  input  logic [3:0]                    cfg_field,
  input  logic [31:0]                   cfg_wdata,
  input  logic [$clog2(MAX_LAYERS):0]   num_layers,
  input  logic [15:0]                   batch,
  input  logic [3:0]                    ceu_m,
  input  logic [3:0]                    ceu_n,
  input  logic signed [17:0]            ceu_th,
  input  logic [3:0]                    lpu_logit_frac,
  input  logic [3:0]                    hpu_logit_frac,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic                          res_valid,
  output logic [15:0]                   res_sample,
  output logic [15:0]                   res_class,
  output logic                          res_hpu,
  output logic [15:0]                   n_fail,
  output logic [31:0]                   lpu_sat_count,
  output logic [31:0]                   hpu_sat_count,
  output logic                          mem_rd_en,
  output logic [ADDR_W-1:0]             mem_rd_addr,
  input  logic [LANES*MEM_WL-1:0]       mem_rd_data,
  output logic                          mem_wr_en,
  output logic [ADDR_W-1:0]             mem_wr_addr,
  output logic [LANES*MEM_WL-1:0]       mem_wr_data,
  output logic [LANES-1:0]              mem_wr_mask
);
  phase_e      phase;
  layer_desc_t desc;
  shift_t      lpu_shift, hpu_shift;
  logic [15:0] num_samples, list_sample, lpu_list_idx, hpu_list_idx;
  logic        lpu_start, lpu_done, lpu_busy, hpu_start, hpu_done, hpu_busy;
  logic        ceu_start, ceu_done, ceu_busy, ceu_pass;
  logic [ADDR_W-1:0] ceu_base;
  logic [15:0] ceu_nclasses, ceu_top1;

  logic                     lpu_rd_en, hpu_rd_en, ceu_rd_en;
  logic [ADDR_W-1:0]        lpu_rd_addr, hpu_rd_addr, ceu_rd_addr;
  logic                     lpu_wr_en, hpu_wr_en;
  logic [ADDR_W-1:0]        lpu_wr_addr, hpu_wr_addr;
  logic [LANES*MEM_WL-1:0]  lpu_wr_data, hpu_wr_data;
  logic [LANES-1:0]         lpu_wr_mask, hpu_wr_mask;

  cascade_ctrl #(.MAX_LAYERS(MAX_LAYERS), .MAX_BATCH(MAX_BATCH)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_layer, .cfg_field, .cfg_wdata, .num_layers, .batch,
    .start, .busy, .done, .phase, .desc, .lpu_shift, .hpu_shift, .num_samples,
    .lpu_start, .lpu_done, .hpu_start, .hpu_done,
    .list_idx(phase == PH_HPU ? hpu_list_idx : lpu_list_idx), .list_sample,
    .ceu_start, .ceu_base, .ceu_nclasses, .ceu_done, .ceu_pass, .ceu_top1,
    .res_valid, .res_sample, .res_class, .res_hpu, .n_fail);

  mm_unit #(.WL(LPU_WL), .NUM_PE(LPU_PE), .LANES(LANES), .KW_MAX(KW_MAX)) u_lpu (
    .clk, .rst_n, .start(lpu_start), .desc, .shifts(lpu_shift), .num_samples,
    .busy(lpu_busy), .done(lpu_done), .list_idx(lpu_list_idx), .list_sample,
    .rd_en(lpu_rd_en), .rd_addr(lpu_rd_addr), .rd_data(mem_rd_data),
    .wr_en(lpu_wr_en), .wr_addr(lpu_wr_addr), .wr_data(lpu_wr_data), .wr_mask(lpu_wr_mask),
    .sat_count(lpu_sat_count));

  mm_unit #(.WL(HPU_WL), .NUM_PE(HPU_PE), .LANES(LANES), .KW_MAX(KW_MAX)) u_hpu (
    .clk, .rst_n, .start(hpu_start), .desc, .shifts(hpu_shift), .num_samples,
    .busy(hpu_busy), .done(hpu_done), .list_idx(hpu_list_idx), .list_sample,
    .rd_en(hpu_rd_en), .rd_addr(hpu_rd_addr), .rd_data(mem_rd_data),
    .wr_en(hpu_wr_en), .wr_addr(hpu_wr_addr), .wr_data(hpu_wr_data), .wr_mask(hpu_wr_mask),
    .sat_count(hpu_sat_count));

  ceu #(.LANES(LANES), .NMAX(NMAX)) u_ceu (
    .clk, .rst_n, .start(ceu_start), .base(ceu_base), .n_classes(ceu_nclasses),
    .logit_frac(phase == PH_CEU_HPU ? hpu_logit_frac : lpu_logit_frac),
    .m_param(ceu_m), .n_param(ceu_n), .th(ceu_th),
    .busy(ceu_busy), .done(ceu_done), .pass(ceu_pass), .top1(ceu_top1),
    .rd_en(ceu_rd_en), .rd_addr(ceu_rd_addr), .rd_data(mem_rd_data));

  // Memory port: owned by the unit of the current phase.
  always_comb begin
    mem_rd_en = 1'b0; mem_rd_addr = '0;
    mem_wr_en = 1'b0; mem_wr_addr = '0; mem_wr_data = '0; mem_wr_mask = '0;
    unique case (phase)
      PH_LPU: begin
        mem_rd_en = lpu_rd_en; mem_rd_addr = lpu_rd_addr;
        mem_wr_en = lpu_wr_en; mem_wr_addr = lpu_wr_addr;
        mem_wr_data = lpu_wr_data; mem_wr_mask = lpu_wr_mask;
      end
      PH_HPU: begin
        mem_rd_en = hpu_rd_en; mem_rd_addr = hpu_rd_addr;
        mem_wr_en = hpu_wr_en; mem_wr_addr = hpu_wr_addr;
        mem_wr_data = hpu_wr_data; mem_wr_mask = hpu_wr_mask;
      end
      PH_CEU_LPU, PH_CEU_HPU: begin
        mem_rd_en = ceu_rd_en; mem_rd_addr = ceu_rd_addr;
      end
      default: ;
    endcase
  end

  // Only the unit that owns the port may be active.
  a_own: assert property (@(posedge clk) disable iff (!rst_n)
                          !(lpu_busy && hpu_busy) && !(ceu_busy && (lpu_busy || hpu_busy)))
         else $error("cascade_top: two units active at once");
endmodule
