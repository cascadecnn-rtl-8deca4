// cascade_ctrl: sequencer of the two-stage (cascade) system.
//
// One `start` processes a batch of `batch` samples through a network of
// `num_layers` matrix-multiplication layers:
//   1. LPU   : every layer on the low-precision unit, for the whole batch;
//   2. CEU   : for each sample, the confidence unit evaluates the LPU's
//              scores of the last layer.  PASS: the LPU's class is final and
//              is reported at once.  FAIL: the sample number is appended to
//              the fail list;
//   3. HPU   : only if the fail list is not empty, every layer on the
//              high-precision unit for the samples of the fail list only;
//   4. CEU   : for each failed sample, read out the HPU's predicted class
//              (its top-1) and report it.
// The LPU processes the whole workload and the HPU only the fraction the CEU
// redirects, as the design intends.  Running the stages one after the other
// over a batch, sharing one memory port, and the layer table below are this
// implementation's choices.
//
// Layer table: written through cfg_we/cfg_layer/cfg_field/cfg_wdata (fields
// in cascade_pkg::cfg_field_e), including the convolution geometry.  Geometry and addresses are shared by both
// units (the HPU overwrites the LPU's buffers for the failed samples); each
// unit has its own per-layer scaling shifts, packed {w_shift, a_shift,
// o_shift} in cfg_wdata[14:0].
//
// Results leave on res_valid/res_sample/res_class/res_hpu, one per sample
// (passed samples first, in sample order, then the failed ones).  done pulses
// after the last result.  n_fail is the number of samples sent to the HPU.
module cascade_ctrl
  import cascade_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 16,
  parameter int unsigned MAX_BATCH  = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_layer,
  input  logic [3:0]           cfg_field,
  input  logic [31:0]          cfg_wdata,
  input  logic [$clog2(MAX_LAYERS):0]   num_layers,
  input  logic [15:0]          batch,
  // control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output phase_e               phase,
  // processing units (shared descriptor)
  output layer_desc_t          desc,
  output shift_t               lpu_shift,
  output shift_t               hpu_shift,
  output logic [15:0]          num_samples,
  output logic                 lpu_start,
  input  logic                 lpu_done,
  output logic                 hpu_start,
  input  logic                 hpu_done,
  input  logic [15:0]          list_idx,
  output logic [15:0]          list_sample,
  // confidence evaluation unit
  output logic                 ceu_start,
  output logic [ADDR_W-1:0]    ceu_base,
  output logic [15:0]          ceu_nclasses,
  input  logic                 ceu_done,
  input  logic                 ceu_pass,
  input  logic [15:0]          ceu_top1,
  // results
  output logic                 res_valid,
  output logic [15:0]          res_sample,
  output logic [15:0]          res_class,
  output logic                 res_hpu,
  output logic [15:0]          n_fail
);
  localparam int unsigned L_W = $clog2(MAX_LAYERS);

  layer_desc_t tbl  [MAX_LAYERS];
  shift_t      lsh  [MAX_LAYERS];
  shift_t      hsh  [MAX_LAYERS];
  logic [15:0] fail_list [MAX_BATCH];

  typedef enum logic [3:0] {
    Q_IDLE, Q_LPU_GO, Q_LPU_WAIT, Q_CL_GO, Q_CL_WAIT, Q_HPU_GO, Q_HPU_WAIT,
    Q_CH_GO, Q_CH_WAIT, Q_DONE
  } qstate_e;
  qstate_e state;

  logic [L_W:0]  l;          // current layer
  logic [15:0]   s;          // current sample (CEU passes)
  logic [15:0]   bsz;
  logic [L_W:0]  nl;
  logic [ADDR_W-1:0] last_c_base, last_c_sstride;

  // ------------------------------------------------ layer table
  always_ff @(posedge clk) begin
    if (cfg_we && !busy) begin
      unique case (cfg_field_e'(cfg_field))
        F_KW:        tbl[cfg_layer].kw        <= cfg_wdata[15:0];
        F_N:         tbl[cfg_layer].n         <= cfg_wdata[15:0];
        F_M:         tbl[cfg_layer].m         <= cfg_wdata;
        F_A_BASE:    tbl[cfg_layer].a_base    <= cfg_wdata;
        F_A_SSTRIDE: tbl[cfg_layer].a_sstride <= cfg_wdata;
        F_A_RSTRIDE: tbl[cfg_layer].a_rstride <= cfg_wdata;
        F_W_BASE:    tbl[cfg_layer].w_base    <= cfg_wdata;
        F_C_BASE:    tbl[cfg_layer].c_base    <= cfg_wdata;
        F_C_SSTRIDE: tbl[cfg_layer].c_sstride <= cfg_wdata;
        F_C_RSTRIDE: tbl[cfg_layer].c_rstride <= cfg_wdata;
        F_RELU:      tbl[cfg_layer].relu      <= cfg_wdata[0];
        F_LPU_SHIFT: lsh[cfg_layer]           <= cfg_wdata[3*SH_W-1:0];
        F_HPU_SHIFT: hsh[cfg_layer]           <= cfg_wdata[3*SH_W-1:0];
        F_CONV: begin
          tbl[cfg_layer].conv   <= cfg_wdata[0];
          tbl[cfg_layer].kh     <= cfg_wdata[7:4];
          tbl[cfg_layer].kwd    <= cfg_wdata[11:8];
          tbl[cfg_layer].stride <= cfg_wdata[15:12];
          tbl[cfg_layer].pad    <= cfg_wdata[19:16];
        end
        F_IN_HW:    begin tbl[cfg_layer].in_w  <= cfg_wdata[15:0]; tbl[cfg_layer].in_h <= cfg_wdata[31:16]; end
        F_OUT_W_CW: begin tbl[cfg_layer].out_w <= cfg_wdata[15:0]; tbl[cfg_layer].cw   <= cfg_wdata[31:16]; end
        default: ;
      endcase
    end
  end

  assign desc      = tbl[L_W'(l)];
  assign lpu_shift = lsh[L_W'(l)];
  assign hpu_shift = hsh[L_W'(l)];
  assign last_c_base    = tbl[L_W'(nl - 1'b1)].c_base;
  assign last_c_sstride = tbl[L_W'(nl - 1'b1)].c_sstride;

  // ------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE; l <= '0; s <= '0; bsz <= '0; nl <= '0; n_fail <= '0;
      lpu_start <= 1'b0; hpu_start <= 1'b0; ceu_start <= 1'b0; ceu_base <= '0;
      res_valid <= 1'b0; res_sample <= '0; res_class <= '0; res_hpu <= 1'b0;
      done <= 1'b0;
    end else begin
      lpu_start <= 1'b0; hpu_start <= 1'b0; ceu_start <= 1'b0;
      res_valid <= 1'b0; done <= 1'b0;
      unique case (state)
        Q_IDLE: if (start) begin
          bsz <= batch; nl <= num_layers; l <= '0; s <= '0; n_fail <= '0;
          state <= (num_layers == '0 || batch == '0) ? Q_DONE : Q_LPU_GO;
        end
        Q_LPU_GO:   begin lpu_start <= 1'b1; state <= Q_LPU_WAIT; end
        Q_LPU_WAIT: if (lpu_done) begin
          if (l == nl - 1'b1) begin s <= '0; state <= Q_CL_GO; end
          else begin l <= l + 1'b1; state <= Q_LPU_GO; end
        end
        Q_CL_GO: begin
          ceu_start <= 1'b1;
          ceu_base  <= last_c_base + ADDR_W'(s) * last_c_sstride;
          state     <= Q_CL_WAIT;
        end
        Q_CL_WAIT: if (ceu_done) begin
          if (ceu_pass) begin
            res_valid <= 1'b1; res_sample <= s; res_class <= ceu_top1; res_hpu <= 1'b0;
          end else begin
            fail_list[n_fail[$clog2(MAX_BATCH)-1:0]] <= s;
            n_fail <= n_fail + 16'd1;
          end
          if (s == bsz - 16'd1) begin
            l <= '0; s <= '0;
            state <= (n_fail == '0 && ceu_pass) ? Q_DONE : Q_HPU_GO;
          end else begin s <= s + 16'd1; state <= Q_CL_GO; end
        end
        Q_HPU_GO:   begin hpu_start <= 1'b1; state <= Q_HPU_WAIT; end
        Q_HPU_WAIT: if (hpu_done) begin
          if (l == nl - 1'b1) begin s <= '0; state <= Q_CH_GO; end
          else begin l <= l + 1'b1; state <= Q_HPU_GO; end
        end
        Q_CH_GO: begin
          ceu_start <= 1'b1;
          ceu_base  <= last_c_base + ADDR_W'(fail_list[s[$clog2(MAX_BATCH)-1:0]]) * last_c_sstride;
          state     <= Q_CH_WAIT;
        end
        Q_CH_WAIT: if (ceu_done) begin
          res_valid  <= 1'b1;
          res_sample <= fail_list[s[$clog2(MAX_BATCH)-1:0]];
          res_class  <= ceu_top1;
          res_hpu    <= 1'b1;
          if (s == n_fail - 16'd1) state <= Q_DONE;
          else begin s <= s + 16'd1; state <= Q_CH_GO; end
        end
        Q_DONE: begin done <= 1'b1; state <= Q_IDLE; end
        default: state <= Q_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (state)
      Q_LPU_GO, Q_LPU_WAIT: phase = PH_LPU;
      Q_CL_GO, Q_CL_WAIT:   phase = PH_CEU_LPU;
      Q_HPU_GO, Q_HPU_WAIT: phase = PH_HPU;
      Q_CH_GO, Q_CH_WAIT:   phase = PH_CEU_HPU;
      default:              phase = PH_IDLE;
    endcase
  end

  assign busy         = (state != Q_IDLE);
  assign num_samples  = (phase == PH_HPU) ? n_fail : bsz;
  assign list_sample  = (phase == PH_HPU) ? fail_list[list_idx[$clog2(MAX_BATCH)-1:0]] : list_idx;
  assign ceu_nclasses = tbl[L_W'(nl - 1'b1)].n;

  a_batch: assert property (@(posedge clk) disable iff (!rst_n)
                            (start && state == Q_IDLE) |-> (32'(batch) <= MAX_BATCH
                                                           && 32'(num_layers) <= MAX_LAYERS))
           else $error("cascade_ctrl: batch or layer count too large");
endmodule
