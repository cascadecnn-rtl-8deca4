// ceu: confidence evaluation unit.
//
// Decides whether a prediction of the low-precision unit can be trusted.  It
// reads the n_classes class scores (logits, signed 8-bit, LANES per memory
// word, starting at word `base`), turns them into the probability vector p
// and evaluates the generalised Best-vs-Second-Best metric
//     gBvSB<M,N>(p) = sum_{i=1..M} p_i - sum_{j=M+1..N} p_j
// over the probabilities sorted in decreasing order.  The prediction PASSes
// (processing ends on the LPU) when gBvSB >= th; otherwise it FAILs and the
// sample is redirected to the high-precision unit.  M, N and th are run-time
// inputs, set per deployment.  top1 is the predicted class (index of the
// largest score; the lower index wins a tie), also used alone to read out the
// HPU's answer.
//
// How it works, in three passes over the scores:
//   MAX  : one word per cycle, find the largest score zmax;
//   EXP  : one element per cycle, e_i = exp(-(zmax - z_i) / 2^logit_frac)
//          from a 256-entry table in steps of 1/16 (Q0.16, entry 0 = 65535,
//          zero beyond a distance of 16), add e_i to the sum S and insert it
//          into a sorted list of the NMAX largest values;
//   DECIDE: since p_i = e_i / S, test (sum_M e - sum_{M+1..N} e) * 2^16 >=
//          th * S without a divider.
// The softmax that turns scores into probabilities, the table resolution and
// this pass structure are this implementation's choices; the metric and the
// threshold test are the design's.
//
// Timing: start is a one-cycle pulse while idle; done pulses when pass/top1
// are valid (about nw + 2 + nw*(LANES+2) cycles, nw = words of scores).
// th is signed Q1.16 (65536 = 1.0).  Requires 1 <= m <= n <= NMAX.
module ceu
  import cascade_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned NMAX  = 8,      // largest N of gBvSB<M,N>
  parameter int unsigned E_W   = 16      // width of an exponential value
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [ADDR_W-1:0]        base,
  input  logic [15:0]              n_classes,
  input  logic [3:0]               logit_frac,   // fraction bits of the scores
  input  logic [3:0]               m_param,
  input  logic [3:0]               n_param,
  input  logic signed [17:0]       th,
  output logic                     busy,
  output logic                     done,
  output logic                     pass,
  output logic [15:0]              top1,
  // memory port (read only, one-cycle latency)
  output logic                     rd_en,
  output logic [ADDR_W-1:0]        rd_addr,
  input  logic [LANES*MEM_WL-1:0]  rd_data
);
  localparam int unsigned LUT_N = 256;
  localparam int unsigned LN_W  = $clog2(LANES);
  localparam int unsigned S_W   = E_W + 16;     // sum of up to 65535 values

  // exp(-i/16) in Q0.16 for i = 0..255, by repeated multiplication with
  // round(exp(-1/16) * 2^32) = 4034748382 in Q0.32.
  function automatic logic [LUT_N*E_W-1:0] gen_exp_lut();
    logic [LUT_N*E_W-1:0] t;
    logic [63:0] v;
    v = 64'hFFFF_FFFF;
    for (int i = 0; i < LUT_N; i++) begin
      t[i*E_W +: E_W] = E_W'(v >> 16);
      v = (v * 64'd4034748382) >> 32;
    end
    return t;
  endfunction
  localparam logic [LUT_N*E_W-1:0] EXP_LUT = gen_exp_lut();

  typedef enum logic [2:0] { C_IDLE, C_MAX, C_MDRAIN, C_ERD, C_ELAT, C_ELANE, C_DECIDE } cstate_e;
  cstate_e state;

  logic [15:0]               nw;        // words of scores
  logic [15:0]               w;         // word being issued
  logic [15:0]               cls;       // class index of the element in C_ELANE
  logic [LN_W-1:0]           lane;
  logic                      mx_v;      // max-pass data valid
  logic                      mx_first;
  logic [15:0]               mx_cls0;   // class index of lane 0 of the data word
  logic signed [MEM_WL-1:0]  zmax;
  logic [LANES*MEM_WL-1:0]   wbuf;
  logic [S_W-1:0]            sum_e;
  logic [E_W-1:0]            top_e [NMAX];
  logic [15:0]               top_c [NMAX];
  logic [ADDR_W-1:0]         base_r;
  logic [15:0]               ncls_r;
  logic [3:0]                frac_r, m_r, n_r;
  logic signed [17:0]        th_r;

  // ------------------------------------------------ max of one word (valid lanes only)
  logic signed [MEM_WL-1:0] wmax;
  logic                     wmax_v;
  always_comb begin
    wmax   = '0;
    wmax_v = 1'b0;
    for (int j = 0; j < LANES; j++) begin
      if (32'(mx_cls0) + 32'(j) < 32'(ncls_r)) begin
        if (!wmax_v || $signed(rd_data[j*MEM_WL +: MEM_WL]) > wmax) begin
          wmax   = $signed(rd_data[j*MEM_WL +: MEM_WL]);
          wmax_v = 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------ exponential of the current element
  logic signed [MEM_WL-1:0] z_cur;
  logic [MEM_WL:0]          zdist;        // zmax - z, in score LSBs
  logic [MEM_WL+4:0]        idx;         // distance in 1/16 units
  logic [E_W-1:0]           e_cur;
  assign z_cur = $signed(wbuf[32'(lane)*MEM_WL +: MEM_WL]);
  always_comb begin
    zdist  = (MEM_WL+1)'(zmax) - (MEM_WL+1)'(z_cur);
    idx   = (13'(zdist) << 4) >> frac_r;
    e_cur = (idx < 13'(LUT_N)) ? EXP_LUT[32'(idx)*E_W +: E_W] : '0;
  end

  // ------------------------------------------------ sorted insertion of e_cur
  logic [NMAX-1:0] gt;
  always_comb
    for (int k = 0; k < NMAX; k++) gt[k] = (e_cur > top_e[k]);

  // ------------------------------------------------ decision
  logic [S_W-1:0]      sum_m, sum_r;
  logic signed [63:0]  lhs, rhs;
  always_comb begin
    sum_m = '0; sum_r = '0;
    for (int k = 0; k < NMAX; k++) begin
      if (4'(k) < m_r)                       sum_m = sum_m + S_W'(top_e[k]);
      else if (4'(k) < n_r)                  sum_r = sum_r + S_W'(top_e[k]);
    end
    lhs = (64'(sum_m) - 64'(sum_r)) <<< 16;
    rhs = 64'(th_r) * $signed({1'b0, 63'(sum_e)});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; nw <= '0; w <= '0; cls <= '0; lane <= '0; mx_v <= 1'b0;
      mx_first <= 1'b0; mx_cls0 <= '0; zmax <= '0; wbuf <= '0; sum_e <= '0;
      base_r <= '0; ncls_r <= '0; frac_r <= '0; m_r <= '0; n_r <= '0; th_r <= '0;
      done <= 1'b0; pass <= 1'b0; top1 <= '0;
      for (int k = 0; k < NMAX; k++) begin top_e[k] <= '0; top_c[k] <= '0; end
    end else begin
      done <= 1'b0;
      mx_v <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          base_r <= base; ncls_r <= n_classes; frac_r <= logit_frac;
          m_r <= m_param; n_r <= n_param; th_r <= th;
          nw <= 16'((32'(n_classes) + LANES - 1) / LANES);
          w <= '0; mx_first <= 1'b1; sum_e <= '0;
          for (int k = 0; k < NMAX; k++) begin top_e[k] <= '0; top_c[k] <= '0; end
          if (n_classes == '0) begin done <= 1'b1; pass <= 1'b0; top1 <= '0; end
          else state <= C_MAX;
        end
        C_MAX: begin
          mx_v <= 1'b1; mx_cls0 <= 16'(32'(w) * LANES);
          if (w == nw - 16'd1) begin w <= '0; state <= C_MDRAIN; end
          else w <= w + 16'd1;
        end
        C_MDRAIN: state <= C_ERD;
        C_ERD:  state <= C_ELAT;
        C_ELAT: begin wbuf <= rd_data; lane <= '0; cls <= 16'(32'(w) * LANES); state <= C_ELANE; end
        C_ELANE: begin
          if (cls < ncls_r) begin
            sum_e <= sum_e + S_W'(e_cur);
            for (int k = 0; k < NMAX; k++) begin
              if (gt[k]) begin
                if (k == 0 || !gt[k-1]) begin top_e[k] <= e_cur;      top_c[k] <= cls;        end
                else                    begin top_e[k] <= top_e[k-1]; top_c[k] <= top_c[k-1]; end
              end
            end
          end
          cls <= cls + 16'd1;
          if (lane == LN_W'(LANES - 1)) begin
            if (w == nw - 16'd1) state <= C_DECIDE;
            else begin w <= w + 16'd1; state <= C_ERD; end
          end else lane <= lane + 1'b1;
        end
        C_DECIDE: begin
          pass  <= (lhs >= rhs);
          top1  <= top_c[0];
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
      // running maximum, one word behind the read
      if (mx_v && wmax_v) begin
        if (mx_first || wmax > zmax) zmax <= wmax;
        mx_first <= 1'b0;
      end
    end
  end

  assign busy = (state != C_IDLE);

  always_comb begin
    rd_en   = (state == C_MAX) || (state == C_ERD);
    rd_addr = base_r + ADDR_W'(w);
  end

  a_mn: assert property (@(posedge clk) disable iff (!rst_n)
                         (start && state == C_IDLE) |-> (m_param >= 4'd1 && m_param <= n_param
                                                        && 32'(n_param) <= NMAX))
        else $error("ceu: need 1 <= M <= N <= NMAX");
endmodule
