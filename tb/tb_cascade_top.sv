// tb_cascade_top: end-to-end test of the cascade at its default parameters.
//
// A small two-layer network runs on a batch of 200 random samples (the size
// of the evaluation set the cascade's thresholds are tuned on):
//   layer 0: a 3x3 convolution, stride 2, zero padding 1, over a 4x4 input
//            with 16 channels (the engine gathers the im2col rows itself):
//            2x2 = 4 output pixels per sample, K = 144, 40 channels, ReLU;
//   layer 1: a fully-connected classifier over the flattened 4 x 40 (padded
//            to 4 x 48) features, K = 192, 20 classes.
// The testbench computes both the 4-bit (LPU) and the 8-bit (HPU) forward
// pass of every sample, the softmax-based gBvSB confidence of each LPU
// prediction, and so the expected result of the cascade.  Three runs:
//   1. a threshold between the samples' confidences: some PASS on the LPU,
//      the rest are redirected to and re-run on the HPU;
//   2. a threshold of -1: every sample passes, the HPU never starts;
//   3. a threshold of 1.5: every sample fails, the HPU runs the whole batch.
// Checked: one result per sample with the right class and unit, the final
// scores in memory (LPU's for passed samples, HPU's for failed ones, which
// shows the HPU touched only the redirected samples), and that each
// mechanism (pass, fail, HPU skipped, weight clipping on extraction, several
// column tiles, convolution windows reaching into the padding) occurred.
module tb_cascade_top;
  import cascade_pkg::*;
  localparam int LANES = 16, B = 200, NCLS = 20;
  localparam int A0 = 32'h1000, W0 = 32'h4000, C0 = 32'h8000, W1 = 32'h5000, C1 = 32'hA000;
  int checks = 0, failures = 0;
  int m_pass = 0, m_fail = 0, m_hpu_skipped = 0, m_clip = 0, m_tiles = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; logic [3:0] cfg_layer, cfg_field; logic [31:0] cfg_wdata;
  logic [4:0] num_layers; logic [15:0] batch;
  logic [3:0] ceu_m, ceu_n, lpu_logit_frac, hpu_logit_frac;
  logic signed [17:0] ceu_th;
  logic start, busy, done, res_valid, res_hpu;
  logic [15:0] res_sample, res_class, n_fail;
  logic [31:0] lpu_sat_count, hpu_sat_count;
  logic mem_rd_en, mem_wr_en;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [LANES*8-1:0] mem_rd_data, mem_wr_data;
  logic [LANES-1:0] mem_wr_mask;

  cascade_top dut (.*);
  ext_mem #(.LANES(LANES), .DEPTH(65536)) u_mem (.clk, .rd_en(mem_rd_en), .rd_addr(mem_rd_addr),
    .rd_data(mem_rd_data), .wr_en(mem_wr_en), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data),
    .wr_mask(mem_wr_mask));

  // network description: {kw, n, m, a_base, a_ss, a_rs, w_base, c_base, c_ss, c_rs, relu}
  int L_KW[2] = '{9, 12};   int L_N[2] = '{40, NCLS}; int L_M[2] = '{4, 1};
  int L_A[2]  = '{A0, C0};  int L_AS[2] = '{16, 12};  int L_AR[2] = '{0, 12};
  int L_W[2]  = '{W0, W1};  int L_C[2]  = '{C0, C1};  int L_CS[2] = '{12, 2};
  int L_CR[2] = '{3, 2};    int L_RELU[2] = '{1, 0};
  // shifts {w, a, o} per unit and layer
  int LS_W[2] = '{4, 4}; int LS_A[2] = '{4, 2}; int LS_O[2] = '{1, 3};
  int HS_W[2] = '{0, 0}; int HS_A[2] = '{0, 0}; int HS_O[2] = '{8, 10};
  localparam int FRAC = 2;   // fraction bits assumed for the scores

  longint img [B][4][4][16];   // [sample][y][x][channel]
  longint w0 [40][144];        // [channel][(ky*3 + kx)*16 + c]
  longint w1 [NCLS][192];
  longint logit [2][B][NCLS];   // [unit][sample][class], unit 0 = LPU
  real    conf  [B];
  int     ref_top1 [2][B];


  function automatic longint qz(input longint x, input int sh, input int ow, inout int nsat);
    real q; longint lo, hi;
    q  = $floor(real'(x) / (2.0 ** sh) + 0.5);
    lo = -(longint'(1) << (ow - 1)); hi = (longint'(1) << (ow - 1)) - 1;
    if (q > real'(hi)) begin nsat++; return hi; end
    if (q < real'(lo)) begin nsat++; return lo; end
    return longint'(q);
  endfunction

  task automatic check(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, e);
    end
  endtask

  // forward pass of one unit (u = 0: 4-bit LPU, u = 1: 8-bit HPU)
  task automatic forward(input int u);
    int wl, d;
    longint h [4][48];
    wl = (u == 0) ? 4 : 8;
    for (int s = 0; s < B; s++) begin
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 48; c++) begin
          longint acc; acc = 0;
          if (c < 40) begin
            for (int k = 0; k < 144; k++) begin
              int iy, ix;
              iy = (r / 2) * 2 - 1 + (k / 16) / 3;
              ix = (r % 2) * 2 - 1 + (k / 16) % 3;
              if (iy >= 0 && ix >= 0 && iy < 4 && ix < 4)
                acc += qz(img[s][iy][ix][k % 16], u ? HS_A[0] : LS_A[0], wl, d)
                     * qz(w0[c][k], u ? HS_W[0] : LS_W[0], wl, d);
            end
            if (acc < 0) acc = 0;
            h[r][c] = qz(acc, u ? HS_O[0] : LS_O[0], 8, d);
          end else h[r][c] = 0;
        end
      for (int c = 0; c < NCLS; c++) begin
        longint acc; acc = 0;
        for (int k = 0; k < 192; k++)
          acc += qz(h[k / 48][k % 48], u ? HS_A[1] : LS_A[1], wl, d)
               * qz(w1[c][k], u ? HS_W[1] : LS_W[1], wl, d);
        logit[u][s][c] = qz(acc, u ? HS_O[1] : LS_O[1], 8, d);
      end
      ref_top1[u][s] = 0;
      for (int c = 1; c < NCLS; c++)
        if (logit[u][s][c] > logit[u][s][ref_top1[u][s]]) ref_top1[u][s] = c;
    end
  endtask

  // gBvSB<1,2> of the LPU's softmax probabilities
  task automatic confidence();
    for (int s = 0; s < B; s++) begin
      real p [NCLS]; real S, t;
      S = 0;
      for (int c = 0; c < NCLS; c++) begin
        real dd; dd = real'(logit[0][s][ref_top1[0][s]] - logit[0][s][c]) / (2.0 ** FRAC);
        p[c] = (dd * 16.0 >= 256.0) ? 0.0 : $exp(-dd);
        S += p[c];
      end
      for (int i = 0; i < NCLS; i++)
        for (int j = i + 1; j < NCLS; j++)
          if (p[j] > p[i]) begin t = p[i]; p[i] = p[j]; p[j] = t; end
      conf[s] = (p[0] - p[1]) / S;
    end
  endtask

  task automatic cfg(input int l, input int f, input int v);
    @(negedge clk);
    cfg_we = 1; cfg_layer = 4'(l); cfg_field = 4'(f); cfg_wdata = 32'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // one batch with threshold thr; checks results and final scores
  task automatic run(input real thr, input int expect_nfail);
    int got [B]; bit hpu [B]; int cls [B]; int nres, nf, cyc;
    bit amb [B];
    for (int s = 0; s < B; s++) begin got[s] = 0; amb[s] = 0; end
    nres = 0; nf = 0;
    ceu_th = 18'($rtoi(thr * 65536.0));
    for (int s = 0; s < B; s++) begin
      real tq; tq = real'(ceu_th) / 65536.0;
      amb[s] = (conf[s] - tq < 1e-3) && (tq - conf[s] < 1e-3);
      if (!amb[s] && conf[s] < tq) nf++;
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 2000000) begin
      @(posedge clk); #1;
      cyc++;
      if (res_valid) begin
        got[res_sample]++; hpu[res_sample] = res_hpu; cls[res_sample] = int'(res_class); nres++;
      end
    end
    check("finished", done, 1);
    check("results", nres, B);
    for (int s = 0; s < B; s++) begin
      check("one_result", got[s], 1);
      if (!amb[s]) check("unit", hpu[s], conf[s] < real'(ceu_th) / 65536.0);
      check("class", cls[s], ref_top1[hpu[s]][s]);
      for (int c = 0; c < NCLS; c++)
        check("scores", longint'($signed(u_mem.mem[C1 + s * 2 + c / LANES][(c % LANES)*8 +: 8])),
              logit[hpu[s]][s][c]);
      if (hpu[s]) m_fail++; else m_pass++;
    end
    if (expect_nfail >= 0) check("n_fail", n_fail, expect_nfail);
    if (n_fail == 0) m_hpu_skipped++;
    if (lpu_sat_count > 0) m_clip++;
    $display("run th=%f: n_fail=%0d cycles=%0d lpu_sat=%0d", thr, n_fail, cyc, lpu_sat_count);
  endtask

  initial begin
    real cs [B]; real t, thr;
    cfg_we = 0; cfg_layer = 0; cfg_field = 0; cfg_wdata = 0; start = 0;
    num_layers = 2; batch = B; ceu_m = 1; ceu_n = 2; ceu_th = 0;
    lpu_logit_frac = FRAC; hpu_logit_frac = FRAC;

    // data
    for (int s = 0; s < B; s++)
      for (int y = 0; y < 4; y++)
        for (int x = 0; x < 4; x++)
          for (int c = 0; c < 16; c++) begin
            img[s][y][x][c] = longint'($signed(8'($urandom)));
            u_mem.mem[A0 + s * 16 + y * 4 + x][c*8 +: 8] = 8'(img[s][y][x][c]);
          end
    for (int c = 0; c < 40; c++)
      for (int k = 0; k < 144; k++) begin
        w0[c][k] = longint'($signed(8'($urandom)));
        u_mem.mem[W0 + c * 9 + k / LANES][(k % LANES)*8 +: 8] = 8'(w0[c][k]);
      end
    for (int c = 0; c < NCLS; c++)
      for (int k = 0; k < 192; k++) begin
        w1[c][k] = (k % 48 < 40) ? longint'($signed(8'($urandom))) : 0;
        u_mem.mem[W1 + c * 12 + k / LANES][(k % LANES)*8 +: 8] = 8'(w1[c][k]);
      end
    forward(0); forward(1); confidence();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      cfg(l, F_KW, L_KW[l]); cfg(l, F_N, L_N[l]); cfg(l, F_M, L_M[l]);
      cfg(l, F_A_BASE, L_A[l]); cfg(l, F_A_SSTRIDE, L_AS[l]); cfg(l, F_A_RSTRIDE, L_AR[l]);
      cfg(l, F_W_BASE, L_W[l]); cfg(l, F_C_BASE, L_C[l]); cfg(l, F_C_SSTRIDE, L_CS[l]);
      cfg(l, F_C_RSTRIDE, L_CR[l]); cfg(l, F_RELU, L_RELU[l]);
      cfg(l, F_LPU_SHIFT, (LS_W[l] << 10) | (LS_A[l] << 5) | LS_O[l]);
      cfg(l, F_HPU_SHIFT, (HS_W[l] << 10) | (HS_A[l] << 5) | HS_O[l]);
      if (l == 0) begin
        cfg(0, F_CONV, 1 | (3 << 4) | (3 << 8) | (2 << 12) | (1 << 16));  // 3x3, stride 2, pad 1
        cfg(0, F_IN_HW, (4 << 16) | 4);                                  // 4x4 input
        cfg(0, F_OUT_W_CW, (1 << 16) | 2);                               // out_w 2, 1 channel word
      end else cfg(l, F_CONV, 0);
    end
    // a threshold halfway between the two middle confidences: half the batch fails
    for (int s = 0; s < B; s++) cs[s] = conf[s];
    for (int i = 0; i < B; i++)
      for (int j = i + 1; j < B; j++)
        if (cs[j] > cs[i]) begin t = cs[i]; cs[i] = cs[j]; cs[j] = t; end
    thr = (cs[B/2 - 1] + cs[B/2]) / 2.0;
    for (int s = 0; s < 8; s++) $display("sample %0d: conf=%f lpu=%0d hpu=%0d", s, conf[s], ref_top1[0][s], ref_top1[1][s]);
    run(thr, -1);
    run(-1.0, 0);
    run(1.5, B);
    check("saw_pass", m_pass > 0, 1);
    check("saw_fail", m_fail > 0, 1);
    check("saw_hpu_skipped", m_hpu_skipped > 0, 1);
    check("saw_weight_clip", m_clip > 0, 1);
    check("saw_several_tiles", (40 > dut.LPU_PE) && (40 > dut.HPU_PE), 1);
    check("saw_conv_padding", dut.u_ctrl.tbl[0].conv && dut.u_ctrl.tbl[0].pad > 0, 1);
    $display("mechanisms: pass=%0d fail=%0d hpu_skipped=%0d clip_runs=%0d", m_pass, m_fail, m_hpu_skipped, m_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
