// tb_ceu: random score vectors through the confidence evaluation unit.
// The reference computes softmax probabilities in real arithmetic, sorts
// them, forms gBvSB<M,N> and compares with th; cases closer to the threshold
// than the table's resolution (1e-3) are not judged.  top1 must be the first
// index of the largest score.  Also checks the exponential table against
// exp() and the cycle count of an evaluation.
module tb_ceu;
  import cascade_pkg::*;
  localparam int LANES = 16, NMAX = 8;
  int checks = 0, failures = 0;
  int n_pass = 0, n_fail = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, pass;
  logic [31:0] base;
  logic [15:0] n_classes, top1;
  logic [3:0]  frac, m_p, n_p;
  logic signed [17:0] th;
  logic rd_en;
  logic [31:0] rd_addr;
  logic [LANES*8-1:0] rd_data;

  ceu #(.LANES(LANES), .NMAX(NMAX)) dut (.clk, .rst_n, .start, .base, .n_classes,
    .logit_frac(frac), .m_param(m_p), .n_param(n_p), .th, .busy, .done, .pass, .top1,
    .rd_en, .rd_addr, .rd_data);
  ext_mem #(.LANES(LANES), .DEPTH(4096)) u_mem (.clk, .rd_en, .rd_addr, .rd_data,
    .wr_en(1'b0), .wr_addr('0), .wr_data('0), .wr_mask('0));

  task automatic check(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, e);
    end
  endtask

  initial begin
    start = 0; base = 0; n_classes = 0; frac = 0; m_p = 1; n_p = 2; th = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // exponential table
    for (int i = 0; i < 256; i++) begin
      real e; int v;
      e = $exp(-real'(i) / 16.0) * 65535.0;
      v = int'(dut.EXP_LUT[i*16 +: 16]);
      checks++;
      if ((real'(v) - e) > 2.0 || (e - real'(v)) > 2.0) begin
        failures++; $display("FAIL lut[%0d]=%0d exp %f", i, v, e);
      end
    end
    for (int t = 0; t < 300; t++) begin
      int C, nw, mx, amax, cyc, M, N;
      int z [];
      real p [], S, g, thr, tmp;
      C  = 1 + ($urandom % 70);
      nw = (C + LANES - 1) / LANES;
      z = new[C]; p = new[C];
      // scores: a spread that gives both confident and unsure cases
      mx = -200; amax = 0;
      for (int i = 0; i < C; i++) begin
        z[i] = int'($urandom % 97) - 60;
        if (t % 3 == 0 && i == (t % C)) z[i] = 100;          // one dominant class
        if (t % 7 == 0) z[i] = 127 - ($urandom % 4);          // crowded top
        if (t == 5) z[i] = -128;                              // all equal minimum
        if (z[i] > mx) begin mx = z[i]; amax = i; end
      end
      for (int i = 0; i < C; i++) begin
        logic [31:0] a;
        a = 32'(100 + i / LANES);
        u_mem.mem[a][(i % LANES)*8 +: 8] = 8'(z[i]);
      end
      for (int i = C; i < nw * LANES; i++) u_mem.mem[100 + i / LANES][(i % LANES)*8 +: 8] = 8'($urandom);
      M = 1 + ($urandom % 3); N = M + ($urandom % (NMAX - M + 1));
      frac = 4'($urandom % 5);
      thr = real'($urandom % 120000) / 65536.0 - 0.4;
      // reference
      S = 0;
      for (int i = 0; i < C; i++) begin
        real dd; dd = real'(mx - z[i]) / (2.0 ** frac);
        p[i] = (dd * 16.0 >= 256.0) ? 0.0 : $exp(-dd);
        S += p[i];
      end
      for (int i = 0; i < C; i++)
        for (int j = i + 1; j < C; j++)
          if (p[j] > p[i]) begin tmp = p[i]; p[i] = p[j]; p[j] = tmp; end
      g = 0;
      for (int k = 0; k < N && k < C; k++) g += (k < M) ? p[k] / S : -p[k] / S;
      // run
      @(negedge clk);
      base = 100; n_classes = 16'(C); m_p = 4'(M); n_p = 4'(N);
      th = 18'($rtoi(thr * 65536.0 + ((thr < 0) ? -0.5 : 0.5)));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check("top1", top1, amax);
      check("cycles", cyc, nw + 1 + nw * (LANES + 2) + 2);
      if (g - real'(th) / 65536.0 > 1e-3 || real'(th) / 65536.0 - g > 1e-3) begin
        check("pass", pass, (g >= real'(th) / 65536.0));
        if (pass) n_pass++; else n_fail++;
      end
    end
    check("saw_pass", n_pass > 0, 1);
    check("saw_fail", n_fail > 0, 1);
    $display("pass=%0d fail=%0d", n_pass, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
