// mm_check: self-checking environment for mm_unit, shared by the LPU and HPU
// testbenches.  Runs random layers (random K, column count across several
// tiles, rows per sample, sparse sample lists, scaling shifts, ReLU, and
// convolutions whose im2col rows the unit gathers itself, with stride and
// zero padding) against
// an external-memory model and compares every output element with a
// reference matrix product computed here with real-valued rounding.  Also
// checks that lanes and samples outside the layer are left untouched, the
// saturation count, and the cycle count of each layer.
module mm_check #(
  parameter int unsigned WL     = 8,
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned LANES  = 16,
  parameter int unsigned KW_MAX = 64,
  parameter int unsigned LAYERS = 40
) ();
  import cascade_pkg::*;
  int checks = 0, failures = 0;
  int multi_tile = 0, partial_tile = 0, listed_skip = 0, relu_seen = 0, conv_seen = 0, pad_seen = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned G = NUM_PE / LANES;
  localparam logic [31:0] SENT = 32'h5A;

  logic start, busy, done;
  layer_desc_t desc;
  shift_t shifts;
  logic [15:0] num_samples, list_idx, list_sample;
  logic rd_en, wr_en;
  logic [31:0] rd_addr, wr_addr, sat_count;
  logic [LANES*8-1:0] rd_data, wr_data;
  logic [LANES-1:0] wr_mask;
  logic [15:0] slist [16];

  mm_unit #(.WL(WL), .NUM_PE(NUM_PE), .LANES(LANES), .KW_MAX(KW_MAX)) dut (
    .clk, .rst_n, .start, .desc, .shifts, .num_samples, .busy, .done, .list_idx, .list_sample,
    .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data, .wr_mask, .sat_count);
  ext_mem #(.LANES(LANES), .DEPTH(32768)) u_mem (.clk, .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr, .wr_data, .wr_mask);

  assign list_sample = slist[list_idx[3:0]];

  // round-to-nearest (half up) and clip to ow bits, in real arithmetic
  function automatic longint qz(input longint x, input int sh, input int ow, inout int nsat);
    real q; longint lo, hi;
    q  = $floor(real'(x) / (2.0 ** sh) + 0.5);
    lo = -(longint'(1) << (ow - 1)); hi = (longint'(1) << (ow - 1)) - 1;
    if (q > real'(hi)) begin nsat++; return hi; end
    if (q < real'(lo)) begin nsat++; return lo; end
    return longint'(q);
  endfunction

  function automatic longint el(input int addr, input int lane);
    return longint'($signed(u_mem.mem[addr][lane*8 +: 8]));
  endfunction

  // element k of A row r of sample s; in convolution mode the im2col window
  // element, with inpad = 1 for taps in the zero padding
  function automatic longint aval(input int s, input int r, input int k, output bit inpad);
    int wi, tap, cwi, ky, kx, oy, ox, iy, ix;
    inpad = 0;
    if (!desc.conv)
      return el(32'h100 + s * int'(desc.a_sstride) + r * int'(desc.a_rstride) + k / LANES, k % LANES);
    wi = k / LANES; tap = wi / int'(desc.cw); cwi = wi % int'(desc.cw);
    ky = tap / int'(desc.kwd); kx = tap % int'(desc.kwd);
    oy = r / int'(desc.out_w); ox = r % int'(desc.out_w);
    iy = oy * int'(desc.stride) - int'(desc.pad) + ky;
    ix = ox * int'(desc.stride) - int'(desc.pad) + kx;
    if (iy < 0 || ix < 0 || iy >= int'(desc.in_h) || ix >= int'(desc.in_w)) begin
      inpad = 1; return 0;
    end
    return el(32'h100 + s * int'(desc.a_sstride) + (iy * int'(desc.in_w) + ix) * int'(desc.cw) + cwi,
              k % LANES);
  endfunction

  task automatic check(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, e);
    end
  endtask

  initial begin
    start = 0; desc = '0; shifts = '0; num_samples = 0;
    for (int i = 0; i < 16; i++) slist[i] = 16'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < LAYERS; t++) begin
      int kw, n, m, ns, cw, cyc, ecyc, nsat, dummy;
      int ws, as_, os;
      bit used [8];
      kw = 1 + ($urandom % ((KW_MAX < 6) ? KW_MAX : 6));
      n  = 1 + ($urandom % (NUM_PE * 5 / 2));
      m  = 1 + ($urandom % 3);
      ns = 1 + ($urandom % 4);
      if (t == 0) begin kw = KW_MAX; n = NUM_PE; end        // full bank, one full tile
      desc = '0;
      if (t % 3 == 1) begin                                   // convolution layer
        int oh;
        desc.conv = 1;
        desc.cw = 16'(1 + $urandom % 2);
        desc.kh = 4'(1 + $urandom % 3); desc.kwd = 4'(1 + $urandom % 3);
        desc.stride = 4'(1 + $urandom % 2); desc.pad = 4'($urandom % 2);
        desc.in_h = 16'(int'(desc.kh) + $urandom % 3); desc.in_w = 16'(int'(desc.kwd) + $urandom % 3);
        oh = (int'(desc.in_h) + 2 * int'(desc.pad) - int'(desc.kh)) / int'(desc.stride) + 1;
        desc.out_w = 16'((int'(desc.in_w) + 2 * int'(desc.pad) - int'(desc.kwd)) / int'(desc.stride) + 1);
        m  = oh * int'(desc.out_w);
        kw = int'(desc.kh) * int'(desc.kwd) * int'(desc.cw);
        ns = 1 + $urandom % 2;
        conv_seen++;
        if (desc.pad != 0) pad_seen++;
      end
      cw = (n + LANES - 1) / LANES;
      for (int i = 0; i < 8; i++) used[i] = 0;
      // sample list: ns distinct samples out of 8, random order
      for (int i = 0; i < ns; i++) begin
        int s;
        do s = $urandom % 8; while (used[s]);
        used[s] = 1; slist[i] = 16'(s);
      end
      desc.kw = 16'(kw); desc.n = 16'(n); desc.m = 32'(m);
      desc.a_base = 32'h100; desc.a_rstride = 32'(kw + 1); desc.a_sstride = 32'(m * (kw + 1) + 3);
      if (desc.conv) desc.a_sstride = 32'(int'(desc.in_h) * int'(desc.in_w) * int'(desc.cw) + 3);
      desc.w_base = 32'h2000;
      desc.c_base = 32'h6000; desc.c_rstride = 32'(cw + 1); desc.c_sstride = 32'(m * (cw + 1) + 2);
      desc.relu = ($urandom % 2) == 1;
      ws = (WL == 4) ? ($urandom % 5) : ($urandom % 2);
      as_ = (WL == 4) ? ($urandom % 5) : ($urandom % 2);
      os = 4 + ($urandom % 8);
      shifts.w_shift = 5'(ws); shifts.a_shift = 5'(as_); shifts.o_shift = 5'(os);
      // memory contents
      for (int a = 0; a < 8 * int'(desc.a_sstride); a++)
        for (int j = 0; j < LANES; j++) u_mem.mem[32'h100 + a][j*8 +: 8] = 8'($urandom);
      for (int a = 0; a < n * kw; a++)
        for (int j = 0; j < LANES; j++) u_mem.mem[32'h2000 + a][j*8 +: 8] = 8'($urandom);
      for (int a = 0; a < 8 * int'(desc.c_sstride); a++)
        for (int j = 0; j < LANES; j++) u_mem.mem[32'h6000 + a][j*8 +: 8] = SENT[7:0];
      // expected saturation count of the operands
      nsat = 0;
      for (int n0 = 0; n0 < n; n0 += NUM_PE) begin
        int nv; nv = (n - n0 < NUM_PE) ? n - n0 : NUM_PE;
        for (int c = n0; c < n0 + nv; c++)
          for (int k = 0; k < kw * LANES; k++)
            dummy = int'(qz(el(32'h2000 + c * kw + k / LANES, k % LANES), ws, WL, nsat));
        for (int i = 0; i < ns; i++)
          for (int r = 0; r < m; r++)
            for (int k = 0; k < kw * LANES; k++) begin
              bit pd; longint v;
              v = aval(int'(slist[i]), r, k, pd);
              if (!pd) dummy = int'(qz(v, as_, WL, nsat));
            end
      end
      // run
      @(negedge clk);
      num_samples = 16'(ns); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
      ecyc = 1;
      for (int n0 = 0; n0 < n; n0 += NUM_PE) begin
        int nv; nv = (n - n0 < NUM_PE) ? n - n0 : NUM_PE;
        ecyc += nv * kw + 1 + ns * m * (kw + 3 + G);
      end
      check("cycles", cyc, ecyc);
      if (n > NUM_PE) multi_tile++;
      if (n % LANES != 0) partial_tile++;
      if (ns < 8) listed_skip++;
      if (desc.relu) relu_seen++;
      // outputs (and the untouched surroundings)
      for (int s = 0; s < 8; s++)
        for (int r = 0; r < m; r++)
          for (int c = 0; c < cw * LANES + LANES; c++) begin
            int addr; longint e, acc;
            addr = 32'h6000 + s * int'(desc.c_sstride) + r * int'(desc.c_rstride) + c / LANES;
            if (used[s] && c < n) begin
              acc = 0;
              for (int k = 0; k < kw * LANES; k++) begin
                bit pd;
                acc += qz(aval(s, r, k, pd), as_, WL, dummy)
                     * qz(el(32'h2000 + c * kw + k / LANES, k % LANES), ws, WL, dummy);
              end
              if (desc.relu && acc < 0) acc = 0;
              e = qz(acc, os, 8, nsat);
            end else e = longint'($signed(SENT[7:0]));
            check("out", el(addr, c % LANES), e);
          end
      check("sat_count", sat_count, nsat);
    end
    check("saw_multi_tile", multi_tile > 0, 1);
    check("saw_partial_tile", partial_tile > 0, 1);
    check("saw_sample_list", listed_skip > 0, 1);
    check("saw_relu", relu_seen > 0, 1);
    check("saw_conv", conv_seen > 0, 1);
    check("saw_zero_padding", pad_seen > 0, 1);
    $display("layers: conv=%0d padded=%0d multi_tile=%0d", conv_seen, pad_seen, multi_tile);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
