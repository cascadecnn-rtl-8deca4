// tb_cnn_layers: layers of VGG-16 and AlexNet, with their real kernel sizes,
// channel counts and strides, on the matrix-multiplication unit in both of
// its configurations at the default parameters of the cascade: the LPU
// (4-bit, 32 PEs) and the HPU (8-bit, 16 PEs), with 16 MACCs per PE and the
// full 1568-word weight banks.  The feature maps are cropped to a few pixels
// so that the run stays short; the channel and class counts are not
// reduced, except that VGG-16 fc6 computes 32 of its 4096 outputs (the
// whole K = 25,088 dot product, which fills the weight banks).
//
// Both units read the same 8-bit data from identical memories and run the
// layer at the same time; the LPU's shifts take the top 4 bits of every
// weight and activation (the run-time weight extraction), the HPU uses them
// as stored.  Every output element is compared with a reference dot product
// computed here in integer arithmetic, lanes past the last column must stay
// untouched, and each unit's cycle count must match its formula.
module tb_cnn_layers;
  import cascade_pkg::*;
  localparam int unsigned DEPTH = 1 << 19;
  localparam logic [7:0] SENT = 8'h5A;
  int checks = 0, failures = 0;
  int conv_layers = 0, padded_layers = 0, strided_layers = 0, fc_layers = 0, full_bank = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_desc_t desc;
  shift_t      sh_l, sh_h;
  logic [15:0] num_samples;
  logic        start;

  // low-precision unit
  logic l_busy, l_done, l_rd_en, l_wr_en;
  logic [15:0] l_list_idx;
  logic [31:0] l_rd_addr, l_wr_addr, l_sat;
  logic [127:0] l_rd_data, l_wr_data;
  logic [15:0] l_wr_mask;
  mm_unit #(.WL(4), .NUM_PE(32)) u_lpu (
    .clk, .rst_n, .start, .desc, .shifts(sh_l), .num_samples, .busy(l_busy), .done(l_done),
    .list_idx(l_list_idx), .list_sample(l_list_idx), .rd_en(l_rd_en), .rd_addr(l_rd_addr),
    .rd_data(l_rd_data), .wr_en(l_wr_en), .wr_addr(l_wr_addr), .wr_data(l_wr_data),
    .wr_mask(l_wr_mask), .sat_count(l_sat));
  ext_mem #(.LANES(16), .DEPTH(DEPTH)) u_mem_l (.clk, .rd_en(l_rd_en), .rd_addr(l_rd_addr),
    .rd_data(l_rd_data), .wr_en(l_wr_en), .wr_addr(l_wr_addr), .wr_data(l_wr_data), .wr_mask(l_wr_mask));

  // high-precision unit (module defaults)
  logic h_busy, h_done, h_rd_en, h_wr_en;
  logic [15:0] h_list_idx;
  logic [31:0] h_rd_addr, h_wr_addr, h_sat;
  logic [127:0] h_rd_data, h_wr_data;
  logic [15:0] h_wr_mask;
  mm_unit u_hpu (
    .clk, .rst_n, .start, .desc, .shifts(sh_h), .num_samples, .busy(h_busy), .done(h_done),
    .list_idx(h_list_idx), .list_sample(h_list_idx), .rd_en(h_rd_en), .rd_addr(h_rd_addr),
    .rd_data(h_rd_data), .wr_en(h_wr_en), .wr_addr(h_wr_addr), .wr_data(h_wr_data),
    .wr_mask(h_wr_mask), .sat_count(h_sat));
  ext_mem #(.LANES(16), .DEPTH(DEPTH)) u_mem_h (.clk, .rd_en(h_rd_en), .rd_addr(h_rd_addr),
    .rd_data(h_rd_data), .wr_en(h_wr_en), .wr_addr(h_wr_addr), .wr_data(h_wr_data), .wr_mask(h_wr_mask));

  task automatic check(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, e);
    end
  endtask

  // shift right with round half up, then clip to ow bits
  function automatic longint qz(input longint x, input int sh, input int ow);
    longint q, lo, hi;
    q  = (sh == 0) ? x : ((x + (longint'(1) << (sh - 1))) >>> sh);
    lo = -(longint'(1) << (ow - 1)); hi = (longint'(1) << (ow - 1)) - 1;
    return (q > hi) ? hi : (q < lo) ? lo : q;
  endfunction

  function automatic longint el(input int addr, input int lane);
    return longint'($signed(u_mem_h.mem[addr][lane*8 +: 8]));
  endfunction

  function automatic longint lpu_el(input int addr, input int lane);
    return longint'($signed(u_mem_l.mem[addr][lane*8 +: 8]));
  endfunction

  // element k of A row r of sample s (im2col window in convolution mode)
  function automatic longint aval(input int s, input int r, input int k);
    int wi, tap, cwi, ky, kx, oy, ox, iy, ix;
    if (!desc.conv)
      return el(int'(desc.a_base) + s * int'(desc.a_sstride) + r * int'(desc.a_rstride) + k / 16, k % 16);
    wi = k / 16; tap = wi / int'(desc.cw); cwi = wi % int'(desc.cw);
    ky = tap / int'(desc.kwd); kx = tap % int'(desc.kwd);
    oy = r / int'(desc.out_w); ox = r % int'(desc.out_w);
    iy = oy * int'(desc.stride) - int'(desc.pad) + ky;
    ix = ox * int'(desc.stride) - int'(desc.pad) + kx;
    if (iy < 0 || ix < 0 || iy >= int'(desc.in_h) || ix >= int'(desc.in_w)) return 0;
    return el(int'(desc.a_base) + s * int'(desc.a_sstride) + (iy * int'(desc.in_w) + ix) * int'(desc.cw) + cwi,
              k % 16);
  endfunction

  // one layer: conv (kh x kwd, stride, pad over in_h x in_w x cin) when kh > 0,
  // else FC with K = kfc; n output columns; ns samples
  task automatic run_layer(input string name, input int kh, input int kwd, input int stride,
                           input int pad, input int in_h, input int in_w, input int cin,
                           input int kfc, input int n, input int ns);
    int kw, m, cw, ow, oh, cwo, k, asz, cyc_l, cyc_h, e_l, e_h, os_l, os_h, errs0, mid_l, mid_h, nout;
    int unsigned wbase, cbase;
    longint wq_l[], wq_h[], row_l[], row_h[];
    desc = '0;
    if (kh > 0) begin
      cw = (cin + 15) / 16;
      oh = (in_h + 2 * pad - kh) / stride + 1; ow = (in_w + 2 * pad - kwd) / stride + 1;
      m = oh * ow; kw = kh * kwd * cw; k = kh * kwd * cin;
      desc.conv = 1; desc.kh = 4'(kh); desc.kwd = 4'(kwd); desc.stride = 4'(stride);
      desc.pad = 4'(pad); desc.in_h = 16'(in_h); desc.in_w = 16'(in_w);
      desc.out_w = 16'(ow); desc.cw = 16'(cw);
      asz = in_h * in_w * cw;
      conv_layers++;
      if (pad > 0) padded_layers++;
      if (stride > 1) strided_layers++;
    end else begin
      cw = (kfc + 15) / 16; kw = cw; m = 1; k = kfc; asz = kw; cin = kfc;
      fc_layers++;
    end
    if (kw == 1568) full_bank++;
    cwo = (n + 15) / 16;
    wbase = 32'h100 + 32'(ns * asz) + 32'h10;
    cbase = wbase + 32'(n * kw) + 32'h10;
    desc.kw = 16'(kw); desc.n = 16'(n); desc.m = 32'(m);
    desc.a_base = 32'h100; desc.a_sstride = 32'(asz); desc.a_rstride = 32'(kw);
    desc.w_base = wbase; desc.c_base = cbase;
    desc.c_rstride = 32'(cwo); desc.c_sstride = 32'(m * cwo);
    desc.relu = (kh > 0);
    // output shifts from the spread of a K-term dot product of the operands
    os_h = $clog2(int'($sqrt(real'(k))) * 5476) - 5;
    os_l = $clog2(int'($sqrt(real'(k))) * 21) - 5;
    if (os_l < 0) os_l = 0;
    sh_h = '{w_shift: 5'd0, a_shift: 5'd0, o_shift: 5'(os_h)};
    sh_l = '{w_shift: 5'd4, a_shift: 5'd4, o_shift: 5'(os_l)};
    // data: channels past cin are zero, as a real feature map would hold them
    for (int a = 0; a < ns * asz; a++)
      for (int j = 0; j < 16; j++)
        u_mem_h.mem[32'h100 + a][j*8 +: 8] = ((a % cw) * 16 + j < cin) ? 8'($urandom) : 8'h00;
    for (int a = 0; a < n * kw; a++)
      for (int j = 0; j < 16; j++)
        u_mem_h.mem[wbase + 32'(a)][j*8 +: 8] = ((a % cw) * 16 + j < cin) ? 8'($urandom) : 8'h00;
    for (int a = 0; a < ns * m * cwo; a++) u_mem_h.mem[cbase + 32'(a)] = {16{SENT}};
    for (int a = 32'h100; a < cbase + 32'(ns * m * cwo); a++) u_mem_l.mem[a] = u_mem_h.mem[a];
    // run both units
    @(negedge clk);
    num_samples = 16'(ns); start = 1;
    @(negedge clk); start = 0;
    cyc_l = 0; cyc_h = 0;
    for (int c = 1; !(cyc_l > 0 && cyc_h > 0) && c < 4000000; c++) begin
      if (l_done) cyc_l = c;
      if (h_done) cyc_h = c;
      @(negedge clk);
    end
    e_l = 1; e_h = 1;
    for (int n0 = 0; n0 < n; n0 += 32) e_l += ((n - n0 < 32) ? n - n0 : 32) * kw + 1 + ns * m * (kw + 3 + 2);
    for (int n0 = 0; n0 < n; n0 += 16) e_h += ((n - n0 < 16) ? n - n0 : 16) * kw + 1 + ns * m * (kw + 3 + 1);
    check({name, " lpu cycles"}, cyc_l, e_l);
    check({name, " hpu cycles"}, cyc_h, e_h);
    // reference
    wq_l = new[n * kw * 16]; wq_h = new[n * kw * 16];
    for (int c = 0; c < n; c++)
      for (int i = 0; i < kw * 16; i++) begin
        longint v;
        v = el(int'(wbase) + c * kw + i / 16, i % 16);
        wq_h[c * kw * 16 + i] = qz(v, 0, 8);
        wq_l[c * kw * 16 + i] = qz(v, 4, 4);
      end
    row_l = new[kw * 16]; row_h = new[kw * 16];
    errs0 = failures; mid_l = 0; mid_h = 0; nout = 0;
    for (int s = 0; s < ns; s++)
      for (int r = 0; r < m; r++) begin
        for (int i = 0; i < kw * 16; i++) begin
          longint v;
          v = aval(s, r, i);
          row_h[i] = qz(v, 0, 8); row_l[i] = qz(v, 4, 4);
        end
        for (int c = 0; c < cwo * 16; c++) begin
          int addr;
          longint acc_l, acc_h, ex_l, ex_h;
          addr = int'(cbase) + s * m * cwo + r * cwo + c / 16;
          if (c < n) begin
            acc_l = 0; acc_h = 0;
            for (int i = 0; i < kw * 16; i++) begin
              acc_h += row_h[i] * wq_h[c * kw * 16 + i];
              acc_l += row_l[i] * wq_l[c * kw * 16 + i];
            end
            if (desc.relu && acc_h < 0) acc_h = 0;
            if (desc.relu && acc_l < 0) acc_l = 0;
            ex_h = qz(acc_h, os_h, 8); ex_l = qz(acc_l, os_l, 8);
            nout++;
            if (ex_h != 0 && ex_h > -128 && ex_h < 127) mid_h++;
            if (ex_l != 0 && ex_l > -128 && ex_l < 127) mid_l++;
          end else begin
            ex_h = longint'($signed(SENT)); ex_l = ex_h;
          end
          check({name, " hpu out"}, el(addr, c % 16), ex_h);
          check({name, " lpu out"}, lpu_el(addr, c % 16), ex_l);
        end
      end
    // the shifts must leave most outputs neither zero nor clipped (at least a
    // third: ReLU zeroes about half of a convolution's outputs)
    check({name, " lpu outputs in range"}, 3 * mid_l >= nout, 1);
    check({name, " hpu outputs in range"}, 3 * mid_h >= nout, 1);
    $display("%-22s K=%0d n=%0d rows=%0d samples=%0d  cycles LPU %0d HPU %0d  in-range %0d/%0d/%0d  failures %0d",
             name, k, n, m, ns, cyc_l, cyc_h, mid_l, mid_h, nout, failures - errs0);
  endtask

  initial begin
    start = 0; desc = '0; sh_l = '0; sh_h = '0; num_samples = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    //         name               kh kwd st pad in_h in_w  cin   K_fc     n ns
    run_layer("vgg16 conv1_1",     3, 3, 1, 1,   6,   6,    3,    0,   64, 2);
    run_layer("vgg16 conv3_2",     3, 3, 1, 1,   4,   4,  256,    0,  256, 1);
    run_layer("vgg16 conv5_3",     3, 3, 1, 1,   2,   2,  512,    0,  512, 1);
    run_layer("vgg16 fc6 (32 of)", 0, 0, 0, 0,   0,   0,    0, 25088,  32, 2);
    run_layer("vgg16 fc8",         0, 0, 0, 0,   0,   0,    0,  4096, 1000, 2);
    run_layer("alexnet conv1",    11, 11, 4, 0, 19,  19,    3,    0,   96, 1);
    run_layer("alexnet conv2",     5, 5, 1, 2,   5,   5,   96,    0,  256, 1);
    check("saw_conv", conv_layers > 0, 1);
    check("saw_padding", padded_layers > 0, 1);
    check("saw_stride", strided_layers > 0, 1);
    check("saw_fc", fc_layers > 0, 1);
    check("saw_full_weight_bank", full_bank > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
