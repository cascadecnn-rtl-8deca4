// mm_unit: tiled matrix-multiplication unit, the processing core of both the
// low-precision unit (LPU, WL = 4) and the high-precision unit (HPU, WL = 8).
//
// NUM_PE processing elements each compute one output column; each PE has
// LANES multiply-accumulate lanes (MACCs-per-PE) and so consumes one memory
// word of LANES elements per cycle.  A convolution is cast as a matrix
// multiplication with one A row per output pixel: in convolution mode the
// unit generates the addresses of that row's im2col window itself (kernel
// taps x channel words, zero for taps in the padding), so the input feature
// map is read in place.  Fully-connected layers use plain A rows, one per
// sample.  One engine thus runs every CONV and FC layer.
//
// Schedule of one layer (see cascade_pkg for the memory layout):
//   for each tile of NUM_PE output columns n0..n0+NUM_PE-1:
//     LOADW : fetch the tile's weight columns into per-PE weight banks,
//             requantising each element to WL bits (w_shift) - the run-time
//             extraction of low-precision weights from the shared model;
//     for each sample s of the sample list, for each row r of that sample:
//       ROW/ADDR : clear the accumulators, form the row addresses (and, in
//                  convolution mode, the window origin of the output pixel);
//       COMP     : stream the kw words of A row r (requantised with a_shift)
//                  past all PEs; each PE reads its own bank at the same index;
//       WRITE    : scale each accumulator (o_shift, optional ReLU, saturate
//                  to 8 bits) and store NUM_PE/LANES words with lane masks.
// The sample list lets the HPU run only on the samples the confidence unit
// rejected: the unit asks for entry list_idx and uses list_sample as the
// sample number.  Weights are fetched once per tile and reused over the
// whole list (batch processing).
//
// Cycle count of one layer, from the start pulse to the done pulse:
//   sum over tiles ( nv*kw + 1 + ns*m*(kw + 3 + NUM_PE/LANES) ) + 1
// where nv = valid columns of the tile and ns = num_samples.
// Memory reads have a fixed latency of one cycle.
//
// The number of PEs and MACCs-per-PE are the architecture's tunable tile
// sizes; their defaults, the weight-bank depth, the fetch-one-word-per-cycle
// interface, this loop order and the in-place im2col addressing are this
// implementation's choices.
module mm_unit
  import cascade_pkg::*;
#(
  parameter int unsigned WL     = 8,     // arithmetic wordlength of the unit
  parameter int unsigned NUM_PE = 16,    // PEs (output columns per tile)
  parameter int unsigned LANES  = 16,    // MACCs per PE = elements per word
  parameter int unsigned KW_MAX = 1568,  // weight-bank depth in words
  parameter int unsigned ACC_W  = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // command
  input  logic                       start,
  input  layer_desc_t                desc,
  input  shift_t                     shifts,
  input  logic [15:0]                num_samples,
  output logic                       busy,
  output logic                       done,
  // sample list lookup
  output logic [15:0]                list_idx,
  input  logic [15:0]                list_sample,
  // memory port
  output logic                       rd_en,
  output logic [ADDR_W-1:0]          rd_addr,
  input  logic [LANES*MEM_WL-1:0]    rd_data,
  output logic                       wr_en,
  output logic [ADDR_W-1:0]          wr_addr,
  output logic [LANES*MEM_WL-1:0]    wr_data,
  output logic [LANES-1:0]           wr_mask,
  // count of operands and results clipped by saturation
  output logic [31:0]                sat_count
);
  localparam int unsigned GROUPS = NUM_PE / LANES;
  localparam int unsigned KW_W   = $clog2(KW_MAX);
  localparam int unsigned PE_W   = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  localparam int unsigned G_W    = (GROUPS > 1) ? $clog2(GROUPS) : 1;

  typedef enum logic [2:0] {
    S_IDLE, S_LOADW, S_LDRAIN, S_ROW, S_ADDR, S_COMP, S_CDRAIN, S_WRITE
  } state_e;

  state_e          state;
  layer_desc_t     d;
  shift_t          sh;
  logic [15:0]     ns;
  logic [15:0]     n0;        // first column of the tile
  logic [PE_W-1:0] p;         // PE being loaded
  logic [15:0]     kc;        // word index along K
  logic [15:0]     si;        // sample list index
  logic [31:0]     r;         // row within the sample
  logic [G_W-1:0]  g;         // write group
  logic [15:0]     s_cur;
  logic [ADDR_W-1:0] row_a, row_c;

  // convolution mode: output pixel, window origin and position in the window
  logic [15:0]        oy, ox;
  logic signed [17:0] by, bx;        // oy*stride - pad, ox*stride - pad
  logic [3:0]         ky, kx;
  logic [15:0]        ci;            // channel word
  logic signed [17:0] iy, ix;
  logic               in_img;        // tap inside the input feature map
  logic               cp_zero;       // compute word is zero padding

  // load / compute pipeline registers (one-cycle memory latency)
  logic            ld_v, cp_v;
  logic [PE_W-1:0] ld_p;
  logic [KW_W-1:0] ld_kc;

  logic [16:0]     n_next;
  assign n_next = 17'(n0) + 17'(p) + 17'd1;   // columns loaded after this PE

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; d <= '0; sh <= '0; ns <= '0; n0 <= '0; p <= '0; kc <= '0;
      si <= '0; r <= '0; g <= '0; s_cur <= '0; row_a <= '0; row_c <= '0;
      ld_v <= 1'b0; cp_v <= 1'b0; ld_p <= '0; ld_kc <= '0; done <= 1'b0;
      oy <= '0; ox <= '0; by <= '0; bx <= '0; ky <= '0; kx <= '0; ci <= '0; cp_zero <= 1'b0;
    end else begin
      done <= 1'b0;
      ld_v <= 1'b0;
      cp_v <= 1'b0;
      cp_zero <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d <= desc; sh <= shifts; ns <= num_samples;
          n0 <= '0; p <= '0; kc <= '0; si <= '0; r <= '0;
          if (desc.n == '0 || desc.kw == '0 || desc.m == '0 || num_samples == '0) done <= 1'b1;
          else state <= S_LOADW;
        end
        S_LOADW: begin
          ld_v <= 1'b1; ld_p <= p; ld_kc <= KW_W'(kc);
          if (kc == d.kw - 16'd1) begin
            kc <= '0;
            if (p == PE_W'(NUM_PE - 1) || n_next >= 17'(d.n)) begin
              p <= '0; state <= S_LDRAIN;
            end else p <= p + 1'b1;
          end else kc <= kc + 16'd1;
        end
        S_LDRAIN: begin si <= '0; r <= '0; oy <= '0; ox <= '0; state <= S_ROW; end
        S_ROW:  begin s_cur <= list_sample; state <= S_ADDR; end
        S_ADDR: begin
          if (d.conv) row_a <= d.a_base + ADDR_W'(s_cur) * d.a_sstride;
          else        row_a <= d.a_base + ADDR_W'(s_cur) * d.a_sstride + ADDR_W'(r) * d.a_rstride;
          by <= 18'(oy * 16'(d.stride)) - 18'(d.pad);
          bx <= 18'(ox * 16'(d.stride)) - 18'(d.pad);
          ky <= '0; kx <= '0; ci <= '0;
          row_c <= d.c_base + ADDR_W'(s_cur) * d.c_sstride + ADDR_W'(r) * d.c_rstride
                   + ADDR_W'(n0 / 16'(LANES));
          kc <= '0; state <= S_COMP;
        end
        S_COMP: begin
          cp_v    <= 1'b1;
          cp_zero <= d.conv && !in_img;
          if (ci == d.cw - 16'd1) begin
            ci <= '0;
            if (kx == d.kwd - 4'd1) begin kx <= '0; ky <= ky + 4'd1; end
            else kx <= kx + 4'd1;
          end else ci <= ci + 16'd1;
          if (kc == d.kw - 16'd1) begin kc <= '0; state <= S_CDRAIN; end
          else kc <= kc + 16'd1;
        end
        S_CDRAIN: begin g <= '0; state <= S_WRITE; end
        S_WRITE: begin
          if (g == G_W'(GROUPS - 1)) begin
            g <= '0;
            // next output pixel (convolution mode)
            if (ox == d.out_w - 16'd1) begin ox <= '0; oy <= oy + 16'd1; end
            else ox <= ox + 16'd1;
            if (r == d.m - 32'd1) begin
              r <= '0; ox <= '0; oy <= '0;
              if (si == ns - 16'd1) begin
                si <= '0;
                if (32'(n0) + NUM_PE >= 32'(d.n)) begin
                  done <= 1'b1; state <= S_IDLE;
                end else begin
                  n0 <= n0 + 16'(NUM_PE); state <= S_LOADW;
                end
              end else begin si <= si + 16'd1; state <= S_ROW; end
            end else begin r <= r + 32'd1; state <= S_ROW; end
          end else g <= g + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign list_idx = si;

  // ---------------------------------------------------------------- memory reads
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    if (state == S_LOADW) begin
      rd_en   = 1'b1;
      rd_addr = d.w_base + (ADDR_W'(n0) + ADDR_W'(p)) * ADDR_W'(d.kw) + ADDR_W'(kc);
    end else if (state == S_COMP) begin
      if (d.conv) begin
        rd_en   = in_img;
        rd_addr = row_a + (ADDR_W'(iy) * ADDR_W'(d.in_w) + ADDR_W'(ix)) * ADDR_W'(d.cw)
                  + ADDR_W'(ci);
      end else begin
        rd_en   = 1'b1;
        rd_addr = row_a + ADDR_W'(kc);
      end
    end
  end

  always_comb begin
    iy     = by + 18'(ky);
    ix     = bx + 18'(kx);
    in_img = (iy >= 0) && (iy < $signed({2'b00, d.in_h})) &&
             (ix >= 0) && (ix < $signed({2'b00, d.in_w}));
  end

  // ---------------------------------------------------------------- operand quantisers
  logic [LANES-1:0][WL-1:0] q_word;    // rd_data requantised to WL bits
  logic [LANES-1:0]         q_sat;
  logic [SH_W-1:0]          q_shift;
  assign q_shift = ld_v ? sh.w_shift : sh.a_shift;

  for (genvar j = 0; j < LANES; j++) begin : g_q
    requant #(.IN_W(MEM_WL), .OUT_W(WL), .SH_W(SH_W)) u_q (
      .x(rd_data[j*MEM_WL +: MEM_WL]), .shift(q_shift), .y(q_word[j]), .sat(q_sat[j]));
  end

  // ---------------------------------------------------------------- weight banks and PEs
  logic signed [ACC_W-1:0] acc [NUM_PE];
  logic pe_clear;
  assign pe_clear = (state == S_ROW);

  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    logic [LANES*WL-1:0] bank [KW_MAX];
    logic [LANES*WL-1:0] bank_q;
    always_ff @(posedge clk) begin
      if (ld_v && ld_p == PE_W'(i)) bank[ld_kc] <= q_word;
      bank_q <= bank[KW_W'(kc)];
    end
    pe #(.WL(WL), .LANES(LANES), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n, .clear(pe_clear), .en(cp_v),
      .act(cp_zero ? '0 : q_word), .wgt(bank_q), .acc(acc[i]));
  end

  // ---------------------------------------------------------------- write-back
  logic [LANES-1:0] o_sat;
  always_comb begin
    wr_en   = (state == S_WRITE);
    wr_addr = row_c + ADDR_W'(g);
    for (int j = 0; j < LANES; j++)
      wr_mask[j] = (32'(n0) + 32'(g) * LANES + 32'(j)) < 32'(d.n);
  end

  for (genvar j = 0; j < LANES; j++) begin : g_o
    logic signed [ACC_W-1:0]  a_sel;
    logic signed [MEM_WL-1:0] o_q;
    always_comb begin
      a_sel = acc[32'(g) * LANES + j];
      if (d.relu && a_sel < 0) a_sel = '0;
    end
    requant #(.IN_W(ACC_W), .OUT_W(MEM_WL), .SH_W(SH_W)) u_o (
      .x(a_sel), .shift(sh.o_shift), .y(o_q), .sat(o_sat[j]));
    assign wr_data[j*MEM_WL +: MEM_WL] = o_q;
  end

  // ---------------------------------------------------------------- saturation count
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sat_count <= '0;
    else if (start && state == S_IDLE) sat_count <= '0;
    else if (ld_v || (cp_v && !cp_zero)) sat_count <= sat_count + 32'($countones(q_sat));
    else if (wr_en) sat_count <= sat_count + 32'($countones(o_sat & wr_mask));
  end

  // ---------------------------------------------------------------- checks
  if (NUM_PE % LANES != 0) begin : g_chk
    $error("mm_unit: NUM_PE must be a multiple of LANES");
  end
  a_kw: assert property (@(posedge clk) disable iff (!rst_n)
                         (start && state == S_IDLE) |-> desc.kw <= 16'(KW_MAX))
        else $error("mm_unit: layer K exceeds the weight banks");
  a_conv: assert property (@(posedge clk) disable iff (!rst_n)
                           (start && state == S_IDLE && desc.conv) |->
                           32'(desc.kw) == 32'(desc.kh) * 32'(desc.kwd) * 32'(desc.cw))
          else $error("mm_unit: convolution needs kw = kh * kwd * cw");
endmodule
