// tb_cascade_ctrl: the cascade sequencer against stand-in units.  The LPU,
// HPU and CEU are replaced by responders that answer each start after a
// random delay; the CEU stand-in passes or fails each sample from a random
// pattern and returns a class derived from the address it was asked to read.
// Checks: one LPU run per layer with that layer's table entry and shifts;
// one CEU evaluation per sample at the right address; the HPU runs every
// layer only when some sample failed, over exactly the failed samples (its
// sample list); each sample gets exactly one result, from the right unit.
module tb_cascade_ctrl;
  import cascade_pkg::*;
  localparam int ML = 16, MB = 32;
  int checks = 0, failures = 0;
  int runs_with_fail = 0, runs_all_pass = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; logic [3:0] cfg_layer, cfg_field; logic [31:0] cfg_wdata;
  logic [4:0] num_layers; logic [15:0] batch;
  logic start, busy, done;
  phase_e phase;
  layer_desc_t desc; shift_t lpu_shift, hpu_shift;
  logic [15:0] num_samples, list_idx, list_sample;
  logic lpu_start, lpu_done, hpu_start, hpu_done;
  logic ceu_start, ceu_done, ceu_pass;
  logic [31:0] ceu_base; logic [15:0] ceu_nclasses, ceu_top1;
  logic res_valid, res_hpu; logic [15:0] res_sample, res_class, n_fail;

  cascade_ctrl #(.MAX_LAYERS(ML), .MAX_BATCH(MB)) dut (.*);

  bit fail_pat [MB];
  int lpu_runs, hpu_runs, ceu_runs, cur_layer;
  int got_res [MB];
  bit got_hpu [MB];
  int got_cls [MB];
  int hpu_list [$];

  task automatic check(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, e);
    end
  endtask

  function automatic logic [31:0] field_val(input int l, input int f);
    return 32'(l * 1000 + f * 7 + 1);
  endfunction

  // stand-in processing units
  initial begin
    lpu_done = 0; hpu_done = 0; ceu_done = 0; ceu_pass = 0; ceu_top1 = 0; list_idx = 0;
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (lpu_start || hpu_start) begin
        bit h; int ns;
        h = hpu_start;
        if (h && hpu_runs == 0) cur_layer = 0;   // the HPU starts again at layer 0
        check("unit_layer_kw", desc.kw, 16'(field_val(cur_layer, 0)));
        check("unit_layer_base", desc.a_base, field_val(cur_layer, 3));
        if (h) check("hpu_shift", hpu_shift, 15'(cur_layer + 200));
        else   check("lpu_shift", lpu_shift, 15'(cur_layer + 100));
        check("phase", phase, h ? PH_HPU : PH_LPU);
        ns = num_samples;
        // walk the sample list like an MM unit does
        for (int i = 0; i < ns; i++) begin
          @(negedge clk); list_idx = 16'(i); #1;
          if (h && cur_layer == 0) hpu_list.push_back(int'(list_sample));
          if (!h) check("lpu_list", list_sample, i);
        end
        repeat ($urandom % 5) @(posedge clk);
        @(negedge clk);
        if (h) begin hpu_done = 1; hpu_runs++; end else begin lpu_done = 1; lpu_runs++; end
        cur_layer++;
        @(negedge clk); lpu_done = 0; hpu_done = 0;
      end
      if (ceu_start) begin
        int s;
        // last layer: c_base = field 7, c_sstride = field 8
        s = int'((ceu_base - field_val(int'(num_layers) - 1, 7)) / field_val(int'(num_layers) - 1, 8));
        check("ceu_addr", ceu_base, field_val(int'(num_layers) - 1, 7) + 32'(s) * field_val(int'(num_layers) - 1, 8));
        check("ceu_ncls", ceu_nclasses, 16'(field_val(int'(num_layers) - 1, 1)));
        repeat (1 + $urandom % 4) @(posedge clk);
        @(negedge clk);
        ceu_done = 1; ceu_pass = !fail_pat[s]; ceu_top1 = 16'(s * 3 + (phase == PH_CEU_HPU ? 1 : 0));
        ceu_runs++;
        @(negedge clk); ceu_done = 0;
      end
    end
  end

  // result collector
  always @(posedge clk)
    if (res_valid) begin
      got_res[res_sample]++;
      got_hpu[res_sample] = res_hpu;
      got_cls[res_sample] = int'(res_class);
    end

  initial begin
    cfg_we = 0; cfg_layer = 0; cfg_field = 0; cfg_wdata = 0; num_layers = 0; batch = 0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      int L, B, nf;
      L = 1 + $urandom % 5; B = 1 + $urandom % MB;
      if (run == 1) B = MB;
      // table
      for (int l = 0; l < L; l++) begin
        for (int f = 0; f <= 12; f++) begin
          @(negedge clk);
          cfg_we = 1; cfg_layer = 4'(l); cfg_field = 4'(f);
          cfg_wdata = (f == 11) ? 32'(l + 100) : (f == 12) ? 32'(l + 200) : field_val(l, f);
        end
      end
      @(negedge clk); cfg_we = 0;
      nf = 0;
      for (int s = 0; s < MB; s++) begin
        fail_pat[s] = (run % 4 == 2) ? 1'b0 : (run % 4 == 3) ? 1'b1 : 1'($urandom % 3 == 0);
        if (s < B && fail_pat[s]) nf++;
        got_res[s] = 0; got_cls[s] = -1; got_hpu[s] = 0;
      end
      lpu_runs = 0; hpu_runs = 0; ceu_runs = 0; cur_layer = 0; hpu_list = {};
      num_layers = 5'(L); batch = 16'(B);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      check("lpu_runs", lpu_runs, L);
      check("hpu_runs", hpu_runs, nf > 0 ? L : 0);
      check("ceu_runs", ceu_runs, B + nf);
      check("n_fail", n_fail, nf);
      check("hpu_list_len", hpu_list.size(), nf > 0 ? nf : 0);
      for (int i = 0, k = 0; i < B; i++)
        if (fail_pat[i]) begin
          if (k < hpu_list.size()) check("hpu_list", hpu_list[k], i);
          k++;
        end
      for (int s = 0; s < B; s++) begin
        check("one_result", got_res[s], 1);
        check("res_unit", got_hpu[s], fail_pat[s]);
        check("res_class", got_cls[s], s * 3 + (fail_pat[s] ? 1 : 0));
      end
      if (nf > 0) runs_with_fail++; else runs_all_pass++;
    end
    check("saw_fail_run", runs_with_fail > 0, 1);
    check("saw_all_pass_run", runs_all_pass > 0, 1);
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
