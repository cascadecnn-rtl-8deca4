// tb_pe: random dot products of random length through one PE (8-bit, 16
// lanes and 4-bit, 8 lanes); the expected accumulator is summed lane by lane
// in the testbench.  Also checks that clear wins over en and that the result
// appears one cycle after the last enabled cycle.
module tb_pe;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, en;
  logic [15:0][7:0] act8, wgt8;
  logic signed [31:0] acc8;
  pe #(.WL(8), .LANES(16), .ACC_W(32)) dut8 (.clk, .rst_n, .clear, .en, .act(act8), .wgt(wgt8), .acc(acc8));

  logic [7:0][3:0] act4, wgt4;
  logic signed [31:0] acc4;
  pe #(.WL(4), .LANES(8), .ACC_W(32)) dut4 (.clk, .rst_n, .clear, .en, .act(act4), .wgt(wgt4), .acc(acc4));

  longint exp8, exp4;

  task automatic check(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, e);
    end
  endtask

  initial begin
    clear = 0; en = 0; act8 = '0; wgt8 = '0; act4 = '0; wgt4 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int len;
      len = 1 + ($urandom % 40);
      @(negedge clk); clear = 1; en = 1;   // clear has priority
      @(negedge clk); clear = 0;
      check("clear", acc8, 0); check("clear4", acc4, 0);
      exp8 = 0; exp4 = 0;
      for (int k = 0; k < len; k++) begin
        for (int j = 0; j < 16; j++) begin
          act8[j] = 8'($urandom); wgt8[j] = 8'($urandom);
          if (t == 0) begin act8[j] = 8'h80; wgt8[j] = 8'h80; end   // extreme products
          exp8 += longint'($signed(act8[j])) * longint'($signed(wgt8[j]));
        end
        for (int j = 0; j < 8; j++) begin
          act4[j] = 4'($urandom); wgt4[j] = 4'($urandom);
          exp4 += longint'($signed(act4[j])) * longint'($signed(wgt4[j]));
        end
        en = ($urandom % 4) != 0;
        if (!en) begin  // idle cycle: undo the sums, the PE must hold
          for (int j = 0; j < 16; j++) exp8 -= longint'($signed(act8[j])) * longint'($signed(wgt8[j]));
          for (int j = 0; j < 8; j++)  exp4 -= longint'($signed(act4[j])) * longint'($signed(wgt4[j]));
        end
        @(negedge clk);
      end
      en = 0;
      check("acc8", acc8, exp8);
      check("acc4", acc4, exp4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
