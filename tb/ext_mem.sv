// ext_mem: behavioural model of the external memory seen by the accelerator
// (simulation only).  Word-wide, one read per cycle answered on the next
// cycle, writes with a per-lane (byte) mask.  Addresses wrap at DEPTH.  Testbenches load and inspect
// the contents through the `mem` array.
module ext_mem #(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 65536
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  logic [31:0]           rd_addr,
  output logic [LANES*8-1:0]    rd_data,
  input  logic                  wr_en,
  input  logic [31:0]           wr_addr,
  input  logic [LANES*8-1:0]    wr_data,
  input  logic [LANES-1:0]      wr_mask
);
  logic [LANES*8-1:0] mem [DEPTH];
  int unsigned reads = 0, writes = 0;

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data <= mem[rd_addr % DEPTH];
      reads   <= reads + 1;
    end
    if (wr_en) begin
      for (int j = 0; j < LANES; j++)
        if (wr_mask[j]) mem[wr_addr % DEPTH][j*8 +: 8] <= wr_data[j*8 +: 8];
      writes <= writes + 1;
    end
  end

endmodule
