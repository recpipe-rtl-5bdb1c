// weight_sram: one bank of the array's weight SRAM. Each word is one row of
// a weight matrix as it enters the top of a sub-array: LANES signed 8-bit
// weights, one per array column (128 x 8 = 1024 bits, the same 128-byte
// width as an embedding line). The paper gives only the 8 MB total of array
// SRAM (weights plus activations); this design splits it into one weight
// bank and one activation bank per sub-array engine, 16 x (256 KB + 256 KB)
// by default, i.e. DEPTH = 2048 words here.
// Interface: one write port and one read port; reads are synchronous
// (rd_data is valid the cycle after rd_en), as in an SRAM macro.
module weight_sram
  import rp_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned W     = LINE_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
