// act_sram: the lane-banked activation / dense-input memory of one
// sub-array engine. It holds one 8-bit value per array row ("lane") per
// item: word a is the input vector of item a, byte r of it feeds array row
// r. Every lane is a separate narrow bank with its own address, so the
// engine can read lane r at item (m - r) and write lane c at item (m - c)
// in the same cycle. That per-lane addressing is what skews inputs into
// and de-skews results out of the systolic array, with no delay lines.
// The paper names a "Dense-inputs SRAM" and a "banked activation memory";
// the lane organisation and sizes are this design's.
// Ports:
//  * per-lane read (synchronous, data the cycle after rd_en);
//  * per-lane write (port A, used by the engine for layer outputs);
//  * whole-line write (port B, used by the embedding gather unit and the
//    host to deposit a 128-byte input vector), so embeddings for the next
//    sub-batch can arrive while a layer runs. The two write ports must not
//    hit the same word in the same cycle (asserted).
module act_sram
  import rp_pkg::*;
#(
  parameter int unsigned LANES = ARRAY_N,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en   [LANES],
  input  logic [AW-1:0] rd_addr [LANES],
  output data_t         rd_data [LANES],
  input  logic          wr_en   [LANES],
  input  logic [AW-1:0] wr_addr [LANES],
  input  data_t         wr_data [LANES],
  input  logic          line_wr_en,
  input  logic [AW-1:0] line_wr_addr,
  input  logic [LANES*DATA_W-1:0] line_wr_data
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    data_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en[l])   mem[wr_addr[l]]   <= wr_data[l];
      if (line_wr_en) mem[line_wr_addr] <= line_wr_data[l*DATA_W +: DATA_W];
      if (rd_en[l])   rd_data[l] <= mem[rd_addr[l]];
    end

    a_no_port_clash: assert property (@(posedge clk)
        !(wr_en[l] && line_wr_en && wr_addr[l] == line_wr_addr))
      else $error("act_sram: lane %0d word written by both ports", l);
  end
endmodule
