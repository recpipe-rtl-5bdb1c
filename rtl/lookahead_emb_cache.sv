// lookahead_emb_cache: the dynamic ("look-ahead") embedding cache. It holds
// vectors fetched from DRAM for queries in flight, and vectors prefetched
// for the backend stage while the frontend is still ranking later
// sub-batches. 4 MB = 32,768 lines of 128 bytes by default, the paper's
// worst-case provisioning. Organisation (this design's choice): direct
// mapped on the low id bits, full id as tag, valid bit per line; a fill
// overwrites whatever the line held.
// Lookup: lk_en with id; lk_hit and lk_data are valid the next cycle.
module lookahead_emb_cache
  import rp_pkg::*;
#(
  parameter int unsigned LINES = 32768
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    fill_en,
  input  emb_id_t fill_id,
  input  line_t   fill_data,
  input  logic    lk_en,
  input  emb_id_t lk_id,
  output logic    lk_hit,
  output line_t   lk_data
);
  localparam int unsigned IW = $clog2(LINES);

  line_t            data [LINES];
  emb_id_t          tag  [LINES];
  logic [LINES-1:0] valid;

  logic [IW-1:0] fi, li;
  assign fi = fill_id[IW-1:0];
  assign li = lk_id[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       valid     <= '0;
    else if (fill_en) valid[fi] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (fill_en) begin
      data[fi] <= fill_data;
      tag[fi]  <= fill_id;
    end
    if (lk_en) lk_data <= data[li];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     lk_hit <= 1'b0;
    else if (lk_en) lk_hit <= valid[li] && (tag[li] == lk_id);
  end
endmodule
