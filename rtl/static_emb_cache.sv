// static_emb_cache: the multi-stage "hot" embedding cache. Software decides
// which embedding vectors are hot and preloads them (fill port); the cache
// never replaces lines on its own. Its capacity (12 MB = 98,304 lines of
// 128 bytes by default) is split between the frontend and the backend
// model: FE_LINES lines for frontend vectors, the rest for backend vectors
// (an even split, the paper's choice for the Criteo filtering ratio of 1/8).
// Organisation (this design's choice): direct mapped inside each partition,
// line = id mod partition size, full id kept as tag, one valid bit per line.
// Lookup: lk_en with stage and id; lk_hit and lk_data are valid the next
// cycle. A fill and a lookup may happen in the same cycle.
module static_emb_cache
  import rp_pkg::*;
#(
  parameter int unsigned LINES    = 98304,
  parameter int unsigned FE_LINES = LINES / 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    fill_en,
  input  stage_e  fill_stage,
  input  emb_id_t fill_id,
  input  line_t   fill_data,
  input  logic    lk_en,
  input  stage_e  lk_stage,
  input  emb_id_t lk_id,
  output logic    lk_hit,
  output line_t   lk_data
);
  localparam int unsigned IW = $clog2(LINES);
  localparam int unsigned BE_LINES = LINES - FE_LINES;

  line_t         data [LINES];
  emb_id_t       tag  [LINES];
  logic [LINES-1:0] valid;

  function automatic logic [IW-1:0] index(stage_e s, emb_id_t id);
    if (s == STAGE_FE) return IW'(id % EMB_ID_W'(FE_LINES));
    else               return IW'(FE_LINES) + IW'(id % EMB_ID_W'(BE_LINES));
  endfunction

  logic [IW-1:0] fi, li;
  assign fi = index(fill_stage, fill_id);
  assign li = index(lk_stage, lk_id);

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
