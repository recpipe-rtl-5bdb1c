// emb_gather: the embedding gather unit with its two caches. A lookup
// request names an embedding line (id), the stage it belongs to, and where
// the vector must go (engine and word of that engine's activation bank).
// As in the paper, the unit first checks the caches: on a hit the vector
// is sent on to the dense-input memory; on a miss it is read from DRAM
// into the look-ahead cache and then sent on. A request marked 'prefetch'
// only makes sure the vector is in the look-ahead cache; this is how
// backend vectors for filtered candidates are fetched while the frontend
// still runs. The static cache is filled by the host (fill port).
// Requests come from the host for frontend models or from the top-k
// filters for backend models; the multiplexer between the two sits in the
// top level.
// Timing (this design's choice): one request at a time. A hit takes 2
// cycles from acceptance to out_valid, a miss 2 cycles plus the DRAM
// round trip. DRAM port: a request (valid/ready) carrying the line address,
// and a response that returns the 128-byte line some cycles later
// (dram_rsp_valid, always accepted). Counters report hits and misses.
module emb_gather
  import rp_pkg::*;
#(
  parameter int unsigned STATIC_LINES = 98304,
  parameter int unsigned FE_LINES     = STATIC_LINES / 2,
  parameter int unsigned LA_LINES     = 32768
) (
  input  logic     clk,
  input  logic     rst_n,
  // lookups
  input  logic     req_valid,
  output logic     req_ready,
  input  emb_req_t req,
  // static cache preload from the host
  input  logic     fill_en,
  input  stage_e   fill_stage,
  input  emb_id_t  fill_id,
  input  line_t    fill_data,
  // DRAM
  output logic     dram_req_valid,
  input  logic     dram_req_ready,
  output emb_id_t  dram_req_addr,
  input  logic     dram_rsp_valid,
  input  line_t    dram_rsp_data,
  // gathered vector towards the dense-input (activation) memory
  output logic                 out_valid,
  output logic [ENG_IDX_W-1:0] out_eng,
  output logic [ENG_AW-1:0]    out_addr,
  output line_t                out_data,
  // statistics
  output logic [31:0] n_static_hit,
  output logic [31:0] n_la_hit,
  output logic [31:0] n_miss,
  output logic [31:0] n_prefetch
);
  typedef enum logic [1:0] {G_IDLE, G_CHECK, G_DREQ, G_DWAIT} gstate_e;
  gstate_e  state;
  emb_req_t r_q;

  logic  s_hit, l_hit;
  line_t s_data, l_data;
  logic  accept;

  assign req_ready = (state == G_IDLE);
  assign accept    = req_valid && req_ready;

  static_emb_cache #(.LINES(STATIC_LINES), .FE_LINES(FE_LINES)) u_static (
    .clk(clk), .rst_n(rst_n),
    .fill_en(fill_en), .fill_stage(fill_stage), .fill_id(fill_id), .fill_data(fill_data),
    .lk_en(accept), .lk_stage(req.stage), .lk_id(req.id),
    .lk_hit(s_hit), .lk_data(s_data)
  );

  lookahead_emb_cache #(.LINES(LA_LINES)) u_la (
    .clk(clk), .rst_n(rst_n),
    .fill_en(state == G_DWAIT && dram_rsp_valid), .fill_id(r_q.id), .fill_data(dram_rsp_data),
    .lk_en(accept), .lk_id(req.id),
    .lk_hit(l_hit), .lk_data(l_data)
  );

  assign dram_req_valid = (state == G_DREQ);
  assign dram_req_addr  = r_q.id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= G_IDLE;
      r_q          <= '0;
      out_valid    <= 1'b0;
      out_eng      <= '0;
      out_addr     <= '0;
      out_data     <= '0;
      n_static_hit <= '0;
      n_la_hit     <= '0;
      n_miss       <= '0;
      n_prefetch   <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        G_IDLE: if (accept) begin
          r_q   <= req;
          state <= G_CHECK;
          if (req.prefetch) n_prefetch <= n_prefetch + 1;
        end
        G_CHECK: begin
          out_eng  <= r_q.dst_eng;
          out_addr <= r_q.dst_addr;
          if (s_hit) begin
            n_static_hit <= n_static_hit + 1;
            out_valid    <= !r_q.prefetch;
            out_data     <= s_data;
            state        <= G_IDLE;
          end else if (l_hit) begin
            n_la_hit  <= n_la_hit + 1;
            out_valid <= !r_q.prefetch;
            out_data  <= l_data;
            state     <= G_IDLE;
          end else begin
            n_miss <= n_miss + 1;
            state  <= G_DREQ;
          end
        end
        G_DREQ: if (dram_req_ready) state <= G_DWAIT;
        G_DWAIT: if (dram_rsp_valid) begin
          out_valid <= !r_q.prefetch;
          out_data  <= dram_rsp_data;
          state     <= G_IDLE;
        end
        default: state <= G_IDLE;
      endcase
    end
  end
endmodule
