// rpaccel: top level of the multi-stage recommendation accelerator.
//
// A query is ranked by a pipeline of models: a light frontend model scores
// every candidate item, a top-k filter keeps the best ones and a heavy
// backend model ranks only those. This chip runs that whole pipeline
// on-chip:
//  * reconfig_sa   - a 128x128 weight-stationary MAC array made of 4x4
//                    tiles of 32x32 that the host fuses into independent
//                    rectangular sub-arrays (join_left / join_up per tile),
//                    e.g. eight 32x32 frontend arrays and two 64x64 backend
//                    arrays;
//  * mlp_engine[e] - one per tile; engine e drives the sub-array whose
//                    top-left tile is tile e and owns that sub-array's
//                    weight bank and lane-banked activation bank (16 x 512 KB
//                    = 8 MB of array SRAM). Engines of tiles that are not a
//                    sub-array's top-left tile stay idle;
//  * topk_filter[e]- one per engine, fed one CTR per cycle by the engine's
//                    final layer, bucketing ids so the best >= k can be
//                    drained without sorting;
//  * emb_gather    - embedding gather unit with the static hot-embedding
//                    cache (12 MB, split frontend/backend) and the
//                    look-ahead cache (4 MB), reading misses from DRAM.
// Data paths: host lookups and filtered candidates are multiplexed into
// the gather unit (filtered candidates first); gathered vectors are written
// into the activation bank of the engine named in the request. Drained
// top-k ids of all engines leave through one arbitrated stream (lowest
// engine index first) to the host; if fwd_en[e] is set, ids drained from
// engine e are also turned into backend embedding lookups (line id =
// fwd_emb_base + item id) deposited in engine fwd_dst_eng at consecutive
// words starting at 0 after fwd_clear. Queries are split into sub-batches by
// the host: it runs the frontend layers on sub-batch s+1 while the backend
// engine works on the survivors of sub-batch s.
// The block structure follows the paper's Fig. 9; the command interface,
// the forwarding rule and all widths are this design's choices. The host
// link, the host itself and the DRAM are outside: their signals are ports.
module rpaccel
  import rp_pkg::*;
#(
  parameter int unsigned NT           = TILES,
  parameter int unsigned N            = TILE,
  parameter int unsigned WDEPTH       = ENG_WDEPTH,
  parameter int unsigned ADEPTH       = ENG_ADEPTH,
  parameter int unsigned ACC_DEPTH    = ENG_ACC_DEPTH,
  parameter int unsigned TOPK_ITEMS   = 4096,
  parameter int unsigned STATIC_LINES = 98304,
  parameter int unsigned LA_LINES     = 32768
) (
  input  logic clk,
  input  logic rst_n,
  // array fission configuration, one bit per tile and edge
  input  logic join_left [NT*NT],
  input  logic join_up   [NT*NT],
  // engine commands
  input  logic     eng_cmd_valid [NT*NT],
  output logic     eng_cmd_ready [NT*NT],
  input  eng_cmd_t eng_cmd       [NT*NT],
  output logic     eng_busy      [NT*NT],
  // weight bank writes
  input  logic                 w_wr_en,
  input  logic [ENG_IDX_W-1:0] w_wr_eng,
  input  logic [ENG_WAW-1:0]   w_wr_addr,
  input  line_t                w_wr_data,
  // activation bank writes / reads from the host
  input  logic                 h_act_wr_en,
  output logic                 h_act_wr_ready,
  input  logic [ENG_IDX_W-1:0] h_act_wr_eng,
  input  logic [ENG_AW-1:0]    h_act_wr_addr,
  input  line_t                h_act_wr_data,
  input  logic                 h_act_rd_en,
  input  logic [ENG_IDX_W-1:0] h_act_rd_eng,
  input  logic [ENG_AW-1:0]    h_act_rd_addr,
  output line_t                h_act_rd_data,
  // embedding lookups from the host (frontend inputs)
  input  logic     emb_req_valid,
  output logic     emb_req_ready,
  input  emb_req_t emb_req,
  // static cache preload
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
  // top-k filters
  input  logic            tk_clear [NT*NT],
  input  logic [ITEM_W:0] tk_k     [NT*NT],
  input  logic            tk_drain [NT*NT],
  output logic            tk_busy  [NT*NT],
  output logic            tk_done  [NT*NT],
  // filtered ids to the host
  output logic                 topn_valid,
  input  logic                 topn_ready,
  output logic [ENG_IDX_W-1:0] topn_eng,
  output item_t                topn_item,
  // forwarding of filtered ids to the backend
  input  logic                 fwd_en [NT*NT],
  input  logic [ENG_IDX_W-1:0] fwd_dst_eng,
  input  emb_id_t              fwd_emb_base,
  input  logic                 fwd_prefetch,
  input  logic                 fwd_clear,
  // statistics
  output logic [31:0] n_static_hit,
  output logic [31:0] n_la_hit,
  output logic [31:0] n_miss,
  output logic [31:0] n_prefetch
);
  localparam int unsigned NE = NT*NT;
  localparam int unsigned L  = NT*N;          // lanes (array rows / cols)
  localparam int unsigned LW = $clog2(L);

  // ------------------------------------------------ sub-array ownership
  logic [ENG_IDX_W-1:0] owner  [NE];
  logic                 bottom [NE];
  always_comb begin
    for (int t = 0; t < NE; t++) begin
      owner[t] = ENG_IDX_W'(t);
      if ((t % NT) != 0 && join_left[t])   owner[t] = owner[t-1];
      else if (t >= NT && join_up[t])      owner[t] = owner[t-NT];
    end
    for (int t = 0; t < NE; t++)
      bottom[t] = (t + NT >= NE) || (owner[t+NT] != owner[t]) || !join_up[t+NT];
  end

  // ------------------------------------------------------------- engines
  logic  e_wload [NE];
  data_t e_wrow  [NE][L];
  data_t e_arow  [NE][L];
  acc_t  e_prow  [NE][L];
  logic  [LW:0] e_rows [NE];
  logic  [LW:0] e_cols [NE];
  logic  e_ctr_v [NE];
  item_t e_ctr_i [NE];
  ctr_t  e_ctr_c [NE];
  line_t e_rd    [NE];

  // the array
  logic  sa_wload [NE];
  data_t sa_wext  [NE][N];
  data_t sa_aext  [NE][N];
  acc_t  sa_pout  [NE][N];

  reconfig_sa #(.NT(NT), .N(N)) u_sa (
    .clk(clk), .rst_n(rst_n),
    .join_left(join_left), .join_up(join_up),
    .w_load(sa_wload), .w_ext(sa_wext), .a_ext(sa_aext), .p_out(sa_pout)
  );

  // engine -> tiles: a tile takes weights, activations and the load strobe
  // of the engine that owns it, offset by its position in the sub-array
  always_comb begin
    for (int t = 0; t < NE; t++) begin
      automatic int e  = int'(owner[t]);
      automatic int di = (t / NT) - (e / NT);
      automatic int dj = (t % NT) - (e % NT);
      sa_wload[t] = e_wload[e];
      for (int k = 0; k < N; k++) begin
        sa_aext[t][k] = e_arow[e][(di*N + k) % L];
        sa_wext[t][k] = e_wrow[e][(dj*N + k) % L];
      end
    end
  end

  // GEN_ENG
  for (genvar e = 0; e < NE; e++) begin : g_eng
    localparam int I0 = e / NT;
    localparam int J0 = e % NT;

    // shape of the sub-array whose top-left tile is tile e
    always_comb begin
      automatic int h = 0;
      automatic int w = 0;
      automatic logic go;
      go = 1'b1;
      for (int i = I0; i < NT; i++)
        if (go && owner[i*NT + J0] == ENG_IDX_W'(e)) h++; else go = 1'b0;
      go = 1'b1;
      for (int j = J0; j < NT; j++)
        if (go && owner[I0*NT + j] == ENG_IDX_W'(e)) w++; else go = 1'b0;
      e_rows[e] = (LW+1)'(h * N);
      e_cols[e] = (LW+1)'(w * N);
    end

    // bottom partial sums of the sub-array, by column
    always_comb begin
      for (int c = 0; c < L; c++) e_prow[e][c] = '0;
      for (int j = J0; j < NT; j++)
        for (int i = I0; i < NT; i++)
          if (owner[i*NT + j] == ENG_IDX_W'(e) && bottom[i*NT + j])
            for (int k = 0; k < N; k++)
              e_prow[e][(j - J0)*N + k] = sa_pout[i*NT + j][k];
    end

    logic  a_wr;
    line_t a_wd;
    logic [ENG_AW-1:0] a_wa;

    mlp_engine #(.LANES(L), .WDEPTH(WDEPTH), .ADEPTH(ADEPTH), .ACC_DEPTH(ACC_DEPTH)) u_eng (
      .clk(clk), .rst_n(rst_n),
      .sa_rows(e_rows[e]), .sa_cols(e_cols[e]),
      .cmd_valid(eng_cmd_valid[e]), .cmd_ready(eng_cmd_ready[e]), .cmd(eng_cmd[e]),
      .busy(eng_busy[e]),
      .w_load(e_wload[e]), .w_row(e_wrow[e]), .a_row(e_arow[e]), .p_row(e_prow[e]),
      .ctr_valid(e_ctr_v[e]), .ctr_item(e_ctr_i[e]), .ctr_value(e_ctr_c[e]),
      .w_wr_en(w_wr_en && w_wr_eng == ENG_IDX_W'(e)), .w_wr_addr(w_wr_addr), .w_wr_data(w_wr_data),
      .a_wr_en(a_wr), .a_wr_addr(a_wa), .a_wr_data(a_wd),
      .a_rd_en(h_act_rd_en && h_act_rd_eng == ENG_IDX_W'(e)), .a_rd_addr(h_act_rd_addr),
      .a_rd_data(e_rd[e])
    );
  end

  // host read-back: select the bank read in the previous cycle
  logic [ENG_IDX_W-1:0] rd_eng_q;
  always_ff @(posedge clk) if (h_act_rd_en) rd_eng_q <= h_act_rd_eng;
  assign h_act_rd_data = e_rd[rd_eng_q];

  // ------------------------------------------------------ top-k filters
  logic  tk_ov [NE];
  logic  tk_or [NE];
  item_t tk_oi [NE];
  for (genvar e = 0; e < NE; e++) begin : g_tk
    logic [ITEM_W:0] cnt [NBINS];
    logic [ITEM_W:0] n_skip, n_drop;
    topk_filter #(.ITEMS(TOPK_ITEMS)) u_tk (
      .clk(clk), .rst_n(rst_n), .clear(tk_clear[e]),
      .in_valid(e_ctr_v[e]), .in_item(e_ctr_i[e]), .in_ctr(e_ctr_c[e]),
      .k(tk_k[e]), .drain_start(tk_drain[e]),
      .out_valid(tk_ov[e]), .out_ready(tk_or[e]), .out_item(tk_oi[e]),
      .busy(tk_busy[e]), .done(tk_done[e]),
      .bin_count(cnt), .n_skipped(n_skip), .n_dropped(n_drop)
    );
  end

  // -------------------------------- drain arbitration and forwarding
  logic                 any_v;
  logic [ENG_IDX_W-1:0] sel;
  logic                 g_ready;     // gather accepts a request
  logic                 fwd_go;      // a forwarded lookup is issued
  logic [ENG_AW-1:0]    fwd_ptr;

  always_comb begin
    any_v = 1'b0;
    sel   = '0;
    for (int e = NE-1; e >= 0; e--)
      if (tk_ov[e]) begin
        any_v = 1'b1;
        sel   = ENG_IDX_W'(e);
      end
    topn_valid = any_v && (!fwd_en[sel] || g_ready);
    topn_eng   = sel;
    topn_item  = tk_oi[sel];
    fwd_go     = topn_valid && topn_ready && fwd_en[sel];
    for (int e = 0; e < NE; e++)
      tk_or[e] = (ENG_IDX_W'(e) == sel) && topn_ready && (!fwd_en[e] || g_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         fwd_ptr <= '0;
    else if (fwd_clear) fwd_ptr <= '0;
    else if (fwd_go)    fwd_ptr <= fwd_ptr + 1'b1;
  end

  // request multiplexer in front of the gather unit
  logic     g_valid;
  emb_req_t g_req;
  always_comb begin
    g_valid = fwd_go || emb_req_valid;
    g_req   = emb_req;
    if (fwd_go) begin
      g_req.id       = fwd_emb_base + emb_id_t'(topn_item);
      g_req.stage    = STAGE_BE;
      g_req.prefetch = fwd_prefetch;
      g_req.dst_eng  = fwd_dst_eng;
      g_req.dst_addr = fwd_ptr;
    end
  end
  assign emb_req_ready = g_ready && !fwd_go;

  logic                 go_v;
  logic [ENG_IDX_W-1:0] go_eng;
  logic [ENG_AW-1:0]    go_addr;
  line_t                go_data;

  emb_gather #(.STATIC_LINES(STATIC_LINES), .LA_LINES(LA_LINES)) u_gather (
    .clk(clk), .rst_n(rst_n),
    .req_valid(g_valid), .req_ready(g_ready), .req(g_req),
    .fill_en(fill_en), .fill_stage(fill_stage), .fill_id(fill_id), .fill_data(fill_data),
    .dram_req_valid(dram_req_valid), .dram_req_ready(dram_req_ready), .dram_req_addr(dram_req_addr),
    .dram_rsp_valid(dram_rsp_valid), .dram_rsp_data(dram_rsp_data),
    .out_valid(go_v), .out_eng(go_eng), .out_addr(go_addr), .out_data(go_data),
    .n_static_hit(n_static_hit), .n_la_hit(n_la_hit), .n_miss(n_miss), .n_prefetch(n_prefetch)
  );

  // activation bank line-write port: gathered vectors first, then the host
  assign h_act_wr_ready = !go_v;
  for (genvar e = 0; e < NE; e++) begin : g_awr
    always_comb begin
      g_eng[e].a_wr = 1'b0;
      g_eng[e].a_wa = h_act_wr_addr;
      g_eng[e].a_wd = h_act_wr_data;
      if (go_v) begin
        g_eng[e].a_wr = (go_eng == ENG_IDX_W'(e));
        g_eng[e].a_wa = go_addr;
        g_eng[e].a_wd = go_data;
      end else if (h_act_wr_en) begin
        g_eng[e].a_wr = (h_act_wr_eng == ENG_IDX_W'(e));
      end
    end
  end
endmodule
