// tb_rpaccel_full: the same end-to-end flow as tb_rpaccel, run on rpaccel
// at its full default size (4x4 tiles of 32x32 PEs = 128x128 MACs, 8 MB of
// engine SRAM, 12 MB static and 4 MB look-ahead embedding caches). The
// parameters below only describe the DUT to the host program.
module tb_rpaccel_full;
  import rp_pkg::*;
  localparam int NT = 4;
  localparam int N  = 32;
  localparam int SB = 16;

  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;   // 250 MHz

  logic     join_left [NT*NT], join_up [NT*NT];
  logic     eng_cmd_valid [NT*NT], eng_cmd_ready [NT*NT], eng_busy [NT*NT];
  eng_cmd_t eng_cmd [NT*NT];
  logic                 w_wr_en;
  logic [ENG_IDX_W-1:0] w_wr_eng;
  logic [ENG_WAW-1:0]   w_wr_addr;
  line_t                w_wr_data;
  logic                 h_act_wr_en, h_act_wr_ready;
  logic [ENG_IDX_W-1:0] h_act_wr_eng;
  logic [ENG_AW-1:0]    h_act_wr_addr;
  line_t                h_act_wr_data;
  logic                 h_act_rd_en;
  logic [ENG_IDX_W-1:0] h_act_rd_eng;
  logic [ENG_AW-1:0]    h_act_rd_addr;
  line_t                h_act_rd_data;
  logic     emb_req_valid, emb_req_ready;
  emb_req_t emb_req;
  logic     fill_en;
  stage_e   fill_stage;
  emb_id_t  fill_id;
  line_t    fill_data;
  logic     dram_req_valid, dram_req_ready, dram_rsp_valid;
  emb_id_t  dram_req_addr;
  line_t    dram_rsp_data;
  int       n_reads;
  logic            tk_clear [NT*NT], tk_drain [NT*NT], tk_busy [NT*NT], tk_done [NT*NT];
  logic [ITEM_W:0] tk_k [NT*NT];
  logic                 topn_valid, topn_ready;
  logic [ENG_IDX_W-1:0] topn_eng;
  item_t                topn_item;
  logic                 fwd_en [NT*NT];
  logic [ENG_IDX_W-1:0] fwd_dst_eng;
  emb_id_t              fwd_emb_base;
  logic                 fwd_prefetch, fwd_clear;
  logic [31:0] n_static_hit, n_la_hit, n_miss, n_prefetch;

  rpaccel u_dut (.*);

  dram_model #(.LAT(100)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_addr(dram_req_addr), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .n_reads(n_reads)
  );

`include "rpaccel_flow.svh"

  initial run_flow();

  initial begin
    #(20000000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
