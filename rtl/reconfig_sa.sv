// reconfig_sa: the reconfigurable systolic array. NT x NT tiles of
// TILE x TILE weight-stationary cells (4 x 4 tiles of 32 x 32 = 128 x 128
// MACs by default) are fused into rectangular sub-arrays that run
// independently, so frontend and backend models of several queries can be
// processed at the same time. Fission follows the paper's intent of
// avoiding an omni-directional interconnect: the only reconfiguration
// hardware is one 2:1 multiplexer per tile edge.
//   join_left[t] = 1: tile t takes its row activations from the right edge
//                     of its left neighbour instead of from a_ext[t];
//   join_up[t]   = 1: tile t takes partial sums and the weight shift chain
//                     from the bottom of its upper neighbour instead of
//                     zero / w_ext[t].
// A tile inside a fused array (not on its top row nor its left column)
// sets both bits. Tiles are numbered t = row*NT + col. A sub-array is therefore the set of
// tiles reached from its top-left tile through joins; software must keep
// each sub-array rectangular. Outputs p_out[t] are the bottom partial sums
// of every tile; only the bottom tiles of a sub-array carry finished sums.
// w_load[t] enables the weight shift in tile t.
// Timing is that of one tall/wide systolic array: no register is added at
// tile boundaries.
module reconfig_sa
  import rp_pkg::*;
#(
  parameter int unsigned NT = TILES,
  parameter int unsigned N  = TILE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  join_left [NT*NT],
  input  logic  join_up   [NT*NT],
  input  logic  w_load    [NT*NT],
  input  data_t w_ext     [NT*NT][N],
  input  data_t a_ext     [NT*NT][N],
  output acc_t  p_out     [NT*NT][N]
);
  for (genvar i = 0; i < NT; i++) begin : g_i
    for (genvar j = 0; j < NT; j++) begin : g_j
      localparam int unsigned T = i*NT + j;
      // per-tile nets (kept per tile so the tools see no false loops)
      data_t a_in  [N];
      data_t a_out [N];
      acc_t  p_in  [N];
      acc_t  p_o   [N];
      data_t w_in  [N];
      data_t w_out [N];

      // fission multiplexers at the left and top edges of the tile
      if (j > 0) begin : g_left
        always_comb
          for (int k = 0; k < N; k++)
            a_in[k] = join_left[T] ? g_i[i].g_j[j-1].a_out[k] : a_ext[T][k];
      end else begin : g_edge_left
        assign a_in = a_ext[T];
      end
      if (i > 0) begin : g_up
        always_comb
          for (int k = 0; k < N; k++) begin
            p_in[k] = join_up[T] ? g_i[i-1].g_j[j].p_o[k]   : '0;
            w_in[k] = join_up[T] ? g_i[i-1].g_j[j].w_out[k] : w_ext[T][k];
          end
      end else begin : g_edge_up
        always_comb
          for (int k = 0; k < N; k++) begin
            p_in[k] = '0;
            w_in[k] = w_ext[T][k];
          end
      end

      sa_tile #(.N(N)) u_tile (
        .clk   (clk),
        .rst_n (rst_n),
        .w_load(w_load[T]),
        .w_in  (w_in),
        .w_out (w_out),
        .a_in  (a_in),
        .a_out (a_out),
        .p_in  (p_in),
        .p_out (p_o)
      );
      assign p_out[T] = p_o;
    end
  end
endmodule
