// sa_tile: a TILE x TILE block of sa_pe cells, the granule by which the
// reconfigurable array is split into sub-arrays (the paper's Fig. 9 draws
// 32x32 units inside the 128x128 array). Row r takes its activation at
// a_in[r] on the left and passes it out at a_out[r] on the right; column c
// takes a partial sum at p_in[c] on top and delivers it at p_out[c] at the
// bottom, and shifts weights in from w_in[c] (top) to w_out[c] (bottom).
// Timing: a_in[r] reaches column c after c cycles; the sum entering at the
// top of column c leaves the bottom TILE cycles later.
module sa_tile
  import rp_pkg::*;
#(
  parameter int unsigned N = TILE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  data_t w_in  [N],
  output data_t w_out [N],
  input  data_t a_in  [N],
  output data_t a_out [N],
  input  acc_t  p_in  [N],
  output acc_t  p_out [N]
);
  // internal meshes: index [row][col]; *_h carries activations to the right,
  // *_v carries partial sums and weights downward
  data_t a_h [N][N+1];
  acc_t  p_v [N+1][N];
  data_t w_v [N+1][N];

  for (genvar r = 0; r < N; r++) begin : g_row
    assign a_h[r][0] = a_in[r];
    assign a_out[r]  = a_h[r][N];
  end
  for (genvar c = 0; c < N; c++) begin : g_col
    assign p_v[0][c] = p_in[c];
    assign w_v[0][c] = w_in[c];
    assign p_out[c]  = p_v[N][c];
    assign w_out[c]  = w_v[N][c];
  end

  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < N; c++) begin : g_c
      sa_pe u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .w_load(w_load),
        .w_in  (w_v[r][c]),
        .w_out (w_v[r+1][c]),
        .a_in  (a_h[r][c]),
        .a_out (a_h[r][c+1]),
        .p_in  (p_v[r][c]),
        .p_out (p_v[r+1][c])
      );
    end
  end
endmodule
