// sa_pe: one weight-stationary multiply-accumulate cell of the systolic
// array. The weight sits in a register; activations move one cell to the
// right and partial sums one cell down every cycle:
//   a_out <= a_in;  p_out <= p_in + w * a_in.
// Weights are loaded by shifting them down a column while w_load is high
// (w <= w_in, and w_out shows the held weight to the cell below).
// The paper states only that the array is weight stationary; operand
// widths and the load-by-shifting scheme are this design's choices.
// Timing: one register stage on a_out and p_out; w_out is the weight register.
module sa_pe
  import rp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  data_t w_in,
  output data_t w_out,
  input  data_t a_in,
  output data_t a_out,
  input  acc_t  p_in,
  output acc_t  p_out
);
  data_t w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q   <= '0;
      a_out <= '0;
      p_out <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      a_out <= a_in;
      p_out <= p_in + acc_t'(w_q * a_in);
    end
  end

  assign w_out = w_q;
endmodule
