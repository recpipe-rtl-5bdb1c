// ctr_sigmoid: turns the final-layer sum of one item into a click-through
// rate in [0,1), coded as unsigned Q0.8 (255 ~ 0.996). The logit is the
// 32-bit sum shifted right by 'shift' and read as a Q8 fixed-point number.
// The sigmoid is the classic four-segment piecewise-linear approximation
// (slopes 1/4, 1/8, 1/32, 0 with breakpoints 1, 2.375 and 5), mirrored for
// negative logits. The paper only says the last layer produces a CTR score
// between 0 and 1; the approximation and code width are this design's.
// Purely combinational.
module ctr_sigmoid
  import rp_pkg::*;
(
  input  acc_t       sum,
  input  logic [4:0] shift,
  output ctr_t       ctr
);
  acc_t        x;      // logit, Q8
  logic [31:0] ax;     // |x|
  logic [31:0] y;      // sigmoid(|x|), Q8, 128..256

  always_comb begin
    x  = sum >>> shift;
    ax = x[ACC_W-1] ? 32'(-x) : 32'(x);
    if      (ax >= 32'd1280) y = 32'd256;
    else if (ax >= 32'd608)  y = (ax >> 5) + 32'd216;
    else if (ax >= 32'd256)  y = (ax >> 3) + 32'd160;
    else                     y = (ax >> 2) + 32'd128;
    if (x[ACC_W-1]) y = 32'd256 - y;
    ctr = (y > 32'd255) ? ctr_t'(255) : ctr_t'(y);
  end
endmodule
