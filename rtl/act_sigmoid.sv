// act_sigmoid: the Sigmoid unit (delta in the dataflow architecture).
//
// Combinational piecewise-linear sigmoid on Q8.8 numbers, using the PLAN
// approximation (segments with slopes 1/4, 1/8 and 1/32, all shifts):
//     |x| >= 5         : y = 1
//     2.375 <= |x| < 5 : y = |x|/32 + 0.84375
//     1 <= |x| < 2.375 : y = |x|/8  + 0.625
//     0 <= |x| < 1     : y = |x|/4  + 0.5
//     x < 0            : y = 1 - y(|x|)
// The paper only says that the unit computes the sigmoid; the approximation
// is this design's choice. The maximum error against the exact sigmoid is
// about 0.02.
module act_sigmoid
  import csb_pkg::*;
(
  input  data_t x,
  output data_t y
);
  localparam data_t ONE = data_t'(1 << FRAC);
  logic [DW:0] ax;   // |x|, one bit wider so that |-32768| fits
  data_t       yp;

  always_comb begin
    ax = x[DW-1] ? (DW+1)'(-$signed({x[DW-1], x})) : (DW+1)'(x);
    if (ax >= (DW+1)'(5 << FRAC))
      yp = ONE;
    else if (ax >= (DW+1)'(608))          // 2.375 in Q8.8
      yp = data_t'((ax >> 5) + (DW+1)'(216));   // 0.84375
    else if (ax >= (DW+1)'(1 << FRAC))
      yp = data_t'((ax >> 3) + (DW+1)'(160));   // 0.625
    else
      yp = data_t'((ax >> 2) + (DW+1)'(128));   // 0.5
    y = x[DW-1] ? ONE - yp : yp;
  end
endmodule
