// csb_pe: one processing element of a PEGroup.
//
// A PE multiplies one kernel-matrix weight by one input neuron and registers
// the full-precision product (Q8.8 x Q8.8 = Q16.16, 32 bits). The paper maps
// this 16-bit fixed-point multiplier onto one DSP slice. A lane that is not
// part of the current pass (column beyond the kernel width) is masked by
// `en`: its product is forced to zero so that the row adder behind the PE
// row needs no mask of its own.
//
// Timing: one multiply per cycle, result one cycle after the operands.
// Reset clears the product register (reset style is this design's choice).
module csb_pe
  import csb_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,      // lane active in this pass
  input  data_t weight,  // kernel-matrix value from the WeightBuffer
  input  data_t neuron,  // input neuron broadcast down this PE column
  output acc_t  prod     // registered product
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  prod <= '0;
    else if (en) prod <= acc_t'(weight * neuron);
    else         prod <= '0;
  end
endmodule
