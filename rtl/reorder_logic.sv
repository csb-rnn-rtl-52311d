// reorder_logic: ReorderLogic at the output of the CSB-Engine.
//
// After a block-row iteration, the horizontal adders deliver, for one row r
// of the blocks, K sums at once: one per PEGroup row k, each belonging to a
// different block-row of the weight matrix. This unit takes such a K-wide
// bundle (valid/ready handshake), converts each Q16.16 sum to Q8.8 with
// saturation, and writes the K values one per cycle to their place in the
// output neuron vector:
//     addr = base + (row_iter*K + k) * blk_n + r
// so the output stream comes out in plain vector order in BufferB.
// The paper names the unit and its purpose; the serialising implementation
// is this design's choice. Timing: K cycles per bundle, `in_ready` is high
// only while the unit is empty.
module reorder_logic
  import csb_pkg::*;
#(
  parameter int unsigned K = K_DEF
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  acc_t       in_sum [K],
  input  vaddr_t     in_base,      // output vector base address
  input  count_t     in_row_iter,  // vertical block iteration index
  input  logic [5:0] in_blk_n,     // rows per block
  input  logic [5:0] in_r,         // row inside the block
  output logic       out_we,
  output vaddr_t     out_addr,
  output data_t      out_data,
  output logic       idle
);
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  acc_t        hold [K];
  logic        active;
  logic [KW-1:0] kcnt;
  vaddr_t      base_row;   // base + row_iter*K*blk_n + r
  logic [5:0]  blk_n;

  assign in_ready = !active;
  assign idle     = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; kcnt <= '0; base_row <= '0; blk_n <= '0;
      for (int k = 0; k < K; k++) hold[k] <= '0;
    end else if (!active) begin
      if (in_valid) begin
        active   <= 1'b1;
        kcnt     <= '0;
        hold     <= in_sum;
        blk_n    <= in_blk_n;
        base_row <= in_base + vaddr_t'(32'(in_row_iter) * K * 32'(in_blk_n) + 32'(in_r));
      end
    end else begin
      kcnt <= kcnt + 1'b1;
      if (32'(kcnt) == K - 1) active <= 1'b0;
    end
  end

  assign out_we   = active;
  assign out_addr = base_row + vaddr_t'(32'(kcnt) * 32'(blk_n));
  assign out_data = acc_to_data(hold[kcnt]);
endmodule
