// block_neuron_buffer: BlockNeuronBuffer of one PEGroup column.
//
// Holds the input neurons of the block column that the PEGroups of this
// column work on in the current block iteration (up to MAXBLK neurons).
// It is preloaded one neuron per cycle through `wr_*` before the iteration
// starts. During the iteration it serves NPORT independent read ports of Q
// neurons each (combinational): one port per PEGroup of its own column, and
// one port per PEGroup of the column to its right, which reads here when it
// executes horizontally shared work (the paper's extra port for horizontal
// sharing). Each port gathers the Q neurons named by the ColIdx operand.
//
// Storage is a register array; the multi-port reads follow the paper, the
// register-array implementation is this design's choice.
module block_neuron_buffer
  import csb_pkg::*;
#(
  parameter int unsigned Q      = Q_DEF,
  parameter int unsigned MAXBLK = MAXBLK_DEF,
  parameter int unsigned NPORT  = 2 * K_DEF,
  localparam int unsigned IW    = $clog2(MAXBLK)
)(
  input  logic          clk,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_addr,
  input  data_t         wr_data,
  input  logic [IW-1:0] rd_idx  [NPORT][Q],
  output data_t         rd_data [NPORT][Q]
);
  data_t mem [MAXBLK];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  always_comb
    for (int i = 0; i < NPORT; i++)
      for (int q = 0; q < Q; q++)
        rd_data[i][q] = mem[rd_idx[i][q]];
endmodule
