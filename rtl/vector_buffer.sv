// vector_buffer: one on-chip vector buffer of the dataflow architecture
// (BufferA, B, C, D, E and BufferBias are instances of it).
//
// A word-addressed array of Q8.8 values with NWR write ports and NRD read
// ports. Reads are synchronous: the data of `rd_addr[i]` appears on
// `rd_data[i]` one cycle later, as in FPGA block RAM. If two write ports hit
// the same address in one cycle the higher-numbered port wins; the
// instruction schedule is expected to avoid that. The paper names the
// buffers and their connections; port counts, depth and read latency are
// this design's choice.
module vector_buffer
  import csb_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << VBUF_AW,
  parameter int unsigned NRD   = 1,
  parameter int unsigned NWR   = 1,
  localparam int unsigned AW   = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          we      [NWR],
  input  logic [AW-1:0] wr_addr [NWR],
  input  data_t         wr_data [NWR],
  input  logic [AW-1:0] rd_addr [NRD],
  output data_t         rd_data [NRD]
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int w = 0; w < NWR; w++)
      if (we[w]) mem[wr_addr[w]] <= wr_data[w];
    for (int r = 0; r < NRD; r++)
      rd_data[r] <= mem[rd_addr[r]];
  end
endmodule
