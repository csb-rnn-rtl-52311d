// neuron_accum_buffer: NeuronAccumBuffer of one PEGroup.
//
// Holds one partial sum per row of the block (up to MAXBLK rows, Q16.16).
// Every cycle it can take P row sums from its own PE array (`loc_*`) and P
// row sums that a PEGroup below sends over the vertical workload-sharing
// path (`vin_*`). All contributions that target the same row are added
// together with the stored value and written back in the same cycle, so two
// PEGroups accumulating into one row never create a read-after-write hazard;
// the paper places an adder on the vertical accumulation path for exactly
// this purpose. Here that adder is one adder per row entry.
//
// `clear` zeroes every entry (start of a block-row). The read port `rd_addr`
// -> `rd_data` is combinational and feeds the horizontal adders that sum the
// PEGroups of one row. Reset also zeroes the entries (design choice).
module neuron_accum_buffer
  import csb_pkg::*;
#(
  parameter int unsigned P      = P_DEF,
  parameter int unsigned MAXBLK = MAXBLK_DEF,
  localparam int unsigned IW    = $clog2(MAXBLK)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [P-1:0]  loc_valid,
  input  logic [IW-1:0] loc_addr [P],
  input  acc_t          loc_data [P],
  input  logic [P-1:0]  vin_valid,
  input  logic [IW-1:0] vin_addr [P],
  input  acc_t          vin_data [P],
  input  logic [IW-1:0] rd_addr,
  output acc_t          rd_data
);
  acc_t mem [MAXBLK];
  acc_t nxt [MAXBLK];

  always_comb
    for (int r = 0; r < MAXBLK; r++) begin
      nxt[r] = mem[r];
      for (int p = 0; p < P; p++) begin
        if (loc_valid[p] && loc_addr[p] == IW'(r)) nxt[r] = nxt[r] + loc_data[p];
        if (vin_valid[p] && vin_addr[p] == IW'(r)) nxt[r] = nxt[r] + vin_data[p];
      end
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     for (int r = 0; r < MAXBLK; r++) mem[r] <= '0;
    else if (clear) for (int r = 0; r < MAXBLK; r++) mem[r] <= '0;
    else            mem <= nxt;
  end

  assign rd_data = mem[rd_addr];
endmodule
