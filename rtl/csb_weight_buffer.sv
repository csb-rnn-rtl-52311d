// csb_weight_buffer: CSB WeightBuffer of one PEGroup.
//
// Stores the CSB-formatted workload of this PEGroup as four memories:
//   * weight tiles: the kernel-matrix values (the paper's Val array), packed by
//     the compiler into tiles of P x Q values, one tile per PE-array pass, in
//     execution order, lanes outside the kernel padded with zero;
//   * item headers: the micro-instruction items (sharing flag and TripCount
//     tn x tm), three per block iteration (local, horizontal, vertical);
//   * RowIdx entries: P row indices per entry, one entry per row pass;
//   * ColIdx entries: Q column indices per entry, one entry per column pass.
// RowIdx and ColIdx sit in memories of their own and are re-read for every
// pass, as the paper describes. The tile packing is this design's choice.
//
// Writes come from the configuration bus (one word per cycle). Tile, RowIdx
// and ColIdx reads are synchronous (data one cycle after the address, as in
// block RAM); the small item memory is read combinationally.
module csb_weight_buffer
  import csb_pkg::*;
#(
  parameter int unsigned P      = P_DEF,
  parameter int unsigned Q      = Q_DEF,
  parameter int unsigned MAXBLK = MAXBLK_DEF,
  parameter int unsigned WDEPTH = WDEPTH_DEF,
  parameter int unsigned UDEPTH = UDEPTH_DEF,
  parameter int unsigned XDEPTH = XDEPTH_DEF,
  localparam int unsigned IW    = $clog2(MAXBLK),
  localparam int unsigned TW    = P*Q*DW,
  localparam int unsigned WAW   = $clog2(WDEPTH),
  localparam int unsigned UAW   = $clog2(UDEPTH),
  localparam int unsigned XAW   = $clog2(XDEPTH)
)(
  input  logic                   clk,
  // configuration write
  input  logic                   cfg_we,
  input  cfg_target_e            cfg_target,
  input  logic [31:0]            cfg_addr,
  input  logic [TW-1:0]          cfg_wdata,
  // pass reads (synchronous)
  input  logic [WAW-1:0]         w_addr,
  output logic [TW-1:0]          w_tile,
  input  logic [XAW-1:0]         r_addr,
  output logic [P*IW-1:0]        r_idx,
  input  logic [XAW-1:0]         c_addr,
  output logic [Q*IW-1:0]        c_idx,
  // item header read (combinational)
  input  logic [UAW-1:0]         u_addr,
  output uitem_t                 u_item
);
  logic [TW-1:0]   wmem [WDEPTH];
  uitem_t          umem [UDEPTH];
  logic [P*IW-1:0] rmem [XDEPTH];
  logic [Q*IW-1:0] cmem [XDEPTH];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_target)
        CFG_WEIGHT: wmem[cfg_addr[WAW-1:0]] <= cfg_wdata;
        CFG_UITEM:  umem[cfg_addr[UAW-1:0]] <= uitem_t'(cfg_wdata[$bits(uitem_t)-1:0]);
        CFG_ROWIDX: rmem[cfg_addr[XAW-1:0]] <= cfg_wdata[P*IW-1:0];
        CFG_COLIDX: cmem[cfg_addr[XAW-1:0]] <= cfg_wdata[Q*IW-1:0];
        default: ;
      endcase
    end
    w_tile <= wmem[w_addr];
    r_idx  <= rmem[r_addr];
    c_idx  <= cmem[c_addr];
  end

  assign u_item = umem[u_addr];
endmodule
