// csb_pegroup: one PEGroup of the CSB-Engine.
//
// A PEGroup holds a P x Q array of PEs, its CSB WeightBuffer, its
// NeuronAccumBuffer, one adder tree per PE row and the control logic that
// walks through its micro-instructions. For every block iteration it executes
// exactly three micro-instruction items, in the order local, horizontal,
// vertical; an item with an empty TripCount is skipped. An item covers a
// dense kernel sub-matrix of tn rows x tm columns and takes
// ceil(tn/P) x ceil(tm/Q) passes of the PE array, one pass per cycle
// (row passes outer, column passes inner). In each pass:
//   * the ColIdx entry names the Q input neurons; PE column q gets neuron
//     ColIdx[q], read from the BlockNeuronBuffer of this column (local and
//     vertical items) or of the column to the left (horizontal items);
//   * PE (p,q) multiplies the weight of tile lane (p,q) by that neuron;
//   * the Q products of each PE row are summed and accumulated at row
//     RowIdx[p] of this PEGroup's NeuronAccumBuffer (local, horizontal), or
//     sent over the vertical sharing path into the NeuronAccumBuffer of the
//     PEGroup above (vertical items).
// Pointers into the weight, RowIdx, ColIdx and item memories advance
// sequentially and restart at zero on `start_mvm` (the engine raises it for
// commands that rewind).
//
// Handshake (design choice): `iter_start` (one-cycle pulse, only while
// `busy` is low) starts one block iteration; `busy` stays high until the
// last product has been accumulated.
// Timing: one header cycle per item, one cycle per pass, and a three-cycle
// pipeline (memory read, multiply, accumulate) drained at the end.
// Lint note: rst_n also appears in the `disable iff` of the handshake
// assertion, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself uses rst_n only as an asynchronous reset.
module csb_pegroup
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
  input  logic           clk,
  input  logic           rst_n,
  // configuration
  input  logic           cfg_we,
  input  cfg_target_e    cfg_target,
  input  logic [31:0]    cfg_addr,
  input  logic [TW-1:0]  cfg_wdata,
  // control
  input  logic           start_mvm,
  input  logic           iter_start,
  input  logic           acc_clear,
  output logic           busy,
  // input neurons
  output logic           nrn_left,
  output logic [IW-1:0]  nrn_idx  [Q],
  input  data_t          nrn_data [Q],
  // vertical sharing: results to the PEGroup above / from the PEGroup below
  output logic [P-1:0]   vout_valid,
  output logic [IW-1:0]  vout_addr [P],
  output acc_t           vout_data [P],
  input  logic [P-1:0]   vin_valid,
  input  logic [IW-1:0]  vin_addr  [P],
  input  acc_t           vin_data  [P],
  // NeuronAccumBuffer read-out for the horizontal adders
  input  logic [IW-1:0]  acc_rd_addr,
  output acc_t           acc_rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [WAW-1:0] wptr;
  logic [UAW-1:0] uptr;
  logic [XAW-1:0] rbase, cbase;
  logic [1:0]     item_cnt;
  logic [6:0]     rp, cp, nrp, ncp;
  uitem_t         cur;
  uitem_t         hdr;

  logic [TW-1:0]   w_tile;
  logic [P*IW-1:0] r_idx;
  logic [Q*IW-1:0] c_idx;

  csb_weight_buffer #(.P(P), .Q(Q), .MAXBLK(MAXBLK), .WDEPTH(WDEPTH),
                      .UDEPTH(UDEPTH), .XDEPTH(XDEPTH)) u_wbuf (
    .clk, .cfg_we, .cfg_target, .cfg_addr, .cfg_wdata,
    .w_addr(wptr), .w_tile,
    .r_addr(rbase + XAW'(rp)), .r_idx,
    .c_addr(cbase + XAW'(cp)), .c_idx,
    .u_addr(uptr), .u_item(hdr)
  );

  // ---------------- pass sequencer ----------------
  logic issue;                  // a pass is issued this cycle
  assign issue = (state == S_RUN);

  logic last_cp, last_rp;
  assign last_cp = (cp == ncp - 7'd1);
  assign last_rp = (rp == nrp - 7'd1);

  // pipeline stage 1 (memory data valid) and stage 2 (products valid)
  logic           s1_valid, s2_valid;
  sharing_e       s1_sh, s2_sh;
  logic [P-1:0]   s1_rmask, s2_rmask;
  logic [Q-1:0]   s1_cmask;
  logic [P*IW-1:0] s2_ridx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; wptr <= '0; uptr <= '0; rbase <= '0; cbase <= '0;
      item_cnt <= '0; rp <= '0; cp <= '0; nrp <= '0; ncp <= '0; cur <= '0;
    end else begin
      if (start_mvm) begin
        wptr <= '0; uptr <= '0; rbase <= '0; cbase <= '0;
      end
      unique case (state)
        S_IDLE: if (iter_start) begin
          state <= S_HDR; item_cnt <= '0;
        end
        S_HDR: begin
          cur <= hdr;
          nrp <= (hdr.tn + 7'(P) - 7'd1) / 7'(P);
          ncp <= (hdr.tm + 7'(Q) - 7'd1) / 7'(Q);
          rp  <= '0; cp <= '0;
          if (hdr.tn == '0 || hdr.tm == '0) begin
            uptr <= uptr + 1'b1;
            item_cnt <= item_cnt + 2'd1;
            if (item_cnt == 2'd2) state <= S_DRAIN;
          end else begin
            state <= S_RUN;
          end
        end
        S_RUN: begin
          wptr <= wptr + 1'b1;
          if (!last_cp) cp <= cp + 7'd1;
          else begin
            cp <= '0;
            if (!last_rp) rp <= rp + 7'd1;
            else begin
              rbase    <= rbase + XAW'(nrp);
              cbase    <= cbase + XAW'(ncp);
              rp       <= '0;
              uptr     <= uptr + 1'b1;
              item_cnt <= item_cnt + 2'd1;
              state    <= (item_cnt == 2'd2) ? S_DRAIN : S_HDR;
            end
          end
        end
        S_DRAIN: if (!s1_valid && !s2_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // lane masks of the pass being issued
  logic [P-1:0] rmask_now;
  logic [Q-1:0] cmask_now;
  always_comb begin
    for (int p = 0; p < P; p++)
      rmask_now[p] = (32'(rp) * P + p) < 32'(cur.tn);
    for (int q = 0; q < Q; q++)
      cmask_now[q] = (32'(cp) * Q + q) < 32'(cur.tm);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_sh <= SH_LOCAL; s1_rmask <= '0; s1_cmask <= '0;
    end else begin
      s1_valid <= issue;
      s1_sh    <= cur.sharing;
      s1_rmask <= rmask_now;
      s1_cmask <= cmask_now;
    end
  end

  // ---------------- neuron gather and PE array ----------------
  assign nrn_left = s1_valid && (s1_sh == SH_HORIZ);
  always_comb
    for (int q = 0; q < Q; q++)
      nrn_idx[q] = c_idx[q*IW +: IW];

  acc_t prod [P][Q];
  for (genvar p = 0; p < P; p++) begin : g_row
    for (genvar q = 0; q < Q; q++) begin : g_col
      csb_pe u_pe (
        .clk, .rst_n,
        .en     (s1_valid && s1_cmask[q]),
        .weight (data_t'(w_tile[(p*Q+q)*DW +: DW])),
        .neuron (nrn_data[q]),
        .prod   (prod[p][q])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0; s2_sh <= SH_LOCAL; s2_rmask <= '0; s2_ridx <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_sh    <= s1_sh;
      s2_rmask <= s1_rmask;
      s2_ridx  <= r_idx;
    end
  end

  // ---------------- row adders and accumulation ----------------
  acc_t          rowsum   [P];
  logic [P-1:0]  loc_valid;
  logic [IW-1:0] row_addr [P];
  always_comb begin
    for (int p = 0; p < P; p++) begin
      rowsum[p] = '0;
      for (int q = 0; q < Q; q++) rowsum[p] = rowsum[p] + prod[p][q];
      row_addr[p]   = s2_ridx[p*IW +: IW];
      loc_valid[p]  = s2_valid && s2_rmask[p] && (s2_sh != SH_VERT);
      vout_valid[p] = s2_valid && s2_rmask[p] && (s2_sh == SH_VERT);
      vout_addr[p]  = row_addr[p];
      vout_data[p]  = rowsum[p];
    end
  end

  neuron_accum_buffer #(.P(P), .MAXBLK(MAXBLK)) u_acc (
    .clk, .rst_n, .clear(acc_clear),
    .loc_valid, .loc_addr(row_addr), .loc_data(rowsum),
    .vin_valid, .vin_addr, .vin_data,
    .rd_addr(acc_rd_addr), .rd_data(acc_rd_data)
  );

  // iter_start is only legal while the PEGroup is idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 iter_start |-> state == S_IDLE);
endmodule
