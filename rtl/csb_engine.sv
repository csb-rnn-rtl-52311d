// csb_engine: the CSB-Engine, which multiplies a CSB-pruned weight matrix by
// a neuron vector (CSB-MVM).
//
// Structure (two-level hierarchy, as in the paper): K x L PEGroups of P x Q
// PEs each, one BlockNeuronBuffer per PEGroup column, horizontal adders that
// sum the NeuronAccumBuffers of each PEGroup row, and the ReorderLogic.
// Workload-sharing paths form a torus in both dimensions:
//   * horizontal: PEGroup (k,l) may read input neurons from the
//     BlockNeuronBuffer of column l-1 (column 0 reads column L-1);
//   * vertical: PEGroup (k,l) may accumulate into the NeuronAccumBuffer of
//     PEGroup (k-1,l) (row 0 into row K-1).
//
// Operation for one command (CountV x CountH block iterations):
//   for each vertical block iteration i (K block-rows at a time):
//     clear all NeuronAccumBuffers
//     for each horizontal block iteration j (L block-columns at a time):
//       preload BlockNeuronBuffer l with neurons of block column j*L+l from
//       BufferA (blk_m cycles, L words per cycle), then let every PEGroup run
//       its three micro-instruction items; wait until all are done (barrier)
//     for each row r < blk_n: sum the K x L accumulators horizontally and
//       hand the K row sums to the ReorderLogic, which writes them to BufferB
// Block-row i*K+k of the matrix lands at BufferB[b_addr + (i*K+k)*blk_n + r].
//
// Interface: `start` with the command fields (one cycle, while `busy` is
// low); `done` pulses when the last output word is written. BufferA reads
// are synchronous (data one cycle after the address).
// Several matrices (layers, or the two products of a GRU step) can stay
// resident: their tiles and micro-instructions are stored one after the
// other, a command with `rewind` set restarts every PEGroup's pointers at
// zero and a command without it continues where the previous one stopped.
// Design choices: the preload is not overlapped with computation, the
// barrier after each block iteration is global, and the rewind bit.
// Lint note: rst_n also appears in the `disable iff` of the handshake
// assertion, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself uses rst_n only as an asynchronous reset.
module csb_engine
  import csb_pkg::*;
#(
  parameter int unsigned P      = P_DEF,
  parameter int unsigned Q      = Q_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned MAXBLK = MAXBLK_DEF,
  parameter int unsigned WDEPTH = WDEPTH_DEF,
  parameter int unsigned UDEPTH = UDEPTH_DEF,
  parameter int unsigned XDEPTH = XDEPTH_DEF,
  localparam int unsigned IW    = $clog2(MAXBLK),
  localparam int unsigned TW    = P*Q*DW
)(
  input  logic          clk,
  input  logic          rst_n,
  // configuration (weights and micro-instructions of PEGroup cfg_grp = k*L+l)
  input  logic          cfg_we,
  input  cfg_target_e   cfg_target,
  input  logic [7:0]    cfg_grp,
  input  logic [31:0]   cfg_addr,
  input  logic [TW-1:0] cfg_wdata,
  // command
  input  logic          start,
  input  sec_csb_t      cmd,
  output logic          busy,
  output logic          done,
  // BufferA read ports (one per PEGroup column)
  output vaddr_t        a_rd_addr [L],
  input  data_t         a_rd_data [L],
  // BufferB write port
  output logic          b_we,
  output vaddr_t        b_wr_addr,
  output data_t         b_wr_data
);
  typedef enum logic [2:0] {E_IDLE, E_CLR, E_LOAD, E_GO, E_WAIT, E_OUT, E_FLUSH} estate_e;
  estate_e state;

  sec_csb_t   c;
  count_t     i_cnt, j_cnt;
  logic [6:0] ld_c;       // preload counter
  logic [5:0] r_cnt;      // output row counter

  // ---------------- PEGroup array ----------------
  logic          g_busy     [K][L];
  logic          g_left     [K][L];
  logic [IW-1:0] g_idx      [K][L][Q];
  data_t         g_data     [K][L][Q];
  logic [P-1:0]  g_vout_v   [K][L];
  logic [IW-1:0] g_vout_a   [K][L][P];
  acc_t          g_vout_d   [K][L][P];
  acc_t          g_acc      [K][L];

  logic start_mvm, iter_start, acc_clear;
  logic [IW-1:0] acc_rd_addr;

  for (genvar k = 0; k < K; k++) begin : g_k
    for (genvar l = 0; l < L; l++) begin : g_l
      localparam int KB = (k + 1) % K;   // PEGroup below (sends up to k)
      csb_pegroup #(.P(P), .Q(Q), .MAXBLK(MAXBLK), .WDEPTH(WDEPTH),
                    .UDEPTH(UDEPTH), .XDEPTH(XDEPTH)) u_grp (
        .clk, .rst_n,
        .cfg_we    (cfg_we && cfg_grp == 8'(k*L + l)),
        .cfg_target, .cfg_addr, .cfg_wdata,
        .start_mvm, .iter_start, .acc_clear,
        .busy      (g_busy[k][l]),
        .nrn_left  (g_left[k][l]),
        .nrn_idx   (g_idx[k][l]),
        .nrn_data  (g_data[k][l]),
        .vout_valid(g_vout_v[k][l]),
        .vout_addr (g_vout_a[k][l]),
        .vout_data (g_vout_d[k][l]),
        .vin_valid (g_vout_v[KB][l]),
        .vin_addr  (g_vout_a[KB][l]),
        .vin_data  (g_vout_d[KB][l]),
        .acc_rd_addr,
        .acc_rd_data(g_acc[k][l])
      );
    end
  end

  // ---------------- BlockNeuronBuffers ----------------
  // Port k of buffer l serves PEGroup (k,l); port K+k serves PEGroup (k,l+1)
  // when it executes horizontally shared work.
  logic          bnb_we;
  logic [IW-1:0] bnb_waddr;
  logic [IW-1:0] bnb_idx  [L][2*K][Q];
  data_t         bnb_data [L][2*K][Q];

  for (genvar l = 0; l < L; l++) begin : g_bnb
    localparam int LR = (l + 1) % L;     // column to the right
    localparam int LL = (l + L - 1) % L; // column to the left
    for (genvar k = 0; k < K; k++) begin : g_port
      assign bnb_idx[l][k]   = g_idx[k][l];
      assign bnb_idx[l][K+k] = g_idx[k][LR];
      assign g_data[k][l]    = g_left[k][l] ? bnb_data[LL][K+k] : bnb_data[l][k];
    end
    block_neuron_buffer #(.Q(Q), .MAXBLK(MAXBLK), .NPORT(2*K)) u_bnb (
      .clk,
      .wr_en  (bnb_we),
      .wr_addr(bnb_waddr),
      .wr_data(a_rd_data[l]),
      .rd_idx (bnb_idx[l]),
      .rd_data(bnb_data[l])
    );
  end

  // ---------------- horizontal adders ----------------
  acc_t hsum [K];
  always_comb
    for (int k = 0; k < K; k++) begin
      hsum[k] = '0;
      for (int l = 0; l < L; l++) hsum[k] = hsum[k] + g_acc[k][l];
    end

  // ---------------- ReorderLogic ----------------
  logic ro_valid, ro_ready, ro_idle;
  reorder_logic #(.K(K)) u_reorder (
    .clk, .rst_n,
    .in_valid(ro_valid), .in_ready(ro_ready), .in_sum(hsum),
    .in_base(c.b_addr), .in_row_iter(i_cnt), .in_blk_n(c.blk_n), .in_r(r_cnt),
    .out_we(b_we), .out_addr(b_wr_addr), .out_data(b_wr_data), .idle(ro_idle)
  );

  // ---------------- control ----------------
  logic any_busy;
  always_comb begin
    any_busy = 1'b0;
    for (int k = 0; k < K; k++)
      for (int l = 0; l < L; l++) any_busy |= g_busy[k][l];
  end

  always_comb
    for (int l = 0; l < L; l++)
      a_rd_addr[l] = c.a_addr
                   + vaddr_t'((32'(j_cnt) * L + l) * 32'(c.blk_m) + 32'(ld_c));

  assign start_mvm   = (state == E_IDLE) && start && cmd.rewind;
  assign acc_clear   = (state == E_CLR);
  assign iter_start  = (state == E_GO);
  assign acc_rd_addr = IW'(r_cnt);
  assign ro_valid    = (state == E_OUT);
  assign busy        = (state != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; c <= '0; i_cnt <= '0; j_cnt <= '0; ld_c <= '0; r_cnt <= '0;
      bnb_we <= 1'b0; bnb_waddr <= '0; done <= 1'b0;
    end else begin
      done   <= 1'b0;
      bnb_we <= 1'b0;
      unique case (state)
        E_IDLE: if (start) begin
          c <= cmd; i_cnt <= '0;
          state <= (cmd.count_h == '0 || cmd.count_v == '0) ? E_FLUSH : E_CLR;
        end
        E_CLR: begin
          j_cnt <= '0; ld_c <= '0; state <= E_LOAD;
        end
        E_LOAD: begin
          // address ld_c issued this cycle, data written next cycle
          if (32'(ld_c) < 32'(c.blk_m)) begin
            bnb_we    <= 1'b1;
            bnb_waddr <= IW'(ld_c);
            ld_c      <= ld_c + 7'd1;
          end else begin
            state <= E_GO;    // last preload write happens this cycle
          end
        end
        E_GO:   state <= E_WAIT;
        E_WAIT: if (!any_busy) begin
          if (j_cnt + 1'b1 < c.count_h) begin
            j_cnt <= j_cnt + 1'b1; ld_c <= '0; state <= E_LOAD;
          end else begin
            r_cnt <= '0; state <= E_OUT;
          end
        end
        E_OUT: if (ro_ready) begin
          if (r_cnt + 6'd1 < c.blk_n) r_cnt <= r_cnt + 6'd1;
          else if (i_cnt + 1'b1 < c.count_v) begin
            i_cnt <= i_cnt + 1'b1; state <= E_CLR;
          end else state <= E_FLUSH;
        end
        E_FLUSH: if (ro_idle && !ro_valid) begin
          done <= 1'b1; state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end
  // E_CLR may follow E_OUT while the ReorderLogic still serialises the last
  // bundle: it holds its own copy of the K sums.

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> state == E_IDLE);
endmodule
