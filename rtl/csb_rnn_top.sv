// csb_rnn_top: the CSB-RNN accelerator, a programmable RNN dataflow
// architecture built around the CSB-Engine.
//
// Blocks and datapaths:
//   LoadUnit  : external memory -> BufferA (input frame x_t)
//   CSB-Engine: BufferA (neuron vector [x_t ; h_t-1]) -> BufferB (W*[x;h])
//   ew chain  : BufferB + BufferBias -> Sigmoid / Tanh -> Mult1, Mult2, Sum2
//               with programmable sources in BufferC/D/E and destinations
//               BufferA/C/D/E (BufferA closes the recurrent loop: h_t is
//               written where the next CSB-MVM reads it)
//   StoreUnit : BufferE -> external memory (output frame h_t)
//   macro_ctrl: runs the VLIW program, one instruction after the other,
//               starting the units of one instruction together.
//
// The host (not part of this design) loads, over the configuration bus, the
// PEGroup weight tiles and micro-instructions (cfg_target 0..3, PEGroup
// cfg_grp = k*L+l), the VLIW program (CFG_MACRO, word cfg_addr) and the bias
// vector (CFG_BIAS). It then pulses `start` with the program length and the
// number of time steps and waits for `done`. External memory is reached
// through a read channel (req/gnt, in-order rvalid/rdata) and a write channel
// (req/gnt); the memory itself is outside the design.
// Lint note: rst_n also appears in the `disable iff` of the BufferA single-writer
// assertion, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself uses rst_n only as an asynchronous reset.
// The units' done pulses and the stride fields of the load and store
// sections (already applied by the controller) are not used here, which lint
// lists as unused signals.
module csb_rnn_top
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
  parameter int unsigned IDEPTH = IDEPTH_DEF,
  localparam int unsigned TW    = P*Q*DW,
  localparam int unsigned IAW   = $clog2(IDEPTH)
)(
  input  logic           clk,
  input  logic           rst_n,
  // configuration bus
  input  logic           cfg_we,
  input  cfg_target_e    cfg_target,
  input  logic [7:0]     cfg_grp,
  input  logic [31:0]    cfg_addr,
  input  logic [TW-1:0]  cfg_wdata,
  input  macro_inst_t    cfg_inst,
  // run control
  input  logic           start,
  input  logic [IAW:0]   n_inst,
  input  count_t         n_steps,
  output logic           busy,
  output logic           done,
  // external memory
  output logic           mem_rd_req,
  output logic [MAW-1:0] mem_rd_addr,
  input  logic           mem_rd_gnt,
  input  logic           mem_rd_rvalid,
  input  data_t          mem_rd_rdata,
  output logic           mem_wr_req,
  output logic [MAW-1:0] mem_wr_addr,
  output data_t          mem_wr_data,
  input  logic           mem_wr_gnt
);
  // ---------------- sequencer ----------------
  logic       ld_start, csb_start, ew_start, st_start;
  sec_load_t  ld_sec;
  sec_csb_t   csb_sec;
  sec_ew_t    ew_sec;
  sec_store_t st_sec;
  logic       ld_busy, csb_busy, ew_busy, st_busy;
  logic       ld_done, csb_done, ew_done, st_done;

  macro_ctrl #(.IDEPTH(IDEPTH)) u_ctrl (
    .clk, .rst_n,
    .cfg_we  (cfg_we && cfg_target == CFG_MACRO),
    .cfg_addr(cfg_addr[IAW-1:0]), .cfg_inst,
    .start, .n_inst, .n_steps, .busy, .done,
    .ld_start, .ld_sec, .csb_start, .csb_sec, .ew_start, .ew_sec,
    .st_start, .st_sec,
    .units_busy(ld_busy || csb_busy || ew_busy || st_busy)
  );

  // ---------------- buffers ----------------
  // BufferA: written by LoadUnit (port 0) and the ew chain (port 1)
  logic   a_we [2];  vaddr_t a_wa [2];  data_t a_wd [2];
  vaddr_t a_ra [L];  data_t  a_rd [L];
  vector_buffer #(.NRD(L), .NWR(2)) u_buf_a (
    .clk, .we(a_we), .wr_addr(a_wa), .wr_data(a_wd), .rd_addr(a_ra), .rd_data(a_rd));

  logic   b_we [1];  vaddr_t b_wa [1];  data_t b_wd [1];
  vaddr_t b_ra [1];  data_t  b_rd [1];
  vector_buffer #(.NRD(1), .NWR(1)) u_buf_b (
    .clk, .we(b_we), .wr_addr(b_wa), .wr_data(b_wd), .rd_addr(b_ra), .rd_data(b_rd));

  logic   bias_we [1]; vaddr_t bias_wa [1]; data_t bias_wd [1];
  vaddr_t bias_ra [1]; data_t  bias_rd [1];
  assign bias_we[0] = cfg_we && cfg_target == CFG_BIAS;
  assign bias_wa[0] = cfg_addr[VBUF_AW-1:0];
  assign bias_wd[0] = data_t'(cfg_wdata[DW-1:0]);
  vector_buffer #(.NRD(1), .NWR(1)) u_buf_bias (
    .clk, .we(bias_we), .wr_addr(bias_wa), .wr_data(bias_wd), .rd_addr(bias_ra), .rd_data(bias_rd));

  logic   c_we [1];  vaddr_t c_wa [1];  data_t c_wd [1];
  vaddr_t c_ra [3];  data_t  c_rd [3];
  vector_buffer #(.NRD(3), .NWR(1)) u_buf_c (
    .clk, .we(c_we), .wr_addr(c_wa), .wr_data(c_wd), .rd_addr(c_ra), .rd_data(c_rd));

  logic   d_we [1];  vaddr_t d_wa [1];  data_t d_wd [1];
  vaddr_t d_ra [2];  data_t  d_rd [2];
  vector_buffer #(.NRD(2), .NWR(1)) u_buf_d (
    .clk, .we(d_we), .wr_addr(d_wa), .wr_data(d_wd), .rd_addr(d_ra), .rd_data(d_rd));

  // BufferE: ew chain reads on ports 0..2, StoreUnit on port 3
  logic   e_we [1];  vaddr_t e_wa [1];  data_t e_wd [1];
  vaddr_t e_ra [4];  data_t  e_rd [4];
  vector_buffer #(.NRD(4), .NWR(1)) u_buf_e (
    .clk, .we(e_we), .wr_addr(e_wa), .wr_data(e_wd), .rd_addr(e_ra), .rd_data(e_rd));

  // ---------------- LoadUnit ----------------
  load_unit u_load (
    .clk, .rst_n, .start(ld_start),
    .mem_addr(ld_sec.mem_addr), .count(ld_sec.count), .a_addr(ld_sec.a_addr),
    .busy(ld_busy), .done(ld_done),
    .rd_req(mem_rd_req), .rd_addr(mem_rd_addr), .rd_gnt(mem_rd_gnt),
    .rd_rvalid(mem_rd_rvalid), .rd_rdata(mem_rd_rdata),
    .a_we(a_we[0]), .a_wr_addr(a_wa[0]), .a_wr_data(a_wd[0])
  );

  // ---------------- CSB-Engine ----------------
  csb_engine #(.P(P), .Q(Q), .K(K), .L(L), .MAXBLK(MAXBLK), .WDEPTH(WDEPTH),
               .UDEPTH(UDEPTH), .XDEPTH(XDEPTH)) u_engine (
    .clk, .rst_n,
    .cfg_we, .cfg_target, .cfg_grp, .cfg_addr, .cfg_wdata,
    .start(csb_start), .cmd(csb_sec), .busy(csb_busy), .done(csb_done),
    .a_rd_addr(a_ra), .a_rd_data(a_rd),
    .b_we(b_we[0]), .b_wr_addr(b_wa[0]), .b_wr_data(b_wd[0])
  );

  // ---------------- element-wise chain ----------------
  logic   ew_we_a, ew_we_c, ew_we_d, ew_we_e;
  vaddr_t ew_wa;
  data_t  ew_wd;
  vaddr_t ew_e_ra [3];
  data_t  ew_e_rd [3];
  for (genvar i = 0; i < 3; i++) begin : g_e_ports
    assign e_ra[i]    = ew_e_ra[i];
    assign ew_e_rd[i] = e_rd[i];
  end

  ew_dataflow u_ew (
    .clk, .rst_n, .start(ew_start), .inst(ew_sec), .busy(ew_busy), .done(ew_done),
    .b_addr(b_ra[0]), .b_data(b_rd[0]),
    .bias_addr(bias_ra[0]), .bias_data(bias_rd[0]),
    .c_addr(c_ra), .c_data(c_rd),
    .d_addr(d_ra), .d_data(d_rd),
    .e_addr(ew_e_ra), .e_data(ew_e_rd),
    .we_a(ew_we_a), .we_c(ew_we_c), .we_d(ew_we_d), .we_e(ew_we_e),
    .wr_addr(ew_wa), .wr_data(ew_wd)
  );

  assign a_we[1] = ew_we_a;  assign a_wa[1] = ew_wa;  assign a_wd[1] = ew_wd;
  assign c_we[0] = ew_we_c;  assign c_wa[0] = ew_wa;  assign c_wd[0] = ew_wd;
  assign d_we[0] = ew_we_d;  assign d_wa[0] = ew_wa;  assign d_wd[0] = ew_wd;
  assign e_we[0] = ew_we_e;  assign e_wa[0] = ew_wa;  assign e_wd[0] = ew_wd;

  // ---------------- StoreUnit ----------------
  store_unit u_store (
    .clk, .rst_n, .start(st_start),
    .e_addr(st_sec.e_addr), .count(st_sec.count), .mem_addr(st_sec.mem_addr),
    .busy(st_busy), .done(st_done),
    .e_rd_addr(e_ra[3]), .e_rd_data(e_rd[3]),
    .wr_req(mem_wr_req), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .wr_gnt(mem_wr_gnt)
  );

  // The LoadUnit and the element-wise chain must not write BufferA in the
  // same cycle (the program keeps them in different instructions).
  a_buf_a_single_writer: assert property (@(posedge clk) disable iff (!rst_n)
                                          !(a_we[0] && a_we[1]));
endmodule
