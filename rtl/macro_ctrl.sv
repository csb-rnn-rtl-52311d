// macro_ctrl: the macro-instruction sequencer of the RNN dataflow
// architecture.
//
// It holds the VLIW program (IDEPTH macro-instructions, each with one section
// per operation unit) and runs it: instructions 0..n_inst-1 in order, the
// whole list repeated n_steps times (one pass per input frame, i.e. per RNN
// time step). For each instruction it starts every unit whose section has a
// non-zero count (LoadUnit, CSB-Engine, element-wise chain, StoreUnit) in the
// same cycle and waits until all of them are idle again: as in the paper, a
// VLIW instruction is finished when all its units have finished their work.
// The external memory addresses of load and store advance by their
// mem_stride every time step.
//
// The paper gives the instruction sections and the rule that an instruction
// ends when all units finish; the repeat counter, the strides and the start/
// busy/done handshake are this design's choices.
// Timing: one fetch cycle, one start cycle, then as long as the slowest unit.
module macro_ctrl
  import csb_pkg::*;
#(
  parameter int unsigned IDEPTH = IDEPTH_DEF,
  localparam int unsigned IAW   = $clog2(IDEPTH)
)(
  input  logic           clk,
  input  logic           rst_n,
  // program load
  input  logic           cfg_we,
  input  logic [IAW-1:0] cfg_addr,
  input  macro_inst_t    cfg_inst,
  // run control
  input  logic           start,
  input  logic [IAW:0]   n_inst,
  input  count_t         n_steps,
  output logic           busy,
  output logic           done,
  // unit launch
  output logic           ld_start,  output sec_load_t  ld_sec,
  output logic           csb_start, output sec_csb_t   csb_sec,
  output logic           ew_start,  output sec_ew_t    ew_sec,
  output logic           st_start,  output sec_store_t st_sec,
  input  logic           units_busy
);
  macro_inst_t imem [IDEPTH];
  always_ff @(posedge clk)
    if (cfg_we) imem[cfg_addr] <= cfg_inst;

  typedef enum logic [1:0] {M_IDLE, M_ISSUE, M_WAIT1, M_WAIT} mstate_e;
  mstate_e     state;
  logic [IAW:0] pc, ninst;
  count_t      step, nsteps;
  macro_inst_t cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE; pc <= '0; ninst <= '0; step <= '0; nsteps <= '0;
      cur <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        M_IDLE: if (start && n_inst != '0 && n_steps != '0) begin
          ninst <= n_inst; nsteps <= n_steps; pc <= '0; step <= '0;
          cur <= imem[IAW'(0)]; state <= M_ISSUE;
        end
        M_ISSUE: state <= M_WAIT1;
        M_WAIT1: state <= M_WAIT;     // units raise busy one cycle after start
        M_WAIT: if (!units_busy) begin
          if (pc + 1'b1 < ninst) begin
            pc <= pc + 1'b1; cur <= imem[IAW'(pc + 1'b1)]; state <= M_ISSUE;
          end else if (step + 1'b1 < nsteps) begin
            pc <= '0; step <= step + 1'b1; cur <= imem[IAW'(0)]; state <= M_ISSUE;
          end else begin
            state <= M_IDLE; done <= 1'b1;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  assign busy = (state != M_IDLE);

  logic issue;
  assign issue     = (state == M_ISSUE);
  assign ld_start  = issue && cur.load.count != '0;
  assign csb_start = issue && cur.csb.count_h != '0 && cur.csb.count_v != '0;
  assign ew_start  = issue && cur.ew.count != '0;
  assign st_start  = issue && cur.store.count != '0;

  always_comb begin
    ld_sec  = cur.load;
    ld_sec.mem_addr = cur.load.mem_addr + MAW'(32'(step) * cur.load.mem_stride);
    csb_sec = cur.csb;
    ew_sec  = cur.ew;
    st_sec  = cur.store;
    st_sec.mem_addr = cur.store.mem_addr + MAW'(32'(step) * cur.store.mem_stride);
  end
endmodule
