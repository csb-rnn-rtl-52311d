// tb_macro_ctrl: loads a random VLIW program into the macro-instruction
// controller and runs it for several time steps against stand-in units that
// stay busy for a random number of cycles after each start. Checks:
//   * instructions issue in program order, the list repeats n_steps times;
//   * a unit is started exactly when its section count is non-zero, with
//     the section contents, and load/store memory addresses advanced by
//     step * stride;
//   * no instruction issues while any unit is still busy (the VLIW rule that
//     an instruction ends when all its units have finished);
//   * done pulses once at the end and busy covers the run.
module tb_macro_ctrl;
  import csb_pkg::*;
  localparam int ID = IDEPTH_DEF, IAW = $clog2(ID);
  logic clk = 0, rst_n = 0, cfg_we = 0, start = 0, busy, done;
  logic [IAW-1:0] cfg_addr = '0; macro_inst_t cfg_inst = '0;
  logic [IAW:0] n_inst = '0; count_t n_steps = '0;
  logic ld_start, csb_start, ew_start, st_start, units_busy;
  sec_load_t ld_sec; sec_csb_t csb_sec; sec_ew_t ew_sec; sec_store_t st_sec;
  macro_inst_t prog [ID];
  int checks = 0, failures = 0;
  int ucnt [4];
  always #5 clk = ~clk;
  macro_ctrl dut (.*);

  // stand-in units: busy from the cycle after start for 1..20 cycles
  always_ff @(posedge clk) begin
    for (int u = 0; u < 4; u++) if (ucnt[u] > 0) ucnt[u] <= ucnt[u] - 1;
    if (ld_start)  ucnt[0] <= 1 + $urandom % 20;
    if (csb_start) ucnt[1] <= 1 + $urandom % 20;
    if (ew_start)  ucnt[2] <= 1 + $urandom % 20;
    if (st_start)  ucnt[3] <= 1 + $urandom % 20;
  end
  assign units_busy = (ucnt[0] > 0) || (ucnt[1] > 0) || (ucnt[2] > 0) || (ucnt[3] > 0);

  // expected issue sequence
  int exp_pc, exp_step, ni, ns;
  always @(posedge clk) if (rst_n) begin
    if (ld_start || csb_start || ew_start || st_start) begin
      automatic macro_inst_t m = prog[exp_pc];
      checks++;
      if (units_busy) begin failures++; $display("issue while a unit is busy"); end
      checks++;
      if (ld_start != (m.load.count != 0) || csb_start != (m.csb.count_h != 0 && m.csb.count_v != 0) ||
          ew_start != (m.ew.count != 0) || st_start != (m.store.count != 0)) begin
        failures++; $display("step %0d pc %0d: wrong unit starts", exp_step, exp_pc);
      end
      checks++;
      if (ld_start && (ld_sec.mem_addr !== m.load.mem_addr + MAW'(exp_step) * m.load.mem_stride ||
                       ld_sec.count !== m.load.count || ld_sec.a_addr !== m.load.a_addr)) begin
        failures++; $display("load section wrong");
      end
      checks++;
      if (st_start && (st_sec.mem_addr !== m.store.mem_addr + MAW'(exp_step) * m.store.mem_stride ||
                       st_sec.count !== m.store.count || st_sec.e_addr !== m.store.e_addr)) begin
        failures++; $display("store section wrong");
      end
      checks++;
      if ((csb_start && csb_sec !== m.csb) || (ew_start && ew_sec !== m.ew)) begin
        failures++; $display("csb/ew section wrong");
      end
      exp_pc++;
      if (exp_pc == ni) begin exp_pc = 0; exp_step++; end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ucnt = '{default: 0};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      automatic int ndone = 0, cyc = 0;
      ni = 1 + $urandom % ID; ns = 1 + $urandom % 6;
      for (int i = 0; i < ni; i++) begin
        automatic macro_inst_t m = '0;
        // every instruction starts at least one unit
        if (($urandom % 2) != 0 || i % 4 == 0) begin m.load.count = count_t'(1 + $urandom % 100); m.load.mem_addr = $urandom; m.load.mem_stride = $urandom % 4096; m.load.a_addr = vaddr_t'($urandom); end
        if (($urandom % 2) != 0 || i % 4 == 1) begin m.csb.count_h = count_t'(1 + $urandom % 8); m.csb.count_v = count_t'(1 + $urandom % 8); m.csb.a_addr = vaddr_t'($urandom); m.csb.b_addr = vaddr_t'($urandom); m.csb.blk_m = 6'($urandom); m.csb.blk_n = 6'($urandom); end
        if (($urandom % 2) != 0 || i % 4 == 2) begin m.ew = sec_ew_t'({$urandom, $urandom, $urandom, $urandom}); m.ew.count = count_t'(1 + $urandom % 100); end
        if (($urandom % 2) != 0 || i % 4 == 3) begin m.store.count = count_t'(1 + $urandom % 100); m.store.mem_addr = $urandom; m.store.mem_stride = $urandom % 4096; m.store.e_addr = vaddr_t'($urandom); end
        prog[i] = m;
        @(negedge clk); cfg_we = 1; cfg_addr = IAW'(i); cfg_inst = m;
      end
      @(negedge clk); cfg_we = 0;
      exp_pc = 0; exp_step = 0;
      n_inst = (IAW+1)'(ni); n_steps = count_t'(ns); start = 1; @(negedge clk); start = 0;
      while (busy && cyc < 100000) begin if (done) ndone++; @(negedge clk); cyc++; end
      if (done) ndone++;
      @(negedge clk);
      checks++; if (ndone != 1) begin failures++; $display("t%0d done pulses %0d", t, ndone); end
      checks++; if (exp_step != ns || exp_pc != 0) begin failures++; $display("t%0d ran %0d steps + %0d, expected %0d", t, exp_step, exp_pc, ns); end
      checks++; if (units_busy) begin failures++; $display("t%0d finished while units busy", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
