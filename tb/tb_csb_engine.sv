// tb_csb_engine: end-to-end test of the CSB-Engine at its default geometry
// (4x4 PEGroups of 4x4 PEs). For several random CSB-pruned matrices (random
// block sizes up to 32, random kernel sizes) it programs the PEGroups twice,
// once without and once with workload sharing, runs the CSB-MVM, and checks
// every output word in BufferB against the reference product. It also
// checks that sharing never lengthens the run, that horizontal and vertical
// shared items were really exercised, and that the cycle count matches the
// engine's documented schedule.
module tb_csb_engine;
  import csb_pkg::*;
  import csb_tb_pkg::*;
  localparam int P = 4, Q = 4, K = 4, L = 4, TW = P*Q*DW;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; cfg_target_e cfg_target; logic [7:0] cfg_grp; logic [31:0] cfg_addr; logic [TW-1:0] cfg_wdata;
  logic start = 0, busy, done; sec_csb_t cmd;
  vaddr_t a_ra [L]; data_t a_rd [L];
  logic b_we; vaddr_t b_wa; data_t b_wd;
  data_t bufa [1<<VBUF_AW];
  data_t bufb [1<<VBUF_AW];
  int checks = 0, failures = 0, n_horiz = 0, n_vert = 0;
  always #5 clk = ~clk;

  csb_engine dut (.clk, .rst_n, .cfg_we, .cfg_target, .cfg_grp, .cfg_addr, .cfg_wdata,
    .start, .cmd, .busy, .done, .a_rd_addr(a_ra), .a_rd_data(a_rd),
    .b_we, .b_wr_addr(b_wa), .b_wr_data(b_wd));

  always_ff @(posedge clk) begin
    for (int l = 0; l < L; l++) a_rd[l] <= bufa[a_ra[l]];
    if (b_we) bufb[b_wa] <= b_wd;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(cfg_target_e t, int g, int a, logic [TW-1:0] d);
    @(negedge clk); cfg_we = 1; cfg_target = t; cfg_grp = 8'(g); cfg_addr = a; cfg_wdata = d;
    @(posedge clk); #1 cfg_we = 0;
  endtask

  task automatic load_model(csb_model #(P,Q,K,L) m);
    for (int g = 0; g < K*L; g++) begin
      foreach (m.tiles[g][a]) cfg(CFG_WEIGHT, g, a, m.tiles[g][a]);
      foreach (m.items[g][a]) cfg(CFG_UITEM,  g, a, TW'(m.items[g][a]));
      foreach (m.ridx[g][a])  cfg(CFG_ROWIDX, g, a, TW'(m.ridx[g][a]));
      foreach (m.cidx[g][a])  cfg(CFG_COLIDX, g, a, TW'(m.cidx[g][a]));
    end
  endtask

  // run one command; returns cycles from start to done
  task automatic run(csb_model #(P,Q,K,L) m, int a_base, int b_base, output int cyc);
    @(negedge clk);
    cmd = '0; cmd.rewind = 1'b1; cmd.a_addr = vaddr_t'(a_base); cmd.b_addr = vaddr_t'(b_base);
    cmd.blk_m = 6'(m.blk_m); cmd.blk_n = 6'(m.blk_n);
    cmd.count_h = count_t'(m.count_h); cmd.count_v = count_t'(m.count_v);
    start = 1; cyc = 0;
    @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
  endtask

  // Cycle count of one command according to the engine's schedule:
  // per vertical iteration: 1 clear cycle; per block iteration blk_m+1
  // preload cycles, 1 start cycle and the busiest PEGroup's time + 2;
  // then (blk_n-1)*(K+1)+1 output cycles; finally K+1 cycles of flush.
  // A PEGroup spends 1 header cycle per item plus one cycle per pass, and
  // its pipeline drains 2 cycles after the last pass.
  function automatic int expected_cycles(csb_model #(P,Q,K,L) m);
    int tot = 0, it = 0;
    for (int i = 0; i < m.count_v; i++) begin
      tot += 1;
      for (int j = 0; j < m.count_h; j++) begin
        int mx = 0;
        for (int g = 0; g < K*L; g++) begin
          int t = 0, lie = -100, c;
          for (int a = 0; a < 3; a++) begin
            uitem_t u = m.items[g][it*3 + a];
            t += 1;
            if (u.tn != 0 && u.tm != 0) begin
              t += ((int'(u.tn) + P - 1) / P) * ((int'(u.tm) + Q - 1) / Q); lie = t;
            end
          end
          c = (t > lie + 2) ? t : lie + 2;
          if (c > mx) mx = c;
        end
        tot += m.blk_m + 2 + mx + 2;
        it++;
      end
      tot += (m.blk_n - 1) * (K + 1) + 1;
    end
    return tot + K + 1;
  endfunction

  initial begin
    static int cfgs [5][4] = '{'{32, 32, 1, 1}, '{16, 8, 2, 1}, '{8, 16, 1, 2}, '{32, 32, 2, 2}, '{12, 20, 1, 1}};
    cfg_target = CFG_WEIGHT; cfg_grp = 0; cfg_addr = 0; cfg_wdata = '0; cmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (cfgs[t]) begin
      csb_model #(P,Q,K,L) m;
      int x [], y [], cyc_ns, cyc_sh, a_base, b_base;
      m = new(cfgs[t][0], cfgs[t][1], cfgs[t][2], cfgs[t][3]);
      m.randomize_matrix(10, 100, 300);
      x = new[m.cols];
      a_base = 100 + t; b_base = 3000 + 7*t;
      foreach (x[c]) begin x[c] = $signed($urandom % 1025) - 512; bufa[a_base + c] = data_t'(x[c]); end
      m.mvm(x, y);
      for (int sh = 0; sh < 2; sh++) begin
        int cyc, expc;
        m.compile(sh[0]);
        load_model(m);
        foreach (y[r]) bufb[b_base + r] = data_t'(16'h5a5a);
        run(m, a_base, b_base, cyc);
        foreach (y[r]) begin
          checks++;
          if (int'(bufb[b_base + r]) != y[r]) begin
            failures++;
            if (failures < 10) $display("cfg %0d share %0d row %0d got %0d exp %0d", t, sh, r, bufb[b_base + r], y[r]);
          end
        end
        if (sh == 0) cyc_ns = cyc; else cyc_sh = cyc;
        n_horiz += (sh != 0) ? m.n_horiz : 0; n_vert += (sh != 0) ? m.n_vert : 0;
        $display("cfg %0d (%0dx%0d blocks of %0dx%0d) sharing=%0d cycles=%0d busiest-group passes=%0d",
                 t, m.count_v*K, m.count_h*L, m.blk_n, m.blk_m, sh, cyc, m.total_passes_max);
        // lower bound: every iteration needs the busiest group's passes plus the preload
        expc = m.total_passes_max + m.count_v * m.count_h * m.blk_m;
        checks++; if (cyc < expc) begin failures++; $display("too fast: %0d < %0d", cyc, expc); end
        checks++;
        if (cyc != expected_cycles(m)) begin failures++; $display("cycles %0d, schedule says %0d", cyc, expected_cycles(m)); end
      end
      checks++;
      if (cyc_sh > cyc_ns) begin failures++; $display("sharing slower: %0d > %0d", cyc_sh, cyc_ns); end
    end
    checks++; if (n_horiz == 0) begin failures++; $display("no horizontal sharing exercised"); end
    checks++; if (n_vert  == 0) begin failures++; $display("no vertical sharing exercised"); end
    $display("shared items: horizontal=%0d vertical=%0d", n_horiz, n_vert);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
