// tb_csb_rnn_top: end-to-end test of the CSB-RNN accelerator at its default
// parameters (4x4 PEGroups of 4x4 PEs, 8192-word buffers), running an LSTM
// layer over several time steps.
//
// Test set-up:
//   * a CSB-pruned LSTM weight matrix W of 4H x (X+H) (gate rows in the
//     order i, f, o, g), blocks of 32x32 with random kernel density, compiled
//     with workload sharing into PEGroup weight tiles and micro-instructions,
//     then loaded over the configuration bus with the bias vector;
//   * a behavioural external memory holding the input frames x_0..x_T and
//     receiving h_1..h_T. It grants reads and writes at random (stalls) and
//     returns read data in order after a random latency;
//   * a 3-instruction prologue (clear h and c, load x_0), then a
//     6-instruction VLIW program repeated T times:
//       I0  CSB-Engine   B[0..4H)  = W * A[0..X+H)          ([x_t ; h_t-1])
//       I1  ew chain     C[0..3H)  = sigmoid(B + bias)       (i, f, o)
//       I2  ew chain     D[0..H)   = tanh(B[3H..] + bias)    (g)
//       I3  ew chain     E[c]      = D*C[i] + C[f]*E[c]      (pass-through, Mult1, Mult2, Sum2)
//       I4  ew chain     A[X..], E[X..] = tanh(E[c]) * C[o]  (h_t, recurrent write-back)
//       I5  StoreUnit h_t -> memory  ||  LoadUnit x_t+1 -> A[0..X)
//   * a golden model in this file with the same Q8.8 arithmetic and the
//     same piecewise-linear sigmoid, so every stored h_t is compared exactly.
//
// Mechanism counters (the test fails if any of them stays zero): PEGroup
// cycles of horizontal and of vertical workload sharing, memory read stalls,
// memory write stalls, VLIW instructions starting more than one unit,
// cycles with two or more units busy, element-wise writes into BufferA
// (recurrent loop), sigmoid, tanh and pass-through activation passes,
// Mult2/Sum2 passes, and time steps checked.
module tb_csb_rnn_top;
  import csb_pkg::*;
  import csb_tb_pkg::*;
  localparam int P = P_DEF, Q = Q_DEF, K = K_DEF, L = L_DEF, TW = P*Q*DW;
  localparam int IAW = $clog2(IDEPTH_DEF);
  // LSTM geometry
  localparam int BLK = 32, CH = 2, CV = 4;
  localparam int X = BLK*L*CH/2, H = X;       // 128 inputs, 128 hidden
  localparam int T = 5;                       // time steps
  localparam int EC = 4096;                   // cell state c in BufferE
  localparam int ZB = 4096;                   // zero region in BufferBias
  localparam int XBASE = 32'h0001_0000, HBASE = 32'h0002_0000, ZBASE = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; cfg_target_e cfg_target = CFG_WEIGHT; logic [7:0] cfg_grp = '0;
  logic [31:0] cfg_addr = '0; logic [TW-1:0] cfg_wdata = '0; macro_inst_t cfg_inst = '0;
  logic start = 0; logic [IAW:0] n_inst = '0; count_t n_steps = '0; logic busy, done;
  logic mem_rd_req, mem_rd_gnt, mem_rd_rvalid, mem_wr_req, mem_wr_gnt;
  logic [MAW-1:0] mem_rd_addr, mem_wr_addr; data_t mem_rd_rdata, mem_wr_data;
  always #5 clk = ~clk;

  csb_rnn_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------- behavioural external memory ----------------
  data_t dram [int];
  logic [MAW-1:0] rq_addr [$]; int rq_due [$]; int now = 0;
  int n_rd_stall = 0, n_wr_stall = 0;
  always_ff @(posedge clk) now <= now + 1;
  assign mem_rd_gnt = mem_rd_req && ($urandom % 4 != 0);
  assign mem_wr_gnt = mem_wr_req && ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
    if (mem_rd_req && !mem_rd_gnt) n_rd_stall++;
    if (mem_wr_req && !mem_wr_gnt) n_wr_stall++;
    if (mem_rd_req && mem_rd_gnt) begin
      rq_addr.push_back(mem_rd_addr);
      rq_due.push_back(((rq_due.size() > 0) ? rq_due[$] : now) + 1 + $urandom % 4);
    end
    if (mem_wr_req && mem_wr_gnt) dram[int'(mem_wr_addr)] = mem_wr_data;
  end
  always @(negedge clk) begin
    mem_rd_rvalid = 0; mem_rd_rdata = '0;
    if (rq_due.size() > 0 && rq_due[0] <= now) begin
      mem_rd_rvalid = 1;
      mem_rd_rdata = dram.exists(int'(rq_addr[0])) ? dram[int'(rq_addr[0])] : '0;
      void'(rq_addr.pop_front()); void'(rq_due.pop_front());
    end
  end

  // ---------------- mechanism counters ----------------
  int hsh [K*L], vsh [K*L];
  for (genvar k = 0; k < K; k++) begin : g_mk
    for (genvar l = 0; l < L; l++) begin : g_ml
      always @(posedge clk) begin
        if (dut.u_engine.g_k[k].g_l[l].u_grp.nrn_left)    hsh[k*L+l]++;
        if (|dut.u_engine.g_k[k].g_l[l].u_grp.vout_valid) vsh[k*L+l]++;
      end
    end
  end
  int n_multi_start = 0, n_overlap = 0, n_a_wb = 0, n_sig = 0, n_tanh = 0, n_pass = 0, n_m2 = 0, n_steps_ok = 0;
  always @(posedge clk) if (rst_n) begin
    if (int'(dut.ld_start) + int'(dut.csb_start) + int'(dut.ew_start) + int'(dut.st_start) >= 2) n_multi_start++;
    if (int'(dut.ld_busy) + int'(dut.csb_busy) + int'(dut.ew_busy) + int'(dut.st_busy) >= 2) n_overlap++;
    if (dut.ew_we_a) n_a_wb++;
    if (dut.ew_start) begin
      if (dut.ew_sec.sig_en) n_sig++;
      else if (dut.ew_sec.tanh_en) n_tanh++;
      else n_pass++;
      if (dut.ew_sec.mult2_en && dut.ew_sec.sum2_en) n_m2++;
    end
  end

  // ---------------- golden model ----------------
  function automatic data_t g_sig(data_t x);
    int ax, yp;
    ax = (x < 0) ? -int'(x) : int'(x);
    if (ax >= 5*256)    yp = 256;
    else if (ax >= 608) yp = (ax >> 5) + 216;
    else if (ax >= 256) yp = (ax >> 3) + 160;
    else                yp = (ax >> 2) + 128;
    return data_t'((x < 0) ? 256 - yp : yp);
  endfunction
  function automatic data_t g_tanh(data_t x);
    return data_t'(2 * int'(g_sig(sat16(48'(x) * 2))) - 256);
  endfunction

  // ---------------- host helpers ----------------
  task automatic cfg(cfg_target_e t, int g, int a, logic [TW-1:0] d);
    @(negedge clk); cfg_we = 1; cfg_target = t; cfg_grp = 8'(g); cfg_addr = a; cfg_wdata = d;
    @(posedge clk); #1 cfg_we = 0;
  endtask
  task automatic cfg_macro(int a, macro_inst_t m);
    @(negedge clk); cfg_we = 1; cfg_target = CFG_MACRO; cfg_addr = a; cfg_inst = m;
    @(posedge clk); #1 cfg_we = 0;
  endtask
  task automatic run(int ni, int ns, output int cyc);
    @(negedge clk); n_inst = (IAW+1)'(ni); n_steps = count_t'(ns); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    csb_model #(P,Q,K,L) m;
    int xs [T+1][X];
    int bias [4*H];
    int hv [], cv [], z [], vin [];
    static int cyc, tiles = 0, hs = 0, vs = 0, n_nonzero = 0;
    macro_inst_t mi;
    foreach (hsh[g]) begin hsh[g] = 0; vsh[g] = 0; end
    mem_rd_rvalid = 0; mem_rd_rdata = '0;

    // model and memory contents
    m = new(BLK, BLK, CH, CV);
    m.randomize_matrix(15, 100, 12);
    m.compile(1'b1);
    foreach (xs[t, c]) begin xs[t][c] = $signed($urandom % 513) - 256; dram[XBASE + t*X + c] = data_t'(xs[t][c]); end
    foreach (bias[r]) bias[r] = $signed($urandom % 129) - 64;
    for (int a = 0; a < X + H; a++) dram[ZBASE + a] = '0;

    repeat (3) @(posedge clk); rst_n = 1;

    // weights, micro-instructions, bias (and a zero region of BufferBias)
    for (int g = 0; g < K*L; g++) begin
      foreach (m.tiles[g][a]) cfg(CFG_WEIGHT, g, a, m.tiles[g][a]);
      foreach (m.items[g][a]) cfg(CFG_UITEM,  g, a, TW'(m.items[g][a]));
      foreach (m.ridx[g][a])  cfg(CFG_ROWIDX, g, a, TW'(m.ridx[g][a]));
      foreach (m.cidx[g][a])  cfg(CFG_COLIDX, g, a, TW'(m.cidx[g][a]));
      tiles += m.tiles[g].size();
    end
    foreach (bias[r]) cfg(CFG_BIAS, 0, r, TW'(data_t'(bias[r])));
    for (int r = 0; r < H; r++) cfg(CFG_BIAS, 0, ZB + r, '0);
    $display("LSTM X=%0d H=%0d: W %0dx%0d, %0d weight tiles, %0d horizontal / %0d vertical shared items",
             X, H, m.rows, m.cols, tiles, m.n_horiz, m.n_vert);

    // ---- prologue: A <- 0, B <- W*0 = 0, E[c] <- B + 0, then A[0..X) <- x_0
    mi = '0; mi.load.mem_addr = ZBASE; mi.load.count = count_t'(X + H); mi.load.a_addr = '0;
    cfg_macro(0, mi);
    mi = '0; mi.csb.rewind = 1'b1; mi.csb.a_addr = '0; mi.csb.blk_m = 6'(BLK); mi.csb.blk_n = 6'(BLK);
    mi.csb.count_h = count_t'(CH); mi.csb.count_v = count_t'(CV); mi.csb.b_addr = '0;
    cfg_macro(1, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.sum1_en = 1; mi.ew.b_addr = '0; mi.ew.bias_addr = vaddr_t'(ZB);
    mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 0, d: 0, e: 1}; mi.ew.dst_addr = vaddr_t'(EC);
    mi.load.mem_addr = XBASE; mi.load.count = count_t'(X); mi.load.a_addr = '0;
    cfg_macro(2, mi);
    run(3, 1, cyc);
    $display("prologue: %0d cycles", cyc);

    // ---- LSTM step program
    mi = '0; mi.csb.rewind = 1'b1; mi.csb.a_addr = '0; mi.csb.blk_m = 6'(BLK); mi.csb.blk_n = 6'(BLK);
    mi.csb.count_h = count_t'(CH); mi.csb.count_v = count_t'(CV); mi.csb.b_addr = '0;
    cfg_macro(0, mi);
    mi = '0; mi.ew.count = count_t'(3*H); mi.ew.sum1_en = 1; mi.ew.b_addr = '0; mi.ew.bias_addr = '0;
    mi.ew.sig_en = 1; mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 1, d: 0, e: 0}; mi.ew.dst_addr = '0;
    cfg_macro(1, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.sum1_en = 1; mi.ew.b_addr = vaddr_t'(3*H); mi.ew.bias_addr = vaddr_t'(3*H);
    mi.ew.tanh_en = 1; mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 0, d: 1, e: 0}; mi.ew.dst_addr = '0;
    cfg_macro(2, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.act_src = DF_BUFD; mi.ew.act_addr = '0;
    mi.ew.mult1_en = 1; mi.ew.m1_src = DF_BUFC; mi.ew.m1_addr = '0;
    mi.ew.mult2_en = 1; mi.ew.m2c_addr = vaddr_t'(H); mi.ew.m2e_addr = vaddr_t'(EC); mi.ew.sum2_en = 1;
    mi.ew.dst = '{a: 0, c: 0, d: 0, e: 1}; mi.ew.dst_addr = vaddr_t'(EC);
    cfg_macro(3, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.act_src = DF_BUFE; mi.ew.act_addr = vaddr_t'(EC); mi.ew.tanh_en = 1;
    mi.ew.mult1_en = 1; mi.ew.m1_src = DF_BUFC; mi.ew.m1_addr = vaddr_t'(2*H);
    mi.ew.dst = '{a: 1, c: 0, d: 0, e: 1}; mi.ew.dst_addr = vaddr_t'(X);
    cfg_macro(4, mi);
    mi = '0; mi.store.e_addr = vaddr_t'(X); mi.store.count = count_t'(H); mi.store.mem_addr = HBASE; mi.store.mem_stride = H;
    mi.load.mem_addr = XBASE + X; mi.load.mem_stride = X; mi.load.count = count_t'(X); mi.load.a_addr = '0;
    cfg_macro(5, mi);
    run(6, T, cyc);
    $display("%0d LSTM steps: %0d cycles", T, cyc);

    // ---- golden model and comparison
    hv = new[H]; cv = new[H]; vin = new[X + H];
    foreach (hv[r]) begin hv[r] = 0; cv[r] = 0; end
    for (int t = 0; t < T; t++) begin
      automatic int bad = 0;
      automatic data_t gi, gf, go, gg;
      for (int c = 0; c < X; c++) vin[c] = xs[t][c];
      for (int r = 0; r < H; r++) vin[X + r] = hv[r];
      m.mvm(vin, z);
      for (int r = 0; r < H; r++) begin
        gi = g_sig (fx_add(data_t'(z[r]),       data_t'(bias[r])));
        gf = g_sig (fx_add(data_t'(z[H + r]),   data_t'(bias[H + r])));
        go = g_sig (fx_add(data_t'(z[2*H + r]), data_t'(bias[2*H + r])));
        gg = g_tanh(fx_add(data_t'(z[3*H + r]), data_t'(bias[3*H + r])));
        cv[r] = int'(fx_add(fx_mul(gg, gi), fx_mul(gf, data_t'(cv[r]))));
        hv[r] = int'(fx_mul(g_tanh(data_t'(cv[r])), go));
      end
      for (int r = 0; r < H; r++) begin
        checks++;
        if (!dram.exists(HBASE + t*H + r) || int'(dram[HBASE + t*H + r]) != hv[r]) begin
          failures++; bad++;
          if (failures < 10) $display("step %0d h[%0d]: got %0d exp %0d", t, r, dram.exists(HBASE + t*H + r) ? int'(dram[HBASE + t*H + r]) : -99999, hv[r]);
        end
      end
      if (bad == 0) n_steps_ok++;
      foreach (hv[r]) if (hv[r] != 0) n_nonzero++;
    end

    // ---- mechanism report
    foreach (hsh[g]) begin hs += hsh[g]; vs += vsh[g]; end
    $display("mechanisms: horiz-share cycles=%0d vert-share cycles=%0d rd-stalls=%0d wr-stalls=%0d", hs, vs, n_rd_stall, n_wr_stall);
    $display("            multi-unit instructions=%0d overlap cycles=%0d A write-backs=%0d", n_multi_start, n_overlap, n_a_wb);
    $display("            sigmoid=%0d tanh=%0d pass-through=%0d mult2+sum2=%0d steps ok=%0d non-zero h=%0d", n_sig, n_tanh, n_pass, n_m2, n_steps_ok, n_nonzero);
    checks++; if (hs == 0)            begin failures++; $display("horizontal sharing never happened"); end
    checks++; if (vs == 0)            begin failures++; $display("vertical sharing never happened"); end
    checks++; if (n_rd_stall == 0)    begin failures++; $display("no read stall"); end
    checks++; if (n_wr_stall == 0)    begin failures++; $display("no write stall"); end
    checks++; if (n_multi_start == 0) begin failures++; $display("no multi-unit instruction"); end
    checks++; if (n_overlap == 0)     begin failures++; $display("no unit overlap"); end
    checks++; if (n_a_wb == 0)        begin failures++; $display("no recurrent write-back"); end
    checks++; if (n_sig == 0 || n_tanh == 0 || n_pass == 0) begin failures++; $display("an activation mode was not used"); end
    checks++; if (n_m2 == 0)          begin failures++; $display("Mult2/Sum2 never used"); end
    checks++; if (n_nonzero < T*H/2)  begin failures++; $display("h is mostly zero (%0d non-zero)", n_nonzero); end
    checks++; if (n_steps_ok < 2)     begin failures++; $display("fewer than two correct time steps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
