// tb_gru_workload: runs a GRU layer (the cell of the speech-recognition
// workloads) on the accelerator at its default parameters, for several time
// steps, and compares every output h_t bit-exactly with a model in this file.
//
// The GRU step
//   z  = sigma(Wz [h;x] + bz)          r = sigma(Wr [h;x] + br)
//   h~ = tanh(Wg [x ; r*h])            h = (1-z)*h + z*h~
// needs two matrix products per step, so two CSB matrices stay resident in
// the PEGroups one after the other: the first command of a step rewinds the
// weight and micro-instruction pointers, the second continues after it.
// The element-wise chain has no subtracter; 1-z is obtained as
// sigma(-(Wz [h;x] + bz)) from a copy of the z rows with negated weights and
// bias (the sigmoid is exactly odd-symmetric around 1/2).
//
// BufferA holds [h ; x ; r*h], so [h;x] and [x;r*h] are both contiguous:
//   I0  CSB  (rewind)   B[0..3H)   = [Wz;Wr;-Wz] * A[0..H+X)
//   I1  chain           C[0..3H)   = sigmoid(B + bias)         z, r, 1-z
//   I2  chain           A[H+X..)   = C[r] * E[h]               r*h
//   I3  CSB  (continue) B[3H..4H)  = Wg * A[H..H+X+H)
//   I4  chain           A[0..H), E[0..H) = tanh(B[3H..]) * C[z] + C[1-z] * E[h]
//   I5  StoreUnit h_t -> memory || LoadUnit x_t+1 -> A[H..H+X)
// The test fails unless a continuing (non-rewind) CSB command ran, both
// sharing directions were used and at least two steps matched.
module tb_gru_workload;
  import csb_pkg::*;
  import csb_tb_pkg::*;
  localparam int P = P_DEF, Q = Q_DEF, K = K_DEF, L = L_DEF, TW = P*Q*DW;
  localparam int IAW = $clog2(IDEPTH_DEF);
  localparam int BLK = 32;
  localparam int X = 128, H = 128, T = 4;
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
  always_ff @(posedge clk) now <= now + 1;
  assign mem_rd_gnt = mem_rd_req && ($urandom % 4 != 0);
  assign mem_wr_gnt = mem_wr_req && ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
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
  int n_continue = 0, n_rewind = 0;
  always @(posedge clk) if (rst_n && dut.csb_start) begin
    if (dut.csb_sec.rewind) n_rewind++; else n_continue++;
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
  // load a model behind what the PEGroups already hold
  task automatic load_model(csb_model #(P,Q,K,L) m, int wo [K*L], int uo [K*L], int ro [K*L], int co [K*L]);
    for (int g = 0; g < K*L; g++) begin
      foreach (m.tiles[g][a]) cfg(CFG_WEIGHT, g, wo[g] + a, m.tiles[g][a]);
      foreach (m.items[g][a]) cfg(CFG_UITEM,  g, uo[g] + a, TW'(m.items[g][a]));
      foreach (m.ridx[g][a])  cfg(CFG_ROWIDX, g, ro[g] + a, TW'(m.ridx[g][a]));
      foreach (m.cidx[g][a])  cfg(CFG_COLIDX, g, co[g] + a, TW'(m.cidx[g][a]));
    end
  endtask
  function automatic macro_inst_t csb_cmd(csb_model #(P,Q,K,L) m, bit rew, int a, int b);
    macro_inst_t mi = '0;
    mi.csb.rewind = rew; mi.csb.a_addr = vaddr_t'(a); mi.csb.b_addr = vaddr_t'(b);
    mi.csb.blk_m = 6'(m.blk_m); mi.csb.blk_n = 6'(m.blk_n);
    mi.csb.count_h = count_t'(m.count_h); mi.csb.count_v = count_t'(m.count_v);
    return mi;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    csb_model #(P,Q,K,L) m1, m2;
    int xs [T+1][X];
    int bias [3*H];
    int hv [], z1 [], z2 [], v1 [], v2 [], rh [];
    int zero_o [K*L], wo [K*L], uo [K*L], ro [K*L], co [K*L];
    static int cyc = 0, hs = 0, vs = 0, n_steps_ok = 0, n_nonzero = 0;
    macro_inst_t mi;
    foreach (hsh[g]) begin hsh[g] = 0; vsh[g] = 0; end
    mem_rd_rvalid = 0; mem_rd_rdata = '0;

    // M1 = [Wz; Wr; -Wz] over [h;x]; M2 = Wg over [x; r*h]
    m1 = new(BLK, BLK, (H + X) / (BLK*L), 3*H / (BLK*K));
    m1.randomize_matrix(15, 100, 12);
    for (int bi = 0; bi < H / BLK; bi++)
      for (int bj = 0; bj < (H + X) / BLK; bj++) begin
        m1.krow[2*H/BLK + bi][bj] = m1.krow[bi][bj];
        m1.kcol[2*H/BLK + bi][bj] = m1.kcol[bi][bj];
      end
    for (int r = 0; r < H; r++) foreach (m1.w[r][c]) m1.w[2*H + r][c] = -m1.w[r][c];
    m1.compile(1'b1);
    m2 = new(BLK, BLK, (X + H) / (BLK*L), H / (BLK*K));
    m2.randomize_matrix(15, 100, 12);
    m2.compile(1'b1);
    foreach (xs[t, c]) begin xs[t][c] = $signed($urandom % 513) - 256; dram[XBASE + t*X + c] = data_t'(xs[t][c]); end
    for (int r = 0; r < 2*H; r++) bias[r] = $signed($urandom % 129) - 64;
    for (int r = 0; r < H; r++) bias[2*H + r] = -bias[r];
    for (int a = 0; a < 2*H + X; a++) dram[ZBASE + a] = '0;

    repeat (3) @(posedge clk); rst_n = 1;

    foreach (zero_o[g]) begin
      zero_o[g] = 0;
      wo[g] = m1.tiles[g].size(); uo[g] = m1.items[g].size();
      ro[g] = m1.ridx[g].size();  co[g] = m1.cidx[g].size();
    end
    load_model(m1, zero_o, zero_o, zero_o, zero_o);
    load_model(m2, wo, uo, ro, co);
    foreach (bias[r]) cfg(CFG_BIAS, 0, r, TW'(data_t'(bias[r])));
    for (int r = 0; r < H; r++) cfg(CFG_BIAS, 0, ZB + r, '0);
    $display("GRU X=%0d H=%0d: M1 %0dx%0d and M2 %0dx%0d resident; shared items %0d/%0d horizontal, %0d/%0d vertical",
             X, H, m1.rows, m1.cols, m2.rows, m2.cols, m1.n_horiz, m2.n_horiz, m1.n_vert, m2.n_vert);

    // ---- prologue: A <- 0, B <- M1*0 = 0, E[0..H) <- 0, A[H..H+X) <- x_0
    mi = '0; mi.load.mem_addr = ZBASE; mi.load.count = count_t'(2*H + X);
    cfg_macro(0, mi);
    cfg_macro(1, csb_cmd(m1, 1'b1, 0, 0));
    mi = '0; mi.ew.count = count_t'(H); mi.ew.sum1_en = 1; mi.ew.bias_addr = vaddr_t'(ZB);
    mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 0, d: 0, e: 1}; mi.ew.dst_addr = '0;
    mi.load.mem_addr = XBASE; mi.load.count = count_t'(X); mi.load.a_addr = vaddr_t'(H);
    cfg_macro(2, mi);
    run(3, 1, cyc);

    // ---- GRU step program
    cfg_macro(0, csb_cmd(m1, 1'b1, 0, 0));
    mi = '0; mi.ew.count = count_t'(3*H); mi.ew.sum1_en = 1; mi.ew.sig_en = 1; mi.ew.act_src = DF_SUM1;
    mi.ew.dst = '{a: 0, c: 1, d: 0, e: 0}; mi.ew.dst_addr = '0;
    cfg_macro(1, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.act_src = DF_BUFC; mi.ew.act_addr = vaddr_t'(H);
    mi.ew.mult1_en = 1; mi.ew.m1_src = DF_BUFE; mi.ew.m1_addr = '0;
    mi.ew.dst = '{a: 1, c: 0, d: 0, e: 0}; mi.ew.dst_addr = vaddr_t'(H + X);
    cfg_macro(2, mi);
    cfg_macro(3, csb_cmd(m2, 1'b0, H, 3*H));
    mi = '0; mi.ew.count = count_t'(H); mi.ew.sum1_en = 1; mi.ew.b_addr = vaddr_t'(3*H); mi.ew.bias_addr = vaddr_t'(ZB);
    mi.ew.tanh_en = 1; mi.ew.act_src = DF_SUM1; mi.ew.mult1_en = 1; mi.ew.m1_src = DF_BUFC; mi.ew.m1_addr = '0;
    mi.ew.mult2_en = 1; mi.ew.m2c_addr = vaddr_t'(2*H); mi.ew.m2e_addr = '0; mi.ew.sum2_en = 1;
    mi.ew.dst = '{a: 1, c: 0, d: 0, e: 1}; mi.ew.dst_addr = '0;
    cfg_macro(4, mi);
    mi = '0; mi.store.e_addr = '0; mi.store.count = count_t'(H); mi.store.mem_addr = HBASE; mi.store.mem_stride = H;
    mi.load.mem_addr = XBASE + X; mi.load.mem_stride = X; mi.load.count = count_t'(X); mi.load.a_addr = vaddr_t'(H);
    cfg_macro(5, mi);
    run(6, T, cyc);
    $display("%0d GRU steps: %0d cycles", T, cyc);

    // ---- golden model
    hv = new[H]; rh = new[H]; v1 = new[H + X]; v2 = new[X + H];
    foreach (hv[r]) hv[r] = 0;
    for (int t = 0; t < T; t++) begin
      automatic int bad = 0;
      automatic data_t gz [H], gr [H], gnz [H];
      for (int r = 0; r < H; r++) v1[r] = hv[r];
      for (int c = 0; c < X; c++) v1[H + c] = xs[t][c];
      m1.mvm(v1, z1);
      for (int r = 0; r < H; r++) begin
        gz[r]  = g_sig(fx_add(data_t'(z1[r]),       data_t'(bias[r])));
        gr[r]  = g_sig(fx_add(data_t'(z1[H + r]),   data_t'(bias[H + r])));
        gnz[r] = g_sig(fx_add(data_t'(z1[2*H + r]), data_t'(bias[2*H + r])));
        rh[r]  = int'(fx_mul(gr[r], data_t'(hv[r])));
      end
      for (int c = 0; c < X; c++) v2[c] = xs[t][c];
      for (int r = 0; r < H; r++) v2[X + r] = rh[r];
      m2.mvm(v2, z2);
      for (int r = 0; r < H; r++)
        hv[r] = int'(fx_add(fx_mul(g_tanh(fx_add(data_t'(z2[r]), '0)), gz[r]), fx_mul(gnz[r], data_t'(hv[r]))));
      for (int r = 0; r < H; r++) begin
        checks++;
        if (!dram.exists(HBASE + t*H + r) || int'(dram[HBASE + t*H + r]) != hv[r]) begin
          failures++; bad++;
          if (failures < 10) $display("step %0d h[%0d]: got %0d exp %0d", t, r, dram.exists(HBASE + t*H + r) ? int'(dram[HBASE + t*H + r]) : -99999, hv[r]);
        end
        if (hv[r] != 0) n_nonzero++;
      end
      if (bad == 0) n_steps_ok++;
    end

    foreach (hsh[g]) begin hs += hsh[g]; vs += vsh[g]; end
    $display("mechanisms: rewinding commands=%0d continuing commands=%0d horiz-share cycles=%0d vert-share cycles=%0d steps ok=%0d non-zero h=%0d",
             n_rewind, n_continue, hs, vs, n_steps_ok, n_nonzero);
    checks++; if (n_continue == 0)     begin failures++; $display("no continuing CSB command"); end
    checks++; if (hs == 0 || vs == 0)  begin failures++; $display("a sharing direction was not used"); end
    checks++; if (n_nonzero < T*H/2)   begin failures++; $display("h is mostly zero"); end
    checks++; if (n_steps_ok < 2)      begin failures++; $display("fewer than two correct time steps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
