// tb_lstm2_workload: runs a two-layer stacked LSTM (the shape of the
// multi-layer translation, stock-price, sentiment and question-answering
// workloads) on the accelerator at its default parameters, for several time
// steps, and compares every output h2_t of the second layer bit-exactly
// with a model in this file.
//
// Both layers' CSB matrices stay resident in the PEGroups, one after the
// other: the layer-1 product rewinds the weight and micro-instruction
// pointers, the layer-2 product continues after it. BufferA holds
// [x ; h1 ; h2], so layer 1 reads [x;h1] and layer 2 reads [h1;h2], and
// layer 1's new h1_t is written exactly where layer 2 reads it.
//   layer l (l = 1, 2), five instructions each:
//     CSB   B[0..4H) = W_l * A[a_l ..]                   (rewind for l = 1)
//     chain C[0..3H) = sigmoid(B + bias_l)               i, f, o
//     chain D[0..H)  = tanh(B[3H..] + bias_l[3H..])      g
//     chain E[c_l]   = D * C[i] + C[f] * E[c_l]
//     chain A[h_l], E[h_l] = tanh(E[c_l]) * C[o]
//   then StoreUnit h2_t -> memory || LoadUnit x_t+1 -> A[0..X)
module tb_lstm2_workload;
  import csb_pkg::*;
  import csb_tb_pkg::*;
  localparam int P = P_DEF, Q = Q_DEF, K = K_DEF, L = L_DEF, TW = P*Q*DW;
  localparam int IAW = $clog2(IDEPTH_DEF);
  localparam int BLK = 32;
  localparam int X = 64, H = 64, T = 4;
  localparam int EC = 4096;                   // c1 at EC, c2 at EC+H (BufferE)
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

  int n_continue = 0;
  always @(posedge clk) if (rst_n && dut.csb_start && !dut.csb_sec.rewind) n_continue++;

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
  // the four element-wise instructions of one LSTM layer
  task automatic cfg_layer(int pc, int bias_o, int ec, int hdst);
    macro_inst_t mi;
    mi = '0; mi.ew.count = count_t'(3*H); mi.ew.sum1_en = 1; mi.ew.bias_addr = vaddr_t'(bias_o);
    mi.ew.sig_en = 1; mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 1, d: 0, e: 0}; mi.ew.dst_addr = '0;
    cfg_macro(pc, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.sum1_en = 1; mi.ew.b_addr = vaddr_t'(3*H); mi.ew.bias_addr = vaddr_t'(bias_o + 3*H);
    mi.ew.tanh_en = 1; mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 0, d: 1, e: 0}; mi.ew.dst_addr = '0;
    cfg_macro(pc + 1, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.act_src = DF_BUFD; mi.ew.mult1_en = 1; mi.ew.m1_src = DF_BUFC;
    mi.ew.mult2_en = 1; mi.ew.m2c_addr = vaddr_t'(H); mi.ew.m2e_addr = vaddr_t'(ec); mi.ew.sum2_en = 1;
    mi.ew.dst = '{a: 0, c: 0, d: 0, e: 1}; mi.ew.dst_addr = vaddr_t'(ec);
    cfg_macro(pc + 2, mi);
    mi = '0; mi.ew.count = count_t'(H); mi.ew.act_src = DF_BUFE; mi.ew.act_addr = vaddr_t'(ec); mi.ew.tanh_en = 1;
    mi.ew.mult1_en = 1; mi.ew.m1_src = DF_BUFC; mi.ew.m1_addr = vaddr_t'(2*H);
    mi.ew.dst = '{a: 1, c: 0, d: 0, e: 1}; mi.ew.dst_addr = vaddr_t'(hdst);
    cfg_macro(pc + 3, mi);
  endtask

  // one LSTM layer step of the golden model
  function automatic void g_layer(csb_model #(P,Q,K,L) m, int bias [], int bo, int vin [], ref int hv [], ref int cv []);
    int z [];
    m.mvm(vin, z);
    for (int r = 0; r < H; r++) begin
      data_t gi, gf, go, gg;
      gi = g_sig (fx_add(data_t'(z[r]),       data_t'(bias[bo + r])));
      gf = g_sig (fx_add(data_t'(z[H + r]),   data_t'(bias[bo + H + r])));
      go = g_sig (fx_add(data_t'(z[2*H + r]), data_t'(bias[bo + 2*H + r])));
      gg = g_tanh(fx_add(data_t'(z[3*H + r]), data_t'(bias[bo + 3*H + r])));
      cv[r] = int'(fx_add(fx_mul(gg, gi), fx_mul(gf, data_t'(cv[r]))));
      hv[r] = int'(fx_mul(g_tanh(data_t'(cv[r])), go));
    end
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    csb_model #(P,Q,K,L) m1, m2;
    int xs [T+1][X];
    int bias [];
    int h1 [], c1 [], h2 [], c2 [], v [];
    int zero_o [K*L], wo [K*L], uo [K*L], ro [K*L], co [K*L];
    static int cyc = 0, n_steps_ok = 0, n_nonzero = 0;
    macro_inst_t mi;
    mem_rd_rvalid = 0; mem_rd_rdata = '0;

    m1 = new(BLK, BLK, (X + H) / (BLK*L), 4*H / (BLK*K));
    m1.randomize_matrix(15, 100, 16);
    m1.compile(1'b1);
    m2 = new(BLK, BLK, 2*H / (BLK*L), 4*H / (BLK*K));
    m2.randomize_matrix(15, 100, 16);
    m2.compile(1'b1);
    foreach (xs[t, c]) begin xs[t][c] = $signed($urandom % 513) - 256; dram[XBASE + t*X + c] = data_t'(xs[t][c]); end
    bias = new[8*H];
    foreach (bias[r]) bias[r] = $signed($urandom % 129) - 64;
    for (int a = 0; a < X + 2*H; a++) dram[ZBASE + a] = '0;

    repeat (3) @(posedge clk); rst_n = 1;
    foreach (zero_o[g]) begin
      zero_o[g] = 0;
      wo[g] = m1.tiles[g].size(); uo[g] = m1.items[g].size();
      ro[g] = m1.ridx[g].size();  co[g] = m1.cidx[g].size();
    end
    load_model(m1, zero_o, zero_o, zero_o, zero_o);
    load_model(m2, wo, uo, ro, co);
    foreach (bias[r]) cfg(CFG_BIAS, 0, r, TW'(data_t'(bias[r])));
    for (int r = 0; r < 2*H; r++) cfg(CFG_BIAS, 0, ZB + r, '0);

    // ---- prologue: A <- 0, B <- 0, c1 = c2 = 0, A[0..X) <- x_0
    mi = '0; mi.load.mem_addr = ZBASE; mi.load.count = count_t'(X + 2*H);
    cfg_macro(0, mi);
    cfg_macro(1, csb_cmd(m1, 1'b1, 0, 0));
    mi = '0; mi.ew.count = count_t'(2*H); mi.ew.sum1_en = 1; mi.ew.bias_addr = vaddr_t'(ZB);
    mi.ew.act_src = DF_SUM1; mi.ew.dst = '{a: 0, c: 0, d: 0, e: 1}; mi.ew.dst_addr = vaddr_t'(EC);
    mi.load.mem_addr = XBASE; mi.load.count = count_t'(X);
    cfg_macro(2, mi);
    run(3, 1, cyc);

    // ---- two-layer step program
    cfg_macro(0, csb_cmd(m1, 1'b1, 0, 0));
    cfg_layer(1, 0, EC, X);
    cfg_macro(5, csb_cmd(m2, 1'b0, X, 0));
    cfg_layer(6, 4*H, EC + H, X + H);
    mi = '0; mi.store.e_addr = vaddr_t'(X + H); mi.store.count = count_t'(H); mi.store.mem_addr = HBASE; mi.store.mem_stride = H;
    mi.load.mem_addr = XBASE + X; mi.load.mem_stride = X; mi.load.count = count_t'(X);
    cfg_macro(10, mi);
    run(11, T, cyc);
    $display("2-layer LSTM X=%0d H=%0d, %0d steps: %0d cycles", X, H, T, cyc);

    // ---- golden model
    h1 = new[H]; c1 = new[H]; h2 = new[H]; c2 = new[H]; v = new[X + H];
    foreach (h1[r]) begin h1[r] = 0; c1[r] = 0; h2[r] = 0; c2[r] = 0; end
    for (int t = 0; t < T; t++) begin
      automatic int bad = 0;
      for (int c = 0; c < X; c++) v[c] = xs[t][c];
      for (int r = 0; r < H; r++) v[X + r] = h1[r];
      g_layer(m1, bias, 0, v, h1, c1);
      v = new[2*H];
      for (int r = 0; r < H; r++) begin v[r] = h1[r]; v[H + r] = h2[r]; end
      g_layer(m2, bias, 4*H, v, h2, c2);
      v = new[X + H];
      for (int r = 0; r < H; r++) begin
        checks++;
        if (!dram.exists(HBASE + t*H + r) || int'(dram[HBASE + t*H + r]) != h2[r]) begin
          failures++; bad++;
          if (failures < 10) $display("step %0d h2[%0d]: got %0d exp %0d", t, r, dram.exists(HBASE + t*H + r) ? int'(dram[HBASE + t*H + r]) : -99999, h2[r]);
        end
        if (h2[r] != 0) n_nonzero++;
      end
      if (bad == 0) n_steps_ok++;
    end
    $display("continuing CSB commands=%0d steps ok=%0d non-zero h2=%0d", n_continue, n_steps_ok, n_nonzero);
    checks++; if (n_continue == 0)   begin failures++; $display("no continuing CSB command"); end
    checks++; if (n_nonzero < T*H/2) begin failures++; $display("h2 is mostly zero"); end
    checks++; if (n_steps_ok < 2)    begin failures++; $display("fewer than two correct time steps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
