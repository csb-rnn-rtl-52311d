// tb_csb_pegroup: tests one PEGroup on its own. The testbench plays the two
// BlockNeuronBuffers a PEGroup can read (its own column and the column to
// the left) and the PEGroup below it. Each block iteration programs a random
// local item, horizontal item and vertical item (some empty). After the
// iteration it checks:
//   * the NeuronAccumBuffer holds local-item + horizontal-item row sums plus
//     the vertical contributions injected from "below";
//   * the row sums sent upward on the vertical path equal the vertical item's
//     products;
//   * busy lasts exactly 1 header cycle per item, one cycle per pass and
//     the pipeline drain.
module tb_csb_pegroup;
  import csb_pkg::*;
  localparam int P = 4, Q = 4, TW = P*Q*DW;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; cfg_target_e tgt; logic [31:0] ca; logic [TW-1:0] cd;
  logic start_mvm = 0, iter_start = 0, acc_clear = 0, busy, left;
  logic [4:0] idx [Q]; data_t nd [Q];
  logic [P-1:0] vov, viv; logic [4:0] voa [P], via [P]; acc_t vod [P], vid [P];
  logic [4:0] ra; acc_t rd;
  data_t nrn_own [32], nrn_left [32];
  longint up_sum [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  csb_pegroup #(.WDEPTH(256), .UDEPTH(64), .XDEPTH(256)) dut (
    .clk, .rst_n, .cfg_we, .cfg_target(tgt), .cfg_addr(ca), .cfg_wdata(cd),
    .start_mvm, .iter_start, .acc_clear, .busy,
    .nrn_left(left), .nrn_idx(idx), .nrn_data(nd),
    .vout_valid(vov), .vout_addr(voa), .vout_data(vod),
    .vin_valid(viv), .vin_addr(via), .vin_data(vid),
    .acc_rd_addr(ra), .acc_rd_data(rd));

  always_comb for (int q = 0; q < Q; q++) nd[q] = left ? nrn_left[idx[q]] : nrn_own[idx[q]];

  task automatic cfg(cfg_target_e t, int a, logic [TW-1:0] d);
    @(negedge clk); cfg_we = 1; tgt = t; ca = a; cd = d; @(posedge clk); #1 cfg_we = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    static int wa = 0, ua = 0, xr = 0, xc = 0;
    viv = 0; for (int p = 0; p < P; p++) begin via[p] = 0; vid[p] = 0; end
    ra = 0; tgt = CFG_WEIGHT; ca = 0; cd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start_mvm = 1; @(negedge clk); start_mvm = 0;
    for (int iter = 0; iter < 12; iter++) begin
      automatic longint exp_loc [32], exp_up [32];
      automatic int t = 0, lie = -100, c, cyc;
      for (int r = 0; r < 32; r++) begin
        exp_loc[r] = 0; exp_up[r] = 0; up_sum[r] = 0;
        nrn_own[r] = data_t'($signed($urandom % 801) - 400);
        nrn_left[r] = data_t'($signed($urandom % 801) - 400);
      end
      for (int a = 0; a < 3; a++) begin
        automatic int tn = (iter % 4 == a) ? 0 : 1 + $urandom % 32;
        automatic int tm = 1 + $urandom % 32;
        automatic int rs [$], cs [$];
        automatic uitem_t u;
        // distinct random rows / columns
        for (int r = 0; r < 32; r++) if (rs.size() < tn && ($urandom % (32 - r)) < tn - rs.size()) rs.push_back(r);
        for (int r = 0; r < 32; r++) if (cs.size() < tm && ($urandom % (32 - r)) < tm - cs.size()) cs.push_back(r);
        rs.shuffle(); cs.shuffle();
        u.sharing = sharing_e'(a); u.tn = 7'(rs.size()); u.tm = 7'(cs.size());
        cfg(CFG_UITEM, ua++, TW'(u));
        t += 1;
        if (rs.size() == 0) continue;
        for (int rp = 0; rp < (rs.size() + P - 1) / P; rp++) begin
          automatic logic [TW-1:0] e = '0;
          for (int p = 0; p < P; p++) if (rp*P+p < rs.size()) e[p*5 +: 5] = 5'(rs[rp*P+p]);
          cfg(CFG_ROWIDX, xr++, e);
        end
        for (int cp = 0; cp < (cs.size() + Q - 1) / Q; cp++) begin
          automatic logic [TW-1:0] e = '0;
          for (int q = 0; q < Q; q++) if (cp*Q+q < cs.size()) e[q*5 +: 5] = 5'(cs[cp*Q+q]);
          cfg(CFG_COLIDX, xc++, e);
        end
        for (int rp = 0; rp < (rs.size() + P - 1) / P; rp++)
          for (int cp = 0; cp < (cs.size() + Q - 1) / Q; cp++) begin
            automatic logic [TW-1:0] tile = '0;
            for (int p = 0; p < P; p++) for (int q = 0; q < Q; q++)
              if (rp*P+p < rs.size() && cp*Q+q < cs.size()) begin
                automatic int wv = $signed($urandom % 601) - 300;
                automatic data_t nv = (a == 1) ? nrn_left[cs[cp*Q+q]] : nrn_own[cs[cp*Q+q]];
                tile[(p*Q+q)*DW +: DW] = DW'(wv);
                if (a == 2) exp_up[rs[rp*P+p]] += longint'(wv) * longint'(nv);
                else        exp_loc[rs[rp*P+p]] += longint'(wv) * longint'(nv);
              end
            cfg(CFG_WEIGHT, wa++, tile);
          end
        t += ((rs.size() + P - 1) / P) * ((cs.size() + Q - 1) / Q); lie = t;
      end
      c = (t > lie + 2) ? t : lie + 2;
      // clear, then run the iteration while injecting vertical contributions
      @(negedge clk); acc_clear = 1; @(negedge clk); acc_clear = 0;
      iter_start = 1; @(negedge clk); iter_start = 0; cyc = 0;
      while (busy) begin
        viv = P'($urandom);
        for (int p = 0; p < P; p++) begin
          via[p] = 5'($urandom); vid[p] = acc_t'($signed($urandom % 2001) - 1000);
          if (viv[p]) exp_loc[via[p]] += longint'(vid[p]);
          if (vov[p]) up_sum[voa[p]] += longint'(vod[p]);
        end
        @(negedge clk); cyc++;
      end
      viv = 0;
      checks++; if (cyc != c + 1) begin failures++; $display("iter %0d busy %0d cycles, expected %0d", iter, cyc, c + 1); end
      for (int r = 0; r < 32; r++) begin
        ra = 5'(r); #1;
        checks += 2;
        if (longint'(rd) != exp_loc[r]) begin failures++; $display("iter %0d acc row %0d got %0d exp %0d", iter, r, rd, exp_loc[r]); end
        if (up_sum[r] != exp_up[r]) begin failures++; $display("iter %0d up row %0d got %0d exp %0d", iter, r, up_sum[r], exp_up[r]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
