// tb_ew_dataflow: runs the element-wise chain against testbench-held
// buffers (synchronous read, like the real ones) with random instructions
// covering every source select, activation, Mult1/Mult2/Sum2 enable and
// destination mask, and compares each written word with a reference computed
// here from the instruction's formula. The activation reference is the
// exact sigmoid/tanh in real arithmetic, so words that went through an
// activation are compared with a tolerance; all others must match exactly.
// Also checks the rate: count elements take count + 4 cycles to done.
module tb_ew_dataflow;
  import csb_pkg::*;
  localparam int D = 1 << VBUF_AW;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  sec_ew_t inst;
  vaddr_t b_a, bias_a, c_a [3], d_a [2], e_a [3];
  data_t  b_d, bias_d, c_d [3], d_d [2], e_d [3];
  logic we_a, we_c, we_d, we_e; vaddr_t wa; data_t wd;
  data_t mb [D], mbias [D], mc [D], md [D], me [D], ma [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ew_dataflow dut (.clk, .rst_n, .start, .inst, .busy, .done,
    .b_addr(b_a), .b_data(b_d), .bias_addr(bias_a), .bias_data(bias_d),
    .c_addr(c_a), .c_data(c_d), .d_addr(d_a), .d_data(d_d), .e_addr(e_a), .e_data(e_d),
    .we_a, .we_c, .we_d, .we_e, .wr_addr(wa), .wr_data(wd));
  always_ff @(posedge clk) begin
    b_d <= mb[b_a]; bias_d <= mbias[bias_a];
    for (int i = 0; i < 3; i++) c_d[i] <= mc[c_a[i]];
    for (int i = 0; i < 2; i++) d_d[i] <= md[d_a[i]];
    for (int i = 0; i < 3; i++) e_d[i] <= me[e_a[i]];
    if (we_a) ma[wa] <= wd;
    if (we_c) mc[wa] <= wd;
    if (we_d) md[wa] <= wd;
    if (we_e) me[wa] <= wd;
  end

  function automatic real r16(data_t v); return real'(v) / 256.0; endfunction
  function automatic real sat(real v);
    if (v > 127.996) return 127.996; if (v < -128.0) return -128.0; return v;
  endfunction
  function automatic real pick(dfidx_e s, int a, real s1);
    case (s) DF_SUM1: return s1; DF_BUFC: return r16(mc[a]); DF_BUFD: return r16(md[a]); default: return r16(me[a]); endcase
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    inst = '0;
    for (int i = 0; i < D; i++) begin
      mb[i] = data_t'($signed($urandom % 2049) - 1024); mbias[i] = data_t'($signed($urandom % 513) - 256);
      mc[i] = data_t'($signed($urandom % 1025) - 512);  md[i] = data_t'($signed($urandom % 1025) - 512);
      me[i] = data_t'($signed($urandom % 1025) - 512);  ma[i] = 0;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic sec_ew_t s = '0;
      automatic real expv [];
      automatic bit  actd;
      automatic int  cyc = 0;
      s.count = count_t'(1 + $urandom % 40);
      s.sum1_en = 1'($urandom % 2); s.b_addr = vaddr_t'($urandom % 1000); s.bias_addr = vaddr_t'($urandom % 1000);
      s.act_src = dfidx_e'($urandom % 4); if (!s.sum1_en && s.act_src == DF_SUM1) s.act_src = DF_BUFC;
      s.act_addr = vaddr_t'(1000 + $urandom % 1000);
      case ($urandom % 3) 0: s.sig_en = 1; 1: s.tanh_en = 1; default: ; endcase
      s.mult1_en = 1'($urandom % 2); s.m1_src = dfidx_e'(1 + $urandom % 3); s.m1_addr = vaddr_t'(2000 + $urandom % 1000);
      s.mult2_en = 1'($urandom % 2); s.m2c_addr = vaddr_t'(3000 + $urandom % 1000); s.m2e_addr = vaddr_t'(3000 + $urandom % 1000);
      s.sum2_en = 1'($urandom % 2);
      s.dst = dstmask_t'(4'(1 + $urandom % 15)); s.dst_addr = vaddr_t'(5000 + $urandom % 2000);
      actd = s.sig_en || s.tanh_en;
      expv = new[int'(s.count)];
      foreach (expv[e]) begin
        real s1, a, y, m1, m2, o;
        s1 = sat(r16(mb[int'(s.b_addr) + e]) + r16(mbias[int'(s.bias_addr) + e]));
        a  = pick(s.act_src, int'(s.act_addr) + e, s1);
        if (s.sig_en) y = 1.0 / (1.0 + $exp(-a));
        else if (s.tanh_en) y = ($exp(a) - $exp(-a)) / ($exp(a) + $exp(-a));
        else y = a;
        m1 = s.mult1_en ? sat(y * pick(s.m1_src, int'(s.m1_addr) + e, 0.0)) : y;
        m2 = s.mult2_en ? sat(r16(mc[int'(s.m2c_addr) + e]) * r16(me[int'(s.m2e_addr) + e])) : 0.0;
        o  = s.sum2_en ? sat(m1 + m2) : m1;
        expv[e] = o;
      end
      @(negedge clk); inst = s; start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++; if (cyc != int'(s.count) + 3) begin failures++; $display("t%0d: %0d cycles for %0d elements", t, cyc, s.count); end
      foreach (expv[e]) begin
        real tol;
        // tolerance: 1 LSB per rounding step, plus the activation error scaled by the Mult1 operand
        tol = 4.0 / 256.0;
        if (actd) tol += 0.05 * (s.mult1_en ? (2.0 + (pick(s.m1_src, int'(s.m1_addr) + e, 0.0) < 0 ? -pick(s.m1_src, int'(s.m1_addr) + e, 0.0) : pick(s.m1_src, int'(s.m1_addr) + e, 0.0))) : 1.0);
        for (int b = 0; b < 4; b++) if (s.dst[3-b]) begin
          real got;
          case (b) 0: got = r16(ma[int'(s.dst_addr) + e]); 1: got = r16(mc[int'(s.dst_addr) + e]); 2: got = r16(md[int'(s.dst_addr) + e]); default: got = r16(me[int'(s.dst_addr) + e]); endcase
          checks++;
          if (got - expv[e] > tol || expv[e] - got > tol) begin
            failures++; if (failures < 10) $display("t%0d e%0d dst%0d got %f exp %f", t, e, b, got, expv[e]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
