// tb_reorder_logic: offers bundles of K random Q16.16 sums with random row
// iteration, block height and row, and checks that exactly K writes follow,
// one per cycle, to base + (iter*K + k)*blk_n + r, carrying the saturated
// Q8.8 value; also checks that in_ready is low for the K busy cycles.
module tb_reorder_logic;
  import csb_pkg::*;
  localparam int K = 4;
  logic clk = 0, rst_n = 0, iv = 0, ir, we, idle;
  acc_t sums [K]; vaddr_t base, oa; count_t it; logic [5:0] bn, r; data_t od;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  reorder_logic #(.K(K)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_sum(sums), .in_base(base),
    .in_row_iter(it), .in_blk_n(bn), .in_r(r), .out_we(we), .out_addr(oa), .out_data(od), .idle);
  function automatic data_t satref(acc_t a);
    longint v = longint'(a) >>> 8;
    if (v > 32767) return 16'sh7fff; if (v < -32768) return 16'sh8000; return data_t'(v);
  endfunction
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    acc_t s [K]; vaddr_t b; count_t i2; logic [5:0] n2, r2;
    base = 0; it = 0; bn = 1; r = 0; for (int k = 0; k < K; k++) sums[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int k = 0; k < K; k++) s[k] = acc_t'($urandom) >>> ($urandom % 16);
      b = vaddr_t'($urandom); i2 = count_t'($urandom % 8); n2 = 6'(1 + $urandom % 32); r2 = 6'($urandom % n2);
      sums = s; base = b; it = i2; bn = n2; r = r2; iv = 1;
      checks++; if (!ir) begin failures++; $display("not ready"); end
      @(posedge clk); @(negedge clk); iv = 0;
      for (int k = 0; k < K; k++) begin
        checks += 3;
        if (!we) failures++;
        if (oa != vaddr_t'((int'(i2) * K + k) * int'(n2) + int'(r2) + int'(b))) begin failures++; $display("addr k=%0d got %0d", k, oa); end
        if (od != satref(s[k])) begin failures++; $display("data k=%0d got %0d exp %0d", k, od, satref(s[k])); end
        if (k < K) begin checks++; if (ir) failures++; end
        @(negedge clk);
      end
      checks++; if (we || !ir) begin failures++; $display("extra write"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
