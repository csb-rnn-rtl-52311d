// tb_csb_pe: self-checking test of csb_pe. Drives random weight/neuron pairs
// and the lane enable, and compares the registered product one cycle later
// with the integer product (zero when the lane is masked).
module tb_csb_pe;
  import csb_pkg::*;
  logic clk = 0, rst_n = 0, en;
  data_t w, x;
  acc_t prod;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  csb_pe dut (.clk, .rst_n, .en, .weight(w), .neuron(x), .prod);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint exp;
    en = 0; w = 0; x = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      w = data_t'($urandom); x = data_t'($urandom); en = ($urandom % 4) != 0;
      if (i < 4) begin w = (i[0]) ? 16'sh8000 : 16'sh7fff; x = (i[1]) ? 16'sh8000 : 16'sh7fff; en = 1; end
      exp = en ? longint'(w) * longint'(x) : 0;
      @(posedge clk); #1;
      checks++;
      if (longint'(prod) != exp) begin
        failures++; $display("mismatch w=%0d x=%0d en=%0d got %0d exp %0d", w, x, en, prod, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
