// tb_neuron_accum_buffer: drives random local and vertical contributions,
// including cycles where both paths and several lanes hit the same row, and
// checks every entry against a model that accumulates each contribution
// separately. Also checks clear.
module tb_neuron_accum_buffer;
  import csb_pkg::*;
  localparam int P = 4, MAXBLK = 32;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [P-1:0] lv, vv; logic [4:0] la [P], va [P]; acc_t ld [P], vd [P];
  logic [4:0] ra; acc_t rd;
  acc_t model [MAXBLK];
  int checks = 0, failures = 0, same_row = 0;
  always #5 clk = ~clk;
  neuron_accum_buffer #(.P(P), .MAXBLK(MAXBLK)) dut (.clk, .rst_n, .clear,
    .loc_valid(lv), .loc_addr(la), .loc_data(ld), .vin_valid(vv), .vin_addr(va), .vin_data(vd),
    .rd_addr(ra), .rd_data(rd));
  task automatic check_all();
    for (int r = 0; r < MAXBLK; r++) begin
      ra = 5'(r); #1; checks++;
      if (rd != model[r]) begin failures++; $display("row %0d got %0d exp %0d", r, rd, model[r]); end
    end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    lv = 0; vv = 0; ra = 0;
    for (int p = 0; p < P; p++) begin la[p] = 0; va[p] = 0; ld[p] = 0; vd[p] = 0; end
    for (int r = 0; r < MAXBLK; r++) model[r] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      lv = P'($urandom); vv = P'($urandom);
      for (int p = 0; p < P; p++) begin
        la[p] = 5'($urandom); va[p] = ($urandom % 3 == 0) ? la[p] : 5'($urandom);
        ld[p] = acc_t'($signed($urandom % 20001) - 10000); vd[p] = acc_t'($signed($urandom % 20001) - 10000);
        if (lv[p]) model[la[p]] += ld[p];
        if (vv[p]) model[va[p]] += vd[p];
        if (lv[p] && vv[p] && la[p] == va[p]) same_row++;
      end
      @(posedge clk);
      if (c % 50 == 49) begin @(negedge clk); lv = 0; vv = 0; check_all(); end
    end
    @(negedge clk); lv = 0; vv = 0; clear = 1; @(posedge clk); @(negedge clk); clear = 0;
    for (int r = 0; r < MAXBLK; r++) model[r] = 0;
    check_all();
    checks++; if (same_row == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
