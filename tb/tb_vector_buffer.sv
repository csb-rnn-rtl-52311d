// tb_vector_buffer: writes random words through two write ports and reads
// them back through three read ports, checking the one-cycle read latency
// and the data against a model array kept by the testbench. Some cycles
// write the same address on both ports, where the higher-numbered port must
// win.
module tb_vector_buffer;
  import csb_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0;
  logic we [2]; logic [5:0] wa [2]; data_t wd [2];
  logic [5:0] ra [3]; data_t rd [3];
  data_t model [DEPTH];
  bit    known [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vector_buffer #(.DEPTH(DEPTH), .NRD(3), .NWR(2)) dut (.clk, .we, .wr_addr(wa), .wr_data(wd), .rd_addr(ra), .rd_data(rd));
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [5:0] pra [3];
    for (int i = 0; i < DEPTH; i++) known[i] = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      for (int w = 0; w < 2; w++) begin
        we[w] = 1'($urandom % 2); wa[w] = 6'($urandom); wd[w] = data_t'($urandom);
      end
      // every 8th cycle both ports write one address: port 1 must win
      if (c % 8 == 0) begin we[0] = 1; we[1] = 1; wa[1] = wa[0]; end
      for (int r = 0; r < 3; r++) ra[r] = 6'($urandom);
      pra = ra;
      @(posedge clk); #1;
      // read data reflects contents before this edge's writes
      for (int r = 0; r < 3; r++) if (known[pra[r]]) begin
        checks++;
        if (rd[r] != model[pra[r]]) begin failures++; $display("port %0d addr %0d got %0d exp %0d", r, pra[r], rd[r], model[pra[r]]); end
      end
      for (int w = 0; w < 2; w++) if (we[w]) begin model[wa[w]] = wd[w]; known[wa[w]] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
