// tb_block_neuron_buffer: preloads random neurons one per cycle, then reads
// them back through all ports with random index vectors and compares with
// the preloaded values.
module tb_block_neuron_buffer;
  import csb_pkg::*;
  localparam int Q = 4, MAXBLK = 32, NPORT = 8;
  logic clk = 0, we = 0; logic [4:0] wa; data_t wd;
  logic [4:0] idx [NPORT][Q]; data_t rd [NPORT][Q];
  data_t model [MAXBLK];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  block_neuron_buffer #(.Q(Q), .MAXBLK(MAXBLK), .NPORT(NPORT)) dut (.clk, .wr_en(we), .wr_addr(wa), .wr_data(wd), .rd_idx(idx), .rd_data(rd));
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int a = 0; a < MAXBLK; a++) begin
        @(negedge clk); we = 1; wa = 5'(a); wd = data_t'($urandom); model[a] = wd;
      end
      @(negedge clk); we = 0;
      for (int t = 0; t < 50; t++) begin
        for (int i = 0; i < NPORT; i++) for (int q = 0; q < Q; q++) idx[i][q] = 5'($urandom);
        #1;
        for (int i = 0; i < NPORT; i++) for (int q = 0; q < Q; q++) begin
          checks++;
          if (rd[i][q] != model[idx[i][q]]) begin failures++; $display("port %0d lane %0d idx %0d", i, q, idx[i][q]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
