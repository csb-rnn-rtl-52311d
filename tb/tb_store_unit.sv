// tb_store_unit: drives the StoreUnit with a testbench BufferE (synchronous
// read) and a memory write port that grants at random. Checks every memory
// write goes to mem_addr + i with BufferE word e_addr + i, in order, that
// exactly `count` writes happen, that done pulses once, that wr_addr/wr_data
// stay stable while a request is stalled, and that stalls happened.
module tb_store_unit;
  import csb_pkg::*;
  localparam int D = 1 << VBUF_AW;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [MAW-1:0] mem_addr = '0; count_t count = '0; vaddr_t e_addr = '0;
  vaddr_t e_rd_addr; data_t e_rd_data;
  logic wr_req, wr_gnt; logic [MAW-1:0] wr_addr; data_t wr_data;
  data_t emem [D];
  int checks = 0, failures = 0, stalls = 0, nwr = 0, rate;
  always #5 clk = ~clk;
  store_unit dut (.*);
  always_ff @(posedge clk) e_rd_data <= emem[e_rd_addr];
  assign wr_gnt = wr_req && ($urandom % 4 < rate);

  logic held; logic [MAW-1:0] h_addr; data_t h_data;
  always @(posedge clk) if (rst_n) begin
    if (wr_req && held) begin
      checks++; if (wr_addr !== h_addr || wr_data !== h_data) begin failures++; $display("request changed while stalled"); end
    end
    held <= wr_req && !wr_gnt; h_addr <= wr_addr; h_data <= wr_data;
    if (wr_req && !wr_gnt) stalls++;
    if (wr_req && wr_gnt) begin
      checks++;
      if (wr_addr !== mem_addr + nwr || wr_data !== emem[int'(e_addr) + nwr]) begin
        failures++; if (failures < 10) $display("write %0d: addr %0d data %0d", nwr, wr_addr, wr_data);
      end
      nwr++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    held = 0; rate = 4;
    foreach (emem[i]) emem[i] = data_t'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int ndone = 0, cyc = 0;
      nwr = 0; rate = (t < 5) ? 4 : 1 + $urandom % 4;
      @(negedge clk);
      mem_addr = $urandom % 100000; count = count_t'(1 + $urandom % 300); e_addr = vaddr_t'($urandom % 7000);
      start = 1; @(negedge clk); start = 0;
      while (busy && cyc < 5000) begin if (done) ndone++; @(negedge clk); cyc++; end
      if (done) ndone++;
      repeat (2) @(negedge clk);
      checks++; if (ndone != 1) begin failures++; $display("t%0d done pulses %0d", t, ndone); end
      checks++; if (nwr != int'(count)) begin failures++; $display("t%0d wrote %0d of %0d", t, nwr, count); end
      if (rate == 4) begin
        checks++; if (cyc > 2 * int'(count) + 3) begin failures++; $display("t%0d too slow: %0d cycles", t, cyc); end
      end
    end
    checks++; if (stalls == 0) begin failures++; $display("no stalls exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
