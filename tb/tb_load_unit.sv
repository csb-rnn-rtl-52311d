// tb_load_unit: drives the LoadUnit against a behavioural external memory
// that grants requests at random (stalls) and returns data in order after a
// random 1..6-cycle latency. Checks that every BufferA write lands at
// a_addr + i with memory word mem_addr + i, that exactly `count` words are
// written, that done pulses once and busy covers the transfer, and that
// stalls actually happened.
module tb_load_unit;
  import csb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [MAW-1:0] mem_addr = '0; count_t count = '0; vaddr_t a_addr = '0;
  logic rd_req, rd_gnt, rd_rvalid; logic [MAW-1:0] rd_addr; data_t rd_rdata;
  logic a_we; vaddr_t a_wr_addr; data_t a_wr_data;
  int checks = 0, failures = 0, stalls = 0;
  always #5 clk = ~clk;
  load_unit dut (.*);

  function automatic data_t memf(logic [MAW-1:0] a); return data_t'(a * 40503 + 7); endfunction

  // memory: random grant, in-order response pipeline with random latency
  logic [MAW-1:0] q_addr [$]; int q_due [$]; int now = 0;
  always_ff @(posedge clk) now <= now + 1;
  assign rd_gnt = rd_req && ($urandom % 3 != 0);
  always @(posedge clk) begin
    if (rd_req && !rd_gnt) stalls++;
    if (rd_req && rd_gnt) begin
      q_addr.push_back(rd_addr);
      q_due.push_back(((q_due.size() > 0) ? q_due[$] : now) + 1 + $urandom % 3);
    end
  end
  always @(negedge clk) begin
    rd_rvalid = 0; rd_rdata = '0;
    if (q_due.size() > 0 && q_due[0] <= now) begin
      rd_rvalid = 1; rd_rdata = memf(q_addr[0]);
      void'(q_addr.pop_front()); void'(q_due.pop_front());
    end
  end

  int nwr; data_t got [int];
  always @(posedge clk) if (a_we) begin nwr++; got[int'(a_wr_addr)] = a_wr_data; end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rd_rvalid = 0; rd_rdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int ndone = 0, cyc = 0;
      nwr = 0; got.delete();
      @(negedge clk);
      mem_addr = $urandom % 100000; count = count_t'(1 + $urandom % 300); a_addr = vaddr_t'($urandom % 7000);
      start = 1; @(negedge clk); start = 0;
      while (busy && cyc < 5000) begin if (done) ndone++; @(negedge clk); cyc++; end
      if (done) ndone++;
      repeat (3) @(negedge clk);
      checks++; if (ndone != 1) begin failures++; $display("t%0d done pulses %0d", t, ndone); end
      checks++; if (nwr != int'(count)) begin failures++; $display("t%0d wrote %0d of %0d", t, nwr, count); end
      for (int i = 0; i < int'(count); i++) begin
        checks++;
        if (!got.exists(int'(a_addr) + i) || got[int'(a_addr) + i] !== memf(mem_addr + i)) begin
          failures++; if (failures < 10) $display("t%0d word %0d wrong", t, i);
        end
      end
    end
    checks++; if (stalls == 0) begin failures++; $display("no memory stalls exercised"); end
    $display("memory stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
