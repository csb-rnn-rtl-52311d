// store_unit: the StoreUnit, which writes an output frame from BufferE to
// external memory.
//
// For a store section it reads BufferE[e_addr + n] for n = 0..count-1 and
// issues one write request per word to mem_addr + n, held until the memory
// grants it (req/gnt). Each word is read from BufferE (one cycle) into an
// output register and then offered to memory, so with `gnt` always high one
// word leaves every two cycles; a memory that holds `gnt` low stalls it.
// The paper gives the unit's operands (Addr(BufferE), Count, Addr(Memory));
// the memory handshake is this design's choice.
module store_unit
  import csb_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  vaddr_t         e_addr,
  input  count_t         count,
  input  logic [MAW-1:0] mem_addr,
  output logic           busy,
  output logic           done,
  // BufferE read port (synchronous)
  output vaddr_t         e_rd_addr,
  input  data_t          e_rd_data,
  // external memory write channel
  output logic           wr_req,
  output logic [MAW-1:0] wr_addr,
  output data_t          wr_data,
  input  logic           wr_gnt
);
  count_t         cnt, n_rd, n_wr;
  logic [MAW-1:0] base;
  vaddr_t         ebase;
  logic           active, have;  // have: wr_data holds an unsent word
  logic           rd_pend;       // a BufferE read is returning this cycle
  logic           fire;

  assign fire = wr_req && wr_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; n_rd <= '0; n_wr <= '0; base <= '0; ebase <= '0;
      active <= 1'b0; have <= 1'b0; rd_pend <= 1'b0; wr_data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start && count != '0) begin
          active <= 1'b1; cnt <= count; n_rd <= '0; n_wr <= '0;
          base <= mem_addr; ebase <= e_addr; have <= 1'b0; rd_pend <= 1'b0;
        end
      end else begin
        // issue a BufferE read when the output register will be free
        rd_pend <= 1'b0;
        if (n_rd < cnt && !rd_pend && (!have || fire)) begin
          n_rd <= n_rd + 1'b1; rd_pend <= 1'b1;
        end
        if (fire) begin
          n_wr <= n_wr + 1'b1;
          have <= 1'b0;
          if (n_wr + 1'b1 == cnt) begin
            active <= 1'b0; done <= 1'b1;
          end
        end
        if (rd_pend) begin
          wr_data <= e_rd_data; have <= 1'b1;
        end
      end
    end
  end

  assign busy      = active;
  assign e_rd_addr = ebase + vaddr_t'(n_rd);
  assign wr_req    = active && have;
  assign wr_addr   = base + MAW'(n_wr);
endmodule
