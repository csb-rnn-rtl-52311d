// load_unit: the LoadUnit, which streams an input frame from external memory
// into BufferA.
//
// For a load section it issues `count` read requests to consecutive word
// addresses starting at mem_addr, each held until the memory grants it
// (req/gnt), and writes the answers, which return in request order
// (rvalid/rdata, any latency), to BufferA[a_addr + n]. Outstanding requests
// are not limited beyond `count`. A memory that keeps `gnt` low stalls the
// unit. The paper gives the unit's operands (Addr(Memory), Count,
// Addr(BufferA)); the memory handshake is this design's choice.
module load_unit
  import csb_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [MAW-1:0] mem_addr,
  input  count_t         count,
  input  vaddr_t         a_addr,
  output logic           busy,
  output logic           done,
  // external memory read channel
  output logic           rd_req,
  output logic [MAW-1:0] rd_addr,
  input  logic           rd_gnt,
  input  logic           rd_rvalid,
  input  data_t          rd_rdata,
  // BufferA write port
  output logic           a_we,
  output vaddr_t         a_wr_addr,
  output data_t          a_wr_data
);
  count_t         n_req, n_rsp, cnt;
  logic [MAW-1:0] base;
  vaddr_t         abase;
  logic           active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_req <= '0; n_rsp <= '0; cnt <= '0; base <= '0; abase <= '0;
      active <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start && count != '0) begin
          active <= 1'b1; n_req <= '0; n_rsp <= '0; cnt <= count;
          base <= mem_addr; abase <= a_addr;
        end
      end else begin
        if (rd_req && rd_gnt) n_req <= n_req + 1'b1;
        if (rd_rvalid) begin
          n_rsp <= n_rsp + 1'b1;
          if (n_rsp + 1'b1 == cnt) begin
            active <= 1'b0; done <= 1'b1;
          end
        end
      end
    end
  end

  assign busy      = active;
  assign rd_req    = active && (n_req < cnt);
  assign rd_addr   = base + MAW'(n_req);
  assign a_we      = active && rd_rvalid;
  assign a_wr_addr = abase + vaddr_t'(n_rsp);
  assign a_wr_data = rd_rdata;
endmodule
