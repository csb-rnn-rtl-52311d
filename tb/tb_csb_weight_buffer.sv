// tb_csb_weight_buffer: writes random contents into the four memories over
// the configuration bus, then reads them back (tiles, RowIdx and ColIdx with
// one cycle of latency, item headers combinationally) and compares.
module tb_csb_weight_buffer;
  import csb_pkg::*;
  localparam int P = 4, Q = 4, MAXBLK = 32, WDEPTH = 64, UDEPTH = 32, XDEPTH = 64;
  localparam int TW = P*Q*DW;
  logic clk = 0, cfg_we = 0; cfg_target_e tgt; logic [31:0] ca; logic [TW-1:0] cd;
  logic [5:0] wa, ra, cxa; logic [4:0] ua;
  logic [TW-1:0] tile; logic [P*5-1:0] ri; logic [Q*5-1:0] ci; uitem_t it;
  logic [TW-1:0] mw [WDEPTH]; logic [19:0] mr [XDEPTH]; logic [19:0] mc [XDEPTH]; uitem_t mu [UDEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  csb_weight_buffer #(.P(P), .Q(Q), .MAXBLK(MAXBLK), .WDEPTH(WDEPTH), .UDEPTH(UDEPTH), .XDEPTH(XDEPTH)) dut (
    .clk, .cfg_we, .cfg_target(tgt), .cfg_addr(ca), .cfg_wdata(cd),
    .w_addr(wa), .w_tile(tile), .r_addr(ra), .r_idx(ri), .c_addr(cxa), .c_idx(ci), .u_addr(ua), .u_item(it));
  task automatic wr(cfg_target_e t, int a, logic [TW-1:0] d);
    @(negedge clk); cfg_we = 1; tgt = t; ca = a; cd = d; @(posedge clk); #1 cfg_we = 0;
  endtask
  function automatic logic [TW-1:0] rnd();
    logic [TW-1:0] v;
    for (int i = 0; i < TW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [TW-1:0] d;
    for (int a = 0; a < WDEPTH; a++) begin d = rnd(); mw[a] = d; wr(CFG_WEIGHT, a, d); end
    for (int a = 0; a < XDEPTH; a++) begin d = rnd(); mr[a] = d[19:0]; wr(CFG_ROWIDX, a, d); end
    for (int a = 0; a < XDEPTH; a++) begin d = rnd(); mc[a] = d[19:0]; wr(CFG_COLIDX, a, d); end
    for (int a = 0; a < UDEPTH; a++) begin d = rnd(); mu[a] = uitem_t'(d[15:0]); wr(CFG_UITEM, a, d); end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk); wa = 6'($urandom); ra = 6'($urandom); cxa = 6'($urandom); ua = 5'($urandom);
      #1; checks++; if (it != mu[ua]) begin failures++; $display("item %0d", ua); end
      @(posedge clk); #1;
      checks += 3;
      if (tile != mw[wa]) begin failures++; $display("tile %0d", wa); end
      if (ri != mr[ra])   begin failures++; $display("rowidx %0d", ra); end
      if (ci != mc[cxa])  begin failures++; $display("colidx %0d", cxa); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
