// ew_dataflow: the element-wise operation units of the RNN dataflow
// architecture (Sum1, Sigmoid, Tanh, Mult1, Mult2, Sum2) and the programmable
// datapaths between them.
//
// One macro-instruction section (sec_ew_t) streams `count` elements through a
// chain of units; element e uses address base+e in every buffer it touches:
//     s1  = BufferB[b] + BufferBias[bias]                     (Sum1)
//     a   = act_src: s1 | BufferC | BufferD | BufferE          (DataFlowIdx)
//     y   = sigmoid(a) if sig_en, tanh(a) if tanh_en, else a   (delta / theta)
//     m1  = mult1_en ? y * (m1_src: BufferC | BufferD | BufferE) : y   (Mult1)
//     m2  = mult2_en ? BufferC[m2c] * BufferE[m2e] : 0         (Mult2)
//     out = sum2_en ? m1 + m2 : m1                             (Sum2)
// and `out` is written to every buffer set in the destination mask
// (BufferA, C, D, E). With this, an LSTM step needs four chain instructions
// (sigmoid gates, tanh gate, c_t = f*c + i*g, h_t = o*tanh(c_t)).
// All arithmetic is Q8.8 with saturation.
//
// The units and the buffers they connect follow the paper's figure of the
// dataflow architecture; which sources each unit may select, and the single
// shared element count, are this design's reading of the VLIW section table.
//
// Timing: one element per cycle; pipeline of four stages (buffer read,
// Sum1 + activation, Mult1/Mult2/Sum2, buffer write). `start` is a one-cycle
// pulse while idle; `done` pulses after the last write.
module ew_dataflow
  import csb_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  sec_ew_t inst,
  output logic    busy,
  output logic    done,
  // read ports (synchronous buffers, data one cycle after the address)
  output vaddr_t  b_addr,    input data_t b_data,
  output vaddr_t  bias_addr, input data_t bias_data,
  output vaddr_t  c_addr [3], input data_t c_data [3],  // act, m1, m2
  output vaddr_t  d_addr [2], input data_t d_data [2],  // act, m1
  output vaddr_t  e_addr [3], input data_t e_data [3],  // act, m1, m2
  // write port (to the buffers selected by we_*)
  output logic    we_a, we_c, we_d, we_e,
  output vaddr_t  wr_addr,
  output data_t   wr_data
);
  sec_ew_t  ins;
  logic     run;
  count_t   e;

  // stage 0: addresses
  assign b_addr    = ins.b_addr    + vaddr_t'(e);
  assign bias_addr = ins.bias_addr + vaddr_t'(e);
  assign c_addr[0] = ins.act_addr  + vaddr_t'(e);
  assign d_addr[0] = ins.act_addr  + vaddr_t'(e);
  assign e_addr[0] = ins.act_addr  + vaddr_t'(e);
  assign c_addr[1] = ins.m1_addr   + vaddr_t'(e);
  assign d_addr[1] = ins.m1_addr   + vaddr_t'(e);
  assign e_addr[1] = ins.m1_addr   + vaddr_t'(e);
  assign c_addr[2] = ins.m2c_addr  + vaddr_t'(e);
  assign e_addr[2] = ins.m2e_addr  + vaddr_t'(e);

  logic   v1, v2, v3;
  count_t e1, e2, e3;
  logic   last1, last2, last3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ins <= '0; run <= 1'b0; e <= '0;
    end else if (!run) begin
      if (start && inst.count != '0) begin
        ins <= inst; run <= 1'b1; e <= '0;
      end
    end else begin
      e <= e + 1'b1;
      if (e + 1'b1 == ins.count) run <= 1'b0;
    end
  end

  // stage 1: Sum1 and activation
  data_t s1, a_in, y, opnd;
  data_t y_sig, y_tanh;
  always_comb begin
    s1 = fx_add(b_data, bias_data);
    unique case (ins.act_src)
      DF_SUM1: a_in = s1;
      DF_BUFC: a_in = c_data[0];
      DF_BUFD: a_in = d_data[0];
      default: a_in = e_data[0];
    endcase
    unique case (ins.m1_src)
      DF_BUFD: opnd = d_data[1];
      DF_BUFE: opnd = e_data[1];
      default: opnd = c_data[1];
    endcase
  end
  act_sigmoid u_sig  (.x(a_in), .y(y_sig));
  act_tanh    u_tanh (.x(a_in), .y(y_tanh));
  assign y = ins.sig_en ? y_sig : (ins.tanh_en ? y_tanh : a_in);

  data_t r_y, r_opnd, r_m2c, r_m2e;
  // stage 2: Mult1, Mult2, Sum2
  data_t m1, m2, s2;
  always_comb begin
    m1 = ins.mult1_en ? fx_mul(r_y, r_opnd) : r_y;
    m2 = ins.mult2_en ? fx_mul(r_m2c, r_m2e) : '0;
    s2 = ins.sum2_en  ? fx_add(m1, m2) : m1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      e1 <= '0; e2 <= '0; e3 <= '0; last1 <= 1'b0; last2 <= 1'b0; last3 <= 1'b0;
      r_y <= '0; r_opnd <= '0; r_m2c <= '0; r_m2e <= '0; wr_data <= '0;
    end else begin
      v1 <= run;  e1 <= e;  last1 <= run && (e + 1'b1 == ins.count);
      v2 <= v1;   e2 <= e1; last2 <= last1;
      r_y <= y; r_opnd <= opnd; r_m2c <= c_data[2]; r_m2e <= e_data[2];
      v3 <= v2;   e3 <= e2; last3 <= last2;
      wr_data <= s2;
    end
  end

  // stage 3: write
  assign wr_addr = ins.dst_addr + vaddr_t'(e3);
  assign we_a = v3 && ins.dst.a;
  assign we_c = v3 && ins.dst.c;
  assign we_d = v3 && ins.dst.d;
  assign we_e = v3 && ins.dst.e;
  assign done = v3 && last3;
  assign busy = run || v1 || v2 || v3;
endmodule
