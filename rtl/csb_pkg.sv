// csb_pkg: shared constants, types and fixed-point helpers of the CSB-RNN
// accelerator.
//
// Numbers are 16-bit signed fixed point (Q8.8: 8 integer bits including the
// sign, 8 fraction bits). The 16-bit width follows the paper; the split
// between integer and fraction bits is this design's choice. Products of two
// Q8.8 numbers are Q16.16 and are accumulated in 32 bits inside the CSB-Engine.
//
// The default engine size (P x Q PEs per PEGroup, K x L PEGroups, blocks of
// up to 32 x 32) is the configuration the paper evaluates. Buffer and memory
// depths are this design's choice.
//
// The package also holds the two instruction formats:
//   * the macro-instruction (VLIW word), one section per operation unit of
//     the dataflow architecture (load, CSB-Engine, Sum1, Sigmoid/Tanh, Mult1,
//     Mult2, Sum2, store), each with its own element count;
//   * the micro-instruction item header that steers one PEGroup through one
//     sub-matrix (local, horizontal-shared or vertical-shared) of a block.
package csb_pkg;

  // ---------------- numeric format ----------------
  localparam int unsigned DW   = 16;   // data width (paper: 16-bit fixed point)
  localparam int unsigned FRAC = 8;    // fraction bits (assumed)
  localparam int unsigned ACCW = 32;   // accumulator width (assumed)

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // ---------------- engine geometry (paper defaults) ----------------
  localparam int unsigned P_DEF      = 4;   // PE rows per PEGroup
  localparam int unsigned Q_DEF      = 4;   // PE columns per PEGroup
  localparam int unsigned K_DEF      = 4;   // PEGroup rows
  localparam int unsigned L_DEF      = 4;   // PEGroup columns
  localparam int unsigned MAXBLK_DEF = 32;  // largest block edge (MaxBlock32)

  // ---------------- memory depths (assumed) ----------------
  localparam int unsigned VBUF_AW     = 13;    // vector buffers: 8192 words
  localparam int unsigned WDEPTH_DEF  = 8192;  // weight tiles per PEGroup
  localparam int unsigned UDEPTH_DEF  = 4096;  // micro-instruction items per PEGroup
  localparam int unsigned XDEPTH_DEF  = 8192;  // RowIdx / ColIdx entries per PEGroup
  localparam int unsigned IDEPTH_DEF  = 64;    // macro-instructions
  localparam int unsigned MAW         = 32;    // external memory address width

  // ---------------- micro-instruction ----------------
  // Sharing flag of one micro-instruction item.
  typedef enum logic [1:0] {
    SH_LOCAL = 2'd0,   // inputs and outputs in this PEGroup
    SH_HORIZ = 2'd1,   // input neurons from the BlockNeuronBuffer of the left column
    SH_VERT  = 2'd2    // results accumulate into the PEGroup above
  } sharing_e;

  // TripCount of one item: kernel sub-matrix of tn rows x tm columns.
  typedef struct packed {
    sharing_e   sharing;
    logic [6:0] tm;    // columns (0..64)
    logic [6:0] tn;    // rows    (0..64)
  } uitem_t;

  // Configuration-bus targets (how the host loads weights and instructions).
  typedef enum logic [2:0] {
    CFG_WEIGHT = 3'd0,  // PEGroup weight tile
    CFG_UITEM  = 3'd1,  // PEGroup micro-instruction item header
    CFG_ROWIDX = 3'd2,  // PEGroup RowIdx entry (P indices)
    CFG_COLIDX = 3'd3,  // PEGroup ColIdx entry (Q indices)
    CFG_MACRO  = 3'd4,  // macro-instruction word
    CFG_BIAS   = 3'd5   // BufferBias word
  } cfg_target_e;

  // ---------------- macro-instruction (VLIW) ----------------
  typedef logic [VBUF_AW-1:0] vaddr_t;
  typedef logic [15:0]        count_t;

  // Operand source of the activation stage and of Mult1 (DataFlowIdx).
  typedef enum logic [1:0] {
    DF_SUM1 = 2'd0,   // output of Sum1 (BufferB + BufferBias)
    DF_BUFC = 2'd1,
    DF_BUFD = 2'd2,
    DF_BUFE = 2'd3
  } dfidx_e;

  // Destination mask of the element-wise chain, one bit per buffer.
  typedef struct packed {
    logic a;  // BufferA (feeds the CSB-Engine: hidden state for the next step)
    logic c;
    logic d;
    logic e;  // BufferE (read by the StoreUnit)
  } dstmask_t;

  typedef struct packed {
    logic [MAW-1:0] mem_addr;    // Addr(Memory)
    logic [MAW-1:0] mem_stride;  // added per time step (assumed)
    count_t         count;
    vaddr_t         a_addr;      // Addr(BufferA)
  } sec_load_t;

  typedef struct packed {
    logic       rewind;   // restart the PEGroups' weight and micro-instruction
                          // pointers at zero (first matrix of a program);
                          // when clear, continue after the previous command
    vaddr_t     a_addr;   // input neuron vector in BufferA
    logic [5:0] blk_m;    // BlockSizeH: block columns (1..32)
    logic [5:0] blk_n;    // BlockSizeV: block rows    (1..32)
    count_t     count_h;  // CountH: horizontal block iterations
    count_t     count_v;  // CountV: vertical block iterations
    vaddr_t     b_addr;   // output vector in BufferB
  } sec_csb_t;

  typedef struct packed {
    count_t   count;       // elements of the chain (0 = chain idle)
    logic     sum1_en;     vaddr_t b_addr;  vaddr_t bias_addr;
    logic     sig_en;      logic   tanh_en;
    dfidx_e   act_src;     vaddr_t act_addr;
    logic     mult1_en;    dfidx_e m1_src;  vaddr_t m1_addr;
    logic     mult2_en;    vaddr_t m2c_addr; vaddr_t m2e_addr;
    logic     sum2_en;
    dstmask_t dst;         vaddr_t dst_addr;
  } sec_ew_t;

  typedef struct packed {
    vaddr_t         e_addr;      // Addr(BufferE)
    count_t         count;
    logic [MAW-1:0] mem_addr;    // Addr(Memory)
    logic [MAW-1:0] mem_stride;  // added per time step (assumed)
  } sec_store_t;

  typedef struct packed {
    sec_load_t  load;
    sec_csb_t   csb;
    sec_ew_t    ew;
    sec_store_t store;
  } macro_inst_t;

  localparam int unsigned MACRO_W = $bits(macro_inst_t);

  // ---------------- fixed-point helpers ----------------
  // Saturate a wide signed value into data_t.
  function automatic data_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return data_t'(v[15:0]);
  endfunction

  // Q8.8 x Q8.8 -> Q8.8 (arithmetic shift, saturated).
  function automatic data_t fx_mul(input data_t a, input data_t b);
    logic signed [31:0] p;
    p = a * b;
    return sat16(48'(p >>> FRAC));
  endfunction

  function automatic data_t fx_add(input data_t a, input data_t b);
    return sat16(48'(a) + 48'(b));
  endfunction

  // Q16.16 accumulator -> Q8.8.
  function automatic data_t acc_to_data(input acc_t a);
    return sat16(48'(a >>> FRAC));
  endfunction

endpackage
