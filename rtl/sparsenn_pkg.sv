// sparsenn_pkg -- types and constants shared by the SparseNN accelerator.
//
// Numbers that follow the paper: 64 processing elements, 16-bit fixed-point data,
// 64 activation registers per PE (so at most 64*64 = 4096 activations per layer),
// 128 KB of W memory and 8 KB each of U and V memory per PE.
// This design's own choices: 8 fractional bits in the fixed-point format, the flit
// layout carried by the H-tree, the buffer depths, and the per-layer configuration
// record that a host supplies with every layer start.
package sparsenn_pkg;

  localparam int unsigned DATA_W      = 16;          // 16-bit fixed point
  localparam int unsigned FRAC_W      = 8;           // Q8.8
  localparam int unsigned NUM_PE      = 64;          // processing elements
  localparam int unsigned PE_ID_W     = $clog2(NUM_PE);
  localparam int unsigned ACTS_PER_PE = 64;          // activation registers per PE
  localparam int unsigned LOC_W       = $clog2(ACTS_PER_PE);
  localparam int unsigned IDX_W       = PE_ID_W + LOC_W;  // global activation index, 4096
  localparam int unsigned W_DEPTH     = 65536;       // 128 KB of 16-bit words
  localparam int unsigned UV_DEPTH    = 4096;        // 8 KB of 16-bit words
  localparam int unsigned ADDR_W      = 16;          // widest memory address
  localparam int unsigned RADIX       = 4;           // children per router

  typedef logic signed [DATA_W-1:0] data_t;

  // What a flit on the H-tree carries.
  //   FLIT_ACT  : a nonzero input activation and its global index (row-based phases)
  //   FLIT_PSUM : a partial sum of row `idx` of V*a (column-based phase), added in routers
  //   FLIT_LAST : end of a PE's activation stream; routers merge four into one
  typedef enum logic [1:0] {FLIT_ACT = 2'd0, FLIT_PSUM = 2'd1, FLIT_LAST = 2'd2} flit_kind_e;

  typedef struct packed {
    flit_kind_e       kind;
    logic [IDX_W-1:0] idx;
    data_t            val;
  } flit_t;

  // Which memory or register a host write goes to.
  typedef enum logic [1:0] {TGT_W = 2'd0, TGT_U = 2'd1, TGT_V = 2'd2, TGT_ACT = 2'd3} wr_target_e;

  // Memory selected by a datapath operation.
  typedef enum logic [1:0] {MEM_W = 2'd0, MEM_U = 2'd1, MEM_V = 2'd2} mem_sel_e;

  // Per-layer configuration, identical for all PEs.
  typedef struct packed {
    logic              uv_en;    // 1: run the V and U predictor phases; 0: predict all rows nonzero
    logic [LOC_W:0]    n_rows;   // output rows held by each PE, 1..64
    logic [LOC_W:0]    rank;     // rank r of the U/V predictor, 1..64
    logic [ADDR_W-1:0] w_base;   // base word address of this layer in W MEM
    logic [ADDR_W-1:0] u_base;   // base word address of this layer in U MEM
    logic [ADDR_W-1:0] v_base;   // base word address of this layer in V MEM
  } layer_cfg_t;

  // One operation entering the PE datapath.
  typedef struct packed {
    mem_sel_e         mem;
    data_t            act;       // activation multiplied with the memory word
    logic [IDX_W-1:0] in_idx;    // column of the matrix
    logic [LOC_W-1:0] out_idx;   // local row, i.e. destination register
  } mac_op_t;

  // Event counters of one layer, summed over all PEs.
  typedef struct packed {
    logic [31:0] mac_ops;     // datapath operations (multiply-accumulates)
    logic [31:0] acts_sent;   // nonzero activations broadcast in the W phase
    logic [31:0] row_skips;   // received activations for which predicted-zero rows were skipped
    logic [31:0] q_early;     // V results queued while the PE was still in its V phase
    logic [31:0] forwards;    // sums forwarded inside the MAC
    logic [31:0] arb_holds;   // router cycles in which an activation lost arbitration and waited
    logic [31:0] router_accs; // four partial sums added in a router
    logic [31:0] last_merges; // four end markers merged into one in a router
    logic [31:0] credit_stalls; // router cycles stalled for lack of a credit
  } perf_t;

  // Saturate a wide signed value to DATA_W bits.
  function automatic data_t sat16(input logic signed [DATA_W+1:0] x);
    if (x > $signed({3'b000, {(DATA_W-1){1'b1}}}))       return data_t'({1'b0, {(DATA_W-1){1'b1}}});
    else if (x < -$signed({3'b001, {(DATA_W-1){1'b0}}})) return data_t'({1'b1, {(DATA_W-1){1'b0}}});
    else                                                 return data_t'(x);
  endfunction

  // Fixed-point product, arithmetic shift by FRAC_W, saturated.
  function automatic data_t fx_mul(input data_t a, input data_t b);
    logic signed [2*DATA_W-1:0] p;
    logic signed [2*DATA_W-1:0] s;
    p = a * b;
    s = p >>> FRAC_W;
    if (s > 32767)       return 16'sh7fff;
    else if (s < -32768) return 16'sh8000;
    else                 return data_t'(s);
  endfunction

  // Saturating 16-bit addition.
  function automatic data_t fx_add(input data_t a, input data_t b);
    logic signed [DATA_W+1:0] s;
    s = (DATA_W+2)'(a) + (DATA_W+2)'(b);
    return sat16(s);
  endfunction

endpackage
