// htree -- the 3-level H-tree on-chip network that links the 64 PEs.
//
// 16 leaf routers serve 4 PEs each, 4 internal routers serve 4 leaves each and the root
// serves the 4 internal routers (64 = 4*4*4). Flits from the PEs climb the tree, where
// nonzero activations are arbitrated smallest index first and partial sums are added;
// what leaves the root's up path is fed straight into the root's down path and
// broadcast to all 64 PEs. The structure (three levels, four children per node, root
// broadcast) is the paper's; the loop-back at the root and the per-link credit scheme
// are this design's way of realising "the root broadcasts it back".
// Latency: a flit sent by a PE reaches every PE's ActQueue about 20 cycles later when
// the network is idle (3 x 4 up stages plus loop-back and 3 down hops of 2 registers
// each plus buffering), after which one flit per cycle can follow.
module htree
  import sparsenn_pkg::*;
#(
  parameter int unsigned UP_DEPTH   = 8,
  parameter int unsigned DOWN_DEPTH = 8,
  parameter int unsigned PE_QDEPTH  = 16    // depth of each PE's ActQueue
) (
  input  logic  clk,
  input  logic  rst_n,
  // PE side
  input  logic  pe_up_valid  [NUM_PE],
  input  flit_t pe_up_flit   [NUM_PE],
  output logic  pe_up_credit [NUM_PE],
  output logic  pe_dn_valid  [NUM_PE],
  output flit_t pe_dn_flit   [NUM_PE],
  input  logic  pe_dn_credit [NUM_PE],
  // events summed over all routers, for statistics
  output logic [$clog2(NUM_PE):0] n_arb_hold,
  output logic [$clog2(NUM_PE):0] n_acc,
  output logic [$clog2(NUM_PE):0] n_merge_last,
  output logic [$clog2(NUM_PE):0] n_credit_stall
);
  localparam int unsigned NL = NUM_PE / RADIX;   // 16 leaves
  localparam int unsigned NI = NL / RADIX;       // 4 internal nodes
  localparam int unsigned NR = NL + NI + 1;      // all routers

  // leaf <-> internal
  logic  l_up_v [NL]; flit_t l_up_f [NL]; logic l_up_cr [NL];
  logic  l_dn_v [NL]; flit_t l_dn_f [NL]; logic l_dn_cr [NL];
  // internal <-> root
  logic  i_up_v [NI]; flit_t i_up_f [NI]; logic i_up_cr [NI];
  logic  i_dn_v [NI]; flit_t i_dn_f [NI]; logic i_dn_cr [NI];
  // root loop-back
  logic  r_up_v; flit_t r_up_f; logic r_up_cr;

  logic ev_hold [NR], ev_acc [NR], ev_last [NR], ev_stall [NR];

  for (genvar l = 0; l < NL; l++) begin : g_leaf
    logic  cuv [RADIX]; flit_t cuf [RADIX]; logic cuc [RADIX]; logic cdc [RADIX];
    logic  dv;          flit_t df;
    for (genvar c = 0; c < RADIX; c++) begin : g_c
      assign cuv[c] = pe_up_valid[l*RADIX+c];
      assign cuf[c] = pe_up_flit[l*RADIX+c];
      assign pe_up_credit[l*RADIX+c] = cuc[c];
      assign cdc[c] = pe_dn_credit[l*RADIX+c];
      assign pe_dn_valid[l*RADIX+c] = dv;
      assign pe_dn_flit[l*RADIX+c]  = df;
    end
    noc_router #(.UP_DEPTH(UP_DEPTH), .DOWN_DEPTH(DOWN_DEPTH),
                 .PARENT_CREDITS(UP_DEPTH), .CHILD_CREDITS(PE_QDEPTH)) u_leaf (
      .clk, .rst_n,
      .c_up_valid(cuv), .c_up_flit(cuf), .c_up_credit(cuc),
      .p_up_valid(l_up_v[l]), .p_up_flit(l_up_f[l]), .p_up_credit(l_up_cr[l]),
      .p_dn_valid(l_dn_v[l]), .p_dn_flit(l_dn_f[l]), .p_dn_credit(l_dn_cr[l]),
      .c_dn_valid(dv), .c_dn_flit(df), .c_dn_credit(cdc),
      .ev_arb_hold(ev_hold[l]), .ev_acc(ev_acc[l]), .ev_merge_last(ev_last[l]),
      .ev_credit_stall(ev_stall[l]));
  end

  for (genvar n = 0; n < NI; n++) begin : g_int
    logic  cuv [RADIX]; flit_t cuf [RADIX]; logic cuc [RADIX]; logic cdc [RADIX];
    logic  dv;          flit_t df;
    for (genvar c = 0; c < RADIX; c++) begin : g_c
      assign cuv[c] = l_up_v[n*RADIX+c];
      assign cuf[c] = l_up_f[n*RADIX+c];
      assign l_up_cr[n*RADIX+c] = cuc[c];
      assign cdc[c] = l_dn_cr[n*RADIX+c];
      assign l_dn_v[n*RADIX+c] = dv;
      assign l_dn_f[n*RADIX+c] = df;
    end
    noc_router #(.UP_DEPTH(UP_DEPTH), .DOWN_DEPTH(DOWN_DEPTH),
                 .PARENT_CREDITS(UP_DEPTH), .CHILD_CREDITS(DOWN_DEPTH)) u_int (
      .clk, .rst_n,
      .c_up_valid(cuv), .c_up_flit(cuf), .c_up_credit(cuc),
      .p_up_valid(i_up_v[n]), .p_up_flit(i_up_f[n]), .p_up_credit(i_up_cr[n]),
      .p_dn_valid(i_dn_v[n]), .p_dn_flit(i_dn_f[n]), .p_dn_credit(i_dn_cr[n]),
      .c_dn_valid(dv), .c_dn_flit(df), .c_dn_credit(cdc),
      .ev_arb_hold(ev_hold[NL+n]), .ev_acc(ev_acc[NL+n]), .ev_merge_last(ev_last[NL+n]),
      .ev_credit_stall(ev_stall[NL+n]));
  end

  // The root: its up output is its own down input. Down-path credits of the root are
  // the same pulses as the up-path credits it returns to itself.
  begin : g_root
    logic  dv; flit_t df;
    logic  cdc [RADIX];
    for (genvar c = 0; c < RADIX; c++) begin : g_c
      assign i_dn_v[c] = dv;
      assign i_dn_f[c] = df;
      assign cdc[c]    = i_dn_cr[c];
    end
    noc_router #(.UP_DEPTH(UP_DEPTH), .DOWN_DEPTH(DOWN_DEPTH),
                 .PARENT_CREDITS(DOWN_DEPTH), .CHILD_CREDITS(DOWN_DEPTH)) u_root (
      .clk, .rst_n,
      .c_up_valid(i_up_v), .c_up_flit(i_up_f), .c_up_credit(i_up_cr),
      .p_up_valid(r_up_v), .p_up_flit(r_up_f), .p_up_credit(r_up_cr),
      .p_dn_valid(r_up_v), .p_dn_flit(r_up_f), .p_dn_credit(r_up_cr),
      .c_dn_valid(dv), .c_dn_flit(df), .c_dn_credit(cdc),
      .ev_arb_hold(ev_hold[NR-1]), .ev_acc(ev_acc[NR-1]), .ev_merge_last(ev_last[NR-1]),
      .ev_credit_stall(ev_stall[NR-1]));
  end

  always_comb begin
    n_arb_hold = '0; n_acc = '0; n_merge_last = '0; n_credit_stall = '0;
    for (int r = 0; r < int'(NR); r++) begin
      n_arb_hold     = n_arb_hold     + ($clog2(NUM_PE)+1)'(ev_hold[r]);
      n_acc          = n_acc          + ($clog2(NUM_PE)+1)'(ev_acc[r]);
      n_merge_last   = n_merge_last   + ($clog2(NUM_PE)+1)'(ev_last[r]);
      n_credit_stall = n_credit_stall + ($clog2(NUM_PE)+1)'(ev_stall[r]);
    end
  end
endmodule
