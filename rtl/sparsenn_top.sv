// sparsenn_top -- the SparseNN accelerator: 64 processing elements on a 3-level H-tree.
//
// Computes one fully connected layer a' = p o ReLU(W a) per `start`, where the output
// sparsity predictor p = sign(U V a) is evaluated on the chip first (uv_en = 1) and only
// rows predicted nonzero are computed. Rows of W and U, columns of V, and the input and
// output activations are interleaved over the PEs by index mod 64. Only nonzero input
// activations travel over the network.
// Host interface (this design's own, the paper does not describe one):
//   wr_en/wr_pe/wr_target/wr_addr/wr_data  write one word into a PE's W, U or V memory
//       or into a destination activation register (TGT_ACT; the layer start swaps it in
//       as input). Use only while the accelerator is idle.
//   start + cfg  start a layer on all PEs; cfg gives rows per PE, rank, base addresses
//       and whether the predictor is used. `done` is high when every PE has finished.
//   rd_pe/rd_idx/rd_data  read a PE's destination register (the last layer's outputs,
//       before ReLU; rows predicted zero read 0), combinationally.
//   layer_cycles  clock cycles from the last `start` to `done`.
//   perf  event counts of the last layer, summed over all PEs: datapath operations,
//       nonzero activations broadcast, received activations whose predicted-zero rows
//       were skipped, V results that arrived during a PE's V phase, forwarded sums, and the
//       routers' arbitration holds, partial-sum additions, end-marker merges and credit stalls.
module sparsenn_top
  import sparsenn_pkg::*;
#(
  parameter int unsigned W_WORDS  = W_DEPTH,
  parameter int unsigned UV_WORDS = UV_DEPTH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               done,
  output logic [31:0]        layer_cycles,
  output perf_t              perf,
  input  logic               wr_en,
  input  logic [PE_ID_W-1:0] wr_pe,
  input  wr_target_e         wr_target,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  data_t              wr_data,
  input  logic [PE_ID_W-1:0] rd_pe,
  input  logic [LOC_W-1:0]   rd_idx,
  output data_t              rd_data
);
  localparam int unsigned QDEPTH   = 16;
  localparam int unsigned UP_DEPTH = 8;

  logic  up_valid [NUM_PE], up_credit [NUM_PE], dn_valid [NUM_PE], dn_credit [NUM_PE];
  flit_t up_flit  [NUM_PE], dn_flit [NUM_PE];
  logic  pe_done  [NUM_PE];
  data_t pe_rd    [NUM_PE];
  logic  ev_act_sent [NUM_PE], ev_row_skip [NUM_PE], ev_q_early [NUM_PE];
  logic  ev_fwd [NUM_PE], ev_op [NUM_PE];

  for (genvar k = 0; k < NUM_PE; k++) begin : g_pe
    pe #(.W_WORDS(W_WORDS), .UV_WORDS(UV_WORDS), .QDEPTH(QDEPTH), .UP_CREDITS(UP_DEPTH)) u_pe (
      .clk, .rst_n, .pe_id(PE_ID_W'(k)), .start, .cfg, .done(pe_done[k]),
      .up_valid(up_valid[k]), .up_flit(up_flit[k]), .up_credit(up_credit[k]),
      .dn_valid(dn_valid[k]), .dn_flit(dn_flit[k]), .dn_credit(dn_credit[k]),
      .wr_en(wr_en && wr_pe == PE_ID_W'(k)), .wr_target, .wr_addr, .wr_data,
      .rd_idx, .rd_data(pe_rd[k]),
      .ev_act_sent(ev_act_sent[k]), .ev_row_skip(ev_row_skip[k]), .ev_q_early(ev_q_early[k]),
      .ev_fwd(ev_fwd[k]), .ev_op(ev_op[k]));
  end

  logic [PE_ID_W:0] n_hold, n_acc, n_last, n_stall;  // network events this cycle
  htree #(.UP_DEPTH(UP_DEPTH), .DOWN_DEPTH(8), .PE_QDEPTH(QDEPTH)) u_net (
    .clk, .rst_n,
    .pe_up_valid(up_valid), .pe_up_flit(up_flit), .pe_up_credit(up_credit),
    .pe_dn_valid(dn_valid), .pe_dn_flit(dn_flit), .pe_dn_credit(dn_credit),
    .n_arb_hold(n_hold), .n_acc(n_acc), .n_merge_last(n_last), .n_credit_stall(n_stall));

  always_comb begin
    done = 1'b1;
    for (int k = 0; k < int'(NUM_PE); k++) done = done && pe_done[k];
  end
  assign rd_data = pe_rd[rd_pe];

  perf_t perf_inc;
  always_comb begin
    perf_inc = '0;
    for (int k = 0; k < int'(NUM_PE); k++) begin
      perf_inc.mac_ops   += 32'(ev_op[k]);
      perf_inc.acts_sent += 32'(ev_act_sent[k]);
      perf_inc.row_skips += 32'(ev_row_skip[k]);
      perf_inc.q_early   += 32'(ev_q_early[k]);
      perf_inc.forwards  += 32'(ev_fwd[k]);
    end
    perf_inc.arb_holds     = 32'(n_hold);
    perf_inc.router_accs   = 32'(n_acc);
    perf_inc.last_merges   = 32'(n_last);
    perf_inc.credit_stalls = 32'(n_stall);
  end

  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running      <= 1'b0;
      layer_cycles <= '0;
      perf         <= '0;
    end else if (start) begin
      running      <= 1'b1;
      layer_cycles <= '0;
      perf         <= '0;
    end else if (running) begin
      perf.mac_ops   <= perf.mac_ops   + perf_inc.mac_ops;
      perf.acts_sent <= perf.acts_sent + perf_inc.acts_sent;
      perf.row_skips <= perf.row_skips + perf_inc.row_skips;
      perf.q_early   <= perf.q_early   + perf_inc.q_early;
      perf.forwards  <= perf.forwards  + perf_inc.forwards;
      perf.arb_holds     <= perf.arb_holds     + perf_inc.arb_holds;
      perf.router_accs   <= perf.router_accs   + perf_inc.router_accs;
      perf.last_merges   <= perf.last_merges   + perf_inc.last_merges;
      perf.credit_stalls <= perf.credit_stalls + perf_inc.credit_stalls;
      if (done) running <= 1'b0;
      else      layer_cycles <= layer_cycles + 1;
    end
  end
endmodule
