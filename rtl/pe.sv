// pe -- one SparseNN processing element.
//
// A PE owns every 64th row of each weight matrix (rows j with j mod 64 = PE number) and
// the matching input and output activations, in its own memories and registers:
//   ActQueue -> MemAddrComp -> MemAccess (W/U/V MEM) -> MAC (multiply, add) -> ActRegFile
// is a 5-stage datapath (address, memory, multiply, add, write-back) fed one operation
// per cycle by the controller. Two leading-nonzero detectors pick the next nonzero
// source activation and the next row predicted nonzero by the 1-bit predictor bank.
// The network interface connects the PE to its leaf router with credit flow control.
// Host port: `wr_*` writes a memory word (TGT_W/U/V) or a destination activation register
// (TGT_ACT, index in wr_addr[5:0]); `rd_idx`/`rd_data` read the destination registers
// combinationally. The host should use it only while the PE is idle.
// The blocks and the pipeline are the paper's (its PE figure); the host port is this
// design's addition.
module pe
  import sparsenn_pkg::*;
#(
  parameter int unsigned W_WORDS    = W_DEPTH,
  parameter int unsigned UV_WORDS   = UV_DEPTH,
  parameter int unsigned QDEPTH     = 16,
  parameter int unsigned UP_CREDITS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PE_ID_W-1:0] pe_id,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               done,
  // H-tree links
  output logic               up_valid,
  output flit_t              up_flit,
  input  logic               up_credit,
  input  logic               dn_valid,
  input  flit_t              dn_flit,
  output logic               dn_credit,
  // host
  input  logic               wr_en,
  input  wr_target_e         wr_target,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  data_t              wr_data,
  input  logic [LOC_W-1:0]   rd_idx,
  output data_t              rd_data,
  // events, for statistics
  output logic               ev_act_sent,
  output logic               ev_row_skip,
  output logic               ev_q_early,
  output logic               ev_fwd,
  output logic               ev_op
);
  // queue
  flit_t q_head, rx_flit;
  logic  q_empty, q_pop, rx_push;
  // network interface send side
  logic  tx_valid, tx_ready;
  flit_t tx_flit;
  // register files
  logic  rf_swap, rf_clear;
  data_t src_vals [ACTS_PER_PE];
  data_t dst_vals [ACTS_PER_PE];
  logic [ACTS_PER_PE-1:0] src_pos, pred_p;
  logic  pred_load, pred_uv_en, in_v_phase;
  logic [LOC_W:0] layer_n_rows;
  // datapath
  logic              op_valid, ma_valid, mm_valid, mac_busy;
  mac_op_t           op, ma_op, mm_op;
  logic [ADDR_W-1:0] op_base, ma_addr;
  logic [LOC_W:0]    op_stride;
  data_t             mem_word;
  logic [LOC_W-1:0]  dst_rd_idx, dst_wr_idx;
  data_t             dst_rd_data, dst_wr_data;
  logic              dst_we;

  act_queue #(.DEPTH(QDEPTH)) u_actq (
    .clk, .rst_n, .push(rx_push), .push_data(rx_flit), .pop(q_pop),
    .head(q_head), .empty(q_empty), .full(), .count());

  network_interface #(.UP_CREDITS(UP_CREDITS)) u_ni (
    .clk, .rst_n, .tx_valid, .tx_flit, .tx_ready, .rx_push, .rx_flit, .rx_pop(q_pop),
    .up_valid, .up_flit, .up_credit, .down_valid(dn_valid), .down_flit(dn_flit),
    .down_credit(dn_credit));

  pe_controller u_ctrl (
    .clk, .rst_n, .pe_id, .start, .cfg, .done,
    .rf_swap, .rf_clear, .src_vals, .src_pos, .dst_vals,
    .pred_load, .pred_uv_en, .pred_p, .layer_n_rows,
    .q_head, .q_empty, .q_pop, .tx_valid, .tx_flit, .tx_ready,
    .op_valid, .op, .op_base, .op_stride, .dp_busy(ma_valid || mm_valid || mac_busy),
    .ev_act_sent, .ev_row_skip, .in_v_phase);

  mem_addr_comp u_addr (
    .clk, .rst_n, .in_valid(op_valid), .in_op(op), .base(op_base), .stride(op_stride),
    .out_valid(ma_valid), .out_op(ma_op), .addr(ma_addr));

  mem_access #(.W_WORDS(W_WORDS), .UV_WORDS(UV_WORDS)) u_mem (
    .clk, .rst_n, .in_valid(ma_valid), .in_op(ma_op), .addr(ma_addr),
    .out_valid(mm_valid), .out_op(mm_op), .rdata(mem_word),
    .wr_en(wr_en && wr_target != TGT_ACT), .wr_target, .wr_addr, .wr_data);

  mac u_mac (
    .clk, .rst_n, .in_valid(mm_valid), .in_op(mm_op), .mem_word,
    .dst_rd_idx, .dst_rd_data, .dst_we, .dst_wr_idx, .dst_wr_data,
    .busy(mac_busy), .fwd(ev_fwd));

  act_regfile #(.N(ACTS_PER_PE)) u_rf (
    .clk, .rst_n, .swap(rf_swap), .clear_dst(rf_clear),
    .dst_rd_idx, .dst_rd_data, .dst_we, .dst_wr_idx, .dst_wr_data,
    .dst_vals, .src_vals, .src_pos,
    .host_we(wr_en && wr_target == TGT_ACT), .host_idx(wr_en ? LOC_W'(wr_addr) : rd_idx),
    .host_wdata(wr_data), .host_rdata(rd_data));

  predictor_bank #(.N(ACTS_PER_PE)) u_pred (
    .clk, .rst_n, .load(pred_load), .uv_en(pred_uv_en), .n_rows(layer_n_rows),
    .uv_vals(dst_vals), .p(pred_p), .n_pred());

  assign ev_q_early = rx_push && in_v_phase;
  assign ev_op      = op_valid;
endmodule
