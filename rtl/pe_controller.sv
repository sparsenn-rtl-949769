// pe_controller -- the PE controller: runs one layer through the V, U and W phases.
//
// A layer starts with `start`; the ping-pong register files are swapped so that the
// previous layer's outputs (or the host-loaded input) become the source.
//   V phase (column-based, only with uv_en): the source-side LNZD walks the local nonzero
//     activations a_c; for each, r operations accumulate V[i][c]*a_c into destination
//     register i, i = 0..r-1. After the pipeline drains, the r partial sums are sent up
//     the H-tree as FLIT_PSUM flits (row index i), where the routers add them.
//   U phase (row-based): the root broadcasts the r finished sums of V*a back; they queue
//     in the ActQueue. For each queue head (v_i, i) the PE accumulates U[m][i]*v_i into
//     every local row m. After r heads the predictor bank stores sign(U*V*a) per row.
//   W phase (row-based): the source LNZD sends every local nonzero activation up the
//     tree with its global index j = c*64 + pe_id, then an end marker (FLIT_LAST). At the
//     same time, for each queued activation (a_j, j) the predictor LNZD visits only the
//     rows predicted nonzero and accumulates W[m][j]*a_j into them; rows predicted zero
//     are skipped. The phase ends when this PE has sent its end marker and has received
//     the root's merged end marker, i.e. every PE's activations have been seen.
// With uv_en = 0 the V and U phases are skipped and every row is computed.
// Issue rate: one datapath operation per cycle while work is available. The destination
// register file is cleared at the start of every phase; phases are separated by waiting
// until the 5-stage datapath is empty. The three phases and their schedules are the
// paper's; the order of scanning, the end marker and the drain points are this design's.
module pe_controller
  import sparsenn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PE_ID_W-1:0] pe_id,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               done,
  // activation register files
  output logic               rf_swap,
  output logic               rf_clear,
  input  data_t              src_vals [ACTS_PER_PE],
  input  logic [ACTS_PER_PE-1:0] src_pos,
  input  data_t              dst_vals [ACTS_PER_PE],
  // predictor bank
  output logic               pred_load,
  output logic               pred_uv_en,
  output logic [LOC_W:0]     layer_n_rows,
  input  logic [ACTS_PER_PE-1:0] pred_p,
  // ActQueue
  input  flit_t              q_head,
  input  logic               q_empty,
  output logic               q_pop,
  // network interface, send side
  output logic               tx_valid,
  output flit_t              tx_flit,
  input  logic               tx_ready,
  // datapath
  output logic               op_valid,
  output mac_op_t            op,
  output logic [ADDR_W-1:0]  op_base,
  output logic [LOC_W:0]     op_stride,
  input  logic               dp_busy,
  // events, for statistics
  output logic               ev_act_sent,   // a nonzero activation was sent
  output logic               ev_row_skip,   // a received activation skipped predicted-zero rows
  output logic               in_v_phase     // the PE is computing or sending its V partial sums
);
  typedef enum logic [3:0] {
    S_IDLE, S_PREP, S_V_CALC, S_V_DRAIN, S_V_SEND, S_U_CALC, S_U_DRAIN, S_U_PRED,
    S_W_RUN, S_W_DRAIN, S_DONE
  } state_e;

  state_e                 state;
  layer_cfg_t             cfg_q;
  logic [ACTS_PER_PE-1:0] used;      // source entries already handled
  logic [ACTS_PER_PE-1:0] wdone;     // rows already visited for the queue head
  logic [LOC_W:0]         cnt;       // row / rank counter
  logic [LOC_W:0]         consumed;  // V results consumed in the U phase
  logic                   sent_last, got_last;

  // LNZD over the nonzero source activations not yet handled
  logic                   src_found;
  logic [LOC_W-1:0]       src_idx;
  lnzd #(.N(ACTS_PER_PE)) u_lnzd_src (.mask(src_pos & ~used), .found(src_found), .idx(src_idx));

  // LNZD over the predicted-nonzero rows not yet visited for the queue head
  logic                   row_found;
  logic [LOC_W-1:0]       row_idx;
  logic [ACTS_PER_PE-1:0] row_mask, row_rest;
  assign row_mask = pred_p & ~wdone;
  lnzd #(.N(ACTS_PER_PE)) u_lnzd_row (.mask(row_mask), .found(row_found), .idx(row_idx));
  always_comb begin
    row_rest = row_mask;
    row_rest[row_idx] = 1'b0;
  end

  assign done       = (state == S_DONE);
  assign pred_uv_en   = cfg_q.uv_en;
  assign layer_n_rows = cfg_q.n_rows;

  always_comb begin
    rf_swap     = 1'b0;
    rf_clear    = 1'b0;
    pred_load   = 1'b0;
    q_pop       = 1'b0;
    tx_valid    = 1'b0;
    tx_flit     = '0;
    op_valid    = 1'b0;
    op          = '0;
    op_base     = cfg_q.w_base;
    op_stride   = cfg_q.n_rows;
    ev_act_sent = 1'b0;
    ev_row_skip = 1'b0;
    rf_swap     = (state inside {S_IDLE, S_DONE}) && start;
    unique case (state)
      S_PREP: begin
        rf_clear  = 1'b1;
        pred_load = !cfg_q.uv_en;           // no predictor: all rows active
      end
      S_V_CALC: begin
        op_base   = cfg_q.v_base;
        op_stride = cfg_q.rank;
        op_valid  = src_found;
        op.mem    = MEM_V;
        op.act    = src_vals[src_idx];
        op.in_idx = IDX_W'(src_idx);
        op.out_idx = LOC_W'(cnt);
      end
      S_V_SEND: begin
        tx_valid     = 1'b1;
        tx_flit.kind = FLIT_PSUM;
        tx_flit.idx  = IDX_W'(cnt);
        tx_flit.val  = dst_vals[LOC_W'(cnt)];
        rf_clear     = tx_ready && (cnt == cfg_q.rank - 1);
      end
      S_U_CALC: begin
        op_base   = cfg_q.u_base;
        op_stride = cfg_q.n_rows;
        if (consumed != cfg_q.rank && !q_empty) begin
          op_valid   = 1'b1;
          op.mem     = MEM_U;
          op.act     = q_head.val;
          op.in_idx  = q_head.idx;
          op.out_idx = LOC_W'(cnt);
          q_pop      = (cnt == cfg_q.n_rows - 1);
        end
      end
      S_U_DRAIN: pred_load = !dp_busy;
      S_U_PRED:  rf_clear  = 1'b1;
      S_W_RUN: begin
        // send side
        if (src_found) begin
          tx_valid     = 1'b1;
          tx_flit.kind = FLIT_ACT;
          tx_flit.idx  = {src_idx, pe_id};
          tx_flit.val  = src_vals[src_idx];
          ev_act_sent  = tx_ready;
        end else if (!sent_last) begin
          tx_valid     = 1'b1;
          tx_flit.kind = FLIT_LAST;
          tx_flit.idx  = '1;
        end
        // compute side
        if (!q_empty) begin
          if (q_head.kind == FLIT_LAST) begin
            q_pop = 1'b1;
          end else if (row_found) begin
            op_valid   = 1'b1;
            op.mem     = MEM_W;
            op.act     = q_head.val;
            op.in_idx  = q_head.idx;
            op.out_idx = row_idx;
            q_pop      = (row_rest == '0);
            ev_row_skip = q_pop && (pred_p != ((ACTS_PER_PE)'(1) << cfg_q.n_rows) - 1);
          end else begin
            q_pop       = 1'b1;              // no row of this PE is predicted nonzero
            ev_row_skip = 1'b1;
          end
        end
      end
      default: ;
    endcase
  end

  assign in_v_phase = (state inside {S_V_CALC, S_V_DRAIN, S_V_SEND});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cfg_q     <= '0;
      used      <= '0;
      wdone     <= '0;
      cnt       <= '0;
      consumed  <= '0;
      sent_last <= 1'b0;
      got_last  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          cfg_q <= cfg;
          state <= S_PREP;
        end
        S_PREP: begin
          used      <= '0;
          wdone     <= '0;
          cnt       <= '0;
          consumed  <= '0;
          sent_last <= 1'b0;
          got_last  <= 1'b0;
          state     <= cfg_q.uv_en ? S_V_CALC : S_W_RUN;
        end
        S_V_CALC: begin
          if (!src_found) state <= S_V_DRAIN;
          else if (cnt == cfg_q.rank - 1) begin
            cnt           <= '0;
            used[src_idx] <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_V_DRAIN: if (!dp_busy) begin
          cnt   <= '0;
          state <= S_V_SEND;
        end
        S_V_SEND: if (tx_ready) begin
          if (cnt == cfg_q.rank - 1) begin
            cnt   <= '0;
            state <= S_U_CALC;
          end else cnt <= cnt + 1'b1;
        end
        S_U_CALC: begin
          if (consumed == cfg_q.rank) state <= S_U_DRAIN;
          else if (!q_empty) begin
            if (cnt == cfg_q.n_rows - 1) begin
              cnt      <= '0;
              consumed <= consumed + 1'b1;
            end else cnt <= cnt + 1'b1;
          end
        end
        S_U_DRAIN: if (!dp_busy) state <= S_U_PRED;
        S_U_PRED: begin
          used  <= '0;
          state <= S_W_RUN;
        end
        S_W_RUN: begin
          if (src_found && tx_ready) used[src_idx] <= 1'b1;
          if (!src_found && !sent_last && tx_ready) sent_last <= 1'b1;
          if (!q_empty) begin
            if (q_head.kind == FLIT_LAST) got_last <= 1'b1;
            else if (row_found) wdone <= q_pop ? '0 : (wdone | (ACTS_PER_PE'(1) << row_idx));
          end
          if (sent_last && got_last) state <= S_W_DRAIN;
        end
        S_W_DRAIN: if (!dp_busy) state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
