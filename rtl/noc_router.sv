// noc_router -- one node of the H-tree (leaf, internal or root router).
//
// Up path (children to parent), the paper's buffered flow control:
//   RC      a flit arriving from child c is registered ("routing computation" is trivial
//           in a tree: up always goes to the parent) and then enters buffer c.
//   SA      switch allocation looks at the four buffer heads, if a parent credit is free:
//             - nonzero activations (FLIT_ACT): the one with the smallest index is
//               granted, the others stay buffered for the next cycle;
//             - partial sums (FLIT_PSUM): when all four heads hold one, all four are
//               popped together (column-based schedule);
//             - end markers (FLIT_LAST): when all four heads hold one, they are merged.
//   ST/ACC  switch traversal; for partial sums the four values are added here.
//   LT      link traversal: the flit is driven to the parent from a register.
//   So one flit leaves per cycle when credits allow, four cycles after SA sees it.
// Down path (parent to children): flits are buffered and broadcast to all four
// children at once when every child has a credit; a registered output drives the links.
// Flow control is credit based on every link: a sender counts the free entries of the
// receiver's buffer and the receiver returns one credit pulse per entry it frees.
// Following the paper: four inputs per node, smallest index wins, losers wait in the
// node's buffer, accumulation of partial sums inside the 4-stage RC/SA/ST-ACC/LT
// pipeline, packet buffers with credits. This design's choices: buffer depths, the
// flit format, the end marker, and the broadcast-down path (the paper says only that
// the root broadcasts).
module noc_router
  import sparsenn_pkg::*;
#(
  parameter int unsigned UP_DEPTH       = 8,   // buffer per child input
  parameter int unsigned DOWN_DEPTH     = 8,   // buffer of the down path
  parameter int unsigned PARENT_CREDITS = 8,   // depth of the parent's buffer for this node
  parameter int unsigned CHILD_CREDITS  = 8    // depth of each child's down buffer
) (
  input  logic  clk,
  input  logic  rst_n,
  // up path
  input  logic  c_up_valid  [RADIX],
  input  flit_t c_up_flit   [RADIX],
  output logic  c_up_credit [RADIX],
  output logic  p_up_valid,
  output flit_t p_up_flit,
  input  logic  p_up_credit,
  // down path
  input  logic  p_dn_valid,
  input  flit_t p_dn_flit,
  output logic  p_dn_credit,
  output logic  c_dn_valid,
  output flit_t c_dn_flit,
  input  logic  c_dn_credit [RADIX],
  // events, for statistics
  output logic  ev_arb_hold,    // an activation lost arbitration and stayed buffered
  output logic  ev_acc,         // four partial sums were accumulated
  output logic  ev_merge_last,  // four end markers were merged
  output logic  ev_credit_stall // a flit was ready but no parent credit was left
);
  localparam int unsigned PCW = $clog2(PARENT_CREDITS + 1);
  localparam int unsigned CCW = $clog2(CHILD_CREDITS + 1);

  // ---------------- up path ----------------
  logic  rc_v [RADIX];
  flit_t rc_f [RADIX];
  flit_t head [RADIX];
  logic  empty [RADIX];
  logic  pop  [RADIX];

  for (genvar c = 0; c < RADIX; c++) begin : g_in
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rc_v[c] <= 1'b0;
        rc_f[c] <= '0;
      end else begin
        rc_v[c] <= c_up_valid[c];
        rc_f[c] <= c_up_flit[c];
      end
    end
    act_queue #(.DEPTH(UP_DEPTH)) u_buf (
      .clk, .rst_n, .push(rc_v[c]), .push_data(rc_f[c]), .pop(pop[c]),
      .head(head[c]), .empty(empty[c]), .full(), .count());
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) c_up_credit[c] <= 1'b0;
      else        c_up_credit[c] <= pop[c];
    end
  end

  // SA: switch allocation
  logic [PCW-1:0] p_credits;
  logic           any_act, all_psum, all_last, grant;
  logic [1:0]     win;
  logic [2:0]     n_act;

  always_comb begin
    any_act  = 1'b0;
    all_psum = 1'b1;
    all_last = 1'b1;
    win      = '0;
    n_act    = '0;
    for (int c = 0; c < RADIX; c++) begin
      if (!empty[c] && head[c].kind == FLIT_ACT) begin
        n_act = n_act + 3'd1;
        if (!any_act || head[c].idx < head[win].idx) win = 2'(c);
        any_act = 1'b1;
      end
      if (empty[c] || head[c].kind != FLIT_PSUM) all_psum = 1'b0;
      if (empty[c] || head[c].kind != FLIT_LAST) all_last = 1'b0;
    end
    grant = (p_credits != 0) && (any_act || all_psum || all_last);
    for (int c = 0; c < RADIX; c++)
      pop[c] = grant && (any_act ? (win == 2'(c)) : 1'b1);
  end

  assign ev_arb_hold     = grant && any_act && (n_act > 3'd1);
  assign ev_acc          = grant && !any_act && all_psum;
  assign ev_merge_last   = grant && !any_act && all_last;
  assign ev_credit_stall = (p_credits == 0) && (any_act || all_psum || all_last);

  // SA -> ST/ACC pipeline register
  logic  sa_v;
  flit_t sa_f;
  data_t sa_vals [RADIX];
  // ST/ACC -> LT
  logic  st_v;
  flit_t st_f;

  data_t acc_sum;
  always_comb begin
    acc_sum = sa_vals[0];
    for (int c = 1; c < RADIX; c++) acc_sum = fx_add(acc_sum, sa_vals[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_credits  <= PCW'(PARENT_CREDITS);
      sa_v       <= 1'b0;
      sa_f       <= '0;
      for (int c = 0; c < RADIX; c++) sa_vals[c] <= '0;
      st_v       <= 1'b0;
      st_f       <= '0;
      p_up_valid <= 1'b0;
      p_up_flit  <= '0;
    end else begin
      p_credits <= p_credits - PCW'(grant) + PCW'(p_up_credit);
      // SA
      sa_v <= grant;
      if (grant) begin
        sa_f <= any_act ? head[win] : head[0];
        for (int c = 0; c < RADIX; c++) sa_vals[c] <= head[c].val;
      end
      // ST / ACC
      st_v <= sa_v;
      if (sa_v) begin
        st_f <= sa_f;
        if (sa_f.kind == FLIT_PSUM) st_f.val <= acc_sum;
      end
      // LT
      p_up_valid <= st_v;
      if (st_v) p_up_flit <= st_f;
    end
  end

  // ---------------- down path ----------------
  logic           dn_rc_v;
  flit_t          dn_rc_f;
  flit_t          dn_head;
  logic           dn_empty, dn_pop, all_child_credit;
  logic [CCW-1:0] c_credits [RADIX];

  always_comb begin
    all_child_credit = 1'b1;
    for (int c = 0; c < RADIX; c++)
      if (c_credits[c] == 0) all_child_credit = 1'b0;
  end
  assign dn_pop = !dn_empty && all_child_credit;

  act_queue #(.DEPTH(DOWN_DEPTH)) u_dn_buf (
    .clk, .rst_n, .push(dn_rc_v), .push_data(dn_rc_f), .pop(dn_pop),
    .head(dn_head), .empty(dn_empty), .full(), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dn_rc_v     <= 1'b0;
      dn_rc_f     <= '0;
      p_dn_credit <= 1'b0;
      c_dn_valid  <= 1'b0;
      c_dn_flit   <= '0;
      for (int c = 0; c < RADIX; c++) c_credits[c] <= CCW'(CHILD_CREDITS);
    end else begin
      dn_rc_v     <= p_dn_valid;
      dn_rc_f     <= p_dn_flit;
      p_dn_credit <= dn_pop;
      c_dn_valid  <= dn_pop;
      if (dn_pop) c_dn_flit <= dn_head;
      for (int c = 0; c < RADIX; c++)
        c_credits[c] <= c_credits[c] - CCW'(dn_pop) + CCW'(c_dn_credit[c]);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) p_credits <= PCW'(PARENT_CREDITS))
    else $error("noc_router: parent credit overflow");
endmodule
