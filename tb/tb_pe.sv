// tb_pe -- one processing element (number 5) with the testbench standing in for the
// rest of the chip: it plays the leaf router on both links and adds the other PEs'
// contributions itself.
// Layer 1, predictor on (4 rows, rank 8): the PE's 8 V partial sums are checked against
// integer arithmetic; the testbench adds an offset per row ("other PEs") and returns the
// totals; the PE's activations must then come up as FLIT_ACT with index c*64+5, followed
// by an end marker; activations of other PEs are mixed in, and the final destination
// registers must equal the reference: the W sum for rows with U*V*a > 0 and 0 otherwise.
// Layer 2, predictor off: the outputs of layer 1 are the inputs (swap, ReLU on read).
// The number of datapath operations must equal the work left after skipping
// (one per cycle issue), and the PE must report done.
module tb_pe;
  import sparsenn_pkg::*;
  localparam int K = 5, NR = 4, RK = 8, NLOC = 6, NOTHER = 12;
  logic clk = 0, rst_n = 0;
  logic start, done, up_valid, up_credit, dn_valid, dn_credit, wr_en;
  logic ev_act_sent, ev_row_skip, ev_q_early, ev_fwd, ev_op;
  layer_cfg_t cfg;
  flit_t up_flit, dn_flit;
  wr_target_e wr_target;
  logic [ADDR_W-1:0] wr_addr;
  data_t wr_data, rd_data;
  logic [LOC_W-1:0] rd_idx;
  int checks = 0, failures = 0, n_ops = 0, n_skip = 0, n_fwd = 0;

  pe dut (.clk, .rst_n, .pe_id(PE_ID_W'(K)), .start, .cfg, .done, .up_valid, .up_flit, .up_credit,
    .dn_valid, .dn_flit, .dn_credit, .wr_en, .wr_target, .wr_addr, .wr_data, .rd_idx, .rd_data,
    .ev_act_sent, .ev_row_skip, .ev_q_early, .ev_fwd, .ev_op);
  always #5 clk = !clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // leaf-router model
  flit_t up_log[$];
  flit_t dn_q[$];
  int    dn_cr = 16;
  always @(posedge clk) if (rst_n) begin
    up_credit <= 1'b0;
    if (up_valid) begin up_log.push_back(up_flit); up_credit <= 1'b1; end
    if (dn_credit) dn_cr++;
    dn_valid <= 1'b0;
    if (dn_q.size() > 0 && dn_cr > 0) begin
      dn_valid <= 1'b1;
      dn_flit  <= dn_q.pop_front();
      dn_cr--;
    end
    if (ev_op) n_ops++;
    if (ev_row_skip) n_skip++;
    if (ev_fwd) n_fwd++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_wr(input wr_target_e t, input int a, input int d);
    @(negedge clk);
    wr_en = 1; wr_target = t; wr_addr = ADDR_W'(a); wr_data = data_t'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic int fmul(input int a, input int b);
    return (a * b) >>> 8;
  endfunction

  int a_loc [NLOC];
  int V [RK][NLOC];
  int U [NR][RK];
  int oj [NOTHER], oa [NOTHER];
  int W [NR][4096];
  int psum [RK], vtot [RK], u [NR], o1 [NR], o2 [NR];
  bit p [NR];

  initial begin
    int nnz, npred, exp_ops, n_act_flits, w2_base;
    start = 0; wr_en = 0; wr_target = TGT_W; wr_addr = '0; wr_data = '0; rd_idx = '0;
    cfg = '0; up_credit = 0; dn_valid = 0; dn_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // data
    a_loc = '{300, 0, -40, 128, 77, 0};
    for (int i = 0; i < RK; i++) for (int c = 0; c < NLOC; c++) V[i][c] = int'($urandom % 128) - 64;
    for (int m = 0; m < NR; m++) for (int i = 0; i < RK; i++) U[m][i] = int'($urandom % 128) - 64;
    for (int t = 0; t < NOTHER; t++) begin
      oj[t] = t * 64 + (t % 3);          // other PEs' activations
      oa[t] = 1 + int'($urandom % 255);
    end
    for (int m = 0; m < NR; m++) for (int j = 0; j < 4096; j++) W[m][j] = int'($urandom % 64) - 32;
    // load memories
    for (int c = 0; c < NLOC; c++) host_wr(TGT_ACT, c, a_loc[c]);
    for (int i = 0; i < RK; i++) for (int c = 0; c < NLOC; c++) host_wr(TGT_V, 100 + c * RK + i, V[i][c]);
    for (int m = 0; m < NR; m++) for (int i = 0; i < RK; i++) host_wr(TGT_U, 200 + i * NR + m, U[m][i]);
    for (int m = 0; m < NR; m++) begin
      for (int c = 0; c < NLOC; c++) host_wr(TGT_W, 1000 + (c * 64 + K) * NR + m, W[m][c * 64 + K]);
      for (int t = 0; t < NOTHER; t++) host_wr(TGT_W, 1000 + oj[t] * NR + m, W[m][oj[t]]);
    end
    // reference, layer 1
    nnz = 0;
    for (int c = 0; c < NLOC; c++) if (a_loc[c] > 0) nnz++;
    for (int i = 0; i < RK; i++) begin
      psum[i] = 0;
      for (int c = 0; c < NLOC; c++) if (a_loc[c] > 0) psum[i] += fmul(V[i][c], a_loc[c]);
      vtot[i] = psum[i] + int'($urandom % 200) - 100;
    end
    npred = 0;
    for (int m = 0; m < NR; m++) begin
      u[m] = 0;
      for (int i = 0; i < RK; i++) u[m] += fmul(U[m][i], vtot[i]);
      p[m] = (u[m] > 0);
      npred += int'(p[m]);
      o1[m] = 0;
      if (p[m]) begin
        for (int c = 0; c < NLOC; c++) if (a_loc[c] > 0) o1[m] += fmul(W[m][c * 64 + K], a_loc[c]);
        for (int t = 0; t < NOTHER; t++) o1[m] += fmul(W[m][oj[t]], oa[t]);
      end
    end
    // run layer 1
    @(negedge clk);
    cfg = '{uv_en: 1'b1, n_rows: 7'(NR), rank: 7'(RK), w_base: 16'd1000, u_base: 16'd200, v_base: 16'd100};
    start = 1;
    @(negedge clk);
    start = 0;
    while (up_log.size() < RK) @(negedge clk);
    for (int i = 0; i < RK; i++)
      chk(up_log[i].kind == FLIT_PSUM && int'(up_log[i].idx) == i && int'(up_log[i].val) == psum[i],
          $sformatf("V partial sum %0d: %0d exp %0d", i, up_log[i].val, psum[i]));
    for (int i = 0; i < RK; i++) dn_q.push_back('{kind: FLIT_PSUM, idx: IDX_W'(i), val: data_t'(vtot[i])});
    while (up_log.size() < RK + nnz + 1) @(negedge clk);
    n_act_flits = 0;
    for (int c = 0; c < NLOC; c++) if (a_loc[c] > 0) begin
      chk(up_log[RK + n_act_flits].kind == FLIT_ACT && int'(up_log[RK + n_act_flits].idx) == c * 64 + K &&
          int'(up_log[RK + n_act_flits].val) == a_loc[c], "activation sent up");
      n_act_flits++;
    end
    chk(up_log[RK + nnz].kind == FLIT_LAST, "end marker sent up");
    // broadcast: interleave own and other activations, then the merged end marker
    for (int t = 0; t < NOTHER; t++) begin
      dn_q.push_back('{kind: FLIT_ACT, idx: IDX_W'(oj[t]), val: data_t'(oa[t])});
      if (t < NLOC && a_loc[t] > 0) dn_q.push_back('{kind: FLIT_ACT, idx: IDX_W'(t * 64 + K), val: data_t'(a_loc[t])});
    end
    dn_q.push_back('{kind: FLIT_LAST, idx: '1, val: '0});
    while (!done) @(negedge clk);
    for (int m = 0; m < NR; m++) begin
      rd_idx = LOC_W'(m); #1;
      chk(int'(rd_data) == o1[m], $sformatf("layer 1 row %0d: %0d exp %0d (p=%0d)", m, rd_data, o1[m], p[m]));
    end
    exp_ops = nnz * RK + RK * NR + (nnz + NOTHER) * npred;
    chk(n_ops == exp_ops, $sformatf("datapath operations %0d exp %0d", n_ops, exp_ops));
    if (npred < NR) chk(n_skip == nnz + NOTHER, $sformatf("row skips %0d", n_skip));
    // layer 2, predictor off: inputs are layer-1 outputs o1[0..3] at local slots 0..3
    up_log.delete();
    n_ops = 0;
    w2_base = 30000;
    for (int m = 0; m < NR; m++) for (int c = 0; c < NR; c++)
      host_wr(TGT_W, w2_base + (c * 64 + K) * NR + m, W[m][c]);
    nnz = 0;
    for (int c = 0; c < NR; c++) if (o1[c] > 0) nnz++;
    for (int m = 0; m < NR; m++) begin
      o2[m] = 0;
      for (int c = 0; c < NR; c++) if (o1[c] > 0) o2[m] += fmul(W[m][c], o1[c]);
    end
    @(negedge clk);
    cfg = '{uv_en: 1'b0, n_rows: 7'(NR), rank: 7'(RK), w_base: 16'(w2_base), u_base: 16'd0, v_base: 16'd0};
    start = 1;
    @(negedge clk);
    start = 0;
    while (up_log.size() < nnz + 1) @(negedge clk);
    foreach (up_log[i]) dn_q.push_back(up_log[i]);
    while (!done) @(negedge clk);
    for (int m = 0; m < NR; m++) begin
      rd_idx = LOC_W'(m); #1;
      chk(int'(rd_data) == o2[m], $sformatf("layer 2 row %0d: %0d exp %0d", m, rd_data, o2[m]));
    end
    chk(n_ops == nnz * NR, $sformatf("layer 2 operations %0d exp %0d", n_ops, nnz * NR));
    $display("forwarded sums %0d, predicted rows %0d of %0d, outputs %0d %0d %0d %0d", n_fwd, npred, NR, o1[0], o1[1], o1[2], o1[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
