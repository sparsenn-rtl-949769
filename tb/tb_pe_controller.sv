// tb_pe_controller -- the controller alone, with the testbench modelling the register
// files, the ActQueue, the network interface and a 4-cycle datapath. One layer with the
// predictor on (rank 3, 2 rows, nonzero inputs at local slots 1, 4 and 9) must produce,
// in order:
//   V phase : 9 operations (slot c, row i) on 9 consecutive cycles, then 3 partial sums
//             sent with the destination values, with sending held while tx_ready is low;
//   U phase : for each of 3 queued V results, 2 operations (one per row), then one
//             predictor load;
//   W phase : activations sent with index c*64 + pe_id and an end marker; for each of 4
//             queued activations exactly one operation, on the single predicted row;
// and finally `done`. A second layer with the predictor off must go straight to the W phase.
module tb_pe_controller;
  import sparsenn_pkg::*;
  localparam int PEID = 9;
  logic clk = 0, rst_n = 0;
  logic start, done, rf_swap, rf_clear, pred_load, pred_uv_en, q_empty, q_pop;
  logic tx_valid, tx_ready, op_valid, dp_busy, ev_act_sent, ev_row_skip, in_v_phase;
  layer_cfg_t cfg;
  data_t src_vals [ACTS_PER_PE], dst_vals [ACTS_PER_PE];
  logic [ACTS_PER_PE-1:0] src_pos, pred_p;
  logic [LOC_W:0] layer_n_rows;
  flit_t q_head, tx_flit;
  mac_op_t op;
  logic [ADDR_W-1:0] op_base;
  logic [LOC_W:0] op_stride;
  int checks = 0, failures = 0;

  pe_controller dut (.clk, .rst_n, .pe_id(PE_ID_W'(PEID)), .start, .cfg, .done,
    .rf_swap, .rf_clear, .src_vals, .src_pos, .dst_vals, .pred_load, .pred_uv_en,
    .layer_n_rows, .pred_p, .q_head, .q_empty, .q_pop, .tx_valid, .tx_flit, .tx_ready,
    .op_valid, .op, .op_base, .op_stride, .dp_busy, .ev_act_sent, .ev_row_skip, .in_v_phase);
  always #5 clk = !clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // models
  flit_t q[$];
  assign q_empty = (q.size() == 0);
  assign q_head  = q_empty ? flit_t'('0) : q[0];
  logic [3:0] busy_sr;
  assign dp_busy = |busy_sr;
  mac_op_t ops[$];
  int      op_cyc[$];
  flit_t   sent[$];
  int cyc = 0, n_load = 0, n_swap = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    busy_sr <= {busy_sr[2:0], op_valid};
    if (op_valid) begin ops.push_back(op); op_cyc.push_back(cyc); end
    if (q_pop && !q_empty) void'(q.pop_front());
    if (tx_valid && tx_ready) sent.push_back(tx_flit);
    if (pred_load) n_load++;
    if (rf_swap) n_swap++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int slots [3] = '{1, 4, 9};
    int k;
    start = 0; cfg = '0; tx_ready = 1; busy_sr = '0; pred_p = '0;
    for (int i = 0; i < int'(ACTS_PER_PE); i++) begin src_vals[i] = '0; dst_vals[i] = data_t'(i * 3 + 1); end
    src_vals[1] = 16'sd50; src_vals[4] = 16'sd7; src_vals[9] = 16'sd300; src_vals[2] = -16'sd5;
    for (int i = 0; i < int'(ACTS_PER_PE); i++) src_pos[i] = src_vals[i] > 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg = '{uv_en: 1'b1, n_rows: 7'd2, rank: 7'd3, w_base: 16'd11, u_base: 16'd22, v_base: 16'd33};
    start = 1;
    @(negedge clk);
    start = 0;
    // V phase
    while (ops.size() < 9) @(negedge clk);
    k = 0;
    foreach (slots[s]) for (int i = 0; i < 3; i++) begin
      chk(ops[k].mem == MEM_V && int'(ops[k].in_idx) == slots[s] && int'(ops[k].out_idx) == i &&
          ops[k].act == src_vals[slots[s]], $sformatf("V op %0d", k));
      k++;
    end
    chk(op_cyc[8] - op_cyc[0] == 8, "V ops issued one per cycle");
    // hold tx_ready low for a while during the send
    tx_ready = 0;
    repeat (10) @(negedge clk);
    chk(sent.size() == 0, "no send without tx_ready");
    tx_ready = 1;
    while (sent.size() < 3) @(negedge clk);
    for (int i = 0; i < 3; i++)
      chk(sent[i].kind == FLIT_PSUM && int'(sent[i].idx) == i && sent[i].val == dst_vals[i], "partial sum flit");
    // U phase
    for (int i = 0; i < 3; i++) q.push_back('{kind: FLIT_PSUM, idx: IDX_W'(i), val: data_t'(100 + i)});
    while (ops.size() < 15) @(negedge clk);
    k = 9;
    for (int i = 0; i < 3; i++) for (int m = 0; m < 2; m++) begin
      chk(ops[k].mem == MEM_U && int'(ops[k].in_idx) == i && int'(ops[k].out_idx) == m &&
          int'(ops[k].act) == 100 + i, $sformatf("U op %0d", k));
      k++;
    end
    pred_p = 64'b10;                     // only row 1 predicted nonzero
    while (n_load == 0) @(negedge clk);
    // W phase
    for (int t = 0; t < 4; t++) q.push_back('{kind: FLIT_ACT, idx: IDX_W'(t * 64 + 3), val: data_t'(t + 1)});
    q.push_back('{kind: FLIT_LAST, idx: '1, val: '0});
    while (!done) @(negedge clk);
    chk(ops.size() == 19, $sformatf("total ops %0d", ops.size()));
    for (int t = 0; t < 4; t++)
      chk(ops[15 + t].mem == MEM_W && int'(ops[15 + t].out_idx) == 1 && int'(ops[15 + t].in_idx) == t * 64 + 3,
          "W op on predicted row only");
    chk(sent.size() == 3 + 3 + 1, "W phase sends");
    foreach (slots[s])
      chk(sent[3 + s].kind == FLIT_ACT && int'(sent[3 + s].idx) == slots[s] * 64 + PEID, "activation index");
    chk(sent[6].kind == FLIT_LAST, "end marker");
    chk(n_load == 1 && n_swap == 1, "one predictor load and one swap");
    // second layer, predictor off
    ops.delete(); sent.delete(); n_load = 0;
    pred_p = 64'b11;
    @(negedge clk);
    cfg.uv_en = 1'b0;
    start = 1;
    @(negedge clk);
    start = 0;
    q.push_back('{kind: FLIT_ACT, idx: IDX_W'(5), val: data_t'(2)});
    q.push_back('{kind: FLIT_LAST, idx: '1, val: '0});
    while (!done) @(negedge clk);
    chk(n_load == 1, "predictor set when off");
    chk(ops.size() == 2 && ops[0].mem == MEM_W && ops[1].mem == MEM_W, "uv off: only W ops");
    chk(sent.size() == 4 && sent[0].kind == FLIT_ACT, "uv off: no partial sums");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
