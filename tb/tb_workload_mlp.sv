// tb_workload_mlp -- runs the network size the accelerator was evaluated on, at full size:
// a 785-1000-10 multilayer perceptron (784 pixels plus a constant bias input, one hidden
// layer of 1000 neurons, 10 outputs) with a rank-15 output-sparsity predictor on the hidden
// layer and no predictor on the output layer. The 1000 and 15 and the 785 inputs are the
// evaluated sizes; 10 outputs is the digit-class count of the MNIST task. The pixel values and
// weights are random (about 80% zero pixels, like handwritten digits), not a trained network,
// so the predicted sparsity says nothing about accuracy; what is checked is that the machine
// computes exactly what the reference computes with the predictor it was given.
// Layout: 1000 outputs over 64 PEs need 16 rows per PE; rows 1000..1023 do not exist in the
// network, and the host loads all-zero W and U rows for them, so they are predicted zero and
// read 0 (in the output layer, rows 10..63 likewise hold zero weights).
// Reference arithmetic as in the end-to-end test: Q8.8, products rounded down, no saturation
// (the data are chosen so that none can occur, which is checked). Host writes take one cycle
// each, about 0.9 million cycles in all. Checks: every output of both layers, the number of
// activations sent and of datapath operations. Prints the cycles of each layer.
module tb_workload_mlp;
  import sparsenn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, done, wr_en;
  layer_cfg_t cfg;
  logic [31:0] layer_cycles;
  perf_t perf;
  logic [PE_ID_W-1:0] wr_pe, rd_pe;
  wr_target_e wr_target;
  logic [ADDR_W-1:0] wr_addr;
  data_t wr_data, rd_data;
  logic [LOC_W-1:0] rd_idx;
  int checks = 0, failures = 0;

  sparsenn_top dut (.clk, .rst_n, .start, .cfg, .done, .layer_cycles, .perf,
    .wr_en, .wr_pe, .wr_target, .wr_addr, .wr_data, .rd_pe, .rd_idx, .rd_data);
  always #5 clk = !clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // network mechanism counters, summed over all layers
  longint s_hold = 0, s_acc = 0, s_last = 0, s_stall = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One host write, from a falling edge to the next; the caller starts at a falling edge.
  task automatic host_wr(input int pe, input wr_target_e t, input int a, input int d);
    wr_en = 1; wr_pe = PE_ID_W'(pe); wr_target = t; wr_addr = ADDR_W'(a); wr_data = data_t'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  function automatic int fmul(input int a, input int b);
    return (a * b) >>> 8;
  endfunction

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  int act [4096];   // current layer input (global index)
  int nxt [4096];   // current layer output
  longint tot_skipped_inputs = 0, tot_row_skips = 0, tot_q_early = 0, tot_fwd = 0;
  int n_uv_off_layers = 0, n_uv_on_layers = 0;

  // Runs one layer: loads weights, computes the reference, starts, checks.
  task automatic run_layer(input int n_in, input int n_out, input int n_rows, input bit uv_en, input int rank,
                           input int w_base, input int uv_base, input int wr, input int vr, input int ur);
    int n_all, nnz, npred_tot, exp_ops, bound;
    int v [64];
    int w_row [4096];
    bit p;
    n_all = 64 * n_rows;
    @(negedge clk);
    nnz = 0;
    for (int j = 0; j < n_in; j++) if (act[j] > 0) nnz++;
    // predictor
    if (uv_en) begin
      int V [64][4096];
      for (int i = 0; i < rank; i++) begin
        v[i] = 0;
        for (int j = 0; j < n_in; j++) begin
          V[i][j] = rnd(-vr, vr - 1);
          host_wr(j % 64, TGT_V, uv_base + (j / 64) * rank + i, V[i][j]);
          if (act[j] > 0) v[i] += fmul(V[i][j], act[j]);
        end
      end
    end
    npred_tot = 0;
    for (int m = 0; m < n_all; m++) begin
      int u;
      u = 0;
      bound = 0;
      if (uv_en) for (int i = 0; i < rank; i++) begin
        int uw;
        uw = (m < n_out) ? rnd(-ur, ur - 1) : 0;
        host_wr(m % 64, TGT_U, uv_base + i * n_rows + m / 64, uw);
        u += fmul(uw, v[i]);
      end
      p = !uv_en || (u > 0);
      npred_tot += int'(p);
      nxt[m] = 0;
      for (int j = 0; j < n_in; j++) begin
        w_row[j] = (m < n_out) ? rnd(-wr / 2, wr - 1) : 0;
        host_wr(m % 64, TGT_W, w_base + j * n_rows + m / 64, w_row[j]);
        if (act[j] > 0) begin
          nxt[m] += fmul(w_row[j], act[j]);
          bound += (w_row[j] < 0 ? -w_row[j] : w_row[j]) * act[j] / 256 + 1;
        end
      end
      if (!p) nxt[m] = 0;
      chk(bound < 32768, "test data cannot saturate");
    end
    exp_ops = uv_en ? (nnz * rank + rank * n_all + nnz * npred_tot) : nnz * npred_tot;
    // run
    @(negedge clk);
    cfg = '{uv_en: uv_en, n_rows: 7'(n_rows), rank: 7'(rank), w_base: 16'(w_base),
            u_base: 16'(uv_base), v_base: 16'(uv_base)};
    start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    for (int m = 0; m < n_all; m++) begin
      rd_pe = PE_ID_W'(m % 64); rd_idx = LOC_W'(m / 64); #1;
      chk(int'(rd_data) == nxt[m], $sformatf("output %0d: %0d exp %0d", m, rd_data, nxt[m]));
    end
    chk(int'(perf.acts_sent) == nnz, $sformatf("activations sent %0d exp %0d", perf.acts_sent, nnz));
    chk(int'(perf.mac_ops) == exp_ops, $sformatf("datapath ops %0d exp %0d", perf.mac_ops, exp_ops));
    // a PE issues at most one operation per cycle
    chk(layer_cycles >= perf.mac_ops / 64, "cycle count covers the work");
    $display("layer %0d->%0d uv_en=%0b: nonzero inputs %0d, rows computed %0d of %0d (%0d stored), ops %0d, cycles %0d",
             n_in, n_out, uv_en, nnz, npred_tot, n_out, n_all, perf.mac_ops, layer_cycles);
    tot_skipped_inputs += n_in - int'(perf.acts_sent);
    tot_row_skips += perf.row_skips;
    tot_q_early += perf.q_early;
    tot_fwd += perf.forwards;
    s_hold += perf.arb_holds;
    s_acc += perf.router_accs;
    s_last += perf.last_merges;
    s_stall += perf.credit_stalls;
    if (uv_en) n_uv_on_layers++; else n_uv_off_layers++;
    for (int j = 0; j < 4096; j++) act[j] = (j < n_all) ? nxt[j] : 0;
  endtask

  initial begin
    start = 0; wr_en = 0; wr_pe = '0; wr_target = TGT_W; wr_addr = '0; wr_data = '0;
    rd_pe = '0; rd_idx = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // input: 784 pixels, about 80% zero, values below 1.0, plus a bias input of 1.0
    for (int j = 0; j < 4096; j++) act[j] = 0;
    for (int j = 0; j < 785; j++) begin
      act[j] = (j == 784) ? 256 : (($urandom % 5 == 0) ? rnd(1, 255) : 0);
      host_wr(j % 64, TGT_ACT, j / 64, act[j]);
    end
    run_layer(785,  1000, 16, 1'b1, 15, 0,     0, 32, 16, 64);
    run_layer(1000, 10,   1,  1'b0, 1,  12560, 0, 4,  4,  4);
    chk(tot_row_skips > 0, "predicted-zero rows skipped in the hidden layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
