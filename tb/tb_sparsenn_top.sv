// tb_sparsenn_top -- end-to-end test of the whole accelerator at its default size
// (64 PEs, full memories). Three fully connected layers are run back to back:
//   layer 1: 256 inputs -> 128 outputs, predictor on, rank 32
//   layer 2: 128 inputs ->  64 outputs, predictor off (input sparsity only)
//   layer 3:  64 inputs ->  64 outputs, predictor on, rank 16
// Weights are random small integers (fixed point, 8 fraction bits) chosen so that no sum
// can saturate; the reference below is plain integer arithmetic:
//   v = V a+, u = U v, p = (u > 0), out = p ? W a+ : 0, with a+ = max(a, 0) and every
//   product rounded down after the shift by 8 bits.
// After each layer every output is read back and compared. The testbench also counts
// how often each mechanism of the design occurred and fails if one never did: skipped
// zero inputs, skipped predicted-zero rows, a layer without predictor, router
// arbitration holding an activation back, partial-sum accumulation in routers, merging
// of end markers, credit stalls, V results arriving while a PE was still in its V phase,
// and sum forwarding in the MAC. The datapath operation count must equal the work that
// remains after skipping.
module tb_sparsenn_top;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drives one host write from a falling edge to the next, so exactly one rising edge sees it.
  task automatic host_wr(input int pe, input wr_target_e t, input int a, input int d);
    @(negedge clk);
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
  task automatic run_layer(input int n_in, input int n_rows, input bit uv_en, input int rank,
                           input int w_base, input int uv_base, input int wr, input int vr, input int ur);
    int n_out, nnz, npred_tot, exp_ops, bound;
    int v [64];
    int w_row [4096];
    bit p;
    n_out = 64 * n_rows;
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
    for (int m = 0; m < n_out; m++) begin
      int u;
      u = 0;
      bound = 0;
      if (uv_en) for (int i = 0; i < rank; i++) begin
        int uw;
        uw = rnd(-ur, ur - 1);
        host_wr(m % 64, TGT_U, uv_base + i * n_rows + m / 64, uw);
        u += fmul(uw, v[i]);
      end
      p = !uv_en || (u > 0);
      npred_tot += int'(p);
      nxt[m] = 0;
      for (int j = 0; j < n_in; j++) begin
        w_row[j] = rnd(-wr / 2, wr - 1);
        host_wr(m % 64, TGT_W, w_base + j * n_rows + m / 64, w_row[j]);
        if (act[j] > 0) begin
          nxt[m] += fmul(w_row[j], act[j]);
          bound += (w_row[j] < 0 ? -w_row[j] : w_row[j]) * act[j] / 256 + 1;
        end
      end
      if (!p) nxt[m] = 0;
      chk(bound < 32768, "test data cannot saturate");
    end
    exp_ops = uv_en ? (nnz * rank + rank * n_out + nnz * npred_tot) : nnz * npred_tot;
    // run
    @(negedge clk);
    cfg = '{uv_en: uv_en, n_rows: 7'(n_rows), rank: 7'(rank), w_base: 16'(w_base),
            u_base: 16'(uv_base), v_base: 16'(uv_base)};
    start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    for (int m = 0; m < n_out; m++) begin
      rd_pe = PE_ID_W'(m % 64); rd_idx = LOC_W'(m / 64); #1;
      chk(int'(rd_data) == nxt[m], $sformatf("output %0d: %0d exp %0d", m, rd_data, nxt[m]));
    end
    chk(int'(perf.acts_sent) == nnz, $sformatf("activations sent %0d exp %0d", perf.acts_sent, nnz));
    chk(int'(perf.mac_ops) == exp_ops, $sformatf("datapath ops %0d exp %0d", perf.mac_ops, exp_ops));
    // a PE issues at most one operation per cycle
    chk(layer_cycles >= perf.mac_ops / 64, "cycle count covers the work");
    $display("layer %0d->%0d uv_en=%0b: nonzero inputs %0d, rows computed %0d of %0d, ops %0d, cycles %0d",
             n_in, n_out, uv_en, nnz, npred_tot, n_out, perf.mac_ops, layer_cycles);
    tot_skipped_inputs += n_in - int'(perf.acts_sent);
    tot_row_skips += perf.row_skips;
    tot_q_early += perf.q_early;
    tot_fwd += perf.forwards;
    s_hold += perf.arb_holds;
    s_acc += perf.router_accs;
    s_last += perf.last_merges;
    s_stall += perf.credit_stalls;
    if (uv_en) n_uv_on_layers++; else n_uv_off_layers++;
    for (int j = 0; j < 4096; j++) act[j] = (j < n_out) ? nxt[j] : 0;
  endtask

  initial begin
    start = 0; wr_en = 0; wr_pe = '0; wr_target = TGT_W; wr_addr = '0; wr_data = '0;
    rd_pe = '0; rd_idx = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // input: 256 activations, about half zero
    for (int j = 0; j < 4096; j++) act[j] = 0;
    for (int j = 0; j < 256; j++) begin
      act[j] = ($urandom % 2 == 0) ? 0 : rnd(1, 255);
      host_wr(j % 64, TGT_ACT, j / 64, act[j]);
    end
    run_layer(256, 2, 1'b1, 32, 0,    0,   32, 16, 64);
    run_layer(128, 1, 1'b0, 1,  1024, 0,   4,  4,  4);
    run_layer(64,  1, 1'b1, 16, 2048, 512, 4,  32, 64);
    $display("mechanisms: skipped inputs %0d, row skips %0d, uv_off layers %0d, uv_on layers %0d",
             tot_skipped_inputs, tot_row_skips, n_uv_off_layers, n_uv_on_layers);
    $display("            arbitration holds %0d, accumulations %0d, end merges %0d, credit stalls %0d",
             s_hold, s_acc, s_last, s_stall);
    $display("            early V results %0d, forwarded sums %0d", tot_q_early, tot_fwd);
    chk(tot_skipped_inputs > 0, "zero inputs skipped");
    chk(tot_row_skips > 0, "predicted-zero rows skipped");
    chk(n_uv_off_layers > 0 && n_uv_on_layers > 0, "both predictor modes ran");
    chk(s_hold > 0, "arbitration held an activation");
    chk(s_acc > 0, "partial sums accumulated in routers");
    chk(s_last > 0, "end markers merged");
    chk(s_stall > 0, "credit stall");
    chk(tot_q_early > 0, "V results queued during V phase");
    chk(tot_fwd > 0, "MAC forwarding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
