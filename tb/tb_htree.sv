// tb_htree -- the full 64-port H-tree with testbench PEs on every port.
// Test 1 (row-based broadcast): every PE sends a random set of nonzero activations with
//   global indices c*64 + k, then an end marker. Every PE must receive every activation
//   exactly once, followed by exactly one end marker, while its queue is drained at a
//   random rate (credits on the down links hold the root back).
// Test 2 (column-based accumulation): every PE sends 8 partial sums; every PE must
//   receive 8 flits, row by row, each the sum over all 64 PEs.
module tb_htree;
  import sparsenn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic  pe_up_valid [NUM_PE], pe_up_credit [NUM_PE], pe_dn_valid [NUM_PE], pe_dn_credit [NUM_PE];
  flit_t pe_up_flit [NUM_PE], pe_dn_flit [NUM_PE];
  logic [$clog2(NUM_PE):0] n_arb_hold, n_acc, n_merge_last, n_credit_stall;
  int checks = 0, failures = 0;
  int s_hold = 0, s_acc = 0, s_last = 0, s_stall = 0;

  htree #(.UP_DEPTH(8), .DOWN_DEPTH(8), .PE_QDEPTH(16)) dut (
    .clk, .rst_n, .pe_up_valid, .pe_up_flit, .pe_up_credit, .pe_dn_valid, .pe_dn_flit,
    .pe_dn_credit, .n_arb_hold, .n_acc, .n_merge_last, .n_credit_stall);
  always #5 clk = !clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  flit_t tx_q [NUM_PE][$];
  flit_t rx_q [NUM_PE][$];    // models each PE's 16-entry ActQueue
  flit_t rx_log [NUM_PE][$];
  int    tx_cr [NUM_PE];
  int    pop_pct = 50;

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < int'(NUM_PE); k++) begin
      if (pe_up_credit[k]) tx_cr[k]++;
      pe_up_valid[k] <= 1'b0;
      if (tx_q[k].size() > 0 && tx_cr[k] > 0 && $urandom % 3 != 0) begin
        pe_up_valid[k] <= 1'b1;
        pe_up_flit[k]  <= tx_q[k].pop_front();
        tx_cr[k]--;
      end
      pe_dn_credit[k] <= 1'b0;
      if (pe_dn_valid[k]) begin
        rx_q[k].push_back(pe_dn_flit[k]);
        if (rx_q[k].size() > 16) begin failures++; $display("FAIL PE %0d queue overflow", k); end
      end
      if (rx_q[k].size() > 0 && int'($urandom % 100) < pop_pct) begin
        rx_log[k].push_back(rx_q[k].pop_front());
        pe_dn_credit[k] <= 1'b1;
      end
    end
    s_hold  += int'(n_arb_hold);
    s_acc   += int'(n_acc);
    s_last  += int'(n_merge_last);
    s_stall += int'(n_credit_stall);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_logged(input int n);
    for (int k = 0; k < int'(NUM_PE); k++) if (rx_log[k].size() < n) return 0;
    return 1;
  endfunction

  initial begin
    int total, exp_sum [8];
    bit sent [4096];
    for (int k = 0; k < int'(NUM_PE); k++) begin
      pe_up_valid[k] = 0; pe_up_flit[k] = '0; pe_dn_credit[k] = 0; tx_cr[k] = 8;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // test 1
    total = 0;
    for (int j = 0; j < 4096; j++) sent[j] = 0;
    for (int k = 0; k < int'(NUM_PE); k++) begin
      for (int c = 0; c < 8; c++)
        if ($urandom % 2 == 0) begin
          tx_q[k].push_back('{kind: FLIT_ACT, idx: IDX_W'(c * 64 + k), val: data_t'(c + 1)});
          sent[c * 64 + k] = 1;
          total++;
        end
      tx_q[k].push_back('{kind: FLIT_LAST, idx: '1, val: '0});
    end
    while (!all_logged(total + 1)) @(negedge clk);
    repeat (50) @(negedge clk);
    for (int k = 0; k < int'(NUM_PE); k++) begin
      bit got [4096];
      int n_ok;
      for (int j = 0; j < 4096; j++) got[j] = 0;
      n_ok = 0;
      chk(rx_log[k].size() == total + 1, $sformatf("PE %0d received %0d of %0d", k, rx_log[k].size(), total + 1));
      for (int i = 0; i < total; i++) begin
        if (rx_log[k][i].kind == FLIT_ACT && sent[rx_log[k][i].idx] && !got[rx_log[k][i].idx]) n_ok++;
        got[rx_log[k][i].idx] = 1;
      end
      chk(n_ok == total, $sformatf("PE %0d activation set", k));
      chk(rx_log[k][total].kind == FLIT_LAST, "end marker last");
      rx_log[k].delete();
    end
    chk(s_last == 21, $sformatf("end markers merged in all 21 routers (%0d)", s_last));
    chk(s_hold > 0, "arbitration held losers");
    // test 2
    pop_pct = 100;
    for (int r = 0; r < 8; r++) exp_sum[r] = 0;
    for (int k = 0; k < int'(NUM_PE); k++)
      for (int r = 0; r < 8; r++) begin
        int v;
        v = int'($urandom % 200) - 100;
        exp_sum[r] += v;
        tx_q[k].push_back('{kind: FLIT_PSUM, idx: IDX_W'(r), val: data_t'(v)});
      end
    while (!all_logged(8)) @(negedge clk);
    repeat (50) @(negedge clk);
    for (int k = 0; k < int'(NUM_PE); k++) begin
      chk(rx_log[k].size() == 8, "PE got 8 sums");
      for (int r = 0; r < 8 && r < rx_log[k].size(); r++)
        chk(rx_log[k][r].kind == FLIT_PSUM && rx_log[k][r].idx == IDX_W'(r) &&
            int'(rx_log[k][r].val) == exp_sum[r], $sformatf("PE %0d row %0d sum %0d exp %0d",
            k, r, rx_log[k][r].val, exp_sum[r]));
    end
    chk(s_acc == 8 * 21, $sformatf("accumulations %0d", s_acc));
    $display("arb holds %0d, accumulations %0d, end merges %0d, credit stalls %0d", s_hold, s_acc, s_last, s_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
