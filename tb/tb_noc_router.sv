// tb_noc_router -- one router with testbench children and parent.
// Test 1: each child queues a sorted list of activations; the parent drains slowly, so
//   credits run out. The parent must see every activation exactly once, each child's
//   activations in the order that child sent them, and losers of arbitration must wait;
//   first-flit latency from an idle router must be 5 cycles (RC, SA, ST, LT + input).
// Test 2: each child sends 8 partial sums; the parent must get 8 flits, each the sum of
//   the four children's values for that row, then one merged end marker.
// Test 3: the down path broadcasts flits to all four children, only while every child
//   has a credit.
module tb_noc_router;
  import sparsenn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic  c_up_valid [RADIX], c_up_credit [RADIX], c_dn_credit [RADIX];
  flit_t c_up_flit  [RADIX];
  logic  p_up_valid, p_up_credit, p_dn_valid, p_dn_credit, c_dn_valid;
  flit_t p_up_flit, p_dn_flit, c_dn_flit;
  logic  ev_arb_hold, ev_acc, ev_merge_last, ev_credit_stall;
  int checks = 0, failures = 0;
  int n_hold = 0, n_stall = 0;

  noc_router #(.UP_DEPTH(4), .DOWN_DEPTH(4), .PARENT_CREDITS(4), .CHILD_CREDITS(2)) dut (
    .clk, .rst_n, .c_up_valid, .c_up_flit, .c_up_credit, .p_up_valid, .p_up_flit, .p_up_credit,
    .p_dn_valid, .p_dn_flit, .p_dn_credit, .c_dn_valid, .c_dn_flit, .c_dn_credit,
    .ev_arb_hold, .ev_acc, .ev_merge_last, .ev_credit_stall);
  always #5 clk = !clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // child senders: each holds a list and a credit count of the router buffer (4)
  flit_t child_q [RADIX][$];
  int    child_cr [RADIX];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < RADIX; c++) begin
      if (c_up_credit[c]) child_cr[c]++;
      c_up_valid[c] <= 1'b0;
      if (child_q[c].size() > 0 && child_cr[c] > 0 && $urandom % 4 != 0) begin
        c_up_valid[c] <= 1'b1;
        c_up_flit[c]  <= child_q[c].pop_front();
        child_cr[c]--;
      end
    end
    if (ev_arb_hold) n_hold++;
    if (ev_credit_stall) n_stall++;
  end

  // parent: slow sink with a 4-entry buffer
  flit_t got[$];
  flit_t pbuf[$];
  int    drain_pct = 30;
  always @(posedge clk) if (rst_n) begin
    p_up_credit <= 1'b0;
    if (p_up_valid) begin
      pbuf.push_back(p_up_flit);
      if (pbuf.size() > 4) begin failures++; $display("FAIL parent buffer overflow"); end
    end
    if (pbuf.size() > 0 && int'($urandom % 100) < drain_pct) begin
      got.push_back(pbuf.pop_front());
      p_up_credit <= 1'b1;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total, lat;
    int seen [4096];
    for (int c = 0; c < RADIX; c++) begin
      c_up_valid[c] = 0; c_up_flit[c] = '0; c_dn_credit[c] = 0; child_cr[c] = 4;
    end
    p_up_credit = 0; p_dn_valid = 0; p_dn_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency of a single flit through an idle router, fast parent
    drain_pct = 100;
    @(negedge clk);
    c_up_valid[2] = 1; c_up_flit[2] = '{kind: FLIT_ACT, idx: 12'd7, val: 16'sd9};
    @(negedge clk);
    c_up_valid[2] = 0;
    child_cr[2] = 3;
    lat = 1;
    while (!p_up_valid) begin @(negedge clk); lat++; end
    chk(lat == 5 && p_up_flit.idx == 7 && p_up_flit.val == 9, $sformatf("single flit, latency %0d", lat));
    repeat (5) @(negedge clk);
    got.delete();
    // test 1: arbitration
    drain_pct = 30;
    total = 0;
    for (int c = 0; c < RADIX; c++) begin
      int idx;
      idx = c;
      for (int k = 0; k < 20; k++) begin
        idx += 1 + $urandom % 9;
        child_q[c].push_back('{kind: FLIT_ACT, idx: IDX_W'(idx * 4 + c), val: data_t'(idx)});
        total++;
      end
    end
    for (int i = 0; i < 4096; i++) seen[i] = 0;
    while (got.size() < total) @(negedge clk);
    foreach (got[i]) seen[got[i].idx]++;
    for (int i = 0; i < 4096; i++) if (seen[i] > 1) chk(0, "duplicate");
    chk(got.size() == total, "all activations arrived");
    for (int c = 0; c < RADIX; c++) begin
      int last;
      last = -1;
      foreach (got[i]) if (int'(got[i].idx) % 4 == c) begin
        chk(int'(got[i].idx) > last, "per-child order");
        last = int'(got[i].idx);
      end
    end
    chk(n_hold > 0, "arbitration held a loser");
    chk(n_stall > 0, "parent credits ran out");
    got.delete();
    // test 2: partial sums and end marker
    drain_pct = 60;
    for (int c = 0; c < RADIX; c++) begin
      for (int r = 0; r < 8; r++)
        child_q[c].push_back('{kind: FLIT_PSUM, idx: IDX_W'(r), val: data_t'(r * 10 + c * 100 - 50)});
      child_q[c].push_back('{kind: FLIT_LAST, idx: '1, val: '0});
    end
    while (got.size() < 9) @(negedge clk);
    for (int r = 0; r < 8; r++)
      chk(got[r].kind == FLIT_PSUM && got[r].idx == IDX_W'(r) &&
          int'(got[r].val) == 4 * (r * 10) + 600 - 200, $sformatf("psum row %0d = %0d", r, got[r].val));
    chk(got[8].kind == FLIT_LAST, "merged end marker");
    repeat (20) @(negedge clk);
    chk(got.size() == 9, "exactly one end marker");
    // test 3: down broadcast with child credits (2 per child, returned slowly by child 1)
    begin
      int n_rx, n_ret;
      n_rx = 0; n_ret = 0;
      fork
        begin
          for (int i = 0; i < 10; i++) begin
            @(negedge clk);
            p_dn_valid = 1; p_dn_flit = '{kind: FLIT_ACT, idx: IDX_W'(i), val: data_t'(i)};
            @(negedge clk);
            p_dn_valid = 0;
            repeat (3) @(negedge clk);   // stay within the 4 credits of the down buffer
          end
        end
        begin
          for (int cyc = 0; cyc < 600; cyc++) begin
            @(posedge clk);
            #1;
            for (int c = 0; c < RADIX; c++) c_dn_credit[c] = 0;
            if (c_dn_valid) begin
              chk(c_dn_flit.idx == IDX_W'(n_rx), "broadcast order");
              n_rx++;
            end
            if (n_ret < n_rx && cyc % 7 == 0) begin
              for (int c = 0; c < RADIX; c++) c_dn_credit[c] = 1;
              n_ret++;
            end
            chk(n_rx - n_ret <= 2, "child credits respected");
          end
        end
      join
      chk(n_rx == 10, $sformatf("all broadcast flits delivered (%0d)", n_rx));
    end
    $display("arbitration holds %0d, credit stalls %0d", n_hold, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
