// tb_lnzd -- checks the leading nonzero detector against a bit-by-bit search on random
// and corner-case masks (all zero, single bits, all ones).
module tb_lnzd;
  localparam int N = 64;
  logic [N-1:0]         mask;
  logic                 found;
  logic [$clog2(N)-1:0] idx;
  int checks = 0, failures = 0;

  lnzd #(.N(N)) dut (.mask, .found, .idx);

  task automatic check_mask(input logic [N-1:0] m);
    int exp_idx;
    mask = m;
    #1;
    exp_idx = -1;
    for (int i = N - 1; i >= 0; i--) if (m[i]) exp_idx = i;
    checks++;
    if (found !== (exp_idx >= 0) || (exp_idx >= 0 && int'(idx) != exp_idx)) begin
      failures++;
      $display("FAIL mask=%h found=%0b idx=%0d expected %0d", m, found, idx, exp_idx);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_mask('0);
    check_mask('1);
    for (int i = 0; i < N; i++) check_mask(N'(1) << i);
    for (int i = 0; i < 500; i++) check_mask({$urandom, $urandom} & {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
