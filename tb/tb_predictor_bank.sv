// tb_predictor_bank -- random U*V*a values, row counts and predictor on/off settings;
// checks the stored bits are "value > 0 and row exists" (or "row exists" when the
// predictor is off), that they only change on load, and the count of predicted rows.
module tb_predictor_bank;
  import sparsenn_pkg::*;
  localparam int N = ACTS_PER_PE;
  logic clk = 0, rst_n = 0;
  logic load, uv_en;
  logic [LOC_W:0] n_rows, n_pred;
  data_t uv_vals [N];
  logic [N-1:0] p, expv;
  int checks = 0, failures = 0;

  predictor_bank #(.N(N)) dut (.clk, .rst_n, .load, .uv_en, .n_rows, .uv_vals, .p, .n_pred);
  always #5 clk = !clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt;
    load = 0; uv_en = 0; n_rows = '0;
    for (int i = 0; i < N; i++) uv_vals[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      uv_en  = ($urandom % 4 != 0);
      n_rows = (LOC_W+1)'(1 + $urandom % N);
      cnt = 0;
      for (int i = 0; i < N; i++) begin
        uv_vals[i] = ($urandom % 5 == 0) ? data_t'(0) : data_t'($urandom);
        expv[i] = (i < int'(n_rows)) && (!uv_en || uv_vals[i] > 0);
        cnt += int'(expv[i]);
      end
      load = 1;
      @(negedge clk);
      load = 0;
      checks++;
      if (p != expv || int'(n_pred) != cnt) begin
        failures++;
        $display("FAIL p=%h exp=%h n_pred=%0d exp=%0d", p, expv, n_pred, cnt);
      end
      for (int i = 0; i < N; i++) uv_vals[i] = data_t'($urandom);
      @(negedge clk);
      checks++;
      if (p != expv) begin failures++; $display("FAIL p changed without load"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
