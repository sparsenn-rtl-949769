// tb_mac -- streams multiply-accumulate operations into the MAC, one per cycle with
// random gaps, onto a small register file held by the testbench. Runs of operations on
// the same row exercise the forwarding path. Afterwards every row must hold the sum of
// its floor(w*a/256) products, computed here with plain integers; the latency from the
// last operation to its write-back must be 2 cycles.
module tb_mac;
  import sparsenn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, dst_we, busy, fwd;
  mac_op_t in_op;
  data_t mem_word, dst_rd_data, dst_wr_data;
  logic [LOC_W-1:0] dst_rd_idx, dst_wr_idx;
  data_t rf [ACTS_PER_PE];
  int    ref_sum [ACTS_PER_PE];
  int checks = 0, failures = 0, n_fwd = 0;

  mac dut (.clk, .rst_n, .in_valid, .in_op, .mem_word, .dst_rd_idx, .dst_rd_data,
           .dst_we, .dst_wr_idx, .dst_wr_data, .busy, .fwd);

  assign dst_rd_data = rf[dst_rd_idx];
  always_ff @(posedge clk) if (dst_we) rf[dst_wr_idx] <= dst_wr_data;
  always_ff @(posedge clk) if (fwd) n_fwd++;
  always #5 clk = !clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int row, w, a, t0, lat;
    in_valid = 0; in_op = '0; mem_word = '0;
    for (int i = 0; i < int'(ACTS_PER_PE); i++) begin rf[i] = '0; ref_sum[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    row = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if ($urandom % 5 == 0) begin in_valid = 0; continue; end
      if ($urandom % 3 == 0) row = $urandom % 8;     // runs on the same row
      w = int'($urandom % 512) - 256;
      a = int'($urandom % 512) - 256;
      in_valid = 1;
      in_op = '0;
      in_op.act = data_t'(a);
      in_op.out_idx = LOC_W'(row);
      mem_word = data_t'(w);
      ref_sum[row] += (w * a) >>> 8;
    end
    // single op on an idle pipeline: measure its latency to write-back
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    in_valid = 1; in_op = '0; in_op.act = 16'sd256; in_op.out_idx = 6'd40; mem_word = 16'sd3;
    ref_sum[40] += 3;
    t0 = $time;
    @(negedge clk);
    in_valid = 0;
    while (!(dst_we && dst_wr_idx == 6'd40)) @(negedge clk);
    lat = ($time - t0) / 10;
    checks++;
    if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
    repeat (4) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after drain"); end
    for (int i = 0; i < int'(ACTS_PER_PE); i++) begin
      checks++;
      if (int'(rf[i]) != ref_sum[i]) begin
        failures++;
        $display("FAIL row %0d got %0d exp %0d", i, rf[i], ref_sum[i]);
      end
    end
    checks++;
    if (n_fwd == 0) begin failures++; $display("FAIL forwarding never used"); end
    $display("forwarded sums: %0d", n_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
