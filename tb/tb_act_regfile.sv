// tb_act_regfile -- writes the destination file, swaps, and checks the values appear
// on the source side with the right positive mask; checks datapath writes, the clear,
// a second swap back, and the host read port.
module tb_act_regfile;
  import sparsenn_pkg::*;
  localparam int N = ACTS_PER_PE;
  logic clk = 0, rst_n = 0;
  logic swap, clear_dst, dst_we, host_we;
  logic [LOC_W-1:0] dst_rd_idx, dst_wr_idx, host_idx;
  data_t dst_rd_data, dst_wr_data, host_wdata, host_rdata;
  data_t dst_vals [N], src_vals [N];
  logic [N-1:0] src_pos;
  data_t a [N], b [N];
  int checks = 0, failures = 0;

  act_regfile #(.N(N)) dut (.clk, .rst_n, .swap, .clear_dst, .dst_rd_idx, .dst_rd_data,
    .dst_we, .dst_wr_idx, .dst_wr_data, .dst_vals, .src_vals, .src_pos,
    .host_we, .host_idx, .host_wdata, .host_rdata);
  always #5 clk = !clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    swap = 0; clear_dst = 0; dst_we = 0; host_we = 0; dst_rd_idx = '0; dst_wr_idx = '0;
    host_idx = '0; host_wdata = '0; dst_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin a[i] = data_t'($urandom); b[i] = data_t'($urandom); end
    // host loads a into dst
    for (int i = 0; i < N; i++) begin
      @(negedge clk); host_we = 1; host_idx = LOC_W'(i); host_wdata = a[i];
    end
    @(negedge clk); host_we = 0;
    for (int i = 0; i < N; i++) begin
      host_idx = LOC_W'(i); #1;
      chk(host_rdata == a[i], "host read");
    end
    swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < N; i++) begin
      chk(src_vals[i] == a[i], "src after swap");
      chk(src_pos[i] == (a[i] > 0), "src_pos");
    end
    // datapath writes b into the new dst
    for (int i = 0; i < N; i++) begin
      dst_we = 1; dst_wr_idx = LOC_W'(i); dst_wr_data = b[i]; @(negedge clk);
    end
    dst_we = 0;
    for (int i = 0; i < N; i++) begin
      dst_rd_idx = LOC_W'(i); #1;
      chk(dst_rd_data == b[i] && dst_vals[i] == b[i], "dst write/read");
      chk(src_vals[i] == a[i], "src unchanged");
    end
    swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < N; i++) begin
      chk(src_vals[i] == b[i], "src after second swap");
      chk(dst_vals[i] == a[i], "dst after second swap");
    end
    clear_dst = 1; @(negedge clk); clear_dst = 0;
    for (int i = 0; i < N; i++) begin
      chk(dst_vals[i] == 0, "clear");
      chk(src_vals[i] == b[i], "clear spares src");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
