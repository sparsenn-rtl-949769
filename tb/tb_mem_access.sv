// tb_mem_access -- fills W, U and V memories through the host port with different
// patterns, then reads them back through the datapath port in random order and checks
// each word arrives one cycle after its request, tagged with the requesting operation.
module tb_mem_access;
  import sparsenn_pkg::*;
  localparam int WW = 1024, UVW = 256;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, wr_en;
  mac_op_t in_op, out_op;
  logic [ADDR_W-1:0] addr, wr_addr;
  data_t rdata, wr_data;
  wr_target_e wr_target;
  int checks = 0, failures = 0;

  mem_access #(.W_WORDS(WW), .UV_WORDS(UVW)) dut (
    .clk, .rst_n, .in_valid, .in_op, .addr, .out_valid, .out_op, .rdata,
    .wr_en, .wr_target, .wr_addr, .wr_data);
  always #5 clk = !clk;

  function automatic data_t pat(input int m, input int a);
    return data_t'(a * 37 + m * 1000 + 5);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_op = '0; addr = '0; wr_en = 0; wr_addr = '0; wr_data = '0; wr_target = TGT_W;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++)
      for (int a = 0; a < (m == 0 ? WW : UVW); a++) begin
        @(negedge clk);
        wr_en = 1; wr_target = wr_target_e'(m); wr_addr = ADDR_W'(a); wr_data = pat(m, a);
      end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      int m, a;
      m = $urandom % 3;
      a = $urandom % (m == 0 ? WW : UVW);
      in_valid = 1;
      in_op = mac_op_t'({$urandom, $urandom});
      in_op.mem = mem_sel_e'(m);
      addr = ADDR_W'(a);
      @(negedge clk);
      checks++;
      if (!out_valid || rdata !== pat(m, a) || out_op != in_op) begin
        failures++;
        $display("FAIL mem %0d addr %0d got %h exp %h", m, a, rdata, pat(m, a));
      end
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid without request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
