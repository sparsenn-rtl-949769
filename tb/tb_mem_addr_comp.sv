// tb_mem_addr_comp -- random operations, bases and strides; checks that one cycle later
// the address equals base + in_idx*stride + out_idx (mod 2^16) and the operation follows.
module tb_mem_addr_comp;
  import sparsenn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  mac_op_t in_op, out_op;
  logic [ADDR_W-1:0] base, addr;
  logic [LOC_W:0] stride;
  int checks = 0, failures = 0;

  mem_addr_comp dut (.clk, .rst_n, .in_valid, .in_op, .base, .stride, .out_valid, .out_op, .addr);
  always #5 clk = !clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_addr;
    mac_op_t exp_op;
    logic exp_v;
    in_valid = 0; in_op = '0; base = '0; stride = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      in_op    = mac_op_t'({$urandom, $urandom});
      base     = ADDR_W'($urandom);
      stride   = (LOC_W+1)'(1 + $urandom % 64);
      exp_v    = in_valid;
      exp_op   = in_op;
      exp_addr = (int'(base) + int'(in_op.in_idx) * int'(stride) + int'(in_op.out_idx)) % 65536;
      @(negedge clk);
      checks++;
      if (out_valid != exp_v || (exp_v && (int'(addr) != exp_addr || out_op != exp_op))) begin
        failures++;
        $display("FAIL addr=%0d exp=%0d", addr, exp_addr);
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
