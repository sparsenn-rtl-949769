// tb_network_interface -- the testbench plays the leaf router: it accepts flits on the up
// link into an 8-entry buffer that drains slowly and returns credits. Checks that every
// offered flit arrives once, in order, that the buffer never
// overflows (the credit count holds the sender back), and that received flits are passed
// to the queue with one down credit per pop.
module tb_network_interface;
  import sparsenn_pkg::*;
  localparam int CR = 8;
  logic clk = 0, rst_n = 0;
  logic tx_valid, tx_ready, rx_push, rx_pop, up_valid, up_credit, down_valid, down_credit;
  flit_t tx_flit, rx_flit, up_flit, down_flit;
  flit_t sent[$], leaf[$];
  int checks = 0, failures = 0, n_stall = 0, n_recv = 0, n_dcred = 0;

  network_interface #(.UP_CREDITS(CR)) dut (.clk, .rst_n, .tx_valid, .tx_flit, .tx_ready,
    .rx_push, .rx_flit, .rx_pop, .up_valid, .up_flit, .up_credit,
    .down_valid, .down_flit, .down_credit);
  always #5 clk = !clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // leaf router model: buffer, slow drain, credit return
  always @(posedge clk) if (rst_n) begin
    up_credit <= 1'b0;
    if (up_valid) begin
      leaf.push_back(up_flit);
      checks++;
      if (leaf.size() > CR) begin failures++; $display("FAIL leaf buffer overflow"); end
    end
    if (leaf.size() > 0 && $urandom % 4 == 0) begin
      flit_t f;
      f = leaf.pop_front();
      checks++;
      if (sent.size() == 0 || f != sent[0]) begin failures++; $display("FAIL order"); end
      else void'(sent.pop_front());
      n_recv++;
      up_credit <= 1'b1;
    end
  end
  always @(posedge clk) if (rst_n && down_credit) n_dcred++;

  initial begin
    int n_push = 0, n_pop = 0;
    tx_valid = 0; tx_flit = '0; up_credit = 0; down_valid = 0; down_flit = '0; rx_pop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      tx_valid = 1;
      tx_flit  = flit_t'({$urandom, $urandom});
      down_valid = ($urandom % 2 == 0);
      down_flit  = flit_t'({$urandom});
      rx_pop     = ($urandom % 2 == 0);
      #1;
      checks++;
      if (rx_push != down_valid || rx_flit != down_flit) begin failures++; $display("FAIL rx path"); end
      if (!tx_ready) n_stall++;
      if (tx_ready) sent.push_back(tx_flit);
      if (rx_pop) n_pop++;
    end
    @(negedge clk);
    tx_valid = 0; down_valid = 0; rx_pop = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d flits lost", sent.size()); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL credits never ran out"); end
    checks++;
    if (n_dcred != n_pop) begin failures++; $display("FAIL down credits %0d pops %0d", n_dcred, n_pop); end
    $display("flits delivered %0d, stalled cycles %0d", n_recv, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
