// tb_act_queue -- random pushes and pops against a queue model; checks the head entry,
// the fill count and the full/empty flags every cycle, including push-while-full-and-pop.
module tb_act_queue;
  import sparsenn_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  flit_t push_data, head;
  logic [$clog2(DEPTH):0] count;
  flit_t model[$];
  int checks = 0, failures = 0;

  act_queue #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .push_data, .pop, .head, .empty, .full, .count);

  always #5 clk = !clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; push_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (int'(count) != model.size() || empty != (model.size() == 0) || full != (model.size() == DEPTH)) begin
        failures++;
        $display("FAIL count=%0d model=%0d", count, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (head !== model[0]) begin failures++; $display("FAIL head %h != %h", head, model[0]); end
      end
      pop  = (model.size() > 0) && ($urandom % 3 != 0) && (cyc < 1500 || cyc > 2000);
      push = ($urandom % 4 != 0) && (model.size() < DEPTH || pop);
      push_data = flit_t'({$urandom, $urandom});
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
