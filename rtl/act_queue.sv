// act_queue -- the PE's input activation queue (ActQueue).
//
// A synchronous FIFO of flits received from the H-tree. In the W phase it holds
// broadcast nonzero input activations with their global index; in the U phase it holds
// the V*a results broadcast by the root, which may arrive while the PE is still busy
// with its V work. The PE only ever works on the head entry. Push and pop in the same
// cycle are allowed, also when full. The paper gives the block's role; the depth is an
// assumed value, and the queue never overflows because the sender holds one credit per
// free entry (credit flow control, see network_interface and noc_router).
// Timing: a pushed entry is visible at the head on the next cycle.
module act_queue
  import sparsenn_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  flit_t push_data,
  input  logic  pop,
  output flit_t head,
  output logic  empty,
  output logic  full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  flit_t         mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign head  = mem[rd_ptr];

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= PW'((32'(wr_ptr) + 1) % DEPTH);
      if (do_pop)  rd_ptr <= PW'((32'(rd_ptr) + 1) % DEPTH);
      count <= count + ($clog2(DEPTH)+1)'(do_push) - ($clog2(DEPTH)+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  // A push into a full queue means the credit protocol was broken upstream.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || do_pop))
    else $error("act_queue: push while full");
endmodule
