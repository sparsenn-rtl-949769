// network_interface -- the PE's port on the H-tree (Network Interface).
//
// Send side: the PE controller offers a flit with `tx_valid`; it is taken (`tx_ready`)
// when the interface holds a credit, i.e. a free entry in the input buffer of the leaf
// router, and is driven onto the up link from a register in the next cycle. The credit
// counter starts at the leaf buffer depth, loses one per flit sent and gains one for
// every `up_credit` pulse the leaf returns.
// Receive side: flits arriving on the down link are pushed into the ActQueue; every pop
// from the queue is returned to the leaf as a `down_credit` pulse one cycle later.
// `rx_push` and `rx_flit` are plain wires from the down link: the queue behind them is
// the receive buffer, so no register is added on this side.
// The paper names the block and gives the NoC's credit flow control; the details here
// are this design's.
module network_interface
  import sparsenn_pkg::*;
#(
  parameter int unsigned UP_CREDITS = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  // PE side, send
  input  logic  tx_valid,
  input  flit_t tx_flit,
  output logic  tx_ready,
  // PE side, receive
  output logic  rx_push,
  output flit_t rx_flit,
  input  logic  rx_pop,
  // up link to the leaf router
  output logic  up_valid,
  output flit_t up_flit,
  input  logic  up_credit,
  // down link from the leaf router
  input  logic  down_valid,
  input  flit_t down_flit,
  output logic  down_credit
);
  localparam int unsigned CW = $clog2(UP_CREDITS + 1);
  logic [CW-1:0] credits;

  assign tx_ready = (credits != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credits     <= CW'(UP_CREDITS);
      up_valid    <= 1'b0;
      up_flit     <= '0;
      down_credit <= 1'b0;
    end else begin
      credits     <= credits - CW'(tx_valid && tx_ready) + CW'(up_credit);
      up_valid    <= tx_valid && tx_ready;
      if (tx_valid && tx_ready) up_flit <= tx_flit;
      down_credit <= rx_pop;
    end
  end

  assign rx_push = down_valid;
  assign rx_flit = down_flit;

  assert property (@(posedge clk) disable iff (!rst_n) credits <= CW'(UP_CREDITS))
    else $error("network_interface: more credits returned than sent");
endmodule
