// mem_addr_comp -- memory address computation (MemAddrComp), first datapath stage.
//
// Every weight matrix is stored column by column inside a PE: for a column `in_idx`
// the words of all rows this PE holds are consecutive. The word address is therefore
//     addr = base + in_idx * stride + out_idx
// where, per phase,
//     V (column-based): in_idx = local column c,  out_idx = predictor row i,  stride = r
//     U (row-based)   : in_idx = rank index i,    out_idx = local row m,      stride = rows per PE
//     W (row-based)   : in_idx = global column j, out_idx = local row m,      stride = rows per PE
// The paper names the block; the layout is this design's choice. It lets one input
// activation walk through its rows with consecutive addresses.
// Timing: registered, the address and the operation appear one cycle after `in_valid`.
module mem_addr_comp
  import sparsenn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  mac_op_t           in_op,
  input  logic [ADDR_W-1:0] base,
  input  logic [LOC_W:0]    stride,
  output logic              out_valid,
  output mac_op_t           out_op,
  output logic [ADDR_W-1:0] addr
);
  logic [ADDR_W-1:0] addr_c;
  assign addr_c = ADDR_W'(base + ADDR_W'(in_op.in_idx * stride) + ADDR_W'(in_op.out_idx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= '0;
      addr      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_op <= in_op;
        addr   <= addr_c;
      end
    end
  end
endmodule
