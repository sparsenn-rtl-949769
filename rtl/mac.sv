// mac -- multiplier-accumulator (MAC), the last three datapath stages of a PE.
//
// Stage 3, multiply : product = memory word * activation (16-bit fixed point, Q8.8,
//                     rounded towards minus infinity and saturated).
// Stage 4, add      : sum = destination register[row] + product (saturating).
// Stage 5, write    : destination register[row] <= sum.
// The destination register of stage 4 is read from the register file, except when the
// operation one stage ahead (in stage 5, not yet written) targets the same row: then its
// sum is forwarded. This bypass lets back-to-back operations hit the same row, which
// happens when a PE holds only a few rows. The paper gives the multiply and add stages
// and the write-back; number format, saturation and the forwarding path are this
// design's choices.
// Interface: `dst_rd_idx`/`dst_rd_data` is a combinational read port of the destination
// register file, `dst_we`/`dst_wr_idx`/`dst_wr_data` its write port.
module mac
  import sparsenn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  mac_op_t          in_op,
  input  data_t            mem_word,
  output logic [LOC_W-1:0] dst_rd_idx,
  input  data_t            dst_rd_data,
  output logic             dst_we,
  output logic [LOC_W-1:0] dst_wr_idx,
  output data_t            dst_wr_data,
  output logic             busy,
  output logic             fwd          // a sum was forwarded this cycle
);
  // stage 3
  logic             v_m;
  logic [LOC_W-1:0] row_m;
  data_t            prod_m;
  // stage 4 result, i.e. stage 5 contents
  logic             v_a;
  logic [LOC_W-1:0] row_a;
  data_t            sum_a;

  data_t acc_in;
  assign dst_rd_idx = row_m;
  assign fwd        = v_m && v_a && (row_a == row_m);
  assign acc_in     = fwd ? sum_a : dst_rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_m    <= 1'b0;
      row_m  <= '0;
      prod_m <= '0;
      v_a    <= 1'b0;
      row_a  <= '0;
      sum_a  <= '0;
    end else begin
      v_m <= in_valid;
      if (in_valid) begin
        row_m  <= in_op.out_idx;
        prod_m <= fx_mul(mem_word, in_op.act);
      end
      v_a <= v_m;
      if (v_m) begin
        row_a <= row_m;
        sum_a <= fx_add(acc_in, prod_m);
      end
    end
  end

  assign dst_we      = v_a;
  assign dst_wr_idx  = row_a;
  assign dst_wr_data = sum_a;
  assign busy        = v_m || v_a;
endmodule
