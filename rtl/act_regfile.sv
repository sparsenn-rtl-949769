// act_regfile -- ping-pong activation register files (ActRegFile).
//
// Two physical files of 64 16-bit registers. One is the source (this layer's input
// activations held by the PE), the other the destination (this layer's outputs being
// accumulated). `swap` exchanges their roles at a layer boundary, so a layer's outputs
// become the next layer's inputs without copying. `clear_dst` zeroes the destination,
// which is done at the start of every phase so that rows that are never computed
// (predicted zero) read as zero.
// The source side offers `src_pos`, one bit per register set when the value is greater
// than zero: ReLU is applied here, when activations are read as inputs, rather than at
// write-back (this design's choice; the paper applies ReLU to every layer output). A
// host port writes the destination file (load the first input, then swap) and reads it
// (results after the last layer). The pair, its size and the swap are the paper's.
// Timing: writes and clear/swap take effect at the next clock edge; reads are combinational.
module act_regfile
  import sparsenn_pkg::*;
#(
  parameter int unsigned N = ACTS_PER_PE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 swap,
  input  logic                 clear_dst,
  // datapath
  input  logic [$clog2(N)-1:0] dst_rd_idx,
  output data_t                dst_rd_data,
  input  logic                 dst_we,
  input  logic [$clog2(N)-1:0] dst_wr_idx,
  input  data_t                dst_wr_data,
  output data_t                dst_vals [N],
  output data_t                src_vals [N],
  output logic [N-1:0]         src_pos,
  // host
  input  logic                 host_we,
  input  logic [$clog2(N)-1:0] host_idx,
  input  data_t                host_wdata,
  output data_t                host_rdata
);
  data_t bank0 [N];
  data_t bank1 [N];
  logic  sel;            // 0: bank0 is the source, 1: bank1 is the source

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= 1'b0;
      for (int i = 0; i < int'(N); i++) begin
        bank0[i] <= '0;
        bank1[i] <= '0;
      end
    end else begin
      if (swap) sel <= !sel;
      if (clear_dst) begin
        for (int i = 0; i < int'(N); i++) begin
          if (sel) bank0[i] <= '0; else bank1[i] <= '0;
        end
      end else if (dst_we || host_we) begin
        if (sel) bank0[dst_we ? dst_wr_idx : host_idx] <= dst_we ? dst_wr_data : host_wdata;
        else     bank1[dst_we ? dst_wr_idx : host_idx] <= dst_we ? dst_wr_data : host_wdata;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      src_vals[i] = sel ? bank1[i] : bank0[i];
      dst_vals[i] = sel ? bank0[i] : bank1[i];
      src_pos[i]  = (src_vals[i] > 0);
    end
  end

  assign dst_rd_data = dst_vals[dst_rd_idx];
  assign host_rdata  = dst_vals[host_idx];
endmodule
