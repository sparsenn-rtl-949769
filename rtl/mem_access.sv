// mem_access -- the PE's weight memories (MemAccess), second datapath stage.
//
// Holds the three per-PE memories of the paper: W MEM (128 KB, the layer weights),
// U MEM and V MEM (8 KB each, the two low-rank factors of the output sparsity
// predictor), all 16-bit words. Each cycle the datapath may read one word from the
// memory named by the operation's `mem` field; the word comes out one cycle later,
// together with the operation that asked for it. A host write port loads the
// memories between layers; a host write wins over a datapath read in the same cycle
// (the host is expected to write only while the PE is idle). The sizes are the paper's;
// the single-port organisation and the host port are this design's choices.
module mem_access
  import sparsenn_pkg::*;
#(
  parameter int unsigned W_WORDS  = W_DEPTH,
  parameter int unsigned UV_WORDS = UV_DEPTH
) (
  input  logic              clk,
  input  logic              rst_n,
  // datapath read
  input  logic              in_valid,
  input  mac_op_t           in_op,
  input  logic [ADDR_W-1:0] addr,
  output logic              out_valid,
  output mac_op_t           out_op,
  output data_t             rdata,
  // host write
  input  logic              wr_en,
  input  wr_target_e        wr_target,
  input  logic [ADDR_W-1:0] wr_addr,
  input  data_t             wr_data
);
  localparam int unsigned WAW  = $clog2(W_WORDS);
  localparam int unsigned UVAW = $clog2(UV_WORDS);

  logic  we_w, we_u, we_v, re_w, re_u, re_v;
  data_t rd_w, rd_u, rd_v;
  mem_sel_e sel_q;

  assign we_w = wr_en && (wr_target == TGT_W);
  assign we_u = wr_en && (wr_target == TGT_U);
  assign we_v = wr_en && (wr_target == TGT_V);
  assign re_w = in_valid && (in_op.mem == MEM_W);
  assign re_u = in_valid && (in_op.mem == MEM_U);
  assign re_v = in_valid && (in_op.mem == MEM_V);

  logic [WAW-1:0]  a_w;
  logic [UVAW-1:0] a_u, a_v;
  assign a_w = we_w ? WAW'(wr_addr)  : WAW'(addr);
  assign a_u = we_u ? UVAW'(wr_addr) : UVAW'(addr);
  assign a_v = we_v ? UVAW'(wr_addr) : UVAW'(addr);

  sram_sp #(.DEPTH(W_WORDS),  .WIDTH(DATA_W)) u_wmem (
    .clk, .we(we_w), .re(re_w), .addr(a_w), .wdata(wr_data), .rdata(rd_w));
  sram_sp #(.DEPTH(UV_WORDS), .WIDTH(DATA_W)) u_umem (
    .clk, .we(we_u), .re(re_u), .addr(a_u), .wdata(wr_data), .rdata(rd_u));
  sram_sp #(.DEPTH(UV_WORDS), .WIDTH(DATA_W)) u_vmem (
    .clk, .we(we_v), .re(re_v), .addr(a_v), .wdata(wr_data), .rdata(rd_v));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= '0;
      sel_q     <= MEM_W;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_op <= in_op;
        sel_q  <= in_op.mem;
      end
    end
  end

  always_comb begin
    unique case (sel_q)
      MEM_U:   rdata = rd_u;
      MEM_V:   rdata = rd_v;
      default: rdata = rd_w;
    endcase
  end
endmodule
