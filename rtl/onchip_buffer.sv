// onchip_buffer: the shared on-chip buffer through which the kernels exchange data.
//
// The paper connects all kernels of a node through one shared buffer; it does
// not give its organisation. Here it is a word-addressed RAM of DEPTH
// datapacks (32 int8 values each) with two read ports and one write port, so
// the fused LN&Res kernel can read the residual stream and the branch output
// in the same cycle. Reads are synchronous: data appears the cycle after
// rd_en. A read and a write to the same address in one cycle return the old
// word. Which kernel drives the ports is decided by the node around it.
//
// Lint note: the address ports use the node-wide buf_addr_t type; only the
// low AW bits index this memory, so the upper bits are reported unused.
module onchip_buffer
  import looplynx_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic      clk,
  input  logic      wr_en,
  input  buf_addr_t wr_addr,
  input  pack_t     wr_data,
  input  logic      rd0_en,
  input  buf_addr_t rd0_addr,
  output pack_t     rd0_data,
  input  logic      rd1_en,
  input  buf_addr_t rd1_addr,
  output pack_t     rd1_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  pack_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)  mem[wr_addr[AW-1:0]] <= wr_data;
    if (rd0_en) rd0_data <= mem[rd0_addr[AW-1:0]];
    if (rd1_en) rd1_data <= mem[rd1_addr[AW-1:0]];
  end

  initial assert (DEPTH <= (1 << BUF_AW)) else $error("onchip_buffer: DEPTH exceeds the address width");
endmodule
