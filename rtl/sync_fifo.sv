// sync_fifo: synchronous valid/ready FIFO.
//
// The paper connects all units of a macro dataflow kernel through FIFOs
// (DMA -> MAC units, quantisation -> router -> buffer, router -> router), which
// decouples them and eases place and route. The paper names the FIFOs but gives
// no depth or interface; this one is a plain circular buffer with a
// valid/ready handshake on both sides, first-word-fall-through output, and one
// push and one pop per cycle. in_ready is low only when full; out_valid is high
// whenever the FIFO holds data. DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A producer must hold its data while waiting for ready.
  initial assert (DEPTH >= 2 && (1 << AW) == DEPTH) else $error("sync_fifo: DEPTH must be a power of two");

endmodule
