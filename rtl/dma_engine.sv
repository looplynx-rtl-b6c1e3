// dma_engine: burst reader from one HBM channel into an on-chip FIFO.
//
// Given a start beat address and a number of beats, the engine splits the
// transfer into bursts of at most MAX_BURST beats, issues one read request per
// burst on the channel's request port and pushes the returned beats (one
// n_group x 8-bit datapack each) into its output FIFO. A burst is issued only
// when the FIFO has room for all of its beats, so the read-data port is never
// back-pressured by more than the FIFO itself. The paper says the DMA engines
// run in burst mode to load concatenated n_group x 8-bit datapacks; the burst
// limit, FIFO depth and the credit scheme are this design's choice.
// start_i is accepted when idle; busy_o stays high until the last beat has
// entered the FIFO. Output is a valid/ready stream.
module dma_engine
  import looplynx_pkg::*;
#(
  parameter int unsigned MAX_BURST  = 32,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  hbm_addr_t        base_i,
  input  logic [31:0]      beats_i,
  output logic             busy_o,
  // HBM channel read port
  output logic             rd_req_valid,
  input  logic             rd_req_ready,
  output hbm_rd_req_t      rd_req,
  input  logic             rd_data_valid,
  output logic             rd_data_ready,
  input  pack_t            rd_data,
  // output stream
  output logic             out_valid,
  input  logic             out_ready,
  output pack_t            out_data
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  hbm_addr_t   next_addr;
  logic [31:0] left_req;    // beats not yet requested
  logic [31:0] left_recv;   // beats not yet received
  logic [CW:0] inflight;    // requested but not yet received
  logic [CW-1:0] fifo_cnt;
  logic [31:0] burst;
  logic        issue, recv;

  assign burst = (left_req > MAX_BURST) ? MAX_BURST : left_req;
  assign rd_req_valid = (left_req != 0) &&
                        ((32'(fifo_cnt) + 32'(inflight) + burst) <= FIFO_DEPTH);
  assign rd_req.addr  = next_addr;
  assign rd_req.len   = LEN_W'(burst);
  assign issue        = rd_req_valid && rd_req_ready;
  assign recv         = rd_data_valid && rd_data_ready;
  assign busy_o       = (left_recv != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_addr <= '0;
      left_req  <= '0;
      left_recv <= '0;
      inflight  <= '0;
    end else begin
      if (start_i && !busy_o) begin
        next_addr <= base_i;
        left_req  <= beats_i;
        left_recv <= beats_i;
      end else begin
        if (issue) begin
          next_addr <= next_addr + HBM_AW'(burst);
          left_req  <= left_req - burst;
        end
        if (recv) left_recv <= left_recv - 1;
      end
      inflight <= inflight + (issue ? (CW+1)'(burst) : '0) - (CW+1)'(recv);
    end
  end

  sync_fifo #(.WIDTH(PACK_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (rd_data_valid), .in_ready (rd_data_ready), .in_data (rd_data),
    .out_valid, .out_ready, .out_data,
    .count    (fifo_cnt)
  );

  initial assert (FIFO_DEPTH >= MAX_BURST) else $error("dma_engine: FIFO smaller than a burst");
endmodule
