// router: simplex ring all-gather of datapacks into the shared on-chip buffer.
//
// Every node computes a different slice of an output vector; after a sync all
// nodes must hold the whole vector. The router works tile by tile (a tile is
// one block of the MP kernel or one head of the MHA kernel, n = tile_packs_i
// datapacks). Per tile there are N_NODES rounds. In round 0 the router sends
// its own n local datapacks to its successor; in rounds 1..N_NODES-1 it
// forwards the n datapacks it received in the previous round. Every datapack
// it receives from its predecessor - including, in the last round, its own
// datapacks coming back round the ring - is written to the buffer. The
// router keeps an offset derived from its node ID: round t of the tile comes
// from node (id + 1 + t) mod N_NODES and is written into that node's slot,
// so writing continues from slot (id+1) mod N_NODES and wraps, and all
// buffers end up identical (paper Fig. 6(c)).
// Buffer address of pack p of round t of tile k:
//   out_base + origin * node_stride + k * tile_packs + p.
// Ring direction: node i sends to node (i-1) mod N_NODES and receives from
// node (i+1) mod N_NODES, as the printed FIFO contents of Fig. 6(c) show
// (router 0 receives 1,2,3,0 in rounds T0..T3).
// Because the local source is read only in round 0 of each tile, the sync of
// tile k overlaps the computation of tile k+1 (transmission latency hiding);
// the last tile's sync is the exposed part. Handshakes are valid/ready;
// one datapack per cycle in each direction.
//
// Lint note: SYNCASYNCNET on rst_n comes from the assertion's "disable
// iff", not from circuit logic.
module router
  import looplynx_pkg::*;
#(
  parameter int unsigned N_NODES = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       node_id_i,
  // command
  input  logic             start_i,
  input  buf_addr_t        out_base_i,
  input  logic [LEN_W-1:0] node_stride_i,   // buffer words per node slot
  input  logic [LEN_W-1:0] tile_packs_i,    // n: datapacks per node per tile
  input  logic [LEN_W-1:0] n_tiles_i,
  output logic             busy_o,
  // local datapacks (from the quantisation unit or the MHA kernel)
  input  logic             loc_valid,
  output logic             loc_ready,
  input  pack_t            loc_data,
  // ring
  input  logic             rin_valid,
  output logic             rin_ready,
  input  pack_t            rin_data,
  output logic             rout_valid,
  input  logic             rout_ready,
  output pack_t            rout_data,
  // buffer write port
  output logic             buf_wr_en,
  output buf_addr_t        buf_wr_addr,
  output pack_t            buf_wr_data,
  // events
  output logic             tile_done_o,
  output logic             fwd_o           // a datapack was forwarded this cycle
);
  buf_addr_t        out_base;
  logic [LEN_W-1:0] stride, n, tiles_left, tile_idx;
  logic [31:0]      sent, recv;            // per tile
  logic [31:0]      n_fwd, n_tot;
  logic [7:0]       origin;
  logic [LEN_W-1:0] rnd, pk;               // round and pack within round of the next received pack
  logic             active;
  logic             local_phase, fwd_need, do_loc, do_rin;

  assign busy_o      = active;
  assign n_fwd       = 32'(N_NODES - 1) * 32'(n);
  assign n_tot       = 32'(N_NODES) * 32'(n);
  assign local_phase = active && (sent < 32'(n));
  assign fwd_need    = (recv < n_fwd);

  // local datapacks go out in round 0
  assign do_loc    = local_phase && loc_valid && rout_ready;
  assign loc_ready = local_phase && rout_ready;
  // received datapacks: written always, forwarded while rounds remain
  assign rin_ready = active && (recv < n_tot) && !local_phase && (!fwd_need || rout_ready);
  assign do_rin    = rin_valid && rin_ready;

  assign rout_valid = local_phase ? loc_valid : (active && rin_valid && rin_ready && fwd_need);
  assign rout_data  = local_phase ? loc_data  : rin_data;
  assign fwd_o      = do_rin && fwd_need;

  always_comb begin
    logic [8:0] o;
    o = 9'(node_id_i) + 9'd1 + 9'(rnd);
    origin = 8'(o % N_NODES);
  end

  assign buf_wr_en   = do_rin;
  assign buf_wr_addr = out_base + BUF_AW'(32'(origin) * 32'(stride) + 32'(tile_idx) * 32'(n) + 32'(pk));
  assign buf_wr_data = rin_data;

  logic tile_end;
  assign tile_end    = active && (sent + (do_loc || (do_rin && fwd_need) ? 1 : 0) == n_fwd + 32'(n))
                              && (recv + (do_rin ? 1 : 0) == n_tot);
  assign tile_done_o = tile_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      out_base   <= '0;
      stride     <= '0;
      n          <= '0;
      tiles_left <= '0;
      tile_idx   <= '0;
      sent       <= '0;
      recv       <= '0;
      rnd        <= '0;
      pk         <= '0;
    end else if (start_i && !active) begin
      active     <= (n_tiles_i != 0);
      out_base   <= out_base_i;
      stride     <= node_stride_i;
      n          <= tile_packs_i;
      tiles_left <= n_tiles_i;
      tile_idx   <= '0;
      sent       <= '0;
      recv       <= '0;
      rnd        <= '0;
      pk         <= '0;
    end else if (active) begin
      if (tile_end) begin
        sent     <= '0;
        recv     <= '0;
        rnd      <= '0;
        pk       <= '0;
        tile_idx <= tile_idx + 1'b1;
        tiles_left <= tiles_left - 1'b1;
        if (tiles_left == 1) active <= 1'b0;
      end else begin
        if (do_loc || (do_rin && fwd_need)) sent <= sent + 1;
        if (do_rin) begin
          recv <= recv + 1;
          if (pk == n - 1'b1) begin
            pk  <= '0;
            rnd <= rnd + 1'b1;
          end else begin
            pk <= pk + 1'b1;
          end
        end
      end
    end
  end

  // A node never sends more than it has to per tile.
  assert property (@(posedge clk) disable iff (!rst_n) active |-> sent <= n_tot);
endmodule
