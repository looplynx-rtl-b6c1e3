// looplynx_pkg: types and constants shared by the LoopLynx accelerator.
//
// A datapack is the unit that moves everywhere in the design: 32 bytes, i.e.
// n_group = 32 int8 values. One HBM beat, one on-chip buffer word and one
// router flit are all one datapack. The package also holds the stage encoding
// the scheduler walks through (the order LN / Q / K / V / Atten / O / LN / FFN /
// Act / FFN of the paper's schedule) and the HBM request types.
// n_group = 32 is the paper's number; the 256-bit datapack follows from it.
// Everything else here (address widths, encodings) is this design's choice.
//
// Lint note: UNUSEDPARAM N_MP_OPS is reported only when the package is
// linted alone; the scheduler, accel_node and the top all use it.
package looplynx_pkg;

  localparam int unsigned N_GROUP    = 32;            // MAC units per MP slice (paper)
  localparam int unsigned PACK_BYTES = N_GROUP;       // one n_group x 8-bit datapack
  localparam int unsigned PACK_W     = 8 * PACK_BYTES;
  localparam int unsigned HBM_AW     = 23;            // beat address: 256 MB per channel / 32 B
  localparam int unsigned BUF_AW     = 12;            // on-chip buffer word address width
  localparam int unsigned LEN_W      = 16;            // lengths, counts

  typedef logic [PACK_W-1:0]  pack_t;
  typedef logic [HBM_AW-1:0]  hbm_addr_t;
  typedef logic [BUF_AW-1:0]  buf_addr_t;

  // Read request of one HBM channel (AXI-like: address + number of beats).
  typedef struct packed {
    hbm_addr_t        addr;
    logic [LEN_W-1:0] len;   // beats, 1..2^16-1
  } hbm_rd_req_t;

  // Single-beat write of one HBM channel (used to append to the KV cache).
  typedef struct packed {
    hbm_addr_t addr;
    pack_t     data;
  } hbm_wr_req_t;

  // Linear layers executed on the fused MP kernel.
  typedef enum logic [2:0] {
    OP_Q = 3'd0, OP_K = 3'd1, OP_V = 3'd2, OP_O = 3'd3, OP_FFN1 = 3'd4, OP_FFN2 = 3'd5
  } mp_op_e;
  localparam int unsigned N_MP_OPS = 6;

  // Scheduler stages, numbered as in the paper's schedule (1..10) plus the
  // final residual + layer norm after the last transformer block.
  typedef enum logic [3:0] {
    ST_IDLE  = 4'd0,
    ST_LN1   = 4'd1,  ST_Q    = 4'd2,  ST_K   = 4'd3,  ST_V    = 4'd4,
    ST_ATTN  = 4'd5,  ST_O    = 4'd6,  ST_LN2 = 4'd7,  ST_FFN1 = 4'd8,
    ST_ACT   = 4'd9,  ST_FFN2 = 4'd10, ST_LNF = 4'd11, ST_DONE = 4'd12
  } stage_e;

  // Requantisation parameters of one linear layer:
  //   y = sat8(((acc + bias) * mult + 2^(shift-1)) >>> shift).
  typedef struct packed {
    logic [15:0] mult;
    logic [5:0]  shift;
  } quant_cfg_t;

  function automatic logic signed [7:0] sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return 8'sd127;
    else if (v < -48'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage
