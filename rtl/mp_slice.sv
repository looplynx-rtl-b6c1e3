// mp_slice: one MP slice of the matrix processing unit, fed by one HBM channel.
//
// A slice holds n_group MAC units, one per output row of its 32-row strip of
// the current weight block. Its DMA stream carries, per block, k_len weight
// datapacks (byte g of pack j is W[row g][column j]) followed by BIAS_BEATS
// datapacks holding the 32 int32 biases of the strip (8 per pack, lane 0 in
// the low bits). The kernel broadcasts the vector element x[j] and asserts
// step_i when every slice reports mac_rdy_o; all slices then advance in
// lockstep, one column per cycle.
// After k_len steps the slice reads its biases, then copies accumulators and
// biases into an output bank and immediately starts the next block ("meanwhile
// the next block matrix multiplication can proceed"). If the output bank is
// still occupied when the next block finishes, the slice waits and raises
// stall_o. The weight layout, the in-band biases and the single output bank are
// this design's choice; the paper gives the MAC-per-row organisation, n_group
// and the overlap of packing with the next block.
//
// Lint note: SYNCASYNCNET on rst_n comes from the assertion's "disable
// iff", not from circuit logic.
module mp_slice
  import looplynx_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [LEN_W-1:0]   k_len_i,      // columns per block (vector length)
  // weight/bias stream from the DMA engine
  input  logic               w_valid,
  output logic               w_ready,
  input  pack_t              w_data,
  // lockstep MAC control
  output logic               mac_rdy_o,
  input  logic               step_i,
  input  logic signed [7:0]  x_i,
  // packed result for the quantisation unit
  output logic               o_valid,
  input  logic               o_ready,
  output logic signed [31:0] o_acc  [N_GROUP],
  output logic signed [31:0] o_bias [N_GROUP],
  output logic               stall_o
);
  localparam int unsigned BIAS_BEATS = N_GROUP / 8;

  typedef enum logic [1:0] {S_MAC, S_BIAS, S_OUT} state_e;
  state_e state;

  logic [LEN_W-1:0]   col;
  logic [1:0]         bcnt;
  logic signed [31:0] acc  [N_GROUP];
  logic signed [31:0] bias [N_GROUP];

  assign mac_rdy_o = (state == S_MAC) && w_valid;
  assign w_ready   = (state == S_MAC) ? step_i : (state == S_BIAS);
  assign stall_o   = (state == S_OUT) && o_valid;

  for (genvar g = 0; g < N_GROUP; g++) begin : g_mac
    mac_unit u_mac (
      .clk, .rst_n,
      .en_i  (step_i),
      .clr_i (col == '0),
      .w_i   (w_data[8*g +: 8]),
      .x_i   (x_i),
      .acc_o (acc[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_MAC;
      col     <= '0;
      bcnt    <= '0;
      o_valid <= 1'b0;
      for (int g = 0; g < N_GROUP; g++) begin
        bias[g]   <= '0;
        o_acc[g]  <= '0;
        o_bias[g] <= '0;
      end
    end else begin
      if (o_valid && o_ready) o_valid <= 1'b0;
      unique case (state)
        S_MAC: if (step_i) begin
          if (col == k_len_i - 1'b1) begin
            col   <= '0;
            state <= S_BIAS;
          end else begin
            col <= col + 1'b1;
          end
        end
        S_BIAS: if (w_valid) begin
          for (int i = 0; i < 8; i++) bias[8*bcnt + i] <= w_data[32*i +: 32];
          bcnt <= bcnt + 1'b1;
          if (bcnt == 2'(BIAS_BEATS - 1)) state <= S_OUT;
        end
        S_OUT: if (!o_valid || o_ready) begin
          o_acc   <= acc;
          o_bias  <= bias;
          o_valid <= 1'b1;
          state   <= S_MAC;
        end
        default: state <= S_MAC;
      endcase
    end
  end

  // A step may only be given while the slice is ready for it.
  assert property (@(posedge clk) disable iff (!rst_n) step_i |-> mac_rdy_o);
endmodule
