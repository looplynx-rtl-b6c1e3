// softmax_unit: exponent, global sum and division of the attention softmax,
// with the EXP buffer that lets two heads be in flight at once.
//
// Softmax.1 (write side): each (masked) score s of a head is turned into
//   z = clamp((s * sm_mult) >>> sm_shift, -16.0, 16.0)   (base-2 exponent, Q.8)
//   e = 2^z  ~  (1 + frac(z)) << int(z)                  (Q.16, 32 bit)
// (e = 0 for masked scores), stored into EXP buffer bank in_bank at the next
// index, and added to the head's sum. The last score of a head ends the sum;
// the unit then computes recip = floor(2^40 / sum) with a sequential divider
// (41 cycles) while the next head's scores already stream into the other bank.
// When the division ends, bank_rdy_o[bank] rises.
// Softmax.2 (read side): p = (e[idx] * recip) >> 32 is the attention weight
// in Q0.8 (0..256), read combinationally from bank rd_bank. The consumer
// lowers bank_rdy_o with release_i when it is done with the bank.
// The paper gives the EXP units, the adder tree, the single divider and the
// EXP buffer (Fig. 6(b)) and the split into softmax.1 and softmax.2; it shows
// no maximum subtraction. The base-2 exponent, the linear mantissa
// approximation, the clamp and all number formats are this design's choice.
//
// Lint notes: rd_idx is LEN_W bits so it matches the score count, but
// only the low IW bits index the exponent buffer. div_q[40] never holds a
// quotient bit: the 41-bit result is div_q[39:0] plus the bit decided in
// the last step, so the top bit of the shift register is unused.
module softmax_unit
  import looplynx_pkg::*;
#(
  parameter int unsigned MAX_SEQ = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [15:0]        sm_mult_i,
  input  logic [4:0]         sm_shift_i,
  // softmax.1: scores in
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] in_score,
  input  logic               in_masked,
  input  logic               in_last,
  input  logic               in_bank,
  // bank status
  output logic [1:0]         bank_rdy_o,
  input  logic [1:0]         release_i,
  // softmax.2: weights out
  input  logic               rd_bank,
  input  logic [LEN_W-1:0]   rd_idx,
  output logic [8:0]         p_o
);
  localparam int unsigned IW = $clog2(MAX_SEQ);

  logic [31:0] ebuf [2][MAX_SEQ];
  logic [LEN_W-1:0] widx;
  logic [47:0] sum;
  logic [40:0] recip [2];

  // divider state
  logic        div_busy, div_bank;
  logic [47:0] div_d, div_rem;
  logic [40:0] div_q;
  logic [5:0]  div_it;

  // ---------------- exponent ----------------
  logic [31:0] e;
  always_comb begin
    logic signed [47:0] z;
    logic signed [5:0]  ip;
    logic [8:0]         mant;
    z = (48'(in_score) * $signed({1'b0, sm_mult_i})) >>> sm_shift_i;
    if (z < -48'sd4096)     z = -48'sd4096;
    else if (z > 48'sd4095) z = 48'sd4095;
    ip   = 6'(z >>> 8);
    mant = {1'b1, z[7:0]};
    if (in_masked)   e = '0;
    else if (ip >= -6'sd8) e = 32'(mant) << (ip + 6'sd8);
    else                   e = 32'(mant) >> (-(ip + 6'sd8));
  end

  // divider partial remainder: numerator 2^40, its only set bit enters first
  logic [48:0] div_r;
  assign div_r = {div_rem, (div_it == 6'd0) ? 1'b1 : 1'b0};

  // A head's last score waits while the divider is still busy with the previous head.
  assign in_ready = !(in_last && div_busy);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ebuf[in_bank][widx[IW-1:0]] <= e;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx <= '0; sum <= '0; bank_rdy_o <= '0;
      div_busy <= 1'b0; div_bank <= 1'b0; div_d <= '0; div_rem <= '0; div_q <= '0; div_it <= '0;
      recip[0] <= '0; recip[1] <= '0;
    end else begin
      bank_rdy_o <= bank_rdy_o & ~release_i;
      if (in_valid && in_ready) begin
        if (in_last) begin
          widx     <= '0;
          sum      <= '0;
          div_busy <= 1'b1;
          div_bank <= in_bank;
          div_d    <= sum + 48'(e);
          div_rem  <= '0;
          div_q    <= '0;
          div_it   <= '0;
        end else begin
          widx <= widx + 1'b1;
          sum  <= sum + 48'(e);
        end
      end
      if (div_busy) begin
        // recip = 2^40 / d : numerator bit 40 is the only one set
        if (div_d == '0) begin
          div_q <= {div_q[39:0], 1'b1};            // all-masked head: weights saturate, never used
          div_rem <= '0;
        end else if (div_r >= 49'(div_d)) begin
          div_rem <= 48'(div_r - 49'(div_d));
          div_q   <= {div_q[39:0], 1'b1};
        end else begin
          div_rem <= 48'(div_r);
          div_q   <= {div_q[39:0], 1'b0};
        end
        div_it <= div_it + 1'b1;
        if (div_it == 6'd40) begin
          div_busy <= 1'b0;
          bank_rdy_o[div_bank] <= 1'b1;
          recip[div_bank] <= (div_d == '0) ? '0 : {div_q[39:0], (div_r >= 49'(div_d)) ? 1'b1 : 1'b0};
        end
      end
    end
  end

  // ---------------- softmax.2 ----------------
  always_comb begin
    logic [72:0] prod;
    prod = 73'(ebuf[rd_bank][rd_idx[IW-1:0]]) * 73'(recip[rd_bank]);
    p_o  = (prod[72:32] > 41'd256) ? 9'd256 : 9'(prod >> 32);
  end
endmodule
