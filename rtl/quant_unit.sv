// quant_unit: bias addition and requantisation of one packed MPU result.
//
// The MPU hands over the 32 int32 accumulators of one MP slice together with
// their 32 int32 biases. Every lane computes
//     y = sat8( ((acc + bias) * mult + 2^(shift-1)) >>> shift )
// i.e. bias addition followed by a fixed-point rescale to int8 (W8A8
// quantisation as used by the paper, which gives only "bias addition and
// quantization"; the multiply-shift form and the round-half-up are this
// design's choice). All 32 lanes work in parallel; one datapack per cycle,
// one cycle of latency, valid/ready on both sides.
module quant_unit
  import looplynx_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  quant_cfg_t               cfg_i,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [31:0]       acc_i  [N_GROUP],
  input  logic signed [31:0]       bias_i [N_GROUP],
  output logic                     out_valid,
  input  logic                     out_ready,
  output pack_t                    out_data
);
  pack_t q;

  always_comb begin
    for (int g = 0; g < N_GROUP; g++) begin
      logic signed [32:0] s;
      logic signed [47:0] p;
      s = 33'(acc_i[g]) + 33'(bias_i[g]);
      p = 48'(s) * $signed({1'b0, cfg_i.mult});
      if (cfg_i.shift != 0) p = p + (48'sd1 <<< (cfg_i.shift - 1));
      p = p >>> cfg_i.shift;
      q[8*g +: 8] = sat8(p);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= q;
    end
  end
endmodule
