// mask_unit: causal attention mask between the score MAC and the softmax.
//
// The paper's mask unit "ensures that only forward attention is kept": a
// token may attend only to itself and to earlier tokens. Scores arrive one
// per cycle tagged with their key position t; the unit registers each score
// and marks it masked when t > pos, where pos is the position of the token
// being decoded. The score MAC reads the KV cache in groups of whole bursts,
// so it may deliver scores beyond pos; those are the ones masked here.
// One cycle of latency, valid/ready flow-through.
module mask_unit
  import looplynx_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [LEN_W-1:0]   pos_i,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] in_score,
  input  logic [LEN_W-1:0]   in_t,
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [31:0] out_score,
  output logic               out_masked,
  output logic               out_last
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_score  <= '0;
      out_masked <= 1'b0;
      out_last   <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_score  <= in_score;
        out_masked <= (in_t > pos_i);
        out_last   <= in_last;
      end
    end
  end
endmodule
