// trace_update -- "Update Traces and probabilities" for one packet of traces.
//
// BCPNN keeps running estimates of how often units are active, alone and
// together. For one packet of LANES joint traces the unit computes, per lane,
//     p'_l = p_l + (u_l * v - p_l) * 2^-sh ,   clamped to at least 1 LSB,
// the exponential moving average toward the co-activity of a per-lane activity
// u_l and an activity v shared by the packet. In the input-hidden projection u
// holds 64 input activities x_i and v the hidden activity a_j; in the
// hidden-output projection u holds the (clamped) output activities y_k and v the
// hidden activity a_j. A tag travels with the packet. The stage is a register
// with valid/ready handshakes: latency one cycle, one packet per cycle. The
// update rule follows the model the original builds on (the original says only that
// the traces are updated incrementally); the rate as a power of two is this
// design's own choice.
module trace_update
  import bcpnn_pkg::*;
#(
  parameter int unsigned LANES = PKT,
  parameter int unsigned TW    = 17
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [4:0]              sh,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [LANES-1:0][DW-1:0] in_p,
  input  fx_t                     in_u [LANES],
  input  fx_t                     in_v,
  input  logic [TW-1:0]           in_tag,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [LANES-1:0][DW-1:0] out_p,
  output logic [TW-1:0]           out_tag
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_p <= '0; out_tag <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        for (int l = 0; l < LANES; l++)
          out_p[l] <= fx_ema(fx_t'(in_p[l]), fx_mul(in_u[l], in_v), sh);
      end
    end
  end
endmodule
