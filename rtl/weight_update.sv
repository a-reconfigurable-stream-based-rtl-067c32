// weight_update -- "Update Bias & Weight": turns joint traces into weights.
//
// The BCPNN weight is the log-odds of co-activity,
//     w_l = ln p_l - ln u_l - ln v   (= ln( p_ij / (p_i p_j) )),
// computed for the LANES joint traces p of one packet. The logarithms of the
// per-lane unit traces (ln u) and of the shared one (ln v) are kept on chip
// beside those traces and arrive ready; only the joint traces need a
// logarithm here, one per lane. The output carries both the updated traces
// (to be written back) and the new weights, plus the tag. The bias b_j = ln p_j
// of a hidden or output unit is the same logarithm and is formed where p_j is
// updated. Register stage with valid/ready: latency one cycle, one packet per
// cycle. The formula is the original's; the logarithm approximation is this
// design's own.
module weight_update
  import bcpnn_pkg::*;
#(
  parameter int unsigned LANES = PKT,
  parameter int unsigned TW    = 17
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [LANES-1:0][DW-1:0] in_p,
  input  fx_t                     in_lnu [LANES],
  input  fx_t                     in_lnv,
  input  logic [TW-1:0]           in_tag,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [LANES-1:0][DW-1:0] out_p,
  output logic [LANES-1:0][DW-1:0] out_w,
  output logic [TW-1:0]           out_tag
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_p <= '0; out_w <= '0; out_tag <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        out_p   <= in_p;
        for (int l = 0; l < LANES; l++)
          out_w[l] <= fx_ln(fx_t'(in_p[l])) - in_lnu[l] - in_lnv;
      end
    end
  end
endmodule
