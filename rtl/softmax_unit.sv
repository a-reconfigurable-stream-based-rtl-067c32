// softmax_unit -- "Update Activity (Softmax)": normalises one hypercolumn.
//
// The minicolumns of a hypercolumn compete: their activities are
//     a_k = exp(s_k - max s) / sum_l exp(s_l - max s)
// over the M supports of the hypercolumn. Because the sum needs every support,
// the unit first collects all M values of a group (M cycles, tracking the
// maximum), then computes the M exponentials and their sum (M cycles), one
// reciprocal of the sum by a 49-step restoring divider (49 cycles), and finally
// streams the M activities a_k = e_k * (1/sum) out with their indices (M cycles
// when the consumer is ready). The index of an output is the index that came
// with the group's first input plus its position in the group. `grp_done` pulses
// with the group's last output. Supports are Q12.20, activities Q8.24. Waiting
// for the whole group follows the original; the phase schedule, the divider and
// the exponential approximation are this design's own choices.
module softmax_unit
  import bcpnn_pkg::*;
#(
  parameter int unsigned M  = 128,
  parameter int unsigned IW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  sup_t          in_sup,
  input  logic [IW-1:0] in_idx,
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_act,
  output logic [IW-1:0] out_idx,
  output logic          grp_done
);
  localparam int unsigned KW = $clog2(M + 1);
  typedef enum logic [1:0] {S_COLLECT, S_EXP, S_DIV, S_OUT} state_e;

  state_e        st;
  sup_t          sv [M];
  fx_t           ev [M];
  sup_t          smax;
  logic [KW-1:0] k;
  logic [IW-1:0] base;
  logic [39:0]   sum;
  logic [63:0]   rem, quo;
  logic [5:0]    dstep;

  assign in_ready  = (st == S_COLLECT);
  assign out_valid = (st == S_OUT);
  assign out_act   = fx_mul(ev[k], fx_t'(quo[31:0]));
  assign out_idx   = base + IW'(k);
  assign grp_done  = out_valid && out_ready && (k == KW'(M - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_COLLECT; k <= '0; base <= '0; smax <= '0; sum <= '0;
      rem <= '0; quo <= '0; dstep <= '0;
      for (int i = 0; i < M; i++) begin sv[i] <= '0; ev[i] <= '0; end
    end else begin
      unique case (st)
        S_COLLECT: if (in_valid) begin
          sv[k] <= in_sup;
          if (k == '0) begin
            base <= in_idx;
            smax <= in_sup;
          end else if (in_sup > smax) begin
            smax <= in_sup;
          end
          if (k == KW'(M - 1)) begin k <= '0; st <= S_EXP; sum <= '0; end
          else k <= k + 1'b1;
        end
        S_EXP: begin
          automatic logic signed [39:0] d = (40'(sv[k]) - 40'(smax)) <<< (FRAC - SFRAC);
          automatic fx_t e = fx_exp(d);
          ev[k] <= e;
          sum   <= sum + 40'(e);
          if (k == KW'(M - 1)) begin
            k <= '0; st <= S_DIV; rem <= '0; quo <= '0; dstep <= 6'd48;
          end else k <= k + 1'b1;
        end
        S_DIV: begin
          // quotient of 2^48 / sum, one bit per cycle, most significant first
          automatic logic [63:0] r = {rem[62:0], (dstep == 6'd48)};
          if (r >= 64'(sum)) begin
            rem <= r - 64'(sum);
            quo <= {quo[62:0], 1'b1};
          end else begin
            rem <= r;
            quo <= {quo[62:0], 1'b0};
          end
          if (dstep == '0) st <= S_OUT;
          else dstep <= dstep - 1'b1;
        end
        S_OUT: if (out_ready) begin
          if (k == KW'(M - 1)) begin k <= '0; st <= S_COLLECT; end
          else k <= k + 1'b1;
        end
      endcase
    end
  end
endmodule
