// out_support -- support of the output population through the hidden-output projection.
//
// Computes s_k = b_k + sum_j a_j * w_jk for the NO output units (classes), with
// a the hidden activities and w the hidden-output weights. This projection is
// not partitioned: its weights come from a single HBM channel as 512-bit beats
// of 16 words, beat j holding w_jk for k = 0..15 (outputs beyond NO are padding
// and ignored). The unit keeps 16 accumulators and adds a_j * w_jk to all of
// them for each accepted beat, one beat per cycle. Beat j is only accepted once
// hidden activity a_j exists (`navail` > j), so the projection runs alongside
// the input-hidden projection and follows it hypercolumn by hypercolumn. After
// the last of NH beats the NO supports are streamed out (Q12.20, saturated),
// output k with index k, one per cycle. The 16-word packets and the parallel
// operation follow the original; the row order and the formats are this
// design's own choices.
module out_support
  import bcpnn_pkg::*;
#(
  parameter int unsigned NH = 4096,
  parameter int unsigned NO = 10,
  localparam int unsigned JW = $clog2(NH + 1),
  localparam int unsigned OW = $clog2(WPB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          in_valid,
  output logic          in_ready,
  input  beat_t         in_w,
  input  fx_t           act_vec [NH],
  input  logic [JW-1:0] navail,
  input  fx_t           bias_vec [NO],
  output logic          out_valid,
  input  logic          out_ready,
  output sup_t          out_sup,
  output logic [OW-1:0] out_idx
);
  localparam logic signed [47:0] SMAX = 48'sh0000_7FFF_FFFF <<< 4;
  localparam logic signed [47:0] SMIN = -(48'sh0000_8000_0000 <<< 4);

  logic [JW-1:0]      row;
  logic               draining;
  logic [OW-1:0]      k;
  logic signed [47:0] acc [NO];

  assign in_ready  = !draining && (row < navail) && (row < JW'(NH));
  assign out_valid = draining;
  assign out_idx   = k;

  always_comb begin
    automatic logic signed [47:0] s = acc[k] + 48'(bias_vec[k]);
    automatic logic signed [47:0] q = s >>> (FRAC - SFRAC);
    out_sup = (s > SMAX) ? sup_t'(32'h7FFF_FFFF) :
              (s < SMIN) ? sup_t'(32'h8000_0000) : sup_t'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0; draining <= 1'b0; k <= '0;
      for (int o = 0; o < NO; o++) acc[o] <= '0;
    end else if (start) begin
      row <= '0; draining <= 1'b0; k <= '0;
      for (int o = 0; o < NO; o++) acc[o] <= '0;
    end else if (draining) begin
      if (out_ready) begin
        if (k == OW'(NO - 1)) draining <= 1'b0;
        else k <= k + 1'b1;
      end
    end else if (in_valid && in_ready) begin
      for (int o = 0; o < NO; o++) begin
        automatic logic signed [63:0] p =
          64'(act_vec[row]) * 64'(signed'(in_w[o*DW +: DW]));
        acc[o] <= acc[o] + 48'(p >>> FRAC);
      end
      row <= row + 1'b1;
      if (row == JW'(NH - 1)) begin
        draining <= 1'b1;
        k        <= '0;
      end
    end
  end
endmodule
