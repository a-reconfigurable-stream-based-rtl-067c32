// hid_support -- "Update Support Values" of the input-hidden projection.
//
// Computes, for every hidden minicolumn j, the support
//     s_j = b_j + sum_i m(h(j), hc(i)) * x_i * w_ij
// where x is the input activity vector, w the weight matrix streamed from HBM,
// b the hidden bias and m the receptive-field mask (m = 1 everywhere without
// structural plasticity). Weights arrive row by row (row j = the NI_PAD weights
// into hidden unit j), as merged packets of LANES = 64 words: packet r of row j
// holds w_ij for i = 64r .. 64r+63. All 64 products of a packet are summed by an
// unrolled adder tree in the cycle the packet is accepted, so the unit takes one
// packet per cycle and a row in NI_PAD/64 cycles; the support of row j is
// registered and offered, with its index j, the cycle after its last packet.
// Products are kept at 24 fraction bits in a 48-bit accumulator; the support is
// returned in Q12.20, saturated. Row-major weight order, the 64-lane adder tree
// and the number formats are this design's own choices; the 64-word packets and
// the parallel unrolled processing follow the original.
module hid_support
  import bcpnn_pkg::*;
#(
  parameter int unsigned NI_HC  = 784,
  parameter int unsigned NI_PAD = 1600,
  parameter int unsigned NH_HC  = 32,
  parameter int unsigned MH     = 128,
  parameter int unsigned LANES  = PKT,
  localparam int unsigned NH    = NH_HC * MH,
  localparam int unsigned JW    = $clog2(NH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,                 // clears the row/packet counters
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [LANES-1:0][DW-1:0] in_w,
  input  fx_t          x_vec  [NI_PAD],
  input  fx_t          bias_vec [NH],
  input  logic [NH_HC*NI_HC-1:0] mask,
  output logic         out_valid,
  input  logic         out_ready,
  output sup_t         out_sup,
  output logic [JW-1:0] out_idx
);
  localparam int unsigned RPK = NI_PAD / LANES;    // packets per row
  localparam int unsigned PW  = (RPK > 1) ? $clog2(RPK) : 1;
  localparam logic signed [47:0] SMAX = 48'sh0000_7FFF_FFFF <<< 4;
  localparam logic signed [47:0] SMIN = -(48'sh0000_8000_0000 <<< 4);

  logic [PW-1:0]      pcnt;
  logic [JW-1:0]      row;
  logic signed [47:0] acc;
  logic signed [47:0] dot;

  assign in_ready = !out_valid || out_ready;

  // Unrolled multiply and adder tree over the 64 lanes of one packet.
  always_comb begin
    dot = '0;
    for (int l = 0; l < LANES; l++) begin
      automatic int  i  = int'(pcnt) * LANES + l;
      automatic int  ih = i / 2;
      automatic int  hh = int'(row) / MH;
      automatic logic signed [63:0] p = 64'(x_vec[i]) * 64'(signed'(in_w[l]));
      if (ih < NI_HC && mask[hh*NI_HC + ih])
        dot += 48'(p >>> FRAC);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt <= '0; row <= '0; acc <= '0;
      out_valid <= 1'b0; out_sup <= '0; out_idx <= '0;
    end else if (start) begin
      pcnt <= '0; row <= '0; acc <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (pcnt == PW'(RPK - 1)) begin
          automatic logic signed [47:0] s = acc + dot + 48'(bias_vec[row]);
          automatic logic signed [47:0] q = s >>> (FRAC - SFRAC);
          out_sup   <= (s > SMAX) ? sup_t'(32'h7FFF_FFFF) :
                       (s < SMIN) ? sup_t'(32'h8000_0000) : sup_t'(q);
          out_idx   <= row;
          out_valid <= 1'b1;
          acc  <= '0;
          pcnt <= '0;
          row  <= (row == JW'(NH - 1)) ? '0 : row + 1'b1;
        end else begin
          acc  <= acc + dot;
          pcnt <= pcnt + 1'b1;
        end
      end
    end
  end
endmodule
