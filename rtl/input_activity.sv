// input_activity -- "Fetch Data & Compute Input Activity", first dataflow stage.
//
// Reads the image from HBM, 16 pixel words per 512-bit beat, and turns each
// pixel into the activity of one input hypercolumn with two minicolumns:
// x[2i] = p and x[2i+1] = 1 - p for pixel i, p clamped to [0,1] (Q8.24). The
// activity vector is held on chip (NI_PAD words, the tail beyond 2*NI_HC is 0)
// because every hidden unit's support needs all of it. In unsupervised training
// (`learn` high) the unit also updates the presynaptic traces
// p_i <- p_i + (x_i - p_i) 2^-alpha_sh and keeps ln p_i beside them for the
// weight update. `init` resets p_i to 1/2. One beat per cycle; `done` rises the
// cycle after the last of ceil(NI_HC/16) beats. The 32 words of one beat are
// computed by 32 shared lanes and stored in that beat's row of registers, so
// only the lanes, not the whole vector, hold arithmetic. The two-minicolumn
// (complementary) coding follows the model the original builds on; the original
// itself gives only the stage name.
module input_activity
  import bcpnn_pkg::*;
#(
  parameter int unsigned NI_HC  = 784,
  parameter int unsigned NI_PAD = 1600     // 2*NI_HC rounded up to a multiple of 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       init,
  input  logic       learn,
  input  logic [4:0] alpha_sh,
  input  logic       in_valid,
  output logic       in_ready,
  input  beat_t      in_data,
  output fx_t        x_vec   [NI_PAD],
  output fx_t        lnpi_vec[NI_PAD],
  output logic       done
);
  localparam int unsigned NBEATS = (NI_HC + WPB - 1) / WPB;
  localparam int unsigned CW     = $clog2(NBEATS + 1);
  localparam fx_t LN_HALF = fx_t'(-11629080);

  localparam int unsigned BW = 2 * WPB;            // activity words per beat

  fx_t           xb  [NBEATS][BW];                 // x, one row per beat
  fx_t           pib [NBEATS][BW];                 // p_i
  fx_t           lnb [NBEATS][BW];                 // ln p_i
  fx_t           nx  [BW], npi [BW], nln [BW];     // lane results of this beat
  logic [CW-1:0] cnt;
  logic          busy;

  assign in_ready = busy;

  function automatic fx_t clamp01(input fx_t v);
    if (v < 0)      return '0;
    if (v > FX_ONE) return FX_ONE;
    return v;
  endfunction

  // the 32 lanes: pixel w of the beat gives words 2w and 2w+1
  always_comb begin
    for (int w = 0; w < WPB; w++) begin
      nx[2*w]   = clamp01(in_data[w*DW +: DW]);
      nx[2*w+1] = FX_ONE - nx[2*w];
    end
    for (int l = 0; l < BW; l++) begin
      npi[l] = fx_ema(pib[cnt < CW'(NBEATS) ? int'(cnt) : 0][l], nx[l], alpha_sh);
      nln[l] = fx_ln(npi[l]);
    end
  end

  // word i of the outputs lives in row i/32, column i mod 32
  always_comb
    for (int i = 0; i < NI_PAD; i++) begin
      x_vec[i]    = (i < 2*NI_HC) ? xb[i / BW][i % BW]  : '0;
      lnpi_vec[i] = (i < 2*NI_HC) ? lnb[i / BW][i % BW] : '0;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else if (start) begin
      busy <= 1'b1;
      done <= 1'b0;
      cnt  <= '0;
    end else if (busy && in_valid) begin
      cnt <= cnt + 1'b1;
      if (cnt == CW'(NBEATS - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // one row of registers per beat, written when the counter points at it
  for (genvar k = 0; k < NBEATS; k++) begin : g_row
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int l = 0; l < BW; l++) begin
          xb[k][l]  <= '0;
          pib[k][l] <= FX_HALF;
          lnb[k][l] <= LN_HALF;
        end
      end else if (start) begin
        if (init)
          for (int l = 0; l < BW; l++) begin
            pib[k][l] <= FX_HALF;
            lnb[k][l] <= LN_HALF;
          end
      end else if (busy && in_valid && cnt == CW'(k)) begin
        for (int l = 0; l < BW; l++) begin
          xb[k][l] <= nx[l];
          if (learn) begin
            pib[k][l] <= npi[l];
            lnb[k][l] <= nln[l];
          end
        end
      end
    end
  end
endmodule
