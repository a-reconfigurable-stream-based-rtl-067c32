// hbm_merge -- "Data Merging": joins four 512-bit HBM channel beats into one packet.
//
// A big array of the input-hidden projection is cut by the host into 64-word
// blocks whose words 0-15, 16-31, 32-47 and 48-63 go to four separate HBM
// channels (m+1 .. m+4). This unit reads one 512-bit beat (16 words) from each
// channel and presents them as one 2048-bit packet of 64 words, channel c
// supplying words 16c .. 16c+15. A packet is formed only when all four channels
// have a beat; the beats are accepted together when the packet is taken. The
// output is registered (one cycle of latency) and a new packet can be accepted
// every cycle. NC (default 4) sets the number of channels. Channel-to-word order follows the figure of the original design;
// the register stage is this design's own choice.
module hbm_merge
  import bcpnn_pkg::*;
#(
  parameter int unsigned NC = NCH          // channels merged into one packet
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NC-1:0]  ch_valid,
  output logic [NC-1:0]  ch_ready,
  input  beat_t           ch_data [NC],
  output logic            out_valid,
  input  logic            out_ready,
  output logic [NC*WPB-1:0][DW-1:0] out_data
);
  wire all_valid = &ch_valid;
  wire load      = all_valid && (!out_valid || out_ready);

  assign ch_ready = {NC{load}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (load) begin
        out_valid <= 1'b1;
        for (int c = 0; c < NC; c++)
          for (int w = 0; w < WPB; w++)
            out_data[c*WPB + w] <= ch_data[c][w*DW +: DW];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
