// hbm_split -- "Store data to HBM": cuts a 64-word packet into four channel beats.
//
// The write-side mirror of hbm_merge. A packet of 64 words is accepted into a
// register; words 16c .. 16c+15 are then offered as a 512-bit beat on channel c,
// for c = 0..NC-1 (NC = 4 for the partitioned arrays; the kernel also uses
// NC = 8 to write a trace packet and a weight packet together, and NC = 2 for
// the hidden-output projection). `idle` is high when no beat is pending. Each
// channel handshakes on its own; the next packet is accepted
// once every channel has taken its beat (it can be accepted in the same cycle
// the last beat leaves), so with free channels the rate is one packet per cycle.
// The original states only that writes use "a similar approach"; the per-channel
// pending flags are this design's own choice.
module hbm_split
  import bcpnn_pkg::*;
#(
  parameter int unsigned NC = NCH          // channels one packet is cut into
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [NC*WPB-1:0][DW-1:0] in_data,
  output logic [NC-1:0]  ch_valid,
  input  logic [NC-1:0]  ch_ready,
  output beat_t           ch_data [NC],
  output logic            idle
);
  logic [NC*WPB-1:0][DW-1:0] buf_q;
  logic [NC-1:0] pend;

  wire [NC-1:0] left = pend & ~ch_ready;    // beats still waiting after this cycle
  assign in_ready = (left == '0);
  assign ch_valid = pend;
  assign idle     = (pend == '0);

  always_comb begin
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < WPB; w++)
        ch_data[c][w*DW +: DW] = buf_q[c*WPB + w];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend  <= '0;
      buf_q <= '0;
    end else if (in_valid && in_ready) begin
      pend  <= '1;
      buf_q <= in_data;
    end else begin
      pend  <= left;
    end
  end
endmodule
