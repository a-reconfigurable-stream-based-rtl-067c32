// mask_buffer -- on-chip copy of the receptive-field (sparsity) mask.
//
// With structural plasticity, each hidden hypercolumn sees only a subset of the
// input hypercolumns (nactHi of them); the host rewires this subset between
// training epochs and the kernel reads the resulting mask from an extra HBM
// channel. Bit h*NI_HC + i of the mask is 1 when hidden hypercolumn h is
// connected to input hypercolumn i. After `start` with `use_mask` high the unit
// accepts ceil(NH_HC*NI_HC/512) beats, bit b of beat k being mask bit 512k+b,
// then raises `done`. With `use_mask` low it sets every bit to 1 (full
// connectivity, the build without structural plasticity) and is done the next
// cycle. One beat per cycle. The packing of the bits is this design's own choice.
module mask_buffer
  import bcpnn_pkg::*;
#(
  parameter int unsigned NH_HC = 32,
  parameter int unsigned NI_HC = 784
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic use_mask,
  input  logic in_valid,
  output logic in_ready,
  input  beat_t in_data,
  output logic [NH_HC*NI_HC-1:0] mask,
  output logic done
);
  localparam int unsigned NBITS  = NH_HC * NI_HC;
  localparam int unsigned NBEATS = (NBITS + HBM_W - 1) / HBM_W;
  localparam int unsigned CW     = $clog2(NBEATS + 1);

  logic [CW-1:0] cnt;
  logic          loading;
  logic [NBEATS*HBM_W-1:0] mbuf;   // one 512-bit register per beat

  assign in_ready = loading;
  assign mask     = mbuf[NBITS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading <= 1'b0;
      done    <= 1'b0;
      cnt     <= '0;
    end else if (start) begin
      cnt  <= '0;
      done <= !use_mask;
      loading <= use_mask;
    end else if (loading && in_valid) begin
      cnt <= cnt + 1'b1;
      if (cnt == CW'(NBEATS - 1)) begin
        loading <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  // beat k is written whole when the counter points at it
  for (genvar k = 0; k < NBEATS; k++) begin : g_beat
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)
        mbuf[k*HBM_W +: HBM_W] <= '1;
      else if (start && !use_mask)
        mbuf[k*HBM_W +: HBM_W] <= '1;
      else if (!start && loading && in_valid && cnt == CW'(k))
        mbuf[k*HBM_W +: HBM_W] <= in_data;
    end
  end
endmodule
