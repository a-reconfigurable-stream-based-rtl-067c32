// read_constants -- "Read Constants": fetches the run-time constants of one call.
//
// Before the dataflow stages start, the kernel reads one 512-bit beat from HBM
// that holds its run-time constants. Its lowest 32 bits are a consts_t word:
// mode (inference, unsupervised or supervised training), whether the receptive
// field mask is applied (structural plasticity builds), whether the on-chip
// traces are reset to their priors, the trace rate 2^-alpha_sh and the class
// label. After `start` the unit accepts exactly one beat, holds the decoded word
// on `consts` and raises `valid` from the next cycle until the next `start`.
// The original names this stage but does not list the constants; the field set
// and its layout are this design's own choice.
module read_constants
  import bcpnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  logic    in_valid,
  output logic    in_ready,
  input  beat_t   in_data,
  output consts_t consts,
  output logic    valid
);
  logic waiting;

  assign in_ready = waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
      valid   <= 1'b0;
      consts  <= '0;
    end else if (start) begin
      waiting <= 1'b1;
      valid   <= 1'b0;
    end else if (waiting && in_valid) begin
      waiting <= 1'b0;
      valid   <= 1'b1;
      consts  <= consts_t'(in_data[31:0]);
    end
  end
endmodule
