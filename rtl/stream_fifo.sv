// stream_fifo -- the "Stream FIFO" that links the stages of the dataflow kernel.
//
// A synchronous first-in first-out queue with valid/ready handshakes on both
// sides. A word moves when valid and ready are both high on a rising clock edge.
// Full FIFOs hold back their producer (in_ready low) and empty ones starve their
// consumer (out_valid low): this is the back-pressure that keeps the concurrent
// stages in step. The output is read from the storage array directly, so a word
// written in one cycle can be read in the next (latency 1 cycle); throughput is
// one word per cycle. Depth must be a power of two. Width and depth are set per
// instance; the original sizes its FIFOs by co-simulation and does not publish
// the depths, so the defaults here are this design's own choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [$clog2(DEPTH):0] cnt;

  wire push = in_valid  && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (cnt < ($clog2(DEPTH)+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign level     = cnt;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  // A producer must keep its word stable while it waits for ready.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_hold: assert property (p_hold);
endmodule
