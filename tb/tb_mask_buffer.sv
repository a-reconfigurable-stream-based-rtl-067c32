// tb_mask_buffer -- self-checking test of mask_buffer at a reduced size
// (3 hidden x 300 input hypercolumns = 900 bits, two beats). Loads a random mask
// with stalls between beats and checks every bit and the done flag; then a
// start without the mask must give all ones in one cycle.
module tb_mask_buffer;
  import bcpnn_pkg::*;
  localparam int NHH = 3, NIH = 300, NB = NHH * NIH;
  logic clk = 0, rst_n = 0;
  logic start, use_mask, in_valid, in_ready, done;
  beat_t in_data;
  logic [NB-1:0] mask;
  logic [2*HBM_W-1:0] ref_bits;
  int checks = 0, failures = 0;

  mask_buffer #(.NH_HC(NHH), .NI_HC(NIH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; use_mask = 0; in_valid = 0; in_data = '0;
    for (int i = 0; i < 2*HBM_W; i++) ref_bits[i] = 1'($urandom);
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < 2*HBM_W; i++) ref_bits[i] = 1'($urandom);
      start = 1; use_mask = 1; @(negedge clk); start = 0;
      for (int b = 0; b < 2; b++) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        checks++; if (done) begin failures++; $display("early done"); end
        in_valid = 1; in_data = ref_bits[b*HBM_W +: HBM_W];
        @(negedge clk); in_valid = 0;
      end
      checks++; if (!done) begin failures++; $display("not done"); end
      for (int i = 0; i < NB; i++) begin
        checks++; if (mask[i] != ref_bits[i]) begin failures++; if (failures < 5) $display("bit %0d", i); end
      end
    end
    start = 1; use_mask = 0; @(negedge clk); start = 0;
    checks++; if (!done || mask != '1) begin failures++; $display("all-ones fail"); end
    checks++; if (in_ready) begin failures++; $display("reads without mask"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
