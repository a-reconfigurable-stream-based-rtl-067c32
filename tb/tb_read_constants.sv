// tb_read_constants -- self-checking test of read_constants.
// Arms the unit, offers random constant beats, and checks that exactly one beat is
// taken per start, that the fields decode to the values packed into bits 31:0,
// and that valid rises only after the beat and falls at the next start.
module tb_read_constants;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, valid;
  beat_t in_data;
  consts_t consts;
  int checks = 0, failures = 0;

  read_constants dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    checks++; if (in_ready || valid) begin failures++; $display("ready before start"); end
    for (int t = 0; t < 50; t++) begin
      automatic logic [1:0] md = 2'($urandom_range(0, 2));
      automatic logic [7:0] lb = 8'($urandom_range(0, 9));
      automatic logic [4:0] sh = 5'($urandom_range(1, 20));
      automatic logic ie = 1'($urandom), se = 1'($urandom);
      start = 1; @(negedge clk); start = 0;
      checks++; if (valid) begin failures++; $display("valid not cleared"); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
      in_data = {480'($urandom), 8'h0, lb, sh, ie, se, md, 7'h0};
      in_valid = 1;
      #1; checks++; if (!in_ready) begin failures++; $display("not ready"); end
      @(negedge clk);
      in_valid = 1;   // a second beat must not be taken
      #1; checks++; if (in_ready) begin failures++; $display("took two beats"); end
      in_valid = 0;
      checks++;
      if (!(valid && consts.mode == mode_e'(md) && consts.label == lb && consts.alpha_sh == sh &&
            consts.init == ie && consts.struct_en == se)) begin
        failures++; $display("decode fail");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
