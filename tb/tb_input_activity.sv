// tb_input_activity -- self-checking test of input_activity at a reduced size
// (40 pixels, three beats, padded to 128 activities). Checks the complementary
// coding x[2i] = p, x[2i+1] = 1 - p (with clamping of out-of-range pixels), the
// zero padding, the presynaptic trace update and ln p_i against real
// arithmetic, the reset of the traces by `init`, and the rate of one beat per
// cycle (done two cycles after the last beat was offered in back-to-back order).
module tb_input_activity;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NIH = 40, NIP = 128, NBE = 3;
  logic clk = 0, rst_n = 0;
  logic start, init, learn, in_valid, in_ready, done;
  logic [4:0] alpha_sh;
  beat_t in_data;
  fx_t x_vec [NIP], lnpi_vec [NIP];
  real pix [NIH], pi_ref [2*NIH];
  int checks = 0, failures = 0, t0;

  input_activity #(.NI_HC(NIH), .NI_PAD(NIP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input bit lrn, input bit ini);
    for (int i = 0; i < NIH; i++) pix[i] = urand(-0.1, 1.1);
    start = 1; init = ini; learn = lrn; @(negedge clk); start = 0;
    if (ini) for (int k = 0; k < 2*NIH; k++) pi_ref[k] = 0.5;
    t0 = $time;
    for (int b = 0; b < NBE; b++) begin
      in_valid = 1;
      for (int w = 0; w < WPB; w++)
        in_data[w*DW +: DW] = (b*WPB + w < NIH) ? r2fx(pix[b*WPB + w]) : 32'h0;
      #1; checks++; if (!in_ready) begin failures++; $display("stall"); end
      @(negedge clk);
    end
    in_valid = 0;
    checks++; if (!done) begin failures++; $display("not done after %0d beats", NBE); end
    for (int i = 0; i < NIH; i++) begin
      automatic real p = (pix[i] < 0.0) ? 0.0 : (pix[i] > 1.0) ? 1.0 : pix[i];
      checks++; if (rabs(fx2r(x_vec[2*i]) - p) > 1e-6 || rabs(fx2r(x_vec[2*i+1]) - (1.0 - p)) > 1e-6) begin
        failures++; $display("x fail %0d", i); end
      if (lrn) begin
        pi_ref[2*i]   = pi_ref[2*i]   + (p - pi_ref[2*i]) / real'(1 << alpha_sh);
        pi_ref[2*i+1] = pi_ref[2*i+1] + (1.0 - p - pi_ref[2*i+1]) / real'(1 << alpha_sh);
      end
      for (int m = 0; m < 2; m++) begin
        checks++;
        if (rabs(fx2r(lnpi_vec[2*i+m]) - $ln(pi_ref[2*i+m])) > 0.01) begin
          failures++; $display("ln p_i fail %0d: %f vs %f", 2*i+m, fx2r(lnpi_vec[2*i+m]), $ln(pi_ref[2*i+m])); end
      end
    end
    for (int k = 2*NIH; k < NIP; k++) begin
      checks++; if (x_vec[k] != 0) begin failures++; $display("pad fail"); end
    end
  endtask

  initial begin
    start = 0; init = 0; learn = 0; in_valid = 0; in_data = '0; alpha_sh = 5'd2;
    for (int k = 0; k < 2*NIH; k++) pi_ref[k] = 0.5;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    run(0, 0);   // inference: traces stay at 1/2
    run(1, 0);   // learning
    run(1, 0);
    run(0, 0);   // traces kept
    run(1, 1);   // reset then learn
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
