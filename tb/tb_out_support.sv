// tb_out_support -- self-checking test of out_support with 16 hidden units and
// 3 outputs. Weight beats are offered every cycle, but hidden activities are
// released in steps of 4 (`navail`): the unit must take no beat beyond navail.
// The supports b_k + sum_j a_j w_jk are compared with real sums; padding lanes
// (k >= NO) carry garbage and must not matter. Rate: with navail = NH the 16
// beats are taken in 16 consecutive cycles.
module tb_out_support;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NHU = 16, NOU = 3;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, out_valid, out_ready;
  beat_t in_w;
  fx_t act_vec [NHU], bias_vec [NOU];
  logic [$clog2(NHU+1)-1:0] navail;
  sup_t out_sup;
  logic [3:0] out_idx;
  fx_t W [NHU][WPB];
  int checks = 0, failures = 0, row, ncyc;

  out_support #(.NH(NHU), .NO(NOU)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; in_valid = 0; out_ready = 0; navail = '0; in_w = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      for (int j = 0; j < NHU; j++) begin
        act_vec[j] = r2fx(urand(0.0, 1.0));
        for (int k = 0; k < WPB; k++) W[j][k] = r2fx(urand(-6.0, 6.0));
      end
      for (int k = 0; k < NOU; k++) bias_vec[k] = r2fx(urand(-3.0, 0.0));
      navail = (rep % 2 == 0) ? '0 : NHU;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      row = 0; ncyc = 0;
      while (row < NHU) begin
        in_valid = 1;
        for (int k = 0; k < WPB; k++) in_w[k*DW +: DW] = W[row][k];
        #1;
        checks++; if (in_ready != (row < navail)) begin failures++; $display("gating fail row %0d navail %0d", row, navail); end
        if (in_ready) row++;
        ncyc++;
        @(negedge clk);
        if (rep % 2 == 0 && ncyc % 3 == 0 && navail < NHU) navail = navail + 4;
      end
      in_valid = 0;
      if (rep % 2 == 1) begin checks++; if (ncyc != NHU) begin failures++; $display("rate fail %0d", ncyc); end end
      for (int k = 0; k < NOU; ) begin
        out_ready = 1'($urandom);
        #1;
        if (out_valid && out_ready) begin
          automatic real r = fx2r(bias_vec[k]);
          for (int j = 0; j < NHU; j++) r += fx2r(act_vec[j]) * fx2r(W[j][k]);
          checks++;
          if (out_idx != 4'(k) || rabs(sup2r(out_sup) - r) > 0.001) begin
            failures++; $display("k %0d: %f vs %f", k, sup2r(out_sup), r); end
          k++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      #1; checks++; if (out_valid) begin failures++; $display("extra output"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
