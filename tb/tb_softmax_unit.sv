// tb_softmax_unit -- self-checking test of softmax_unit with groups of 8.
// Random supports (spread over +-20) are fed group after group; each activity is
// compared with a real-valued softmax (tolerance 0.01), the activities of a group
// must sum to 1 within 0.02, indices must follow the group's base index and
// grp_done must pulse once per group. The latency is checked against the
// schedule: with no stalls, the first activity of a group appears M + M + 49
// cycles after the group's first support was accepted.
module tb_softmax_unit;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int M = 8, IW = 8, NG = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, grp_done;
  sup_t in_sup;
  logic [IW-1:0] in_idx, out_idx;
  fx_t out_act;
  real s [M], ref_a [M];
  int checks = 0, failures = 0, ngrp = 0, t_in, t_out;
  real asum;

  softmax_unit #(.M(M), .IW(IW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && grp_done) ngrp++;

  initial begin
    in_valid = 0; out_ready = 0; in_sup = '0; in_idx = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int g = 0; g < NG; g++) begin
      automatic real mx = -1e9, den = 0.0;
      automatic real spread = (g % 4 == 0) ? 0.5 : 20.0;
      for (int k = 0; k < M; k++) begin
        s[k] = urand(-spread, spread);
        if (s[k] > mx) mx = s[k];
      end
      for (int k = 0; k < M; k++) den += $exp(s[k] - mx);
      for (int k = 0; k < M; k++) ref_a[k] = $exp(s[k] - mx) / den;
      for (int k = 0; k < M; k++) begin
        in_valid = 1; in_sup = 32'($rtoi(s[k] * 1048576.0)); in_idx = IW'(g * M + k);
        #1; while (!in_ready) begin @(negedge clk); #1; end
        if (k == 0) t_in = $time;
        @(negedge clk);
      end
      in_valid = 0;
      out_ready = (g % 2 == 0);
      asum = 0.0;
      for (int k = 0; k < M; ) begin
        #1;
        if (out_valid && out_ready) begin
          if (k == 0) t_out = $time;
          checks++;
          if (out_idx != IW'(g * M + k) || rabs(fx2r(out_act) - ref_a[k]) > 0.01) begin
            failures++; $display("g %0d k %0d idx %0d: %f vs %f", g, k, out_idx, fx2r(out_act), ref_a[k]);
          end
          asum += fx2r(out_act);
          k++;
        end
        @(negedge clk);
        out_ready = (g % 2 == 0) || 1'($urandom);
      end
      checks++; if (rabs(asum - 1.0) > 0.02) begin failures++; $display("sum %f", asum); end
      if (g % 2 == 0) begin
        checks++;
        if ((t_out - t_in) / 10 != 2 * M + 49) begin
          failures++; $display("latency %0d, expected %0d", (t_out - t_in) / 10, 2 * M + 49); end
      end
    end
    @(negedge clk);
    checks++; if (ngrp != NG) begin failures++; $display("grp_done %0d", ngrp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
