// tb_weight_update -- self-checking test of weight_update with 8 lanes.
// Random joint traces (spanning 1e-6 .. 1) and random logarithms of the unit
// traces; each weight is compared with ln p - ln u - ln v computed in reals
// (tolerance 0.01), the traces must pass unchanged and tags stay in order under
// random back-pressure.
module tb_weight_update;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 8, TW = 8, N = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [L-1:0][DW-1:0] in_p, out_p, out_w;
  fx_t in_lnu [L], in_lnv;
  logic [TW-1:0] in_tag, out_tag;
  real exp_w [N][L];
  logic [L-1:0][DW-1:0] exp_p [N];
  int checks = 0, failures = 0, nin = 0, nout = 0;

  weight_update #(.LANES(L), .TW(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic newpkt();
    in_lnv = r2fx(urand(-8.0, 0.0));
    for (int l = 0; l < L; l++) begin
      in_p[l]   = r2fx($exp(urand(-13.8, 0.0)));
      in_lnu[l] = r2fx(urand(-8.0, 0.0));
      exp_w[nin][l] = $ln(fx2r(in_p[l])) - fx2r(in_lnu[l]) - fx2r(in_lnv);
    end
    exp_p[nin] = in_p;
    in_tag = TW'(nin);
  endtask

  initial begin
    in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    newpkt();
    while (nout < N) begin
      automatic bit acc_in;
      in_valid = (nin < N) && ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      acc_in = in_valid && in_ready;
      if (out_valid && out_ready) begin
        checks++;
        if (out_tag != TW'(nout) || out_p != exp_p[nout]) begin failures++; $display("tag/p fail %0d", nout); end
        for (int l = 0; l < L; l++) begin
          checks++;
          if (rabs(fx2r(out_w[l]) - exp_w[nout][l]) > 0.01) begin
            failures++; $display("pkt %0d lane %0d: %f vs %f", nout, l, fx2r(out_w[l]), exp_w[nout][l]); end
        end
        nout++;
      end
      @(negedge clk);
      if (acc_in) begin nin++; if (nin < N) newpkt(); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
