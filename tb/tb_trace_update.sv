// tb_trace_update -- self-checking test of trace_update with 8 lanes.
// Random traces, per-lane and shared activities and rates; each output trace is
// compared with p + (u*v - p) * 2^-sh computed in reals (tolerance 2e-6, the
// truncation of two fixed-point steps), the tag must follow its packet, and
// under random back-pressure no packet may be lost or duplicated. Latency: a
// packet accepted at one edge is offered from the next cycle.
module tb_trace_update;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 8, TW = 8, N = 300;
  logic clk = 0, rst_n = 0;
  logic [4:0] sh;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [L-1:0][DW-1:0] in_p, out_p;
  fx_t in_u [L], in_v;
  logic [TW-1:0] in_tag, out_tag;
  real exp_p [N][L];
  int checks = 0, failures = 0, nin = 0, nout = 0;

  trace_update #(.LANES(L), .TW(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic newpkt();
    in_v = r2fx(urand(0.0, 1.0));
    for (int l = 0; l < L; l++) begin
      in_p[l] = r2fx(urand(0.0001, 1.0));
      in_u[l] = r2fx(urand(0.0, 1.0));
      exp_p[nin][l] = fx2r(in_p[l]) + (fx2r(in_u[l]) * fx2r(in_v) - fx2r(in_p[l])) / real'(1 << sh);
    end
    in_tag = TW'(nin);
  endtask

  initial begin
    in_valid = 0; out_ready = 0; sh = 5'd3;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    newpkt();
    while (nout < N) begin
      automatic bit acc_in, acc_out;
      in_valid = (nin < N) && ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      acc_in = in_valid && in_ready; acc_out = out_valid && out_ready;
      if (acc_out) begin
        checks++;
        if (out_tag != TW'(nout)) begin failures++; $display("tag %0d vs %0d", out_tag, nout); end
        for (int l = 0; l < L; l++) begin
          checks++;
          if (rabs(fx2r(out_p[l]) - exp_p[nout][l]) > 2e-6) begin
            failures++; $display("pkt %0d lane %0d: %f vs %f", nout, l, fx2r(out_p[l]), exp_p[nout][l]); end
        end
        nout++;
      end
      @(negedge clk);
      if (acc_in) begin
        nin++;
        if (nin % 50 == 0) sh = 5'($urandom_range(1, 10));
        if (nin < N) newpkt();
        // latency: the packet just taken is offered now
        checks++; if (!out_valid || out_tag != TW'(nin - 1) && !acc_out) begin
          if (!out_valid) begin failures++; $display("latency fail"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
