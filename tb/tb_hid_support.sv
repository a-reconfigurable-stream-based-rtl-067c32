// tb_hid_support -- self-checking test of hid_support at a reduced size
// (64 input hypercolumns -> 128 activities, 2 packets per row; 2 hidden
// hypercolumns of 4 units). Random activities, weights, biases and mask; each
// support is compared with a real-valued sum. Also checks the rate: with a free
// consumer and packets offered every cycle, row j's support appears one cycle
// after its last packet, i.e. rows complete every 2 cycles.
module tb_hid_support;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NIH = 64, NIP = 128, NHH = 2, MHH = 4, NHU = NHH * MHH, RP = NIP / PKT;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_ready, out_valid, out_ready;
  logic [PKT-1:0][DW-1:0] in_w;
  fx_t x_vec [NIP], bias_vec [NHU];
  logic [NHH*NIH-1:0] mask;
  sup_t out_sup;
  logic [$clog2(NHU)-1:0] out_idx;
  fx_t W [NHU][NIP];
  int checks = 0, failures = 0, nout, last_t, gaps;

  hid_support #(.NI_HC(NIH), .NI_PAD(NIP), .NH_HC(NHH), .MH(MHH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real ref_sup(int j);
    real s = fx2r(bias_vec[j]);
    for (int i = 0; i < NIP; i++)
      if (mask[(j / MHH) * NIH + i / 2]) s += fx2r(x_vec[i]) * fx2r(W[j][i]);
    return s;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic real r = ref_sup(int'(out_idx));
    checks++;
    if (int'(out_idx) != nout % NHU || rabs(sup2r(out_sup) - r) > 0.001) begin
      failures++; $display("row %0d idx %0d: %f vs %f", nout, out_idx, sup2r(out_sup), r);
    end
    if (nout > 0 && ($time - last_t) != 2 * 10 && gaps == 0) gaps = -1;
    last_t = $time; nout++;
  end

  initial begin
    start = 0; in_valid = 0; out_ready = 1; in_w = '0; nout = 0; gaps = 0; last_t = 0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < NIP; i++) x_vec[i] = r2fx(urand(0.0, 1.0));
      for (int j = 0; j < NHU; j++) begin
        bias_vec[j] = r2fx(urand(-5.0, 0.0));
        for (int i = 0; i < NIP; i++) W[j][i] = r2fx(urand(-4.0, 4.0));
      end
      for (int b = 0; b < NHH*NIH; b++) mask[b] = (rep == 0) ? 1'b1 : 1'($urandom);
      if (rep == 0) begin repeat (3) @(posedge clk); rst_n = 1; end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int j = 0; j < NHU; j++)
        for (int r = 0; r < RP; r++) begin
          in_valid = 1;
          for (int l = 0; l < PKT; l++) in_w[l] = W[j][r*PKT + l];
          if (rep >= 2) out_ready = 1'($urandom);   // back-pressure in later rounds
          #1; while (!in_ready) begin @(negedge clk); if (rep >= 2) out_ready = 1'($urandom); #1; end
          @(negedge clk);
          if (rep == 1) begin in_valid = 0; @(negedge clk); end   // gaps in the stream
        end
      in_valid = 0; out_ready = 1;
      repeat (4) @(negedge clk);
      if (rep == 0) begin
        checks++; if (gaps != 0) begin failures++; $display("rate fail: rows not every %0d cycles", RP); end
      end
    end
    checks++; if (nout != 4 * NHU) begin failures++; $display("count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
