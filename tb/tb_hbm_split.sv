// tb_hbm_split -- self-checking test of hbm_split.
// Numbered packets are offered at random, channels accept at random. Channel c
// must receive, in order, words 16c..16c+15 of every packet, each exactly once.
// With all channels free the unit must pass one packet per cycle.
module tb_hbm_split;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, idle;
  logic [NCH*WPB-1:0][DW-1:0] in_data;
  logic [NCH-1:0] ch_valid, ch_ready, hs;
  beat_t ch_data [NCH];
  int checks = 0, failures = 0;
  int sent, rcv [NCH], nfree;
  logic took;

  hbm_split dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] wv(int n, int i);
    return 32'(n * 1000 + i);
  endfunction

  initial begin
    in_valid = 0; ch_ready = '0; sent = 0; nfree = 0; took = 1;
    for (int c = 0; c < NCH; c++) rcv[c] = 0;
    for (int i = 0; i < NCH*WPB; i++) in_data[i] = wv(0, i);
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      if (took) in_valid = (cyc >= 2500) || ($urandom_range(0, 2) != 0);
      for (int c = 0; c < NCH; c++) ch_ready[c] = (cyc >= 2500) || ($urandom_range(0, 2) != 0);
      #1;
      hs = ch_valid & ch_ready;
      for (int c = 0; c < NCH; c++)
        if (hs[c]) begin
          for (int w = 0; w < WPB; w++) begin
            checks++;
            if (ch_data[c][w*DW +: DW] != wv(rcv[c], c*WPB + w)) begin
              failures++;
              if (failures < 5) $display("mismatch ch %0d pkt %0d w %0d", c, rcv[c], w);
            end
          end
          rcv[c]++;
        end
      took = in_valid && in_ready;
      if (took && cyc >= 2600) nfree++;
      @(negedge clk);
      if (took) begin
        sent++;
        for (int i = 0; i < NCH*WPB; i++) in_data[i] = wv(sent, i);
      end
      took = took || !in_valid;
    end
    checks++; if (nfree < 399) begin failures++; $display("rate fail %0d", nfree); end
    in_valid = 0; ch_ready = '1;
    repeat (3) begin
      #1; for (int c = 0; c < NCH; c++) if (ch_valid[c]) rcv[c]++;
      @(negedge clk);
    end
    for (int c = 0; c < NCH; c++) begin
      checks++; if (rcv[c] != sent) begin failures++; $display("count fail ch %0d: %0d of %0d", c, rcv[c], sent); end
    end
    checks++; if (!idle) begin failures++; $display("not idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
