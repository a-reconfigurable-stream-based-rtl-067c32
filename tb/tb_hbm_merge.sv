// tb_hbm_merge -- self-checking test of hbm_merge.
// Four channels deliver numbered beats at random; the consumer is randomly
// stalled. Every merged packet must hold, in words 16c..16c+15, the next beat of
// channel c, in order. Also checks one packet per cycle when nothing stalls.
module tb_hbm_merge;
  import bcpnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] ch_valid, ch_ready;
  beat_t ch_data [NCH];
  logic out_valid, out_ready;
  logic [NCH*WPB-1:0][DW-1:0] out_data;
  int checks = 0, failures = 0;
  int sent [NCH];
  int got, nfull;
  logic [NCH-1:0] hs;

  hbm_merge dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // word w of beat n on channel c
  function automatic logic [31:0] wv(int c, int n, int w);
    return 32'(n * 1000 + c * 100 + w);
  endfunction

  task automatic drive(int c);
    for (int w = 0; w < WPB; w++) ch_data[c][w*DW +: DW] = wv(c, sent[c], w);
  endtask

  initial begin
    ch_valid = '0; out_ready = 0;
    for (int c = 0; c < NCH; c++) begin sent[c] = 0; drive(c); end
    got = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int c = 0; c < NCH; c++)
        if (!ch_valid[c]) ch_valid[c] = (cyc >= 2500) || ($urandom_range(0, 2) != 0);
      out_ready = (cyc >= 2500) || ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        for (int c = 0; c < NCH; c++)
          for (int w = 0; w < WPB; w++) begin
            checks++;
            if (out_data[c*WPB + w] != wv(c, got, w)) begin
              failures++;
              if (failures < 5) $display("mismatch pkt %0d c %0d w %0d: %0d", got, c, w, out_data[c*WPB+w]);
            end
          end
        got++;
        if (cyc >= 2600) nfull++;
      end
      hs = ch_valid & ch_ready;
      @(negedge clk);
      for (int c = 0; c < NCH; c++)
        if (hs[c]) begin sent[c]++; drive(c); ch_valid[c] = 0; end
    end
    // with everything free, packets must flow at one per cycle
    checks++; if (nfull < 399) begin failures++; $display("rate fail %0d", nfull); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial nfull = 0;
endmodule
