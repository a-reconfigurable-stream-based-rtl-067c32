// tb_stream_fifo -- self-checking test of stream_fifo.
// Random producer and consumer with a queue as the reference model: checks order
// and data of every word, that in_ready falls exactly when DEPTH words are held,
// and the one-cycle latency from write to read of an empty FIFO.
module tb_stream_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q[$];
  logic took;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // latency: write one word into the empty FIFO, visible after one edge
    in_valid = 1; in_data = 16'hABCD;
    @(negedge clk); in_valid = 0;
    checks++; if (!(out_valid && out_data == 16'hABCD)) begin failures++; $display("latency fail"); end
    out_ready = 1; @(negedge clk); out_ready = 0;
    took = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      if (took) begin   // keep a word stable while it waits
        in_valid = ($urandom_range(0, 3) != 0);
        in_data  = W'($urandom);
      end
      out_ready = (cyc % 500 < 250) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      // full flag check against the model
      checks++; if (in_ready != (q.size() < D)) begin failures++; $display("ready fail %0d", q.size()); end
      if (q.size() == D) fulls++;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin failures++; $display("data fail"); end
        else void'(q.pop_front());
      end
      took = !in_valid || in_ready;
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    checks++; if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
