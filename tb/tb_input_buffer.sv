// tb_input_buffer: streams sequences of FP16 values of random length (odd and
// even) through the double-buffered input buffer with random write and read
// stalls; checks order and content against a queue, that a half is only
// handed over when full or closed, and counts the half swaps.
//
// Runs on a 10 ns clock with a synchronous reset; every handshake is sampled
// at the rising edge. Double buffering is the paper's; the two-values-per-word
// packing and handshake are this design's. A watchdog ends a hung run.
module tb_input_buffer;
  import qeihan_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_ready, wr_two = 0, wr_last = 0, rd_valid, rd_pop = 0, rd_half_done;
  logic [31:0] wr_word = 0;
  fp16_t rd_data;
  fp16_t q [$];
  int checks = 0, failures = 0, halves = 0, pops = 0;

  input_buffer dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader
  always @(negedge clk) begin
    rd_pop <= 1'b0;
    if (rst_n && rd_valid && $urandom_range(0, 2) != 0) begin
      checks++;
      if (q.size() == 0 || rd_data != q[0]) begin failures++; $display("FAIL data %h", rd_data); end
      else void'(q.pop_front());
      rd_pop <= 1'b1;
      pops++;
    end
  end
  always @(posedge clk) if (rd_half_done) halves++;

  initial begin
    int total;
    total = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 20; s++) begin
      int n;
      n = $urandom_range(1, 45);
      total += n;
      for (int wd = 0; wd < (n + 1) / 2; wd++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin wr_valid = 0; @(negedge clk); end
        wr_valid = 1;
        wr_word  = $urandom;
        wr_two   = (2*wd + 1 < n);
        wr_last  = (wd == (n + 1) / 2 - 1);
        #1;
        while (!wr_ready) begin @(negedge clk); #1; end
        q.push_back(wr_word[15:0]);
        if (wr_two) q.push_back(wr_word[31:16]);
        @(posedge clk);
      end
      @(negedge clk) wr_valid = 0;
    end
    repeat (200) @(negedge clk);
    checks++;
    if (q.size() != 0 || pops != total) begin failures++; $display("FAIL left %0d pops %0d total %0d", q.size(), pops, total); end
    checks++;
    if (halves < 20) begin failures++; $display("FAIL halves %0d", halves); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
