// tb_reduction_unit: 16 sources send random partial outputs in random
// interleaving, each ending with a DONE flit; checks that nothing comes out
// before the last DONE, that the sums saturate to int16 correctly, come out
// in index order at one per cycle, and that the unit is clean for a second
// layer.
//
// 10 ns clock with random output back-pressure. The reference sums are kept
// in the testbench as plain integers. Reduction in a central PE is the
// paper's; the serial accumulator and flit protocol are this design's.
// Has a watchdog.
module tb_reduction_unit;
  import qeihan_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [10:0] n_out = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  flit_t in_flit = '0;
  acc_t out_data;
  logic [9:0] out_idx;
  int checks = 0, failures = 0;

  reduction_unit dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 2; layer++) begin
      int n, ptr [16], val [16][];
      longint sum [];
      int left;
      n = (layer == 0) ? 96 : 1024;
      n_out = 11'(n);
      sum = new[n];
      for (int o = 0; o < n; o++) sum[o] = 0;
      for (int s = 0; s < 16; s++) begin
        val[s] = new[n];
        ptr[s] = 0;
        for (int o = 0; o < n; o++) begin
          val[s][o] = (o % 7 == 0) ? 30000 : $urandom_range(0, 65535) - 32768;
          sum[o] += val[s][o];
        end
      end
      left = 16;
      out_ready = 0;
      while (left > 0) begin
        int s;
        s = $urandom_range(0, 15);
        if (ptr[s] > n) continue;
        @(negedge clk);
        in_valid = 1;
        in_flit = '0;
        in_flit.src = 4'(s);
        if (ptr[s] < n) begin
          in_flit.kind = FL_PARTIAL; in_flit.idx = 10'(ptr[s]); in_flit.data = 16'(val[s][ptr[s]]);
        end else begin
          in_flit.kind = FL_DONE; left--;
        end
        ptr[s]++;
        #1;
        checks++;
        if (!in_ready || out_valid) begin failures++; $display("FAIL not accumulating"); end
      end
      @(negedge clk) in_valid = 0;
      for (int o = 0; o < n; o++) begin
        longint e;
        e = sum[o];
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        if (o % 5 == 3) begin out_ready = 0; @(negedge clk); end
        out_ready = 1;
        #1;
        checks++;
        if (!out_valid || int'(out_idx) != o || longint'(out_data) != e) begin
          failures++;
          if (failures < 10) $display("FAIL o=%0d got %0d idx %0d exp %0d", o, out_data, out_idx, e);
        end
        @(negedge clk);
      end
      out_ready = 0;
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (busy || out_valid) begin failures++; $display("FAIL not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
