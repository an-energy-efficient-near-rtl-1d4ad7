// tb_add_array: random partial outputs and shifted weights, add and subtract,
// including values that saturate; checks every lane against integer math.
//
// The unit is combinational, so each vector is applied, allowed to settle for
// one time step, and compared. The add/subtract-by-sign rule is the paper's;
// the saturation that is checked is this design's own choice. A watchdog
// ends the run with a failure if it does not finish in time.
module tb_add_array;
  import qeihan_pkg::*;
  logic signed [15:0][15:0] partial, prod, sum;
  logic sub;
  int checks = 0, failures = 0;

  add_array dut (.partial, .prod, .sub, .sum);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int j = 0; j < 16; j++) begin
        partial[j] = 16'($urandom);
        prod[j]    = 16'($signed(16'($urandom_range(0, 32767))) - 16'sd16384);
      end
      sub = 1'($urandom);
      #1;
      for (int j = 0; j < 16; j++) begin
        int e;
        e = int'($signed(partial[j])) + (sub ? -int'($signed(prod[j])) : int'($signed(prod[j])));
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (int'($signed(sum[j])) != e) begin failures++; if (failures < 10) $display("FAIL %0d %0d %0d", partial[j], prod[j], sum[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
