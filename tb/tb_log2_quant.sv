// tb_log2_quant: checks the LOG2 quantizer against round(log2|x|) computed
// with $ln on reals, clipped to [-8, 7], over all 65536 FP16 inputs, plus the
// sign and prune flags (zero, subnormal, and everything clipped to -8).
//
// Combinational: each code is applied and checked one time step later. The
// comparator/sqrt(2) rounding and the clip range are the paper's; the
// handling of subnormal, Inf and NaN inputs is this design's. Has a
// watchdog like every testbench here.
module tb_log2_quant;
  import qeihan_pkg::*;
  fp16_t x;
  lq_t   q;
  int checks = 0, failures = 0;

  log2_quant dut (.x, .q);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      int  ex;
      bit  pr;
      real a, l;
      int  e;
      x = 16'(i);
      #1;
      e = int'(x[14:10]);
      if (e == 0) begin
        ex = -8; pr = 1;
      end else if (e == 31) begin
        ex = 7; pr = 0;
      end else begin
        a  = (1.0 + real'(x[9:0]) / 1024.0) * (2.0 ** (e - 15));
        l  = $ln(a) / $ln(2.0);
        ex = $rtoi($floor(l + 0.5));
        if (ex > 7) ex = 7;
        pr = (ex <= -8);
        if (ex < -8) ex = -8;
      end
      checks++;
      if (q.exp != exp_t'(ex) || q.prune != pr || q.sign != x[15]) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h exp=%0d/%0d prune=%0d/%0d", x, q.exp, ex, q.prune, pr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
