// tb_decoder_shifter: random weights and every exponent in [-7, 7]. Builds
// the bit planes, fills the planes a real fetch would skip (the 8-|x~| LSBs
// for negative exponents) with random garbage, and checks each lane against
// floor(w * 2^x~) computed with reals.
//
// Combinational: each vector is applied and compared after one time step.
// Both batches of 16 lanes are exercised. The MSB-only fetch is the paper's;
// two's complement weights and rounding toward minus infinity are this
// design's choice and are what the reference computes. Has a watchdog.
module tb_decoder_shifter;
  import qeihan_pkg::*;
  logic [7:0][31:0] planes;
  exp_t exp;
  logic batch;
  logic signed [15:0][15:0] prod;
  int checks = 0, failures = 0;

  decoder_shifter dut (.planes, .exp, .batch, .prod);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [7:0] w [32];
    for (int it = 0; it < 300; it++) begin
      int e;
      e = $urandom_range(0, 14) - 7;
      for (int j = 0; j < 32; j++) w[j] = 8'($urandom);
      if (it < 2) for (int j = 0; j < 32; j++) w[j] = (it == 0) ? -8'sd128 : 8'sd127;
      for (int b = 0; b < 8; b++)
        for (int j = 0; j < 32; j++)
          planes[b][j] = (e < 0 && b < -e) ? 1'($urandom) : w[j][b];
      exp = exp_t'(e);
      for (int bt = 0; bt < 2; bt++) begin
        batch = 1'(bt);
        #1;
        for (int j = 0; j < 16; j++) begin
          int expv;
          expv = $rtoi($floor(real'(w[16*bt + j]) * (2.0 ** e)));
          checks++;
          if (int'($signed(prod[j])) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL w=%0d e=%0d got %0d exp %0d", w[16*bt+j], e, prod[j], expv);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
