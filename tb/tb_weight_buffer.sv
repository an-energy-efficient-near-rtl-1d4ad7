// tb_weight_buffer: writes random bit planes into both slots of the weights
// buffer and reads them back, also while the other slot is being written,
// against a copy kept in the testbench.
//
// 10 ns clock; a write lands at the rising edge and the whole-slot read is
// combinational. Two slots of 8 x 32 bits (the paper's 'all 8 bits of M
// weights', double buffered). Has a watchdog.
module tb_weight_buffer;
  import qeihan_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_slot = 0, rd_slot = 0;
  logic [2:0] wr_plane = 0;
  logic [31:0] wr_data = 0;
  logic [7:0][31:0] rd_planes;
  logic [7:0][31:0] model [2];
  int checks = 0, failures = 0;

  weight_buffer dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) for (int p = 0; p < 8; p++) begin
      @(negedge clk); wr_en = 1; wr_slot = 1'(s); wr_plane = 3'(p); wr_data = $urandom;
      model[s][p] = wr_data;
    end
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      wr_en = 1; wr_slot = 1'($urandom); wr_plane = 3'($urandom); wr_data = $urandom;
      rd_slot = !wr_slot;
      #1;
      checks++;
      if (rd_planes != model[rd_slot]) begin failures++; $display("FAIL slot %0d", rd_slot); end
      @(posedge clk); #1;
      model[wr_slot][wr_plane] = wr_data;
      rd_slot = wr_slot; #1;
      checks++;
      if (rd_planes != model[rd_slot]) begin failures++; $display("FAIL after write slot %0d", rd_slot); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
