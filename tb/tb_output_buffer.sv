// tb_output_buffer: random read-modify-write traffic on port A, random reads
// on port B, and clears; checks both ports against a model in which rows that
// were not written since the last clear read as zero.
//
// 10 ns clock. Port A reads are combinational and checked before the edge
// that writes; port B is checked in the same cycle. The row/lane shape is
// from the paper's sizes; the valid-bit clear is this design's. Has a
// watchdog.
module tb_output_buffer;
  import qeihan_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, a_we = 0;
  always #5 clk = ~clk;
  logic [5:0] a_row = 0, b_row = 0;
  logic signed [15:0][15:0] a_rdata, a_wdata, b_rdata;
  logic [15:0][15:0] model [64];
  int checks = 0, failures = 0;

  output_buffer dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 64; r++) model[r] = '0;
    a_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 299) == 0);
      a_row = 6'($urandom); b_row = 6'($urandom);
      a_we = 1'($urandom);
      for (int j = 0; j < 16; j++) a_wdata[j] = 16'($urandom);
      #1;
      checks += 2;
      if (a_rdata != model[a_row]) begin failures++; $display("FAIL A row %0d", a_row); end
      if (b_rdata != model[b_row]) begin failures++; $display("FAIL B row %0d", b_row); end
      @(posedge clk);
      if (clr) for (int r = 0; r < 64; r++) model[r] = '0;
      else if (a_we) model[a_row] = a_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
