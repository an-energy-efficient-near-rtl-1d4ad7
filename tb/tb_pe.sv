// tb_pe: drives the PE datapath directly, playing the PE controller.
// (1) Writes 40 FP16 activations into the input buffer and checks the
//     quantizer result of each head entry against round(log2|x|) on reals.
// (2) Writes random weight bit planes into both WB slots and issues random
//     compute steps (slot, exponent, sign, batch, OB row); after every step
//     the OB row, read through the drain port, must equal the running
//     saturating sum of floor(w*2^x~), computed independently.
module tb_pe;
  import qeihan_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ib_wr_valid = 0, ib_wr_ready, ib_wr_two = 1, ib_wr_last = 0, head_valid, head_pop = 0, ib_half_done;
  logic [31:0] ib_wr_word = 0;
  lq_t head_q;
  logic wb_we = 0, wb_slot = 0, cmp_en = 0, cmp_slot = 0, cmp_sign = 0, cmp_batch = 0, ob_clr = 0;
  logic [2:0] wb_plane = 0;
  logic [31:0] wb_data = 0;
  exp_t cmp_exp = 0;
  logic [5:0] cmp_row = 0, drain_row = 0;
  logic signed [15:0][15:0] drain_data;
  int checks = 0, failures = 0;

  pe dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int qref(input fp16_t x, output bit pr);
    real a, l;
    int ex, eb;
    if (x[14:10] == 0) begin pr = 1; return -8; end
    eb = int'(x[14:10]) - 15;
    a  = (1.0 + real'(x[9:0]) / 1024.0) * (2.0 ** eb);
    l  = $ln(a) / $ln(2.0);
    ex = $rtoi($floor(l + 0.5));
    if (ex > 7) ex = 7;
    pr = (ex <= -8);
    if (ex < -8) ex = -8;
    return ex;
  endfunction

  initial begin
    fp16_t xs [$];
    logic signed [7:0] w [2][32];
    int ob [64][16];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // (1) input buffer + LOG2-Quant, 40 values = 20 words (two and a half halves)
    for (int k = 0; k < 20; k++) begin
      fp16_t a, b;
      a = {1'($urandom), 5'($urandom_range(0, 24)), 10'($urandom)};
      b = (k % 5 == 0) ? 16'h0 : {1'($urandom), 5'($urandom_range(0, 24)), 10'($urandom)};
      xs.push_back(a); xs.push_back(b);
    end
    fork
      for (int k = 0; k < 20; k++) begin
        @(negedge clk);
        ib_wr_valid = 1; ib_wr_word = {xs[2*k+1], xs[2*k]}; ib_wr_last = (k == 19);
        #1;
        while (!ib_wr_ready) begin @(negedge clk); #1; end
        @(negedge clk) ib_wr_valid = 0;
      end
      for (int k = 0; k < 40; k++) begin
        int e;
        bit pr;
        @(negedge clk);
        while (!head_valid) @(negedge clk);
        e = qref(xs[k], pr);
        checks++;
        if (head_q.exp != exp_t'(e) || head_q.prune != pr || head_q.sign != xs[k][15]) begin
          failures++; $display("FAIL quant %h: %0d/%0d", xs[k], head_q.exp, e);
        end
        head_pop = 1;
        @(negedge clk) head_pop = 0;
      end
    join
    // (2) WB + D&S + ADD array + OB
    ob_clr = 1; @(negedge clk) ob_clr = 0;
    for (int r = 0; r < 64; r++) for (int j = 0; j < 16; j++) ob[r][j] = 0;
    for (int s = 0; s < 2; s++) begin
      for (int j = 0; j < 32; j++) w[s][j] = 8'($urandom);
      for (int b = 0; b < 8; b++) begin
        @(negedge clk);
        wb_we = 1; wb_slot = 1'(s); wb_plane = 3'(b);
        for (int j = 0; j < 32; j++) wb_data[j] = w[s][j][b];
      end
    end
    @(negedge clk) wb_we = 0;
    for (int it = 0; it < 400; it++) begin
      int e, r, s, bt;
      e = $urandom_range(0, 14) - 7;
      r = $urandom_range(0, 7);
      s = $urandom_range(0, 1);
      bt = $urandom_range(0, 1);
      @(negedge clk);
      cmp_en = 1; cmp_slot = 1'(s); cmp_exp = exp_t'(e); cmp_sign = 1'($urandom);
      cmp_batch = 1'(bt); cmp_row = 6'(r);
      for (int j = 0; j < 16; j++) begin
        int p;
        p = $rtoi($floor(real'(w[s][16*bt + j]) * (2.0 ** e)));
        ob[r][j] += cmp_sign ? -p : p;
        if (ob[r][j] > 32767) ob[r][j] = 32767;
        if (ob[r][j] < -32768) ob[r][j] = -32768;
      end
      @(negedge clk);
      cmp_en = 0; drain_row = 6'(r);
      #1;
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (int'($signed(drain_data[j])) != ob[r][j]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d got %0d exp %0d", r, j, $signed(drain_data[j]), ob[r][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
