// tb_sfu: streams random int16 results through the SFU in every activation
// mode (none, ReLU, LUT loaded with tanh) and pooling size, with random
// output back-pressure. Expected values are computed with reals: scale by
// 2^scale_exp, truncate to FP16, apply the function, take the max of each
// pooling window. Also checks the output index and the throughput of one
// result per cycle when the output is never stalled.
module tb_sfu;
  import qeihan_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [5:0] scale_exp = 0;
  logic [1:0] act_mode = 0, pool_log2 = 0;
  logic lut_we = 0;
  logic [5:0] lut_addr = 0;
  fp16_t lut_data = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  acc_t in_data = 0;
  logic [9:0] in_idx = 0, out_idx;
  fp16_t out_data;
  fp16_t lut_tab [64];
  fp16_t expq [$];
  int    expi [$];
  int checks = 0, failures = 0, stall_prob = 0, nout = 0;

  sfu dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fp2r(input fp16_t h);
    real m;
    int e;
    e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) / 1024.0 * (2.0 ** -14);
    else m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic fp16_t r2fp_trunc(input real v);
    real a; int e; logic s;
    if (v == 0.0) return 16'h0;
    s = (v < 0.0); a = s ? -v : v; e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    if (e + 15 >= 31) return {s, 15'h7BFF};
    if (e + 15 <= 0)  return 16'h0;
    return {s, 5'(e + 15), 10'($rtoi($floor((a / (2.0 ** e) - 1.0) * 1024.0)))};
  endfunction

  function automatic fp16_t ref_one(input int v);
    fp16_t d;
    int k, se;
    real sc;
    se = int'(scale_exp);
    sc = 2.0 ** se;
    d = r2fp_trunc(real'(v) * sc);
    case (act_mode)
      2'd1: if (d[15]) d = 16'h0;
      2'd2: begin
        k = $rtoi($floor(4.0 * fp2r(d)));
        if (k < -32) k = -32;
        if (k > 31) k = 31;
        d = lut_tab[k + 32];
      end
      default: ;
    endcase
    return d;
  endfunction

  // output checker
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      checks++;
      nout++;
      if (expq.size() == 0 || out_data != expq[0] || int'(out_idx) != expi[0]) begin
        failures++;
        if (failures < 10) $display("FAIL got %h/%0d exp %h/%0d", out_data, out_idx, expq[0], expi[0]);
      end
      if (expq.size() != 0) begin void'(expq.pop_front()); void'(expi.pop_front()); end
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 99) >= stall_prob);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 64; k++) begin
      real y, t;
      y = (real'(k) - 32.0) / 4.0 + 0.125;
      t = ($exp(y) - $exp(-y)) / ($exp(y) + $exp(-y));
      lut_tab[k] = r2fp_trunc(t);
      @(negedge clk) lut_we = 1; lut_addr = 6'(k); lut_data = lut_tab[k];
    end
    @(negedge clk) lut_we = 0;
    for (int cfgi = 0; cfgi < 12; cfgi++) begin
      int n;
      fp16_t win [4];
      act_mode  = 2'(cfgi % 3);
      pool_log2 = 2'((cfgi / 3) % 3);
      scale_exp = 6'($urandom_range(0, 12) - 10);
      stall_prob = (cfgi == 0) ? 0 : 30;
      n = 64;
      for (int i = 0; i < n; i++) begin
        int v;
        case ($urandom_range(0, 3))
          0: v = $urandom_range(0, 65535) - 32768;
          1: v = $urandom_range(0, 200) - 100;
          2: v = (i % 2) ? 32767 : -32768;
          default: v = 0;
        endcase
        win[i % (1 << pool_log2)] = ref_one(v);
        if ((i + 1) % (1 << pool_log2) == 0) begin
          fp16_t m;
          m = win[0];
          for (int k = 1; k < (1 << pool_log2); k++) if (fp2r(win[k]) > fp2r(m)) m = win[k];
          expq.push_back(m);
          expi.push_back(i >> pool_log2);
        end
        @(negedge clk);
        in_valid = 1; in_data = acc_t'(v); in_idx = 10'(i);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk) in_valid = 0;
      if (cfgi == 0) begin
        // no stalls: one result per cycle, one cycle latency
        checks++;
        @(posedge clk); #1;
        if (nout != n) begin failures++; $display("FAIL throughput: %0d of %0d out", nout, n); end
      end
      repeat (20) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
