// tb_fc_workloads: runs fully-connected layers with the shapes of the
// evaluated networks on the whole accelerator at its default size, one pass
// each (at most 1024 outputs, the output buffer's capacity):
//   Transformer (base)  512 -> 512   and 2048 -> 512
//   BERT-Base           768 -> 768   and 3072 -> 768
//   BERT-Large         1024 -> 1024  and 4096 -> 1024 (also the shape of an
//                                       AlexNet FC8 pass, 1000 outputs padded)
//   PTBLM (1500 hidden) 1504 -> 1024, one 1024-output pass of a gate matrix
// Inputs are spread evenly over the 16 vaults. Activations are random with a
// bell-shaped spread of exponents around 2^-2 (so that most fall below 1 and
// many are pruned), weights are random INT8. The reference model is the same
// as in the end-to-end test: real-number log2, shift as multiplication by a
// power of two, 16-bit saturating accumulation per PE in input order, then
// the central reduction and de-quantization. Every output written back to
// DRAM is compared, plus the per-tile statistics and the DRAM bank timing.
// The layer sizes are those of the published models, not numbers chosen
// for this design; the activation values are synthetic. 10 ns clock, with a
// watchdog; prints the cycle count of every layer.
module tb_fc_workloads;
  import qeihan_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start = 1'b0, done;
  logic lut_we = 1'b0;
  logic [5:0] lut_addr = '0;
  fp16_t lut_data = '0;
  logic  [NUM_PE-1:0]       cmd_valid, dram_rvalid;
  vreq_t [NUM_PE-1:0]       cmd;
  logic  [NUM_PE-1:0][31:0] dram_rdata, n_pruned, n_planes, n_steps, bank_stalls;

  qeihan_top dut (.*);

  dram_stack_model u_dram (.clk, .cmd_valid, .cmd, .rvalid(dram_rvalid), .rdata(dram_rdata));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * 3000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- reference helpers ----------------
  function automatic real fp2r(input fp16_t h);
    real m;
    int e;
    e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) / 1024.0 * (2.0 ** -14);
    else        m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic fp16_t r2fp_trunc(input real v);
    real a;
    int e;
    logic s;
    if (v == 0.0) return 16'h0;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    if (e + 15 >= 31) return {s, 15'h7BFF};
    if (e + 15 <= 0)  return 16'h0;
    return {s, 5'(e + 15), 10'($rtoi($floor((a / (2.0 ** e) - 1.0) * 1024.0)))};
  endfunction

  // Clipped round(log2|x|); returns 1 when the input is pruned.
  function automatic bit ref_quant(input fp16_t x, output int ex);
    real l;
    if (x[14:0] == 0) begin ex = -8; return 1; end
    l  = $ln(fp2r(x) < 0 ? -fp2r(x) : fp2r(x)) / $ln(2.0);
    ex = $rtoi($floor(l + 0.5));
    if (ex > 7) ex = 7;
    if (ex <= -8) begin ex = -8; return 1; end
    return 0;
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // ---------------- mechanism counters ----------------
  int m_prune = 0, m_negexp = 0, m_posexp = 0, m_sub = 0, m_relu_clamp = 0, m_pool = 0, m_lut = 0;
  int m_ib_swap = 0, m_wb_both = 0;
  always @(posedge clk) begin
    if (dut.g_y[0].g_x[0].u_tile.u_pe.ib_half_done) m_ib_swap++;
    if (dut.g_y[0].g_x[0].u_tile.u_pec.slot_busy == 2'b11) m_wb_both++;
  end

  // ---------------- one layer ----------------
  fp16_t lut_tab [64];

  task automatic run_layer(input int n_in, input int n_kg, input int act_mode, input int pool_log2,
                           input int scale_exp, input int wbase, input int ibase, input int obase);
    fp16_t  x  [NUM_PE][];
    logic signed [7:0] w [NUM_PE][][];     // [vault][input][kernel]
    int     part [NUM_PE][];
    longint red;
    int     n_out, n_final, exp_pl [NUM_PE], exp_pr [NUM_PE], exp_st [NUM_PE];
    real    yv [];
    fp16_t  yh [];
    longint t0, t1;
    int     max_pl;

    n_out   = 32 * n_kg;
    n_final = n_out >> pool_log2;
    yv = new[n_out];
    yh = new[n_out];
    // -------- data and DRAM image --------
    for (int v = 0; v < NUM_PE; v++) begin
      x[v] = new[n_in];
      w[v] = new[n_in];
      part[v] = new[n_out];
      for (int o = 0; o < n_out; o++) part[v][o] = 0;
      exp_pl[v] = 0; exp_pr[v] = 0; exp_st[v] = 0;
      for (int i = 0; i < n_in; i++) begin
        int c;
        c = $urandom_range(0, 99);
        if (c < 10) x[v][i] = 16'h0;                                            // zero
        else        x[v][i] = {1'($urandom_range(0, 2) == 0),
                               5'(13 + ($urandom_range(0, 3) + $urandom_range(0, 3) +
                                        $urandom_range(0, 3)) - 5), 10'($urandom)};
        w[v][i] = new[n_out];
        for (int o = 0; o < n_out; o++) w[v][i][o] = 8'($urandom);
      end
      for (int wd = 0; wd < (n_in + 1) / 2; wd++) begin
        logic [31:0] d;
        d[15:0]  = x[v][2*wd];
        d[31:16] = (2*wd + 1 < n_in) ? x[v][2*wd+1] : 16'h0;
        u_dram.poke(v, lin_addr(ROW_W'(ibase), 10'(wd)), d);
      end
      for (int i = 0; i < n_in; i++)
        for (int kg = 0; kg < n_kg; kg++)
          for (int b = 0; b < 8; b++) begin
            logic [31:0] d;
            for (int j = 0; j < 32; j++) d[j] = w[v][i][32*kg + j][b];
            u_dram.poke(v, w_addr(ROW_W'(wbase), 10'(i), 5'(kg), 3'(b)), d);
          end
    end
    // -------- reference --------
    for (int v = 0; v < NUM_PE; v++)
      for (int i = 0; i < n_in; i++) begin
        int ex;
        if (ref_quant(x[v][i], ex)) begin exp_pr[v]++; m_prune++; continue; end
        exp_pl[v] += n_kg * ((ex < 0) ? 8 + ex : 8);
        exp_st[v] += n_kg * 2;
        if (ex < 0) m_negexp++; else if (ex > 0) m_posexp++;
        if (x[v][i][15]) m_sub++;
        for (int o = 0; o < n_out; o++) begin
          real p;
          p = $floor(real'(w[v][i][o]) * (2.0 ** ex));
          part[v][o] = sat16(longint'(part[v][o]) + (x[v][i][15] ? -longint'($rtoi(p)) : longint'($rtoi(p))));
        end
      end
    for (int o = 0; o < n_out; o++) begin
      fp16_t d;
      red = 0;
      for (int v = 0; v < NUM_PE; v++) red += part[v][o];
      d = r2fp_trunc(real'(sat16(red)) * (2.0 ** scale_exp));
      if (act_mode == 1) begin
        if (d[15]) begin d = 16'h0; m_relu_clamp++; end
      end else if (act_mode == 2) begin
        int k;
        k = $rtoi($floor(4.0 * fp2r(d)));
        if (k < -32) k = -32;
        if (k > 31) k = 31;
        d = lut_tab[k + 32];
        m_lut++;
      end
      yh[o] = d;
      yv[o] = fp2r(d);
    end
    // -------- run --------
    cfg.n_in = 10'(n_in); cfg.n_kg = 6'(n_kg);
    cfg.w_row_base = ROW_W'(wbase); cfg.in_row_base = ROW_W'(ibase); cfg.out_row_base = ROW_W'(obase);
    cfg.scale_exp = 6'(scale_exp); cfg.act_mode = 2'(act_mode); cfg.pool_log2 = 2'(pool_log2);
    @(negedge clk) start = 1'b1;
    t0 = cyc;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    t1 = cyc;
    repeat (40) @(negedge clk);            // let the last writes reach the DRAM
    $display("layer n_in=%0d n_kg=%0d: %0d cycles", n_in, n_kg, t1 - t0);
    // -------- compare --------
    max_pl = 0;
    for (int v = 0; v < NUM_PE; v++) begin
      check(n_pruned[v] == 32'(exp_pr[v]), $sformatf("vault %0d pruned %0d exp %0d", v, n_pruned[v], exp_pr[v]));
      check(n_planes[v] == 32'(exp_pl[v]), $sformatf("vault %0d planes %0d exp %0d", v, n_planes[v], exp_pl[v]));
      check(n_steps[v]  == 32'(exp_st[v]), $sformatf("vault %0d steps %0d exp %0d", v, n_steps[v], exp_st[v]));
      if (exp_pl[v] > max_pl) max_pl = exp_pl[v];
    end
    // One 32-bit word per cycle on each vault bus: the layer cannot be faster.
    check(t1 - t0 >= longint'(max_pl), "layer faster than the vault bus allows");
    for (int f = 0; f < n_final; f++) begin
      fp16_t e, g;
      e = yh[f << pool_log2];
      for (int k = 1; k < (1 << pool_log2); k++)
        if (yv[(f << pool_log2) + k] > fp2r(e)) e = yh[(f << pool_log2) + k];
      if (pool_log2 > 0) m_pool++;
      g = u_dram.peek(f % NUM_PE, lin_addr(ROW_W'(obase), 10'(f / NUM_PE)))[15:0];
      check(g == e, $sformatf("output %0d got %h exp %h", f, g, e));
    end
  endtask

  initial begin
    cfg = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // sigmoid table, entry k for y in [(k-32)/4, (k-31)/4), sampled at the middle
    for (int k = 0; k < 64; k++) begin
      real y;
      y = (real'(k) - 32.0) / 4.0 + 0.125;
      lut_tab[k] = r2fp_trunc(1.0 / (1.0 + $exp(-y)));
      @(negedge clk);
      lut_we = 1'b1; lut_addr = 6'(k); lut_data = lut_tab[k];
    end
    @(negedge clk) lut_we = 1'b0;

    run_layer(32,  16, 0, 0, -6, 'h010000, 'h100, 'h200);   // Transformer 512 -> 512
    run_layer(128, 16, 1, 0, -7, 'h020000, 'h300, 'h400);   // Transformer 2048 -> 512
    run_layer(48,  24, 0, 0, -6, 'h030000, 'h500, 'h600);   // BERT-Base 768 -> 768
    run_layer(192, 24, 2, 0, -8, 'h040000, 'h700, 'h800);   // BERT-Base 3072 -> 768
    run_layer(64,  32, 0, 0, -6, 'h050000, 'h900, 'hA00);   // BERT-Large 1024 -> 1024
    run_layer(256, 32, 1, 0, -8, 'h060000, 'hB00, 'hC00);   // BERT-Large 4096 -> 1024
    run_layer(94,  32, 2, 0, -7, 'h070000, 'hD00, 'hE00);   // PTBLM 1504 -> 1024
    check(u_dram.timing_errors == 0, "DRAM bank timing violated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
