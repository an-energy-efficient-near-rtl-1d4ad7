// tb_tile: the central tile (0,0) with its DRAM vault; the testbench plays
// the other 15 tiles of the mesh. The tile computes its own partial outputs
// for a 21-input, 2-group layer (64 outputs) while the testbench injects the
// other PEs' partial outputs and DONE flits through the east link. The tile
// must reduce all 16 contributions, de-quantize (scale 2^-3, ReLU), and send
// each result to the vault that owns it: out through the east or north link
// for other tiles (checked there, with the XY route and index), or into its
// own DRAM for outputs 0, 16, 32, 48. Reference: real arithmetic in the
// testbench, independent of the RTL.
module tb_tile;
  import qeihan_pkg::*;
  localparam int N_IN = 21, N_KG = 2, N_OUT = 32 * N_KG, SCALE = -3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start = 0, done;
  logic lut_we = 0;
  logic [5:0] lut_addr = 0;
  fp16_t lut_data = 0;
  logic  [3:0] nin_valid = '0, nin_ready, nout_valid, nout_ready = '1;
  flit_t [3:0] nin_flit, nout_flit;
  logic cmd_valid, dram_rvalid;
  vreq_t cmd;
  logic [31:0] dram_rdata, n_pruned, n_planes, n_steps, bank_stalls;
  logic [0:0] cv, rv;
  vreq_t [0:0] cm;
  logic [0:0][31:0] rd;
  int checks = 0, failures = 0, nres = 0;
  fp16_t expect_y [N_OUT];

  tile dut (.*);
  assign cv = cmd_valid;
  assign cm = cmd;
  assign dram_rvalid = rv[0];
  assign dram_rdata = rd[0];
  dram_stack_model #(.NV(1)) u_dram (.clk, .cmd_valid(cv), .cmd(cm), .rvalid(rv), .rdata(rd));

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit qref(input fp16_t x, output int ex);
    real a, l;
    int eb;
    if (x[14:10] == 0) begin ex = -8; return 1; end
    eb = int'(x[14:10]) - 15;
    a  = (1.0 + real'(x[9:0]) / 1024.0) * (2.0 ** eb);
    l  = $ln(a) / $ln(2.0);
    ex = $rtoi($floor(l + 0.5));
    if (ex > 7) ex = 7;
    if (ex <= -8) begin ex = -8; return 1; end
    return 0;
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

  // results leaving the tile
  always @(posedge clk) begin
    for (int p = 0; p < 4; p++) if (rst_n && nout_valid[p] && nout_ready[p]) begin
      int o, ep;
      o = int'(nout_flit[p].idx);
      ep = (o % 4 != 0) ? 0 : 2;                // x > 0: east, else north
      checks++;
      nres++;
      if (nout_flit[p].kind != FL_RESULT || p != ep || nout_flit[p].dst_x != 2'(o % 4) ||
          nout_flit[p].dst_y != 2'((o / 4) % 4) || nout_flit[p].data != expect_y[o]) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d port %0d data %h exp %h", o, p, nout_flit[p].data, expect_y[o]);
      end
    end
  end

  initial begin
    fp16_t x [N_IN];
    logic signed [7:0] w [N_IN][N_OUT];
    int part [16][N_OUT];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < N_OUT; o++) part[0][o] = 0;
    for (int i = 0; i < N_IN; i++) begin
      case ($urandom_range(0, 4))
        0: x[i] = 16'h0;
        1: x[i] = {1'b0, 5'($urandom_range(15, 20)), 10'($urandom)};
        default: x[i] = {1'($urandom), 5'($urandom_range(8, 14)), 10'($urandom)};
      endcase
      for (int o = 0; o < N_OUT; o++) w[i][o] = 8'($urandom);
    end
    for (int wd = 0; wd < (N_IN + 1) / 2; wd++)
      u_dram.poke(0, lin_addr(22'h40, 10'(wd)), {(2*wd + 1 < N_IN) ? x[2*wd+1] : 16'h0, x[2*wd]});
    for (int i = 0; i < N_IN; i++)
      for (int kg = 0; kg < N_KG; kg++)
        for (int b = 0; b < 8; b++) begin
          logic [31:0] d;
          for (int j = 0; j < 32; j++) d[j] = w[i][32*kg + j][b];
          u_dram.poke(0, w_addr(22'h1000, 10'(i), 5'(kg), 3'(b)), d);
        end
    for (int i = 0; i < N_IN; i++) begin
      int ex;
      if (qref(x[i], ex)) continue;
      for (int o = 0; o < N_OUT; o++) begin
        int p;
        p = $rtoi($floor(real'(w[i][o]) * (2.0 ** ex)));
        part[0][o] += x[i][15] ? -p : p;
        if (part[0][o] > 32767) part[0][o] = 32767;
        if (part[0][o] < -32768) part[0][o] = -32768;
      end
    end
    for (int s = 1; s < 16; s++) for (int o = 0; o < N_OUT; o++) part[s][o] = $urandom_range(0, 4000) - 2000;
    for (int o = 0; o < N_OUT; o++) begin
      longint sum;
      fp16_t d;
      sum = 0;
      for (int s = 0; s < 16; s++) sum += part[s][o];
      if (sum > 32767) sum = 32767;
      if (sum < -32768) sum = -32768;
      d = r2fp_trunc(real'(sum) * (2.0 ** SCALE));
      if (d[15]) d = 16'h0;
      expect_y[o] = d;
    end
    cfg = '0;
    cfg.n_in = 10'(N_IN); cfg.n_kg = 6'(N_KG);
    cfg.w_row_base = 22'h1000; cfg.in_row_base = 22'h40; cfg.out_row_base = 22'h80;
    cfg.scale_exp = 6'(SCALE); cfg.act_mode = 2'd1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // other PEs' partials arrive from the east, as tile (1,0) would forward them
    for (int s = 1; s < 16; s++)
      for (int o = 0; o <= N_OUT; o++) begin
        @(negedge clk);
        nin_valid[0] = 1;
        nin_flit[0] = '0;
        nin_flit[0].src = 4'(s);
        nin_flit[0].kind = (o < N_OUT) ? FL_PARTIAL : FL_DONE;
        nin_flit[0].idx = 10'(o);
        nin_flit[0].data = (o < N_OUT) ? 16'(part[s][o]) : 16'h0;
        #1;
        while (!nin_ready[0]) begin @(negedge clk); #1; end
      end
    @(negedge clk) nin_valid[0] = 0;
    while (!done) @(negedge clk);
    repeat (40) @(negedge clk);
    checks++;
    if (nres != N_OUT - N_OUT / 16) begin failures++; $display("FAIL %0d results left the tile", nres); end
    for (int o = 0; o < N_OUT; o += 16) begin
      checks++;
      if (u_dram.peek(0, lin_addr(22'h80, 10'(o / 16))) != {16'h0, expect_y[o]}) begin
        failures++; $display("FAIL own result %0d", o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
