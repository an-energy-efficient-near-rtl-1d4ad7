// tb_pe_controller: one tile's PE controller with the real PE and vault
// controller and the behavioural DRAM; the testbench plays the network.
// Layer: 37 inputs (odd, three IB halves), 3 kernel groups (96 outputs),
// tile number 5. Checks: the PARTIAL flits sent to tile (0,0) carry the
// per-PE partial sums of a reference model (real arithmetic, saturating
// 16-bit accumulation in input order), then one DONE flit; statistics
// (pruned inputs, weight words read = sum of 8-|x~| or 8 per group, compute
// steps); that the layer takes at least one cycle per weight word read;
// that RESULT flits sent back are written to the right DRAM words; and that
// `done` rises only after the last one.
module tb_pe_controller;
  import qeihan_pkg::*;
  localparam logic [3:0] TID = 4'd5;
  localparam int N_IN = 37, N_KG = 3, N_OUT = 32 * N_KG;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start = 0, done;
  logic vreq_valid, vreq_ready, vrsp_valid;
  vreq_t vreq;
  logic [31:0] vrsp_data;
  logic ib_wr_valid, ib_wr_ready, ib_wr_two, ib_wr_last, head_valid, head_pop, ib_half_done;
  logic [31:0] ib_wr_word;
  lq_t head_q;
  logic wb_we, wb_slot, cmp_en, cmp_slot, cmp_sign, cmp_batch, ob_clr;
  logic [2:0] wb_plane;
  logic [31:0] wb_data;
  exp_t cmp_exp;
  logic [5:0] cmp_row, drain_row;
  logic signed [15:0][15:0] drain_data;
  logic inj_valid, inj_ready = 0, res_valid = 0, res_ready;
  flit_t inj_flit, res_flit = '0;
  logic [31:0] n_pruned, n_planes, n_steps, stalls;
  logic [0:0] cmd_valid, dram_rvalid;
  vreq_t [0:0] cmd;
  logic [0:0][31:0] dram_rdata;
  int checks = 0, failures = 0;

  pe_controller #(.TID(TID)) dut (.*);
  pe u_pe (.*);
  vault_controller u_vc (.clk, .rst_n, .req_valid(vreq_valid), .req_ready(vreq_ready), .req(vreq),
                         .rsp_valid(vrsp_valid), .rsp_data(vrsp_data), .cmd_valid(cmd_valid[0]),
                         .cmd(cmd[0]), .dram_rvalid(dram_rvalid[0]), .dram_rdata(dram_rdata[0]),
                         .stall_cycles(stalls));
  dram_stack_model #(.NV(1)) u_dram (.clk, .cmd_valid, .cmd, .rvalid(dram_rvalid), .rdata(dram_rdata));

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

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    fp16_t x [N_IN];
    logic signed [7:0] w [N_IN][N_OUT];
    int part [N_OUT];
    int e_pl, e_pr, e_st, got;
    longint t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    e_pl = 0; e_pr = 0; e_st = 0;
    for (int o = 0; o < N_OUT; o++) part[o] = 0;
    for (int i = 0; i < N_IN; i++) begin
      case ($urandom_range(0, 4))
        0: x[i] = 16'h0;
        1: x[i] = {1'b0, 5'($urandom_range(1, 6)), 10'($urandom)};
        2: x[i] = {1'($urandom), 5'($urandom_range(15, 22)), 10'($urandom)};
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
      if (qref(x[i], ex)) begin e_pr++; continue; end
      e_pl += N_KG * ((ex < 0) ? 8 + ex : 8);
      e_st += N_KG * 2;
      for (int o = 0; o < N_OUT; o++) begin
        int p;
        p = $rtoi($floor(real'(w[i][o]) * (2.0 ** ex)));
        part[o] += x[i][15] ? -p : p;
        if (part[o] > 32767) part[o] = 32767;
        if (part[o] < -32768) part[o] = -32768;
      end
    end
    cfg = '0;
    cfg.n_in = 10'(N_IN); cfg.n_kg = 6'(N_KG);
    cfg.w_row_base = 22'h1000; cfg.in_row_base = 22'h40; cfg.out_row_base = 22'h80;
    @(negedge clk) start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    // collect partials with random back-pressure
    got = 0;
    while (got <= N_OUT) begin
      @(negedge clk);
      inj_ready = 1'($urandom);
      #1;
      if (inj_valid && inj_ready) begin
        checks++;
        if (got < N_OUT) begin
          if (inj_flit.kind != FL_PARTIAL || int'(inj_flit.idx) != got || int'($signed(inj_flit.data)) != part[got]
              || inj_flit.dst_x != 0 || inj_flit.dst_y != 0 || inj_flit.src != TID) begin
            failures++;
            if (failures < 10) $display("FAIL partial %0d: got %0d exp %0d", got, $signed(inj_flit.data), part[got]);
          end
          if (got == 0) begin
            checks++;
            if (cyc - t0 < longint'(e_pl)) begin failures++; $display("FAIL faster than the bus"); end
          end
        end else if (inj_flit.kind != FL_DONE) begin
          failures++; $display("FAIL no DONE");
        end
        got++;
      end
    end
    @(negedge clk) inj_ready = 0;
    checks += 3;
    if (n_pruned != 32'(e_pr)) begin failures++; $display("FAIL pruned %0d exp %0d", n_pruned, e_pr); end
    if (n_planes != 32'(e_pl)) begin failures++; $display("FAIL planes %0d exp %0d", n_planes, e_pl); end
    if (n_steps  != 32'(e_st)) begin failures++; $display("FAIL steps %0d exp %0d", n_steps, e_st); end
    // results owned by tile 5: outputs 5, 21, 37, ...
    for (int o = int'(TID); o < N_OUT; o += NUM_PE) begin
      checks++;
      if (done) begin failures++; $display("FAIL done before result %0d", o); end
      @(negedge clk);
      res_valid = 1;
      res_flit = '0; res_flit.kind = FL_RESULT; res_flit.idx = 10'(o); res_flit.data = 16'(o * 7 + 1);
      res_flit.dst_x = 2'd1; res_flit.dst_y = 2'd1;
      #1;
      while (!res_ready) begin @(negedge clk); #1; end
      @(negedge clk) res_valid = 0;
    end
    repeat (30) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL done not set"); end
    for (int o = int'(TID); o < N_OUT; o += NUM_PE) begin
      checks++;
      if (u_dram.peek(0, lin_addr(22'h80, 10'(o / NUM_PE))) != 32'(o * 7 + 1)) begin
        failures++; $display("FAIL result %0d not in DRAM", o);
      end
    end
    checks++;
    if (u_dram.timing_errors != 0) begin failures++; $display("FAIL bank timing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
