// tb_vault_controller: drives the vault controller with the behavioural DRAM.
// (1) Eight reads to eight different banks must issue on eight consecutive
//     cycles (bank-level parallelism, one word per cycle on the bus).
// (2) Back-to-back reads to one bank must be T_RC cycles apart (closed page).
// (3) A random mix of writes and reads: read data must match the last write,
//     responses must come in order, and the DRAM model must see no bank used
//     within T_RC of its last access.
module tb_vault_controller;
  import qeihan_pkg::*;
  localparam int T_RC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rsp_valid, cmd_valid, dram_rvalid;
  vreq_t req = '0, cmd;
  logic [31:0] rsp_data, dram_rdata, stall_cycles;
  logic [31:0] shadow [logic [25:0]];
  logic [31:0] expq [$];
  longint cyc = 0, issue_t [$];
  int checks = 0, failures = 0;

  vault_controller #(.T_RC(T_RC)) dut (.*);
  dram_stack_model #(.NV(1), .T_RC(T_RC)) u_dram (.clk, .cmd_valid(cmd_valid), .cmd(cmd),
                                                  .rvalid(dram_rvalid), .rdata(dram_rdata));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_valid) issue_t.push_back(cyc);
    if (rsp_valid) begin
      checks++;
      if (expq.size() == 0 || rsp_data != expq[0]) begin failures++; $display("FAIL read %h", rsp_data); end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end

  task automatic send(input vreq_t r);
    @(negedge clk);
    req_valid = 1; req = r;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    if (!r.we) expq.push_back(shadow.exists(26'(r.addr)) ? shadow[26'(r.addr)] : 32'h0);
    else shadow[26'(r.addr)] = r.wdata;
    @(negedge clk) req_valid = 0;
  endtask

  task automatic send_burst(input vreq_t r [8]);
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      req_valid = 1; req = r[k];
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      expq.push_back(shadow.exists(26'(r[k].addr)) ? shadow[26'(r[k].addr)] : 32'h0);
    end
    @(negedge clk) req_valid = 0;
  endtask

  initial begin
    vreq_t b [8];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // (1) eight banks
    for (int k = 0; k < 8; k++) begin b[k] = '0; b[k].addr = w_addr(22'h10, 10'd3, 5'd0, 3'(k)); end
    issue_t.delete();
    send_burst(b);
    repeat (20) @(negedge clk);
    checks++;
    if (issue_t.size() != 8 || issue_t[7] - issue_t[0] != 7) begin
      failures++; $display("FAIL 8 banks not issued back to back (%0d)", issue_t.size());
    end
    // (2) one bank
    for (int k = 0; k < 8; k++) begin b[k] = '0; b[k].addr.die = 2'd1; b[k].addr.bank = 2'd2; b[k].addr.row = 22'(k); end
    issue_t.delete();
    send_burst(b);
    repeat (80) @(negedge clk);
    checks++;
    if (issue_t.size() != 8 || issue_t[1] - issue_t[0] != T_RC || issue_t[7] - issue_t[0] != 7 * T_RC) begin
      failures++; $display("FAIL same-bank spacing");
    end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no stall counted"); end
    // (3) random traffic on a small address set
    for (int it = 0; it < 600; it++) begin
      vreq_t r;
      r = '0;
      r.we = 1'($urandom);
      r.addr.die = 2'($urandom); r.addr.bank = 2'($urandom); r.addr.row = 22'($urandom_range(0, 3));
      r.wdata = $urandom;
      send(r);
    end
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d reads unanswered", expq.size()); end
    checks++;
    if (u_dram.timing_errors != 0) begin failures++; $display("FAIL bank timing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
