// tb_router: a router at mesh position (1,2) gets random flits on all five
// inputs with random destinations and random output back-pressure. Checks
// that every flit leaves by the port that dimension-order (x first, then y)
// routing gives, exactly once, in order per input/output pair, and that all
// outputs can be busy in the same cycle.
//
// 10 ns clock; flits are offered with valid/ready handshakes and tracked in
// per-pair queues. One router per tile on a 2D mesh is the paper's; XY
// routing, single-flit packets and round-robin arbitration are this
// design's. Has a watchdog.
module tb_router;
  import qeihan_pkg::*;
  localparam logic [1:0] X = 2'd1, Y = 2'd2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  [4:0] in_valid = '0, in_ready, out_valid, out_ready = '1;
  flit_t [4:0] in_flit, out_flit;
  flit_t exp_q [5][5][$];    // [in][out]
  int checks = 0, failures = 0, sent = 0, recv = 0, all_busy = 0;

  router #(.X(X), .Y(Y)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xy_port(input flit_t f);
    if (f.dst_x > X) return 1;
    if (f.dst_x < X) return 2;
    if (f.dst_y > Y) return 3;
    if (f.dst_y < Y) return 4;
    return 0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid == 5'h1F) all_busy++;
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      int i, found;
      i = int'(out_flit[o].src[2:0]);
      checks++;
      recv++;
      found = 0;
      if (exp_q[i][o].size() != 0 && exp_q[i][o][0] == out_flit[o]) begin
        void'(exp_q[i][o].pop_front());
        found = 1;
      end
      if (!found) begin failures++; if (failures < 10) $display("FAIL out %0d flit %h", o, out_flit[o]); end
    end
  end

  initial begin
    in_flit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = (c < 300) ? 5'h1F : 5'($urandom);
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || in_ready[i]) begin
          // previous flit (if any) was taken at the last edge
          in_valid[i] = ($urandom_range(0, 2) != 0);
          in_flit[i] = '0;
          in_flit[i].src = 4'(i);
          in_flit[i].kind = FL_PARTIAL;
          // no U-turn: a flit arriving from a neighbour does not go back to it
          do begin
            in_flit[i].dst_x = 2'($urandom);
            in_flit[i].dst_y = 2'($urandom);
          end while (i != 0 && xy_port(in_flit[i]) == i);
          in_flit[i].idx  = 10'(c);
          in_flit[i].data = 16'($urandom);
        end
      end
      #1;
      // record the flits that will be accepted at the coming edge
      for (int i = 0; i < 5; i++)
        if (in_valid[i] && in_ready[i]) begin
          exp_q[i][xy_port(in_flit[i])].push_back(in_flit[i]);
          sent++;
        end
    end
    @(negedge clk) in_valid = '0; out_ready = '1;
    repeat (50) @(negedge clk);
    checks++;
    if (sent != recv) begin failures++; $display("FAIL sent %0d received %0d", sent, recv); end
    checks++;
    if (all_busy == 0) begin failures++; $display("FAIL outputs never all busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
