// router: the tile router (R) of the 2D-mesh network on the logic die.
//
// Five ports: LOCAL (the tile's PE and PE controller), EAST (x+1), WEST (x-1),
// NORTH (y+1), SOUTH (y-1). Every input port has a FIFO_DEPTH-entry queue.
// Flits are single-flit packets (see flit_t) routed in dimension order, first
// along x and then along y, which cannot deadlock on a mesh. Each output
// port grants one requesting input per cycle in round-robin order and passes
// its head flit straight to the neighbour when the neighbour's queue has room
// (`out_ready`). One hop therefore takes one cycle per router plus queueing.
// Flits from one source to one destination stay in order.
//
// Ports: per direction `in_valid/in_ready/in_flit` and
// `out_valid/out_ready/out_flit`, arrays indexed by P_LOCAL..P_SOUTH.
// Follows the paper: one router per tile, local access and remote access over
// a 2D mesh. Own choices: XY routing, single-flit packets, queue depth,
// round-robin arbitration.
module router
  import qeihan_pkg::*;
#(
  parameter logic [1:0]  X          = 2'd0,
  parameter logic [1:0]  Y          = 2'd0,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic  [NPORTS-1:0] in_valid,
  output logic  [NPORTS-1:0] in_ready,
  input  flit_t [NPORTS-1:0] in_flit,
  output logic  [NPORTS-1:0] out_valid,
  input  logic  [NPORTS-1:0] out_ready,
  output flit_t [NPORTS-1:0] out_flit
);
  flit_t [NPORTS-1:0]     head;
  logic  [NPORTS-1:0]     hvalid, pop;
  logic  [NPORTS-1:0][2:0] route;                  // output chosen by each head
  logic  [NPORTS-1:0][2:0] grant;                  // input granted to each output
  logic  [NPORTS-1:0]     gvalid;
  logic  [NPORTS-1:0][2:0] rr;                     // round-robin start per output

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(FIFO_DEPTH)) u_q (
      .clk, .rst_n,
      .wvalid(in_valid[p]), .wready(in_ready[p]), .wdata(in_flit[p]),
      .rvalid(hvalid[p]), .rready(pop[p]), .rdata(head[p])
    );
  end

  // XY route computation.
  always_comb
    for (int p = 0; p < NPORTS; p++) begin
      if (head[p].dst_x > X)      route[p] = 3'(P_EAST);
      else if (head[p].dst_x < X) route[p] = 3'(P_WEST);
      else if (head[p].dst_y > Y) route[p] = 3'(P_NORTH);
      else if (head[p].dst_y < Y) route[p] = 3'(P_SOUTH);
      else                        route[p] = 3'(P_LOCAL);
    end

  // Round-robin output arbitration.
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      gvalid[o] = 1'b0;
      grant[o]  = '0;
      for (int k = 0; k < NPORTS; k++) begin
        int i;
        i = (int'(rr[o]) + k) % NPORTS;
        if (!gvalid[o] && hvalid[i] && route[i] == 3'(o)) begin
          gvalid[o] = 1'b1;
          grant[o]  = 3'(i);
        end
      end
      out_valid[o] = gvalid[o];
      out_flit[o]  = head[grant[o]];
    end
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < NPORTS; o++)
      if (gvalid[o] && out_ready[o]) pop[grant[o]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rr <= '0;
    else
      for (int o = 0; o < NPORTS; o++)
        if (gvalid[o] && out_ready[o])
          rr[o] <= (grant[o] == 3'(NPORTS-1)) ? 3'd0 : grant[o] + 3'd1;
  end

  // A flit never leaves through the port it would have to come back on.
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] |-> (grant[o] != 3'(o) || o == P_LOCAL));
  end
endmodule
