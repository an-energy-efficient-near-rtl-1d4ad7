// sync_fifo: small synchronous FIFO used for router input queues, request
// queues and response tags. DEPTH entries of WIDTH bits, first-word
// fall-through: `rdata` shows the oldest entry whenever `rvalid` is high.
// A push is taken when `wready` (not full); a pop when `rvalid`. Push and pop
// may happen in the same cycle. Active-low synchronous reset empties it.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;
  logic             push, pop;

  assign wready = (cnt < (AW+1)'(DEPTH));
  assign rvalid = (cnt != '0);
  assign rdata  = mem[rp];
  assign push   = wvalid && wready;
  assign pop    = rvalid && rready;

  always_ff @(posedge clk)
    if (push) mem[wp] <= wdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
