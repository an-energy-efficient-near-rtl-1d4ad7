// output_buffer: the Output Buffer (OB) half of the PE's I/O buffer.
//
// Stores the 16-bit partial outputs of every output neuron the PE works on,
// OB_ROWS rows of D lanes (64 x 16 x 16 bit = 2 KB). It is banked D ways, one
// bank per adder, so a whole row is read and written in one cycle: the ADD
// array reads a row, adds, and writes it back in the same cycle.
//
// Port A (compute): `a_row` addresses a row, `a_rdata` shows it
// combinationally, `a_we` writes `a_wdata` to it at the clock edge.
// Port B (drain): `b_row`/`b_rdata`, a second read port used to send the
// partial outputs to the reduction at the end of a layer.
// `clr` empties the buffer in one cycle: a valid bit per row makes a row that
// was not written since read as zero, so no cycles are spent zeroing 1 KB.
// Size and banking follow the paper; the valid-bit clear and the second read
// port (in place of a second copy for double buffering) are own choices.
module output_buffer
  import qeihan_pkg::*;
#(
  parameter int unsigned ROWS = OB_ROWS,
  parameter int unsigned D    = D_ADD
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clr,
  input  logic [$clog2(ROWS)-1:0]         a_row,
  output logic signed [D-1:0][ACC_W-1:0]  a_rdata,
  input  logic                            a_we,
  input  logic signed [D-1:0][ACC_W-1:0]  a_wdata,
  input  logic [$clog2(ROWS)-1:0]         b_row,
  output logic signed [D-1:0][ACC_W-1:0]  b_rdata
);
  logic [D-1:0][ACC_W-1:0] mem [ROWS];
  logic [ROWS-1:0]         vld;

  always_ff @(posedge clk)
    if (a_we) mem[a_row] <= a_wdata;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) vld <= '0;
    else if (a_we)     vld[a_row] <= 1'b1;
  end

  assign a_rdata = vld[a_row] ? mem[a_row] : '0;
  assign b_rdata = vld[b_row] ? mem[b_row] : '0;
endmodule
