// reduction_unit: reduction of the partial outputs in the central PE.
//
// Every PE works on its own share of the input channels but on all output
// channels, so each output is the sum of one partial output from each of the
// NPE PEs. The PEs send their partials over the mesh as PARTIAL flits
// (output index + int16 value) followed by one DONE flit. This unit adds each
// arriving partial into a wide accumulator entry (16 + log2(NPE) bits, so the
// sum cannot overflow), counts the DONE flits, and once all NPE PEs are done
// streams the n_out sums, saturated to int16, in index order to the SFU.
// It then clears itself for the next layer.
//
// Interface: flit input with valid/ready (always ready while accumulating),
// output stream `out_valid/out_ready/out_data/out_idx`, `busy` while it
// holds data. One flit per cycle; one result per cycle when not stalled.
// Follows the paper: reduction of the partial outputs in a centralized PE.
// Own choice: the sums are formed serially as the flits arrive (one adder and
// an accumulator array), not by a tree of adders.
module reduction_unit
  import qeihan_pkg::*;
#(
  parameter int unsigned NPE     = NUM_PE,
  parameter int unsigned ENTRIES = OB_ENTRIES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [10:0]   n_out,
  input  logic          in_valid,
  output logic          in_ready,
  input  flit_t         in_flit,
  output logic          out_valid,
  input  logic          out_ready,
  output acc_t          out_data,
  output logic [9:0]    out_idx,
  output logic          busy
);
  localparam int unsigned SW = ACC_W + $clog2(NPE);
  typedef enum logic [1:0] {R_ACC, R_STREAM, R_CLEAR} rstate_t;

  logic signed [SW-1:0] acc [ENTRIES];
  logic [ENTRIES-1:0]   vld;
  logic [$clog2(NPE+1)-1:0] ndone;
  rstate_t              st;
  logic [10:0]          ptr;
  logic signed [SW-1:0] cur, sum;
  logic                 take;

  assign in_ready  = (st == R_ACC);
  assign take      = in_valid && in_ready && in_flit.kind == FL_PARTIAL;
  assign cur       = vld[in_flit.idx] ? acc[in_flit.idx] : '0;
  assign sum       = cur + SW'($signed(in_flit.data));
  assign out_valid = (st == R_STREAM);
  assign out_idx   = ptr[9:0];
  assign busy      = (st != R_ACC) || (ndone != '0) || (vld != '0);

  always_comb begin
    logic signed [SW-1:0] v;
    v = vld[ptr[9:0]] ? acc[ptr[9:0]] : '0;
    if (v > SW'(32767))       out_data = 16'sh7FFF;
    else if (v < -SW'(32768)) out_data = 16'sh8000;
    else                      out_data = v[ACC_W-1:0];
  end

  always_ff @(posedge clk)
    if (take) acc[in_flit.idx] <= sum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld <= '0; ndone <= '0; st <= R_ACC; ptr <= '0;
    end else begin
      case (st)
        R_ACC: begin
          if (take) vld[in_flit.idx] <= 1'b1;
          if (in_valid && in_flit.kind == FL_DONE) begin
            if (ndone + 1'b1 == ($clog2(NPE+1))'(NPE)) begin
              st <= R_STREAM; ptr <= '0;
            end
            ndone <= ndone + 1'b1;
          end
        end
        R_STREAM:
          if (out_ready) begin
            if (ptr + 11'd1 >= n_out) st <= R_CLEAR;
            ptr <= ptr + 11'd1;
          end
        default: begin
          vld <= '0; ndone <= '0; st <= R_ACC;
        end
      endcase
    end
  end
endmodule
