// input_buffer: the Input Buffer (IB) half of the PE's I/O buffer.
//
// Holds FP16 input activations fetched from the vault. It is double-buffered:
// two halves of IB_ENTRIES/2 entries each. The fetch side fills one half while
// the PE consumes the other, so the reading of the next block of inputs from
// DRAM overlaps the work on the current block. A DRAM word carries two FP16
// values (low half first).
//
// Write side: a word is taken when `wr_valid && wr_ready`; `wr_two` says the
// upper FP16 is valid too, `wr_last` closes the half early (end of the
// inputs). A half is handed to the read side when it is full or closed.
// Read side: `rd_valid` while the current half holds data, `rd_data` is the
// oldest entry, `rd_pop` consumes it; the half is freed after its last entry, which
// `rd_half_done` signals in the cycle of that pop.
// Synchronous, active-low reset. The 64-byte size and double buffering follow
// the paper; the word packing and the handshake are this design's own.
module input_buffer
  import qeihan_pkg::*;
#(
  parameter int unsigned ENTRIES = IB_ENTRIES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_word,
  input  logic        wr_two,
  input  logic        wr_last,
  output logic        rd_valid,
  output fp16_t       rd_data,
  input  logic        rd_pop,
  output logic        rd_half_done
);
  localparam int unsigned HALF = ENTRIES / 2;
  localparam int unsigned PW   = $clog2(HALF + 1);

  fp16_t          mem [2][HALF];
  logic [1:0]     full;
  logic [PW-1:0]  cnt [2];
  logic           wsel, rsel;
  logic [PW-1:0]  wptr, rptr;
  logic [PW-1:0]  wnext;

  assign wr_ready = !full[wsel];
  assign rd_valid = full[rsel];
  assign rd_data  = mem[rsel][rptr[PW-2:0]];
  assign rd_half_done = rd_pop && rd_valid && (rptr + 1'b1 >= cnt[rsel]);
  assign wnext    = wptr + (wr_two ? PW'(2) : PW'(1));

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      mem[wsel][wptr[PW-2:0]] <= wr_word[15:0];
      if (wr_two) mem[wsel][wptr[PW-2:0] + 1'b1] <= wr_word[31:16];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0; wptr <= '0; rptr <= '0;
      cnt[0] <= '0; cnt[1] <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        if (wnext >= PW'(HALF) || wr_last) begin
          full[wsel] <= 1'b1;
          cnt[wsel]  <= wnext;
          wsel       <= !wsel;
          wptr       <= '0;
        end else begin
          wptr <= wnext;
        end
      end
      if (rd_pop && rd_valid) begin
        if (rptr + 1'b1 >= cnt[rsel]) begin
          full[rsel] <= 1'b0;
          rsel       <= !rsel;
          rptr       <= '0;
        end else begin
          rptr <= rptr + 1'b1;
        end
      end
    end
  end

  // The writer never hands a half over that still holds unread entries.
  assert property (@(posedge clk) disable iff (!rst_n) rd_pop |-> rd_valid);
endmodule
