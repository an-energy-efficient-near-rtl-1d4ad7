// vault_controller: Vault Controller (VC) of one tile.
//
// Issues the PE controller's reads and writes to the DRAM dies of its vault
// under a closed-page policy: every access opens a row, reads or writes one
// 32-bit word and precharges, and occupies its bank for T_RC cycles. There is
// no row-buffer locality to exploit, only bank-level parallelism, so the VC
// keeps a busy timer per bank (DRAM_DIES x DRAM_BANKS = 16 banks) and issues
// the oldest queued request as soon as its bank is free, one command per
// cycle on the vault's 32-bit bus. Requests to different banks therefore
// overlap, which is what the bit-plane weight layout relies on. Requests are
// issued in order; the DRAM returns read data a fixed time after the command,
// so read responses come back in request order.
//
// Ports: request queue `req_valid/req_ready/req`; read data `rsp_valid`,
// `rsp_data`; DRAM command `cmd_valid/cmd` and read return
// `dram_rvalid/dram_rdata` toward the TSVs; `stall_cycles` counts cycles the
// head request waited for a busy bank.
// Follows the paper: VC per vault, closed-page policy, bank-level parallelism.
// Own choices: in-order issue, queue depth, the value of T_RC.
module vault_controller
  import qeihan_pkg::*;
#(
  parameter int unsigned T_RC  = 8,   // bank occupancy per access, cycles
  parameter int unsigned QDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  vreq_t       req,
  output logic        rsp_valid,
  output logic [31:0] rsp_data,
  output logic        cmd_valid,
  output vreq_t       cmd,
  input  logic        dram_rvalid,
  input  logic [31:0] dram_rdata,
  output logic [31:0] stall_cycles
);
  localparam int unsigned NB = DRAM_DIES * DRAM_BANKS;
  localparam int unsigned TW = $clog2(T_RC + 1);

  logic          hvalid;
  vreq_t         head;
  logic [TW-1:0] busy [NB];
  logic [3:0]    hb;

  sync_fifo #(.WIDTH($bits(vreq_t)), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .wvalid(req_valid), .wready(req_ready), .wdata(req),
    .rvalid(hvalid), .rready(cmd_valid), .rdata(head)
  );

  assign hb        = {head.addr.die, head.addr.bank};
  assign cmd_valid = hvalid && (busy[hb] == '0);
  assign cmd       = head;
  assign rsp_valid = dram_rvalid;
  assign rsp_data  = dram_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) busy[b] <= '0;
      stall_cycles <= '0;
    end else begin
      for (int b = 0; b < NB; b++)
        if (busy[b] != '0) busy[b] <= busy[b] - 1'b1;
      if (cmd_valid) busy[hb] <= TW'(T_RC - 1);
      if (hvalid && !cmd_valid) stall_cycles <= stall_cycles + 1'b1;
    end
  end
endmodule
