// dram_stack_model: behavioural model of the DRAM dies of a 3D-stacked memory
// (not synthesizable, simulation only). Each of NV vaults has its own command
// port; a read returns its 32-bit word T_RL cycles after the command. Storage
// is a sparse associative array keyed by vault and address, so only written
// words cost memory; unwritten words read as zero. The model checks the
// closed-page bank timing: a bank may not be accessed again within T_RC
// cycles of its previous access. `poke`/`peek` give a testbench direct access.
module dram_stack_model
  import qeihan_pkg::*;
#(
  parameter int unsigned NV   = NUM_PE,
  parameter int unsigned T_RL = 6,
  parameter int unsigned T_RC = 8
) (
  input  logic                 clk,
  input  logic  [NV-1:0]       cmd_valid,
  input  vreq_t [NV-1:0]       cmd,
  output logic  [NV-1:0]       rvalid,
  output logic  [NV-1:0][31:0] rdata
);
  logic [31:0] mem [longint];
  longint      last_use [longint];
  longint      cycle = 0;
  int          timing_errors = 0;
  int          reads = 0, writes = 0;

  logic  [NV-1:0]       pv [T_RL];
  logic  [NV-1:0][31:0] pd [T_RL];

  function automatic longint key(input int v, input vaddr_t a);
    return (longint'(v) << 32) | longint'(a);
  endfunction

  function automatic void poke(input int v, input vaddr_t a, input logic [31:0] d);
    mem[key(v, a)] = d;
  endfunction

  function automatic logic [31:0] peek(input int v, input vaddr_t a);
    longint k;
    k = key(v, a);
    return mem.exists(k) ? mem[k] : 32'h0;
  endfunction

  initial for (int i = 0; i < T_RL; i++) begin pv[i] = '0; pd[i] = '0; end

  always @(posedge clk) begin
    logic  [NV-1:0]       nv;
    logic  [NV-1:0][31:0] nd;
    cycle <= cycle + 1;
    nv = '0; nd = '0;
    for (int v = 0; v < NV; v++) begin
      if (cmd_valid[v]) begin
        longint bk;
        bk = (longint'(v) << 8) | longint'({cmd[v].addr.die, cmd[v].addr.bank});
        if (last_use.exists(bk) && cycle - last_use[bk] < T_RC) begin
          timing_errors++;
          $display("DRAM: vault %0d bank %0d reused after %0d cycles", v, bk & 15, cycle - last_use[bk]);
        end
        last_use[bk] = cycle;
        if (cmd[v].we) begin
          poke(v, cmd[v].addr, cmd[v].wdata);
          writes++;
        end else begin
          nv[v] = 1'b1;
          nd[v] = peek(v, cmd[v].addr);
          reads++;
        end
      end
    end
    for (int i = T_RL - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= nv;
    pd[0] <= nd;
  end

  assign rvalid = pv[T_RL-1];
  assign rdata  = pd[T_RL-1];
endmodule
