// tile: one tile of the logic die, sitting under one DRAM vault.
//
// Contains the tile's router (R), vault controller (VC), PE controller (PEC)
// and PE, wired as in the paper's architecture figure: the PEC issues the
// PE's DRAM requests to the VC and its remote traffic to the router; the VC
// talks to the DRAM dies of the vault through the `cmd`/`dram_r*` port (the
// TSVs). The tile at (0,0) is also the central PE of the post-processing: it
// adds the reduction unit and the SFU. Its local router port then carries,
// besides its own PE's traffic, the partial outputs of every PE (to the
// reduction unit) and the final activations it sends back to each vault.
//
// Mesh ports are arrays indexed 0..3 = east, west, north, south (router ports
// 1..4). Local ejection: RESULT flits go to the PEC, PARTIAL/DONE flits to
// the reduction unit. Local injection: SFU results take priority over the
// PEC's partials. The layer configuration and `start` are shared by all tiles.
module tile
  import qeihan_pkg::*;
#(
  parameter logic [1:0] X = 2'd0,
  parameter logic [1:0] Y = 2'd0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  layer_cfg_t      cfg,
  input  logic            start,
  output logic            done,
  // SFU look-up table load (used by the central tile)
  input  logic            lut_we,
  input  logic [5:0]      lut_addr,
  input  fp16_t           lut_data,
  // mesh links
  input  logic  [3:0]     nin_valid,
  output logic  [3:0]     nin_ready,
  input  flit_t [3:0]     nin_flit,
  output logic  [3:0]     nout_valid,
  input  logic  [3:0]     nout_ready,
  output flit_t [3:0]     nout_flit,
  // DRAM of this vault
  output logic            cmd_valid,
  output vreq_t           cmd,
  input  logic            dram_rvalid,
  input  logic [31:0]     dram_rdata,
  // statistics
  output logic [31:0]     n_pruned,
  output logic [31:0]     n_planes,
  output logic [31:0]     n_steps,
  output logic [31:0]     bank_stalls
);
  localparam logic [3:0] TID     = {Y, X};
  localparam bit         CENTRAL = (X == 2'd0 && Y == 2'd0);

  // router
  logic  [NPORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [NPORTS-1:0] r_in_flit, r_out_flit;

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      r_in_valid[d+1]  = nin_valid[d];
      r_in_flit[d+1]   = nin_flit[d];
      nin_ready[d]     = r_in_ready[d+1];
      nout_valid[d]    = r_out_valid[d+1];
      nout_flit[d]     = r_out_flit[d+1];
      r_out_ready[d+1] = nout_ready[d];
    end
  end

  router #(.X(X), .Y(Y)) u_r (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit)
  );

  // vault controller
  logic        vreq_valid, vreq_ready, vrsp_valid;
  vreq_t       vreq;
  logic [31:0] vrsp_data;

  vault_controller u_vc (
    .clk, .rst_n,
    .req_valid(vreq_valid), .req_ready(vreq_ready), .req(vreq),
    .rsp_valid(vrsp_valid), .rsp_data(vrsp_data),
    .cmd_valid, .cmd, .dram_rvalid, .dram_rdata,
    .stall_cycles(bank_stalls)
  );

  // PE and PE controller
  logic        ib_wr_valid, ib_wr_ready, ib_wr_two, ib_wr_last, head_valid, head_pop, ib_half_done;
  logic [31:0] ib_wr_word;
  lq_t         head_q;
  logic        wb_we, cmp_en, cmp_sign, ob_clr;
  logic [$clog2(WB_SLOTS)-1:0] wb_slot, cmp_slot;
  logic [$clog2(W_BITS)-1:0]   wb_plane;
  logic [M_BUS-1:0]            wb_data;
  exp_t                        cmp_exp;
  logic [$clog2(BATCHES)-1:0]  cmp_batch;
  logic [$clog2(OB_ROWS)-1:0]  cmp_row, drain_row;
  logic signed [D_ADD-1:0][ACC_W-1:0] drain_data;
  logic        inj_valid, inj_ready, res_valid, res_ready;
  flit_t       inj_flit;

  pe u_pe (
    .clk, .rst_n,
    .ib_wr_valid, .ib_wr_ready, .ib_wr_word, .ib_wr_two, .ib_wr_last,
    .head_valid, .head_q, .head_pop, .ib_half_done,
    .wb_we, .wb_slot, .wb_plane, .wb_data,
    .cmp_en, .cmp_slot, .cmp_exp, .cmp_sign, .cmp_batch, .cmp_row,
    .ob_clr, .drain_row, .drain_data
  );

  pe_controller #(.TID(TID)) u_pec (
    .clk, .rst_n, .cfg, .start, .done,
    .vreq_valid, .vreq_ready, .vreq, .vrsp_valid, .vrsp_data,
    .ib_wr_valid, .ib_wr_ready, .ib_wr_word, .ib_wr_two, .ib_wr_last,
    .head_valid, .head_q, .head_pop, .ib_half_done,
    .wb_we, .wb_slot, .wb_plane, .wb_data,
    .cmp_en, .cmp_slot, .cmp_exp, .cmp_sign, .cmp_batch, .cmp_row,
    .ob_clr, .drain_row, .drain_data,
    .inj_valid, .inj_ready, .inj_flit,
    .res_valid, .res_ready, .res_flit(r_out_flit[P_LOCAL]),
    .n_pruned, .n_planes, .n_steps
  );

  // local ejection
  logic eject_result;
  assign eject_result = (r_out_flit[P_LOCAL].kind == FL_RESULT);
  assign res_valid    = r_out_valid[P_LOCAL] && eject_result;

  if (CENTRAL) begin : g_central
    logic  red_in_ready, red_out_valid, red_out_ready, red_busy;
    acc_t  red_out_data;
    logic [9:0] red_out_idx;
    logic  sfu_out_valid, sfu_out_ready;
    fp16_t sfu_out_data;
    logic [9:0] sfu_out_idx;

    reduction_unit u_red (
      .clk, .rst_n, .n_out(11'(cfg.n_kg) << 5),
      .in_valid(r_out_valid[P_LOCAL] && !eject_result), .in_ready(red_in_ready),
      .in_flit(r_out_flit[P_LOCAL]),
      .out_valid(red_out_valid), .out_ready(red_out_ready),
      .out_data(red_out_data), .out_idx(red_out_idx), .busy(red_busy)
    );

    sfu u_sfu (
      .clk, .rst_n, .scale_exp(cfg.scale_exp), .act_mode(cfg.act_mode),
      .pool_log2(cfg.pool_log2), .lut_we, .lut_addr, .lut_data,
      .in_valid(red_out_valid), .in_ready(red_out_ready),
      .in_data(red_out_data), .in_idx(red_out_idx),
      .out_valid(sfu_out_valid), .out_ready(sfu_out_ready),
      .out_data(sfu_out_data), .out_idx(sfu_out_idx)
    );

    assign r_out_ready[P_LOCAL] = eject_result ? res_ready : red_in_ready;

    always_comb begin
      r_in_flit[P_LOCAL] = inj_flit;
      r_in_valid[P_LOCAL] = inj_valid;
      inj_ready     = r_in_ready[P_LOCAL] && !sfu_out_valid;
      sfu_out_ready = r_in_ready[P_LOCAL];
      if (sfu_out_valid) begin
        r_in_valid[P_LOCAL]      = 1'b1;
        r_in_flit[P_LOCAL]       = '0;
        r_in_flit[P_LOCAL].dst_x = sfu_out_idx[1:0];
        r_in_flit[P_LOCAL].dst_y = sfu_out_idx[3:2];
        r_in_flit[P_LOCAL].src   = TID;
        r_in_flit[P_LOCAL].kind  = FL_RESULT;
        r_in_flit[P_LOCAL].idx   = sfu_out_idx;
        r_in_flit[P_LOCAL].data  = sfu_out_data;
      end
    end
  end else begin : g_edge
    assign r_out_ready[P_LOCAL] = eject_result ? res_ready : 1'b1;
    assign r_in_valid[P_LOCAL]  = inj_valid;
    assign r_in_flit[P_LOCAL]   = inj_flit;
    assign inj_ready            = r_in_ready[P_LOCAL];
  end
endmodule
