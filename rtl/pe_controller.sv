// pe_controller: PE Controller (PEC) of one tile.
//
// Generates every DRAM address the PE needs and sequences the enhanced
// input-stationary dataflow for one FC layer. Four engines run concurrently:
//
//  * Activation fetch (pre-processing). Reads the tile's n_in FP16 inputs
//    (two per DRAM word) into the double-buffered IB, one IB half (8 words)
//    per burst, and starts a burst whenever fewer than two halves are held,
//    so loading the next block overlaps the work on the current one.
//  * Weight fetch (execution). Takes the IB head through LOG2-Quant. A zero or
//    small (clipped to -8) activation is pruned: popped with no weight access.
//    Otherwise, for each group kg of M_BUS = 32 kernels it requests only the
//    8-|x~| most significant bit planes (all 8 when x~ >= 0), plane 7 first,
//    one word per request; each word holds one bit of 32 weights. The words
//    go to a free WB slot; with two slots the fetch of group kg+1 overlaps the
//    compute of group kg.
//  * Compute. For a filled slot it issues BATCHES = M_BUS/D = 2 compute steps
//    (D&S + ADD array on OB rows 2*kg and 2*kg+1), then frees the slot.
//  * Post-processing. When all inputs are done it reads the n_out = 32*n_kg
//    partial outputs from the OB and sends them as PARTIAL flits to the
//    central PE at tile (0,0), then a DONE flit. Separately it writes every
//    RESULT flit the central PE sends back (final FP16 activations whose
//    index i has i % NUM_PE == TID) to the output region of its vault.
//
// Vault requests are arbitrated: result writes first, then weight reads,
// then activation reads. Read responses return in order; a tag FIFO records
// where each belongs. `done` rises when the tile has sent its partials and
// written all results it owns. Address layout: see qeihan_pkg (w_addr,
// lin_addr). Follows the paper: PEC generates the addresses, only the needed
// MSB planes are read, zero/small activations are pruned, IS dataflow with
// double-buffered IB and WB, reduction in a central PE. Own choices: the FSM
// split, arbitration order, flit protocol, FC layers only.
module pe_controller
  import qeihan_pkg::*;
#(
  parameter logic [3:0]  TID      = 4'd0,    // tile number = y*MESH_X + x
  parameter int unsigned TAGDEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  logic        start,
  output logic        done,
  // vault controller
  output logic        vreq_valid,
  input  logic        vreq_ready,
  output vreq_t       vreq,
  input  logic        vrsp_valid,
  input  logic [31:0] vrsp_data,
  // PE: IB
  output logic        ib_wr_valid,
  input  logic        ib_wr_ready,
  output logic [31:0] ib_wr_word,
  output logic        ib_wr_two,
  output logic        ib_wr_last,
  input  logic        head_valid,
  input  lq_t         head_q,
  output logic        head_pop,
  input  logic        ib_half_done,
  // PE: WB
  output logic        wb_we,
  output logic [$clog2(WB_SLOTS)-1:0] wb_slot,
  output logic [$clog2(W_BITS)-1:0]   wb_plane,
  output logic [M_BUS-1:0]            wb_data,
  // PE: compute
  output logic        cmp_en,
  output logic [$clog2(WB_SLOTS)-1:0] cmp_slot,
  output exp_t        cmp_exp,
  output logic        cmp_sign,
  output logic [$clog2(BATCHES)-1:0]  cmp_batch,
  output logic [$clog2(OB_ROWS)-1:0]  cmp_row,
  // PE: OB
  output logic        ob_clr,
  output logic [$clog2(OB_ROWS)-1:0]  drain_row,
  input  logic signed [D_ADD-1:0][ACC_W-1:0] drain_data,
  // network
  output logic        inj_valid,
  input  logic        inj_ready,
  output flit_t       inj_flit,
  input  logic        res_valid,
  output logic        res_ready,
  input  flit_t       res_flit,
  // statistics
  output logic [31:0] n_pruned,
  output logic [31:0] n_planes,
  output logic [31:0] n_steps
);
  localparam int unsigned IB_HALF_WORDS = IB_ENTRIES / 4;   // 8 words per IB half
  localparam int unsigned SW = $clog2(WB_SLOTS);

  typedef struct packed {
    logic       act;     // activation word (else weight plane)
    logic       two;     // activation word holds two inputs
    logic       last;    // last activation word of all / last plane of a group
    logic [SW-1:0] slot;
    logic [2:0] plane;
  } tag_t;

  typedef struct packed {
    exp_t       exp;
    logic       sign;
    logic [4:0] kg;
  } meta_t;

  // ---------------- run control ----------------
  logic        running, exec_done, drained;
  logic [10:0] n_out;
  logic [9:0]  n_words;
  logic [10:0] n_final, res_expected, res_written;

  assign n_out   = 11'(cfg.n_kg) << 5;
  assign n_words = 10'((11'(cfg.n_in) + 11'd1) >> 1);
  assign n_final = n_out >> cfg.pool_log2;
  assign res_expected = (n_final > 11'(TID)) ? ((n_final - 11'(TID) + 11'(NUM_PE - 1)) >> 4) : 11'd0;
  assign ob_clr  = start;
  assign done    = !running && drained && (res_written == res_expected);

  // ---------------- tag FIFO ----------------
  logic tag_wready, tag_rvalid;
  tag_t tag_in, tag_out;
  logic tag_push;
  sync_fifo #(.WIDTH($bits(tag_t)), .DEPTH(TAGDEPTH)) u_tags (
    .clk, .rst_n, .wvalid(tag_push), .wready(tag_wready), .wdata(tag_in),
    .rvalid(tag_rvalid), .rready(vrsp_valid), .rdata(tag_out)
  );

  // ---------------- activation fetch state ----------------
  logic [9:0] aw;            // next activation word
  logic [3:0] a_left;        // words left in the current burst
  logic [1:0] reserved;      // IB halves requested and not yet consumed
  logic       a_want;

  // ---------------- weight fetch state ----------------
  logic        f_active;
  lq_t         f_q;
  logic [4:0]  f_kg;
  logic [2:0]  f_plane, f_lo;
  logic [SW-1:0] f_slot;
  logic [9:0]  in_idx;
  logic        w_want;
  logic [WB_SLOTS-1:0] slot_busy, slot_full;
  meta_t       meta [WB_SLOTS];

  // ---------------- compute state ----------------
  logic [SW-1:0] c_slot;
  logic [$clog2(BATCHES)-1:0] c_b;

  // ---------------- drain / results ----------------
  logic [10:0] d_idx;
  logic        d_active;
  logic        r_want;

  // Request arbitration.
  logic a_go, w_go, r_go;
  assign r_want = res_valid;
  assign w_want = running && f_active && !slot_busy[f_slot];
  assign a_want = running && (a_left != '0);
  always_comb begin
    r_go = 1'b0; w_go = 1'b0; a_go = 1'b0;
    vreq = '0;
    vreq_valid = 1'b0;
    if (r_want) begin
      vreq_valid = 1'b1;
      vreq.we    = 1'b1;
      vreq.addr  = lin_addr(cfg.out_row_base, 10'(res_flit.idx >> 4));
      vreq.wdata = {16'h0, res_flit.data};
      r_go       = vreq_ready;
    end else if (w_want && tag_wready) begin
      vreq_valid = 1'b1;
      vreq.addr  = w_addr(cfg.w_row_base, in_idx, f_kg, f_plane);
      w_go       = vreq_ready;
    end else if (a_want && tag_wready) begin
      vreq_valid = 1'b1;
      vreq.addr  = lin_addr(cfg.in_row_base, aw);
      a_go       = vreq_ready;
    end
  end
  assign res_ready = r_go;

  always_comb begin
    tag_push = w_go || a_go;
    tag_in   = '0;
    if (w_go) begin
      tag_in.slot  = f_slot;
      tag_in.plane = f_plane;
      tag_in.last  = (f_plane == f_lo);
    end else begin
      tag_in.act  = 1'b1;
      tag_in.two  = ({aw, 1'b1} < 11'(cfg.n_in));
      tag_in.last = (aw + 10'd1 == n_words);
    end
  end

  // Responses to IB or WB.
  assign ib_wr_valid = vrsp_valid && tag_out.act;
  assign ib_wr_word  = vrsp_data;
  assign ib_wr_two   = tag_out.two;
  assign ib_wr_last  = tag_out.last;
  assign wb_we       = vrsp_valid && !tag_out.act;
  assign wb_slot     = tag_out.slot;
  assign wb_plane    = tag_out.plane;
  assign wb_data     = vrsp_data;

  // Weight fetch: pruning and group sequencing.
  lq_t   hq;
  logic [2:0] lo_of_head;
  assign hq         = head_q;
  assign lo_of_head = hq.exp[EXP_BITS-1] ? 3'(-hq.exp) : 3'd0;
  assign head_pop   = running && head_valid &&
                      ((!f_active && hq.prune) ||
                       (w_go && f_plane == f_lo && f_kg + 5'd1 == 5'(cfg.n_kg)));

  // Compute.
  assign cmp_en    = slot_full[c_slot];
  assign cmp_slot  = c_slot;
  assign cmp_exp   = meta[c_slot].exp;
  assign cmp_sign  = meta[c_slot].sign;
  assign cmp_batch = c_b;
  assign cmp_row   = $clog2(OB_ROWS)'({meta[c_slot].kg, c_b});

  assign exec_done = (in_idx == cfg.n_in) && !f_active && (slot_busy == '0) && !tag_rvalid
                     && (aw == n_words) && (a_left == '0);

  // Drain to the central PE.
  assign drain_row = $clog2(OB_ROWS)'(d_idx >> 4);
  always_comb begin
    inj_flit       = '0;
    inj_flit.dst_x = 2'd0;
    inj_flit.dst_y = 2'd0;
    inj_flit.src   = TID;
    inj_flit.idx   = d_idx[9:0];
    if (d_idx < n_out) begin
      inj_flit.kind = FL_PARTIAL;
      inj_flit.data = drain_data[d_idx[3:0]];
    end else begin
      inj_flit.kind = FL_DONE;
    end
  end
  assign inj_valid = d_active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0; drained <= 1'b1; res_written <= '0;
      aw <= '0; a_left <= '0; reserved <= '0;
      f_active <= 1'b0; f_q <= '0; f_kg <= '0; f_plane <= '0; f_lo <= '0; f_slot <= '0; in_idx <= '0;
      slot_busy <= '0; slot_full <= '0; c_slot <= '0; c_b <= '0;
      d_idx <= '0; d_active <= 1'b0;
      n_pruned <= '0; n_planes <= '0; n_steps <= '0;
      for (int s = 0; s < WB_SLOTS; s++) meta[s] <= '0;
    end else if (start) begin
      running <= 1'b1; drained <= 1'b0; res_written <= '0;
      aw <= '0; a_left <= '0; reserved <= '0;
      f_active <= 1'b0; f_kg <= '0; f_slot <= '0; in_idx <= '0;
      slot_busy <= '0; slot_full <= '0; c_slot <= '0; c_b <= '0;
      d_idx <= '0; d_active <= 1'b0;
      n_pruned <= '0; n_planes <= '0; n_steps <= '0;
    end else begin
      // ---- activation fetch ----
      if (ib_half_done) reserved <= reserved - 1'b1;
      if (running && a_left == '0 && aw < n_words && reserved != 2'd2) begin
        a_left   <= ((n_words - aw) > 10'(IB_HALF_WORDS)) ? 4'(IB_HALF_WORDS) : 4'(n_words - aw);
        reserved <= reserved + 1'b1 - 2'(ib_half_done);
      end
      if (a_go) begin
        aw     <= aw + 1'b1;
        a_left <= a_left - 1'b1;
      end
      // ---- weight fetch ----
      if (running && head_valid && !f_active) begin
        if (hq.prune) begin
          in_idx   <= in_idx + 1'b1;
          n_pruned <= n_pruned + 1'b1;
        end else begin
          f_active <= 1'b1;
          f_q      <= hq;
          f_kg     <= '0;
          f_plane  <= 3'd7;
          f_lo     <= lo_of_head;
        end
      end
      if (w_go) begin
        n_planes <= n_planes + 1'b1;
        if (f_plane == f_lo) begin
          slot_busy[f_slot] <= 1'b1;
          meta[f_slot]      <= '{exp: f_q.exp, sign: f_q.sign, kg: f_kg};
          f_slot            <= f_slot + 1'b1;
          f_plane           <= 3'd7;
          if (f_kg + 5'd1 == 5'(cfg.n_kg)) begin
            f_active <= 1'b0;
            in_idx   <= in_idx + 1'b1;
          end else begin
            f_kg <= f_kg + 1'b1;
          end
        end else begin
          f_plane <= f_plane - 1'b1;
        end
      end
      // ---- weight planes arriving ----
      if (vrsp_valid && !tag_out.act && tag_out.last) slot_full[tag_out.slot] <= 1'b1;
      // ---- compute ----
      if (cmp_en) begin
        n_steps <= n_steps + 1'b1;
        if (c_b == $clog2(BATCHES)'(BATCHES - 1)) begin
          slot_full[c_slot] <= 1'b0;
          slot_busy[c_slot] <= 1'b0;
          c_slot            <= c_slot + 1'b1;
          c_b               <= '0;
        end else begin
          c_b <= c_b + 1'b1;
        end
      end
      // ---- post-processing: send partials ----
      if (running && exec_done && !d_active) begin
        running  <= 1'b0;
        d_active <= 1'b1;
        d_idx    <= '0;
      end
      if (d_active && inj_ready) begin
        if (d_idx == n_out) begin
          d_active <= 1'b0;
          drained  <= 1'b1;
        end
        d_idx <= d_idx + 1'b1;
      end
      // ---- results written back ----
      if (r_go) res_written <= res_written + 1'b1;
    end
  end

  // A read response always has a tag waiting for it.
  assert property (@(posedge clk) disable iff (!rst_n) vrsp_valid |-> tag_rvalid);
  // The IB never receives a word it has no room for.
  assert property (@(posedge clk) disable iff (!rst_n) ib_wr_valid |-> ib_wr_ready);
endmodule
