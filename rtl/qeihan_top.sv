// qeihan_top: the accelerator on the logic die of a 3D-stacked DRAM.
//
// MESH_X x MESH_Y = 4 x 4 tiles, one per vault, joined by a 2D mesh of
// routers. Tile (x, y) is tile number y*4 + x and owns vault y*4 + x; tile
// (0,0) is the central PE that reduces the partial outputs and runs the SFU.
// The DRAM dies are outside this module: each vault's command port
// (`cmd_valid`, `cmd`) and read return (`dram_rvalid`, `dram_rdata`) are
// ports of the top, indexed by vault number.
//
// Operation of one FC layer: the host writes each vault's inputs and weight
// bit planes into the DRAM (see qeihan_pkg for the layout), sets `cfg`
// (identical for all vaults), optionally loads the SFU table through
// `lut_*`, and pulses `start`. Every tile quantizes its own inputs, fetches
// only the needed weight bits, accumulates partial outputs for all outputs,
// and sends them to tile (0,0); that tile reduces, de-quantizes, applies the
// activation and pooling, and sends output i to vault i % 16, which stores it.
// `done` rises when every tile has finished. Per-tile statistics (pruned
// inputs, weight words read, compute steps, bank-conflict stalls) are
// outputs. The tile count, mesh, and per-tile organisation follow the paper.
module qeihan_top
  import qeihan_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  layer_cfg_t              cfg,
  input  logic                    start,
  output logic                    done,
  input  logic                    lut_we,
  input  logic [5:0]              lut_addr,
  input  fp16_t                   lut_data,
  output logic  [NUM_PE-1:0]      cmd_valid,
  output vreq_t [NUM_PE-1:0]      cmd,
  input  logic  [NUM_PE-1:0]      dram_rvalid,
  input  logic  [NUM_PE-1:0][31:0] dram_rdata,
  output logic  [NUM_PE-1:0][31:0] n_pruned,
  output logic  [NUM_PE-1:0][31:0] n_planes,
  output logic  [NUM_PE-1:0][31:0] n_steps,
  output logic  [NUM_PE-1:0][31:0] bank_stalls
);
  // Links, indexed by tile and direction 0 E, 1 W, 2 N, 3 S.
  logic  [NUM_PE-1:0][3:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [NUM_PE-1:0][3:0] in_flit, out_flit;
  logic  [NUM_PE-1:0]      tdone;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int T = y * MESH_X + x;
      // east neighbour
      if (x < MESH_X - 1) begin : g_e
        assign in_valid[T][0]  = out_valid[T+1][1];
        assign in_flit[T][0]   = out_flit[T+1][1];
        assign out_ready[T][0] = in_ready[T+1][1];
      end else begin : g_ne
        assign in_valid[T][0]  = 1'b0;
        assign in_flit[T][0]   = '0;
        assign out_ready[T][0] = 1'b0;
      end
      // west neighbour
      if (x > 0) begin : g_w
        assign in_valid[T][1]  = out_valid[T-1][0];
        assign in_flit[T][1]   = out_flit[T-1][0];
        assign out_ready[T][1] = in_ready[T-1][0];
      end else begin : g_nw
        assign in_valid[T][1]  = 1'b0;
        assign in_flit[T][1]   = '0;
        assign out_ready[T][1] = 1'b0;
      end
      // north neighbour
      if (y < MESH_Y - 1) begin : g_n
        assign in_valid[T][2]  = out_valid[T+MESH_X][3];
        assign in_flit[T][2]   = out_flit[T+MESH_X][3];
        assign out_ready[T][2] = in_ready[T+MESH_X][3];
      end else begin : g_nn
        assign in_valid[T][2]  = 1'b0;
        assign in_flit[T][2]   = '0;
        assign out_ready[T][2] = 1'b0;
      end
      // south neighbour
      if (y > 0) begin : g_s
        assign in_valid[T][3]  = out_valid[T-MESH_X][2];
        assign in_flit[T][3]   = out_flit[T-MESH_X][2];
        assign out_ready[T][3] = in_ready[T-MESH_X][2];
      end else begin : g_ns
        assign in_valid[T][3]  = 1'b0;
        assign in_flit[T][3]   = '0;
        assign out_ready[T][3] = 1'b0;
      end

      tile #(.X(2'(x)), .Y(2'(y))) u_tile (
        .clk, .rst_n, .cfg, .start, .done(tdone[T]),
        .lut_we, .lut_addr, .lut_data,
        .nin_valid(in_valid[T]), .nin_ready(in_ready[T]), .nin_flit(in_flit[T]),
        .nout_valid(out_valid[T]), .nout_ready(out_ready[T]), .nout_flit(out_flit[T]),
        .cmd_valid(cmd_valid[T]), .cmd(cmd[T]),
        .dram_rvalid(dram_rvalid[T]), .dram_rdata(dram_rdata[T]),
        .n_pruned(n_pruned[T]), .n_planes(n_planes[T]), .n_steps(n_steps[T]),
        .bank_stalls(bank_stalls[T])
      );
    end
  end

  assign done = &tdone;
endmodule
