// qeihan_pkg: sizes, types and helper functions shared by the near-data
// processing accelerator. The accelerator sits on the logic die of a
// 3D-stacked DRAM; every vault has one tile (router, vault controller,
// PE controller and PE). Activations are quantized to 4-bit base-2
// exponents, weights are INT8 stored one bit plane per DRAM bank, and a PE
// multiplies by shifting.
//
// Numbers taken from the paper: 16 vaults/PEs in a 4x4 mesh, 4 DRAM dies and
// 4 banks per vault per die, d = 16 adders per PE, a 32-bit vault bus
// (M = 32 weights per request), 8-bit weights, 4-bit exponents in [-8, 7],
// 16-bit partial outputs, 2 KB OB, 64 B IB, 64 B WB. Everything else here
// (flit format, DRAM address layout, timing) is this design's own choice.
package qeihan_pkg;

  // ---------------- array and datapath sizes ----------------
  localparam int unsigned MESH_X    = 4;
  localparam int unsigned MESH_Y    = 4;
  localparam int unsigned NUM_PE    = MESH_X * MESH_Y;   // 16 vaults / PEs
  localparam int unsigned D_ADD     = 16;                // adders per PE (d)
  localparam int unsigned M_BUS     = 32;                // vault bus width = weights per request (M)
  localparam int unsigned W_BITS    = 8;                 // INT8 weights
  localparam int unsigned EXP_BITS  = 4;                 // LOG2 exponent width
  localparam int          EXP_MIN   = -8;                // also the "pruned" code
  localparam int          EXP_MAX   = 7;
  localparam int unsigned ACC_W     = 16;                // partial outputs
  localparam int unsigned FP_W      = 16;                // FP16 activations
  localparam int unsigned BATCHES   = M_BUS / D_ADD;     // ADD batches per weight group (2)

  // ---------------- on-chip buffers (per PE) ----------------
  localparam int unsigned OB_BYTES   = 2048;
  localparam int unsigned OB_ENTRIES = OB_BYTES * 8 / ACC_W;   // 1024 partial outputs
  localparam int unsigned OB_ROWS    = OB_ENTRIES / D_ADD;     // 64 rows of d lanes
  localparam int unsigned IB_BYTES   = 64;
  localparam int unsigned IB_ENTRIES = IB_BYTES * 8 / FP_W;    // 32 FP16, two halves of 16
  localparam int unsigned WB_BYTES   = 64;
  localparam int unsigned WB_SLOTS   = WB_BYTES * 8 / (W_BITS * M_BUS); // 2 (double buffer)

  // ---------------- DRAM of one vault ----------------
  localparam int unsigned DRAM_DIES  = 4;
  localparam int unsigned DRAM_BANKS = 4;                // per vault per die
  localparam int unsigned ROW_W      = 22;               // 32-bit words per bank: 2^22 (256 MB / vault)

  // Layout of a vault (this design's choice). 16 banks = 4 dies x 4 banks.
  //   weight plane b of kernel group kg for local input i:
  //       die {kg[0], b[2]}, bank b[1:0], row w_row_base + i*16 + kg[4:1]
  //     i.e. the paper's layout (bit b0..b3 in banks 1-4 of one die, b4..b7 in
  //     the next die), with odd kernel groups on the other two dies so that
  //     two consecutive groups never wait for the same bank.
  //   input activation word w (two FP16): bank index w%16, row in_row_base + w/16
  //   output activation i (one FP16 per word): bank index i%16, row out_row_base + i/16
  typedef logic signed [EXP_BITS-1:0] exp_t;
  typedef logic        [FP_W-1:0]     fp16_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic        [W_BITS-1:0]   wplane_sel_t;

  // Result of the LOG2 quantizer.
  typedef struct packed {
    logic sign;     // sign of the activation (add or subtract)
    exp_t exp;      // clipped Round(log2|x|)
    logic prune;    // zero or clipped to EXP_MIN: no work, no weight fetch
  } lq_t;

  // DRAM address inside one vault.
  typedef struct packed {
    logic [1:0]       die;
    logic [1:0]       bank;
    logic [ROW_W-1:0] row;
  } vaddr_t;

  // Request from a PE controller to its vault controller.
  typedef struct packed {
    logic        we;
    vaddr_t      addr;
    logic [31:0] wdata;
  } vreq_t;

  // ---------------- network ----------------
  typedef enum logic [1:0] {
    FL_PARTIAL = 2'd0,   // partial output of one PE to the central PE
    FL_DONE    = 2'd1,   // a PE has sent all its partial outputs
    FL_RESULT  = 2'd2    // final FP16 activation to the vault that stores it
  } flit_kind_t;

  typedef struct packed {
    logic [1:0]  dst_x;
    logic [1:0]  dst_y;
    logic [3:0]  src;
    flit_kind_t  kind;
    logic [9:0]  idx;     // output index (OB entry)
    logic [15:0] data;    // int16 partial or FP16 result
  } flit_t;

  // Router port numbering.
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_EAST  = 1;  // x+1
  localparam int unsigned P_WEST  = 2;  // x-1
  localparam int unsigned P_NORTH = 3;  // y+1
  localparam int unsigned P_SOUTH = 4;  // y-1
  localparam int unsigned NPORTS  = 5;

  // Layer configuration, same for every tile (FC layer, input-stationary).
  typedef struct packed {
    logic [9:0]       n_in;        // inputs held by each vault
    logic [5:0]       n_kg;        // groups of M_BUS kernels (outputs = 32*n_kg)
    logic [ROW_W-1:0] w_row_base;  // first row of the weight planes
    logic [ROW_W-1:0] in_row_base; // first row of the input activations
    logic [ROW_W-1:0] out_row_base;// first row of the output activations
    logic signed [5:0] scale_exp;  // de-quantization scale 2^scale_exp
    logic [1:0]       act_mode;    // 0 none, 1 ReLU, 2 LUT
    logic [1:0]       pool_log2;   // max pooling over 2^pool_log2 outputs
  } layer_cfg_t;

  // DRAM address of one weight bit plane.
  function automatic vaddr_t w_addr(input logic [ROW_W-1:0] base, input logic [9:0] in_idx,
                                    input logic [4:0] kg, input logic [2:0] plane);
    vaddr_t a;
    a.die  = {kg[0], plane[2]};
    a.bank = plane[1:0];
    a.row  = base + ROW_W'({in_idx, kg[4:1]});
    return a;
  endfunction

  // DRAM address of a word interleaved over all 16 banks of the vault.
  function automatic vaddr_t lin_addr(input logic [ROW_W-1:0] base, input logic [9:0] word);
    vaddr_t a;
    a.die  = word[3:2];
    a.bank = word[1:0];
    a.row  = base + ROW_W'(word[9:4]);
    return a;
  endfunction

  // Saturating signed add of two ACC_W values.
  function automatic acc_t sat_add(input acc_t a, input acc_t b);
    logic signed [ACC_W:0] s;
    s = {a[ACC_W-1], a} + {b[ACC_W-1], b};
    if (s > $signed({2'b00, {(ACC_W-1){1'b1}}}))       return {1'b0, {(ACC_W-1){1'b1}}};
    else if (s < $signed({2'b11, {(ACC_W-1){1'b0}}}))  return {1'b1, {(ACC_W-1){1'b0}}};
    else                                               return s[ACC_W-1:0];
  endfunction

endpackage
