// procrustes_pkg: types and constants shared by the accelerator's modules.
//
// The array geometry (16x16 PEs), the FP32 datatype, the 128 KB global buffer
// and the 1 KB per-PE register file are the paper's configuration. The CSB
// block size limit (16 positions, one 16-bit mask per block), the number of
// blocks a PE holds (two half-tiles) and every encoding below are this
// design's own choices.
//
// real_to_fp32() is an elaboration-time helper that rounds a real constant to
// the nearest IEEE-754 single (round to nearest even); it is used to build
// FP32 constants such as the quantile estimator's multiplicative factors.
package procrustes_pkg;

  localparam int unsigned FP_W = 32;  // datatype width: IEEE-754 single
  typedef logic [FP_W-1:0] fp32_t;

  // Training phase executed by a pass (Fig. 2 of the paper: fw / bw / wu).
  typedef enum logic [1:0] {
    PH_FW = 2'd0,  // forward: weights from CSB + WR initial values
    PH_BW = 2'd1,  // backward: as forward, block read in rotated order
    PH_WU = 2'd2   // weight update: CSB operand is sparse activations, no WR
  } phase_e;

  // Kinds of word carried by the horizontal (row) multicast bus.
  typedef enum logic [1:0] {
    HW_MASK  = 2'd0,  // CSB mask of a block slot
    HW_GRAD  = 2'd1,  // one packed value of a block slot
    HW_WBASE = 2'd2   // dense weight index of position 0 of a block slot
  } hkind_e;

  // Commands accepted by the controller.
  typedef enum logic [1:0] {
    CMD_PASS      = 2'd0,  // one K,N work pass over the PE array
    CMD_WRITEBACK = 2'd1,  // stream a GLB region to DRAM through the QE
    CMD_SET_SCALE = 2'd2,  // load the WR scaling factor
    CMD_DECAY     = 2'd3   // scale <- lambda * scale (initial-weight decay)
  } cmd_e;

  // Round a real to the nearest single-precision value (normals only;
  // tiny values flush to zero, huge ones saturate to infinity).
  // CSB block geometry held by one PE (this design's choice): a block covers at
  // most BLOCK_MAX dense positions (a 3x3 kernel uses 9, a 4x4 FC fragment 16)
  // and a PE holds PE_SLOTS blocks, i.e. the two half-tiles of a work tile.
  localparam int unsigned BLOCK_MAX = 16;
  localparam int unsigned POS_W     = $clog2(BLOCK_MAX);
  localparam int unsigned PE_SLOTS  = 2;
  localparam int unsigned SLOT_W    = 1;
  localparam int unsigned SCALE_W   = 14;  // WR integer scaling factor width
  localparam int unsigned N_RNG     = 3;   // xorshift generators per WR unit

  typedef logic [BLOCK_MAX-1:0] mask_t;

  // Horizontal (per-K-row) multicast bus: weights and their CSB metadata.
  typedef struct packed {
    logic              valid;
    hkind_e            kind;
    logic [SLOT_W-1:0] slot;
    logic [POS_W-1:0]  addr;
    fp32_t             data;
  } hbus_t;

  // Vertical (per-N-column) multicast bus: activations.
  typedef struct packed {
    logic             valid;
    logic [POS_W-1:0] addr;
    fp32_t            data;
  } vbus_t;

  // Pass configuration broadcast to every PE.
  typedef struct packed {
    phase_e                  phase;
    logic [POS_W:0]          blk_len;  // dense positions per block, 1..BLOCK_MAX
    logic [SCALE_W-1:0]      scale;    // WR scaling factor; 0 = initial weights gone
    logic [N_RNG-1:0][31:0]  seeds;    // WR seeds, one per xorshift generator
  } pe_cfg_t;

  localparam int unsigned GLB_AW_W = 15;  // word address in the 128 KB GLB

  // Command configuration given to the controller with each command.
  typedef struct packed {
    phase_e                 phase;
    logic                   lb_en;      // pair half-tiles through the load balancer
    logic [POS_W:0]         blk_len;    // dense positions per CSB block
    logic [SCALE_W-1:0]     scale;      // CMD_SET_SCALE: new WR scaling factor
    logic [N_RNG-1:0][31:0] seeds;      // WR seeds
    logic [GLB_AW_W-1:0]    ptr_base;   // CSB pointer array (2*ROWS+1 words)
    logic [GLB_AW_W-1:0]    mask_base;  // CSB mask array (one word per block)
    logic [GLB_AW_W-1:0]    wgt_base;   // CSB weight (packed value) array
    logic [GLB_AW_W-1:0]    act_base;   // activations, blk_len words per column
    logic [GLB_AW_W-1:0]    out_base;   // partial sums, word out_base + b*COLS + n
    logic [31:0]            wid_base;   // dense weight index of block 0, position 0
    logic [GLB_AW_W-3:0]    wb_line;    // CMD_WRITEBACK: first GLB line
    logic [GLB_AW_W-3:0]    wb_lines;   // CMD_WRITEBACK: number of lines
    logic                   qe_filter;  // CMD_WRITEBACK: 1 = gradients, filter by QE
  } ctrl_cfg_t;

  // initial-weight decay factor lambda = 0.9 as a 16-bit fraction
  localparam logic [15:0] LAMBDA_Q16 = 16'd58982;

  function automatic fp32_t real_to_fp32(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d  = $realtobits(r);
    s  = d[63];
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (d[62:0] == 63'd0 || e <= 0) return {s, 31'd0};
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin
      m = 24'd0;
      e = e + 1;
    end
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

endpackage
