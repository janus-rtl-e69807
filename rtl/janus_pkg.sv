// janus_pkg: types and constants shared by the JANUS core RTL.
//
// The JANUS core is a 4x4 torus of processing elements (SPs) plus an I/O
// processor (IOP). Two link widths recur and are given by the paper: the
// IOP-SP point-to-point links carry 2 bytes per clock in each direction, the
// SP-SP nearest-neighbour links 4 bytes per clock. Everything else here (the
// command opcodes of the SP, the worm header layout, the device IDs as mask
// bits) is this design's own encoding, chosen to be simple; the device IDs
// themselves are the ones printed in the IOP block diagram.
package janus_pkg;

  // ---- array geometry (paper: 4 x 4 grid with periodic boundaries) -------
  localparam int unsigned GRID_X = 4;
  localparam int unsigned GRID_Y = 4;
  localparam int unsigned N_SP   = GRID_X * GRID_Y;

  // ---- link words --------------------------------------------------------
  // IOP <-> SP: 2 bytes per clock, full duplex.
  typedef struct packed {
    logic        valid;
    logic [15:0] data;
  } iop_word_t;

  // SP <-> SP: 4 bytes per clock, full duplex.
  typedef struct packed {
    logic        valid;
    logic [31:0] data;
  } nn_word_t;

  // Directions of the nearest-neighbour links of one SP.
  typedef enum logic [1:0] {DIR_XP = 2'd0, DIR_XM = 2'd1, DIR_YP = 2'd2, DIR_YM = 2'd3} dir_e;

  // ---- multidev device IDs (as printed in the IOP block diagram) ---------
  localparam int unsigned DEV_MEM0  = 0;  // memory interface ("0 or 3")
  localparam int unsigned DEV_PROG1 = 1;  // program interface ("1 or 2")
  localparam int unsigned DEV_PROG2 = 2;
  localparam int unsigned DEV_MEM3  = 3;
  localparam int unsigned DEV_SPS   = 4;  // SP interface
  localparam int unsigned DEV_SYNC  = 5;  // sync interface
  localparam int unsigned DEV_TEMP  = 6;  // temperature interface
  localparam int unsigned N_DEV     = 8;  // width of the devSel mask

  // Device bus of the multidev, driven by the stream router.
  typedef struct packed {
    logic [N_DEV-1:0] devsel;  // one bit per device ID
    logic             dv;      // data valid
    logic [15:0]      data;    // dataIn
    logic             first;   // first payload word of a worm
    logic             last;    // last payload word of a worm
  } dev_bus_t;

  // ---- SP command set (this design's encoding) ---------------------------
  // Header word: [15:12] opcode, [11:0] operand as listed.
  typedef enum logic [3:0] {
    SP_NOP     = 4'h0,
    SP_WR16    = 4'h1,  // [2:0] target; then z, chunk, data
    SP_RD16    = 4'h2,  // [2:0] target; then z, chunk -> 1 reply word
    SP_WR_LUT  = 4'h3,  // [3:0] entry (Ising [2:0]); then data[31:16], data[15:0]
    SP_SEED    = 4'h4,  // then data[31:16], data[15:0] (shifted into RNG)
    SP_RUN     = 4'h5,  // [0] Ising mode (0 Metropolis, 1 heat bath); then sweeps
    SP_STATUS  = 4'h6,  // -> 2 reply words: {busy,sweeps_done[14:0]}, cycles
    SP_NN_SEND = 4'h7,  // [1:0] direction; then data[31:16], data[15:0]
    SP_NN_READ = 4'h8   // [1:0] direction -> 2 reply words (hi, lo)
  } sp_op_e;

  // Memory targets of SP_WR16 / SP_RD16 (Ising firmware; the Potts firmware
  // uses 0/1 M0 bits, 2/3 M1 bits, 4/5/6 Jx/Jy/Jz).
  localparam logic [2:0] TGT_M0 = 3'd0;  // mixed replica 0
  localparam logic [2:0] TGT_M1 = 3'd1;  // mixed replica 1
  localparam logic [2:0] TGT_JX = 3'd2;  // couplings along x
  localparam logic [2:0] TGT_JY = 3'd3;  // couplings along y
  localparam logic [2:0] TGT_JZ = 3'd4;  // couplings along z

  // SP firmware: which spin model the SP is configured for.
  typedef enum logic {FW_ISING = 1'b0, FW_POTTS = 1'b1} fw_e;

  // Update algorithms of the Ising engine.
  typedef enum logic {ALG_METROPOLIS = 1'b0, ALG_HEATBATH = 1'b1} alg_e;

endpackage
