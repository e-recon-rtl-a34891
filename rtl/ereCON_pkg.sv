// Shared constants and types of the E-ReCON ReRAM digital compute-in-memory macro.
//
// The macro is 16 Kb of 3T1R ReRAM cells split into 64 banks of 64 rows by 4 columns.
// Every bank holds 64 four-bit weights (one per row) and computes, per cycle, the dot
// product of one bit-plane of the 64 shared input activations with its weights. Inputs
// are fed bit-serially, most significant bit first, 1 to 8 bits. The bank, row, column,
// 10-bit adder-tree width and 1..8-bit input precision follow the paper; the command
// encoding, the configuration record and all widths after the adder tree are this
// design's own choices.
package ereCON_pkg;

  localparam int unsigned N_BANKS     = 64;  // banks in the macro
  localparam int unsigned N_ROWS      = 64;  // rows (weights) per bank
  localparam int unsigned N_COLS      = 4;   // columns per bank = weight bits per bank
  localparam int unsigned TREE_W      = 10;  // adder-tree result / local register width
  localparam int unsigned MAX_IN_BITS = 8;   // largest bit-serial input precision
  localparam int unsigned ACC_W       = 20;  // per-bank accumulator (own choice)
  localparam int unsigned PASS_W      = TREE_W + MAX_IN_BITS;  // one bit-serial pass
  localparam int unsigned LANE_W      = 26;  // signed peripheral lane width (own choice)
  localparam int unsigned GAMMA_W     = 8;   // batch-norm scale width (own choice)
  localparam int unsigned BETA_W      = 16;  // batch-norm offset width (own choice)

  // Full-adder cell flavours of the interleaved adder tree. Both compute the exact
  // full-adder function; the flavour only records which transistor-level cell the
  // position holds (10T pass-transistor cell or 28T static CMOS cell).
  typedef enum logic {FA_28T = 1'b0, FA_10T = 1'b1} fa_cell_e;

  // Operations accepted by the macro.
  typedef enum logic [1:0] {
    OP_WRITE   = 2'd0,  // program one row of all banks
    OP_READ    = 2'd1,  // read one row of all banks through the compute path
    OP_COMPUTE = 2'd2   // bit-serial multiply-accumulate over all rows and banks
  } op_e;

  // Per-compute configuration.
  typedef struct packed {
    logic [3:0] in_bits;    // input precision, 1..8 (1 = binary / spike inputs)
    logic       w8;         // 8-bit weights: bank 2k holds the low nibble, 2k+1 the high
    logic       acc_keep;   // add this pass to the previous result (dot products > 64)
    logic       partial;    // intermediate pass of a chain: output lanes hold their value
    logic       bn_en;      // apply batch normalisation
    logic       relu_en;    // apply ReLU
    logic       pool_en;    // feed the max-pool window
    logic       pool_start; // this output opens a new pooling window
  } cim_cfg_t;

  // One command.
  typedef struct packed {
    op_e                      op;
    logic [5:0]               row;     // row address for write / read
    logic [N_BANKS*N_COLS-1:0] wdata;  // write data, bank b's nibble at [4b+3:4b]
    cim_cfg_t                 cfg;
  } cim_cmd_t;

  // Word-line decoder modes.
  typedef enum logic [1:0] {
    WL_NONE = 2'd0,  // all word lines off
    WL_ONE  = 2'd1,  // only the addressed row (write, read)
    WL_ALL  = 2'd2   // every row (compute)
  } wl_mode_e;

  // Row input / enable modes.
  typedef enum logic [1:0] {
    IN_IDLE = 2'd0,  // IN and En low
    IN_CIM  = 2'd1,  // IN = selected bit of each activation, En = row mask
    IN_READ = 2'd2   // IN and En high on the addressed row only
  } in_mode_e;

  // Read/write bias applied to the columns.
  typedef enum logic [1:0] {
    BIAS_OFF   = 2'd0,  // BL = SL = low
    BIAS_WRITE = 2'd1,  // SET (BL high, SL low) for a 1, RESET (BL low, SL high) for a 0
    BIAS_READ  = 2'd2   // BL low, SL high: read / CIM condition of the truth table
  } bias_e;

endpackage
