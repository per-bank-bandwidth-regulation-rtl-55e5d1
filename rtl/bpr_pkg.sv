// Shared types and constants of the per-bank bandwidth regulation unit.
//
// The unit sits on the TileLink Cached (TL-C) edges between the cores and the
// shared system bus. This package holds the TL-C channel payload structs (the
// valid/ready pair of each channel is carried beside the struct, not inside
// it), the TileLink opcodes that matter for access accounting, the periphery
// bus (TL-UL) payload structs used for the memory-mapped registers, and the
// register map of those registers.
//
// The paper names the channels A to E and says only channel A is monitored and
// throttled; field widths, the beat size and the register offsets are this
// design's choices (Rocket-Chip-like widths: 32-bit physical address, 8-byte
// system bus beats, 32-bit MMIO words).
package bpr_pkg;

  // ---------------------------------------------------------------- TL-C edge
  localparam int unsigned TL_ADDR_W   = 32;  // physical address bits
  localparam int unsigned TL_DATA_W   = 64;  // system bus beat width
  localparam int unsigned TL_BEAT_B   = TL_DATA_W / 8;
  localparam int unsigned TL_SIZE_W   = 4;   // log2(bytes) of a message
  localparam int unsigned TL_SOURCE_W = 4;
  localparam int unsigned TL_SINK_W   = 4;

  // Channel A opcodes (TileLink 1.8).
  typedef enum logic [2:0] {
    A_PUT_FULL    = 3'd0,
    A_PUT_PARTIAL = 3'd1,
    A_ARITHMETIC  = 3'd2,
    A_LOGICAL     = 3'd3,
    A_GET         = 3'd4,
    A_INTENT      = 3'd5,
    A_ACQ_BLOCK   = 3'd6,
    A_ACQ_PERM    = 3'd7
  } tl_a_op_e;

  typedef struct packed {
    tl_a_op_e                 opcode;
    logic [2:0]               param;
    logic [TL_SIZE_W-1:0]     size;
    logic [TL_SOURCE_W-1:0]   source;
    logic [TL_ADDR_W-1:0]     address;
    logic [TL_BEAT_B-1:0]     mask;
    logic [TL_DATA_W-1:0]     data;
    logic                     corrupt;
  } tl_a_t;

  typedef struct packed {
    logic [2:0]               opcode;
    logic [1:0]               param;
    logic [TL_SIZE_W-1:0]     size;
    logic [TL_SOURCE_W-1:0]   source;
    logic [TL_ADDR_W-1:0]     address;
    logic [TL_BEAT_B-1:0]     mask;
    logic [TL_DATA_W-1:0]     data;
    logic                     corrupt;
  } tl_b_t;

  typedef struct packed {
    logic [2:0]               opcode;
    logic [2:0]               param;
    logic [TL_SIZE_W-1:0]     size;
    logic [TL_SOURCE_W-1:0]   source;
    logic [TL_ADDR_W-1:0]     address;
    logic [TL_DATA_W-1:0]     data;
    logic                     corrupt;
  } tl_c_t;

  typedef struct packed {
    logic [2:0]               opcode;
    logic [1:0]               param;
    logic [TL_SIZE_W-1:0]     size;
    logic [TL_SOURCE_W-1:0]   source;
    logic [TL_SINK_W-1:0]     sink;
    logic                     denied;
    logic [TL_DATA_W-1:0]     data;
    logic                     corrupt;
  } tl_d_t;

  typedef struct packed {
    logic [TL_SINK_W-1:0]     sink;
  } tl_e_t;

  // Opcodes whose channel A message carries data (one beat per TL_BEAT_B bytes).
  function automatic logic a_has_data(tl_a_op_e op);
    return (op == A_PUT_FULL) || (op == A_PUT_PARTIAL) ||
           (op == A_ARITHMETIC) || (op == A_LOGICAL);
  endfunction

  // Number of beats of a channel A message, minus one.
  function automatic logic [7:0] a_beats_m1(tl_a_op_e op, logic [TL_SIZE_W-1:0] size);
    logic [31:0] bytes;
    bytes = 32'd1 << size;
    if (!a_has_data(op) || bytes <= TL_BEAT_B) return 8'd0;
    return 8'((bytes / TL_BEAT_B) - 1);
  endfunction

  // --------------------------------------------------- periphery bus (TL-UL)
  localparam int unsigned PB_ADDR_W   = 12;  // one 4 KiB register page
  localparam int unsigned PB_DATA_W   = 32;
  localparam int unsigned PB_SOURCE_W = 4;

  localparam logic [2:0] PB_A_PUT_FULL    = 3'd0;
  localparam logic [2:0] PB_A_PUT_PARTIAL = 3'd1;
  localparam logic [2:0] PB_A_GET         = 3'd4;
  localparam logic [2:0] PB_D_ACK         = 3'd0;
  localparam logic [2:0] PB_D_ACK_DATA    = 3'd1;

  typedef struct packed {
    logic [2:0]               opcode;
    logic [1:0]               size;
    logic [PB_SOURCE_W-1:0]   source;
    logic [PB_ADDR_W-1:0]     address;
    logic [PB_DATA_W/8-1:0]   mask;
    logic [PB_DATA_W-1:0]     data;
  } pb_a_t;

  typedef struct packed {
    logic [2:0]               opcode;
    logic [1:0]               size;
    logic [PB_SOURCE_W-1:0]   source;
    logic                     denied;
    logic [PB_DATA_W-1:0]     data;
  } pb_d_t;

  // ------------------------------------------------------------ register map
  // Byte offsets inside the register page; every register is one 32-bit word.
  localparam logic [PB_ADDR_W-1:0] RA_RPR = 12'h000;  // Regulation Period Register
  localparam logic [PB_ADDR_W-1:0] RA_ABR = 12'h100;  // + 4*domain: Access Budget
  localparam logic [PB_ADDR_W-1:0] RA_DAR = 12'h200;  // + 4*core: Domain Assignment
  localparam logic [PB_ADDR_W-1:0] RA_RER = 12'h300;  // + 4*core: Regulation Enable
  localparam logic [PB_ADDR_W-1:0] RA_BAC = 12'h400;  // + 4*(domain*banks+bank), read only
  localparam logic [PB_ADDR_W-1:0] RA_MON = 12'h800;  // + 4*(core*banks+bank), write clears


endpackage
