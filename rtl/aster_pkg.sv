// aster_pkg: sizes, command opcodes and the packet format shared by the
// ASTER spiking-transformer processing-in-memory (PIM) design.
//
// Array sizes follow the area table of the design: 128 wordlines per
// subarray (128 mask registers and wordline drivers), 128 bitlines read by
// 16 converters that each serve 8 columns, four subarrays per tile and
// 4-bit activation entries. Widths that the design description leaves open
// (converter resolution, membrane width, buffer depths, packet layout) are
// choices of this implementation.
package aster_pkg;

  localparam int ROWS      = 128;           // wordlines per subarray
  localparam int COLS      = 128;           // bitlines per subarray
  localparam int ADC_SHARE = 8;             // columns sharing one converter
  localparam int NUM_ADC   = COLS / ADC_SHARE;
  localparam int ACT_BITS  = 4;             // bits per row in one activation entry
  localparam int ENTRY_W   = ROWS * ACT_BITS;
  localparam int ADC_BITS  = 8;
  localparam int MEM_W     = 16;            // membrane potential width
  localparam int GA_W      = 16;            // global accumulator lane width
  localparam int SLOTS     = 64;            // neuron slots in a membrane buffer
  localparam int NUM_SUB   = 4;             // subarrays per tile
  localparam int GB_DEPTH  = 256;           // global buffer entries
  localparam int LAYERS    = 8;             // encoder layers tracked for skipping
  localparam int CLASSES   = 128;           // logit lanes of the early-exit unit
  localparam int TILE_ID_W = 4;
  localparam logic [TILE_ID_W-1:0] HOST_ID = '1;

  // Bit-serial input precision (bits per activation).
  typedef enum logic [1:0] {
    PREC_1 = 2'd0,
    PREC_2 = 2'd1,
    PREC_4 = 2'd2
  } prec_e;

  // Where a subarray run sends its results.
  typedef enum logic [1:0] {
    RUN_LIF   = 2'd0,  // local LIF neurons, spikes to the global buffer
    RUN_PSUM  = 2'd1,  // partial sums summed in the global accumulator
    RUN_LOGIT = 2'd2   // as RUN_PSUM, result handed to the early-exit unit
  } run_mode_e;

  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_WRITE_ROW = 4'd1,   // program one crossbar row
    OP_PUSH_ACT  = 4'd2,   // push one activation entry into a subarray FIFO
    OP_RUN       = 4'd3,   // process one FIFO entry
    OP_CLR_MEM   = 4'd4,   // clear one membrane slot
    OP_WRITE_GB  = 4'd5,
    OP_READ_GB   = 4'd6,
    OP_READ_GA   = 4'd7,
    OP_POOL      = 4'd8,
    OP_SDSA      = 4'd9,
    OP_SKIP_CFG  = 4'd10,
    OP_EE_CFG    = 4'd11,
    OP_GB_TO_FIFO= 4'd12,  // move a global-buffer entry into a subarray FIFO
    OP_RESP      = 4'd15   // response travelling to the host
  } opcode_e;

  // Command / response packet. Field meaning depends on the opcode; see the
  // tile controller for the table.
  typedef struct packed {
    logic [TILE_ID_W-1:0] dest;
    opcode_e              op;
    logic [1:0]           sub;
    logic                 all;     // select all subarrays
    logic [7:0]           a0;
    logic [7:0]           a1;
    logic [7:0]           a2;
    logic [7:0]           a3;
    logic [15:0]          arg0;
    logic [15:0]          arg1;
    logic [7:0]           flags;
    logic [ENTRY_W-1:0]   data;
  } pkt_t;

  // Number of timesteps packed in one activation entry at a given precision.
  function automatic int unsigned steps_per_entry(prec_e p);
    case (p)
      PREC_1:  return 4;
      PREC_2:  return 2;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC_1:  return 1;
      PREC_2:  return 2;
      default: return 4;
    endcase
  endfunction

endpackage
