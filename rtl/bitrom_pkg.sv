// bitrom_pkg -- types and constants shared by the BitROM accelerator.
//
// Holds the ternary weight code read out of the ROM array, the analog
// bitline levels that stand for each weight, the activation modes, the
// host command format and the KV-cache address used by the decode-refresh
// eDRAM path. The Falcon3-1B mapping numbers (18 layers in 6 partitions of
// 3, 4 KV heads, 6 batches) follow the paper; the head dimension (256) and
// the 16-bit KV element are this design's reading of that model and of the
// 13.5 MB on-die KV budget. The ROM contents function at the end stands in
// for the mask programming: a real chip would carry the trained weights.
package bitrom_pkg;

  // ---------------------------------------------------------------- ROM array
  localparam int unsigned ROM_ROWS       = 2048;  // wordlines per macro
  localparam int unsigned ROM_COLS       = 1024;  // columns per macro
  localparam int unsigned ROM_GROUP_COLS = 8;     // columns sharing one TriMLA
  localparam int unsigned ROM_GROUPS     = ROM_COLS / ROM_GROUP_COLS;  // 128

  // Comparator pair output {MSB, LSB}, as in the readout truth table:
  // MSB says "weight is non-zero" (TriMLA enable), LSB picks add or subtract.
  typedef enum logic [1:0] {
    TC_ZERO = 2'b00,   // weight  0 : accumulator disabled (skip)
    TC_DC   = 2'b01,   // not produced by a healthy cell: treated as skip
    TC_NEG  = 2'b10,   // weight -1 : subtraction
    TC_POS  = 2'b11    // weight +1 : addition
  } tern_code_t;

  // Level a bitline settles to after a read, named by the signal line the
  // cell ties it to: digit '0' = 1/2 VDD, '+1' = 1/4 VDD, '-1' = VSS.
  typedef enum logic [1:0] {
    BL_HALF    = 2'd0,
    BL_QUARTER = 2'd1,
    BL_VSS     = 2'd2,
    BL_FLOAT   = 2'd3   // no column selected / still precharged
  } bl_level_t;

  // Side of the array used as bitlines: the other side drives source lines.
  typedef enum logic {
    SIDE_E = 1'b0,
    SIDE_O = 1'b1
  } side_t;

  // Activation format of the model being run.
  typedef enum logic {
    ACT_A4 = 1'b0,   // one pass, 4-bit signed activations
    ACT_A8 = 1'b1    // two passes: signed high nibble, then unsigned low nibble
  } act_mode_t;

  // --------------------------------------------------------------- model map
  localparam int unsigned N_LAYERS        = 18;
  localparam int unsigned N_PART          = 6;
  localparam int unsigned LAYERS_PER_PART = 3;
  localparam int unsigned N_BATCH         = 6;
  localparam int unsigned KV_HEADS        = 4;
  localparam int unsigned HEAD_DIM        = 256;
  localparam int unsigned ONDIE_TOKENS    = 32;
  localparam int unsigned MAX_SEQ         = 256;
  localparam int unsigned MACROS_PER_LAYER = 15; // 60 Mi ternary weights per layer / 4 Mi per macro

  // Arithmetic widths
  localparam int unsigned MACRO_OUT_W = 24;   // signed result of one output channel
  localparam int unsigned EXT_W       = 32;   // external memory word

  // ---------------------------------------------------------------- commands
  typedef enum logic [2:0] {
    OP_LOAD_ACT  = 3'd0,  // external memory -> activation buffers of a layer
    OP_LORA_DOWN = 3'd1,  // LoRA A x : stream A, keep the rank-16 vector
    OP_RUN       = 3'd2,  // ternary projection (+ LoRA B) -> quantize -> destination
    OP_KV_READ   = 3'd3,  // read the KV-cache of one head for one decode step
    OP_NEXT_SLOT = 3'd4   // advance the batch pipeline by one slot
  } opcode_t;

  typedef enum logic [1:0] {
    Q_INT4  = 2'd0,
    Q_INT8  = 2'd1,
    Q_INT16 = 2'd2
  } qmode_t;

  typedef struct packed {
    opcode_t     op;
    logic [5:0]  part_mask;   // partitions taking part (RUN); lowest set bit otherwise
    logic [1:0]  layer;       // layer inside the partition, 0..2
    logic [3:0]  macro;       // macro inside the layer, 0..14
    logic [31:0] src_addr;    // external source (activations, LoRA weights)
    logic [31:0] dst_addr;    // external destination of RUN results
    logic [13:0] count;       // LOAD_ACT: words; LORA_DOWN: words per rank row;
                              // RUN: output channels; KV_READ: tokens
    logic [3:0]  n_steps;     // RUN: 1024-weight row reads per output channel
    logic [11:0] row_base;    // RUN: first (wordline, side) pair
    act_mode_t   act_mode;
    logic        lora_en;
    logic [4:0]  lora_shift;  // right shift of the LoRA term before it is added
    logic [4:0]  h_shift;     // LORA_DOWN: right shift of A x before 8-bit saturation
    logic [7:0]  q_scale;     // RUN: quantizer scale
    logic [4:0]  q_shift;     // RUN: quantizer right shift
    qmode_t      q_mode;
    logic        dest_kv;     // RUN: results go to the KV-cache, not to dst_addr
    logic        kv_sel;      // 0 = Key, 1 = Value
    logic [1:0]  head;        // KV_READ: KV head
    logic [7:0]  token;       // RUN with dest_kv: token index of the new entry
  } cmd_t;

  // --------------------------------------------------------------- KV-cache
  typedef struct packed {
    logic [2:0] batch;
    logic [4:0] layer;
    logic [1:0] head;
    logic       kv;
    logic [7:0] token;
    logic [7:0] elem;
  } kv_addr_t;

  localparam int unsigned EDRAM_ROWS = N_BATCH * N_LAYERS * KV_HEADS * 2 * ONDIE_TOKENS; // 27648
  localparam int unsigned EDRAM_COLS = HEAD_DIM;   // 16-bit elements per row: 512 bytes

  // ----------------------------------------------------------- ROM contents
  // Ternary weight stored at (row, column, side) of a macro whose contents
  // are selected by seed. A mixing hash gives a sparse, sign-balanced pattern
  // (half zeros, a quarter each of +1 and -1).
  function automatic tern_code_t rom_weight(input logic [31:0] seed,
                                            input logic [10:0] row,
                                            input logic [9:0]  col,
                                            input side_t       side);
    logic [31:0] h;
    h = {10'd0, row, col, side} * 32'h9E37_79B1;
    h = h ^ seed;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA77;
    h = h ^ (h >> 13);
    case (h[31:30])
      2'b01:   return TC_POS;
      2'b10:   return TC_NEG;
      default: return TC_ZERO;
    endcase
  endfunction

  // Integer value of a comparator code.
  function automatic int tern_value(input tern_code_t c);
    case (c)
      TC_POS:  return 1;
      TC_NEG:  return -1;
      default: return 0;
    endcase
  endfunction

endpackage
