// mipu_pkg: shared types and constants of the messaging-based processing fabric.
//
// Every transfer in the fabric is one 64-bit message. Its five fields, from the
// least significant bit, are the present opcode [3:0], the present destination
// [15:4], a 32-bit IEEE 754 value [47:16], the next opcode [51:48] and the next
// destination [63:52]. A SiteO that executes a message keeps the next opcode
// and next destination and uses them to build the message it sends on.
//
// The field positions and the thirteen opcode encodings follow the published
// instruction table. Opcode 4'b0000 ("none") marks an empty next opcode, as in
// the published message examples. Opcode 4'b1110 (OP_CNT, sets the fan-in count
// of a SiteO) is this design's own addition: the counter it programs is part of
// every SiteO, but no message for loading it is defined in the instruction set.
//
// A 12-bit destination addresses one of 4096 SiteOs (one Block). The address is
// hierarchical: bits [1:0] column and [3:2] row of the SiteO inside its SiteM,
// [5:4] column and [7:6] row of the SiteM inside its Tile, [9:8] column and
// [11:10] row of the Tile inside the Block. Address 16*k+j is therefore SiteO j
// of SiteM k, counted row by row, as in the published examples.
package mipu_pkg;

  typedef enum logic [3:0] {
    OP_NONE   = 4'b0000,
    OP_PROG   = 4'b0001,
    OP_A_MUL  = 4'b0010,
    OP_RELU   = 4'b0011,
    OP_A_ADD  = 4'b0100,
    OP_A_SUB  = 4'b0101,
    OP_A_DIV  = 4'b0110,
    OP_A_ADDS = 4'b0111,
    OP_A_SUBS = 4'b1000,
    OP_A_MULS = 4'b1001,
    OP_A_DIVS = 4'b1010,
    OP_AV_ADD = 4'b1011,
    OP_CMP    = 4'b1100,
    OP_UPDATE = 4'b1101,
    OP_CNT    = 4'b1110
  } opcode_e;

  typedef logic [11:0] addr_t;

  typedef struct packed {
    addr_t       next_dest;   // [63:52]
    logic [3:0]  next_op;     // [51:48]
    logic [31:0] value;       // [47:16]
    addr_t       dest;        // [15:4]
    logic [3:0]  op;          // [3:0]
  } msg_t;

  // Operations of the floating-point unit.
  typedef enum logic [2:0] {
    FPU_ADD  = 3'd0,
    FPU_SUB  = 3'd1,
    FPU_MUL  = 3'd2,
    FPU_DIV  = 3'd3,
    FPU_MAX  = 3'd4,
    FPU_RELU = 3'd5,
    FPU_AVG  = 3'd6,
    FPU_PASS = 3'd7
  } fpu_op_e;

  // Geometry: 4x4 SiteOs per SiteM, 4x4 SiteMs per Tile, 4x4 Tiles per Block.
  localparam int unsigned SITEM_DIM = 4;
  localparam int unsigned TILE_DIM  = 4;
  localparam int unsigned BLOCK_DIM = 4;

  // Global row (0..63) of the SiteO a destination names.
  function automatic logic [5:0] addr_row(addr_t a);
    return {a[11:10], a[7:6], a[3:2]};
  endfunction

  // Global column (0..63) of the SiteO a destination names.
  function automatic logic [5:0] addr_col(addr_t a);
    return {a[9:8], a[5:4], a[1:0]};
  endfunction

  // Destination of the SiteO at a global row and column.
  function automatic addr_t make_addr(logic [5:0] row, logic [5:0] col);
    return {row[5:4], col[5:4], row[3:2], col[3:2], row[1:0], col[1:0]};
  endfunction

  // Stream opcodes build a new message from the result; the others update the
  // stored value of the SiteO in place.
  function automatic logic is_stream(logic [3:0] op);
    return op inside {OP_A_ADDS, OP_A_SUBS, OP_A_MULS, OP_A_DIVS, OP_RELU};
  endfunction

  function automatic fpu_op_e fpu_op_of(logic [3:0] op);
    case (op)
      OP_A_ADD, OP_A_ADDS: return FPU_ADD;
      OP_A_SUB, OP_A_SUBS: return FPU_SUB;
      OP_A_MUL, OP_A_MULS: return FPU_MUL;
      OP_A_DIV, OP_A_DIVS: return FPU_DIV;
      OP_AV_ADD:           return FPU_AVG;
      OP_CMP:              return FPU_MAX;
      OP_RELU:             return FPU_RELU;
      default:             return FPU_PASS;
    endcase
  endfunction

endpackage
