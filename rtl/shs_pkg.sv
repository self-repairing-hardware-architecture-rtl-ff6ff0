// shs_pkg -- shared constants and types of the self-healing tile.
//
// The tile has eight function positions. Each position is served first by an
// active B cell, then by its own passive T cell, then by an execution unit of
// an embryonic stem cell. Every cell runs a generic function block (GFB) whose
// operation and operand sources come from a 32-bit gene held in the cell's
// configuration memory.
//
// Sizes that follow the paper: 32-bit data, 8 B cells and 8 T cells, 4 stem
// cells of 2 execution units, 64 external input words, 4 operands per block.
// This design's own choices: the gene layout, the opcode set encoding, the
// operand-source numbering and the 2-bit syndrome and route encodings.
package shs_pkg;

  localparam int DW            = 32;  // data word width
  localparam int N_POS         = 8;   // function positions = B cells = T cells
  localparam int N_SIDE        = N_POS / 2; // positions per side (left/right)
  localparam int N_IN          = 64;  // external input words
  localparam int N_OPND        = 4;   // operands per block (North, West, East, South)
  localparam int N_STEM        = 4;   // embryonic stem cells
  localparam int N_EU_PER_STEM = 2;   // execution units per stem cell
  localparam int N_EU          = N_STEM * N_EU_PER_STEM;
  localparam int N_EU_SIDE     = N_EU / 2; // execution units per side
  localparam int POS_W         = $clog2(N_POS);

  // Operand sources: external words 0..63, committed position outputs
  // 64..71, then constant 0 and constant 1.
  localparam int N_SRC      = N_IN + N_POS + 2;
  localparam int SRC_W      = 7;
  localparam int SRC_POS0   = N_IN;
  localparam int SRC_ZERO   = N_IN + N_POS;
  localparam int SRC_ONE    = N_IN + N_POS + 1;

  // Operations of the generic function block. AND, OR and NOT are logical
  // (PLC BOOL: a non-zero word is true, the result is 0 or 1).
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,  // y = 0
    OP_AND   = 4'd1,  // y = a && b && c && d
    OP_OR    = 4'd2,  // y = a || b || c || d
    OP_NOT   = 4'd3,  // y = !a
    OP_ADD   = 4'd4,  // y = a + b
    OP_SUB   = 4'd5,  // y = a - b
    OP_MUL   = 4'd6,  // y = a * b (low 32 bits, signed)
    OP_MUX   = 4'd7,  // y = a ? b : c
    OP_CMP   = 4'd8,  // y = (a > b) signed
    OP_DELAY = 4'd9   // y = a of the previous execution
  } opcode_e;

  // One gene: the operation and the source of each operand.
  typedef struct packed {
    opcode_e                 op;
    logic [N_OPND-1:0][SRC_W-1:0] src;
  } gene_t;

  localparam int GENE_W = $bits(gene_t);

  // Health syndrome of one position, formed in the healing layer.
  typedef enum logic [1:0] {
    SYN_OK     = 2'd0,  // B cell healthy
    SYN_T      = 2'd1,  // B cell dead, served by its T cell
    SYN_STEM   = 2'd2,  // T cell dead too, needs a stem execution unit
    SYN_LOST   = 2'd3   // no healthy unit left for this position
  } syndrome_e;

  // Which unit drives a position's output multiplexer.
  typedef enum logic [1:0] {
    ROUTE_B    = 2'd0,
    ROUTE_T    = 2'd1,
    ROUTE_STEM = 2'd2,
    ROUTE_NONE = 2'd3
  } route_e;

  typedef logic [N_OPND-1:0][DW-1:0] opnd_t;

endpackage
