// gfb -- generic function block: the execution unit every cell carries.
//
// It applies the operation named by the gene's opcode to four operands a..d
// (the paper's North, West, East and South inputs). AND, OR and NOT are
// logical operations of PLC BOOL type: a non-zero operand is true and the
// result is 0 or 1. ADD, SUB, MUL (low 32 bits, signed), MUX (b if a is true,
// else c) and CMP (1 if a > b, signed) are word operations. DELAY returns
// operand a as it was at the previous execution, held in a register that
// advances whenever exec_en is high.
//
// The operation set follows the paper's function-mapping table and its text
// on the generator start logic; which operand each operation reads is this
// design's choice. y is combinational; only the DELAY state is clocked.
module gfb
  import shs_pkg::*;
#(
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          exec_en,
  input  opcode_e       op,
  input  logic [DW-1:0] a,
  input  logic [DW-1:0] b,
  input  logic [DW-1:0] c,
  input  logic [DW-1:0] d,
  output logic [DW-1:0] y
);

  logic [DW-1:0] dly;

  always_ff @(posedge clk) begin
    if (rst)          dly <= '0;
    else if (exec_en) dly <= a;
  end

  always_comb begin
    unique case (op)
      OP_AND:   y = DW'((a != '0) && (b != '0) && (c != '0) && (d != '0));
      OP_OR:    y = DW'((a != '0) || (b != '0) || (c != '0) || (d != '0));
      OP_NOT:   y = DW'(a == '0);
      OP_ADD:   y = a + b;
      OP_SUB:   y = a - b;
      OP_MUL:   y = DW'($signed(a) * $signed(b));
      OP_MUX:   y = (a != '0) ? b : c;
      OP_CMP:   y = DW'($signed(a) > $signed(b));
      OP_DELAY: y = dly;
      default:  y = '0;
    endcase
  end

endmodule
