// tb_gfb -- self-checking testbench of the generic function block.
//
// Drives every opcode with random and corner operands and compares y with a
// reference computed here; checks that DELAY returns the previous
// execution's operand a and holds when exec_en is low.
module tb_gfb;
  import shs_pkg::*;
  logic clk = 0, rst = 1, exec_en = 0;
  opcode_e op = OP_NOP;
  logic [31:0] a = 0, b = 0, c = 0, d = 0, y;
  int checks = 0, failures = 0;

  gfb #(.DW(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_y(opcode_e o, logic [31:0] a, b, c, d, prev);
    longint pa, pb;
    pa = longint'($signed(a)); pb = longint'($signed(b));
    case (o)
      OP_AND:   return (a != 0 && b != 0 && c != 0 && d != 0) ? 1 : 0;
      OP_OR:    return (a != 0 || b != 0 || c != 0 || d != 0) ? 1 : 0;
      OP_NOT:   return (a == 0) ? 1 : 0;
      OP_ADD:   return 32'(longint'(a) + longint'(b));
      OP_SUB:   return 32'(longint'(a) - longint'(b));
      OP_MUL:   return 32'(pa * pb);
      OP_MUX:   return (a != 0) ? b : c;
      OP_CMP:   return (pa > pb) ? 1 : 0;
      OP_DELAY: return prev;
      default:  return 0;
    endcase
  endfunction

  function automatic logic [31:0] pick();
    case ($urandom % 4)
      0: return 0;
      1: return 1;
      2: return 32'hFFFF_FFFF;
      default: return $urandom;
    endcase
  endfunction

  initial begin
    logic [31:0] prev = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      op = opcode_e'(n % 10);
      a = pick(); b = pick(); c = pick(); d = pick();
      exec_en = ($urandom % 2) == 0;
      #1;
      checks++;
      if (y !== ref_y(op, a, b, c, d, prev)) begin
        failures++;
        $display("FAIL op=%s a=%h b=%h c=%h d=%h y=%h", op.name(), a, b, c, d, y);
      end
      if (exec_en) prev = a;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
