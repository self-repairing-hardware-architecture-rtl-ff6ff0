// tb_func_cell -- self-checking testbench of a bio-functional cell.
//
// Loads a genome of eight different operations, then for every gene select
// runs the cell on random operands and checks that it expresses the selected
// gene (result from a reference model) with a two-cycle latency; finally
// checks that a permanent fault raises err.
module tb_func_cell;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0, go = 0, perm_fault = 0;
  logic [2:0] cfg_addr = 0, gene_sel = 0;
  gene_t cfg_gene = '0;
  opnd_t opnd = '0;
  logic [N_OPND-1:0][2:0] seu = '0;
  logic [31:0] y;
  logic done, err, hru_alarm;
  int checks = 0, failures = 0;
  opcode_e ops [8] = '{OP_AND, OP_OR, OP_NOT, OP_ADD, OP_SUB, OP_MUL, OP_MUX, OP_CMP};

  func_cell dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_y(opcode_e o, opnd_t v);
    case (o)
      OP_AND: return (v[0] != 0 && v[1] != 0 && v[2] != 0 && v[3] != 0) ? 1 : 0;
      OP_OR:  return (v[0] != 0 || v[1] != 0 || v[2] != 0 || v[3] != 0) ? 1 : 0;
      OP_NOT: return (v[0] == 0) ? 1 : 0;
      OP_ADD: return v[0] + v[1];
      OP_SUB: return v[0] - v[1];
      OP_MUL: return 32'(longint'($signed(v[0])) * longint'($signed(v[1])));
      OP_MUX: return (v[0] != 0) ? v[1] : v[2];
      OP_CMP: return ($signed(v[0]) > $signed(v[1])) ? 1 : 0;
      default: return 0;
    endcase
  endfunction

  initial begin
    int lat;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int i = 0; i < 8; i++) begin
      cfg_we = 1; cfg_addr = 3'(i); cfg_gene = '{op: ops[i], src: '0};
      @(negedge clk);
    end
    cfg_we = 0;
    for (int n = 0; n < 160; n++) begin
      gene_sel = 3'(n % 8);
      for (int j = 0; j < N_OPND; j++) opnd[j] = ($urandom % 3 == 0) ? 0 : $urandom % 1000;
      go = 1;
      @(negedge clk); go = 0;
      lat = 1;
      while (!done && lat < 10) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
      if (y != ref_y(ops[gene_sel], opnd)) begin failures++; $display("FAIL gene %0d y=%h", gene_sel, y); end
    end
    checks++; if (err) begin failures++; $display("FAIL spurious err"); end
    perm_fault = 1; go = 1; @(negedge clk); go = 0; @(negedge clk); @(negedge clk);
    checks++; if (!err) begin failures++; $display("FAIL err not raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
