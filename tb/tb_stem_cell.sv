// tb_stem_cell -- self-checking testbench of an embryonic stem cell.
//
// Loads a genome, leaves both units undifferentiated and checks they never
// start; differentiates unit 0 to position 1 and unit 1 to position 3 (right
// side, global 5 and 7 style addressing is exercised with side 0 here) and
// checks that each runs its position's gene on its position's operands with
// the two-cycle latency; finally checks that a permanent fault is flagged.
module tb_stem_cell;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0;
  logic [2:0] cfg_addr = 0;
  gene_t cfg_gene = '0;
  opnd_t [3:0] side_opnd = '0;
  logic [3:0] side_go = 0;
  logic [1:0] diff_en = 0, perm_fault = 0, done, err;
  logic [1:0][2:0] diff_pos = '0;
  logic [1:0][31:0] y;
  int checks = 0, failures = 0;
  opcode_e ops [8] = '{OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_ADD, OP_SUB, OP_MUL, OP_OR};

  stem_cell dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int i = 0; i < 8; i++) begin
      cfg_we = 1; cfg_addr = 3'(i); cfg_gene = '{op: ops[i], src: '0}; @(negedge clk);
    end
    cfg_we = 0;
    // undifferentiated: never starts
    seen = 0;
    side_go = 4'hF; @(negedge clk); side_go = 0;
    repeat (3) begin if (done != 0) seen++; @(negedge clk); end
    check(seen == 0, "undifferentiated units stay idle");
    // differentiate
    diff_en = 2'b11; diff_pos[0] = 3'd1; diff_pos[1] = 3'd3;
    for (int n = 0; n < 50; n++) begin
      for (int p = 0; p < 4; p++)
        for (int j = 0; j < N_OPND; j++) side_opnd[p][j] = $urandom % 100;
      side_go = 4'b1010;
      @(negedge clk); side_go = 0;
      check(done == 2'b00, "no early done");
      @(negedge clk);
      check(done == 2'b11, "done two cycles after start");
      check(y[0] == side_opnd[1][0] - side_opnd[1][1], "unit 0 runs position 1 (SUB)");
      check(y[1] == ((side_opnd[3][0] != 0 && side_opnd[3][1] != 0 &&
                      side_opnd[3][2] != 0 && side_opnd[3][3] != 0) ? 32'd1 : 32'd0),
            "unit 1 runs position 3 (AND)");
    end
    check(err == 2'b00, "no spurious error");
    perm_fault = 2'b10; side_go = 4'b1010; @(negedge clk); side_go = 0;
    @(negedge clk); perm_fault = 0; @(negedge clk);
    check(err == 2'b10, "permanent fault flagged in unit 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
