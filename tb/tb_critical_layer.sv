// tb_critical_layer -- self-checking testbench of the critical functions
// layer.
//
// Programs position k as "operand 0 + k * operand 1" style genes (ADD, SUB,
// MUL alternating), runs scans and checks every B cell's result; injects a
// permanent fault into B cell 2, checks its status bit, kills it and
// activates T cell 2 through the control registers, and checks that B cell 2
// no longer runs while T cell 2 now produces position 2's result from
// position 2's operands; all other T cells stay idle throughout.
module tb_critical_layer;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0;
  logic [2:0] cfg_addr = 0;
  gene_t cfg_gene = '0;
  opnd_t [7:0] pos_opnd = '0;
  logic [7:0] pos_go = 0;
  logic b_wcr_we = 0, t_wcr_we = 0;
  logic [7:0] b_wcr_mask = 0, b_wcr_data = 0, t_wcr_mask = 0, t_wcr_data = 0;
  logic [7:0][2:0] t_gene_sel = '0;
  logic [7:0][3:0][2:0] seu_b = '0;
  logic [7:0] perm_b = 0, perm_t = 0;
  logic [7:0][31:0] b_y, t_y;
  logic [7:0] b_done, b_err, t_done, t_err, b_hru_alarm, b_rsr, t_rsr, b_alive, t_active;
  int checks = 0, failures = 0;

  critical_layer dut (.*);
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

  function automatic logic [31:0] expect_y(int k, opnd_t v);
    case (k % 3)
      0: return v[0] + v[1];
      1: return v[0] - v[1];
      default: return 32'(longint'($signed(v[0])) * longint'($signed(v[1])));
    endcase
  endfunction

  task automatic scan();
    for (int k = 0; k < 8; k++)
      for (int j = 0; j < N_OPND; j++) pos_opnd[k][j] = $urandom % 5000;
    pos_go = '1; @(negedge clk); pos_go = 0; @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 8; k++) begin
      cfg_we = 1; cfg_addr = 3'(k);
      cfg_gene = '{op: (k % 3 == 0) ? OP_ADD : (k % 3 == 1) ? OP_SUB : OP_MUL, src: '0};
      @(negedge clk);
    end
    cfg_we = 0;
    check(b_alive == 8'hFF && t_active == 8'h00, "reset: all B alive, all T passive");
    for (int n = 0; n < 10; n++) begin
      scan();
      check(b_done == 8'hFF && t_done == 8'h00, "B cells run, T cells idle");
      for (int k = 0; k < 8; k++) check(b_y[k] == expect_y(k, pos_opnd[k]), $sformatf("B%0d result", k));
    end
    // permanent fault in B cell 2
    perm_b[2] = 1;
    scan();
    check(b_err == 8'h04, "B2 error flag");
    @(negedge clk);
    check(b_rsr == 8'h04, "B2 status register bit");
    perm_b[2] = 0;
    // healing actions
    b_wcr_we = 1; b_wcr_mask = 8'h04; b_wcr_data = 8'h00;
    t_wcr_we = 1; t_wcr_mask = 8'h04; t_wcr_data = 8'h04; t_gene_sel[2] = 3'd2;
    @(negedge clk);
    b_wcr_we = 0; t_wcr_we = 0;
    check(b_alive == 8'hFB && t_active == 8'h04, "B2 killed, T2 active");
    for (int n = 0; n < 10; n++) begin
      scan();
      check(b_done == 8'hFB && t_done == 8'h04, "B2 stopped, only T2 runs");
      check(t_y[2] == expect_y(2, pos_opnd[2]), "T2 computes position 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
