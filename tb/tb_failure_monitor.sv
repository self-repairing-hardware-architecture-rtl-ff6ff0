// tb_failure_monitor -- self-checking testbench of the failure monitoring
// unit. Random status patterns are applied; for each the write strobes, masks
// and data to the B and T control registers, the T-cell gene selects and the
// heal counter are compared with a model of the three healing actions.
module tb_failure_monitor;
  import shs_pkg::*;
  logic clk = 0, rst = 1;
  logic [7:0] b_rsr = 0, b_alive = 8'hFF, t_rsr = 0, t_active = 0;
  logic b_wcr_we, t_wcr_we;
  logic [7:0] b_wcr_mask, b_wcr_data, t_wcr_mask, t_wcr_data, heal_count;
  logic [7:0][2:0] t_gene_sel, m_sel;
  int m_count;
  int checks = 0, failures = 0;

  failure_monitor dut (.*);
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
    logic [7:0] nb, nt;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    m_sel = '0; m_count = 0;
    for (int n = 0; n < 300; n++) begin
      b_rsr = 8'($urandom); b_alive = 8'($urandom); t_rsr = 8'($urandom); t_active = 8'($urandom);
      #1;
      nb = b_rsr & b_alive;
      nt = t_rsr & t_active & ~nb;
      check(b_wcr_we == (nb != 0) && b_wcr_mask == nb && b_wcr_data == 0, "B-cell death write");
      check(t_wcr_we == ((nb | nt) != 0) && t_wcr_mask == (nb | nt) && t_wcr_data == nb, "T-cell activate/stop write");
      @(negedge clk);
      for (int k = 0; k < 8; k++) if (nb[k]) m_sel[k] = 3'(k);
      m_count += $countones(nb);
      check(t_gene_sel == m_sel, "gene select of T cells");
      check(heal_count == 8'(m_count), "heal counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
