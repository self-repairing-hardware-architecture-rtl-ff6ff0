// tb_healing_layer -- self-checking testbench of the healing layer.
//
// The testbench plays the critical functions layer: it holds the B and T
// control registers, applies the layer's masked writes to them, and sets the
// status bits to stand for faults. Scenario on position 6 (right side):
// B-cell fault -> B killed, T activated with gene 6, route T, syndrome T;
// T-cell fault -> T stopped, syndrome "needs stem", stem unit S1.0
// differentiated, route stem, and that unit computes position 6's gene on
// position 6's operands; a fault in that unit -> it is released and S1.1
// takes over. The heal counter must read one B-cell repair.
module tb_healing_layer;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0;
  logic [2:0] cfg_addr = 0;
  gene_t cfg_gene = '0;
  logic [7:0] b_rsr = 0, b_alive, t_rsr = 0, t_active;
  opnd_t [7:0] pos_opnd = '0;
  logic [7:0] pos_go = 0;
  logic b_wcr_we, t_wcr_we;
  logic [7:0] b_wcr_mask, b_wcr_data, t_wcr_mask, t_wcr_data;
  logic [7:0][2:0] t_gene_sel;
  logic [7:0] perm_s = 0;
  logic [7:0][31:0] s_y;
  logic [7:0] s_done, s_err, eu_dead;
  route_e [7:0] route;
  logic [7:0][1:0] pos_eu;
  syndrome_e [7:0] syndrome;
  logic [7:0] heal_count;
  int checks = 0, failures = 0;

  healing_layer dut (.*);
  always #5 clk = ~clk;

  // control registers of the critical layer, as the testbench's model
  always_ff @(posedge clk) begin
    if (rst) begin b_alive <= '1; t_active <= '0; end
    else begin
      if (b_wcr_we) b_alive  <= (b_alive & ~b_wcr_mask) | (b_wcr_data & b_wcr_mask);
      if (t_wcr_we) t_active <= (t_active & ~t_wcr_mask) | (t_wcr_data & t_wcr_mask);
    end
  end

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

  task automatic run_pos6(input int unit, input bit fault);
    pos_opnd[6][0] = $urandom % 1000; pos_opnd[6][1] = $urandom % 1000;
    perm_s[unit] = fault;
    pos_go = '1; @(negedge clk); pos_go = 0; @(negedge clk); perm_s = 0;
    check(s_done[unit], $sformatf("stem unit %0d done", unit));
    if (!fault) check(s_y[unit] == pos_opnd[6][0] + pos_opnd[6][1], "stem unit computes position 6 (ADD)");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 8; k++) begin
      cfg_we = 1; cfg_addr = 3'(k); cfg_gene = '{op: (k == 6) ? OP_ADD : OP_SUB, src: '0};
      @(negedge clk);
    end
    cfg_we = 0;
    check(route == {8{ROUTE_B}} && syndrome == {8{SYN_OK}}, "all positions on B cells");
    // B cell 6 fails
    b_rsr[6] = 1; #1;
    check(b_wcr_we && b_wcr_mask == 8'h40 && b_wcr_data == 0, "kill B6");
    check(t_wcr_we && t_wcr_mask == 8'h40 && t_wcr_data == 8'h40, "activate T6");
    @(negedge clk);
    check(!b_alive[6] && t_active[6] && t_gene_sel[6] == 3'd6, "B6 dead, T6 active with gene 6");
    check(route[6] == ROUTE_T, "route T for position 6");
    @(negedge clk);
    check(syndrome[6] == SYN_T, "syndrome T");
    // T cell 6 fails
    t_rsr[6] = 1; #1;
    check(t_wcr_we && t_wcr_mask == 8'h40 && t_wcr_data == 0, "stop T6");
    @(negedge clk);
    check(syndrome[6] == SYN_STEM, "syndrome needs stem");
    @(negedge clk);
    check(route[6] == ROUTE_STEM && pos_eu[6] == 2'd0, "stem unit S1.0 serves position 6");
    run_pos6(2, 1'b0);
    run_pos6(2, 1'b1);
    check(s_err[2], "fault in stem unit 2 flagged");
    @(negedge clk);
    check(eu_dead[2] && route[6] == ROUTE_NONE, "unit 2 released");
    @(negedge clk);
    check(route[6] == ROUTE_STEM && pos_eu[6] == 2'd1, "S1.1 takes over position 6");
    run_pos6(3, 1'b0);
    check(heal_count == 8'd1, "one B-cell repair counted");
    check(route[0] == ROUTE_B && route[5] == ROUTE_B, "other positions untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
