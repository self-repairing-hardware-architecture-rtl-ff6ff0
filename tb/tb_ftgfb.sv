// tb_ftgfb -- self-checking testbench of the fault-tolerant generic function
// block.
//
// Checks the two-cycle latency from go to done, the result of logical OR on
// four operands (the property the paper proves: the output equals the OR of
// the four inputs read two cycles earlier, at the done edge), that upsets in
// any one or two HRU registers of every operand leave the result correct and
// raise no permanent error, and that a stuck primary GFB raises the sticky
// err flag while a healthy one never does.
module tb_ftgfb;
  import shs_pkg::*;
  logic clk = 0, rst = 1, go = 0, perm_fault = 0;
  opcode_e op = OP_OR;
  logic [N_OPND-1:0][31:0] opnd = '0;
  logic [N_OPND-1:0][2:0]  seu = '0;
  logic [31:0] y;
  logic done, err, hru_alarm;
  int checks = 0, failures = 0;

  ftgfb #(.DW(32)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run one execution; return the result and the cycles from go to done.
  task automatic run(input opcode_e o, input logic [N_OPND-1:0][31:0] v,
                     input logic [N_OPND-1:0][2:0] s, output logic [31:0] r, output int lat);
    @(negedge clk); op = o; opnd = v; seu = s; go = 1;
    @(negedge clk); go = 0; seu = '0; opnd = ~v;   // inputs change after the capture
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    r = y;
  endtask

  function automatic logic [31:0] or4(logic [N_OPND-1:0][31:0] v);
    return (v[0] != 0 || v[1] != 0 || v[2] != 0 || v[3] != 0) ? 1 : 0;
  endfunction

  initial begin
    logic [31:0] r;
    logic [N_OPND-1:0][31:0] v;
    logic [N_OPND-1:0][2:0] s;
    int lat;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 200; n++) begin
      for (int j = 0; j < N_OPND; j++) v[j] = ($urandom % 3 == 0) ? $urandom : 0;
      // upset one or two registers per operand (never all three)
      for (int j = 0; j < N_OPND; j++) s[j] = 3'($urandom % 7);
      run(OP_OR, v, s, r, lat);
      check(lat == 2, $sformatf("latency %0d", lat));
      check(r == or4(v), $sformatf("OR result %h", r));
    end
    check(!err, "no permanent error under transient upsets");
    // ADD as a word operation
    v = '{32'd0, 32'd0, 32'd20, 32'd30};
    run(OP_ADD, v, '0, r, lat);
    check(r == 32'd50, $sformatf("ADD 30+20 = %0d", r));
    // permanent fault in the primary GFB
    perm_fault = 1;
    run(OP_ADD, v, '0, r, lat);
    check(err, "permanent fault flagged");
    perm_fault = 0;
    run(OP_ADD, v, '0, r, lat);
    check(err, "error flag is sticky");
    check(r == 32'd50, "result after the fault is removed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
