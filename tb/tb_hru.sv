// tb_hru -- self-checking testbench of the hybrid redundancy unit.
//
// Loads random words while injecting every pattern of register upsets, both
// at capture and after capture, and checks that: the output equals the
// loaded word whenever at least one register is intact; error1..error3 flag
// exactly the upset registers; the comparator output is zero while two intact
// copies remain; fail rises only when all three are upset; and the result is
// available one cycle after load.
module tb_hru;
  logic clk = 0, rst = 1, load = 0;
  logic [31:0] d = '0, q, cmp_err;
  logic [2:0] seu = '0, err;
  logic fail;
  int checks = 0, failures = 0;

  hru #(.DW(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int mode = 0; mode < 2; mode++) begin
      for (int p = 0; p < 8; p++) begin
        w = $urandom;
        // capture, with the upset applied at capture (mode 0) or one cycle later (mode 1)
        @(negedge clk); d = w; load = 1; seu = (mode == 0) ? 3'(p) : 3'b000;
        @(negedge clk); load = 0; d = ~w;
        if (mode == 1) begin seu = 3'(p); @(negedge clk); end
        seu = '0;
        check(err == 3'(p), $sformatf("err pattern p=%0d mode=%0d got %b", p, mode, err));
        if (p != 7) begin
          check(q == w, $sformatf("q masked p=%0d mode=%0d q=%h w=%h", p, mode, q, w));
          check(!fail, "fail low");
          // two intact copies exist for p with at most one bit set
          if ($countones(p) <= 1) check(cmp_err == '0, "comparator quiet");
        end else begin
          check(fail, "fail when all three upset");
        end
      end
    end
    // unlimited sequential upsets: the same register hit on many loads
    for (int n = 0; n < 20; n++) begin
      w = $urandom;
      @(negedge clk); d = w; load = 1; seu = 3'b001 << (n % 3);
      @(negedge clk); load = 0; seu = '0;
      check(q == w && err == (3'b001 << (n % 3)), "repeated upset masked");
    end
    // a non-parity-detectable double flip in one register is seen by the comparator
    w = 32'h1234_5678;
    @(negedge clk); d = w; load = 1; seu = '0;
    @(negedge clk); load = 0;
    force dut.r[0] = w ^ 32'h3;
    #1 check(err == 3'b000 && cmp_err == 32'h3, "comparator flags disagreeing copies");
    release dut.r[0];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
