// tb_syndrome_switch -- self-checking testbench of the syndrome switching
// circuit.
//
// Scenario: positions 0, 2 (left) and 5 (right) need stem units; checks that
// each is granted a unit of its own side (S0/S2 for the left, S1/S3 for the
// right) one per cycle in position order, with the right gene position; then
// fails a serving unit and checks that the position is re-served by a free
// unit; then uses up every left unit and checks that the lost flag rises.
module tb_syndrome_switch;
  import shs_pkg::*;
  logic clk = 0, rst = 1;
  syndrome_e [7:0] syndrome;
  logic [7:0] eu_err = 0, eu_en, eu_dead, pos_served, pos_lost;
  logic [7:0][2:0] eu_pos;
  logic [7:0][1:0] pos_eu;
  int checks = 0, failures = 0;

  syndrome_switch dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // global unit number of side-local unit i on side s
  function automatic int glob(int s, int i);
    return 4 * (i / 2) + 2 * s + (i % 2);
  endfunction

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    syndrome = {8{SYN_OK}};
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    syndrome[0] = SYN_STEM; syndrome[2] = SYN_STEM; syndrome[5] = SYN_STEM;
    @(negedge clk);
    // first cycle: one grant per side
    check(pos_served == 8'b0010_0001, $sformatf("first grants %b", pos_served));
    check(eu_en[glob(0,0)] && eu_pos[glob(0,0)] == 0, "left unit 0 -> position 0");
    check(eu_en[glob(1,0)] && eu_pos[glob(1,0)] == 5, "right unit 0 -> position 5");
    @(negedge clk);
    check(pos_served == 8'b0010_0101, "second left grant");
    check(eu_en[glob(0,1)] && eu_pos[glob(0,1)] == 2 && pos_eu[2] == 1, "left unit 1 -> position 2");
    check(eu_en == 8'b0000_0111, $sformatf("S0 units and S1 unit 0 in use %b", eu_en));
    // unit serving position 2 fails
    eu_err[glob(0,1)] = 1;
    @(negedge clk);
    check(eu_dead[glob(0,1)] && !pos_served[2], "failed unit released");
    @(negedge clk);
    check(pos_served[2] && pos_eu[2] == 2 && eu_pos[glob(0,2)] == 2, "position 2 re-served by S2 unit");
    // use up the remaining left unit, then ask once more
    syndrome[1] = SYN_STEM; syndrome[3] = SYN_STEM;
    @(negedge clk);
    check(pos_served[1] && !pos_served[3], "position 1 takes the last left unit");
    check(pos_lost == 8'b0000_1000, $sformatf("position 3 lost %b", pos_lost));
    check(!pos_lost[5] && pos_served[5], "right side unaffected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
