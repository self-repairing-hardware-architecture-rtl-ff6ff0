// tb_health_syndrome -- self-checking testbench of the forming health
// syndrome unit: random B-alive, T-error and lost inputs, checking each of
// the eight registered syndromes against the priority OK > T > LOST > STEM.
module tb_health_syndrome;
  import shs_pkg::*;
  logic clk = 0, rst = 1;
  logic [7:0] b_alive = '1, t_rsr = 0, pos_lost = 0;
  syndrome_e [7:0] syndrome;
  int checks = 0, failures = 0;

  health_syndrome dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    syndrome_e e;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int n = 0; n < 300; n++) begin
      b_alive = 8'($urandom); t_rsr = 8'($urandom); pos_lost = 8'($urandom);
      @(negedge clk);
      for (int k = 0; k < 8; k++) begin
        e = b_alive[k] ? SYN_OK : !t_rsr[k] ? SYN_T : pos_lost[k] ? SYN_LOST : SYN_STEM;
        checks++;
        if (syndrome[k] != e) begin failures++; $display("FAIL pos %0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
