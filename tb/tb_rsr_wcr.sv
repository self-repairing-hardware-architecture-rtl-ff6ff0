// tb_rsr_wcr -- self-checking testbench of the readable status and writable
// control registers: sticky capture and clear of the status bits, masked
// writes and the reset value of the control bits, against a model.
module tb_rsr_wcr;
  logic clk = 0, rst = 1, wcr_we = 0;
  logic [3:0] status_in = 0, rsr_clr = 0, wcr_mask = 0, wcr_data = 0, rsr, wcr;
  logic [3:0] m_rsr, m_wcr;
  int checks = 0, failures = 0;

  rsr_wcr #(.W(4), .WCR_RST(4'b1111)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    m_rsr = 0; m_wcr = 4'b1111;
    checks++; if (rsr != 0 || wcr != 4'b1111) begin failures++; $display("FAIL reset"); end
    for (int n = 0; n < 300; n++) begin
      status_in = ($urandom % 4 == 0) ? 4'($urandom) : 4'b0;
      rsr_clr   = ($urandom % 5 == 0) ? 4'($urandom) : 4'b0;
      wcr_we    = $urandom % 2;
      wcr_mask  = 4'($urandom);
      wcr_data  = 4'($urandom);
      @(negedge clk);
      m_rsr = (m_rsr & ~rsr_clr) | status_in;
      if (wcr_we) m_wcr = (m_wcr & ~wcr_mask) | (wcr_data & wcr_mask);
      checks++;
      if (rsr != m_rsr || wcr != m_wcr) begin failures++; $display("FAIL n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
