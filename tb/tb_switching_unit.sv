// tb_switching_unit -- self-checking testbench of the switching unit: with
// four candidate positions, checks that an enabled unit forwards the chosen
// operands and start pulse and a disabled one forwards zeros and no start.
module tb_switching_unit;
  import shs_pkg::*;
  logic en;
  logic [1:0] sel;
  opnd_t [3:0] src_opnd;
  logic [3:0] src_go;
  opnd_t opnd;
  logic go;
  int checks = 0, failures = 0;

  switching_unit #(.NS(4)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < N_OPND; j++) src_opnd[i][j] = $urandom;
      src_go = 4'($urandom);
      en = n % 3 != 0;
      sel = 2'($urandom);
      #1;
      checks++;
      if (en ? (opnd != src_opnd[sel] || go != src_go[sel]) : (opnd != '0 || go)) begin
        failures++; $display("FAIL en=%b sel=%0d", en, sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
