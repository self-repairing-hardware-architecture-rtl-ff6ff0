// tb_genome_mem -- self-checking testbench of the cell configuration memory.
// Writes random genes to every address in random order and reads them back
// through the expression port, and checks the NOP reset state.
module tb_genome_mem;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0;
  logic [2:0] cfg_addr = 0, rd_sel = 0;
  gene_t cfg_gene = '0, rd_gene;
  gene_t model [8];
  int checks = 0, failures = 0;

  genome_mem #(.NP(8)) dut (.*);
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
    for (int i = 0; i < 8; i++) begin
      rd_sel = 3'(i); #1; checks++;
      if (rd_gene.op != OP_NOP || rd_gene.src != '0) begin failures++; $display("FAIL reset %0d", i); end
      model[i] = '0;
    end
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 3'($urandom); cfg_gene = gene_t'($urandom);
      cfg_gene.op = opcode_e'($urandom % 10);
      model[cfg_addr] = cfg_gene;
      @(negedge clk); cfg_we = 0;
      rd_sel = 3'($urandom); #1; checks++;
      if (rd_gene !== model[rd_sel]) begin failures++; $display("FAIL read %0d", rd_sel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
