// tb_io_router -- self-checking testbench of the I/O routing unit: programs
// random operand sources for every position and checks each operand against
// the numbered source bus (external inputs, committed outputs, constants,
// out-of-range selects reading zero).
module tb_io_router;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0;
  logic [2:0] cfg_addr = 0;
  gene_t cfg_gene = '0;
  logic [N_IN-1:0][31:0] data_in;
  logic [N_POS-1:0][31:0] pos_out;
  opnd_t [N_POS-1:0] pos_opnd;
  gene_t tbl [N_POS];
  int checks = 0, failures = 0;

  io_router dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] src_val(int s);
    if (s < N_IN) return data_in[s];
    if (s < N_IN + N_POS) return pos_out[s - N_IN];
    if (s == SRC_ZERO) return 0;
    if (s == SRC_ONE) return 1;
    return 0;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int n = 0; n < 40; n++) begin
      for (int i = 0; i < N_IN; i++) data_in[i] = $urandom;
      for (int i = 0; i < N_POS; i++) pos_out[i] = $urandom;
      for (int k = 0; k < N_POS; k++) begin
        cfg_we = 1; cfg_addr = 3'(k);
        cfg_gene.op = OP_ADD;
        for (int j = 0; j < N_OPND; j++) cfg_gene.src[j] = 7'($urandom % 80);
        tbl[k] = cfg_gene;
        @(negedge clk);
      end
      cfg_we = 0; #1;
      for (int k = 0; k < N_POS; k++)
        for (int j = 0; j < N_OPND; j++) begin
          checks++;
          if (pos_opnd[k][j] != src_val(int'(tbl[k].src[j]))) begin
            failures++; $display("FAIL pos %0d opnd %0d src %0d", k, j, tbl[k].src[j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
