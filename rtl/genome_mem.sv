// genome_mem -- configuration memory of one cell: the genetic code of every
// function position.
//
// Every cell carries the whole genome, one gene per position, as in the
// paper's DNA-expression scheme: a B cell expresses the gene of its own
// position, and a T cell or stem execution unit expresses the gene the
// healing layer selects. The memory is a small register array written
// through a configuration port that the tile broadcasts to every copy, and
// read asynchronously at rd_sel. Reset clears every gene to NOP.
//
// The loading port and the reset value are this design's choices; the paper
// only says the genetic code is stored in a configuration memory.
module genome_mem
  import shs_pkg::*;
#(
  parameter int NP = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    cfg_we,
  input  logic [$clog2(NP)-1:0]   cfg_addr,
  input  gene_t                   cfg_gene,
  input  logic [$clog2(NP)-1:0]   rd_sel,
  output gene_t                   rd_gene
);

  gene_t mem [NP];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NP; i++) mem[i] <= '{op: OP_NOP, src: '0};
    end else if (cfg_we) begin
      mem[cfg_addr] <= cfg_gene;
    end
  end

  assign rd_gene = mem[rd_sel];

endmodule
