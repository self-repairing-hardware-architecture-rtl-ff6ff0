// func_cell -- one bio-functional cell: a genome memory and a fault-tolerant
// generic function block that runs the expressed gene.
//
// The same module is used for the active B cells, the passive T cells and
// each execution unit of an embryonic stem cell; they differ only in where
// gene_sel comes from (a constant address for a B cell, the healing layer for
// the spares). The gene's opcode drives the block; its operand-source fields
// are used by the tile's I/O router, which holds its own copy of the genome.
//
// Timing is that of the ftgfb: go in cycle t, y valid with the done pulse in
// cycle t+2. err is the block's sticky permanent-fault flag.
module func_cell
  import shs_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cfg_we,
  input  logic [POS_W-1:0]          cfg_addr,
  input  gene_t                     cfg_gene,
  input  logic [POS_W-1:0]          gene_sel,
  input  logic                      go,
  input  opnd_t                     opnd,
  input  logic [N_OPND-1:0][2:0]    seu,
  input  logic                      perm_fault,
  output logic [DW-1:0]             y,
  output logic                      done,
  output logic                      err,
  output logic                      hru_alarm
);

  gene_t gene;

  genome_mem #(.NP(N_POS)) u_genome (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene, .rd_sel(gene_sel), .rd_gene(gene)
  );

  ftgfb #(.DW(DW)) u_ftgfb (
    .clk, .rst, .go, .op(gene.op), .opnd, .seu, .perm_fault,
    .y, .done, .err, .hru_alarm
  );

  logic unused_src;
  assign unused_src = ^gene.src;

endmodule
