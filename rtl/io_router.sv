// io_router -- I/O routing unit: gathers the four operands of every position.
//
// The operand sources form one numbered bus: the 64 external input words
// (0..63), the committed outputs of the eight positions (64..71), constant 0
// (72) and constant 1 (73). The router keeps its own copy of the genome,
// written by the same configuration port as the cells, and for every position
// and operand picks the source its gene names. Feeding committed outputs back
// lets positions be chained, one link per scan, the way a PLC program is
// evaluated scan by scan; out-of-range selects read zero.
//
// The paper names I/O routing units and interconnected cells; the bus
// numbering, the feedback of committed outputs and the per-gene source
// selects are this design's choices. The operand outputs are combinational
// from the inputs and the stored genes.
module io_router
  import shs_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cfg_we,
  input  logic [POS_W-1:0]          cfg_addr,
  input  gene_t                     cfg_gene,
  input  logic [N_IN-1:0][DW-1:0]   data_in,
  input  logic [N_POS-1:0][DW-1:0]  pos_out,
  output opnd_t [N_POS-1:0]         pos_opnd
);

  gene_t route_tbl [N_POS];
  logic [N_SRC-1:0][DW-1:0] bus;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_POS; i++) route_tbl[i] <= '{op: OP_NOP, src: '0};
    end else if (cfg_we) begin
      route_tbl[cfg_addr] <= cfg_gene;
    end
  end

  assign bus = {DW'(1), DW'(0), pos_out, data_in};

  always_comb begin
    for (int k = 0; k < N_POS; k++) begin
      for (int j = 0; j < N_OPND; j++) begin
        pos_opnd[k][j] = '0;
        for (int s = 0; s < N_SRC; s++)
          if (route_tbl[k].src[j] == SRC_W'(s)) pos_opnd[k][j] = bus[s];
      end
    end
  end

endmodule
