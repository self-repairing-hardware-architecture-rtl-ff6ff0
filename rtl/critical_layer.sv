// critical_layer -- the critical functions layer: eight active B cells and
// eight passive T cells, arranged as the sublayers AFL_0 and AFR_1 (B cells)
// and PRCL_0 and PRCR_1 (T cells).
//
// B cell k sits at address 2k (F0, F2 .. FE) and always expresses the gene of
// position k. It starts on every scan while its WCR bit says it is alive;
// clearing that bit is cell death. T cell k sits at address 2k+1 (R1, R3 ..
// RF) and is the spare of B cell k. It stays idle until the healing layer sets
// its WCR bit; its switching unit then hands it position k's operands and
// start pulse, and it expresses the gene given by t_gene_sel[k].
//
// Each sublayer has a readable status register (sticky error flags of its
// four cells) and a writable control register (enable bits). Left sublayers
// hold positions 0-3, right sublayers positions 4-7. The paper fixes the cell
// counts, the naming and the role of each sublayer; the register details and
// the fault-injection ports are this design's choices.
//
// Timing: cell outputs follow the ftgfb (result and done two cycles after
// go); RSR bits follow a cell's err by one cycle; WCR writes take effect on
// the next edge.
module critical_layer
  import shs_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst,
  // genome configuration, broadcast to every cell
  input  logic                         cfg_we,
  input  logic [POS_W-1:0]             cfg_addr,
  input  gene_t                        cfg_gene,
  // operands and start pulse of every position
  input  opnd_t [N_POS-1:0]            pos_opnd,
  input  logic  [N_POS-1:0]            pos_go,
  // control from the healing layer
  input  logic                         b_wcr_we,
  input  logic [N_POS-1:0]             b_wcr_mask,
  input  logic [N_POS-1:0]             b_wcr_data,
  input  logic                         t_wcr_we,
  input  logic [N_POS-1:0]             t_wcr_mask,
  input  logic [N_POS-1:0]             t_wcr_data,
  input  logic [N_POS-1:0][POS_W-1:0]  t_gene_sel,
  // fault injection
  input  logic [N_POS-1:0][N_OPND-1:0][2:0] seu_b,
  input  logic [N_POS-1:0]             perm_b,
  input  logic [N_POS-1:0]             perm_t,
  // cell results
  output logic [N_POS-1:0][DW-1:0]     b_y,
  output logic [N_POS-1:0]             b_done,
  output logic [N_POS-1:0]             b_err,
  output logic [N_POS-1:0][DW-1:0]     t_y,
  output logic [N_POS-1:0]             t_done,
  output logic [N_POS-1:0]             t_err,
  output logic [N_POS-1:0]             b_hru_alarm,
  // sublayer registers
  output logic [N_POS-1:0]             b_rsr,
  output logic [N_POS-1:0]             t_rsr,
  output logic [N_POS-1:0]             b_alive,
  output logic [N_POS-1:0]             t_active
);

  logic [N_POS-1:0] t_hru_alarm;

  for (genvar k = 0; k < N_POS; k++) begin : g_pos
    opnd_t t_opnd;
    logic  t_go;

    // B cell, address 2k.
    func_cell u_bcell (
      .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
      .gene_sel(POS_W'(k)), .go(pos_go[k] && b_alive[k]), .opnd(pos_opnd[k]),
      .seu(seu_b[k]), .perm_fault(perm_b[k]),
      .y(b_y[k]), .done(b_done[k]), .err(b_err[k]), .hru_alarm(b_hru_alarm[k])
    );

    // Switching unit in front of the T cell.
    switching_unit #(.NS(1)) u_su (
      .en(t_active[k]), .sel(1'b0),
      .src_opnd(pos_opnd[k]), .src_go(pos_go[k]),
      .opnd(t_opnd), .go(t_go)
    );

    // T cell, address 2k+1.
    func_cell u_tcell (
      .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
      .gene_sel(t_gene_sel[k]), .go(t_go), .opnd(t_opnd),
      .seu('0), .perm_fault(perm_t[k]),
      .y(t_y[k]), .done(t_done[k]), .err(t_err[k]), .hru_alarm(t_hru_alarm[k])
    );
  end

  // Sublayer registers: side 0 = AFL_0 / PRCL_0, side 1 = AFR_1 / PRCR_1.
  for (genvar s = 0; s < 2; s++) begin : g_side
    localparam int LO = s * N_SIDE;
    rsr_wcr #(.W(N_SIDE), .WCR_RST('1)) u_b_regs (
      .clk, .rst,
      .status_in(b_err[LO +: N_SIDE]), .rsr_clr('0),
      .wcr_we(b_wcr_we), .wcr_mask(b_wcr_mask[LO +: N_SIDE]), .wcr_data(b_wcr_data[LO +: N_SIDE]),
      .rsr(b_rsr[LO +: N_SIDE]), .wcr(b_alive[LO +: N_SIDE])
    );
    rsr_wcr #(.W(N_SIDE), .WCR_RST('0)) u_t_regs (
      .clk, .rst,
      .status_in(t_err[LO +: N_SIDE]), .rsr_clr('0),
      .wcr_we(t_wcr_we), .wcr_mask(t_wcr_mask[LO +: N_SIDE]), .wcr_data(t_wcr_data[LO +: N_SIDE]),
      .rsr(t_rsr[LO +: N_SIDE]), .wcr(t_active[LO +: N_SIDE])
    );
  end

  logic unused_t_alarm;
  assign unused_t_alarm = ^t_hru_alarm;

endmodule
