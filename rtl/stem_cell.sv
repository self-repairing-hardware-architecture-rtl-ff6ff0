// stem_cell -- one embryonic stem cell of the healing layer, holding two
// undifferentiated execution units.
//
// Each execution unit is a full bio-functional cell (genome memory plus
// fault-tolerant generic function block) with its own switching unit. When
// the syndrome switching circuit differentiates a unit (en high, pos = the
// position it takes over), the switching unit feeds it that position's
// operands and start pulse, and the unit expresses that position's gene. An
// undifferentiated unit never starts.
//
// The cell serves the four positions of its own side; diff_pos is the global
// position, of which the low bits pick the operand bundle. Two units per stem
// cell follow the paper; the rest is this design's choice. Timing is that of
// the ftgfb: result and done two cycles after the routed start pulse.
module stem_cell
  import shs_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        cfg_we,
  input  logic [POS_W-1:0]            cfg_addr,
  input  gene_t                       cfg_gene,
  input  opnd_t [N_SIDE-1:0]          side_opnd,
  input  logic  [N_SIDE-1:0]          side_go,
  input  logic [1:0]                  diff_en,
  input  logic [1:0][POS_W-1:0]       diff_pos,
  input  logic [1:0]                  perm_fault,
  output logic [1:0][DW-1:0]          y,
  output logic [1:0]                  done,
  output logic [1:0]                  err
);

  localparam int LW = $clog2(N_SIDE);

  for (genvar u = 0; u < N_EU_PER_STEM; u++) begin : g_eu
    opnd_t opnd;
    logic  go, hru_alarm, unused;

    switching_unit #(.NS(N_SIDE)) u_su (
      .en(diff_en[u]), .sel(diff_pos[u][LW-1:0]),
      .src_opnd(side_opnd), .src_go(side_go),
      .opnd, .go
    );

    func_cell u_eu (
      .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
      .gene_sel(diff_pos[u]), .go, .opnd,
      .seu('0), .perm_fault(perm_fault[u]),
      .y(y[u]), .done(done[u]), .err(err[u]), .hru_alarm
    );
    assign unused = hru_alarm;
  end

endmodule
