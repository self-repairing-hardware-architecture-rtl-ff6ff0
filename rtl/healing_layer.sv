// healing_layer -- the healing layer: failure monitoring unit, forming health
// syndrome unit, syndrome switching circuit and the two healing sublayers
// (LHS with stem cells S0 and S2, RHS with S1 and S3).
//
// It watches the critical functions layer and repairs it in three steps. A
// failed B cell is killed and replaced by its T cell (failure monitoring
// unit). A failed T cell turns the position's syndrome to "needs stem"; the
// switching circuit then differentiates a free execution unit of a stem cell
// on that side, which from then on runs the position's gene on its operands.
// A failed execution unit is released and replaced by another if one is left.
// From this state the layer forms each position's route for the output
// multiplexers: B cell while alive, else T cell while healthy, else the
// assigned stem unit, else none.
//
// The partition into these units follows the paper; how each is built is
// described in its own module. Latency from a B cell's err to its T cell
// being active: 2 cycles (status register, then control register). From a T
// cell's err to a stem unit being differentiated: 3 cycles (status register,
// syndrome, grant). The failure monitor's constant output bits (see there)
// pass through unchanged.
module healing_layer
  import shs_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        cfg_we,
  input  logic [POS_W-1:0]            cfg_addr,
  input  gene_t                       cfg_gene,
  // from the critical functions layer
  input  logic [N_POS-1:0]            b_rsr,
  input  logic [N_POS-1:0]            b_alive,
  input  logic [N_POS-1:0]            t_rsr,
  input  logic [N_POS-1:0]            t_active,
  input  opnd_t [N_POS-1:0]           pos_opnd,
  input  logic [N_POS-1:0]            pos_go,
  // control to the critical functions layer
  output logic                        b_wcr_we,
  output logic [N_POS-1:0]            b_wcr_mask,
  output logic [N_POS-1:0]            b_wcr_data,
  output logic                        t_wcr_we,
  output logic [N_POS-1:0]            t_wcr_mask,
  output logic [N_POS-1:0]            t_wcr_data,
  output logic [N_POS-1:0][POS_W-1:0] t_gene_sel,
  // fault injection into the stem execution units
  input  logic [N_EU-1:0]             perm_s,
  // stem unit results and routing for the output multiplexers
  output logic [N_EU-1:0][DW-1:0]     s_y,
  output logic [N_EU-1:0]             s_done,
  output logic [N_EU-1:0]             s_err,
  output route_e [N_POS-1:0]          route,
  output logic [N_POS-1:0][1:0]       pos_eu,
  // status
  output syndrome_e [N_POS-1:0]       syndrome,
  output logic [N_EU-1:0]             eu_dead,
  output logic [7:0]                  heal_count
);

  logic [N_POS-1:0]            pos_served, pos_lost;
  logic [N_EU-1:0]             eu_en;
  logic [N_EU-1:0][POS_W-1:0]  eu_pos;

  failure_monitor u_fmu (
    .clk, .rst, .b_rsr, .b_alive, .t_rsr, .t_active,
    .b_wcr_we, .b_wcr_mask, .b_wcr_data, .t_wcr_we, .t_wcr_mask, .t_wcr_data,
    .t_gene_sel, .heal_count
  );

  health_syndrome u_fhs (
    .clk, .rst, .b_alive, .t_rsr, .pos_lost, .syndrome
  );

  syndrome_switch u_ssc (
    .clk, .rst, .syndrome, .eu_err(s_err),
    .eu_en, .eu_pos, .eu_dead, .pos_served, .pos_eu, .pos_lost
  );

  // Stem cell j (S0..S3) sits on side j%2: S0, S2 in LHS; S1, S3 in RHS.
  for (genvar j = 0; j < N_STEM; j++) begin : g_stem
    localparam int S = j % 2;
    stem_cell u_stem (
      .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
      .side_opnd(pos_opnd[S*N_SIDE +: N_SIDE]), .side_go(pos_go[S*N_SIDE +: N_SIDE]),
      .diff_en(eu_en[2*j +: 2]), .diff_pos(eu_pos[2*j +: 2]),
      .perm_fault(perm_s[2*j +: 2]),
      .y(s_y[2*j +: 2]), .done(s_done[2*j +: 2]), .err(s_err[2*j +: 2])
    );
  end

  always_comb begin
    for (int k = 0; k < N_POS; k++) begin
      if (b_alive[k])                    route[k] = ROUTE_B;
      else if (t_active[k] && !t_rsr[k]) route[k] = ROUTE_T;
      else if (pos_served[k])            route[k] = ROUTE_STEM;
      else                               route[k] = ROUTE_NONE;
    end
  end

endmodule
