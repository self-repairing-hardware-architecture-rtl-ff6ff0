// failure_monitor -- failure monitoring unit of the healing layer: the second
// line of defence, against permanent faults in the B cells.
//
// It reads the B and T status registers. When a live B cell shows an error it
// issues, in the same cycle, the three control actions of the healing
// mechanism: it clears the B cell's WCR bit (cell death), sets the WCR bit of
// the T cell of that position, which also enables the T cell's switching unit
// (reorganisation), and loads the T cell's gene select with the position's
// address (restoration). When an active T cell shows an error, its WCR bit is
// cleared so that it stops running; the stem-cell path then takes over.
//
// The three actions follow the paper. The masked WCR writes, the registered
// gene selects and the heal counter are this design's choices. Writes are
// combinational from the status inputs and land on the next edge; the gene
// select is updated on the same edge.
//
// Some output bits are constant by construction: a B cell is only ever
// killed, never revived, so b_wcr_data is all zeros, and a T cell only ever
// takes over its own position, so t_gene_sel[k] holds either 0 or k. They
// stay ports so that the WCR writes and the gene selects keep their general
// form.
module failure_monitor
  import shs_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N_POS-1:0]            b_rsr,
  input  logic [N_POS-1:0]            b_alive,
  input  logic [N_POS-1:0]            t_rsr,
  input  logic [N_POS-1:0]            t_active,
  output logic                        b_wcr_we,
  output logic [N_POS-1:0]            b_wcr_mask,
  output logic [N_POS-1:0]            b_wcr_data,
  output logic                        t_wcr_we,
  output logic [N_POS-1:0]            t_wcr_mask,
  output logic [N_POS-1:0]            t_wcr_data,
  output logic [N_POS-1:0][POS_W-1:0] t_gene_sel,
  output logic [7:0]                  heal_count
);

  logic [N_POS-1:0] new_b, new_t;

  assign new_b = b_rsr & b_alive;
  assign new_t = t_rsr & t_active & ~new_b;

  assign b_wcr_we   = |new_b;
  assign b_wcr_mask = new_b;
  assign b_wcr_data = '0;
  assign t_wcr_we   = |(new_b | new_t);
  assign t_wcr_mask = new_b | new_t;
  assign t_wcr_data = new_b;

  always_ff @(posedge clk) begin
    if (rst) begin
      t_gene_sel <= '0;
      heal_count <= '0;
    end else begin
      for (int k = 0; k < N_POS; k++)
        if (new_b[k]) t_gene_sel[k] <= POS_W'(k);
      heal_count <= heal_count + 8'($countones(new_b));
    end
  end

endmodule
