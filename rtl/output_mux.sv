// output_mux -- multiplexing unit of one output position.
//
// A position's result can come from its B cell, its T cell, or the stem
// execution unit that the syndrome switching circuit assigned to it (one of
// the N_EU_SIDE units of the position's side, picked by s_sel). The 2-bit
// route from the healing layer selects which one drives y, done and err;
// ROUTE_NONE drives zeros with err high, so a position with no healthy unit
// left never reports a fresh result.
//
// The three-way choice per position (F, R and S cell) follows the paper's
// figure; the route encoding and the ROUTE_NONE behaviour are this design's
// choices. Purely combinational.
module output_mux
  import shs_pkg::*;
(
  input  route_e                       route,
  input  logic [DW-1:0]                b_y,
  input  logic                         b_done,
  input  logic                         b_err,
  input  logic [DW-1:0]                t_y,
  input  logic                         t_done,
  input  logic                         t_err,
  input  logic [N_EU_SIDE-1:0][DW-1:0] s_y,
  input  logic [N_EU_SIDE-1:0]         s_done,
  input  logic [N_EU_SIDE-1:0]         s_err,
  input  logic [1:0]                   s_sel,
  output logic [DW-1:0]                y,
  output logic                         done,
  output logic                         err
);

  always_comb begin
    unique case (route)
      ROUTE_B:    begin y = b_y;        done = b_done;        err = b_err;        end
      ROUTE_T:    begin y = t_y;        done = t_done;        err = t_err;        end
      ROUTE_STEM: begin y = s_y[s_sel]; done = s_done[s_sel]; err = s_err[s_sel]; end
      default:    begin y = '0;         done = 1'b0;          err = 1'b1;         end
    endcase
  end

endmodule
