// health_syndrome -- forming health syndrome unit of the healing layer.
//
// It continuously reads the error flags of the two T-cell sublayers (through
// their status registers), together with the B-cell enables and the
// stem-allocation state, and forms one 2-bit syndrome per position:
//   SYN_OK    the B cell is alive;
//   SYN_T     the B cell is dead and its T cell is healthy;
//   SYN_STEM  the T cell has failed as well, so the position needs a stem
//             execution unit (it keeps this syndrome while a unit serves it);
//   SYN_LOST  it needs a unit but its side has none left.
// The eight syndromes go to the syndrome switching circuit.
//
// Eight syndromes of two bits match the widths printed in the paper's
// architecture figure; the encoding is this design's choice. The syndromes
// are registered: they follow their inputs by one cycle.
module health_syndrome
  import shs_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic [N_POS-1:0]     b_alive,
  input  logic [N_POS-1:0]     t_rsr,
  input  logic [N_POS-1:0]     pos_lost,
  output syndrome_e [N_POS-1:0] syndrome
);

  always_ff @(posedge clk) begin
    if (rst) begin
      syndrome <= {N_POS{SYN_OK}};
    end else begin
      for (int k = 0; k < N_POS; k++) begin
        if (b_alive[k])       syndrome[k] <= SYN_OK;
        else if (!t_rsr[k])   syndrome[k] <= SYN_T;
        else if (pos_lost[k]) syndrome[k] <= SYN_LOST;
        else                  syndrome[k] <= SYN_STEM;
      end
    end
  end

endmodule
