// switching_unit -- routes the operands of one function position to a spare
// cell.
//
// A spare (a T cell, or a stem-cell execution unit) has no inputs of its own.
// When the healing layer enables the unit, it selects the operand bundle and
// the start pulse of position sel among NS candidate positions and hands them
// to the spare, so the spare sees exactly the data the failed cell would
// have seen. When disabled it drives zeros and never starts the spare.
//
// The paper names the switching unit and its rerouting role; building it as a
// purely combinational multiplexer with an enable is this design's choice.
module switching_unit
  import shs_pkg::*;
#(
  parameter int NS = 4,
  localparam int SW = NS > 1 ? $clog2(NS) : 1
) (
  input  logic                  en,
  input  logic [SW-1:0]         sel,
  input  opnd_t [NS-1:0]        src_opnd,
  input  logic [NS-1:0]         src_go,
  output opnd_t                 opnd,
  output logic                  go
);

  always_comb begin
    opnd = '0;
    go   = 1'b0;
    if (en) begin
      for (int i = 0; i < NS; i++) begin
        if (SW'(i) == sel) begin
          opnd = src_opnd[i];
          go   = src_go[i];
        end
      end
    end
  end

endmodule
