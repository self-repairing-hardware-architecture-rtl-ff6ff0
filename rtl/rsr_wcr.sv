// rsr_wcr -- readable status register and writable control register of one
// sublayer of the critical functions layer.
//
// The RSR collects the error flags of the sublayer's W cells; a bit, once
// set, stays set until reset or until a clear strobe with that bit in
// rsr_clr. The WCR holds one control bit per cell; the healing layer updates
// it with a write strobe and a bit mask, so several writers can touch
// different bits without a read-modify-write. In this design the WCR bit is
// "cell enabled" for a B cell and "cell active" for a T cell.
//
// The paper shows an RSR and a WCR beside every sublayer but does not
// describe them; the sticky capture, the masked write and the reset values
// (given by WCR_RST) are this design's choices. Both registers update on the
// clock edge; rsr and wcr are their register outputs.
module rsr_wcr #(
  parameter int        W       = 4,
  parameter logic [W-1:0] WCR_RST = '0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] status_in,
  input  logic [W-1:0] rsr_clr,
  input  logic         wcr_we,
  input  logic [W-1:0] wcr_mask,
  input  logic [W-1:0] wcr_data,
  output logic [W-1:0] rsr,
  output logic [W-1:0] wcr
);

  always_ff @(posedge clk) begin
    if (rst) begin
      rsr <= '0;
      wcr <= WCR_RST;
    end else begin
      rsr <= (rsr & ~rsr_clr) | status_in;
      if (wcr_we) wcr <= (wcr & ~wcr_mask) | (wcr_data & wcr_mask);
    end
  end

endmodule
