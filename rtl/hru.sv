// hru -- hybrid redundancy unit guarding one 32-bit input register of a
// fault-tolerant generic function block.
//
// The input word is captured into three registers at once. Each register keeps
// an even-parity bit computed from the clean input; three error detectors
// re-check the parity of the stored words (error1..error3). The monitoring
// switch forwards the lowest-numbered register whose detector is silent, so a
// transient upset in one or two registers is masked, and because all three are
// reloaded on every capture the unit tolerates new upsets without limit. The
// comparator XORs the forwarded copy with the next healthy copy; a non-zero
// cmp_err means two copies that both pass parity disagree.
//
// The three registers, three detectors, switch and comparator follow the
// paper's figure of the unit. Parity as the detection method, the switch's
// priority order and the XOR form of the comparator output are this design's
// choices. The seu input is a fault-injection port: seu[i] flips bit 0 of
// register i at the next clock edge (on top of a capture, if load is high).
//
// Timing: q, err, cmp_err and fail are combinational from the registers and
// valid the cycle after load.
module hru #(
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          load,
  input  logic [DW-1:0] d,
  input  logic [2:0]    seu,
  output logic [DW-1:0] q,
  output logic [2:0]    err,
  output logic [DW-1:0] cmp_err,
  output logic          fail
);

  logic [2:0][DW-1:0] r;
  logic [2:0]         par;

  always_ff @(posedge clk) begin
    if (rst) begin
      r   <= '0;
      par <= '0;
    end else begin
      for (int i = 0; i < 3; i++) begin
        if (load) begin
          r[i]   <= d ^ DW'(seu[i]);
          par[i] <= ^d;
        end else if (seu[i]) begin
          r[i][0] <= ~r[i][0];
        end
      end
    end
  end

  // Error detection units.
  always_comb begin
    for (int i = 0; i < 3; i++) err[i] = (^r[i]) != par[i];
  end

  // Monitoring switch and comparator.
  always_comb begin
    logic [DW-1:0] second;
    q      = r[0];
    second = r[0];
    fail   = 1'b0;
    unique casez (err)
      3'b??0: begin q = r[0]; second = !err[1] ? r[1] : (!err[2] ? r[2] : r[0]); end
      3'b?01: begin q = r[1]; second = !err[2] ? r[2] : r[1]; end
      3'b011: begin q = r[2]; second = r[2]; end
      3'b111: begin q = r[0]; second = r[0]; fail = 1'b1; end
    endcase
    cmp_err = q ^ second;
  end

endmodule
