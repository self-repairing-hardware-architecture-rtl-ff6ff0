// ftgfb -- fault-tolerant generic function block, the computing core of every
// cell.
//
// Each of the four operands passes through a hybrid redundancy unit (HRU),
// which masks transient upsets of the input registers. The operands then feed
// two copies of the generic function block: the primary and a passive
// duplicate. After each execution the two results are compared; a mismatch
// means a permanent fault in the block, and err is raised and held until
// reset, which is what the healing layer acts on.
//
// Control is a two-state machine. A go pulse with the operands present loads
// the HRUs (cycle t); in cycle t+1 both GFBs execute and the primary result
// is registered; in cycle t+2 y holds the result and done pulses for one
// cycle. This two-cycle latency matches the paper's property model, which
// delays each input by two cycles to meet the done signal. go is ignored while
// an execution is under way. Assertions at the end state the paper's
// sequencing property: a go taken while idle yields done two cycles later,
// and with no error flagged the value delivered with done is the agreed one.
//
// Fault-injection inputs (this design's choice of form): seu[k][i] upsets
// register i of operand k's HRU; perm_fault holds the primary GFB output
// stuck at all ones, a permanent fault the duplicate comparison catches.
// hru_alarm reports an HRU with no healthy copy or with disagreeing copies.
module ftgfb
  import shs_pkg::*;
#(
  parameter int DW = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     go,
  input  opcode_e                  op,
  input  logic [N_OPND-1:0][DW-1:0] opnd,
  input  logic [N_OPND-1:0][2:0]   seu,
  input  logic                     perm_fault,
  output logic [DW-1:0]            y,
  output logic                     done,
  output logic                     err,
  output logic                     hru_alarm
);

  typedef enum logic {S_IDLE, S_EXEC} state_e;
  state_e state;

  logic [N_OPND-1:0][DW-1:0] q;
  logic [N_OPND-1:0][DW-1:0] cmp_err;
  logic [N_OPND-1:0][2:0]    hru_err;
  logic [N_OPND-1:0]         hru_fail;
  logic [DW-1:0]             y_pri_raw, y_pri, y_dup;
  logic                      load, exec_en;

  assign load    = go && state == S_IDLE;
  assign exec_en = state == S_EXEC;

  for (genvar k = 0; k < N_OPND; k++) begin : g_hru
    hru #(.DW(DW)) u_hru (
      .clk, .rst, .load, .d(opnd[k]), .seu(seu[k]),
      .q(q[k]), .err(hru_err[k]), .cmp_err(cmp_err[k]), .fail(hru_fail[k])
    );
  end

  gfb #(.DW(DW)) u_pri (
    .clk, .rst, .exec_en, .op, .a(q[0]), .b(q[1]), .c(q[2]), .d(q[3]), .y(y_pri_raw)
  );
  gfb #(.DW(DW)) u_dup (
    .clk, .rst, .exec_en, .op, .a(q[0]), .b(q[1]), .c(q[2]), .d(q[3]), .y(y_dup)
  );

  assign y_pri = perm_fault ? '1 : y_pri_raw;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      y         <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
      hru_alarm <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (go) state <= S_EXEC;
        S_EXEC: begin
          state <= S_IDLE;
          y     <= y_pri;
          done  <= 1'b1;
          if (y_pri != y_dup) err <= 1'b1;
          for (int k = 0; k < N_OPND; k++)
            if (hru_fail[k] || cmp_err[k] != '0) hru_alarm <= 1'b1;
        end
      endcase
    end
  end

  // hru_err is visible through the HRUs' own outputs; the cell only needs
  // the summary alarm.
  logic unused_hru_err;
  assign unused_hru_err = ^hru_err;

  // A done pulse is always preceded by a go two cycles earlier.
  a_done_after_go : assert property (@(posedge clk) disable iff (rst)
    done |-> $past(go, 2));

  // The sequencing property of the paper's proof model: a go accepted while
  // idle always yields done two cycles later.
  a_go_gives_done : assert property (@(posedge clk) disable iff (rst)
    (go && state == S_IDLE) |-> ##2 done);

  // With no error flagged, the value delivered with done is the one both
  // function blocks agreed on.
  a_done_value : assert property (@(posedge clk) disable iff (rst)
    (done && !err) |-> (y == $past(y_dup)));

endmodule
