// shs_top -- one self-healing tile: a critical functions layer of eight
// positions watched and repaired by a healing layer.
//
// Application: the tile runs a function-block program of up to eight blocks,
// one per position. The program is loaded as genes through the cfg port; each
// gene names an operation and the bus sources of its four operands (external
// inputs, committed outputs of any position, constants). A scan, started by a
// start pulse, runs every position once on the operands present at the start
// and then commits all eight results to data_out together, like one PLC scan.
// Blocks that read other blocks' outputs see the previous scan's values.
//
// Repair: transient upsets of input registers are masked inside each cell by
// its hybrid redundancy units and need no action. A permanent fault is caught
// by a cell's duplicate comparison when its result comes back. The scan
// controller then withholds the commit, waits HEAL_CYC cycles while the
// healing layer replaces the failed unit (B cell -> T cell -> stem execution
// unit), and re-runs the failed positions only (the others keep the results
// they already hold, so a DELAY block never advances twice in one scan).
// data_out therefore never carries a result of a failed unit. After MAX_RETRY re-runs in one scan it commits anyway and
// flags scan_fault. A position with no healthy unit left outputs 0 and is
// flagged in pos_fail.
//
// Timing (clock cycles): start in cycle 0, go to the cells in cycle 1,
// results in cycle 3, commit and scan_done in cycle 4 when no fault appears;
// every re-run adds 3 + HEAL_CYC cycles. busy is high from start to
// scan_done; start is ignored while busy.
//
// What follows the paper: the two layers, 8 B cells with 8 T cells, 4 stem
// cells of 2 execution units, the three-level defence and the 64 x 32-bit
// input side. This design's choices: the scan controller with its re-run, the
// eight 32-bit outputs (one per position), and the fault-injection and status
// ports, which exist so that the repair can be exercised and observed.
module shs_top
  import shs_pkg::*;
#(
  parameter int HEAL_CYC  = 4,
  parameter int MAX_RETRY = 4
) (
  input  logic                              clk,
  input  logic                              rst,
  // program load
  input  logic                              cfg_we,
  input  logic [POS_W-1:0]                  cfg_addr,
  input  gene_t                             cfg_gene,
  // scan control and data
  input  logic                              start,
  output logic                              busy,
  output logic                              scan_done,
  output logic                              scan_fault,
  input  logic [N_IN-1:0][DW-1:0]           data_in,
  output logic [N_POS-1:0][DW-1:0]          data_out,
  output logic [N_POS-1:0]                  pos_fail,
  // fault injection
  input  logic [N_POS-1:0][N_OPND-1:0][2:0] seu_b,
  input  logic [N_POS-1:0]                  perm_b,
  input  logic [N_POS-1:0]                  perm_t,
  input  logic [N_EU-1:0]                   perm_s,
  // health status
  output logic [N_POS-1:0]                  b_status,
  output logic [N_POS-1:0]                  t_status,
  output logic [N_POS-1:0]                  b_alive,
  output logic [N_POS-1:0]                  t_active,
  output logic [N_POS-1:0]                  hru_alarm,
  output syndrome_e [N_POS-1:0]             syndrome,
  output route_e [N_POS-1:0]                route,
  output logic [N_EU-1:0]                   eu_dead,
  output logic [7:0]                        heal_count,
  output logic [7:0]                        rerun_count
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_WAIT, S_CHECK, S_HEAL} scan_e;
  scan_e state;

  localparam int HW = $clog2(HEAL_CYC + 1);
  localparam int RW = $clog2(MAX_RETRY + 1);

  logic [HW-1:0]             heal_cnt;
  logic [RW-1:0]             retry;
  logic [N_POS-1:0]          pos_go;
  logic [N_POS-1:0]          run_mask;   // positions started in this run
  opnd_t [N_POS-1:0]         pos_opnd;

  logic [N_POS-1:0][DW-1:0]  b_y, t_y;
  logic [N_POS-1:0]          b_done, b_err, t_done, t_err;
  logic [N_EU-1:0][DW-1:0]   s_y;
  logic [N_EU-1:0]           s_done, s_err;
  logic [N_POS-1:0][1:0]     pos_eu;
  logic [N_POS-1:0][DW-1:0]  m_y;
  logic [N_POS-1:0]          m_done, m_err;

  logic                        b_wcr_we, t_wcr_we;
  logic [N_POS-1:0]            b_wcr_mask, b_wcr_data, t_wcr_mask, t_wcr_data;
  logic [N_POS-1:0][POS_W-1:0] t_gene_sel;

  assign pos_go = (state == S_RUN) ? run_mask : '0;

  io_router u_router (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
    .data_in, .pos_out(data_out), .pos_opnd
  );

  critical_layer u_critical (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
    .pos_opnd, .pos_go,
    .b_wcr_we, .b_wcr_mask, .b_wcr_data, .t_wcr_we, .t_wcr_mask, .t_wcr_data, .t_gene_sel,
    .seu_b, .perm_b, .perm_t,
    .b_y, .b_done, .b_err, .t_y, .t_done, .t_err, .b_hru_alarm(hru_alarm),
    .b_rsr(b_status), .t_rsr(t_status), .b_alive, .t_active
  );

  healing_layer u_healing (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene,
    .b_rsr(b_status), .b_alive, .t_rsr(t_status), .t_active, .pos_opnd, .pos_go,
    .b_wcr_we, .b_wcr_mask, .b_wcr_data, .t_wcr_we, .t_wcr_mask, .t_wcr_data, .t_gene_sel,
    .perm_s, .s_y, .s_done, .s_err, .route, .pos_eu,
    .syndrome, .eu_dead, .heal_count
  );

  // Output multiplexer of each position (Mux 0 .. Mux 7).
  for (genvar k = 0; k < N_POS; k++) begin : g_mux
    localparam int S = k / N_SIDE;
    logic [N_EU_SIDE-1:0][DW-1:0] side_y;
    logic [N_EU_SIDE-1:0]         side_done, side_err;
    // Side-local unit i of side S is global unit 4*(i/2) + 2*S + i%2.
    for (genvar i = 0; i < N_EU_SIDE; i++) begin : g_eu
      assign side_y[i]    = s_y[4*(i/2) + 2*S + i%2];
      assign side_done[i] = s_done[4*(i/2) + 2*S + i%2];
      assign side_err[i]  = s_err[4*(i/2) + 2*S + i%2];
    end
    output_mux u_mux (
      .route(route[k]),
      .b_y(b_y[k]), .b_done(b_done[k]), .b_err(b_err[k]),
      .t_y(t_y[k]), .t_done(t_done[k]), .t_err(t_err[k]),
      .s_y(side_y), .s_done(side_done), .s_err(side_err), .s_sel(pos_eu[k]),
      .y(m_y[k]), .done(m_done[k]), .err(m_err[k])
    );
  end

  // A fault shows when a routed unit returns with its error flag raised.
  logic [N_POS-1:0] routed, fault_now;
  always_comb begin
    for (int k = 0; k < N_POS; k++) routed[k] = route[k] != ROUTE_NONE;
  end
  assign fault_now = routed & m_err;

  // Scan controller.
  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      heal_cnt    <= '0;
      retry       <= '0;
      run_mask    <= '0;
      data_out    <= '0;
      pos_fail    <= '0;
      scan_done   <= 1'b0;
      scan_fault  <= 1'b0;
      rerun_count <= '0;
    end else begin
      scan_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_RUN;
          retry      <= '0;
          run_mask   <= '1;
          scan_fault <= 1'b0;
        end
        S_RUN:  state <= S_WAIT;
        S_WAIT: state <= S_CHECK;
        S_CHECK: begin
          if (fault_now != '0 && retry != RW'(MAX_RETRY)) begin
            state    <= S_HEAL;
            heal_cnt <= HW'(HEAL_CYC);
            run_mask <= fault_now;
          end else begin
            for (int k = 0; k < N_POS; k++)
              data_out[k] <= routed[k] ? m_y[k] : '0;
            pos_fail   <= ~routed;
            scan_fault <= fault_now != '0;
            scan_done  <= 1'b1;
            state      <= S_IDLE;
          end
        end
        S_HEAL: begin
          if (heal_cnt == HW'(1)) begin
            state       <= S_RUN;
            retry       <= retry + RW'(1);
            rerun_count <= rerun_count + 8'd1;
          end
          heal_cnt <= heal_cnt - HW'(1);
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = state != S_IDLE;

  // Every routed position started in this run returns its result in the
  // check cycle.
  a_routed_done : assert property (@(posedge clk) disable iff (rst)
    state == S_CHECK |-> (m_done | ~routed | ~run_mask) == '1);

endmodule
