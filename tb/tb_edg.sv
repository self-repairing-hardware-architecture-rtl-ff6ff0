// tb_edg -- workload testbench: the emergency diesel generator (EDG) start
// logic of a nuclear plant, mapped onto two chained self-healing tiles.
//
// The logic has 14 binary inputs and 2 outputs and is built from AND, OR and
// inversion. Input numbering:
//   0 primary 4.16 kV crosstie breaker closed   1 backup crosstie breaker closed
//   2 EDG output breaker closed                 3 engine shutdown signal
//   4 reset start logic                         5 ESF safety injection signal
//   6 4.16 kV vital bus undervoltage            7 manual start
//   8 starting control / power available        9 engine / crank speed
//  10 air tank pressure                        11 low jacket water pressure
//  12 engine trouble signal                    13 barring gear engaged
// Reference (the inverting boxes of the logic diagram are taken as NOT):
//   x1   = !(in3 || in4)
//   x2   = !((in0 || in1) && in2)
//   run  = x1 && x2 && (in5 || in6 || in7)                       -- output 1
//   ok   = run && !in11 && !in12 && !in13
//   open = !in8 && !in9 && in10 && ok    -- output 2, open air start and fuel valves
// Tile A (positions 0-7): in3||in4, in0||in1, in5||in6||in7, !in8, !in9,
// !in11, !in12, !in13. Tile B reads tile A's outputs on inputs 0-7 and the
// raw inputs on 8-21: !A0, A1&&in2, !B1, B0&&B2&&A2, B3&&A5&&A6&&A7,
// A3&&A4&&in10&&B4. The chain is five blocks deep, so each input vector is
// held for 7 scans (both tiles scan together) before the outputs are checked.
//
// Fault scenario of the paper's EDG experiment: sequential permanent faults
// in F0 (B cell 0) and then R0 (T cell 0) of tile A; and three sequential
// transient upsets of the three input registers of F0. The outputs must stay
// correct throughout; the length of each repairing scan is reported. The
// tiles scan together: the next scan starts once both have committed.
module tb_edg;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0, start = 0;
  logic [2:0] cfg_addr = 0;
  gene_t cfg_gene_a = '0, cfg_gene_b = '0;
  logic [1:0] busy, scan_done, scan_fault;
  logic [N_IN-1:0][31:0] in_a = '0, in_b;
  logic [N_POS-1:0][31:0] out_a, out_b;
  logic [1:0][N_POS-1:0] pos_fail;
  logic [N_POS-1:0][N_OPND-1:0][2:0] seu_a = '0;
  logic [N_POS-1:0] perm_b_a = 0, perm_t_a = 0;
  logic [1:0][N_POS-1:0] b_status, t_status, b_alive, t_active, hru_alarm;
  syndrome_e [1:0][N_POS-1:0] syndrome;
  route_e [1:0][N_POS-1:0] route;
  logic [1:0][N_EU-1:0] eu_dead;
  logic [1:0][7:0] heal_count, rerun_count;

  shs_top tile_a (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene(cfg_gene_a), .start,
    .busy(busy[0]), .scan_done(scan_done[0]), .scan_fault(scan_fault[0]),
    .data_in(in_a), .data_out(out_a), .pos_fail(pos_fail[0]),
    .seu_b(seu_a), .perm_b(perm_b_a), .perm_t(perm_t_a), .perm_s('0),
    .b_status(b_status[0]), .t_status(t_status[0]), .b_alive(b_alive[0]), .t_active(t_active[0]),
    .hru_alarm(hru_alarm[0]), .syndrome(syndrome[0]), .route(route[0]), .eu_dead(eu_dead[0]),
    .heal_count(heal_count[0]), .rerun_count(rerun_count[0])
  );

  shs_top tile_b (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_gene(cfg_gene_b), .start,
    .busy(busy[1]), .scan_done(scan_done[1]), .scan_fault(scan_fault[1]),
    .data_in(in_b), .data_out(out_b), .pos_fail(pos_fail[1]),
    .seu_b('0), .perm_b('0), .perm_t('0), .perm_s('0),
    .b_status(b_status[1]), .t_status(t_status[1]), .b_alive(b_alive[1]), .t_active(t_active[1]),
    .hru_alarm(hru_alarm[1]), .syndrome(syndrome[1]), .route(route[1]), .eu_dead(eu_dead[1]),
    .heal_count(heal_count[1]), .rerun_count(rerun_count[1])
  );

  always_comb begin
    in_b = '0;
    for (int i = 0; i < 8; i++)  in_b[i] = out_a[i];
    for (int i = 0; i < 14; i++) in_b[8 + i] = in_a[i];
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_b_heal = 0, n_t_heal = 0, n_transient = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int Z = 72, O = 73;

  function automatic gene_t g(opcode_e op, int s0, int s1, int s2, int s3);
    gene_t r;
    r.op = op;
    r.src[0] = 7'(s0); r.src[1] = 7'(s1); r.src[2] = 7'(s2); r.src[3] = 7'(s3);
    return r;
  endfunction

  initial begin
    gene_t pa [8], pb [8];
    logic [13:0] v;
    bit x1, x2, run_o, ok, open_o;
    int cyc, seu_reg;
    logic [1:0] seen;
    // tile A (raw inputs on 0..13)
    pa[0] = g(OP_OR, 3, 4, Z, Z);
    pa[1] = g(OP_OR, 0, 1, Z, Z);
    pa[2] = g(OP_OR, 5, 6, 7, Z);
    pa[3] = g(OP_NOT, 8, Z, Z, Z);
    pa[4] = g(OP_NOT, 9, Z, Z, Z);
    pa[5] = g(OP_NOT, 11, Z, Z, Z);
    pa[6] = g(OP_NOT, 12, Z, Z, Z);
    pa[7] = g(OP_NOT, 13, Z, Z, Z);
    // tile B (tile A outputs on 0..7, raw input i on 8+i, own outputs on 64..71)
    pb[0] = g(OP_NOT, 0, Z, Z, Z);
    pb[1] = g(OP_AND, 1, 8 + 2, O, O);
    pb[2] = g(OP_NOT, 64 + 1, Z, Z, Z);
    pb[3] = g(OP_AND, 64 + 0, 64 + 2, 2, O);
    pb[4] = g(OP_AND, 64 + 3, 5, 6, 7);
    pb[5] = g(OP_AND, 3, 4, 8 + 10, 64 + 4);
    pb[6] = g(OP_NOP, Z, Z, Z, Z);
    pb[7] = g(OP_NOP, Z, Z, Z, Z);

    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 8; k++) begin
      cfg_we = 1; cfg_addr = 3'(k); cfg_gene_a = pa[k]; cfg_gene_b = pb[k]; @(negedge clk);
    end
    cfg_we = 0;

    for (int n = 0; n < 40; n++) begin
      // random vectors, biased so that both outputs are often true
      v = 14'($urandom);
      if (n % 2 == 0) begin v[3] = 0; v[4] = 0; v[2] = 0; v[11] = 0; v[12] = 0; v[13] = 0; v[8] = 0; v[9] = 0; v[10] = 1; end
      for (int i = 0; i < 14; i++) in_a[i] = 32'(v[i]);
      x1 = !(v[3] || v[4]);
      x2 = !((v[0] || v[1]) && v[2]);
      run_o = x1 && x2 && (v[5] || v[6] || v[7]);
      ok = run_o && !v[11] && !v[12] && !v[13];
      open_o = !v[8] && !v[9] && v[10] && ok;

      for (int s = 0; s < 7; s++) begin
        // paper's scenario: permanent faults in F0, then R0, of tile A
        if (n == 10 && s == 0) perm_b_a[0] = 1;
        if (n == 20 && s == 0) perm_t_a[0] = 1;
        // three sequential transient upsets, one register each time
        if (n == 30 && s < 3) seu_reg = s; else seu_reg = -1;
        start = 1; @(negedge clk); start = 0;
        if (seu_reg >= 0)
          for (int j = 0; j < N_OPND; j++) seu_a[0][j] = 3'(1 << seu_reg);
        cyc = 1;
        seen = 2'b00;
        while (seen != 2'b11) begin @(negedge clk); seu_a = '0; cyc++; seen |= scan_done; end
        if ((n == 10 || n == 20) && s == 0)
          $display("repair scan after permanent fault %0d: %0d cycles (%0d ns at 10 ns per cycle)",
                   n / 10, cyc, cyc * 10);
        if (seu_reg >= 0 && out_a[0] == 32'(v[3] || v[4])) n_transient++;
        @(negedge clk);
      end
      check(out_b[3] == 32'(run_o), $sformatf("vector %0d output 1 (engine run) = %0d, expected %0d", n, out_b[3], run_o));
      check(out_b[5] == 32'(open_o), $sformatf("vector %0d output 2 (open valves) = %0d, expected %0d", n, out_b[5], open_o));
      check(pos_fail == '0 && scan_fault == '0, "no lost position, no scan fault");
      if (n == 10) begin check(route[0][0] == ROUTE_T, "F0 replaced by R0"); if (route[0][0] == ROUTE_T) n_b_heal++; end
      if (n == 20) begin check(route[0][0] == ROUTE_STEM, "R0 replaced by a stem unit"); if (route[0][0] == ROUTE_STEM) n_t_heal++; end
    end
    $display("mechanisms: b_to_t=%0d t_to_stem=%0d transient_masked_scans=%0d", n_b_heal, n_t_heal, n_transient);
    check(n_b_heal > 0 && n_t_heal > 0, "both permanent-fault repairs happened");
    check(n_transient == 3, "three transient upsets masked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
