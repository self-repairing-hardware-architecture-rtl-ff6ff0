// tb_ccs -- workload testbench: an automotive cruise control system (CCS)
// on two chained self-healing tiles, closed through a simple vehicle model.
//
// Inputs: 0 enable, 1 set, 2 increment, 3 decrement, 4 cancel/brake,
// 5 actual speed. Outputs: target speed and throttle. Operating rules:
//   set        -> target = actual speed
//   increment  -> target = target + 1
//   decrement  -> target = target - 1
//   cancel / brake, or enable low -> target = 0
// Tile A, the digital control logic (own outputs are sources 64..71):
//   A0 = !enable          A1 = A5 + increment    A2 = A1 - decrement
//   A3 = cancel || A0     A4 = set ? speed : A2  A5 = A3 ? 0 : A4   (target)
//   A6 = A5 - speed       (error)
// Tile B, the PI controller (tile A outputs on 0..7, raw inputs on 8..13,
// KP, KI and the throttle limit on 14..16):
//   B0 = KP * error       B1 = KI * error        B2 = B3 + B1
//   B3 = A3 ? 0 : B2      (integral, cleared with the target)
//   B4 = B0 + B3          B5 = B4 > limit        B6 = B5 ? limit : B4 (throttle)
// Every block reads the values committed by the previous scan, so the
// reference model below evaluates the same block graph scan by scan. The
// gains (KP = 2, KI = 1), the limit (1000) and the vehicle model
// speed += (throttle - 16 * speed) / 128 while the target is non-zero
// (otherwise the driver holds the speed) are this testbench's choices; the
// paper gives neither its gains nor its plant.
//
// Checks: every committed output against the reference, each scan; the
// target equals 50 after "set" at an actual speed of 50; increment raises it
// to 51 and cancel clears it; the speed is within 42..58 at scan 140
// (the model approaches 47 against a target of 51 by scan 200). Faults on
// the way: three transient upsets in the error block (one register each),
// then permanent faults in the B cell and then the T cell of the target
// block, which must not disturb any output.
module tb_ccs;
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

  localparam int KP = 2, KI = 1, LIMIT = 1000, SCALE = 16, LAG = 8;

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
    for (int i = 0; i < 8; i++) in_b[i] = out_a[i];
    for (int i = 0; i < 6; i++) in_b[8 + i] = in_a[i];
    in_b[14] = KP; in_b[15] = KI; in_b[16] = LIMIT;
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_set50 = 0, n_inc = 0, n_cancel = 0, n_b_heal = 0, n_t_heal = 0, n_settled = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int Z = 72;

  function automatic gene_t g(opcode_e op, int s0, int s1, int s2, int s3);
    gene_t r;
    r.op = op;
    r.src[0] = 7'(s0); r.src[1] = 7'(s1); r.src[2] = 7'(s2); r.src[3] = 7'(s3);
    return r;
  endfunction

  // reference state: committed values of both tiles
  int ra [8], rb [8], na [8], nb [8];

  task automatic ref_scan(input int en, st, inc, dec, can, spd);
    na[0] = (en == 0) ? 1 : 0;
    na[1] = ra[5] + inc;
    na[2] = ra[1] - dec;
    na[3] = (can != 0 || ra[0] != 0) ? 1 : 0;
    na[4] = (st != 0) ? spd : ra[2];
    na[5] = (ra[3] != 0) ? 0 : ra[4];
    na[6] = ra[5] - spd;
    na[7] = 0;
    nb[0] = KP * ra[6];
    nb[1] = KI * ra[6];
    nb[2] = rb[3] + rb[1];
    nb[3] = (ra[3] != 0) ? 0 : rb[2];
    nb[4] = rb[0] + rb[3];
    nb[5] = (rb[4] > LIMIT) ? 1 : 0;
    nb[6] = (rb[5] != 0) ? LIMIT : rb[4];
    nb[7] = 0;
    ra = na; rb = nb;
  endtask

  initial begin
    gene_t pa [8], pb [8];
    int speed, en, st, inc, dec, can, cyc, seu_reg;
    logic [1:0] seen;
    pa[0] = g(OP_NOT, 0, Z, Z, Z);
    pa[1] = g(OP_ADD, 64 + 5, 2, Z, Z);
    pa[2] = g(OP_SUB, 64 + 1, 3, Z, Z);
    pa[3] = g(OP_OR, 4, 64 + 0, Z, Z);
    pa[4] = g(OP_MUX, 1, 5, 64 + 2, Z);
    pa[5] = g(OP_MUX, 64 + 3, Z, 64 + 4, Z);
    pa[6] = g(OP_SUB, 64 + 5, 5, Z, Z);
    pa[7] = g(OP_NOP, Z, Z, Z, Z);
    pb[0] = g(OP_MUL, 6, 14, Z, Z);
    pb[1] = g(OP_MUL, 6, 15, Z, Z);
    pb[2] = g(OP_ADD, 64 + 3, 64 + 1, Z, Z);
    pb[3] = g(OP_MUX, 3, Z, 64 + 2, Z);
    pb[4] = g(OP_ADD, 64 + 0, 64 + 3, Z, Z);
    pb[5] = g(OP_CMP, 64 + 4, 16, Z, Z);
    pb[6] = g(OP_MUX, 64 + 5, 16, 64 + 4, Z);
    pb[7] = g(OP_NOP, Z, Z, Z, Z);

    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 8; k++) begin
      cfg_we = 1; cfg_addr = 3'(k); cfg_gene_a = pa[k]; cfg_gene_b = pb[k]; @(negedge clk);
    end
    cfg_we = 0;
    for (int k = 0; k < 8; k++) begin ra[k] = 0; rb[k] = 0; end
    speed = 50;

    for (int s = 0; s < 400; s++) begin
      // driver's commands
      en = 1; st = 0; inc = 0; dec = 0; can = 0;
      if (s < 5) en = 0;
      // the target loop (A5 -> A1 -> A2 -> A4 -> A5) holds four scans, so a
      // command is held for four scans to reach every value in the loop
      if (s >= 10 && s < 14) st = 1;              // set at the current speed (50)
      if (s >= 150 && s < 154) inc = 1;           // raise the target by 1
      if (s >= 300 && s < 304) can = 1;           // brake
      in_a[0] = 32'(en); in_a[1] = 32'(st); in_a[2] = 32'(inc);
      in_a[3] = 32'(dec); in_a[4] = 32'(can); in_a[5] = 32'(speed);
      if (s == 60) perm_b_a[5] = 1;
      if (s == 90) perm_t_a[5] = 1;
      seu_reg = (s >= 30 && s < 33) ? s - 30 : -1;

      start = 1; @(negedge clk); start = 0;
      if (seu_reg >= 0)
        for (int j = 0; j < N_OPND; j++) seu_a[6][j] = 3'(1 << seu_reg);
      cyc = 1; seen = 0;
      while (seen != 2'b11) begin @(negedge clk); seu_a = '0; cyc++; seen |= scan_done; end
      @(negedge clk);

      ref_scan(en, st, inc, dec, can, speed);
      for (int k = 0; k < 8; k++) begin
        check(out_a[k] == 32'(ra[k]), $sformatf("scan %0d A%0d = %0d, expected %0d", s, k, $signed(out_a[k]), ra[k]));
        check(out_b[k] == 32'(rb[k]), $sformatf("scan %0d B%0d = %0d, expected %0d", s, k, $signed(out_b[k]), rb[k]));
      end
      check(pos_fail == '0 && scan_fault == '0, "no lost position, no scan fault");

      if (s == 20 && out_a[5] == 50) n_set50++;
      if (s == 200 && out_a[5] == 51) n_inc++;
      if (s == 310 && out_a[5] == 0) n_cancel++;
      if (s == 60 && route[0][5] == ROUTE_T) n_b_heal++;
      if (s == 90 && route[0][5] == ROUTE_STEM) n_t_heal++;
      if (s == 140 && speed >= 42 && speed <= 58) n_settled++;
      if (s % 20 == 0) $display("scan %0d target %0d throttle %0d speed %0d", s, $signed(out_a[5]), $signed(out_b[6]), speed);

      // vehicle: under cruise control the speed follows the throttle; with
      // the target at 0 the driver holds the speed
      if (out_a[5] != 0) speed = speed + ($signed(out_b[6]) - SCALE * speed) / (SCALE * LAG);
    end
    $display("mechanisms: target50=%0d increment=%0d cancel=%0d b_to_t=%0d t_to_stem=%0d settled=%0d",
             n_set50, n_inc, n_cancel, n_b_heal, n_t_heal, n_settled);
    check(n_set50 == 1, "target is 50 after set at 50");
    check(n_inc == 1, "increment raised the target to 51");
    check(n_cancel == 1, "cancel cleared the target");
    check(n_b_heal == 1 && n_t_heal == 1, "target block repaired twice");
    check(n_settled == 1, "speed settled near the target");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
