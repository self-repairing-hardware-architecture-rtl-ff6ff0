// tb_shs_top -- end-to-end self-checking testbench of the self-healing tile,
// at the tile's default parameters.
//
// Program (one block per position; in[i] = external word i, P[k] = output of
// position k committed by the previous scan):
//   P0 = in0 + in1        P1 = in2 - in3        P2 = P0 * P1
//   P3 = in4||in5||in6||in7 (the North/West/East/South OR of the paper)
//   P4 = in8 > in9        P5 = P4 ? in10 : in11 P6 = DELAY(in12)
//   P7 = in13 && in14 && 1 && 1
// A reference model computes every scan's outputs. Random inputs are applied
// for 40 scans while faults are injected:
//   scan  4  transient upsets in the input registers of B cells 0 and 3
//   scan  8  permanent fault in B cell 2          -> T cell 2 takes over
//   scan 12  permanent fault in T cell 2          -> stem unit S0.0 takes over
//   scan 16  permanent fault in stem unit S0.0    -> S0.1 takes over
//   scan 20  permanent faults in B0, T0, S2.0, S2.1 -> left side exhausted,
//            position 0 is lost and outputs 0 with pos_fail set
// Each mechanism is counted and must happen at least once. Scan length is
// checked: 4 cycles, plus 3 + HEAL_CYC (= 7) per re-run.
module tb_shs_top;
  import shs_pkg::*;
  logic clk = 0, rst = 1, cfg_we = 0, start = 0;
  logic [2:0] cfg_addr = 0;
  gene_t cfg_gene = '0;
  logic busy, scan_done, scan_fault;
  logic [N_IN-1:0][31:0] data_in = '0;
  logic [N_POS-1:0][31:0] data_out;
  logic [N_POS-1:0] pos_fail;
  logic [N_POS-1:0][N_OPND-1:0][2:0] seu_b = '0;
  logic [N_POS-1:0] perm_b = 0, perm_t = 0;
  logic [N_EU-1:0] perm_s = 0;
  logic [N_POS-1:0] b_status, t_status, b_alive, t_active, hru_alarm;
  syndrome_e [N_POS-1:0] syndrome;
  route_e [N_POS-1:0] route;
  logic [N_EU-1:0] eu_dead;
  logic [7:0] heal_count, rerun_count;

  shs_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_transient = 0, n_b_to_t = 0, n_t_to_stem = 0, n_stem_to_stem = 0, n_lost = 0, n_rerun = 0, n_chain = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic gene_t g(opcode_e op, int s0, int s1, int s2, int s3);
    gene_t r;
    r.op = op;
    r.src[0] = 7'(s0); r.src[1] = 7'(s1); r.src[2] = 7'(s2); r.src[3] = 7'(s3);
    return r;
  endfunction

  localparam int P = 64, Z = 72, O = 73;

  logic [7:0][31:0] prev, expv;
  logic [31:0] dly;

  function automatic logic [31:0] b2w(bit b);
    return b ? 32'd1 : 32'd0;
  endfunction

  initial begin
    gene_t prog [8];
    int cyc, reruns_before;
    logic [7:0] lost_mask;
    prog[0] = g(OP_ADD, 0, 1, Z, Z);
    prog[1] = g(OP_SUB, 2, 3, Z, Z);
    prog[2] = g(OP_MUL, P+0, P+1, Z, Z);
    prog[3] = g(OP_OR, 4, 5, 6, 7);
    prog[4] = g(OP_CMP, 8, 9, Z, Z);
    prog[5] = g(OP_MUX, P+4, 10, 11, Z);
    prog[6] = g(OP_DELAY, 12, Z, Z, Z);
    prog[7] = g(OP_AND, 13, 14, O, O);

    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 8; k++) begin
      cfg_we = 1; cfg_addr = 3'(k); cfg_gene = prog[k]; @(negedge clk);
    end
    cfg_we = 0;
    prev = '0; dly = 0; lost_mask = 0;

    for (int scan = 0; scan < 40; scan++) begin
      for (int i = 0; i < 15; i++) data_in[i] = ($urandom % 4 == 0) ? 0 : $urandom % 50000;
      data_in[13] = $urandom % 2; data_in[14] = $urandom % 2;
      // permanent faults stay from their scan on
      if (scan == 8)  perm_b[2] = 1;
      if (scan == 12) perm_t[2] = 1;
      if (scan == 16) perm_s[0] = 1;
      if (scan == 20) begin perm_b[0] = 1; perm_t[0] = 1; perm_s[4] = 1; perm_s[5] = 1; end
      reruns_before = rerun_count;

      // reference outputs
      expv[0] = data_in[0] + data_in[1];
      expv[1] = data_in[2] - data_in[3];
      expv[2] = 32'(longint'($signed(prev[0])) * longint'($signed(prev[1])));
      expv[3] = b2w(data_in[4] != 0 || data_in[5] != 0 || data_in[6] != 0 || data_in[7] != 0);
      expv[4] = b2w($signed(data_in[8]) > $signed(data_in[9]));
      expv[5] = (prev[4] != 0) ? data_in[10] : data_in[11];
      expv[6] = dly;
      expv[7] = b2w(data_in[13] != 0 && data_in[14] != 0);
      if (scan >= 20) begin expv[0] = 0; lost_mask[0] = 1; end

      start = 1;
      @(negedge clk); start = 0;
      // the cycle after start is the run cycle: the HRUs load now
      if (scan == 4) begin
        for (int j = 0; j < N_OPND; j++) begin
          seu_b[0][j] = 3'(1 + $urandom % 6);
          seu_b[3][j] = 3'(1 + $urandom % 6);
        end
      end
      cyc = 1;
      while (!scan_done) begin
        @(negedge clk); seu_b = '0; cyc++;
      end
      check(cyc == 4 + (int'(rerun_count) - reruns_before) * 7,
            $sformatf("scan %0d length %0d cycles with %0d re-runs", scan, cyc, int'(rerun_count) - reruns_before));
      for (int k = 0; k < 8; k++)
        check(data_out[k] == expv[k], $sformatf("scan %0d P%0d = %h, expected %h", scan, k, data_out[k], expv[k]));
      check(pos_fail == lost_mask, $sformatf("scan %0d pos_fail %b", scan, pos_fail));
      check(!scan_fault, "no scan fault");

      // count what happened
      if (scan == 4 && data_out[0] == expv[0] && data_out[3] == expv[3] && rerun_count == 8'(reruns_before)) n_transient++;
      if (int'(rerun_count) > reruns_before) n_rerun++;
      if (scan >= 1 && prev[0] != 0 && prev[1] != 0 && data_out[2] == expv[2]) n_chain++;
      if (scan == 8) begin
        check(route[2] == ROUTE_T && !b_alive[2] && t_active[2], "position 2 on T cell");
        if (route[2] == ROUTE_T) n_b_to_t++;
      end
      if (scan == 12) begin
        check(route[2] == ROUTE_STEM && syndrome[2] == SYN_STEM, "position 2 on a stem unit");
        if (route[2] == ROUTE_STEM) n_t_to_stem++;
      end
      if (scan == 16) begin
        check(route[2] == ROUTE_STEM && eu_dead[0], "position 2 moved to another stem unit");
        if (route[2] == ROUTE_STEM && eu_dead[0]) n_stem_to_stem++;
      end
      if (scan == 20) begin
        check(route[0] == ROUTE_NONE && syndrome[0] == SYN_LOST, "position 0 lost");
        if (route[0] == ROUTE_NONE) n_lost++;
        check(route[2] == ROUTE_STEM, "position 2 keeps its stem unit");
      end
      prev = data_out;
      dly = data_in[12];
      @(negedge clk);
    end
    check(heal_count == 8'd2, $sformatf("two B-cell repairs (got %0d)", heal_count));
    check(hru_alarm == '0, "no HRU alarm");

    $display("mechanisms: transient_masked=%0d b_to_t=%0d t_to_stem=%0d stem_to_stem=%0d lost=%0d rerun=%0d chained=%0d",
             n_transient, n_b_to_t, n_t_to_stem, n_stem_to_stem, n_lost, n_rerun, n_chain);
    checks++; if (n_transient == 0) begin failures++; $display("FAIL transient masking never seen"); end
    checks++; if (n_b_to_t == 0) begin failures++; $display("FAIL B->T never seen"); end
    checks++; if (n_t_to_stem == 0) begin failures++; $display("FAIL T->stem never seen"); end
    checks++; if (n_stem_to_stem == 0) begin failures++; $display("FAIL stem->stem never seen"); end
    checks++; if (n_lost == 0) begin failures++; $display("FAIL lost position never seen"); end
    checks++; if (n_rerun == 0) begin failures++; $display("FAIL re-run never seen"); end
    checks++; if (n_chain == 0) begin failures++; $display("FAIL chaining never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
