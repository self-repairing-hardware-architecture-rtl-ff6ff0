// tb_output_mux -- self-checking testbench of a position's output
// multiplexer: every route and stem select, random data, against a model.
module tb_output_mux;
  import shs_pkg::*;
  route_e route;
  logic [31:0] b_y, t_y, y;
  logic b_done, b_err, t_done, t_err, done, err;
  logic [3:0][31:0] s_y;
  logic [3:0] s_done, s_err;
  logic [1:0] s_sel;
  int checks = 0, failures = 0;

  output_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ey; logic ed, ee;
    for (int n = 0; n < 400; n++) begin
      route = route_e'(n % 4);
      b_y = $urandom; t_y = $urandom; b_done = $urandom; t_done = $urandom;
      b_err = $urandom; t_err = $urandom;
      for (int i = 0; i < 4; i++) s_y[i] = $urandom;
      s_done = 4'($urandom); s_err = 4'($urandom); s_sel = 2'($urandom);
      #1;
      case (route)
        ROUTE_B:    begin ey = b_y; ed = b_done; ee = b_err; end
        ROUTE_T:    begin ey = t_y; ed = t_done; ee = t_err; end
        ROUTE_STEM: begin ey = s_y[s_sel]; ed = s_done[s_sel]; ee = s_err[s_sel]; end
        default:    begin ey = 0; ed = 0; ee = 1; end
      endcase
      checks++;
      if (y != ey || done != ed || err != ee) begin failures++; $display("FAIL route %0d", route); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
