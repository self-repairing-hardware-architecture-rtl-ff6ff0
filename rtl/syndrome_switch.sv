// syndrome_switch -- syndrome switching circuit of the healing layer: decides
// which syndrome differentiates which stem-cell execution unit.
//
// The eight execution units (two in each of four stem cells) are split by
// side: the left healing sublayer holds S0 and S2 and serves positions 0-3,
// the right one holds S1 and S3 and serves positions 4-7. Stem cell j owns
// units 2j and 2j+1, so side-local unit i of side s is global unit
// 4*(i/2) + 2*s + i%2.
//
// Each cycle and on each side, the lowest-numbered position whose syndrome
// asks for a unit and that no live unit serves is granted the lowest-numbered
// unit that is neither busy nor dead. A unit whose error flag rises is marked
// dead and released, so its position asks again and, if any unit is left,
// is served by another one. A position that asks and finds no free unit is
// reported lost. Outputs per unit: differentiate enable and position; per
// position: served, the serving unit's side-local index, and lost.
//
// The split by side follows the paper's figure; the allocation order and the
// release on failure are this design's choices. All state is registered:
// a grant is visible the cycle after the request. Because a unit serves
// only its own side, the top bit of a left-side unit's eu_pos is always 0.
module syndrome_switch
  import shs_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst,
  input  syndrome_e [N_POS-1:0]        syndrome,
  input  logic [N_EU-1:0]              eu_err,
  output logic [N_EU-1:0]              eu_en,
  output logic [N_EU-1:0][POS_W-1:0]   eu_pos,
  output logic [N_EU-1:0]              eu_dead,
  output logic [N_POS-1:0]             pos_served,
  output logic [N_POS-1:0][1:0]        pos_eu,
  output logic [N_POS-1:0]             pos_lost
);

  localparam int LW = $clog2(N_SIDE);

  // Side-local state.
  logic [1:0][N_EU_SIDE-1:0]         busy, dead;
  logic [1:0][N_EU_SIDE-1:0][LW-1:0] lpos;

  function automatic int unsigned glob(int unsigned s, int unsigned i);
    return 4 * (i / 2) + 2 * s + (i % 2);
  endfunction

  // Which positions are served, by which unit, and which are lost.
  always_comb begin
    pos_served = '0;
    pos_eu     = '0;
    pos_lost   = '0;
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < N_EU_SIDE; i++) begin
        if (busy[s][i] && !dead[s][i]) begin
          pos_served[s*N_SIDE + int'(lpos[s][i])] = 1'b1;
          pos_eu[s*N_SIDE + int'(lpos[s][i])]     = 2'(i);
        end
      end
      for (int p = 0; p < N_SIDE; p++) begin
        if ((syndrome[s*N_SIDE+p] == SYN_STEM || syndrome[s*N_SIDE+p] == SYN_LOST)
            && !pos_served[s*N_SIDE+p] && &(busy[s] | dead[s]))
          pos_lost[s*N_SIDE+p] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= '0;
      dead <= '0;
      lpos <= '0;
    end else begin
      for (int s = 0; s < 2; s++) begin
        logic granted;
        logic [N_EU_SIDE-1:0] free;
        granted = 1'b0;
        // Drop units that failed.
        for (int i = 0; i < N_EU_SIDE; i++) begin
          if (eu_err[glob(s, i)] && busy[s][i]) begin
            dead[s][i] <= 1'b1;
            busy[s][i] <= 1'b0;
          end
        end
        free = ~(busy[s] | dead[s]);
        // One grant per side per cycle.
        for (int p = 0; p < N_SIDE; p++) begin
          if (!granted && (syndrome[s*N_SIDE+p] == SYN_STEM || syndrome[s*N_SIDE+p] == SYN_LOST)
              && !pos_served[s*N_SIDE+p]) begin
            for (int i = 0; i < N_EU_SIDE; i++) begin
              if (!granted && free[i]) begin
                granted    = 1'b1;
                busy[s][i] <= 1'b1;
                lpos[s][i] <= LW'(p);
              end
            end
          end
        end
      end
    end
  end

  always_comb begin
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < N_EU_SIDE; i++) begin
        eu_en[glob(s, i)]   = busy[s][i] && !dead[s][i];
        eu_pos[glob(s, i)]  = POS_W'(s*N_SIDE) + POS_W'(lpos[s][i]);
        eu_dead[glob(s, i)] = dead[s][i];
      end
    end
  end

endmodule
