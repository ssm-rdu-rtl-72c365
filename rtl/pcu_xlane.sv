// pcu_xlane: the cross-lane interconnect in front of one PCU pipeline stage.
//
// It forms the two lane inputs of every FU of stage STAGE from the two lane
// outputs of the previous stage (for stage 0, the PCU input vectors). For each
// mode the wiring is fixed: ssm_rdu_pkg::xlane_src() is evaluated at
// elaboration for every lane and mode, so each lane input becomes a small mux
// over at most one wire per mode, selected by the PCU mode register. There is
// no routing state and no arbitration.
//
// Wiring per mode (the patterns of the baseline PCU drawing, the FFT-mode
// drawing and the two scan-mode drawings, generalised from 8 lanes to LANES):
//   element-wise, systolic: straight (own lane output 1 -> input 1, 2 -> 2)
//   reduction: lane l <- lane l + 2^(s-1) at stage s for l a multiple of 2^s
//   FFT:       complex gather + constant-geometry permutation, then butterfly
//              links at distance 2 lanes (one complex element)
//   HS scan:   lane l <- lane l + 2^(s-1); then a one-lane shift, zero in
//   B scan:    up-sweep over the reduction links, clear of lane 0, down-sweep
// Cross links always carry the result (lane output 2) of the source lane.
// Purely combinational.
module pcu_xlane
  import ssm_rdu_pkg::*;
#(
  parameter int LANES = 32,
  parameter int STAGE = 1
) (
  input  pcu_mode_e mode,
  input  data_t     prev_v1 [LANES],
  input  data_t     prev_v2 [LANES],
  output data_t     in1     [LANES],
  output data_t     in2     [LANES]
);

  localparam int N_MODES = 6;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    data_t cand1 [N_MODES];
    data_t cand2 [N_MODES];
    for (genvar m = 0; m < N_MODES; m++) begin : g_mode
      localparam int S1 = xlane_src(pcu_mode_e'(m), LANES, STAGE, l, 1);
      localparam int S2 = xlane_src(pcu_mode_e'(m), LANES, STAGE, l, 2);
      if (S1 == SRC_ZERO)        begin : g_z1 assign cand1[m] = '0;           end
      else if (S1 == SRC_OWN_V1) begin : g_a1 assign cand1[m] = prev_v1[l];   end
      else if (S1 == SRC_OWN_V2) begin : g_b1 assign cand1[m] = prev_v2[l];   end
      else                       begin : g_x1 assign cand1[m] = prev_v2[S1];  end
      if (S2 == SRC_ZERO)        begin : g_z2 assign cand2[m] = '0;           end
      else if (S2 == SRC_OWN_V1) begin : g_a2 assign cand2[m] = prev_v1[l];   end
      else if (S2 == SRC_OWN_V2) begin : g_b2 assign cand2[m] = prev_v2[l];   end
      else                       begin : g_x2 assign cand2[m] = prev_v2[S2];  end
    end
    always_comb begin
      in1[l] = cand1[0];
      in2[l] = cand2[0];
      if (int'(mode) < N_MODES) begin
        in1[l] = cand1[mode];
        in2[l] = cand2[mode];
      end
    end
  end

endmodule
