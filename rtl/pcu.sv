// pcu: pattern compute unit, a LANES x STAGES pipelined SIMD array of FUs with
// the FFT and scan interconnect extensions.
//
// Data enters as two vectors of LANES words (lane inputs 1 and 2 of stage 0)
// and leaves STAGES cycles later from the lane pipeline registers of the last
// stage. Between stages sits a pcu_xlane, whose wiring depends on the mode
// register. Within a stage, the stage pipeline register of lane l feeds the
// stage input of lane l+1 (top to bottom); lane 0 of stage s takes stage_in[s]
// and the last lane's stage register is stage_out[s]. This vertical path is
// what the systolic mode uses for its second operand.
//
// Defaults: 32 lanes x 12 stages, the PCU size of the evaluated chip. The
// 16-bit signed datapath follows the evaluated hardware; FRAC_BITS is this
// design's choice. One PCU carries all three extensions (FFT, HS scan,
// B scan); the evaluated hardware built each as its own PCU variant.
//
// Configuration: cfg_we writes one FU's fu_cfg_t (cfg_stage, cfg_lane);
// mode_we writes the mode register. Both may change between operations; the
// array itself holds no other state than the FU accumulators (acc_clr clears
// all of them) and the pipeline registers.
//
// Timing: fully pipelined, one vector in and one vector out per cycle in every
// mode, latency STAGES cycles from in_valid to out_valid.
module pcu
  import ssm_rdu_pkg::*;
#(
  parameter int LANES     = 32,
  parameter int STAGES    = 12,
  parameter int FRAC_BITS = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      cfg_we,
  input  logic [$clog2(STAGES)-1:0] cfg_stage,
  input  logic [$clog2(LANES)-1:0]  cfg_lane,
  input  fu_cfg_t                   cfg_data,
  input  logic                      mode_we,
  input  pcu_mode_e                 mode_in,
  output pcu_mode_e                 mode,
  input  logic                      acc_clr,
  // data
  input  logic                      in_valid,
  input  data_t                     in_v1     [LANES],
  input  data_t                     in_v2     [LANES],
  input  data_t                     stage_in  [STAGES],
  output logic                      out_valid,
  output data_t                     out_v1    [LANES],
  output data_t                     out_v2    [LANES],
  output data_t                     stage_out [STAGES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       mode <= PCU_ELEMENTWISE;
    else if (mode_we) mode <= mode_in;
  end

  // Lane outputs, stage outputs and valid of every FU.
  data_t lo1   [STAGES][LANES];
  data_t lo2   [STAGES][LANES];
  data_t so    [STAGES][LANES];
  logic  vld   [STAGES][LANES];

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    data_t prev1 [LANES];
    data_t prev2 [LANES];
    data_t li1   [LANES];
    data_t li2   [LANES];
    logic  v_in;

    if (s == 0) begin : g_first
      assign prev1 = in_v1;
      assign prev2 = in_v2;
      assign v_in  = in_valid;
    end else begin : g_next
      assign prev1 = lo1[s-1];
      assign prev2 = lo2[s-1];
      assign v_in  = vld[s-1][0];
    end

    pcu_xlane #(.LANES(LANES), .STAGE(s)) u_xlane (
      .mode    (mode),
      .prev_v1 (prev1),
      .prev_v2 (prev2),
      .in1     (li1),
      .in2     (li2)
    );

    for (genvar l = 0; l < LANES; l++) begin : g_lane
      data_t st_in;
      if (l == 0) begin : g_top
        assign st_in = stage_in[s];
      end else begin : g_below
        assign st_in = so[s][l-1];
      end

      // Configuration register of this FU.
      fu_cfg_t cfg_q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)
          cfg_q <= '0;
        else if (cfg_we && int'(cfg_stage) == s && int'(cfg_lane) == l)
          cfg_q <= cfg_data;
      end

      pcu_fu #(.FRAC_BITS(FRAC_BITS)) u_fu (
        .clk       (clk),
        .rst_n     (rst_n),
        .cfg       (cfg_q),
        .acc_clr   (acc_clr),
        .in_valid  (v_in),
        .lane_in1  (li1[l]),
        .lane_in2  (li2[l]),
        .stage_in  (st_in),
        .out_valid (vld[s][l]),
        .lane_out1 (lo1[s][l]),
        .lane_out2 (lo2[s][l]),
        .stage_out (so[s][l])
      );
    end

    assign stage_out[s] = so[s][LANES-1];
  end

  assign out_valid = vld[STAGES-1][0];
  assign out_v1    = lo1[STAGES-1];
  assign out_v2    = lo2[STAGES-1];

endmodule
