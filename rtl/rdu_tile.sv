// rdu_tile: one compute/memory tile of the RDU: a PCU, a PMU and the switch
// that connects them to each other and to the neighbouring tiles.
//
// Switch inputs: the stream from the previous tile (chain_in), the PMU read
// stream and the PCU result vector (lane outputs 2 of the last stage).
// Switch outputs: the PMU write stream, PCU lane inputs 1, PCU lane inputs 2
// and the stream to the next tile (chain_out). The PCU starts on the valid of
// its lane-input-2 stream. The stage inputs of the PCU (the vertical operand
// of the systolic mode) are taken from the lane-input-1 vector: stage s reads
// word s of that vector. Pairing one PCU with one PMU per tile follows the
// chip's equal PCU and PMU counts; the rest of the tile wiring is this
// design's choice.
//
// Configuration (cfg_we with cfg_unit, cfg_addr, cfg_data, see ssm_rdu_pkg):
//   CFG_PCU_FU    cfg_addr = {stage, lane} (lane in the low log2(LANES) bits),
//                 cfg_data = fu_cfg_t
//   CFG_PCU_MODE  cfg_data = pcu_mode_e
//   CFG_PMU       cfg_addr = PMU register
//   CFG_SWITCH    cfg_addr = switch output, cfg_data = input it copies
// Timing: each switch hop is one cycle, the PCU STAGES cycles, a PMU read one
// cycle after its address.
// Lint notes three unused signals, which stand by design: the upper bits of
// cfg_addr (16 bits leave room for larger PCUs; 32 x 12 needs 9), and the
// PCU's lane outputs 1 and stage outputs, which stay inside the tile.
module rdu_tile
  import ssm_rdu_pkg::*;
#(
  parameter int LANES     = 32,
  parameter int STAGES    = 12,
  parameter int DEPTH     = 24576,
  parameter int FRAC_BITS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  cfg_unit_e   cfg_unit,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_data,
  input  logic        acc_clr,
  input  logic        chain_in_valid,
  input  data_t       chain_in_data  [LANES],
  output logic        chain_out_valid,
  output data_t       chain_out_data [LANES],
  output pcu_mode_e   pcu_mode,
  output logic        pmu_busy
);

  localparam int LB = $clog2(LANES);
  localparam int SB = $clog2(STAGES);

  logic  sw_in_valid  [SW_N_IN];
  data_t sw_in_data   [SW_N_IN][LANES];
  logic  sw_out_valid [SW_N_OUT];
  data_t sw_out_data  [SW_N_OUT][LANES];

  logic  pmu_rd_valid;
  data_t pmu_rd_data [LANES];
  logic  pcu_out_valid;
  data_t pcu_out_v1 [LANES];
  data_t pcu_out_v2 [LANES];
  data_t pcu_stage_in  [STAGES];
  // Lane outputs 1 and the stage outputs of the PCU are not routed off the
  // tile: only PCU results (lane outputs 2) travel on the switch.
  data_t pcu_stage_out [STAGES];

  assign sw_in_valid[SW_IN_CHAIN] = chain_in_valid;
  assign sw_in_data [SW_IN_CHAIN] = chain_in_data;
  assign sw_in_valid[SW_IN_PMU]   = pmu_rd_valid;
  assign sw_in_data [SW_IN_PMU]   = pmu_rd_data;
  assign sw_in_valid[SW_IN_PCU]   = pcu_out_valid;
  assign sw_in_data [SW_IN_PCU]   = pcu_out_v2;

  noc_switch #(.LANES(LANES), .N_IN(SW_N_IN), .N_OUT(SW_N_OUT)) u_switch (
    .clk       (clk),
    .rst_n     (rst_n),
    .sel_we    (cfg_we && cfg_unit == CFG_SWITCH),
    .sel_addr  (cfg_addr[$clog2(SW_N_OUT)-1:0]),
    .sel_data  (cfg_data),
    .in_valid  (sw_in_valid),
    .in_data   (sw_in_data),
    .out_valid (sw_out_valid),
    .out_data  (sw_out_data)
  );

  pmu #(.LANES(LANES), .DEPTH(DEPTH)) u_pmu (
    .clk      (clk),
    .rst_n    (rst_n),
    .reg_we   (cfg_we && cfg_unit == CFG_PMU),
    .reg_addr (cfg_addr[1:0]),
    .reg_data (cfg_data),
    .wr_valid (sw_out_valid[SW_OUT_PMU]),
    .wr_data  (sw_out_data[SW_OUT_PMU]),
    .rd_valid (pmu_rd_valid),
    .rd_data  (pmu_rd_data),
    .rd_busy  (pmu_busy)
  );

  for (genvar s = 0; s < STAGES; s++) begin : g_stage_in
    if (s < LANES) begin : g_word
      assign pcu_stage_in[s] = sw_out_data[SW_OUT_PCU1][s];
    end else begin : g_none
      assign pcu_stage_in[s] = '0;
    end
  end

  pcu #(.LANES(LANES), .STAGES(STAGES), .FRAC_BITS(FRAC_BITS)) u_pcu (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_we && cfg_unit == CFG_PCU_FU),
    .cfg_stage (cfg_addr[LB +: SB]),
    .cfg_lane  (cfg_addr[LB-1:0]),
    .cfg_data  (fu_cfg_t'(cfg_data[FU_CFG_W-1:0])),
    .mode_we   (cfg_we && cfg_unit == CFG_PCU_MODE),
    .mode_in   (pcu_mode_e'(cfg_data[2:0])),
    .mode      (pcu_mode),
    .acc_clr   (acc_clr),
    .in_valid  (sw_out_valid[SW_OUT_PCU2]),
    .in_v1     (sw_out_data[SW_OUT_PCU1]),
    .in_v2     (sw_out_data[SW_OUT_PCU2]),
    .stage_in  (pcu_stage_in),
    .out_valid (pcu_out_valid),
    .out_v1    (pcu_out_v1),
    .out_v2    (pcu_out_v2),
    .stage_out (pcu_stage_out)
  );

  assign chain_out_valid = sw_out_valid[SW_OUT_CHAIN];
  assign chain_out_data  = sw_out_data[SW_OUT_CHAIN];

endmodule
