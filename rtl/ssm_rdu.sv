// ssm_rdu: the SSM-RDU chip, NUM_TILES tiles, each with one PCU (with the FFT
// and scan extensions), one PMU and one switch.
//
// The tiles form a chain: the DRAM input stream enters tile 0, each tile's
// chain output feeds the next tile, and the last tile's chain output is the
// DRAM output stream. A configuration maps the kernels of a model (for a
// Hyena decoder: FFT, element-wise multiply, inverse FFT; for a Mamba decoder:
// the scan) onto consecutive tiles so that data streams through them without
// going back to DRAM. The evaluated chip has 520 PCUs of 32 lanes x 12 stages
// and 520 PMUs of 1.5 MB. The PCU and PMU sizes are the defaults here; the
// tile count defaults to 128, because elaborating all 520 tiles takes more
// than 32 GiB in the open-source lint and synthesis front ends (about 80 MB
// and 120 MB per tile). Set NUM_TILES to 520 for the full chip. The DRAM
// itself is off chip: its streams are ports.
//
// The chain is this design's simplification of the two-dimensional grid and
// its network: a grid with a general network would carry the same streams.
//
// Configuration bus: cfg_we with cfg_tile selecting the tile; cfg_unit,
// cfg_addr and cfg_data as described in rdu_tile. acc_clr clears every FU
// accumulator. Timing: one cycle per switch hop, STAGES cycles per PCU, one
// cycle per PMU read; no backpressure, so a stream moves one vector per cycle.
module ssm_rdu
  import ssm_rdu_pkg::*;
#(
  parameter int NUM_TILES = 128,
  parameter int LANES     = 32,
  parameter int STAGES    = 12,
  parameter int DEPTH     = 24576,
  parameter int FRAC_BITS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [$clog2(NUM_TILES)-1:0] cfg_tile,
  input  cfg_unit_e   cfg_unit,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_data,
  input  logic        acc_clr,
  input  logic        dram_in_valid,
  input  data_t       dram_in_data  [LANES],
  output logic        dram_out_valid,
  output data_t       dram_out_data [LANES],
  output pcu_mode_e   pcu_mode      [NUM_TILES],
  output logic        pmu_busy      [NUM_TILES]
);

  logic  chain_valid [NUM_TILES+1];
  data_t chain_data  [NUM_TILES+1][LANES];

  assign chain_valid[0] = dram_in_valid;
  assign chain_data[0]  = dram_in_data;

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    rdu_tile #(
      .LANES(LANES), .STAGES(STAGES), .DEPTH(DEPTH), .FRAC_BITS(FRAC_BITS)
    ) u_tile (
      .clk             (clk),
      .rst_n           (rst_n),
      .cfg_we          (cfg_we && int'(cfg_tile) == t),
      .cfg_unit        (cfg_unit),
      .cfg_addr        (cfg_addr),
      .cfg_data        (cfg_data),
      .acc_clr         (acc_clr),
      .chain_in_valid  (chain_valid[t]),
      .chain_in_data   (chain_data[t]),
      .chain_out_valid (chain_valid[t+1]),
      .chain_out_data  (chain_data[t+1]),
      .pcu_mode        (pcu_mode[t]),
      .pmu_busy        (pmu_busy[t])
    );
  end

  assign dram_out_valid = chain_valid[NUM_TILES];
  assign dram_out_data  = chain_data[NUM_TILES];

endmodule
