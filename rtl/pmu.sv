// pmu: pattern memory unit, the on-chip SRAM tile of the RDU.
//
// A DEPTH x LANES-word scratchpad (default 24576 x 32 x 16 bit = 1.5 MB, the
// PMU capacity of the evaluated chip) with one streaming write port and one
// patterned streaming read port, both one vector wide so that a PMU can feed
// and absorb a PCU at one vector per cycle.
//
// Only the capacity follows the target chip. The ports and the address generation are
// this design's simplest choice: writes go to consecutive addresses from a
// programmable base; reads stream COUNT words from a base address with a
// programmable stride (addresses wrap at DEPTH), which covers the row and
// column walks of a tiled FFT (reshape to a matrix, then walk columns or rows).
//
// Registers (reg_we, reg_addr, reg_data; see ssm_rdu_pkg):
//   PMU_REG_WBASE  write pointer restarts at reg_data
//   PMU_REG_RBASE  first read address
//   PMU_REG_STRIDE read address step
//   PMU_REG_START  starts a read of reg_data words
// Timing: a write is stored in the cycle wr_valid is high. Reads issue one
// address per cycle from the cycle after START; data appears one cycle after
// its address (synchronous-read SRAM). rd_busy is high while addresses issue.
module pmu
  import ssm_rdu_pkg::*;
#(
  parameter int LANES = 32,
  parameter int DEPTH = 24576
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [1:0]  reg_addr,
  input  logic [31:0] reg_data,
  input  logic        wr_valid,
  input  data_t       wr_data [LANES],
  output logic        rd_valid,
  output data_t       rd_data [LANES],
  output logic        rd_busy
);

  localparam int AW = $clog2(DEPTH);
  typedef logic [LANES*DATA_W-1:0] word_t;

  word_t        mem [DEPTH];
  logic [AW-1:0] wptr, raddr, rstride;
  logic [31:0]  rcnt;
  word_t        wword, rword;

  function automatic logic [AW-1:0] wrap(logic [AW:0] a);
    return (a >= (AW+1)'(DEPTH)) ? AW'(a - (AW+1)'(DEPTH)) : AW'(a);
  endfunction

  always_comb
    for (int l = 0; l < LANES; l++) wword[l*DATA_W +: DATA_W] = wr_data[l];

  // Memory array: one write and one synchronous read per cycle.
  always_ff @(posedge clk) begin
    if (wr_valid) mem[wptr] <= wword;
    if (rcnt != 0) rword <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      raddr    <= '0;
      rstride  <= AW'(1);
      rcnt     <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= (rcnt != 0);
      if (rcnt != 0) begin
        raddr <= wrap({1'b0, raddr} + {1'b0, rstride});
        rcnt  <= rcnt - 1;
      end
      if (wr_valid) wptr <= wrap({1'b0, wptr} + 1'b1);
      if (reg_we) begin
        unique case (int'(reg_addr))
          PMU_REG_WBASE:  wptr    <= AW'(reg_data);
          PMU_REG_RBASE:  raddr   <= AW'(reg_data);
          PMU_REG_STRIDE: rstride <= AW'(reg_data);
          default:        rcnt    <= reg_data;
        endcase
      end
    end
  end

  assign rd_busy = (rcnt != 0);

  always_comb
    for (int l = 0; l < LANES; l++) rd_data[l] = data_t'(rword[l*DATA_W +: DATA_W]);

endmodule
