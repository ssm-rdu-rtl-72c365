// pcu_fu: one functional unit of the pattern compute unit, with its two
// pipeline registers.
//
// Datapath (one multiplier, one adder, five muxes, one accumulator):
//   product = muxA(lane1, const) * muxB(stage, lane2, const), shifted right by
//             FRAC_BITS (fixed point) and kept to 16 bits
//   sum     = muxC(product, lane1, const) +/- muxD(acc, lane2, const, lane1)
//   lane out 1 = lane1 or lane2, lane out 2 = product or sum
//   stage out  = stage input
// The mux inputs, the accumulator and the registers on the lane outputs and on
// the stage output follow the FU drawing of the baseline RDU. The subtract bit
// is this design's addition: the FFT mapping labels FUs "-" and the adder must
// then compute A - B. Arithmetic wraps at 16 bits.
//
// Timing: lane outputs and stage output are registered, so the FU adds one
// cycle in both the lane and the stage direction. The accumulator takes the
// sum on every cycle with in_valid and acc_en set, and is cleared by acc_clr
// (a clear has priority). Lane outputs and out_valid move every cycle.
module pcu_fu
  import ssm_rdu_pkg::*;
#(
  parameter int FRAC_BITS = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  fu_cfg_t cfg,
  input  logic    acc_clr,
  input  logic    in_valid,
  input  data_t   lane_in1,
  input  data_t   lane_in2,
  input  data_t   stage_in,
  output logic    out_valid,
  output data_t   lane_out1,
  output data_t   lane_out2,
  output data_t   stage_out
);

  data_t mul_a, mul_b, add_a, add_b, prod, sum, acc;
  logic signed [2*DATA_W-1:0] full_prod;

  always_comb begin
    mul_a = (cfg.mul_a == MA_CONST) ? cfg.konst : lane_in1;
    unique case (cfg.mul_b)
      MB_STAGE: mul_b = stage_in;
      MB_LANE2: mul_b = lane_in2;
      default:  mul_b = cfg.konst;
    endcase
    full_prod = mul_a * mul_b;
    prod      = data_t'(full_prod >>> FRAC_BITS);
    unique case (cfg.add_a)
      AA_PROD:  add_a = prod;
      AA_LANE1: add_a = lane_in1;
      default:  add_a = cfg.konst;
    endcase
    unique case (cfg.add_b)
      AB_ACC:   add_b = acc;
      AB_LANE2: add_b = lane_in2;
      AB_CONST: add_b = cfg.konst;
      default:  add_b = lane_in1;
    endcase
    sum = cfg.sub ? data_t'(add_a - add_b) : data_t'(add_a + add_b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      lane_out1 <= '0;
      lane_out2 <= '0;
      stage_out <= '0;
    end else begin
      if (acc_clr)                    acc <= '0;
      else if (in_valid && cfg.acc_en) acc <= sum;
      out_valid <= in_valid;
      lane_out1 <= (cfg.out1 == O1_LANE2) ? lane_in2 : lane_in1;
      lane_out2 <= (cfg.out2 == O2_SUM) ? sum : prod;
      stage_out <= stage_in;
    end
  end

endmodule
