// ssm_rdu_pkg: types, constants and elaboration-time wiring functions shared by
// the SSM-RDU compute and memory tiles.
//
// What it holds
//   * data_t: the 16-bit signed datapath word. The 16-bit signed integer type
//     follows the evaluated hardware; the binary point (FRAC_BITS, applied by
//     the FU multiplier) is this design's choice so that FFT twiddle factors can
//     be represented.
//   * pcu_mode_e: the six PCU modes. Element-wise, systolic and reduction are
//     the baseline RDU modes; FFT, Hillis-Steele scan and Blelloch scan are the
//     three extensions. One PCU here carries all three extensions and a mode
//     register selects which wiring is live (the evaluated hardware built them
//     as three separate PCU variants).
//   * fu_cfg_t: the per-FU configuration word: the selects of the five muxes of
//     the FU, the subtract bit, the accumulate enable and the constant.
//   * xlane_src(): for a mode, a stage boundary and a lane, where each of the
//     FU's two lane inputs is taken from. Evaluated only at elaboration, it is
//     the "fixed wiring" of the cross-lane interconnect.
//
// Lane order of the scan modes: the scan links carry data from lane l+d to
// lane l (toward lane 0), so sequence element i sits in lane LANES-1-i.
package ssm_rdu_pkg;

  localparam int DATA_W = 16;
  typedef logic signed [DATA_W-1:0] data_t;

  typedef enum logic [2:0] {
    PCU_ELEMENTWISE = 3'd0,
    PCU_SYSTOLIC    = 3'd1,
    PCU_REDUCTION   = 3'd2,
    PCU_FFT         = 3'd3,
    PCU_HS_SCAN     = 3'd4,
    PCU_B_SCAN      = 3'd5
  } pcu_mode_e;

  // Multiplier operand A: lane input 1 or the constant.
  typedef enum logic {MA_LANE1 = 1'b0, MA_CONST = 1'b1} mul_a_sel_e;
  // Multiplier operand B: stage input, lane input 2 or the constant.
  typedef enum logic [1:0] {MB_STAGE = 2'd0, MB_LANE2 = 2'd1, MB_CONST = 2'd2} mul_b_sel_e;
  // Adder operand A: product, lane input 1 or the constant.
  typedef enum logic [1:0] {AA_PROD = 2'd0, AA_LANE1 = 2'd1, AA_CONST = 2'd2} add_a_sel_e;
  // Adder operand B: accumulator, lane input 2, constant or lane input 1.
  typedef enum logic [1:0] {AB_ACC = 2'd0, AB_LANE2 = 2'd1, AB_CONST = 2'd2, AB_LANE1 = 2'd3} add_b_sel_e;
  // Lane output 2: product or sum. Lane output 1: lane input 1 or lane input 2.
  typedef enum logic {O2_PROD = 1'b0, O2_SUM = 1'b1} out2_sel_e;
  typedef enum logic {O1_LANE1 = 1'b0, O1_LANE2 = 1'b1} out1_sel_e;

  typedef struct packed {
    mul_a_sel_e mul_a;
    mul_b_sel_e mul_b;
    add_a_sel_e add_a;
    add_b_sel_e add_b;
    logic       sub;      // adder computes A - B instead of A + B
    out2_sel_e  out2;
    out1_sel_e  out1;
    logic       acc_en;   // accumulator takes the sum on every valid input
    data_t      konst;
  } fu_cfg_t;

  localparam int FU_CFG_W = $bits(fu_cfg_t);

  // A few configurations used by the mode mappings and the testbenches.
  function automatic fu_cfg_t fu_cfg(mul_a_sel_e ma, mul_b_sel_e mb, add_a_sel_e aa,
                                     add_b_sel_e ab, logic sub, out2_sel_e o2,
                                     out1_sel_e o1, logic acc_en, data_t k);
    fu_cfg_t c;
    c.mul_a = ma; c.mul_b = mb; c.add_a = aa; c.add_b = ab; c.sub = sub;
    c.out2 = o2; c.out1 = o1; c.acc_en = acc_en; c.konst = k;
    return c;
  endfunction

  // lane1 + lane2 (or lane1 - lane2), lane input 1 passed on.
  function automatic fu_cfg_t fu_cfg_add(logic sub);
    return fu_cfg(MA_LANE1, MB_LANE2, AA_LANE1, AB_LANE2, sub, O2_SUM, O1_LANE1, 1'b0, '0);
  endfunction

  // ---------------------------------------------------------------------------
  // Cross-lane wiring.
  // Source codes: a value >= 0 is "lane input 2 side (the result) of that lane
  // of the previous stage"; the negative codes below are the straight paths and
  // a hard-wired zero.
  localparam int SRC_ZERO   = -1;
  localparam int SRC_OWN_V1 = -2;
  localparam int SRC_OWN_V2 = -3;

  function automatic int clog2i(int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // Rotate the low nb bits of v left by one.
  function automatic int rotl1(int v, int nb);
    if (nb <= 1) return v;
    return ((v << 1) & ((1 << nb) - 1)) | ((v >> (nb - 1)) & 1);
  endfunction

  // Number of stages each mode's built-in pattern occupies for a lane count.
  function automatic int fft_stages(int lanes);
    return 3 * clog2i(lanes / 2);
  endfunction
  function automatic int hs_stages(int lanes);
    return clog2i(lanes) + 2;   // input stage, log2 steps, exclusive shift
  endfunction
  function automatic int bscan_stages(int lanes);
    return 2 * clog2i(lanes);   // input stage, up-sweep, down-sweep
  endfunction

  // Source of lane input `which` (1 or 2) of lane `lane` in stage `stage`.
  // Stage 0's "previous stage" is the PCU's input vector.
  function automatic int xlane_src(pcu_mode_e mode, int lanes, int stage, int lane, int which);
    int n, nb, d, e, p, se;
    n = clog2i(lanes);
    case (mode)
      PCU_REDUCTION: begin
        // Baseline reduction tree: at stage s lane l (l a multiple of 2^s)
        // receives lane l + 2^(s-1).
        if (stage >= 1 && stage <= n && (lane % (1 << stage)) == 0)
          return (which == 1) ? SRC_OWN_V2 : lane + (1 << (stage - 1));
        return (which == 1) ? SRC_OWN_V1 : SRC_OWN_V2;
      end
      PCU_HS_SCAN: begin
        // Stages 1..n: lane l adds lane l + 2^(s-1) where that lane exists.
        // Stage n+1: shift by one lane for the exclusive result, zero into
        // the last lane.
        if (stage >= 1 && stage <= n) begin
          d = 1 << (stage - 1);
          if (which == 1) return SRC_OWN_V2;
          return (lane + d < lanes) ? lane + d : SRC_ZERO;
        end
        if (stage == n + 1) begin
          if (which == 1) return SRC_ZERO;
          return (lane + 1 < lanes) ? lane + 1 : SRC_ZERO;
        end
        return (which == 1) ? SRC_ZERO : SRC_OWN_V2;
      end
      PCU_B_SCAN: begin
        // Up-sweep at stages 1..n-1 over the baseline reduction links; the
        // root (lane 0) is cleared at stage n-1. Down-sweep at stages
        // n..2n-1 with distance d = 2^(2n-1-s): parent lane l gets
        // l + (l+d), child lane l+d gets the parent's old value.
        if (stage >= 1 && stage <= n - 1) begin
          if (stage == n - 1 && lane == 0) return SRC_ZERO;
          if ((lane % (1 << stage)) == 0)
            return (which == 1) ? SRC_OWN_V2 : lane + (1 << (stage - 1));
        end else if (stage >= n && stage <= 2 * n - 1) begin
          d = 1 << (2 * n - 1 - stage);
          if ((lane % (2 * d)) == 0)
            return (which == 1) ? SRC_OWN_V2 : lane + d;
          if ((lane % (2 * d)) == d)
            return (which == 1) ? SRC_ZERO : lane - d;
        end
        return (which == 1) ? SRC_ZERO : SRC_OWN_V2;
      end
      PCU_FFT: begin
        // Complex element e lives in lanes 2e (real part) and 2e+1 (imaginary
        // part). Each radix-2 step takes three stages: two for the complex
        // twiddle multiply, one for the butterfly. The gather into the first
        // twiddle stage also applies the constant-geometry permutation
        // (element e reads element rotl(e)), so every butterfly pairs adjacent
        // elements.
        nb = clog2i(lanes / 2);
        if (stage < 3 * nb) begin
          e = lane >> 1;
          p = lane & 1;
          case (stage % 3)
            0: begin
              se = (stage == 0) ? e : rotl1(e, nb);
              return (which == 1) ? 2 * se + p : 2 * se + (1 - p);
            end
            1: return (which == 1) ? SRC_OWN_V1 : SRC_OWN_V2;
            default: begin
              if ((e & 1) == 0) return (which == 1) ? SRC_OWN_V2 : lane + 2;
              return (which == 1) ? lane - 2 : SRC_OWN_V2;
            end
          endcase
        end
        return (which == 1) ? SRC_OWN_V1 : SRC_OWN_V2;
      end
      default: return (which == 1) ? SRC_OWN_V1 : SRC_OWN_V2;
    endcase
  endfunction

  // ---------------------------------------------------------------------------
  // Tile-level configuration bus.
  typedef enum logic [1:0] {
    CFG_PCU_FU   = 2'd0,   // addr = stage*LANES + lane, data = fu_cfg_t
    CFG_PCU_MODE = 2'd1,   // data[2:0] = pcu_mode_e
    CFG_PMU      = 2'd2,   // addr = PMU register, data = value
    CFG_SWITCH   = 2'd3    // addr = switch output, data = selected input
  } cfg_unit_e;

  // PMU registers.
  localparam int PMU_REG_WBASE  = 0;  // write pointer restarts here
  localparam int PMU_REG_RBASE  = 1;  // first read address
  localparam int PMU_REG_STRIDE = 2;  // read address step
  localparam int PMU_REG_START  = 3;  // write = number of words to stream out

  // Tile switch ports.
  localparam int SW_IN_CHAIN  = 0;  // from the previous tile (or DRAM for tile 0)
  localparam int SW_IN_PMU    = 1;  // PMU read stream
  localparam int SW_IN_PCU    = 2;  // PCU result vector
  localparam int SW_N_IN      = 3;
  localparam int SW_OUT_PMU   = 0;  // PMU write stream
  localparam int SW_OUT_PCU1  = 1;  // PCU lane inputs 1 (and stage inputs)
  localparam int SW_OUT_PCU2  = 2;  // PCU lane inputs 2
  localparam int SW_OUT_CHAIN = 3;  // to the next tile (or DRAM after the last)
  localparam int SW_N_OUT     = 4;

endpackage
