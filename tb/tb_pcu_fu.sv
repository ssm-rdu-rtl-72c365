// tb_pcu_fu: self-checking test of one functional unit.
//
// Drives random operands through every mux setting of the FU and compares the
// registered outputs, one cycle later, with a reference computed here:
// fixed-point multiply (product >>> FRAC_BITS, 16-bit wrap), add, subtract,
// multiply-accumulate over a run of inputs, the lane-output-1 select and the
// stage pass-through. Also checks that out_valid follows in_valid by one cycle
// and that acc_clr clears the accumulator.
module tb_pcu_fu;
  import ssm_rdu_pkg::*;

  localparam int FRAC = 8;

  logic    clk = 0, rst_n = 0;
  fu_cfg_t cfg;
  logic    acc_clr, in_valid, out_valid;
  data_t   li1, li2, si, lo1, lo2, so;
  int      checks = 0, failures = 0;

  always #5 clk = ~clk;

  pcu_fu #(.FRAC_BITS(FRAC)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .acc_clr(acc_clr), .in_valid(in_valid),
    .lane_in1(li1), .lane_in2(li2), .stage_in(si), .out_valid(out_valid),
    .lane_out1(lo1), .lane_out2(lo2), .stage_out(so));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t fmul(data_t a, data_t b);
    longint p = longint'(a) * longint'(b);
    return data_t'(p >>> FRAC);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Apply one input with the given config, return outputs after one edge.
  task automatic step(fu_cfg_t c, data_t a, data_t b, data_t s, logic v);
    cfg = c; li1 = a; li2 = b; si = s; in_valid = v;
    @(posedge clk); #1;
  endtask

  data_t a, b, s, k, exp2, acc_ref;
  int    sel;

  initial begin
    cfg = '0; acc_clr = 0; in_valid = 0; li1 = 0; li2 = 0; si = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // Random sweep over all operand selects, both add/sub and both out selects.
    for (int i = 0; i < 400; i++) begin
      fu_cfg_t c;
      data_t ma, mb, aa, ab, prod;
      a = data_t'($urandom); b = data_t'($urandom); s = data_t'($urandom);
      k = data_t'($urandom);
      c = '0;
      c.mul_a = mul_a_sel_e'($urandom_range(0, 1));
      c.mul_b = mul_b_sel_e'($urandom_range(0, 2));
      c.add_a = add_a_sel_e'($urandom_range(0, 2));
      c.add_b = add_b_sel_e'($urandom_range(1, 3));   // accumulator tested below
      c.sub   = 1'($urandom_range(0, 1));
      c.out2  = out2_sel_e'($urandom_range(0, 1));
      c.out1  = out1_sel_e'($urandom_range(0, 1));
      c.konst = k;
      ma = (c.mul_a == MA_CONST) ? k : a;
      mb = (c.mul_b == MB_STAGE) ? s : (c.mul_b == MB_LANE2) ? b : k;
      prod = fmul(ma, mb);
      aa = (c.add_a == AA_PROD) ? prod : (c.add_a == AA_LANE1) ? a : k;
      ab = (c.add_b == AB_LANE2) ? b : (c.add_b == AB_CONST) ? k : a;
      exp2 = (c.out2 == O2_PROD) ? prod : (c.sub ? data_t'(aa - ab) : data_t'(aa + ab));
      step(c, a, b, s, 1'b1);
      check("lane_out2", int'(lo2), int'(exp2));
      check("lane_out1", int'(lo1), int'((c.out1 == O1_LANE2) ? b : a));
      check("stage_out", int'(so), int'(s));
      check("out_valid", int'(out_valid), 1);
    end

    // out_valid follows in_valid with one cycle of latency.
    step(fu_cfg_add(1'b0), 1, 2, 0, 1'b0);
    check("out_valid low", int'(out_valid), 0);

    // Multiply-accumulate: acc += lane1 * stage for 20 valid inputs, with
    // idle cycles in between that must not accumulate.
    acc_clr = 1; step(fu_cfg_add(1'b0), 0, 0, 0, 1'b0); acc_clr = 0;
    acc_ref = 0;
    for (int i = 0; i < 20; i++) begin
      fu_cfg_t c;
      c = fu_cfg(MA_LANE1, MB_STAGE, AA_PROD, AB_ACC, 1'b0, O2_SUM, O1_LANE1, 1'b1, '0);
      a = data_t'($urandom_range(0, 4000)) - 2000;
      s = data_t'($urandom_range(0, 4000)) - 2000;
      acc_ref = data_t'(acc_ref + fmul(a, s));
      step(c, a, 0, s, 1'b1);
      check("mac out", int'(lo2), int'(acc_ref));
      step(c, 100, 0, 100, 1'b0);   // not valid: no accumulation
    end
    check("acc held", int'(dut.acc), int'(acc_ref));
    acc_clr = 1; step(fu_cfg_add(1'b0), 0, 0, 0, 1'b0); acc_clr = 0;
    check("acc cleared", int'(dut.acc), 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
