// tb_pcu_xlane: checks the cross-lane wiring of an 8-lane PCU, stage by stage
// and mode by mode, against link tables written out by hand from the 8-lane
// drawings of the baseline PCU (reduction tree), the FFT-mode PCU and the
// Hillis-Steele and Blelloch scan-mode PCUs.
//
// Each lane l of the previous stage drives 100+l on lane output 1 and 200+l
// on lane output 2, so every FU input value names its source. For every one of
// the six modes and stages 0..5 the two lane inputs of all eight FUs are
// compared with the tables. Expected codes: 'Z' zero, 'A' own lane output 1,
// 'B' own lane output 2, a digit k: lane k's lane output 2.
module tb_pcu_xlane;
  import ssm_rdu_pkg::*;

  localparam int L = 8;
  localparam int S = 6;

  pcu_mode_e mode;
  data_t pv1 [L];
  data_t pv2 [L];
  data_t in1 [S][L];
  data_t in2 [S][L];
  int checks = 0, failures = 0;

  for (genvar s = 0; s < S; s++) begin : g_s
    pcu_xlane #(.LANES(L), .STAGE(s)) dut (
      .mode(mode), .prev_v1(pv1), .prev_v2(pv2), .in1(in1[s]), .in2(in2[s]));
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Hand tables: one string per (mode, stage); characters 2l and 2l+1 are the
  // sources of lane l's inputs 1 and 2.
  function automatic string link_table(pcu_mode_e m, int s);
    case (m)
      PCU_REDUCTION: case (s)
        1: return "B1ABB3ABB5ABB7AB";
        2: return "B2ABABABB6ABABAB";
        3: return "B4ABABABABABABAB";
        default: return "ABABABABABABABAB";
      endcase
      PCU_HS_SCAN: case (s)
        1: return "B1B2B3B4B5B6B7BZ";
        2: return "B2B3B4B5B6B7BZBZ";
        3: return "B4B5B6B7BZBZBZBZ";
        4: return "Z1Z2Z3Z4Z5Z6Z7ZZ";
        default: return "ZBZBZBZBZBZBZBZB";
      endcase
      PCU_B_SCAN: case (s)
        1: return "B1ZBB3ZBB5ZBB7ZB";
        2: return "ZZZBZBZBB6ZBZBZB";
        3: return "B4ZBZBZBZ0ZBZBZB";
        4: return "B2ZBZ0ZBB6ZBZ4ZB";
        5: return "B1Z0B3Z2B5Z4B7Z6";
        default: return "ZBZBZBZBZBZBZBZB";
      endcase
      PCU_FFT: case (s)
        0: return "0110233245546776";
        2: return "B2B30B1BB6B74B5B";
        3: return "0110455423326776";
        5: return "B2B30B1BB6B74B5B";
        default: return "ABABABABABABABAB";
      endcase
      default: return "ABABABABABABABAB";
    endcase
  endfunction

  function automatic int expect_val(byte c, int l);
    if (c == "Z") return 0;
    if (c == "A") return 100 + l;
    if (c == "B") return 200 + l;
    return 200 + int'(c - "0");
  endfunction

  initial begin
    for (int l = 0; l < L; l++) begin
      pv1[l] = data_t'(100 + l);
      pv2[l] = data_t'(200 + l);
    end
    for (int m = 0; m < 6; m++) begin
      mode = pcu_mode_e'(m);
      #1;
      for (int s = 0; s < S; s++) begin
        string t;
        t = link_table(mode, s);
        for (int l = 0; l < L; l++) begin
          checks += 2;
          if (int'(in1[s][l]) != expect_val(t[2*l], l)) begin
            failures++;
            $display("FAIL mode %s stage %0d lane %0d in1: got %0d expected %0d",
                     mode.name(), s, l, in1[s][l], expect_val(t[2*l], l));
          end
          if (int'(in2[s][l]) != expect_val(t[2*l+1], l)) begin
            failures++;
            $display("FAIL mode %s stage %0d lane %0d in2: got %0d expected %0d",
                     mode.name(), s, l, in2[s][l], expect_val(t[2*l+1], l));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
