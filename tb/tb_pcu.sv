// tb_pcu: end-to-end test of one PCU at its default size, 32 lanes x 12
// stages, in all six modes, switching mode between runs.
//
// For every mode the FUs are configured over the configuration port, a burst
// of vectors is streamed in back to back, and each output vector is compared
// with a reference computed here:
//   element-wise  out[l] = a[l] * b[l] (Q8 fixed point)
//   reduction     out[0] = sum of a[l] * b[l] (dot product over the tree)
//   HS scan       out[l] = sum of x[k] for k > l (exclusive scan, sequence
//   B scan          element i in lane 31-i)
//   FFT           16-point complex DFT, computed directly with $cos/$sin,
//                 checked within a fixed-point tolerance; input element k is
//                 placed at position bitrev(k), output position p holds
//                 X[rotr(p)] (see the README)
//   systolic      an 8 x 12 matrix product A*B accumulated in place by the
//                 FU accumulators, A streamed along the lanes and B down the
//                 stages with the usual skew
// It also checks the 12-cycle latency and that a burst of vectors comes out on
// consecutive cycles (one vector per cycle).
module tb_pcu;
  import ssm_rdu_pkg::*;

  localparam int L = 32;
  localparam int S = 12;
  localparam int FRAC = 8;
  localparam int NB = 4;          // log2 of 16 complex points
  localparam int NV = 8;          // vectors per burst

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0, mode_we = 0, acc_clr = 0, in_valid = 0, out_valid;
  logic [$clog2(S)-1:0] cfg_stage = '0;
  logic [$clog2(L)-1:0] cfg_lane = '0;
  fu_cfg_t   cfg_data = '0;
  pcu_mode_e mode_in = PCU_ELEMENTWISE, mode;
  data_t in_v1 [L], in_v2 [L], out_v1 [L], out_v2 [L];
  data_t stage_in [S], stage_out [S];

  pcu dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_stage(cfg_stage), .cfg_lane(cfg_lane),
    .cfg_data(cfg_data), .mode_we(mode_we), .mode_in(mode_in), .mode(mode), .acc_clr(acc_clr),
    .in_valid(in_valid), .in_v1(in_v1), .in_v2(in_v2), .stage_in(stage_in),
    .out_valid(out_valid), .out_v1(out_v1), .out_v2(out_v2), .stage_out(stage_out));

  int checks = 0, failures = 0;
  int modes_run [6];
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp, int tol = 0);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write_cfg(int s, int l, fu_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_stage = 4'(s); cfg_lane = 5'(l); cfg_data = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic set_mode(pcu_mode_e m);
    @(negedge clk);
    mode_we = 1; mode_in = m;
    @(negedge clk);
    mode_we = 0;
    modes_run[int'(m)]++;
  endtask

  // Pass lane output 2 on unchanged, lane output 1 on unchanged.
  function automatic fu_cfg_t pass_cfg();
    return fu_cfg(MA_LANE1, MB_LANE2, AA_CONST, AB_LANE2, 1'b0, O2_SUM, O1_LANE1, 1'b0, '0);
  endfunction

  function automatic data_t fmul(data_t a, data_t b);
    longint p = longint'(a) * longint'(b);
    return data_t'(p >>> FRAC);
  endfunction

  // Stream NV vectors (a, b) and collect NV output vectors; check latency and
  // back-to-back output.
  data_t va [NV][L], vb [NV][L], vo [NV][L];
  data_t stg [NV+64][S];
  int    nstg;

  task automatic run_burst(int nvec);
    longint t_in, t_first;
    int got;
    got = 0;
    fork
      begin
        for (int v = 0; v < nvec; v++) begin
          @(negedge clk);
          in_valid = 1;
          in_v1 = va[v]; in_v2 = vb[v];
          if (v == 0) t_in = cycle;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        while (got < nvec) begin
          @(posedge clk); #1;
          if (out_valid) begin
            if (got == 0) begin
              t_first = cycle;
              check("latency", int'(t_first - t_in), S);
            end else begin
              check("back-to-back", int'(cycle - t_first), got);
            end
            vo[got] = out_v2;
            got++;
          end
        end
      end
    join
  endtask

  // ---------------------------------------------------------------------------
  function automatic int bitrev(int v, int nb);
    int r = 0;
    for (int i = 0; i < nb; i++) if ((v >> i) & 1) r |= 1 << (nb - 1 - i);
    return r;
  endfunction
  function automatic int rotl(int v, int k, int nb);
    for (int i = 0; i < k; i++) v = ((v << 1) & ((1 << nb) - 1)) | ((v >> (nb - 1)) & 1);
    return v;
  endfunction

  real pi = 3.14159265358979;

  initial begin
    for (int l = 0; l < L; l++) begin in_v1[l] = '0; in_v2[l] = '0; end
    for (int s = 0; s < S; s++) stage_in[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- element-wise: stage 0 multiplies, the rest pass.
    set_mode(PCU_ELEMENTWISE);
    for (int l = 0; l < L; l++) begin
      write_cfg(0, l, fu_cfg(MA_LANE1, MB_LANE2, AA_PROD, AB_CONST, 1'b0, O2_PROD, O1_LANE1, 1'b0, '0));
      for (int s = 1; s < S; s++) write_cfg(s, l, pass_cfg());
    end
    for (int v = 0; v < NV; v++)
      for (int l = 0; l < L; l++) begin
        va[v][l] = data_t'($urandom_range(0, 8000)) - 4000;
        vb[v][l] = data_t'($urandom_range(0, 2000)) - 1000;
      end
    run_burst(NV);
    for (int v = 0; v < NV; v++)
      for (int l = 0; l < L; l++)
        check("elementwise", int'(vo[v][l]), int'(fmul(va[v][l], vb[v][l])));

    // ---------------- reduction: multiply, then the reduction tree.
    set_mode(PCU_REDUCTION);
    for (int l = 0; l < L; l++)
      for (int s = 1; s < S; s++)
        write_cfg(s, l, (s <= 5) ? fu_cfg_add(1'b0) : pass_cfg());
    for (int v = 0; v < NV; v++)
      for (int l = 0; l < L; l++) begin
        va[v][l] = data_t'($urandom_range(0, 2000)) - 1000;
        vb[v][l] = data_t'($urandom_range(0, 512)) - 256;
      end
    run_burst(NV);
    for (int v = 0; v < NV; v++) begin
      int acc; acc = 0;
      for (int l = 0; l < L; l++) acc += int'(fmul(va[v][l], vb[v][l]));
      check("reduction", int'(vo[v][0]), int'(data_t'(acc)));
    end

    // ---------------- HS scan and B scan: every FU adds its two lane inputs.
    for (int m = 0; m < 2; m++) begin
      set_mode(m == 0 ? PCU_HS_SCAN : PCU_B_SCAN);
      for (int l = 0; l < L; l++)
        for (int s = 0; s < S; s++) write_cfg(s, l, fu_cfg_add(1'b0));
      for (int v = 0; v < NV; v++)
        for (int l = 0; l < L; l++) begin
          va[v][l] = '0;
          vb[v][l] = data_t'($urandom_range(0, 1000)) - 500;
        end
      run_burst(NV);
      for (int v = 0; v < NV; v++)
        for (int l = 0; l < L; l++) begin
          int acc; acc = 0;
          for (int k = l + 1; k < L; k++) acc += int'(vb[v][k]);
          check(m == 0 ? "hs_scan" : "b_scan", int'(vo[v][l]), acc);
        end
    end

    // ---------------- FFT: 16-point complex FFT over the 12 stages.
    set_mode(PCU_FFT);
    for (int t = 0; t < NB; t++)
      for (int l = 0; l < L; l++) begin
        int pos, p, i, j;
        real ang, wr, wi;
        pos = l >> 1; p = l & 1;
        wr = 1.0; wi = 0.0;
        if ((pos & 1) == 1) begin
          i = rotl(pos, t, NB);
          j = i % (1 << t);
          ang = -2.0 * pi * j / (1 << (t + 1));
          wr = $cos(ang); wi = $sin(ang);
        end
        // complex multiply: real lane re*wr - im*wi, imaginary lane im*wr + re*wi
        write_cfg(3*t, l, fu_cfg(MA_LANE1, MB_CONST, AA_PROD, AB_CONST, 1'b0, O2_PROD, O1_LANE2, 1'b0,
                                 data_t'($rtoi(wr * 256.0 + (wr >= 0 ? 0.5 : -0.5)))));
        write_cfg(3*t+1, l, fu_cfg(MA_LANE1, MB_CONST, AA_PROD, AB_LANE2, 1'b0, O2_SUM, O1_LANE1, 1'b0,
                                   data_t'($rtoi((p == 0 ? -wi : wi) * 256.0 + ((p == 0 ? -wi : wi) >= 0 ? 0.5 : -0.5)))));
        write_cfg(3*t+2, l, fu_cfg_add((pos & 1) == 1));
      end
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < 16; k++) begin
        int pos;
        pos = bitrev(k, NB);
        va[v][2*pos]   = '0; va[v][2*pos+1] = '0;
        vb[v][2*pos]   = data_t'($urandom_range(0, 200)) - 100;
        vb[v][2*pos+1] = data_t'($urandom_range(0, 200)) - 100;
      end
    run_burst(NV);
    for (int v = 0; v < NV; v++)
      for (int pos = 0; pos < 16; pos++) begin
        int kk;
        real xr, xi;
        kk = rotl(pos, NB - 1, NB);          // output position pos holds X[rotr(pos)]
        xr = 0.0; xi = 0.0;
        for (int n = 0; n < 16; n++) begin
          real ang, ar, ai;
          ar = real'(vb[v][2*bitrev(n, NB)]);
          ai = real'(vb[v][2*bitrev(n, NB)+1]);
          ang = -2.0 * pi * n * kk / 16.0;
          xr += ar * $cos(ang) - ai * $sin(ang);
          xi += ar * $sin(ang) + ai * $cos(ang);
        end
        check("fft re", int'(vo[v][2*pos]),   $rtoi(xr + (xr >= 0 ? 0.5 : -0.5)), 24);
        check("fft im", int'(vo[v][2*pos+1]), $rtoi(xi + (xi >= 0 ? 0.5 : -0.5)), 24);
      end

    // ---------------- systolic: C = A (L x K) * B (K x S), output stationary.
    begin
      localparam int K = 8;
      int a [L][K];
      int b [K][S];
      set_mode(PCU_SYSTOLIC);
      for (int l = 0; l < L; l++)
        for (int s = 0; s < S; s++)
          write_cfg(s, l, fu_cfg(MA_LANE1, MB_STAGE, AA_PROD, AB_ACC, 1'b0, O2_SUM, O1_LANE1, 1'b1, '0));
      for (int l = 0; l < L; l++) for (int k = 0; k < K; k++) a[l][k] = $urandom_range(0, 8) - 4;
      for (int k = 0; k < K; k++) for (int s = 0; s < S; s++) b[k][s] = $urandom_range(0, 40) - 20;
      @(negedge clk); acc_clr = 1; @(negedge clk); acc_clr = 0;
      // A[l][k] (Q8) enters lane l at time k + l, B[k][s] enters stage s at k + s.
      for (int t = 0; t < K + L + S; t++) begin
        @(negedge clk);
        in_valid = 1;
        for (int l = 0; l < L; l++) begin
          int k; k = t - l;
          in_v1[l] = (k >= 0 && k < K) ? data_t'(a[l][k] * 256) : '0;
          in_v2[l] = '0;
        end
        for (int s = 0; s < S; s++) begin
          int k; k = t - s;
          stage_in[s] = (k >= 0 && k < K) ? data_t'(b[k][s]) : '0;
        end
      end
      @(negedge clk); in_valid = 0;
      repeat (S + 2) @(posedge clk);
      #1;
      for (int l = 0; l < L; l++)
        for (int s = 0; s < S; s++) begin
          int c; c = 0;
          for (int k = 0; k < K; k++) c += a[l][k] * b[k][s];
          check("systolic", int'(fu_acc(l, s)), c);
        end
    end

    for (int m = 0; m < 6; m++)
      if (modes_run[m] == 0) begin
        failures++;
        $display("FAIL mode %0d never run", m);
      end
    $display("modes run: %p", modes_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Accumulator of FU (lane, stage), read through the hierarchy.
  data_t acc_mat [L][S];
  for (genvar s = 0; s < S; s++) begin : g_s
    for (genvar l = 0; l < L; l++) begin : g_l
      assign acc_mat[l][s] = dut.g_stage[s].g_lane[l].u_fu.acc;
    end
  end
  function automatic data_t fu_acc(int l, int s);
    return acc_mat[l][s];
  endfunction
endmodule
