// tb_ssm_rdu: end-to-end test of the SSM-RDU top with 3 tiles and a small PMU
// (PCUs at their full 32 x 12 size).
//
// Operation 1, a Hyena-style frequency-domain filter fused over two tiles:
//   DRAM -> tile 0 (bypass) -> PMU 1            filter taps
//   DRAM -> PMU 0                              8 signal vectors (16 complex points)
//   PMU 0 -> PCU 0 (FFT mode) -> PCU 1 (element-wise, times the taps read from
//   PMU 1 in step) -> tile 2 (bypass) -> DRAM
// Operation 2, after reconfiguring the same tiles (mode switch), a Mamba-style
// scan chain:
//   PMU 0 (strided read) -> PCU 0 (HS scan) -> PCU 1 (B scan) ->
//   PCU 2 (reduction) -> DRAM
// Every result vector is compared with a reference computed here (a direct
// DFT with $cos/$sin for the FFT, within a fixed-point tolerance; exact sums
// for the scans and the reduction). A monitor counts how often each mechanism
// happened: PMU writes, PMU strided reads, switch bypass, multicast of one
// input to both PCU operands, each PCU mode, and mode switches. A mechanism
// that never happened counts as a failure. The systolic mode is exercised by
// the PCU's own testbench only.
module tb_ssm_rdu;
  import ssm_rdu_pkg::*;

  localparam int NT = 3;
  localparam int L = 32;
  localparam int S = 12;
  localparam int D = 512;
  localparam int NB = 4;
  localparam int NV = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0, acc_clr = 0, dram_in_valid = 0, dram_out_valid;
  logic [$clog2(NT)-1:0] cfg_tile = '0;
  cfg_unit_e   cfg_unit = CFG_PCU_FU;
  logic [15:0] cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  data_t       dram_in_data [L], dram_out_data [L];
  pcu_mode_e   pcu_mode [NT];
  logic        pmu_busy [NT];

  ssm_rdu #(.NUM_TILES(NT), .DEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_tile(cfg_tile), .cfg_unit(cfg_unit),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .acc_clr(acc_clr),
    .dram_in_valid(dram_in_valid), .dram_in_data(dram_in_data),
    .dram_out_valid(dram_out_valid), .dram_out_data(dram_out_data),
    .pcu_mode(pcu_mode), .pmu_busy(pmu_busy));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
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

  // ---------------------------------------------------------------- monitor
  int n_pmu_wr, n_pmu_stride, n_bypass, n_multicast, n_mode_switch;
  int n_mode [6];
  pcu_mode_e last_mode [NT];
  for (genvar t = 0; t < NT; t++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_tile[t].u_tile.u_pmu.wr_valid) n_pmu_wr++;
      if (dut.g_tile[t].u_tile.u_pmu.rd_busy && dut.g_tile[t].u_tile.u_pmu.rstride > 1) n_pmu_stride++;
      if (dut.g_tile[t].u_tile.chain_out_valid &&
          int'(dut.g_tile[t].u_tile.u_switch.sel[SW_OUT_CHAIN]) == SW_IN_CHAIN) n_bypass++;
      if (dut.g_tile[t].u_tile.u_pcu.in_valid) begin
        n_mode[int'(pcu_mode[t])]++;
        if (dut.g_tile[t].u_tile.u_switch.sel[SW_OUT_PCU1] == dut.g_tile[t].u_tile.u_switch.sel[SW_OUT_PCU2])
          n_multicast++;
      end
      if (pcu_mode[t] != last_mode[t]) n_mode_switch++;
      last_mode[t] <= pcu_mode[t];
    end
  end

  // ---------------------------------------------------------------- config
  task automatic cfg(int tile, cfg_unit_e unit, int addr, int data);
    @(negedge clk);
    cfg_we = 1; cfg_tile = 2'(tile); cfg_unit = unit; cfg_addr = 16'(addr); cfg_data = 32'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask
  task automatic fu(int tile, int s, int l, fu_cfg_t c);
    cfg(tile, CFG_PCU_FU, (s << 5) | l, int'(c));
  endtask
  task automatic route(int tile, int out, int in);
    cfg(tile, CFG_SWITCH, out, in);
  endtask
  function automatic fu_cfg_t pass_cfg();
    return fu_cfg(MA_LANE1, MB_LANE2, AA_CONST, AB_LANE2, 1'b0, O2_SUM, O1_LANE1, 1'b0, '0);
  endfunction
  function automatic data_t fmul(data_t a, data_t b);
    longint p = longint'(a) * longint'(b);
    return data_t'(p >>> 8);
  endfunction
  function automatic int bitrev(int v, int nb);
    int r = 0;
    for (int i = 0; i < nb; i++) if ((v >> i) & 1) r |= 1 << (nb - 1 - i);
    return r;
  endfunction
  function automatic int rotl(int v, int k, int nb);
    for (int i = 0; i < k; i++) v = ((v << 1) & ((1 << nb) - 1)) | ((v >> (nb - 1)) & 1);
    return v;
  endfunction
  function automatic int rnd(real x);
    return $rtoi(x + (x >= 0 ? 0.5 : -0.5));
  endfunction

  task automatic cfg_fft(int tile);
    real pi = 3.14159265358979;
    cfg(tile, CFG_PCU_MODE, 0, int'(PCU_FFT));
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
        fu(tile, 3*t, l, fu_cfg(MA_LANE1, MB_CONST, AA_PROD, AB_CONST, 1'b0, O2_PROD, O1_LANE2, 1'b0,
                                data_t'(rnd(wr * 256.0))));
        fu(tile, 3*t+1, l, fu_cfg(MA_LANE1, MB_CONST, AA_PROD, AB_LANE2, 1'b0, O2_SUM, O1_LANE1, 1'b0,
                                  data_t'(rnd((p == 0 ? -wi : wi) * 256.0))));
        fu(tile, 3*t+2, l, fu_cfg_add((pos & 1) == 1));
      end
  endtask

  task automatic cfg_uniform(int tile, pcu_mode_e m, fu_cfg_t c0, fu_cfg_t c);
    cfg(tile, CFG_PCU_MODE, 0, int'(m));
    for (int s = 0; s < S; s++)
      for (int l = 0; l < L; l++) fu(tile, s, l, (s == 0) ? c0 : c);
  endtask

  // DRAM-side streams
  data_t sig [NV][L], taps [NV][L], outv [64][L];
  int    nout;
  always @(posedge clk) if (dram_out_valid) begin
    outv[nout] <= dram_out_data;
    nout <= nout + 1;
  end

  task automatic dram_send(data_t v [NV][L], int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      dram_in_valid = 1; dram_in_data = v[i];
    end
    @(negedge clk);
    dram_in_valid = 0;
  endtask

  task automatic wait_out(int n);
    int guard = 0;
    while (nout < n && guard < 500) begin @(posedge clk); guard++; end
    check("result vectors", nout, n);
  endtask

  initial begin
    real pi = 3.14159265358979;
    nout = 0;
    for (int l = 0; l < L; l++) dram_in_data[l] = '0;
    for (int t = 0; t < NT; t++) last_mode[t] = PCU_ELEMENTWISE;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ======================= operation 1: FFT, multiply by taps
    for (int v = 0; v < NV; v++)
      for (int l = 0; l < L; l++) begin
        sig[v][l]  = data_t'($urandom_range(0, 200)) - 100;
        taps[v][l] = data_t'($urandom_range(0, 512));     // Q8 in [0, 2]
      end
    // taps into PMU 1 through tile 0's bypass
    route(0, SW_OUT_CHAIN, SW_IN_CHAIN);
    route(1, SW_OUT_PMU, SW_IN_CHAIN);
    cfg(1, CFG_PMU, PMU_REG_WBASE, 0);
    dram_send(taps, NV);
    repeat (4) @(posedge clk);
    route(0, SW_OUT_CHAIN, 7);
    route(1, SW_OUT_PMU, 7);
    // signal into PMU 0
    route(0, SW_OUT_PMU, SW_IN_CHAIN);
    cfg(0, CFG_PMU, PMU_REG_WBASE, 0);
    dram_send(sig, NV);
    repeat (4) @(posedge clk);
    route(0, SW_OUT_PMU, 7);
    // compute pipeline
    cfg_fft(0);
    route(0, SW_OUT_PCU1, SW_IN_PMU);
    route(0, SW_OUT_PCU2, SW_IN_PMU);
    route(0, SW_OUT_CHAIN, SW_IN_PCU);
    cfg_uniform(1, PCU_ELEMENTWISE,
                fu_cfg(MA_LANE1, MB_LANE2, AA_PROD, AB_CONST, 1'b0, O2_PROD, O1_LANE1, 1'b0, '0),
                pass_cfg());
    route(1, SW_OUT_PCU1, SW_IN_PMU);
    route(1, SW_OUT_PCU2, SW_IN_CHAIN);
    route(1, SW_OUT_CHAIN, SW_IN_PCU);
    route(2, SW_OUT_CHAIN, SW_IN_CHAIN);
    for (int t = 0; t < 2; t++) begin
      cfg(t, CFG_PMU, PMU_REG_RBASE, 0);
      cfg(t, CFG_PMU, PMU_REG_STRIDE, 1);
    end
    // Start PMU 0, then PMU 1 so that its taps meet the FFT results at PCU 1:
    // PMU 0 data reaches PCU 1 after 1 (read) + 1 (switch) + S (PCU 0) + 1
    // (switch 0) + 1 (switch 1) cycles; PMU 1 data after 1 + 1.
    @(negedge clk);
    cfg_we = 1; cfg_tile = 0; cfg_unit = CFG_PMU; cfg_addr = PMU_REG_START; cfg_data = NV;
    @(negedge clk);
    cfg_we = 0;
    repeat (S + 1) @(negedge clk);
    cfg_we = 1; cfg_tile = 1; cfg_unit = CFG_PMU; cfg_addr = PMU_REG_START; cfg_data = NV;
    @(negedge clk);
    cfg_we = 0;
    wait_out(NV);
    for (int v = 0; v < NV && v < nout; v++)
      for (int pos = 0; pos < 16; pos++) begin
        int kk;
        real xr, xi;
        kk = rotl(pos, NB - 1, NB);
        xr = 0.0; xi = 0.0;
        for (int n = 0; n < 16; n++) begin
          real ang, ar, ai;
          ar = real'(sig[v][2*bitrev(n, NB)]);
          ai = real'(sig[v][2*bitrev(n, NB)+1]);
          ang = -2.0 * pi * n * kk / 16.0;
          xr += ar * $cos(ang) - ai * $sin(ang);
          xi += ar * $sin(ang) + ai * $cos(ang);
        end
        check("fft*taps re", int'(outv[v][2*pos]),   rnd(xr * real'(taps[v][2*pos]) / 256.0), 60);
        check("fft*taps im", int'(outv[v][2*pos+1]), rnd(xi * real'(taps[v][2*pos+1]) / 256.0), 60);
      end

    // ======================= operation 2: HS scan -> B scan -> reduction
    nout = 0;
    cfg_uniform(0, PCU_HS_SCAN, fu_cfg_add(1'b0), fu_cfg_add(1'b0));
    cfg_uniform(1, PCU_B_SCAN, fu_cfg_add(1'b0), fu_cfg_add(1'b0));
    cfg_uniform(2, PCU_REDUCTION, pass_cfg(), fu_cfg_add(1'b0));
    for (int st = 6; st < S; st++) fu(2, st, 0, pass_cfg());   // tree done after log2(32) stages
    route(1, SW_OUT_PCU1, 7);
    route(2, SW_OUT_PCU2, SW_IN_CHAIN);
    route(2, SW_OUT_CHAIN, SW_IN_PCU);
    // read every other signal vector (stride 2)
    cfg(0, CFG_PMU, PMU_REG_RBASE, 1);
    cfg(0, CFG_PMU, PMU_REG_STRIDE, 2);
    cfg(0, CFG_PMU, PMU_REG_START, NV / 2);
    wait_out(NV / 2);
    for (int v = 0; v < NV / 2 && v < nout; v++) begin
      int s1 [L];
      int s2 [L];
      int tot;
      for (int l = 0; l < L; l++) begin
        s1[l] = 0;
        for (int k = l + 1; k < L; k++) s1[l] += int'(sig[2*v+1][k]);
      end
      tot = 0;
      for (int l = 0; l < L; l++) begin
        s2[l] = 0;
        for (int k = l + 1; k < L; k++) s2[l] += s1[k];
        tot += s2[l];
      end
      check("scan chain + reduction", int'(outv[v][0]), int'(data_t'(tot)));
    end

    // ======================= mechanisms
    $display("pmu writes %0d, strided reads %0d, bypass %0d, multicast %0d, mode switches %0d",
             n_pmu_wr, n_pmu_stride, n_bypass, n_multicast, n_mode_switch);
    $display("vectors per mode %p", n_mode);
    if (n_pmu_wr == 0)      begin failures++; $display("FAIL no PMU write"); end
    if (n_pmu_stride == 0)  begin failures++; $display("FAIL no strided read"); end
    if (n_bypass == 0)      begin failures++; $display("FAIL no bypass"); end
    if (n_multicast == 0)   begin failures++; $display("FAIL no multicast"); end
    if (n_mode_switch == 0) begin failures++; $display("FAIL no mode switch"); end
    for (int m = 0; m < 6; m++)
      if (m != int'(PCU_SYSTOLIC) && n_mode[m] == 0) begin
        failures++; $display("FAIL mode %0d never ran", m);
      end
    checks += 10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
