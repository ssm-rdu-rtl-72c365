// tb_noc_switch: self-checking test of the tile switch (3 inputs, 4 outputs,
// 32 lanes).
//
// After reset every output must be disconnected. The test then programs random
// routes (including multicast of one input to several outputs and
// disconnection with an out-of-range select), drives random vectors and valid
// bits on all inputs, and checks that each output shows, one cycle later, the
// vector and valid of the input it selects, or no valid when disconnected.
module tb_noc_switch;
  import ssm_rdu_pkg::*;

  localparam int L = 32;
  localparam int NI = SW_N_IN;
  localparam int NO = SW_N_OUT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        sel_we = 0;
  logic [1:0]  sel_addr = '0;
  logic [31:0] sel_data = '0;
  logic  in_valid [NI], out_valid [NO];
  data_t in_data [NI][L], out_data [NO][L];

  noc_switch #(.LANES(L)) dut (.clk(clk), .rst_n(rst_n), .sel_we(sel_we), .sel_addr(sel_addr),
    .sel_data(sel_data), .in_valid(in_valid), .in_data(in_data), .out_valid(out_valid),
    .out_data(out_data));

  int checks = 0, failures = 0;
  int route [NO];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = 1;
      for (int l = 0; l < L; l++) in_data[i][l] = data_t'(i * 100 + l);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk); #1;
    for (int o = 0; o < NO; o++) check("disconnected after reset", int'(out_valid[o]), 0);

    for (int round = 0; round < 40; round++) begin
      logic  v_prev [NI];
      data_t d_prev [NI][L];
      // program all outputs
      for (int o = 0; o < NO; o++) begin
        @(negedge clk);
        route[o] = $urandom_range(0, NI);      // NI means disconnected
        if (round == 0) route[o] = 1;          // multicast of input 1 to all
        sel_we = 1; sel_addr = 2'(o); sel_data = (route[o] == NI) ? 32'd77 : 32'(route[o]);
      end
      @(negedge clk);
      sel_we = 0;
      // drive random data for a few cycles and check one cycle later
      for (int c = 0; c < 5; c++) begin
        @(negedge clk);
        for (int i = 0; i < NI; i++) begin
          in_valid[i] = 1'($urandom_range(0, 1));
          for (int l = 0; l < L; l++) in_data[i][l] = data_t'($urandom);
        end
        v_prev = in_valid; d_prev = in_data;
        @(posedge clk); #1;
        for (int o = 0; o < NO; o++) begin
          if (route[o] == NI) check("disconnected", int'(out_valid[o]), 0);
          else begin
            check("valid", int'(out_valid[o]), int'(v_prev[route[o]]));
            for (int l = 0; l < L; l++)
              check("data", int'(out_data[o][l]), int'(d_prev[route[o]][l]));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
