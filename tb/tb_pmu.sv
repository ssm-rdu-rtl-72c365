// tb_pmu: self-checking test of the pattern memory unit at its default size
// (24576 words of 32 x 16 bit, 1.5 MB).
//
// Streams 300 random vectors into the PMU from a base address, then reads them
// back with unit stride, with stride 3, and across the wrap at the top of the
// memory, comparing each word with a model kept here. Also checks that read
// data comes one word per cycle, starting the cycle after the START write
// is taken, and that rd_busy covers exactly the issuing cycles.
module tb_pmu;
  import ssm_rdu_pkg::*;

  localparam int L = 32;
  localparam int D = 24576;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_we = 0, wr_valid = 0, rd_valid, rd_busy;
  logic [1:0]  reg_addr = '0;
  logic [31:0] reg_data = '0;
  data_t       wr_data [L], rd_data [L];

  pmu dut (.clk(clk), .rst_n(rst_n), .reg_we(reg_we), .reg_addr(reg_addr), .reg_data(reg_data),
           .wr_valid(wr_valid), .wr_data(wr_data), .rd_valid(rd_valid), .rd_data(rd_data),
           .rd_busy(rd_busy));

  int checks = 0, failures = 0;
  data_t model [int][L];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  task automatic wreg(int a, int v);
    @(negedge clk);
    reg_we = 1; reg_addr = 2'(a); reg_data = 32'(v);
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic write_words(int base, int n);
    wreg(PMU_REG_WBASE, base);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_valid = 1;
      for (int l = 0; l < L; l++) wr_data[l] = data_t'($urandom);
      model[(base + i) % D] = wr_data;
    end
    @(negedge clk);
    wr_valid = 0;
  endtask

  task automatic read_check(int base, int stride, int n);
    int got, addr, idle;
    wreg(PMU_REG_RBASE, base);
    wreg(PMU_REG_STRIDE, stride);
    // START: issue on the next edge
    @(negedge clk);
    reg_we = 1; reg_addr = 2'(PMU_REG_START); reg_data = 32'(n);
    @(posedge clk); #1;
    reg_we = 0;
    check("busy after start", int'(rd_busy), 1);
    check("no data yet", int'(rd_valid), 0);
    got = 0; addr = base; idle = 0;
    while (got < n && idle < 5) begin
      @(posedge clk); #1;
      if (rd_valid) begin
        idle = 0;
        for (int l = 0; l < L; l++) check("read data", int'(rd_data[l]), int'(model[addr][l]));
        addr = (addr + stride) % D;
        got++;
      end else begin
        idle++;
        failures++;
        $display("FAIL gap in read stream");
      end
    end
    check("words read", got, n);
    @(posedge clk); #1;
    check("stream ends", int'(rd_valid), 0);
    check("not busy", int'(rd_busy), 0);
  endtask

  initial begin
    for (int l = 0; l < L; l++) wr_data[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_words(100, 300);
    read_check(100, 1, 300);
    read_check(101, 3, 90);
    write_words(D - 20, 40);          // wraps past the top
    read_check(D - 20, 1, 40);
    read_check(D - 19, 2, 15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
