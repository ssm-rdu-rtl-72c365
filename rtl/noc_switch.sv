// noc_switch: programmable switch that routes vector streams inside a tile and
// between neighbouring tiles.
//
// N_IN vector inputs, N_OUT vector outputs, each LANES words plus a valid bit.
// Every output has a select register naming the input it copies; a select of
// N_IN or more disconnects the output (valid held low). One input may feed
// several outputs (multicast). The output is registered, so every hop costs
// one cycle.
//
// The RDU's switches are only named as programmable network-on-chip switches;
// this statically configured crossbar, with no flow control, is the simplest
// thing that lets a configuration wire PCUs, PMUs and neighbouring tiles into
// one streaming pipeline. Select registers reset to "disconnected".
// Registers: sel_we writes reg_data into the select of output sel_addr.
module noc_switch
  import ssm_rdu_pkg::*;
#(
  parameter int LANES = 32,
  parameter int N_IN  = SW_N_IN,
  parameter int N_OUT = SW_N_OUT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sel_we,
  input  logic [$clog2(N_OUT)-1:0] sel_addr,
  input  logic [31:0]              sel_data,
  input  logic                     in_valid  [N_IN],
  input  data_t                    in_data   [N_IN][LANES],
  output logic                     out_valid [N_OUT],
  output data_t                    out_data  [N_OUT][LANES]
);

  localparam int SW = $clog2(N_IN + 1);
  logic [SW-1:0] sel [N_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) begin
        sel[o]       <= SW'(N_IN);
        out_valid[o] <= 1'b0;
        out_data[o]  <= '{default: '0};
      end
    end else begin
      if (sel_we && int'(sel_addr) < N_OUT)
        sel[sel_addr] <= (sel_data >= 32'(N_IN)) ? SW'(N_IN) : SW'(sel_data);
      for (int o = 0; o < N_OUT; o++) begin
        if (int'(sel[o]) < N_IN) begin
          out_valid[o] <= in_valid[sel[o]];
          out_data[o]  <= in_data[sel[o]];
        end else begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

endmodule
