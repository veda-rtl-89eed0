// hbm_model: behavioural model of the off-chip HBM row port (not synthesizable
// intent; testbench only).  One 128 x FP16 row read or written per cycle; read
// data appear exactly LAT cycles after the request, as the accelerator's
// interface expects.  Holds ROWS rows addressed by the low address bits.
module hbm_model #(
  parameter int LAT  = 2,
  parameter int ROWS = 8192
) (
  input  logic                 clk,
  input  logic                 re,
  input  logic [23:0]          raddr,
  output logic [127:0][15:0]   rdata,
  input  logic                 we,
  input  logic [23:0]          waddr,
  input  logic [127:0][15:0]   wdata
);
  logic [127:0][15:0] mem [ROWS];
  logic [127:0][15:0] pipe [LAT];
  int reads = 0, writes = 0;

  always_ff @(posedge clk) begin
    pipe[0] <= re ? mem[raddr % ROWS] : '0;
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    if (re) reads <= reads + 1;
    if (we) begin
      mem[waddr % ROWS] <= wdata;
      writes <= writes + 1;
    end
  end
  assign rdata = pipe[LAT-1];
endmodule
