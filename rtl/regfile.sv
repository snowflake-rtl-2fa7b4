// regfile: the control core's general-purpose registers.
//
// Thirty-two 32-bit registers with two read ports (read combinationally in
// the dispatch stage) and one write port (written at the clock edge by the
// write-back stage), as in the paper. Register 0 always reads as zero (this
// design's choice).
module regfile #(
  parameter int NREG = 32,
  parameter int XLEN = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREG)-1:0]  ra1,
  input  logic [$clog2(NREG)-1:0]  ra2,
  output logic [XLEN-1:0]          rd1,
  output logic [XLEN-1:0]          rd2,
  input  logic                     we,
  input  logic [$clog2(NREG)-1:0]  wa,
  input  logic [XLEN-1:0]          wd
);
  logic [NREG-1:0][XLEN-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               r <= '0;
    else if (we && wa != '0)  r[wa] <= wd;
  end

  assign rd1 = (ra1 == '0) ? '0 : r[ra1];
  assign rd2 = (ra2 == '0) ? '0 : r[ra2];
endmodule
