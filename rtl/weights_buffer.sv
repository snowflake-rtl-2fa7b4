// weights_buffer: the weights buffers of one vMAC.
//
// Every MAC owns a private weights buffer of WB_DEPTH 16-bit words (512 words
// = 1 kB, so 16 kB per vMAC of 16 MACs, as in the paper's 4-CU system). All
// buffers of a vMAC are read at the same address each cycle, giving one weight
// per MAC. A load writes one 256-bit line per cycle: word i of the line goes
// to MAC i's buffer at the write address (this word-to-MAC mapping is this
// design's choice).
//
// Timing: synchronous read, rdata is valid the cycle after raddr.
module weights_buffer
  import snowflake_pkg::*;
#(
  parameter int NW    = NMAC,
  parameter int DEPTH = WB_DEPTH
) (
  input  logic                       clk,
  input  logic [$clog2(DEPTH)-1:0]   raddr,
  output logic [NW-1:0][WORD_W-1:0]  rdata,
  input  logic                       we,
  input  logic [$clog2(DEPTH)-1:0]   waddr,
  input  logic [NW-1:0][WORD_W-1:0]  wdata
);
  for (genvar i = 0; i < NW; i++) begin : g_buf
    logic [WORD_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata[i];
      rdata[i] <= mem[raddr];
    end
  end
endmodule
