// mem_model: behavioural model of the external memory (the board's DRAM and
// its controller) for simulation only.
//
// Holds DEPTH 256-bit lines. A request is taken when req.valid && ready; a
// write lands at once, a read returns its line LAT cycles later, in order.
// With STALL set, ready drops pseudo-randomly to exercise back-pressure.
// Testbenches fill mem[] directly.
module mem_model
  import snowflake_pkg::*;
#(
  parameter int DEPTH = 4096,
  parameter int LAT   = 6,
  parameter bit STALL = 1'b0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp
);
  line_t mem [DEPTH];
  logic  [LAT-1:0] vpipe;
  line_t dpipe [LAT];
  logic  [7:0] lfsr;

  assign ready = !STALL || lfsr[0] || lfsr[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      lfsr  <= 8'hA5;
    end else begin
      lfsr  <= {lfsr[6:0], lfsr[7] ^ lfsr[5] ^ lfsr[4] ^ lfsr[3]};
      vpipe <= {vpipe[LAT-2:0], req.valid && ready && !req.we};
      dpipe[0] <= mem[req.addr % DEPTH];
      for (int i = 1; i < LAT; i++) dpipe[i] <= dpipe[i-1];
      if (req.valid && ready && req.we) mem[req.addr % DEPTH] <= req.wdata;
    end
  end

  assign rsp.valid = vpipe[LAT-1];
  assign rsp.rdata = dpipe[LAT-1];
endmodule
