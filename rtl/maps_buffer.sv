// maps_buffer: the scratchpad of one compute unit for input and output maps.
//
// Four lanes (banks) each hold ROWS 256-bit lines. A maps line address L
// selects lane L[1:0] and row L>>2, so four consecutive lines form one
// 1024-bit row. There is one 1024-bit write port with a write enable per
// 64-bit chunk (16 enables), and four 256-bit read ports:
//   port 0  MAC trace decoder   (maps operand, "to vMAC multiplier")
//   port 1  MAX trace decoder   ("to maxpool")
//   port 2  third operand, VMOV ("to vMAC adder")
//   port 3  trace move decoder  ("to memory or other maps buf")
// Each lane serves one read per cycle. Port 0 is always granted; another port
// is granted only if no port of higher priority uses the same lane. The
// priority among ports 1..3 (2 > 1 > 3) is this design's choice: the paper only
// fixes the MAC decoder's priority. A crossbar returns each lane's line to its
// requester.
//
// Timing: a granted read returns rd_data[p] in the next cycle. A write is
// performed at the clock edge. Read and write of the same line in one cycle
// return the old data.
//
// Size: the paper's text gives 128 kB per CU (1024 rows of 1024 bits); its
// figure prints 8192 entries. ROWS defaults to the text's 1024.
module maps_buffer
  import snowflake_pkg::*;
#(
  parameter int ROWS = 1024
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [3:0]                        rd_req,
  input  logic [3:0][$clog2(ROWS)+1:0]      rd_addr,   // line addresses
  output logic [3:0]                        rd_gnt,
  output line_t [3:0]                       rd_data,
  input  logic [NLANES*4-1:0]               wr_en,     // 64-bit chunk enables
  input  logic [$clog2(ROWS)-1:0]           wr_row,
  input  row_t                              wr_data
);
  localparam int RW = $clog2(ROWS);

  // Port priority order: 0, 2, 1, 3.
  localparam int PRIO [4] = '{0, 2, 1, 3};

  logic [NLANES-1:0]       lane_busy;
  logic [NLANES-1:0][1:0]  lane_port;
  logic [NLANES-1:0]       lane_rd;
  logic [NLANES-1:0][RW-1:0] lane_row;

  always_comb begin
    lane_busy = '0;
    lane_port = '0;
    lane_rd   = '0;
    lane_row  = '0;
    rd_gnt    = '0;
    for (int i = 0; i < 4; i++) begin
      int p;
      logic [1:0] l;
      p = PRIO[i];
      l = rd_addr[p][1:0];
      if (rd_req[p] && !lane_busy[l]) begin
        lane_busy[l] = 1'b1;
        lane_port[l] = 2'(p);
        lane_rd[l]   = 1'b1;
        lane_row[l]  = rd_addr[p][RW+1:2];
        rd_gnt[p]    = 1'b1;
      end
    end
  end

  line_t [NLANES-1:0] lane_q;
  logic  [3:0][1:0]   src_lane;   // lane each port's data comes from
  logic  [NLANES-1:0][1:0] port_q;

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    logic [LINE_W-1:0] mem [ROWS];
    for (genvar c = 0; c < 4; c++) begin : g_chunk
      always_ff @(posedge clk) begin
        if (wr_en[l*4 + c]) mem[wr_row][c*64 +: 64] <= wr_data[(l*4 + c)*64 +: 64];
      end
    end
    always_ff @(posedge clk) begin
      if (lane_rd[l]) lane_q[l] <= mem[lane_row[l]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      port_q   <= '0;
      src_lane <= '0;
    end else begin
      port_q <= lane_port;
      for (int p = 0; p < 4; p++) src_lane[p] <= rd_addr[p][1:0];
    end
  end

  // Crossbar: each port takes the line of the lane it addressed.
  always_comb begin
    for (int p = 0; p < 4; p++) rd_data[p] = lane_q[src_lane[p]];
  end

  // A granted port must have been the one the lane served.
  logic [3:0] gnt_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gnt_q <= '0;
    else        gnt_q <= rd_gnt;
  end
  for (genvar p = 0; p < 4; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     gnt_q[p] |-> port_q[src_lane[p]] == 2'(p))
      else $error("maps_buffer: crossbar routed lane to wrong port");
  end
endmodule
