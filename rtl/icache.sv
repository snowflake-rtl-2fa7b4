// icache: double-buffered instruction cache of the control core.
//
// Two banks of BANK_WORDS 32-bit instructions (2 x 2 kB = 4 kB, the paper's
// size). Memory is divided into blocks of BANK_WORDS instructions; block B
// always lives in bank B mod 2, so the block after the one being executed can
// be fetched into the other bank while this one runs: this is the double
// buffering that hides the fetch of the next instruction stream. A fetch
// address in a block that is not present stalls the pipeline (hit low) while
// that block is filled. The fill reads 256-bit memory lines (8 instructions)
// at line address pc/8; instruction i of a line sits in bits [32i+31:32i].
// When the current block hits and the next one is absent, it is prefetched.
// The placement, fill and prefetch rules are this design's choices.
//
// Timing: instr/hit are combinational in pc (read from a small distributed
// memory); flush invalidates both banks.
module icache
  import snowflake_pkg::*;
#(
  parameter int BANK_WORDS = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic [31:0]  pc,
  output logic         hit,
  output logic [31:0]  instr,
  output mem_req_t     mreq,
  input  logic         mreq_ready,
  input  mem_rsp_t     mrsp
);
  localparam int OW    = $clog2(BANK_WORDS);       // offset bits
  localparam int NL    = BANK_WORDS / 8;           // lines per block
  localparam int LW    = $clog2(NL);
  localparam int BW    = 32 - OW;                  // block number bits

  logic [31:0] mem0 [BANK_WORDS];
  logic [31:0] mem1 [BANK_WORDS];
  logic [1:0]          vld;
  logic [1:0][BW-1:0]  tag;

  logic [BW-1:0] blk, nblk;
  logic          bank;
  assign blk  = pc[31:OW];
  assign nblk = blk + 1'b1;
  assign bank = blk[0];
  assign hit  = vld[bank] && tag[bank] == blk;
  assign instr = bank ? mem1[pc[OW-1:0]] : mem0[pc[OW-1:0]];

  logic          filling, fbank;
  logic [BW-1:0] fblk;
  logic [LW:0]   issued, recvd;

  assign mreq.valid = filling && (issued != (LW+1)'(NL));
  assign mreq.we    = 1'b0;
  assign mreq.addr  = 32'({fblk, {LW{1'b0}}}) + 32'(issued);
  assign mreq.wdata = '0;

  always_ff @(posedge clk) begin
    if (filling && mrsp.valid) begin
      for (int i = 0; i < 8; i++) begin
        if (fbank) mem1[{recvd[LW-1:0], 3'(i)}] <= mrsp.rdata[i*32 +: 32];
        else       mem0[{recvd[LW-1:0], 3'(i)}] <= mrsp.rdata[i*32 +: 32];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; tag <= '0; filling <= 1'b0; fbank <= 1'b0; fblk <= '0;
      issued <= '0; recvd <= '0;
    end else begin
      if (mreq.valid && mreq_ready) issued <= issued + 1'b1;
      if (filling && mrsp.valid) begin
        recvd <= recvd + 1'b1;
        if (recvd == (LW+1)'(NL - 1)) begin
          filling    <= 1'b0;
          vld[fbank] <= 1'b1;
          tag[fbank] <= fblk;
        end
      end
      if (!filling) begin
        if (!hit) begin
          filling <= 1'b1; fbank <= bank; fblk <= blk; vld[bank] <= 1'b0;
          issued <= '0; recvd <= '0;
        end else if (!(vld[!bank] && tag[!bank] == nblk)) begin
          filling <= 1'b1; fbank <= !bank; fblk <= nblk; vld[!bank] <= 1'b0;
          issued <= '0; recvd <= '0;
        end
      end
      if (flush) vld <= '0;
    end
  end
endmodule
