// tb_icache: walks the fetch address through a program laid out in the
// behavioural memory (BANK_WORDS reduced to 64): sequential runs, jumps to
// other blocks, and a flush. Checks that every hit returns the instruction at
// that address, that the next block is prefetched (no miss when execution
// runs into it after a while), and that a flush forces refills.
module tb_icache;
  import snowflake_pkg::*;
  localparam int BW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush, hit;
  logic [31:0] pc, instr;
  mem_req_t mreq;
  logic mreq_ready;
  mem_rsp_t mrsp;

  icache #(.BANK_WORDS(BW)) dut (.*);
  mem_model #(.DEPTH(1024), .LAT(6), .STALL(1'b1)) mem (.clk, .rst_n, .req(mreq), .ready(mreq_ready), .rsp(mrsp));

  function automatic logic [31:0] iw(input int a);
    return 32'(a) * 32'h9E3779B1 ^ 32'h1234;
  endfunction

  int miss_cycles;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fetch(input int a);
    pc = 32'(a);
    #1;
    while (!hit) begin @(negedge clk); miss_cycles++; #1; end
    checks++;
    if (instr !== iw(a)) begin failures++; $display("pc %0d instr %h exp %h", a, instr, iw(a)); end
    @(negedge clk);
  endtask

  initial begin
    for (int l = 0; l < 1024; l++)
      for (int i = 0; i < 8; i++) mem.mem[l][i*32 +: 32] = iw(l*8 + i);
    flush = 0; pc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // straight-line run through four blocks: only the first should miss
    for (int a = 0; a < 4*BW; a++) fetch(a);
    checks++;
    if (miss_cycles > 3*BW) begin failures++; $display("prefetch not hiding misses: %0d", miss_cycles); end
    // random jumps with short runs
    for (int j = 0; j < 100; j++) begin
      int base;
      base = $urandom % (8000 - 40);
      for (int k = 0; k < 1 + $urandom % 30; k++) fetch(base + k);
    end
    // flush forces a refill
    miss_cycles = 0;
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    fetch(5);
    checks++;
    if (miss_cycles == 0) begin failures++; $display("flush did not invalidate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
