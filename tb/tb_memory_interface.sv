// tb_memory_interface: a cluster's memory interface in front of the
// behavioural memory (random stalls). Random loads to the four CUs' maps and
// weights buffers are queued while the four CUs stream store lines to memory
// at random; the CU write ports accept load lines with random back-pressure.
// Checks: every line written into a CU buffer (buffer id, address, data) in
// order per CU; one load_done per load, after its last line; after the run,
// every stored line is in memory.
module tb_memory_interface;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_push, ld_ready, idle;
  vinstr_t ld_instr;
  bufwr_t [3:0] ldw;
  logic [3:0] ldw_ready, st_ready, load_done;
  stline_t [3:0] st;
  mem_req_t mreq;
  logic mreq_ready;
  mem_rsp_t mrsp;

  memory_interface dut (.*);
  mem_model #(.DEPTH(4096), .LAT(7), .STALL(1'b1)) mem (.clk, .rst_n, .req(mreq), .ready(mreq_ready), .rsp(mrsp));

  line_t L [2048];                // source lines for loads (memory 0..2047)
  bufwr_t exp_q [4][$];
  int loads_open [4], done_seen [4], loads_sent [4];
  int st_sent;
  line_t st_exp [int];

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    ldw_ready <= 4'($urandom);
    if (rst_n) for (int c = 0; c < 4; c++) begin
      if (ldw[c].valid && ldw_ready[c]) begin
        bufwr_t e;
        checks++;
        e = exp_q[c].pop_front();
        if (ldw[c].buf_id !== e.buf_id || ldw[c].addr !== e.addr || ldw[c].data !== e.data) begin
          failures++; $display("CU%0d load line mismatch", c);
        end
      end
      if (load_done[c]) done_seen[c]++;
    end
  end

  // store streams: each CU stores 40 lines to its own region 2048 + 256*c
  for (genvar c = 0; c < 4; c++) begin : g_st
    initial begin
      st[c] = '0;
      @(posedge rst_n);
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        while ($urandom % 2) @(negedge clk);
        st[c].valid = 1; st[c].addr = 32'(2048 + 256*c + k); st[c].data = {8{$urandom}};
        st_exp[2048 + 256*c + k] = st[c].data;
        @(posedge clk);
        while (!st_ready[c]) @(posedge clk);
        @(negedge clk); st[c].valid = 0;
        st_sent++;
      end
    end
  end

  initial begin
    ld_push = 0; ld_instr = '0; st_sent = 0;
    foreach (loads_open[c]) begin loads_open[c] = 0; done_seen[c] = 0; loads_sent[c] = 0; end
    for (int a = 0; a < 2048; a++) begin L[a] = {8{$urandom}}; mem.mem[a] = L[a]; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int cu, bid, src, dst, n;
      vinstr_t v;
      cu = $urandom % 4; bid = $urandom % 5; src = $urandom % 2000; n = 1 + $urandom % 16;
      dst = $urandom % 3000;
      v = '0; v.op = OP_LD; v.a = 32'(src); v.imm = 12'(16 * n);
      v.b = (32'(cu) << F_CU_LO) | (32'(bid) << F_BUF_LO) | 32'(dst);
      for (int k = 0; k < n; k++) begin
        bufwr_t e;
        e.valid = 1; e.buf_id = 3'(bid); e.addr = 12'(dst + k); e.data = L[src + k];
        exp_q[cu].push_back(e);
      end
      loads_sent[cu]++;
      @(negedge clk);
      while (!ld_ready) @(negedge clk);
      ld_push = 1; ld_instr = v;
      @(negedge clk); ld_push = 0;
    end
    while (!idle || st_sent < 160) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int c = 0; c < 4; c++) begin
      checks += 2;
      if (exp_q[c].size() != 0) begin failures++; $display("CU%0d: %0d load lines missing", c, exp_q[c].size()); end
      if (done_seen[c] != loads_sent[c]) begin failures++; $display("CU%0d: %0d load_done for %0d loads", c, done_seen[c], loads_sent[c]); end
    end
    foreach (st_exp[a]) begin
      checks++;
      if (mem.mem[a] !== st_exp[a]) begin failures++; $display("store line %0d missing", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
