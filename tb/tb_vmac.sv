// tb_vmac: drives beats into one vMAC as the MAC trace decoder would and
// compares the outputs with a software model: bias loading, COOP traces,
// INDP traces, and INDP traces that start from a VMOV preload.
module tb_vmac;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  beat_t beat;
  logic wwe;
  logic [8:0] wwaddr;
  line_t wwdata;
  logic gbusy, res_valid, res_mode;
  logic [13:0] res_wb;
  logic [15:0][15:0] res_data;

  vmac #(.VID(1)) dut (.*);

  logic signed [15:0] W [64][16];
  logic [15:0][15:0] exp_q [$];
  logic              expm_q [$];
  logic [13:0]       expwb_q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    logic [15:0][15:0] e;
    logic m;
    e = exp_q.pop_front();
    m = expm_q.pop_front();
    checks += 2;
    if ((m ? res_data[0] : res_data) !== (m ? e[0] : e)) begin
      failures++; $display("data mismatch mode=%0d got %h exp %h", m, res_data, e);
    end
    if (res_wb !== expwb_q.pop_front() || res_mode !== m) begin failures++; $display("meta mismatch"); end
  end

  function automatic logic [15:0] fin(input logic signed [31:0] v);
    logic signed [31:0] s;
    s = v >>> 8;
    return s[15:0];
  endfunction

  task automatic send(input beat_t b);
    @(negedge clk); beat = b;
    @(negedge clk); beat = '0;
  endtask

  initial begin
    beat = '0; wwe = 0; wwaddr = 0; wwdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); wwe = 1; wwaddr = 9'(a);
      for (int i = 0; i < 16; i++) begin
        W[a][i] = $signed(16'($urandom)) >>> 4;
        wwdata[i*16 +: 16] = W[a][i];
      end
    end
    @(negedge clk); wwe = 0;
    for (int rep = 0; rep < 40; rep++) begin
      beat_t b;
      logic mode, pre;
      int nb, base;
      logic [15:0][15:0] e, pv;
      logic signed [31:0] acc [16];
      mode = rep % 2;
      pre  = (rep % 4) == 2;
      nb   = 1 + $urandom % 8;
      base = 1 + $urandom % 40;
      // bias beat at address 0 or 50
      b = '0; b.valid = 1; b.kind = B_BIAS; b.waddr = (rep % 3 == 0) ? 9'd50 : 9'd0;
      send(b);
      pv = '0;
      if (pre) begin
        b = '0; b.valid = 1; b.kind = B_PRE; b.vsel = 2'd1;
        for (int i = 0; i < 16; i++) pv[i] = 16'($signed(16'($urandom)) >>> 3);
        b.data = pv;
        send(b);
        // a preload for another vMAC must be ignored
        b.vsel = 2'd2; b.data = '1; send(b);
      end
      for (int i = 0; i < 16; i++) acc[i] = pre ? (32'(signed'(pv[i])) <<< 8) : 0;
      for (int k = 0; k < nb; k++) begin
        line_t d;
        for (int i = 0; i < 16; i++) d[i*16 +: 16] = 16'($signed(16'($urandom)) >>> 4);
        b = '0; b.valid = 1; b.kind = B_MAC; b.mode = mode; b.first = (k == 0); b.pre = pre && (k == 0);
        b.last = (k == nb - 1); b.waddr = 9'(base + k); b.data = d; b.wb = 14'(rep * 3);
        for (int i = 0; i < 16; i++)
          acc[i] += $signed(mode ? d[i*16 +: 16] : d[15:0]) * W[base + k][i];
        @(negedge clk); beat = b;
      end
      @(negedge clk); beat = '0;
      e = '0;
      if (mode) begin
        logic signed [31:0] s;
        s = 32'(signed'(W[(rep % 3 == 0) ? 50 : 0][0])) <<< 8;
        for (int i = 0; i < 16; i++) s += acc[i];
        e[0] = fin(s);
      end else
        for (int i = 0; i < 16; i++) e[i] = fin(acc[i] + (32'(signed'(W[(rep % 3 == 0) ? 50 : 0][i])) <<< 8));
      exp_q.push_back(e); expm_q.push_back(mode); expwb_q.push_back(14'(rep * 3));
      repeat (20) @(negedge clk);
    end
    repeat (30) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
