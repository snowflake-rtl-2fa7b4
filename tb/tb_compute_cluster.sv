// tb_compute_cluster: one compute cluster (ROWS reduced to 64) with the
// behavioural memory (random stalls), driven with vector instructions as the
// control core would send them. It loads different maps into CU0 and CU2 and
// the same weights into both, runs one COOP MAC instruction on both CUs at
// once (CU mask), moves CU2's result line to CU3, and stores the result lines
// of CU0 and CU3 to memory. The stored words are compared with a model, and
// the test waits for one load_done per load before using a CU's buffers.
module tb_compute_cluster;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic vin_valid, vin_ready, idle;
  vinstr_t vin;
  mem_req_t mreq;
  logic mreq_ready;
  mem_rsp_t mrsp;
  logic [3:0] load_done, ev_coop_out, ev_indp_out, ev_max_out, ev_wr_stall, ev_cu_move;

  compute_cluster #(.CL_ID(0), .ROWS(64)) dut (.*);
  mem_model #(.DEPTH(1024), .LAT(6), .STALL(1'b1)) mem (.clk, .rst_n, .req(mreq), .ready(mreq_ready), .rsp(mrsp));

  logic signed [15:0] MAPS [2][8][16];
  logic signed [15:0] W [4][8][16];
  int done_cnt [4];
  int n_move;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) done_cnt[c] += int'(load_done[c]);
    n_move += $countones(ev_cu_move);
  end

  task automatic issue(input vinstr_t v);
    @(negedge clk);
    vin_valid = 1; vin = v;
    @(posedge clk);
    while (!vin_ready) @(posedge clk);
    @(negedge clk); vin_valid = 0;
  endtask

  function automatic vinstr_t vi(input opcode_e op, input bit mode, input int a, input int b, input int imm);
    vinstr_t v;
    v = '0; v.op = op; v.mode = mode; v.a = 32'(a); v.b = 32'(b); v.imm = 12'(imm);
    v.wb[0] = 14'(256); v.wb[2] = 14'(256);
    return v;
  endfunction

  function automatic logic [15:0] fin(input logic signed [31:0] v);
    logic signed [31:0] s;
    s = v >>> 8;
    return s[15:0];
  endfunction

  initial begin
    vin_valid = 0; vin = '0; n_move = 0;
    foreach (done_cnt[c]) done_cnt[c] = 0;
    for (int s = 0; s < 2; s++)
      for (int l = 0; l < 8; l++)
        for (int i = 0; i < 16; i++) begin
          MAPS[s][l][i] = $signed(16'($urandom)) >>> 4;
          mem.mem[100 + s*8 + l][i*16 +: 16] = MAPS[s][l][i];
        end
    for (int v = 0; v < 4; v++)
      for (int a = 0; a < 8; a++)
        for (int i = 0; i < 16; i++) begin
          W[v][a][i] = $signed(16'($urandom)) >>> 4;
          mem.mem[200 + v*8 + a][i*16 +: 16] = W[v][a][i];
        end
    repeat (2) @(posedge clk);
    rst_n = 1;
    issue(vi(OP_LD, 0, 100, 32'h0000_0000, 8*16));
    issue(vi(OP_LD, 0, 108, 32'h2000_0000, 8*16));
    for (int v = 0; v < 4; v++) begin
      issue(vi(OP_LD, 0, 200 + v*8, 32'h0000_0000 | ((v + 1) << F_BUF_LO), 8*16));
      issue(vi(OP_LD, 0, 200 + v*8, 32'h2000_0000 | ((v + 1) << F_BUF_LO), 8*16));
    end
    wait (done_cnt[0] == 5 && done_cnt[2] == 5);
    // COOP on CU0 and CU2: maps lines 0..3, bias at 0, weights 1..4
    issue(vi(OP_MAC, 1, 32'h5000_0000, (1 << 16) | (1 << 17) | (1 << 18), 64));
    @(negedge clk);
    while (!idle) @(negedge clk);
    issue(vi(OP_TMOV, 0, 32'h2000_0000 + 64, 32'h3000_0000 + 10, 16));
    @(negedge clk);
    while (!idle) @(negedge clk);
    issue(vi(OP_ST, 0, 300, 32'h0000_0000 + 64, 16));
    issue(vi(OP_ST, 0, 301, 32'h3000_0000 + 10, 16));
    issue(vi(OP_ST, 0, 302, 32'h2000_0000 + 64, 16));
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (10) @(negedge clk);
    for (int s = 0; s < 2; s++)
      for (int v = 0; v < 4; v++) begin
        logic signed [31:0] acc;
        acc = 32'(W[v][0][0]) <<< 8;
        for (int k = 0; k < 4; k++) for (int i = 0; i < 16; i++) acc += MAPS[s][k][i] * W[v][1 + k][i];
        checks++;
        if (mem.mem[300 + s][v*16 +: 16] !== fin(acc)) begin
          failures++; $display("CU%0d vMAC%0d result %h expected %h", s ? 3 : 0, v, mem.mem[300 + s][v*16 +: 16], fin(acc));
        end
      end
    checks++;
    if (n_move != 1) begin failures++; $display("%0d CU move lines", n_move); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
