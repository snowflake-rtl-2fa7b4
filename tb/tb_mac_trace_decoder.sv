// tb_mac_trace_decoder: the MAC trace decoder reading a maps buffer (ROWS
// reduced to 64) that holds random data. Random COOP, INDP and VMOV
// instructions (random start words, lengths and flags) are pushed with random
// gaps; every beat is compared in order with the beat sequence worked out
// from the instruction and the buffer contents (kind, mode, flags, weights
// address, data, write-back address). It also checks that beats ending an
// output are at least 16 cycles apart (gather adder rate), and the INDP
// shift-register latency the paper gives: a trace that starts at the fifth
// word of a line delivers its first operand four cycles later than one that
// starts at the first word.
module tb_mac_trace_decoder;
  import snowflake_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, ready, idle;
  vinstr_t instr;
  logic rd0_req, rd0_gnt, rd2_req, rd2_gnt;
  logic [LADDR_W-1:0] rd0_addr, rd2_addr;
  beat_t beat;

  logic [3:0] rd_req, rd_gnt;
  logic [3:0][$clog2(ROWS)+1:0] rd_addr;
  line_t [3:0] rd_data;
  logic [15:0] wr_en;
  logic [$clog2(ROWS)-1:0] wr_row;
  row_t wr_data;

  mac_trace_decoder #(.CU_ID(2)) dut (
    .clk, .rst_n, .push, .instr, .ready,
    .rd0_req, .rd0_addr, .rd0_gnt, .rd0_data(rd_data[0]),
    .rd2_req, .rd2_addr, .rd2_gnt, .rd2_data(rd_data[2]), .beat, .idle);
  maps_buffer #(.ROWS(ROWS)) mb (.clk, .rst_n, .rd_req, .rd_addr, .rd_gnt, .rd_data,
                                 .wr_en, .wr_row, .wr_data);
  assign rd_req  = {1'b0, rd2_req, 1'b0, rd0_req};
  assign rd_addr = {8'd0, rd2_addr[7:0], 8'd0, rd0_addr[7:0]};
  assign rd0_gnt = rd_gnt[0];
  assign rd2_gnt = rd_gnt[2];

  line_t M [ROWS*4];
  beat_t exp_q [$];
  int last_t, cyc, first_t;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && beat.valid) begin
    beat_t e;
    checks++;
    if (first_t < 0) first_t = cyc;
    if (exp_q.size() == 0) begin failures++; $display("unexpected beat"); end
    else begin
      e = exp_q.pop_front();
      if (beat.kind != e.kind || beat.waddr != e.waddr || beat.first != e.first ||
          beat.last != e.last || beat.pre != e.pre || beat.relu != e.relu ||
          (e.kind == B_PRE && beat.vsel != e.vsel) ||
          (e.kind == B_MAC && (beat.mode != e.mode || beat.wb != e.wb)) ||
          (e.kind != B_BIAS && (e.kind == B_MAC && e.mode == MODE_INDP ?
              beat.data[15:0] != e.data[15:0] : beat.data != e.data))) begin
        failures++;
        $display("beat mismatch: kind %0d/%0d waddr %0d/%0d first %0d/%0d last %0d/%0d d %h/%h",
                 beat.kind, e.kind, beat.waddr, e.waddr, beat.first, e.first, beat.last, e.last,
                 beat.data[15:0], e.data[15:0]);
      end
    end
    if (beat.kind == B_MAC && beat.last) begin
      checks++;
      if (last_t >= 0 && cyc - last_t < 16) begin failures++; $display("last beats %0d cycles apart", cyc - last_t); end
      last_t = cyc;
    end
  end

  task automatic send(input vinstr_t v);
    @(negedge clk);
    while (!ready) @(negedge clk);
    push = 1; instr = v;
    @(negedge clk); push = 0;
  endtask

  function automatic vinstr_t mk_mac(input bit mode, input int a, input int n, input int w,
                                     input bit ldb, input bit first, input bit last, input bit pre,
                                     input bit relu, input int wb);
    vinstr_t v;
    beat_t b;
    v = '0;
    v.op = OP_MAC; v.mode = mode; v.a = 32'(a); v.imm = 12'(n);
    v.b = 32'(w) | (32'(ldb) << F_LDB) | (32'(first) << F_FIRST) | (32'(last) << F_LAST) |
          (32'(pre) << F_PRE) | (32'(relu) << F_RELU);
    v.wb[2] = 14'(wb);
    if (ldb) begin
      b = '0; b.valid = 1; b.kind = B_BIAS; b.waddr = 9'(w);
      exp_q.push_back(b);
      w++;
    end
    for (int k = 0; k < (mode ? n / 16 : n); k++) begin
      b = '0; b.valid = 1; b.kind = B_MAC; b.mode = mode; b.first = first && k == 0;
      b.pre = pre && first && k == 0; b.relu = relu; b.waddr = 9'(w + k); b.wb = 14'(wb);
      b.last = last && k == (mode ? n / 16 : n) - 1;
      b.data = mode ? M[a / 16 + k] : line_t'(M[(a + k) / 16][((a + k) % 16)*16 +: 16]);
      exp_q.push_back(b);
    end
    return v;
  endfunction

  function automatic vinstr_t mk_vmov(input int line, input int vs);
    vinstr_t v;
    beat_t b;
    v = '0; v.op = OP_VMOV; v.a = 32'(line); v.imm = 12'(vs);
    b = '0; b.valid = 1; b.kind = B_PRE; b.vsel = 2'(vs); b.data = M[line];
    exp_q.push_back(b);
    return v;
  endfunction

  initial begin
    int t0, t4;
    push = 0; instr = '0; wr_en = 0; wr_row = 0; wr_data = '0; cyc = 0; last_t = -1; first_t = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = '1; wr_row = 6'(r);
      for (int i = 0; i < 32; i++) wr_data[i*32 +: 32] = $urandom;
      for (int l = 0; l < 4; l++) M[r*4 + l] = wr_data[l*256 +: 256];
    end
    @(negedge clk); wr_en = 0;
    // latency of the shift register: start at word 0 and at word 4
    for (int off = 0; off <= 4; off += 4) begin
      repeat (30) @(negedge clk);
      first_t = -1;
      t0 = cyc;
      send(mk_mac(MODE_INDP, 40*16 + off, 3, 0, 0, 1, 1, 0, 0, 0));
      wait (first_t >= 0);
      if (off == 0) t4 = first_t - t0; else t0 = first_t - t0;
    end
    checks++;
    if (t0 - t4 != 4) begin failures++; $display("fifth-word latency %0d cycles, expected 4", t0 - t4); end
    // random instruction mix
    for (int it = 0; it < 150; it++) begin
      int kind;
      kind = $urandom % 3;
      if (kind == 0)
        send(mk_mac(MODE_COOP, 16 * ($urandom % 200), 16 * (1 + $urandom % 6), $urandom % 200,
                    $urandom % 2, $urandom % 2, $urandom % 2, 0, $urandom % 2, $urandom % 1000));
      else if (kind == 1)
        send(mk_mac(MODE_INDP, $urandom % 3000, 1 + $urandom % 40, $urandom % 200,
                    $urandom % 2, $urandom % 2, $urandom % 2, $urandom % 2, $urandom % 2, $urandom % 1000));
      else
        send(mk_vmov($urandom % 256, $urandom % 4));
      repeat ($urandom % 4) @(negedge clk);
    end
    while (!idle) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d beats missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
