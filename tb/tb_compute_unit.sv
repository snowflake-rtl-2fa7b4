// tb_compute_unit: one compute unit (CU_ID 1, ROWS reduced to 64) driven
// directly with buffer writes and vector instructions. It loads 32 maps
// lines and 64 weight lines per vMAC, runs a COOP MAC trace, an INDP MAC
// trace that starts mid-line, VMOV preloads with an INDP trace that uses
// them, and a 3x3 maxpool window, takes in lines from another CU at the same
// time, then stores the result lines and moves some of them out. Every
// stored and moved line is compared word by word with a model of the
// computation; vMAC results, vMAX results and incoming lines must all have
// been written (the write port is shared, so incoming lines must wait).
module tb_compute_unit;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic vin_push, vin_ready, ldw_ready, st_ready, mv_out_ready, mv_in_ready, idle;
  vinstr_t vin;
  bufwr_t ldw;
  stline_t st;
  mvline_t mv_out, mv_in;
  logic ev_coop_out, ev_indp_out, ev_max_out, ev_wr_stall;

  compute_unit #(.CU_ID(1), .ROWS(64)) dut (.*);

  logic signed [15:0] MAPS [32][16];
  logic signed [15:0] W [4][64][16];
  logic [15:0] expl [int][16];
  bit expv [int][16];
  line_t got [int];
  int n_coop, n_indp, n_max, n_wrs;

  function automatic logic [15:0] fin(input logic signed [31:0] v, input bit relu);
    logic signed [31:0] s;
    s = v >>> 8;
    if (relu && s[15]) return 16'h0;
    return s[15:0];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    st_ready     <= ($urandom % 4 != 0);
    mv_out_ready <= ($urandom % 4 != 0);
    if (rst_n) begin
      n_coop += int'(ev_coop_out); n_indp += int'(ev_indp_out);
      n_max += int'(ev_max_out); n_wrs += int'(ev_wr_stall);
      if (st.valid && st_ready) got[int'(st.addr)] = st.data;
      if (mv_out.valid && mv_out_ready) begin
        checks++;
        if (mv_out.dst != 2'd3) begin failures++; $display("moved line to CU%0d", mv_out.dst); end
        got[10000 + int'(mv_out.addr)] = mv_out.data;
      end
    end
  end

  task automatic issue(input vinstr_t v);
    @(negedge clk);
    while (!vin_ready) @(negedge clk);
    vin_push = 1; vin = v;
    @(negedge clk); vin_push = 0;
  endtask

  function automatic vinstr_t vi(input opcode_e op, input bit mode, input int a, input int b,
                                 input int imm, input int wb);
    vinstr_t v;
    v = '0; v.op = op; v.mode = mode; v.a = 32'(a); v.b = 32'(b); v.imm = 12'(imm); v.wb[1] = 14'(wb);
    return v;
  endfunction

  localparam int CUM = 32'h2000_0000;
  localparam int LDB = 1 << 16, FIRST = 1 << 17, LAST = 1 << 18, PRE = 1 << 19, RELU = 1 << 20;
  line_t inl [8];

  initial begin
    vin_push = 0; vin = '0; ldw = '0; mv_in = '0; n_coop = 0; n_indp = 0; n_max = 0; n_wrs = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // buffer loads
    for (int l = 0; l < 32; l++) begin
      @(negedge clk);
      ldw.valid = 1; ldw.buf_id = 0; ldw.addr = 12'(l);
      for (int i = 0; i < 16; i++) begin
        MAPS[l][i] = $signed(16'($urandom)) >>> 4; ldw.data[i*16 +: 16] = MAPS[l][i];
      end
      @(posedge clk); while (!ldw_ready) @(posedge clk);
    end
    for (int v = 0; v < 4; v++)
      for (int a = 0; a < 64; a++) begin
        @(negedge clk);
        ldw.valid = 1; ldw.buf_id = 3'(v + 1); ldw.addr = 12'(a);
        for (int i = 0; i < 16; i++) begin
          W[v][a][i] = $signed(16'($urandom)) >>> 4; ldw.data[i*16 +: 16] = W[v][a][i];
        end
        @(posedge clk); while (!ldw_ready) @(posedge clk);
      end
    @(negedge clk); ldw = '0;
    // computations
    issue(vi(OP_MAC, 1, CUM + 4*16, LDB | FIRST | LAST | 5, 64, 256));      // COOP -> line 64 words 0..3
    issue(vi(OP_MAC, 0, CUM + 20*16 + 3, LDB | FIRST | LAST | 30, 20, 272));   // INDP -> lines 68..71
    for (int v = 0; v < 4; v++) issue(vi(OP_VMOV, 0, CUM + 24 + v, 0, v, 0));
    issue(vi(OP_MAC, 0, CUM + 28*16, LDB | FIRST | LAST | PRE | RELU | 60, 3, 288)); // lines 72..75
    issue(vi(OP_MAX, 0, CUM | FIRST | LAST | 0, 0, 9*16, 320));              // line 80
    // lines arriving from another CU into lines 84..91 while results are written
    fork
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        mv_in.valid = 1; mv_in.dst = 2'd1; mv_in.addr = 12'(84 + k); mv_in.data = {8{$urandom}};
        inl[k] = mv_in.data;
        @(posedge clk); while (!mv_in_ready) @(posedge clk);
        @(negedge clk); mv_in = '0;
      end
    join_none
    repeat (5) @(negedge clk);
    while (!idle || mv_in.valid) @(negedge clk);
    repeat (5) @(negedge clk);
    issue(vi(OP_ST, 0, 500, 64, 28*16, 0));                                  // lines 64..91
    issue(vi(OP_TMOV, 0, 68, 32'h3000_0000 + 200, 8*16, 0));                 // lines 68..75
    repeat (5) @(negedge clk);
    while (!idle) @(negedge clk);

    // expected values
    for (int l = 64; l < 92; l++) for (int i = 0; i < 16; i++) expv[l][i] = 0;
    for (int v = 0; v < 4; v++) begin
      logic signed [31:0] s;
      s = 32'(W[v][5][0]) <<< 8;
      for (int k = 0; k < 4; k++) for (int i = 0; i < 16; i++) s += MAPS[4 + k][i] * W[v][6 + k][i];
      expl[64][v] = fin(s, 0); expv[64][v] = 1;
      for (int i = 0; i < 16; i++) begin
        logic signed [31:0] t, p;
        t = 32'(W[v][30][i]) <<< 8;
        for (int k = 0; k < 20; k++) t += MAPS[(323 + k) / 16][(323 + k) % 16] * W[v][31 + k][i];
        expl[68 + v][i] = fin(t, 0); expv[68 + v][i] = 1;
        p = (32'(MAPS[24 + v][i]) <<< 8) + (32'(W[v][60][i]) <<< 8);
        for (int k = 0; k < 3; k++) p += MAPS[28][k] * W[v][61 + k][i];
        expl[72 + v][i] = fin(p, 1); expv[72 + v][i] = 1;
      end
    end
    for (int i = 0; i < 16; i++) begin
      logic signed [15:0] m;
      m = MAPS[0][i];
      for (int l = 1; l < 9; l++) if (MAPS[l][i] > m) m = MAPS[l][i];
      expl[80][i] = m; expv[80][i] = 1;
    end
    for (int k = 0; k < 8; k++)
      for (int i = 0; i < 16; i++) begin expl[84 + k][i] = inl[k][i*16 +: 16]; expv[84 + k][i] = 1; end
    for (int l = 64; l < 92; l++) begin
      checks++;
      if (!got.exists(500 + l - 64)) begin failures++; $display("line %0d never stored", l); continue; end
      for (int i = 0; i < 16; i++) if (expv[l][i]) begin
        checks++;
        if (got[500 + l - 64][i*16 +: 16] !== expl[l][i]) begin
          failures++; $display("line %0d word %0d: got %h expected %h", l, i, got[500 + l - 64][i*16 +: 16], expl[l][i]);
        end
      end
    end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (!got.exists(10200 + k) || got[10200 + k] !== got[500 + 4 + k]) begin failures++; $display("moved line %0d wrong", k); end
    end
    checks++;
    if (n_coop != 1 || n_indp != 2 || n_max != 1 || n_wrs == 0) begin
      failures++; $display("events coop %0d indp %0d max %0d write stalls %0d", n_coop, n_indp, n_max, n_wrs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
