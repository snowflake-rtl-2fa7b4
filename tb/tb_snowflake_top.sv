// tb_snowflake_top: end-to-end test of the whole accelerator at its default
// parameters (one cluster of four CUs, 1024-row maps buffers, 512-word
// weights buffers, 2 x 512-instruction cache).
//
// A program assembled below runs on the control core against the behavioural
// memory (with random back-pressure). It
//   1. loads 32 lines of input maps into CU0 and 64 weight lines into each of
//      the four vMACs of CU0 (load tracking stalls the first MAC),
//   2. runs a loop of four COOP MAC traces (4 lines each, bias loaded), with a
//      register dependency in front of the branch and four delay slots,
//   3. loads more lines into CU0 while the MACs still write results (write
//      port conflicts),
//   4. runs an INDP MAC trace that starts mid-line and crosses a line, then
//      four VMOVs and an INDP trace that starts from the preloads with ReLU,
//   5. runs two maxpool windows (one 3x3 in one instruction, one spread over
//      two instructions),
//   6. waits in a counted loop (the hardware tracks only loads; ordering
//      vector results before a move is left to the program), then moves the result lines from CU0 to CU1, stores them from CU1 and also
//      directly from CU0, and halts.
// The testbench computes every result from the same memory image and checks
// the stored lines word by word, and checks that both stores agree. It counts
// each mechanism (RAW stall, load stall, taken branch, COOP and INDP outputs
// and the switch between them, maxpool outputs, write-port stalls, CU moves,
// instruction-cache line fills) and counts a failure for any that never happened.
module tb_snowflake_top;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done;
  logic [31:0] start_pc;
  mem_req_t mem_req;
  logic mem_req_ready;
  mem_rsp_t mem_rsp;
  logic ev_raw_stall, ev_load_stall, ev_branch_taken, ev_vec_issue;
  logic [3:0] ev_coop_out, ev_indp_out, ev_max_out, ev_wr_stall, ev_cu_move;

  snowflake_top dut (.*);
  mem_model #(.DEPTH(4096), .LAT(8), .STALL(1'b1)) mem (
    .clk, .rst_n, .req(mem_req), .ready(mem_req_ready), .rsp(mem_rsp));

  // ---------------- assembler ----------------
  logic [31:0] prog [$];
  function automatic logic [31:0] enc(input int op, input int mode, input int rd, input int rs1,
                                      input int rs2, input int imm);
    return {4'(op), 1'(mode), 5'(rd), 5'(rs1), 5'(rs2), 12'(imm)};
  endfunction
  task automatic emit(input logic [31:0] w); prog.push_back(w); endtask
  task automatic li(input int rd, input int v);
    if (v >= -(1 << 21) && v < (1 << 21)) emit({4'(OP_MOV), 1'b0, 5'(rd), 22'(v)});
    else begin
      emit({4'(OP_MOV), 1'b0, 5'(rd), 22'(v >>> 16)});
      emit(enc(OP_MOV, 1, rd, rd, 0, 16));
      emit({4'(OP_MOV), 1'b0, 5'd31, 22'(v & 16'hffff)});
      emit(enc(OP_ADD, 1, rd, rd, 31, 0));
    end
  endtask

  localparam int MAPS_MEM = 512, W_MEM = 1024, ST1_MEM = 2048, ST0_MEM = 2100;
  localparam int CU0 = 32'h1000_0000;   // CU mask bit 0 in rs1[31:28]
  localparam int LDB = 1 << 16, FIRST = 1 << 17, LAST = 1 << 18, PRE = 1 << 19, RELU = 1 << 20;

  // ---------------- reference model ----------------
  logic signed [15:0] MAPS [256][16];        // CU0 maps lines 0..31 (plus results)
  logic signed [15:0] W [4][64][16];         // weights of vMAC v, address a, MAC i
  logic [15:0] expl [int][16];               // expected CU0 line -> words
  bit          expv [int][16];               // word has an expected value

  function automatic logic [15:0] fin(input logic signed [31:0] v, input bit relu);
    logic signed [31:0] s;
    s = v >>> 8;
    if (relu && s[15]) return 16'h0;
    return s[15:0];
  endfunction

  // ---------------- event counters ----------------
  int n_raw, n_ld, n_br, n_vec, n_coop, n_indp, n_max, n_wrs, n_mv, n_miss, n_switch;
  logic last_mode_valid, last_mode;
  always @(posedge clk) if (rst_n) begin
    n_raw  += int'(ev_raw_stall);
    n_ld   += int'(ev_load_stall);
    n_br   += int'(ev_branch_taken);
    n_vec  += int'(ev_vec_issue);
    n_coop += $countones(ev_coop_out);
    n_indp += $countones(ev_indp_out);
    n_max  += $countones(ev_max_out);
    n_wrs  += $countones(ev_wr_stall);
    n_mv   += $countones(ev_cu_move);
    n_miss += int'(mem_req.valid && mem_req_ready && !mem_req.we && mem_req.addr < 32'(MAPS_MEM));
    if (ev_coop_out[0] || ev_indp_out[0]) begin
      if (last_mode_valid && last_mode != ev_coop_out[0]) n_switch++;
      last_mode_valid = 1; last_mode = ev_coop_out[0];
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mechanism(input string name, input int n);
    checks++;
    $display("  %-22s %0d", name, n);
    if (n == 0) begin failures++; $display("mechanism %s never happened", name); end
  endtask

  int loop_pc, wait_pc, cyc;

  initial begin
    last_mode_valid = 0; last_mode = 0;
    n_raw = 0; n_ld = 0; n_br = 0; n_vec = 0; n_coop = 0; n_indp = 0; n_max = 0;
    n_wrs = 0; n_mv = 0; n_miss = 0; n_switch = 0;
    start = 0; start_pc = 0;
    // ---- data ----
    for (int l = 0; l < 32; l++)
      for (int i = 0; i < 16; i++) begin
        MAPS[l][i] = $signed(16'($urandom)) >>> 4;
        mem.mem[MAPS_MEM + l][i*16 +: 16] = MAPS[l][i];
      end
    for (int v = 0; v < 4; v++)
      for (int a = 0; a < 64; a++)
        for (int i = 0; i < 16; i++) begin
          W[v][a][i] = $signed(16'($urandom)) >>> 4;
          mem.mem[W_MEM + v*64 + a][i*16 +: 16] = W[v][a][i];
        end

    // ---- program ----
    // 1. loads
    li(1, MAPS_MEM); li(2, 0);
    emit(enc(OP_LD, 0, 0, 1, 2, 32*16));
    for (int v = 0; v < 4; v++) begin
      li(3, W_MEM + v*64); li(5, v + 1); emit(enc(OP_MOV, 1, 4, 5, 0, F_BUF_LO));
      emit(enc(OP_LD, 0, 0, 3, 4, 64*16));
    end
    // write-back: MAC base granule 256 (row 16), offset 1; MAX base line 80
    li(6, 256); emit(enc(OP_WBSET, 0, 0, 6, 0, 0));
    li(6, 1);   emit(enc(OP_WBSET, 1, 0, 6, 0, 0));
    li(6, 320); emit(enc(OP_WBSET, 0, 16, 6, 0, 0));
    li(6, 4);   emit(enc(OP_WBSET, 1, 16, 6, 0, 0));
    // 2. COOP loop: it = 0..3, maps lines 4*it.., weights 5*it (bias) + 1..4
    li(10, 4); li(11, CU0); li(12, LDB | FIRST | LAST);
    loop_pc = prog.size();
    emit(enc(OP_MAC, 1, 0, 11, 12, 64));
    emit(enc(OP_ADD, 0, 10, 10, 0, -1));
    emit(enc(OP_BGT, 0, 0, 10, 0, loop_pc - prog.size()));
    emit(enc(OP_ADD, 0, 11, 11, 0, 64));
    emit(enc(OP_ADD, 0, 12, 12, 0, 5));
    emit(enc(OP_NOP, 0, 0, 0, 0, 0));
    emit(enc(OP_NOP, 0, 0, 0, 0, 0));
    // 3. load more lines into CU0 (lines 200..231) while results are written
    li(1, MAPS_MEM); li(2, 200);
    emit(enc(OP_LD, 0, 0, 1, 2, 32*16));
    // 4. INDP: words 20*16+3 .. +19, bias at 30, weights 31..50, row 17
    li(6, 272); emit(enc(OP_WBSET, 0, 0, 6, 0, 0));
    li(6, 16);  emit(enc(OP_WBSET, 1, 0, 6, 0, 0));
    li(11, CU0 + 20*16 + 3); li(12, LDB | FIRST | LAST | 30);
    emit(enc(OP_MAC, 0, 0, 11, 12, 20));
    //    VMOV lines 24..27 to vMACs 0..3, then INDP from the preloads with ReLU
    for (int v = 0; v < 4; v++) begin
      li(11, CU0 + 24 + v); emit(enc(OP_VMOV, 0, 0, 11, 0, v));
    end
    li(11, CU0 + 28*16); li(12, LDB | FIRST | LAST | PRE | RELU | 60);
    emit(enc(OP_MAC, 0, 0, 11, 12, 3));
    // 5. MAX: lines 0..8 in one window; lines 9..12 then 13..17 in another
    li(11, CU0 | FIRST | LAST | 0);  emit(enc(OP_MAX, 0, 0, 11, 0, 9*16));
    li(11, CU0 | FIRST | 9);         emit(enc(OP_MAX, 0, 0, 11, 0, 4*16));
    li(11, CU0 | LAST | 13);         emit(enc(OP_MAX, 0, 0, 11, 0, 5*16));
    //    The hardware tracks only loads, so the program itself waits (a
    //    counted loop) until the maxpool results are written back.
    li(13, 40);
    wait_pc = prog.size();
    emit(enc(OP_ADD, 0, 13, 13, 0, -1));
    emit(enc(OP_BGT, 0, 0, 13, 0, wait_pc - prog.size()));
    for (int k = 0; k < 4; k++) emit(enc(OP_NOP, 0, 0, 0, 0, 0));
    // 6. move CU0 lines 64..81 to CU1 lines 100..117, store both
    li(11, 64); li(12, 32'h1000_0000 + 100);
    emit(enc(OP_TMOV, 0, 0, 11, 12, 18*16));
    li(1, ST1_MEM); li(2, 32'h1000_0000 + 100);
    emit(enc(OP_ST, 0, 0, 1, 2, 18*16));
    li(1, ST0_MEM); li(2, 64);
    emit(enc(OP_ST, 0, 0, 1, 2, 18*16));
    emit(enc(OP_HALT, 0, 0, 0, 0, 0));
    for (int k = 0; k < prog.size(); k++) mem.mem[k / 8][(k % 8)*32 +: 32] = prog[k];

    // ---- expected CU0 result lines ----
    for (int l = 64; l < 82; l++) for (int i = 0; i < 16; i++) expv[l][i] = 0;
    for (int it = 0; it < 4; it++)
      for (int v = 0; v < 4; v++) begin
        logic signed [31:0] s;
        s = 32'(W[v][5*it][0]) <<< 8;
        for (int k = 0; k < 4; k++)
          for (int i = 0; i < 16; i++) s += MAPS[4*it + k][i] * W[v][5*it + 1 + k][i];
        expl[64][it*4 + v] = fin(s, 0); expv[64][it*4 + v] = 1;
      end
    for (int v = 0; v < 4; v++)
      for (int i = 0; i < 16; i++) begin
        logic signed [31:0] s, p;
        s = 32'(W[v][30][i]) <<< 8;
        for (int k = 0; k < 20; k++) s += MAPS[(323 + k) / 16][(323 + k) % 16] * W[v][31 + k][i];
        expl[68 + v][i] = fin(s, 0); expv[68 + v][i] = 1;
        p = (32'(MAPS[24 + v][i]) <<< 8) + (32'(W[v][60][i]) <<< 8);
        for (int k = 0; k < 3; k++) p += MAPS[28][k] * W[v][61 + k][i];
        expl[72 + v][i] = fin(p, 1); expv[72 + v][i] = 1;
      end
    for (int i = 0; i < 16; i++) begin
      logic signed [15:0] m0, m1;
      m0 = MAPS[0][i]; m1 = MAPS[9][i];
      for (int l = 1; l < 9; l++)  if (MAPS[l][i] > m0) m0 = MAPS[l][i];
      for (int l = 10; l < 18; l++) if (MAPS[l][i] > m1) m1 = MAPS[l][i];
      expl[80][i] = m0; expl[81][i] = m1; expv[80][i] = 1; expv[81][i] = 1;
    end

    // ---- run ----
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    $display("program of %0d instructions finished in %0d cycles", prog.size(), cyc);

    for (int l = 64; l < 82; l++) begin
      checks++;
      if (mem.mem[ST0_MEM + l - 64] !== mem.mem[ST1_MEM + l - 64]) begin
        failures++; $display("line %0d: direct store and store after CU move differ", l);
      end
      for (int i = 0; i < 16; i++) if (expv[l][i]) begin
        checks++;
        if (mem.mem[ST1_MEM + l - 64][i*16 +: 16] !== expl[l][i]) begin
          failures++;
          $display("line %0d word %0d: got %h expected %h", l, i, mem.mem[ST1_MEM + l - 64][i*16 +: 16], expl[l][i]);
        end
      end
    end
    $display("mechanisms:");
    mechanism("RAW stall cycles", n_raw);
    mechanism("load stall cycles", n_ld);
    mechanism("taken branches", n_br);
    mechanism("vector issues", n_vec);
    mechanism("COOP outputs", n_coop);
    mechanism("INDP outputs", n_indp);
    mechanism("COOP/INDP switches", n_switch);
    mechanism("maxpool outputs", n_max);
    mechanism("write-port stalls", n_wrs);
    mechanism("CU-move lines", n_mv);
    mechanism("instruction line fills", n_miss);
    checks++;
    if (n_br != 3 + 39) begin failures++; $display("expected 42 taken branches, saw %0d", n_br); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

