// tb_control_core: runs a program on the control core (instruction cache
// BANK_WORDS reduced to 64) against the behavioural memory and compares every
// vector instruction it issues (opcode, both source values, immediate and the
// write-back address of CU1) with an instruction-level model of the same
// program written in this testbench. The program covers MOV (both modes),
// ADD, MUL, a counted loop closed by BGT with four delay slots, a taken BEQ
// that skips an instruction, a not-taken BLE, write-back address registers
// advanced by MAC instructions with the last flag, and a load followed by a
// store on the same CU, which must wait until the load has completed. The
// vector side accepts instructions with random back-pressure and reports
// loads complete 20 to 60 cycles after they issue.
module tb_control_core;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, halted, loads_pending;
  logic [31:0] start_pc;
  mem_req_t imreq;
  logic imreq_ready;
  mem_rsp_t imrsp;
  vinstr_t vout;
  logic vout_valid, vout_ready;
  logic [3:0] load_done;
  logic ev_raw_stall, ev_load_stall, ev_branch_taken, ev_vec_issue;

  control_core #(.NCU(4), .BANK_WORDS(64)) dut (.*);
  mem_model #(.DEPTH(256), .LAT(4), .STALL(1'b1)) mem (
    .clk, .rst_n, .req(imreq), .ready(imreq_ready), .rsp(imrsp));

  logic [31:0] prog [$];
  function automatic logic [31:0] enc(input int op, input int mode, input int rd, input int rs1,
                                      input int rs2, input int imm);
    return {4'(op), 1'(mode), 5'(rd), 5'(rs1), 5'(rs2), 12'(imm)};
  endfunction
  task automatic emit(input logic [31:0] w); prog.push_back(w); endtask
  task automatic movi(input int rd, input int v); emit({4'(OP_MOV), 1'b0, 5'(rd), 22'(v)}); endtask

  // ---- instruction-level model ----
  typedef struct { int op; logic [31:0] a, b; logic [11:0] imm; logic [13:0] wb1; } vexp_t;
  vexp_t exp_q [$];
  task automatic model();
    logic [31:0] r [32];
    logic [13:0] mb [4], mo [4];
    int pc, slots, tgt, next;
    foreach (r[i]) r[i] = 0;
    foreach (mb[i]) begin mb[i] = 0; mo[i] = 0; end
    pc = 0; slots = 0; tgt = 0;
    forever begin
      logic [31:0] ir, a, b, res;
      int op, rd;
      logic taken;
      ir = prog[pc]; op = int'(ir[31:28]); rd = int'(ir[26:22]);
      a = r[ir[21:17]]; b = r[ir[16:12]];
      taken = 0; res = 'x;
      if (op == OP_HALT) break;
      case (op)
        OP_MOV: res = ir[27] ? (a << ir[4:0]) : 32'(signed'(ir[21:0]));
        OP_ADD: res = a + (ir[27] ? b : 32'(signed'(ir[11:0])));
        OP_MUL: res = a * (ir[27] ? b : 32'(signed'(ir[11:0])));
        OP_BGT: taken = $signed(a) > $signed(b);
        OP_BLE: taken = $signed(a) <= $signed(b);
        OP_BEQ: taken = a == b;
        OP_WBSET: if (ir[27]) mo[rd % 4] = a[13:0]; else mb[rd % 4] = a[13:0];
        OP_LD, OP_ST, OP_MAC, OP_MAX, OP_TMOV, OP_VMOV: begin
          vexp_t e;
          e.op = op; e.a = a; e.b = b; e.imm = ir[11:0]; e.wb1 = mb[1];
          exp_q.push_back(e);
          if (op == OP_MAC && b[F_LAST])
            for (int c = 0; c < 4; c++) if (a[28 + c]) mb[c] = mb[c] + mo[c];
        end
        default: ;
      endcase
      if (op inside {OP_MOV, OP_ADD, OP_MUL} && rd != 0) r[rd] = res;
      next = pc + 1;
      if (taken) begin tgt = pc + int'(signed'(ir[11:0])); slots = 4; end
      else if (slots > 0) begin slots--; if (slots == 0) next = tgt; end
      pc = next;
    end
  endtask

  // ---- vector side ----
  int outstanding [4];
  int n_vec, n_raw, n_ldst;
  always @(posedge clk) begin
    vout_ready <= ($urandom % 3 != 0);
    if (rst_n) begin
      n_raw  += int'(ev_raw_stall);
      n_ldst += int'(ev_load_stall);
    end
    if (rst_n && vout_valid && vout_ready) begin
      vexp_t e;
      n_vec++;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected vector instruction"); end
      else begin
        e = exp_q.pop_front();
        if (int'(vout.op) != e.op || vout.a !== e.a || vout.b !== e.b || vout.imm !== e.imm ||
            vout.wb[1] !== e.wb1) begin
          failures++;
          $display("vector %0d: got op %0d a %h b %h imm %h wb1 %0d, expected op %0d a %h b %h imm %h wb1 %0d",
                   n_vec, vout.op, vout.a, vout.b, vout.imm, vout.wb[1], e.op, e.a, e.b, e.imm, e.wb1);
        end
      end
      if (vout.op == OP_ST) begin
        checks++;
        if (outstanding[vout.b[31:28]] != 0) begin failures++; $display("store issued while its CU has a load pending"); end
      end
      if (vout.op == OP_LD) begin
        automatic int cu = int'(vout.b[31:28]);
        outstanding[cu]++;
        fork
          begin
            repeat (20 + $urandom % 40) @(posedge clk);
            @(negedge clk); load_done[cu] = 1;
            @(negedge clk); load_done[cu] = 0; outstanding[cu]--;
          end
        join_none
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int loop_pc, skip_pc;
  initial begin
    foreach (outstanding[i]) outstanding[i] = 0;
    n_vec = 0; n_raw = 0; n_ldst = 0;
    load_done = 0; start = 0; start_pc = 0; vout_ready = 0;
    movi(1, 5); movi(2, 3);
    emit(enc(OP_MUL, 1, 3, 1, 2, 0));            // r3 = 15
    emit(enc(OP_ADD, 0, 4, 3, 0, 100));          // r4 = 115
    emit(enc(OP_ST, 0, 0, 3, 4, 1));             // probe
    movi(5, 0); movi(6, 6); movi(7, 1); movi(8, 0);
    movi(20, 100); emit(enc(OP_WBSET, 0, 1, 20, 0, 0));
    movi(20, 7);   emit(enc(OP_WBSET, 1, 1, 20, 0, 0));
    movi(21, 1); emit(enc(OP_MOV, 1, 22, 21, 0, 29));   // CU1 mask
    movi(23, 1 << F_LAST);
    loop_pc = prog.size();
    emit(enc(OP_ADD, 0, 5, 5, 0, 1));
    emit(enc(OP_MUL, 1, 7, 7, 5, 0));
    emit(enc(OP_MAC, 1, 0, 22, 23, 16));
    emit(enc(OP_BGT, 0, 0, 6, 5, loop_pc - prog.size()));
    emit(enc(OP_ST, 0, 0, 5, 7, 2));             // delay slots
    emit(enc(OP_ADD, 1, 8, 8, 5, 0));
    emit(enc(OP_NOP, 0, 0, 0, 0, 0));
    emit(enc(OP_ADD, 0, 8, 8, 0, 1000));
    emit(enc(OP_BLE, 0, 0, 6, 1, 50));           // 6 <= 5: not taken
    skip_pc = prog.size();
    emit(enc(OP_BEQ, 0, 0, 5, 6, 6));            // taken, skips one
    emit(enc(OP_ST, 0, 0, 8, 7, 3));
    emit(enc(OP_NOP, 0, 0, 0, 0, 0));
    emit(enc(OP_NOP, 0, 0, 0, 0, 0));
    emit(enc(OP_MOV, 1, 9, 6, 0, 2));
    emit(enc(OP_ST, 0, 0, 0, 0, 99));            // skipped
    movi(24, 2); emit(enc(OP_MOV, 1, 25, 24, 0, 28));  // CU2
    emit(enc(OP_LD, 0, 0, 9, 25, 32));
    emit(enc(OP_ST, 0, 0, 9, 25, 32));           // waits for the load
    emit(enc(OP_MUL, 0, 10, 9, 0, -3));
    emit(enc(OP_ST, 0, 0, 10, 8, 4));
    emit(enc(OP_HALT, 0, 0, 0, 0, 0));
    for (int k = 0; k < prog.size(); k++) mem.mem[k / 8][(k % 8)*32 +: 32] = prog[k];
    model();

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!halted) @(posedge clk);
    repeat (100) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d vector instructions never issued", exp_q.size()); end
    checks++;
    if (n_raw == 0 || n_ldst == 0) begin failures++; $display("no RAW stall (%0d) or load stall (%0d)", n_raw, n_ldst); end
    $display("vector instructions %0d, RAW stall cycles %0d, load stall cycles %0d", n_vec, n_raw, n_ldst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
