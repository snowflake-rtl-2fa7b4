// control_core: the scalar pipeline that runs the Snowflake program and
// issues vector instructions to the compute core.
//
// Five stages, in order: fetch (PC and double-buffered instruction cache),
// decode (true-dependency check: an instruction whose source register is
// still to be written by an older one waits in decode until that one
// commits), dispatch (register file read, load tracking, write-back address
// registers, vector issue), ALU (adder, multiplier, comparator) and
// write-back. Vector instructions leave from dispatch on vout/vout_valid and
// are handed to the trace decoders, which finish them while scalar
// instructions go on; scalar code never reads vector results.
//
// Branches (BGT, BLE, BEQ; rs1 compared with rs2, signed) are resolved in the
// ALU stage and have four delay slots: the four instructions after a branch
// always execute, and then the PC jumps to branch_pc + imm. There is no
// prediction and no flush. The fetch stage counts the delay-slot instructions
// it still has to fetch after the branch resolves.
//
// Load tracking: each CU has a counter of loads issued to it and not yet
// completed (load_done). A vector instruction that reads or writes a CU's
// buffers (MAC, MAX, VMOV, TMOV, ST) waits in dispatch while that CU has a
// load pending, so it cannot read a buffer a load is still filling.
//
// Write-back address registers: per CU, one base/offset pair for MAC results
// and one for MAX results (WBSET: mode 0 sets the base, mode 1 the offset;
// rd[4] selects MAX, rd[3:0] the CU; the value comes from rs1). A MAC (MAX)
// instruction whose last flag is set carries each CU's current base and then
// advances it by the offset. Encodings and HALT are this design's choices.
//
// The host starts the core with start/start_pc; halted rises when HALT
// reaches the ALU stage.
module control_core
  import snowflake_pkg::*;
#(
  parameter int NCU        = NCU_PER_CL,
  parameter int BANK_WORDS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [31:0]     start_pc,
  output logic            halted,
  output logic            loads_pending,
  // instruction memory port
  output mem_req_t        imreq,
  input  logic            imreq_ready,
  input  mem_rsp_t        imrsp,
  // vector instructions
  output vinstr_t         vout,
  output logic            vout_valid,
  input  logic            vout_ready,
  input  logic [NCU-1:0]  load_done,
  // observation
  output logic            ev_raw_stall,
  output logic            ev_load_stall,
  output logic            ev_branch_taken,
  output logic            ev_vec_issue
);
  // ---------------- fetch ----------------
  logic        run, halting;
  logic [31:0] pc;
  logic        ic_hit;
  logic [31:0] ic_instr;

  icache #(.BANK_WORDS(BANK_WORDS)) u_icache (
    .clk(clk), .rst_n(rst_n), .flush(start), .pc(pc), .hit(ic_hit), .instr(ic_instr),
    .mreq(imreq), .mreq_ready(imreq_ready), .mrsp(imrsp));

  // ---------------- pipeline registers ----------------
  logic        id_v, ds_v, ex_v, wb_v;
  logic [31:0] id_ir, ds_ir, ex_ir;
  logic [31:0] id_pc, ds_pc, ex_pc;
  logic [31:0] ex_a, ex_b;
  logic        wb_we;
  logic [4:0]  wb_rd;
  logic [31:0] wb_val;

  logic [31:0] busy;

  // field helpers
  function automatic opcode_e f_op(input logic [31:0] ir); return opcode_e'(ir[31:28]); endfunction
  function automatic logic [4:0] f_rd(input logic [31:0] ir);  return ir[26:22]; endfunction
  function automatic logic [4:0] f_rs1(input logic [31:0] ir); return ir[21:17]; endfunction
  function automatic logic [4:0] f_rs2(input logic [31:0] ir); return ir[16:12]; endfunction
  function automatic logic [31:0] f_imm(input logic [31:0] ir); return 32'(signed'(ir[11:0])); endfunction

  function automatic logic uses_rs1(input logic [31:0] ir);
    unique case (f_op(ir))
      OP_MOV:                      return ir[27];
      OP_NOP, OP_HALT:             return 1'b0;
      default:                     return 1'b1;
    endcase
  endfunction
  function automatic logic uses_rs2(input logic [31:0] ir);
    unique case (f_op(ir))
      OP_ADD, OP_MUL:                              return ir[27];
      OP_BGT, OP_BLE, OP_BEQ, OP_LD, OP_ST,
      OP_MAC, OP_TMOV:                             return 1'b1;
      default:                                     return 1'b0;
    endcase
  endfunction
  function automatic logic writes_rd(input logic [31:0] ir);
    unique case (f_op(ir))
      OP_MOV, OP_ADD, OP_MUL: return f_rd(ir) != 5'd0;
      default:                return 1'b0;
    endcase
  endfunction
  function automatic logic is_vec(input logic [31:0] ir);
    unique case (f_op(ir))
      OP_LD, OP_ST, OP_MAC, OP_MAX, OP_TMOV, OP_VMOV: return 1'b1;
      default:                                        return 1'b0;
    endcase
  endfunction

  // ---------------- decode ----------------
  logic hazard, ds_stall, id_adv, fetch_fire;
  assign hazard = id_v && ((uses_rs1(id_ir) && busy[f_rs1(id_ir)]) ||
                           (uses_rs2(id_ir) && busy[f_rs2(id_ir)]));
  assign id_adv = id_v && !hazard && !ds_stall;

  // ---------------- dispatch ----------------
  logic [31:0] rs1v, rs2v;
  regfile u_rf (
    .clk(clk), .rst_n(rst_n), .ra1(f_rs1(ds_ir)), .ra2(f_rs2(ds_ir)), .rd1(rs1v), .rd2(rs2v),
    .we(wb_v && wb_we), .wa(wb_rd), .wd(wb_val));

  logic [NCU-1:0][7:0]        pend;
  logic [NCU-1:0][WBA_W-1:0]  mac_base, mac_off, max_base, max_off;
  logic [NCU-1:0]             touch;
  logic                       ld_block, ds_vec, ds_adv;
  opcode_e                    ds_op;

  assign ds_op  = f_op(ds_ir);
  assign ds_vec = ds_v && is_vec(ds_ir);

  always_comb begin
    touch = '0;
    unique case (ds_op)
      OP_MAC, OP_MAX, OP_VMOV:
        for (int c = 0; c < NCU; c++)
          if (c / NCU_PER_CL == int'(rs1v[F_CL_LO +: 2]) && rs1v[F_CUMASK_LO + c % NCU_PER_CL])
            touch[c] = 1'b1;
      OP_TMOV:
        for (int c = 0; c < NCU; c++)
          if (int'(rs1v[F_CU_LO +: 4]) == c || int'(rs2v[F_CU_LO +: 4]) == c) touch[c] = 1'b1;
      OP_ST:
        for (int c = 0; c < NCU; c++)
          if (int'(rs2v[F_CU_LO +: 4]) == c) touch[c] = 1'b1;
      default: ;
    endcase
    ld_block = 1'b0;
    for (int c = 0; c < NCU; c++) if (touch[c] && pend[c] != '0) ld_block = 1'b1;
  end

  always_comb begin
    vout      = '0;
    vout.op   = ds_op;
    vout.mode = ds_ir[27];
    vout.a    = rs1v;
    vout.b    = rs2v;
    vout.imm  = ds_ir[11:0];
    for (int c = 0; c < NCU; c++) vout.wb[c] = (ds_op == OP_MAX) ? max_base[c] : mac_base[c];
  end
  assign vout_valid = ds_vec && !ld_block;
  assign ds_stall   = ds_v && ((ds_vec && (ld_block || !vout_ready)));
  assign ds_adv     = ds_v && !ds_stall;

  // ---------------- ALU ----------------
  opcode_e     ex_op;
  logic        ex_mode, br_taken;
  logic [31:0] alu_out, opb;
  assign ex_op   = f_op(ex_ir);
  assign ex_mode = ex_ir[27];
  assign opb     = ex_mode ? ex_b : f_imm(ex_ir);
  always_comb begin
    alu_out  = '0;
    br_taken = 1'b0;
    unique case (ex_op)
      OP_MOV: alu_out = ex_mode ? (ex_a << ex_ir[4:0]) : 32'(signed'(ex_ir[21:0]));
      OP_ADD: alu_out = ex_a + opb;
      OP_MUL: alu_out = ex_a * opb;
      OP_BGT: br_taken = $signed(ex_a) >  $signed(ex_b);
      OP_BLE: br_taken = $signed(ex_a) <= $signed(ex_b);
      OP_BEQ: br_taken = ex_a == ex_b;
      default: ;
    endcase
    br_taken = br_taken && ex_v;
  end

  // ---------------- fetch control with four delay slots ----------------
  logic        redir, redir_n;
  logic [2:0]  redir_cnt, redir_cnt_n;
  logic [31:0] redir_tgt, redir_tgt_n, pc_n;
  logic [2:0]  younger, n_left;

  assign fetch_fire = run && !halting && !(id_v && f_op(id_ir) == OP_HALT) && ic_hit &&
                      (!id_v || id_adv);
  assign younger = 3'(id_v) + 3'(ds_v);

  always_comb begin
    redir_n     = redir;
    redir_cnt_n = redir_cnt;
    redir_tgt_n = redir_tgt;
    pc_n        = pc;
    n_left      = 3'd4 - younger - 3'(fetch_fire);
    if (br_taken) begin
      redir_tgt_n = ex_pc + f_imm(ex_ir);
      if (n_left == 3'd0) begin
        pc_n    = redir_tgt_n;
        redir_n = 1'b0;
      end else begin
        pc_n        = fetch_fire ? pc + 1 : pc;
        redir_n     = 1'b1;
        redir_cnt_n = n_left;
      end
    end else if (redir && fetch_fire) begin
      if (redir_cnt == 3'd1) begin
        pc_n    = redir_tgt;
        redir_n = 1'b0;
      end else begin
        pc_n        = pc + 1;
        redir_cnt_n = redir_cnt - 1'b1;
      end
    end else if (fetch_fire) begin
      pc_n = pc + 1;
    end
  end

  // ---------------- sequential ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; halting <= 1'b0; halted <= 1'b0; pc <= '0;
      id_v <= 1'b0; ds_v <= 1'b0; ex_v <= 1'b0; wb_v <= 1'b0;
      id_ir <= '0; ds_ir <= '0; ex_ir <= '0; id_pc <= '0; ds_pc <= '0; ex_pc <= '0;
      ex_a <= '0; ex_b <= '0; wb_we <= 1'b0; wb_rd <= '0; wb_val <= '0;
      busy <= '0; pend <= '0;
      mac_base <= '0; mac_off <= '0; max_base <= '0; max_off <= '0;
      redir <= 1'b0; redir_cnt <= '0; redir_tgt <= '0;
    end else if (start) begin
      run <= 1'b1; halting <= 1'b0; halted <= 1'b0; pc <= start_pc;
      id_v <= 1'b0; ds_v <= 1'b0; ex_v <= 1'b0; wb_v <= 1'b0;
      busy <= '0; redir <= 1'b0;
    end else begin
      pc        <= pc_n;
      redir     <= redir_n;
      redir_cnt <= redir_cnt_n;
      redir_tgt <= redir_tgt_n;

      // fetch -> decode
      if (fetch_fire) begin
        id_v  <= 1'b1;
        id_ir <= ic_instr;
        id_pc <= pc;
      end else if (id_adv) id_v <= 1'b0;

      // decode -> dispatch
      if (id_adv) begin
        ds_v  <= 1'b1;
        ds_ir <= id_ir;
        ds_pc <= id_pc;
        if (f_op(id_ir) == OP_HALT) halting <= 1'b1;
      end else if (ds_adv) ds_v <= 1'b0;

      // dispatch -> ALU
      ex_v <= ds_adv;
      if (ds_adv) begin
        ex_ir <= ds_ir;
        ex_pc <= ds_pc;
        ex_a  <= rs1v;
        ex_b  <= rs2v;
      end

      // ALU -> write-back
      wb_v   <= ex_v;
      wb_we  <= ex_v && writes_rd(ex_ir);
      wb_rd  <= f_rd(ex_ir);
      wb_val <= alu_out;
      if (ex_v && ex_op == OP_HALT) begin
        halted <= 1'b1;
        run    <= 1'b0;
      end

      // scoreboard: clear at commit, set when a writer leaves decode
      if (wb_v && wb_we) busy[wb_rd] <= 1'b0;
      if (id_adv && writes_rd(id_ir)) busy[f_rd(id_ir)] <= 1'b1;

      // write-back address registers and load tracking (dispatch)
      if (ds_adv && ds_op == OP_WBSET) begin
        for (int c = 0; c < NCU; c++) begin
          if (f_rd(ds_ir)[3:0] == 4'(c)) begin
            if (f_rd(ds_ir)[4]) begin
              if (ds_ir[27]) max_off[c]  <= rs1v[WBA_W-1:0];
              else           max_base[c] <= rs1v[WBA_W-1:0];
            end else begin
              if (ds_ir[27]) mac_off[c]  <= rs1v[WBA_W-1:0];
              else           mac_base[c] <= rs1v[WBA_W-1:0];
            end
          end
        end
      end
      if (ds_adv && ds_op == OP_MAC && rs2v[F_LAST]) begin
        for (int c = 0; c < NCU; c++) if (touch[c]) mac_base[c] <= mac_base[c] + mac_off[c];
      end
      if (ds_adv && ds_op == OP_MAX && rs1v[F_LAST]) begin
        for (int c = 0; c < NCU; c++) if (touch[c]) max_base[c] <= max_base[c] + max_off[c];
      end
      for (int c = 0; c < NCU; c++) begin
        logic inc;
        inc = ds_adv && ds_op == OP_LD && int'(rs2v[F_CU_LO +: 4]) == c;
        pend[c] <= pend[c] + 8'(inc) - 8'(load_done[c]);
      end
    end
  end

  assign loads_pending   = (pend != '0);
  assign ev_raw_stall    = hazard;
  assign ev_load_stall   = ds_vec && ld_block;
  assign ev_branch_taken = br_taken;
  assign ev_vec_issue    = vout_valid && vout_ready;
endmodule
