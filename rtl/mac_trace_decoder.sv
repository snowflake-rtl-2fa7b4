// mac_trace_decoder: walks MAC and VMOV vector instructions of one CU and
// feeds the vMACs one beat per cycle.
//
// MAC instruction (vinstr_t): a[15:0] maps word address of the trace, b[8:0]
// weights address, imm trace length in words, mode INDP/COOP, flags in b
// (load bias, first, last, preload, ReLU; see snowflake_pkg). wb[CU_ID] is the
// write-back address that goes with the last beat.
//   COOP: one 256-bit line per cycle from read port 0; beat k uses line
//         (a>>4)+k and weights address +k. a must be line aligned and the
//         length a multiple of 16 words.
//   INDP: one word per cycle, broadcast to all MACs. As in the paper, the
//         word is taken from a shift register holding the current line: it
//         shifts one word per cycle until the requested word is at the front.
//         A requested word k positions ahead therefore costs k bubble cycles;
//         sequential words cost none, because the next line is prefetched
//         into a second register while the current one is consumed. A new
//         line that was not prefetched costs two cycles (read + load).
//   Load bias: one extra beat before the trace reads the biases at the
//         weights address; the trace then starts at the next address.
// VMOV instruction: a[11:0] line address; the line is read through port 2
// and sent as a B_PRE beat to vMAC imm[1:0].
//
// The gather adder needs 16 cycles per result, so beats that end an output
// (last) are kept at least 16 cycles apart, stalling the trace if needed.
// Instructions queue in a FIFO; the next one starts in the cycle after the
// current one issues its final beat.
module mac_trace_decoder
  import snowflake_pkg::*;
#(
  parameter int CU_ID      = 0,
  parameter int FIFO_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                push,
  input  vinstr_t             instr,
  output logic                ready,
  // maps buffer ports 0 and 2
  output logic                rd0_req,
  output logic [LADDR_W-1:0]  rd0_addr,
  input  logic                rd0_gnt,
  input  line_t               rd0_data,
  output logic                rd2_req,
  output logic [LADDR_W-1:0]  rd2_addr,
  input  logic                rd2_gnt,
  input  line_t               rd2_data,
  output beat_t               beat,
  output logic                idle
);
  vinstr_t fq;
  logic    f_empty, f_full, f_pop;
  logic [$clog2(FIFO_DEPTH):0] f_cnt;

  sync_fifo #(.T(vinstr_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(push), .wdata(instr), .pop(f_pop),
    .rdata(fq), .full(f_full), .empty(f_empty), .count(f_cnt));
  assign ready = !f_full;

  // ---- current instruction ----
  logic               act, is_vmov, mode, need_bias, fl_first, fl_last, fl_pre, fl_relu;
  logic [15:0]        wp;        // INDP word pointer / COOP line pointer
  logic [12:0]        remain;    // beats left
  logic [WADDR_W-1:0] wa;
  logic [WBA_W-1:0]   wbq;
  logic [1:0]         vsel;
  logic               first_beat;

  // ---- read return pipe (COOP lines, VMOV lines) ----
  typedef struct packed {
    logic valid; logic pre_kind; logic first; logic pre; logic last; logic relu;
    logic [1:0] vsel; logic [WADDR_W-1:0] waddr; logic [WBA_W-1:0] wb;
  } rq_t;
  rq_t rq, rq_n;

  // ---- INDP shift register and prefetch register ----
  line_t        held, nxt;
  logic [11:0]  held_line, nxt_line, pf_line;
  logic         held_v, nxt_v, pf_pend;
  logic [3:0]   f;

  logic [4:0]   gap;   // cycles since the last "last" beat was emitted, minus one

  // ---- per-cycle decisions ----
  logic  issue_coop, issue_vmov, emit_bias, emit_indp, step, finish_now, load_next;
  logic  this_last;
  logic [11:0] tline, pf_want, end_line;
  logic  pf_issue;

  always_comb begin
    this_last  = fl_last && (remain == 13'd1);
    issue_coop = 1'b0;
    issue_vmov = 1'b0;
    emit_bias  = 1'b0;
    emit_indp  = 1'b0;
    pf_issue   = 1'b0;
    rd0_req    = 1'b0;
    rd0_addr   = '0;
    rd2_req    = 1'b0;
    rd2_addr   = '0;
    tline      = wp[15:4];
    end_line   = 12'((wp + 16'(remain) - 16'd1) >> 4);
    pf_want    = (held_v && held_line == tline) ? tline + 12'd1 : tline;

    if (act) begin
      if (is_vmov) begin
        rd2_req  = 1'b1;
        rd2_addr = wp[11:0];
        issue_vmov = rd2_gnt;
      end else if (need_bias) begin
        emit_bias = !rq.valid;
      end else if (mode == MODE_COOP) begin
        if (!this_last || gap >= 5'd14) begin
          rd0_req    = 1'b1;
          rd0_addr   = wp[11:0];
          issue_coop = rd0_gnt;
        end
      end else begin
        emit_indp = !rq.valid && held_v && held_line == tline && f == wp[3:0] &&
                    (!this_last || gap >= 5'd15);
        if (!pf_pend && pf_want <= end_line && !(nxt_v && nxt_line == pf_want)) begin
          rd0_req  = 1'b1;
          rd0_addr = pf_want;
          pf_issue = rd0_gnt;
        end
      end
    end
    step       = issue_coop || emit_indp;
    finish_now = act && (issue_vmov || (step && remain == 13'd1));
    load_next  = (!act || finish_now) && !f_empty;
    f_pop      = load_next;
  end

  // ---- beat output ----
  always_comb begin
    beat = '0;
    if (rq.valid) begin
      beat.valid = 1'b1;
      beat.kind  = rq.pre_kind ? B_PRE : B_MAC;
      beat.mode  = MODE_COOP;
      beat.first = rq.first;
      beat.pre   = rq.pre;
      beat.last  = rq.last;
      beat.relu  = rq.relu;
      beat.vsel  = rq.vsel;
      beat.waddr = rq.waddr;
      beat.wb    = rq.wb;
      beat.data  = rq.pre_kind ? rd2_data : rd0_data;
    end else if (emit_bias) begin
      beat.valid = 1'b1;
      beat.kind  = B_BIAS;
      beat.waddr = wa;
    end else if (emit_indp) begin
      beat.valid = 1'b1;
      beat.kind  = B_MAC;
      beat.mode  = MODE_INDP;
      beat.first = first_beat && fl_first;
      beat.pre   = first_beat && fl_first && fl_pre;
      beat.last  = this_last;
      beat.relu  = fl_relu;
      beat.waddr = wa;
      beat.wb    = wbq;
      beat.data  = {{(LINE_W-WORD_W){1'b0}}, held[WORD_W-1:0]};
    end
  end

  always_comb begin
    rq_n = '0;
    if (issue_coop) begin
      rq_n.valid = 1'b1;
      rq_n.first = first_beat && fl_first;
      rq_n.pre   = first_beat && fl_first && fl_pre;
      rq_n.last  = this_last;
      rq_n.relu  = fl_relu;
      rq_n.waddr = wa;
      rq_n.wb    = wbq;
    end else if (issue_vmov) begin
      rq_n.valid    = 1'b1;
      rq_n.pre_kind = 1'b1;
      rq_n.vsel     = vsel;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; is_vmov <= 1'b0; mode <= 1'b0; need_bias <= 1'b0;
      fl_first <= 1'b0; fl_last <= 1'b0; fl_pre <= 1'b0; fl_relu <= 1'b0;
      wp <= '0; remain <= '0; wa <= '0; wbq <= '0; vsel <= '0; first_beat <= 1'b0;
      rq <= '0;
      held <= '0; nxt <= '0; held_line <= '0; nxt_line <= '0; pf_line <= '0;
      held_v <= 1'b0; nxt_v <= 1'b0; pf_pend <= 1'b0; f <= '0;
      gap <= 5'd31;
    end else begin
      rq <= rq_n;

      // gap counter, in emission time
      if ((rq.valid && !rq.pre_kind && rq.last) || (emit_indp && this_last)) gap <= '0;
      else if (gap != 5'd31) gap <= gap + 1'b1;

      // current instruction progress
      if (emit_bias) begin
        need_bias <= 1'b0;
        wa        <= wa + 1'b1;
      end
      if (step) begin
        wp         <= wp + 1'b1;
        wa         <= wa + 1'b1;
        remain     <= remain - 1'b1;
        first_beat <= 1'b0;
      end
      if (finish_now) act <= 1'b0;

      // INDP shift register
      if (act && !is_vmov && mode == MODE_INDP && !need_bias) begin
        if (emit_indp) begin
          if (f == 4'd15) begin
            if (nxt_v && nxt_line == held_line + 12'd1) begin
              held <= nxt; held_line <= nxt_line; f <= '0; nxt_v <= 1'b0;
            end else held_v <= 1'b0;
          end else begin
            held <= held >> WORD_W; f <= f + 1'b1;
          end
        end else if (held_v && held_line == tline && f < wp[3:0]) begin
          held <= held >> WORD_W; f <= f + 1'b1;
        end else if (!(held_v && held_line == tline && f == wp[3:0])) begin
          if (nxt_v && nxt_line == tline) begin
            held <= nxt; held_line <= nxt_line; f <= '0; held_v <= 1'b1; nxt_v <= 1'b0;
          end else held_v <= 1'b0;
        end
      end
      if (pf_issue) begin
        pf_pend <= 1'b1;
        pf_line <= pf_want;
      end else pf_pend <= 1'b0;
      if (pf_pend) begin
        nxt <= rd0_data; nxt_line <= pf_line; nxt_v <= 1'b1;
      end

      // next instruction
      if (load_next) begin
        act        <= 1'b1;
        is_vmov    <= (fq.op == OP_VMOV);
        mode       <= fq.mode;
        need_bias  <= (fq.op == OP_MAC) && fq.b[F_LDB];
        fl_first   <= fq.b[F_FIRST];
        fl_last    <= fq.b[F_LAST];
        fl_pre     <= fq.b[F_PRE];
        fl_relu    <= fq.b[F_RELU];
        first_beat <= 1'b1;
        vsel       <= fq.imm[1:0];
        wa         <= fq.b[WADDR_W-1:0];
        wbq        <= fq.wb[CU_ID];
        if (fq.op == OP_VMOV) begin
          wp     <= {4'd0, fq.a[11:0]};
          remain <= 13'd1;
        end else if (fq.mode == MODE_COOP) begin
          wp     <= {4'd0, fq.a[15:4]};
          remain <= 13'(fq.imm[11:4]);
        end else begin
          wp     <= fq.a[15:0];
          remain <= {1'b0, fq.imm};
        end
        // A new output may read lines written back since they were fetched.
        if (fq.b[F_FIRST] && fq.op == OP_MAC) begin
          held_v <= 1'b0;
          nxt_v  <= 1'b0;
        end
      end
    end
  end

  assign idle = !act && f_empty && !rq.valid;
endmodule
