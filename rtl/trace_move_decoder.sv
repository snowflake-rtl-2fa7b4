// trace_move_decoder: moves traces out of one CU's maps buffer.
//
// Two functions share maps-buffer read port 3, as in the paper:
//   memory trace move (ST): a = memory line address, b[11:0] = start line in
//       the maps buffer, imm = length in words (whole lines). Lines leave on
//       the st_* port towards the cluster's memory interface.
//   CU trace move (TMOV): a[11:0] = source line, b[11:0] = destination line,
//       b[29:28] = destination CU within the cluster, imm = length in words.
//       Lines leave on the mv_* port towards the destination CU.
// Each function has its own instruction FIFO. When both are busy they
// alternate on the read port every cycle. A read refused because the MAC
// trace decoder (or a higher-priority port) uses the lane is retried. Each
// function keeps at most two lines in flight or buffered, so it never drops a
// line when its output is back-pressured.
module trace_move_decoder
  import snowflake_pkg::*;
#(
  parameter int FIFO_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                push_st,
  input  logic                push_mv,
  input  vinstr_t             instr,
  output logic                ready_st,
  output logic                ready_mv,
  output logic                rd_req,
  output logic [LADDR_W-1:0]  rd_addr,
  input  logic                rd_gnt,
  input  line_t               rd_data,
  output stline_t             st,
  input  logic                st_ready,
  output mvline_t             mv,
  input  logic                mv_ready,
  output logic                idle
);
  // fn 0 = memory move (ST), fn 1 = CU move (TMOV)
  vinstr_t                       fq [2];
  logic [1:0]                    f_empty, f_full, f_pop, push;
  logic [1:0][$clog2(FIFO_DEPTH):0] f_cnt;

  assign push = {push_mv, push_st};
  for (genvar k = 0; k < 2; k++) begin : g_fifo
    sync_fifo #(.T(vinstr_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk(clk), .rst_n(rst_n), .push(push[k]), .wdata(instr), .pop(f_pop[k]),
      .rdata(fq[k]), .full(f_full[k]), .empty(f_empty[k]), .count(f_cnt[k]));
  end
  assign ready_st = !f_full[0];
  assign ready_mv = !f_full[1];

  typedef struct packed {
    logic [31:0]        maddr;   // memory address (ST)
    logic [1:0]         dst;     // destination CU (TMOV)
    logic [LADDR_W-1:0] daddr;   // destination line (TMOV)
    line_t              data;
  } oline_t;

  logic [1:0]                act, want, inflight, o_full, o_empty, o_pop, o_push;
  logic [1:0][LADDR_W-1:0]   src;
  logic [1:0][8:0]           remain;
  logic [1:0][31:0]          dst_a;     // running memory / destination address
  logic [1:0][1:0]           dst_cu;
  logic [1:0][31:0]          fl_a;      // address of the line in flight
  logic [1:0][1:0]           fl_cu;     // destination CU of the line in flight
  logic                      turn, pick;
  logic                      issue;
  oline_t                    o_in [2];
  oline_t                    o_out [2];
  logic [1:0][1:0]           o_cnt;

  for (genvar k = 0; k < 2; k++) begin : g_out
    sync_fifo #(.T(oline_t), .DEPTH(2)) u_ofifo (
      .clk(clk), .rst_n(rst_n), .push(o_push[k]), .wdata(o_in[k]), .pop(o_pop[k]),
      .rdata(o_out[k]), .full(o_full[k]), .empty(o_empty[k]), .count(o_cnt[k]));
    // credit: lines in flight plus buffered must stay below 2
    assign want[k] = act[k] && (32'(o_cnt[k]) + 32'(inflight[k]) < 2);
    assign o_in[k] = '{maddr: fl_a[k], dst: fl_cu[k], daddr: fl_a[k][LADDR_W-1:0],
                       data: rd_data};
    assign o_push[k] = inflight[k];
  end

  // Alternate between the two functions when both want the port.
  assign pick    = (want == 2'b11) ? turn : want[1];
  assign rd_req  = |want;
  assign rd_addr = src[pick];
  assign issue   = rd_req && rd_gnt;

  for (genvar k = 0; k < 2; k++) begin : g_pop
    assign f_pop[k] = (!act[k] || (issue && pick == k && remain[k] == 9'd1)) && !f_empty[k];
  end

  assign st       = '{valid: !o_empty[0], addr: o_out[0].maddr, data: o_out[0].data};
  assign o_pop[0] = !o_empty[0] && st_ready;
  assign mv       = '{valid: !o_empty[1], dst: o_out[1].dst, addr: o_out[1].daddr,
                      data: o_out[1].data};
  assign o_pop[1] = !o_empty[1] && mv_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= '0; inflight <= '0; src <= '0; remain <= '0; dst_a <= '0; dst_cu <= '0;
      fl_a <= '0; fl_cu <= '0; turn <= 1'b0;
    end else begin
      inflight <= '0;
      if (issue) begin
        turn             <= !pick;
        inflight[pick]   <= 1'b1;
        fl_a[pick]       <= dst_a[pick];
        fl_cu[pick]      <= dst_cu[pick];
        src[pick]        <= src[pick] + 1'b1;
        dst_a[pick]      <= dst_a[pick] + 1;
        remain[pick]     <= remain[pick] - 1'b1;
        if (remain[pick] == 9'd1) act[pick] <= 1'b0;
      end
      if (f_pop[0]) begin
        act[0]    <= 1'b1;
        src[0]    <= fq[0].b[LADDR_W-1:0];
        dst_a[0]  <= fq[0].a;
        remain[0] <= {1'b0, fq[0].imm[11:4]};
      end
      if (f_pop[1]) begin
        act[1]    <= 1'b1;
        src[1]    <= fq[1].a[LADDR_W-1:0];
        dst_a[1]  <= 32'(fq[1].b[LADDR_W-1:0]);
        dst_cu[1] <= fq[1].b[F_CU_LO +: 2];
        remain[1] <= {1'b0, fq[1].imm[11:4]};
      end
    end
  end

  assign idle = (act == '0) && (f_empty == 2'b11) && (inflight == '0) && (o_empty == 2'b11);
endmodule
