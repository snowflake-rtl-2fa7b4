// max_trace_decoder: walks MAX vector instructions of one CU and feeds the
// vMAX unit.
//
// MAX instruction (vinstr_t): a[11:0] start line address in the maps buffer,
// imm trace length in words (whole lines, so imm/16 lines), flags a[17]
// (first: start a new window) and a[18] (last: write the maxima back after
// this trace), wb[CU_ID] the write-back granule address of the result.
// Lines are read through maps-buffer port 1. A read may be refused when the
// MAC trace decoder uses the same lane; it is retried the next cycle. A read
// line waits in a one-line holding register until the vMAX takes it, so the
// next read overlaps the vMAX's four cycles per line.
module max_trace_decoder
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
  output logic                rd_req,
  output logic [LADDR_W-1:0]  rd_addr,
  input  logic                rd_gnt,
  input  line_t               rd_data,
  // to vMAX
  output logic                v_valid,
  input  logic                v_ready,
  output line_t               v_data,
  output logic                v_first,
  output logic                v_last,
  output logic [WBA_W-1:0]    v_wb,
  output logic                idle
);
  vinstr_t fq;
  logic    f_empty, f_full, f_pop;
  logic [$clog2(FIFO_DEPTH):0] f_cnt;

  sync_fifo #(.T(vinstr_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(push), .wdata(instr), .pop(f_pop),
    .rdata(fq), .full(f_full), .empty(f_empty), .count(f_cnt));
  assign ready = !f_full;

  logic               act, fl_first, fl_last, first_line;
  logic [LADDR_W-1:0] la;
  logic [8:0]         remain;
  logic [WBA_W-1:0]   wbq;

  logic               inflight, in_first, in_last;
  logic [WBA_W-1:0]   in_wb;
  logic               hv;        // holding register valid
  line_t              hdata;
  logic               h_first, h_last;
  logic [WBA_W-1:0]   h_wb;
  logic               issue, finish_now;

  // Read only when the holding register will be free for the data.
  assign rd_req     = act && !inflight && (!hv || v_ready);
  assign rd_addr    = la;
  assign issue      = rd_req && rd_gnt;
  assign finish_now = issue && remain == 9'd1;
  assign f_pop      = (!act || finish_now) && !f_empty;

  assign v_valid = hv;
  assign v_data  = hdata;
  assign v_first = h_first;
  assign v_last  = h_last;
  assign v_wb    = h_wb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; fl_first <= 1'b0; fl_last <= 1'b0; first_line <= 1'b0;
      la <= '0; remain <= '0; wbq <= '0;
      inflight <= 1'b0; in_first <= 1'b0; in_last <= 1'b0; in_wb <= '0;
      hv <= 1'b0; hdata <= '0; h_first <= 1'b0; h_last <= 1'b0; h_wb <= '0;
    end else begin
      if (hv && v_ready) hv <= 1'b0;
      inflight <= issue;
      if (issue) begin
        in_first   <= first_line && fl_first;
        in_last    <= fl_last && remain == 9'd1;
        in_wb      <= wbq;
        la         <= la + 1'b1;
        remain     <= remain - 1'b1;
        first_line <= 1'b0;
        if (remain == 9'd1) act <= 1'b0;
      end
      if (inflight) begin
        hv      <= 1'b1;
        hdata   <= rd_data;
        h_first <= in_first;
        h_last  <= in_last;
        h_wb    <= in_wb;
      end
      if (f_pop) begin
        act        <= 1'b1;
        la         <= fq.a[LADDR_W-1:0];
        remain     <= {1'b0, fq.imm[11:4]};
        fl_first   <= fq.a[F_FIRST];
        fl_last    <= fq.a[F_LAST];
        first_line <= 1'b1;
        wbq        <= fq.wb[CU_ID];
      end
    end
  end

  assign idle = !act && f_empty && !inflight && !hv;
endmodule
