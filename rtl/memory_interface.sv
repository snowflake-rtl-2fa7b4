// memory_interface: a compute cluster's port to memory.
//
// Loads (LD): a = memory line address of the trace, b[22:0] = start address
// in the destination buffer, b[27:23] = buffer id (0 maps buffer, 1..4 the
// weights buffers of vMAC 0..3), b[31:28] = CU index (global; the cluster
// keeps those whose upper bits match), imm = length in words (whole 256-bit
// lines). The engine issues one line read per cycle; read data returns in
// order and is written to the destination buffer, one line per cycle. When
// the last line of a load is written, load_done pulses for that CU so the
// control core's load tracking can release instructions that wait on it.
// At most MAX_OUT lines are in flight or buffered.
// Stores: lines from the CUs' trace move decoders are forwarded as memory
// writes, round-robin among the CUs. Load reads and store writes alternate
// when both are waiting.
// The memory is addressed in 256-bit lines (this design's choice).
module memory_interface
  import snowflake_pkg::*;
#(
  parameter int CL_ID   = 0,
  parameter int NCU     = NCU_PER_CL,
  parameter int MAX_OUT = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ld_push,
  input  vinstr_t             ld_instr,
  output logic                ld_ready,
  output bufwr_t [NCU-1:0]    ldw,
  input  logic [NCU-1:0]      ldw_ready,
  input  stline_t [NCU-1:0]   st,
  output logic [NCU-1:0]      st_ready,
  output mem_req_t            mreq,
  input  logic                mreq_ready,
  input  mem_rsp_t            mrsp,
  output logic [NCU-1:0]      load_done,
  output logic                idle
);
  vinstr_t fq;
  logic    f_empty, f_full, f_pop;
  logic [2:0] f_cnt;
  sync_fifo #(.T(vinstr_t), .DEPTH(4)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(ld_push), .wdata(ld_instr), .pop(f_pop),
    .rdata(fq), .full(f_full), .empty(f_empty), .count(f_cnt));
  assign ld_ready = !f_full;

  typedef struct packed {
    logic [1:0]  cu;
    logic [2:0]  buf_id;
    logic [LADDR_W-1:0] addr;
    logic        last;
  } meta_t;

  logic               act;
  logic [31:0]        maddr;
  logic [1:0]         cu;
  logic [2:0]         bid;
  logic [LADDR_W-1:0] baddr;
  logic [8:0]         remain;

  meta_t  m_in, m_out;
  logic   m_full, m_empty, m_push, m_pop;
  logic [$clog2(MAX_OUT):0] m_cnt;
  line_t  d_out;
  logic   d_full, d_empty, d_pop;
  logic [$clog2(MAX_OUT):0] d_cnt;

  sync_fifo #(.T(meta_t), .DEPTH(MAX_OUT)) u_meta (
    .clk(clk), .rst_n(rst_n), .push(m_push), .wdata(m_in), .pop(m_pop),
    .rdata(m_out), .full(m_full), .empty(m_empty), .count(m_cnt));
  sync_fifo #(.T(line_t), .DEPTH(MAX_OUT)) u_data (
    .clk(clk), .rst_n(rst_n), .push(mrsp.valid), .wdata(mrsp.rdata), .pop(d_pop),
    .rdata(d_out), .full(d_full), .empty(d_empty), .count(d_cnt));

  // ---- request selection ----
  logic       want_ld, want_st, turn, sel_st, fire;
  logic [1:0] st_sel;
  logic       st_any;
  logic [1:0] rr;

  always_comb begin
    st_any = 1'b0;
    st_sel = rr;
    for (int k = NCU - 1; k >= 0; k--) begin
      logic [1:0] i;
      i = 2'(int'(rr) + k);
      if (st[i].valid) begin
        st_any = 1'b1;
        st_sel = i;
      end
    end
  end

  assign want_ld = act && !m_full;
  assign want_st = st_any;
  assign sel_st  = want_st && (!want_ld || turn);
  assign mreq.valid = want_ld || want_st;
  assign mreq.we    = sel_st;
  assign mreq.addr  = sel_st ? st[st_sel].addr : maddr;
  assign mreq.wdata = st[st_sel].data;
  assign fire       = mreq.valid && mreq_ready;

  always_comb begin
    st_ready = '0;
    if (fire && sel_st) st_ready[st_sel] = 1'b1;
  end

  assign m_push = fire && !sel_st;
  assign m_in   = '{cu: cu, buf_id: bid, addr: baddr, last: remain == 9'd1};
  assign f_pop  = (!act || (m_push && remain == 9'd1)) && !f_empty;

  // ---- write returned lines into the CUs ----
  logic wr_ok;
  assign wr_ok = !d_empty && !m_empty && ldw_ready[m_out.cu];
  assign d_pop = wr_ok;
  assign m_pop = wr_ok;
  always_comb begin
    ldw = '0;
    for (int k = 0; k < NCU; k++) begin
      ldw[k].buf_id = m_out.buf_id;
      ldw[k].addr   = m_out.addr;
      ldw[k].data   = d_out;
      ldw[k].valid  = !d_empty && !m_empty && m_out.cu == 2'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; maddr <= '0; cu <= '0; bid <= '0; baddr <= '0; remain <= '0;
      turn <= 1'b0; rr <= '0; load_done <= '0;
    end else begin
      load_done <= '0;
      if (wr_ok && m_out.last) load_done[m_out.cu] <= 1'b1;
      if (fire) turn <= !sel_st;
      if (fire && sel_st) rr <= st_sel + 1'b1;
      if (m_push) begin
        maddr  <= maddr + 1;
        baddr  <= baddr + 1'b1;
        remain <= remain - 1'b1;
        if (remain == 9'd1) act <= 1'b0;
      end
      if (f_pop) begin
        act    <= 1'b1;
        maddr  <= fq.a;
        baddr  <= fq.b[LADDR_W-1:0];
        bid    <= fq.b[F_BUF_LO +: 3];
        cu     <= fq.b[F_CU_LO +: 2];
        remain <= {1'b0, fq.imm[11:4]};
      end
    end
  end

  assign idle = !act && f_empty && m_empty;
endmodule
