// memory_interconnect: shares the single external memory port among NM
// masters (the instruction cache and the clusters' memory interfaces).
//
// One request is forwarded per cycle, chosen round-robin among the masters
// with a valid request. The memory must return read data in request order;
// the index of each master with a read outstanding is kept in a FIFO and the
// returning line is routed to that master. New reads wait while MAX_RD reads
// are outstanding. The paper only names this block; arbitration and the
// in-order response rule are this design's choices.
module memory_interconnect
  import snowflake_pkg::*;
#(
  parameter int NM     = 2,
  parameter int MAX_RD = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  mem_req_t [NM-1:0]   req,
  output logic [NM-1:0]       req_ready,
  output mem_rsp_t [NM-1:0]   rsp,
  output mem_req_t            mreq,
  input  logic                mreq_ready,
  input  mem_rsp_t            mrsp
);
  localparam int IW = (NM > 1) ? $clog2(NM) : 1;

  logic [IW-1:0] rr, sel;
  logic          any;
  logic [IW-1:0] id_head;
  logic          id_full, id_empty, id_push;
  logic [$clog2(MAX_RD):0] id_cnt;

  always_comb begin
    any = 1'b0;
    sel = rr;
    for (int k = NM - 1; k >= 0; k--) begin
      int i;
      i = (int'(rr) + k) % NM;
      if (req[i].valid && !(req[i].we == 1'b0 && id_full)) begin
        any = 1'b1;
        sel = IW'(i);
      end
    end
  end

  always_comb begin
    mreq      = req[sel];
    mreq.valid = any;
    req_ready = '0;
    if (any && mreq_ready) req_ready[sel] = 1'b1;
  end

  assign id_push = any && mreq_ready && !req[sel].we;

  sync_fifo #(.T(logic [IW-1:0]), .DEPTH(MAX_RD)) u_ids (
    .clk(clk), .rst_n(rst_n), .push(id_push), .wdata(sel), .pop(mrsp.valid),
    .rdata(id_head), .full(id_full), .empty(id_empty), .count(id_cnt));

  always_comb begin
    for (int k = 0; k < NM; k++) begin
      rsp[k].rdata = mrsp.rdata;
      rsp[k].valid = mrsp.valid && id_head == IW'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (any && mreq_ready) rr <= IW'((int'(sel) + 1) % NM);
  end

  assert property (@(posedge clk) disable iff (!rst_n) mrsp.valid |-> !id_empty)
    else $error("memory_interconnect: read data with no read outstanding");
endmodule
