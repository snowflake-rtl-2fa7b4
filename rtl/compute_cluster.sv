// compute_cluster: four compute units and their memory interface.
//
// Vector instructions from the control core are offered to every cluster.
// A cluster takes those aimed at its CUs:
//   MAC, MAX, VMOV: a[27:26] = cluster, a[31:28] = mask of target CUs (the same
//                   instruction may drive several CUs at once);
//   ST:   b[31:28] = global CU index;  TMOV: a[31:28] = source CU index;
//   LD:   b[31:28] = global CU index, sent to the memory interface.
// vin_ready is high when every target can take the instruction (instructions
// not aimed at this cluster are always "ready" here). CU-to-CU trace moves
// stay inside the cluster, as the paper requires; each destination CU takes
// lines from the lowest-numbered source that has one for it.
module compute_cluster
  import snowflake_pkg::*;
#(
  parameter int CL_ID     = 0,
  parameter int ROWS      = 1024,
  parameter int WDEPTH    = WB_DEPTH,
  parameter int OUT_SHIFT = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    vin_valid,
  input  vinstr_t                 vin,
  output logic                    vin_ready,
  output mem_req_t                mreq,
  input  logic                    mreq_ready,
  input  mem_rsp_t                mrsp,
  output logic [NCU_PER_CL-1:0]   load_done,
  output logic                    idle,
  output logic [NCU_PER_CL-1:0]   ev_coop_out,
  output logic [NCU_PER_CL-1:0]   ev_indp_out,
  output logic [NCU_PER_CL-1:0]   ev_max_out,
  output logic [NCU_PER_CL-1:0]   ev_wr_stall,
  output logic [NCU_PER_CL-1:0]   ev_cu_move
);
  localparam int N = NCU_PER_CL;

  logic [N-1:0] mask, cu_ready, cu_idle;
  logic         to_mi, mi_ready, mi_idle, accept;

  always_comb begin
    mask  = '0;
    to_mi = 1'b0;
    unique case (vin.op)
      OP_MAC, OP_MAX, OP_VMOV:
        if (vin.a[F_CL_LO +: 2] == 2'(CL_ID)) mask = vin.a[F_CUMASK_LO +: 4];
      OP_ST:
        if (vin.b[F_CU_LO + 2 +: 2] == 2'(CL_ID)) mask[vin.b[F_CU_LO +: 2]] = 1'b1;
      OP_TMOV:
        if (vin.a[F_CU_LO + 2 +: 2] == 2'(CL_ID)) mask[vin.a[F_CU_LO +: 2]] = 1'b1;
      OP_LD:
        to_mi = vin.b[F_CU_LO + 2 +: 2] == 2'(CL_ID);
      default: ;
    endcase
  end

  assign vin_ready = &(cu_ready | ~mask) && (!to_mi || mi_ready);
  assign accept    = vin_valid && vin_ready;

  bufwr_t  [N-1:0] ldw;
  logic    [N-1:0] ldw_ready, st_ready, mvo_ready, mvi_ready;
  stline_t [N-1:0] st;
  mvline_t [N-1:0] mvo, mvi;

  for (genvar c = 0; c < N; c++) begin : g_cu
    compute_unit #(.CU_ID(CL_ID * N + c), .ROWS(ROWS), .WDEPTH(WDEPTH),
                   .OUT_SHIFT(OUT_SHIFT)) u_cu (
      .clk(clk), .rst_n(rst_n), .vin_push(accept && mask[c]), .vin(vin),
      .vin_ready(cu_ready[c]), .ldw(ldw[c]), .ldw_ready(ldw_ready[c]),
      .st(st[c]), .st_ready(st_ready[c]),
      .mv_out(mvo[c]), .mv_out_ready(mvo_ready[c]), .mv_in(mvi[c]), .mv_in_ready(mvi_ready[c]),
      .idle(cu_idle[c]), .ev_coop_out(ev_coop_out[c]), .ev_indp_out(ev_indp_out[c]),
      .ev_max_out(ev_max_out[c]), .ev_wr_stall(ev_wr_stall[c]));
  end

  // CU-to-CU move routing
  logic [N-1:0][1:0] src_of;
  logic [N-1:0]      has_src;
  always_comb begin
    mvi       = '0;
    mvo_ready = '0;
    src_of    = '0;
    has_src   = '0;
    for (int d = 0; d < N; d++) begin
      for (int s = N - 1; s >= 0; s--) begin
        if (mvo[s].valid && mvo[s].dst == 2'(d)) begin
          mvi[d]     = mvo[s];
          src_of[d]  = 2'(s);
          has_src[d] = 1'b1;
        end
      end
    end
    for (int d = 0; d < N; d++) begin
      if (has_src[d] && mvi_ready[d]) mvo_ready[src_of[d]] = 1'b1;
    end
  end
  assign ev_cu_move = mvo_ready;

  memory_interface #(.CL_ID(CL_ID), .NCU(N)) u_mi (
    .clk(clk), .rst_n(rst_n), .ld_push(accept && to_mi), .ld_instr(vin), .ld_ready(mi_ready),
    .ldw(ldw), .ldw_ready(ldw_ready), .st(st), .st_ready(st_ready),
    .mreq(mreq), .mreq_ready(mreq_ready), .mrsp(mrsp), .load_done(load_done), .idle(mi_idle));

  assign idle = &cu_idle && mi_idle;
endmodule
