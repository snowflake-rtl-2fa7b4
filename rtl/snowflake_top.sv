// snowflake_top: the Snowflake CNN accelerator.
//
// A control core (scalar five-stage pipeline with a double-buffered
// instruction cache) runs the program and issues vector instructions to
// NCLUSTERS compute clusters of four compute units each. Each CU has 64 MACs
// (four vMACs of 16), a vMAX, a 128 kB maps buffer and 64 kB of weights
// buffers. A memory interconnect shares the one external memory port among
// the instruction cache and the clusters' memory interfaces. The default is
// the paper's implemented system: one cluster, 4 CUs, 256 MACs.
//
// Host side (the processor that loads the program into memory is outside
// this design): pulse start with start_pc, the memory address of the first
// instruction in 32-bit words. done rises when HALT has executed and every
// vector instruction, load and store has finished.
// Memory side: mem_req (valid, we, line address, 256-bit write data) is taken
// when mem_req_ready is high; read data must come back in order on mem_rsp.
// The ev_* outputs pulse on internal events and exist for observation.
module snowflake_top
  import snowflake_pkg::*;
#(
  parameter int NCLUSTERS  = 1,
  parameter int ROWS       = 1024,
  parameter int WDEPTH     = WB_DEPTH,
  parameter int BANK_WORDS = 512,
  parameter int OUT_SHIFT  = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic [31:0] start_pc,
  output logic      done,
  output mem_req_t  mem_req,
  input  logic      mem_req_ready,
  input  mem_rsp_t  mem_rsp,
  // observation
  output logic      ev_raw_stall,
  output logic      ev_load_stall,
  output logic      ev_branch_taken,
  output logic      ev_vec_issue,
  output logic [NCLUSTERS*NCU_PER_CL-1:0] ev_coop_out,
  output logic [NCLUSTERS*NCU_PER_CL-1:0] ev_indp_out,
  output logic [NCLUSTERS*NCU_PER_CL-1:0] ev_max_out,
  output logic [NCLUSTERS*NCU_PER_CL-1:0] ev_wr_stall,
  output logic [NCLUSTERS*NCU_PER_CL-1:0] ev_cu_move
);
  localparam int NCU = NCLUSTERS * NCU_PER_CL;
  localparam int NM  = NCLUSTERS + 1;

  mem_req_t [NM-1:0] mreq;
  logic     [NM-1:0] mreq_ready;
  mem_rsp_t [NM-1:0] mrsp;

  vinstr_t              vout;
  logic                 vout_valid, vout_ready, halted, loads_pending;
  logic [NCU-1:0]       load_done;
  logic [NCLUSTERS-1:0] cl_ready, cl_idle;

  control_core #(.NCU(NCU), .BANK_WORDS(BANK_WORDS)) u_core (
    .clk(clk), .rst_n(rst_n), .start(start), .start_pc(start_pc), .halted(halted),
    .loads_pending(loads_pending),
    .imreq(mreq[0]), .imreq_ready(mreq_ready[0]), .imrsp(mrsp[0]),
    .vout(vout), .vout_valid(vout_valid), .vout_ready(vout_ready), .load_done(load_done),
    .ev_raw_stall(ev_raw_stall), .ev_load_stall(ev_load_stall),
    .ev_branch_taken(ev_branch_taken), .ev_vec_issue(ev_vec_issue));

  assign vout_ready = &cl_ready;

  for (genvar k = 0; k < NCLUSTERS; k++) begin : g_cl
    compute_cluster #(.CL_ID(k), .ROWS(ROWS), .WDEPTH(WDEPTH), .OUT_SHIFT(OUT_SHIFT)) u_cl (
      .clk(clk), .rst_n(rst_n), .vin_valid(vout_valid && vout_ready), .vin(vout),
      .vin_ready(cl_ready[k]),
      .mreq(mreq[k+1]), .mreq_ready(mreq_ready[k+1]), .mrsp(mrsp[k+1]),
      .load_done(load_done[k*NCU_PER_CL +: NCU_PER_CL]), .idle(cl_idle[k]),
      .ev_coop_out(ev_coop_out[k*NCU_PER_CL +: NCU_PER_CL]),
      .ev_indp_out(ev_indp_out[k*NCU_PER_CL +: NCU_PER_CL]),
      .ev_max_out(ev_max_out[k*NCU_PER_CL +: NCU_PER_CL]),
      .ev_wr_stall(ev_wr_stall[k*NCU_PER_CL +: NCU_PER_CL]),
      .ev_cu_move(ev_cu_move[k*NCU_PER_CL +: NCU_PER_CL]));
  end

  memory_interconnect #(.NM(NM)) u_ic (
    .clk(clk), .rst_n(rst_n), .req(mreq), .req_ready(mreq_ready), .rsp(mrsp),
    .mreq(mem_req), .mreq_ready(mem_req_ready), .mrsp(mem_rsp));

  assign done = halted && (&cl_idle) && !loads_pending;
endmodule
