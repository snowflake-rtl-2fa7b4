// compute_unit: one Snowflake compute unit (CU).
//
// Holds a maps buffer, four vMACs (64 MACs with their weights buffers and
// gather adders), one vMAX and three trace decoders (MAC, MAX, trace move),
// wired as in the paper's compute-unit diagram:
//   maps port 0 -> MAC trace decoder -> vMAC operands (M1)
//   maps port 2 -> MAC trace decoder -> VMOV preload registers (M2)
//   maps port 1 -> MAX trace decoder -> vMAX (M3)
//   maps port 3 -> trace move decoder -> memory or another CU
// The single 1024-bit write port takes, in this fixed priority (this design's
// choice): vMAC results, vMAX results, lines moved in from another CU, lines
// loaded from memory. vMAC results are never refused.
//   vMAC COOP result: one word per vMAC, 4 words = 64 bits at granule wb.
//   vMAC INDP result: 16 words per vMAC, 1024 bits at the row of wb.
//   vMAX result: 256 bits at the line of wb (wb[3:2] selects the lane).
// Write-back addresses count 64-bit granules: row = wb[13:4], chunk = wb[3:0].
// Weights loads (buffer id 1..4) go straight to that vMAC's weights buffers.
//
// Vector instructions arrive with vin_push; vin_ready tells whether the
// decoder the opcode targets can take one (MAC/VMOV, MAX, ST, TMOV).
module compute_unit
  import snowflake_pkg::*;
#(
  parameter int CU_ID     = 0,
  parameter int ROWS      = 1024,
  parameter int WDEPTH    = WB_DEPTH,
  parameter int OUT_SHIFT = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     vin_push,
  input  vinstr_t  vin,
  output logic     vin_ready,
  // writes from memory (loads)
  input  bufwr_t   ldw,
  output logic     ldw_ready,
  // stores to memory
  output stline_t  st,
  input  logic     st_ready,
  // CU-to-CU moves
  output mvline_t  mv_out,
  input  logic     mv_out_ready,
  input  mvline_t  mv_in,
  output logic     mv_in_ready,
  output logic     idle,
  // event counters for observation
  output logic     ev_coop_out,
  output logic     ev_indp_out,
  output logic     ev_max_out,
  output logic     ev_wr_stall
);
  localparam int RW = $clog2(ROWS);

  // ---------------- instruction routing ----------------
  logic rdy_mac, rdy_max, rdy_st, rdy_mv;
  logic is_mac, is_max, is_st, is_mv;
  assign is_mac = vin.op == OP_MAC || vin.op == OP_VMOV;
  assign is_max = vin.op == OP_MAX;
  assign is_st  = vin.op == OP_ST;
  assign is_mv  = vin.op == OP_TMOV;
  always_comb begin
    unique case (1'b1)
      is_mac:  vin_ready = rdy_mac;
      is_max:  vin_ready = rdy_max;
      is_st:   vin_ready = rdy_st;
      is_mv:   vin_ready = rdy_mv;
      default: vin_ready = 1'b1;
    endcase
  end

  // ---------------- maps buffer ----------------
  logic [3:0]            rd_req, rd_gnt;
  logic [3:0][RW+1:0]    rd_addr;
  line_t [3:0]           rd_data;
  logic [15:0]           wr_en;
  logic [RW-1:0]         wr_row;
  row_t                  wr_data;

  maps_buffer #(.ROWS(ROWS)) u_mbuf (
    .clk(clk), .rst_n(rst_n), .rd_req(rd_req), .rd_addr(rd_addr), .rd_gnt(rd_gnt),
    .rd_data(rd_data), .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data));

  // ---------------- MAC trace decoder and vMACs ----------------
  beat_t                beat;
  logic                 mac_idle;
  logic [LADDR_W-1:0]   a0, a2;
  mac_trace_decoder #(.CU_ID(CU_ID)) u_macdec (
    .clk(clk), .rst_n(rst_n), .push(vin_push && is_mac), .instr(vin), .ready(rdy_mac),
    .rd0_req(rd_req[0]), .rd0_addr(a0), .rd0_gnt(rd_gnt[0]), .rd0_data(rd_data[0]),
    .rd2_req(rd_req[2]), .rd2_addr(a2), .rd2_gnt(rd_gnt[2]), .rd2_data(rd_data[2]),
    .beat(beat), .idle(mac_idle));
  assign rd_addr[0] = a0[RW+1:0];
  assign rd_addr[2] = a2[RW+1:0];

  logic [NVMAC-1:0]                     v_valid, v_mode, v_busy;
  logic [NVMAC-1:0][WBA_W-1:0]          v_wb;
  logic [NVMAC-1:0][NMAC-1:0][WORD_W-1:0] v_data;
  for (genvar v = 0; v < NVMAC; v++) begin : g_vmac
    vmac #(.VID(v), .DEPTH(WDEPTH), .OUT_SHIFT(OUT_SHIFT)) u_vmac (
      .clk(clk), .rst_n(rst_n), .beat(beat),
      .wwe(ldw.valid && ldw.buf_id == 3'(v + 1)),
      .wwaddr(ldw.addr[$clog2(WDEPTH)-1:0]), .wwdata(ldw.data),
      .gbusy(v_busy[v]), .res_valid(v_valid[v]), .res_mode(v_mode[v]), .res_wb(v_wb[v]),
      .res_data(v_data[v]));
  end

  // ---------------- MAX trace decoder and vMAX ----------------
  logic               mx_valid, mx_ready, mx_first, mx_last, mx_idle;
  line_t              mx_data;
  logic [WBA_W-1:0]   mx_wb;
  logic [LADDR_W-1:0] a1;
  logic               xo_valid, xo_ready;
  line_t              xo_data;
  logic [WBA_W-1:0]   xo_wb;

  max_trace_decoder #(.CU_ID(CU_ID)) u_maxdec (
    .clk(clk), .rst_n(rst_n), .push(vin_push && is_max), .instr(vin), .ready(rdy_max),
    .rd_req(rd_req[1]), .rd_addr(a1), .rd_gnt(rd_gnt[1]), .rd_data(rd_data[1]),
    .v_valid(mx_valid), .v_ready(mx_ready), .v_data(mx_data), .v_first(mx_first),
    .v_last(mx_last), .v_wb(mx_wb), .idle(mx_idle));
  assign rd_addr[1] = a1[RW+1:0];

  vmax u_vmax (
    .clk(clk), .rst_n(rst_n), .in_valid(mx_valid), .in_ready(mx_ready), .in_data(mx_data),
    .in_first(mx_first), .in_last(mx_last), .in_wb(mx_wb),
    .out_valid(xo_valid), .out_ready(xo_ready), .out_data(xo_data), .out_wb(xo_wb));

  // ---------------- trace move decoder ----------------
  logic               tm_idle;
  logic [LADDR_W-1:0] a3;
  trace_move_decoder u_tmdec (
    .clk(clk), .rst_n(rst_n), .push_st(vin_push && is_st), .push_mv(vin_push && is_mv),
    .instr(vin), .ready_st(rdy_st), .ready_mv(rdy_mv),
    .rd_req(rd_req[3]), .rd_addr(a3), .rd_gnt(rd_gnt[3]), .rd_data(rd_data[3]),
    .st(st), .st_ready(st_ready), .mv(mv_out), .mv_ready(mv_out_ready), .idle(tm_idle));
  assign rd_addr[3] = a3[RW+1:0];

  // ---------------- write-port arbiter ----------------
  logic gv;          // vMAC results this cycle (all vMACs run in lock step)
  assign gv = v_valid[0];

  always_comb begin
    wr_en       = '0;
    wr_row      = '0;
    wr_data     = '0;
    xo_ready    = 1'b0;
    mv_in_ready = 1'b0;
    ldw_ready   = 1'b0;
    if (gv) begin
      wr_row = v_wb[0][RW+3:4];
      if (v_mode[0] == MODE_COOP) begin
        for (int v = 0; v < NVMAC; v++)
          wr_data[(int'(v_wb[0][3:0]) * 64) + v*WORD_W +: WORD_W] = v_data[v][0];
        wr_en[v_wb[0][3:0]] = 1'b1;
      end else begin
        for (int v = 0; v < NVMAC; v++) wr_data[v*LINE_W +: LINE_W] = v_data[v];
        wr_en = '1;
      end
    end else if (xo_valid) begin
      xo_ready = 1'b1;
      wr_row   = xo_wb[RW+3:4];
      wr_data[int'(xo_wb[3:2]) * LINE_W +: LINE_W] = xo_data;
      wr_en[int'(xo_wb[3:2]) * 4 +: 4] = 4'hf;
    end else if (mv_in.valid) begin
      mv_in_ready = 1'b1;
      wr_row      = mv_in.addr[RW+1:2];
      wr_data[int'(mv_in.addr[1:0]) * LINE_W +: LINE_W] = mv_in.data;
      wr_en[int'(mv_in.addr[1:0]) * 4 +: 4] = 4'hf;
    end else if (ldw.valid && ldw.buf_id == 3'd0) begin
      ldw_ready = 1'b1;
      wr_row    = ldw.addr[RW+1:2];
      wr_data[int'(ldw.addr[1:0]) * LINE_W +: LINE_W] = ldw.data;
      wr_en[int'(ldw.addr[1:0]) * 4 +: 4] = 4'hf;
    end
    // weights loads never wait
    if (ldw.valid && ldw.buf_id != 3'd0) ldw_ready = 1'b1;
  end

  assign idle = mac_idle && mx_idle && tm_idle && !(|v_busy) && !gv && !xo_valid &&
                !mx_valid && !beat.valid;

  assign ev_coop_out = gv && v_mode[0] == MODE_COOP;
  assign ev_indp_out = gv && v_mode[0] == MODE_INDP;
  assign ev_max_out  = xo_valid && xo_ready;
  assign ev_wr_stall = (xo_valid && !xo_ready) || (mv_in.valid && !mv_in_ready) ||
                       (ldw.valid && !ldw_ready);
endmodule
