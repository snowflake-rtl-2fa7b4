// vmac: vector multiply-accumulate unit (16 MACs, their weights buffers, the
// bias and preload registers, and the gather adder).
//
// Beats come from the MAC trace decoder (beat_t). A vMAC registers the beat
// while its weights buffers are read at beat.waddr, and performs the MACs in
// the next cycle:
//   B_MAC  INDP: every MAC multiplies the same maps word (data[15:0]) by its
//               own weight; each MAC builds a different output map.
//          COOP: MAC i multiplies word i of the 256-bit line by its weight;
//               all MACs build partial sums of one output.
//   B_BIAS the weights read at waddr are loaded into the bias registers
//          (one bias per MAC; COOP uses bias 0).
//   B_PRE  if vsel matches VID, the line in data is loaded into the preload
//          register: word i is the third operand of MAC i for the next beat
//          with first and pre set (this is the paper's VMOV).
// A beat with last makes the gather adder latch the accumulators two cycles
// after the beat, and its result appears NMAC cycles later on res_*.
// The MAC organisation, modes, bias handling and gather adder follow the
// paper; the beat format and preload mapping are this design's own.
module vmac
  import snowflake_pkg::*;
#(
  parameter int VID       = 0,
  parameter int DEPTH     = WB_DEPTH,
  parameter int OUT_SHIFT = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  beat_t                     beat,
  // weights-buffer load port
  input  logic                      wwe,
  input  logic [$clog2(DEPTH)-1:0]  wwaddr,
  input  line_t                     wwdata,
  // results
  output logic                      gbusy,     // a beat or result still in flight
  output logic                      res_valid,
  output logic                      res_mode,
  output logic [WBA_W-1:0]          res_wb,
  output logic [NMAC-1:0][WORD_W-1:0] res_data
);
  beat_t                       bq;
  logic [NMAC-1:0][WORD_W-1:0] wrd;
  logic [NMAC-1:0][WORD_W-1:0] bias, pre;
  logic signed [NMAC-1:0][ACC_W-1:0] acc;
  logic                        latch_q;
  logic                        mac_en;

  weights_buffer #(.NW(NMAC), .DEPTH(DEPTH)) u_wbuf (
    .clk   (clk),
    .raddr (beat.waddr[$clog2(DEPTH)-1:0]),
    .rdata (wrd),
    .we    (wwe),
    .waddr (wwaddr),
    .wdata (wwdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bq      <= '0;
      bias    <= '0;
      pre     <= '0;
      latch_q <= 1'b0;
    end else begin
      bq      <= beat;
      latch_q <= bq.valid && bq.kind == B_MAC && bq.last;
      if (bq.valid && bq.kind == B_BIAS) bias <= wrd;
      if (beat.valid && beat.kind == B_PRE && beat.vsel == VID[1:0]) pre <= beat.data;
    end
  end

  assign mac_en = bq.valid && bq.kind == B_MAC;

  for (genvar i = 0; i < NMAC; i++) begin : g_mac
    logic signed [WORD_W-1:0] m_op;
    assign m_op = (bq.mode == MODE_COOP) ? bq.data[i*WORD_W +: WORD_W] : bq.data[WORD_W-1:0];
    mac_unit u_mac (
      .clk     (clk),
      .rst_n   (rst_n),
      .en      (mac_en),
      .first   (bq.first),
      .use_pre (bq.pre),
      .pre_val ((ACC_W'(signed'(pre[i]))) <<< OUT_SHIFT),
      .m       (m_op),
      .w       (wrd[i]),
      .acc     (acc[i])
    );
  end

  // Metadata of the output being latched travels with the last beat.
  logic             m_l, relu_l;
  logic [WBA_W-1:0] wb_l;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_l <= 1'b0; relu_l <= 1'b0; wb_l <= '0;
    end else if (bq.valid && bq.kind == B_MAC && bq.last) begin
      m_l <= bq.mode; relu_l <= bq.relu; wb_l <= bq.wb;
    end
  end

  logic g_busy;
  assign gbusy = g_busy || bq.valid || latch_q;

  gather_adder #(.N(NMAC), .OUT_SHIFT(OUT_SHIFT)) u_gather (
    .clk       (clk),
    .rst_n     (rst_n),
    .latch     (latch_q),
    .mode      (m_l),
    .relu      (relu_l),
    .wb_in     (wb_l),
    .partial   (acc),
    .bias      (bias),
    .busy      (g_busy),
    .out_valid (res_valid),
    .out_mode  (res_mode),
    .out_wb    (res_wb),
    .out_data  (res_data)
  );
endmodule
