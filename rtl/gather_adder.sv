// gather_adder: the shift register and gather adder that finish a vMAC's
// outputs.
//
// On latch, the NMAC 32-bit partial results of the MACs are copied into a
// shift register, which then feeds one partial result per cycle to a single
// adder, so a result takes NMAC (16) cycles, as in the paper.
//   COOP: the adder reduces the NMAC partials and adds one bias (bias[0]);
//         the result is one 16-bit word, placed in word 0 of out_data.
//   INDP: the adder adds each MAC's own bias to that MAC's partial; the NMAC
//         results fill out_data word by word.
// Biases and results are 16-bit fixed-point words; partials carry OUT_SHIFT
// more fraction bits (product of two 16-bit words). The sum is truncated to 16
// bits by keeping bits [OUT_SHIFT+15:OUT_SHIFT] (the paper says only
// "truncated to 16 bits"; which bits, and the optional ReLU applied here, are
// this design's choices).
//
// Timing: latch at edge e; the partials are consumed at edges e+1..e+NMAC and
// out_valid is high for the one cycle after edge e+NMAC. busy is high while
// partials remain. A new latch is accepted at edge e+NMAC at the earliest
// (together with the last partial), so results can follow every NMAC cycles;
// an earlier latch is a protocol error (the MAC trace decoder keeps last beats
// NMAC cycles apart).
module gather_adder
  import snowflake_pkg::*;
#(
  parameter int N         = NMAC,
  parameter int OUT_SHIFT = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            latch,
  input  logic                            mode,      // macmode_e
  input  logic                            relu,
  input  logic [WBA_W-1:0]                wb_in,
  input  logic signed [N-1:0][ACC_W-1:0]  partial,
  input  logic [N-1:0][WORD_W-1:0]        bias,
  output logic                            busy,
  output logic                            out_valid,
  output logic                            out_mode,
  output logic [WBA_W-1:0]                out_wb,
  output logic [N-1:0][WORD_W-1:0]        out_data
);
  logic signed [N-1:0][ACC_W-1:0] sr;
  logic [N-1:0][WORD_W-1:0]       bq;
  logic [$clog2(N+1)-1:0]         cnt;   // partials still to consume
  logic [$clog2(N)-1:0]           idx;   // index of the partial at sr[0]
  logic signed [ACC_W-1:0]        sum, sum_next, bias_s;
  logic                           m_q, relu_q;
  logic [WBA_W-1:0]               wb_q;
  logic [N-1:0][WORD_W-1:0]       res;

  assign busy = (cnt != '0);

  function automatic logic [WORD_W-1:0] finish(input logic signed [ACC_W-1:0] v,
                                                input logic r);
    logic signed [WORD_W-1:0] t;
    t = trunc_word(v, OUT_SHIFT);
    return (r && t < 0) ? '0 : t;
  endfunction

  // INDP uses the bias of the MAC whose partial is at the front.
  assign bias_s   = (ACC_W'(signed'(m_q ? bq[0] : bq[idx]))) <<< OUT_SHIFT;
  assign sum_next = m_q ? (sum + sr[0]) : (sr[0] + bias_s);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      idx       <= '0;
      sum       <= '0;
      sr        <= '0;
      bq        <= '0;
      m_q       <= 1'b0;
      relu_q    <= 1'b0;
      wb_q      <= '0;
      res       <= '0;
      out_valid <= 1'b0;
      out_mode  <= 1'b0;
      out_wb    <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (busy) begin
        sr  <= {ACC_W'(0), sr[N-1:1]};
        cnt <= cnt - 1'b1;
        idx <= idx + 1'b1;
        sum <= sum_next;
        if (!m_q) res[idx] <= finish(sum_next, relu_q);
        if (cnt == 1) begin
          out_valid <= 1'b1;
          out_mode  <= m_q;
          out_wb    <= wb_q;
          if (m_q) out_data <= {{(N-1)*WORD_W{1'b0}}, finish(sum_next, relu_q)};
          else begin
            out_data      <= res;
            out_data[idx] <= finish(sum_next, relu_q);
          end
        end
      end
      // A new set of partials may be latched with the last consumption.
      if (latch) begin
        sr     <= partial;
        bq     <= bias;
        m_q    <= mode;
        relu_q <= relu;
        wb_q   <= wb_in;
        cnt    <= N[$clog2(N+1)-1:0];
        idx    <= '0;
        sum    <= mode ? (ACC_W'(signed'(bias[0])) <<< OUT_SHIFT) : '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(latch && cnt > 1))
    else $error("gather_adder: latch while busy");
endmodule
