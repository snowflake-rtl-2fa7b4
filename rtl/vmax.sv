// vmax: vector maxpool unit.
//
// Four 16-bit comparators share the 16 words of a 256-bit maps line: each
// comparator owns four words and compares one of them per cycle against its
// running maximum, so a line takes four cycles and a 3x3 window of nine lines
// takes 36 cycles and yields 16 maxima, as the paper states. Comparator j
// handles word 4*j + c in cycle c (the word order is this design's choice);
// words are compared as signed fixed-point values.
//
// Interface: a line is accepted when in_valid && in_ready. in_first starts a
// new window (the line overwrites the running maxima); in_last marks the last
// line of a window, whose 16 maxima appear on out_data with out_wb (the
// write-back granule address) and are held until out_ready.
module vmax
  import snowflake_pkg::*;
#(
  parameter int NCMP = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  line_t            in_data,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [WBA_W-1:0] in_wb,
  output logic             out_valid,
  input  logic             out_ready,
  output line_t            out_data,
  output logic [WBA_W-1:0] out_wb
);
  localparam int PER = LINE_WORDS / NCMP;   // words per comparator (4)

  logic                          have, first_q, last_q;
  logic [$clog2(PER)-1:0]        c;
  logic [LINE_WORDS-1:0][WORD_W-1:0] line_q, mx, mx_next;
  logic [WBA_W-1:0]              wb_q;
  logic                          finishing, out_free;

  assign finishing = have && (c == PER[$clog2(PER)-1:0] - 1'b1);
  assign out_free  = !out_valid || out_ready;
  // A line ending a window needs the output register free when it finishes.
  assign in_ready  = (!have || (finishing && (!last_q || out_free))) && out_free;

  always_comb begin
    mx_next = mx;
    for (int j = 0; j < NCMP; j++) begin
      int k;
      k = j * PER + int'(c);
      if (have) begin
        if (first_q || $signed(line_q[k]) > $signed(mx[k])) mx_next[k] = line_q[k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= 1'b0; first_q <= 1'b0; last_q <= 1'b0; c <= '0;
      line_q <= '0; mx <= '0; wb_q <= '0;
      out_valid <= 1'b0; out_data <= '0; out_wb <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (have) begin
        mx <= mx_next;
        c  <= c + 1'b1;
        if (finishing) begin
          have <= 1'b0;
          if (last_q) begin
            out_valid <= 1'b1;
            out_data  <= mx_next;
            out_wb    <= wb_q;
          end
        end
      end
      if (in_valid && in_ready) begin
        have    <= 1'b1;
        c       <= '0;
        line_q  <= in_data;
        first_q <= in_first;
        last_q  <= in_last;
        wb_q    <= in_wb;
      end
    end
  end
endmodule
