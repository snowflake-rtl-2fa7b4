// tb_trace_move_decoder: the trace move decoder reading port 3 of a maps
// buffer (ROWS reduced to 64) while the testbench competes for the lanes on
// port 0. Random memory trace moves (ST) and CU trace moves (TMOV) are queued
// together and both outputs are back-pressured at random. Every store line
// (memory address and data) and every moved line (destination CU, line
// address and data) is compared in order with the expected sequence; the
// test also checks that both functions were active at the same time.
module tb_trace_move_decoder;
  import snowflake_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push_st, push_mv, ready_st, ready_mv, idle;
  vinstr_t instr;
  logic rd_req3, rd_gnt3;
  logic [LADDR_W-1:0] rd_addr3;
  stline_t st;
  logic st_ready, mv_ready;
  mvline_t mv;

  logic [3:0] rd_req, rd_gnt;
  logic [3:0][$clog2(ROWS)+1:0] rd_addr;
  line_t [3:0] rd_data;
  logic [15:0] wr_en;
  logic [$clog2(ROWS)-1:0] wr_row;
  row_t wr_data;
  logic comp;
  logic [7:0] comp_addr;

  trace_move_decoder dut (
    .clk, .rst_n, .push_st, .push_mv, .instr, .ready_st, .ready_mv,
    .rd_req(rd_req3), .rd_addr(rd_addr3), .rd_gnt(rd_gnt3), .rd_data(rd_data[3]),
    .st, .st_ready, .mv, .mv_ready, .idle);
  maps_buffer #(.ROWS(ROWS)) mb (.clk, .rst_n, .rd_req, .rd_addr, .rd_gnt, .rd_data,
                                 .wr_en, .wr_row, .wr_data);
  assign rd_req  = {rd_req3, 2'b00, comp};
  assign rd_addr = {rd_addr3[7:0], 16'd0, comp_addr};
  assign rd_gnt3 = rd_gnt[3];

  stline_t est_q [$];
  mvline_t emv_q [$];
  line_t M [ROWS*4];
  int both;

  always @(posedge clk) begin
    comp      <= rst_n && ($urandom % 3 == 0);
    comp_addr <= 8'($urandom);
    st_ready  <= ($urandom % 3 != 0);
    mv_ready  <= ($urandom % 3 != 0);
    if (rst_n && st.valid && mv.valid) both++;
    if (rst_n && st.valid && st_ready) begin
      stline_t e;
      checks++;
      e = est_q.pop_front();
      if (st.addr !== e.addr || st.data !== e.data) begin failures++; $display("store line mismatch"); end
    end
    if (rst_n && mv.valid && mv_ready) begin
      mvline_t e;
      checks++;
      e = emv_q.pop_front();
      if (mv.dst !== e.dst || mv.addr !== e.addr || mv.data !== e.data) begin failures++; $display("move line mismatch dst %0d/%0d addr %0d/%0d data %0d", mv.dst, e.dst, mv.addr, e.addr, mv.data == e.data); end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_st = 0; push_mv = 0; instr = '0; wr_en = 0; wr_row = 0; wr_data = '0; both = 0;
    comp = 0; comp_addr = 0; st_ready = 0; mv_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = '1; wr_row = 6'(r);
      for (int i = 0; i < 32; i++) wr_data[i*32 +: 32] = $urandom;
      for (int l = 0; l < 4; l++) M[r*4 + l] = wr_data[l*256 +: 256];
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 120; it++) begin
      int src, n;
      bit is_st;
      vinstr_t v;
      is_st = $urandom % 2; src = $urandom % 240; n = 1 + $urandom % 12;
      v = '0; v.imm = 12'(16 * n);
      if (is_st) begin
        v.op = OP_ST; v.a = $urandom % 100000; v.b = 32'(src);
        for (int k = 0; k < n; k++) begin
          stline_t e;
          e.valid = 1; e.addr = v.a + 32'(k); e.data = M[src + k];
          est_q.push_back(e);
        end
      end else begin
        v.op = OP_TMOV; v.a = 32'(src); v.b = {2'b00, 2'($urandom), 16'd0, 12'($urandom % 3000)};
        for (int k = 0; k < n; k++) begin
          mvline_t e;
          e.valid = 1; e.dst = v.b[29:28]; e.addr = v.b[11:0] + 12'(k); e.data = M[src + k];
          emv_q.push_back(e);
        end
      end
      @(negedge clk);
      while (is_st ? !ready_st : !ready_mv) @(negedge clk);
      push_st = is_st; push_mv = !is_st; instr = v;
      @(negedge clk); push_st = 0; push_mv = 0;
    end
    while (!idle || est_q.size() != 0 || emv_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (both == 0) begin failures++; $display("ST and TMOV never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
