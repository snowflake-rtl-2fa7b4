// tb_max_trace_decoder: the MAX trace decoder reading port 1 of a maps
// buffer (ROWS reduced to 64) while the testbench competes for the same
// lanes on port 0 (which always wins) and back-pressures the vMAX side at
// random. Every line handed to the vMAX is compared in order with the line,
// first/last flags and write-back address worked out from the instructions.
module tb_max_trace_decoder;
  import snowflake_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, ready, idle, rd_req1, rd_gnt1;
  vinstr_t instr;
  logic [LADDR_W-1:0] rd_addr1;
  logic v_valid, v_ready, v_first, v_last;
  line_t v_data;
  logic [WBA_W-1:0] v_wb;

  logic [3:0] rd_req, rd_gnt;
  logic [3:0][$clog2(ROWS)+1:0] rd_addr;
  line_t [3:0] rd_data;
  logic [15:0] wr_en;
  logic [$clog2(ROWS)-1:0] wr_row;
  row_t wr_data;
  logic comp;
  logic [7:0] comp_addr;

  max_trace_decoder #(.CU_ID(3)) dut (
    .clk, .rst_n, .push, .instr, .ready, .rd_req(rd_req1), .rd_addr(rd_addr1), .rd_gnt(rd_gnt1),
    .rd_data(rd_data[1]), .v_valid, .v_ready, .v_data, .v_first, .v_last, .v_wb, .idle);
  maps_buffer #(.ROWS(ROWS)) mb (.clk, .rst_n, .rd_req, .rd_addr, .rd_gnt, .rd_data,
                                 .wr_en, .wr_row, .wr_data);
  assign rd_req  = {2'b00, rd_req1, comp};
  assign rd_addr = {16'd0, rd_addr1[7:0], comp_addr};
  assign rd_gnt1 = rd_gnt[1];

  typedef struct { line_t d; bit f, l; logic [13:0] wb; } exp_t;
  exp_t exp_q [$];
  line_t M [ROWS*4];
  int refused;

  always @(posedge clk) begin
    comp      <= rst_n && ($urandom % 3 == 0);
    comp_addr <= 8'($urandom);
    v_ready   <= ($urandom % 4 != 0);
    if (rst_n && rd_req1 && !rd_gnt1) refused++;
    if (rst_n && v_valid && v_ready) begin
      exp_t e;
      checks++;
      e = exp_q.pop_front();
      if (v_data !== e.d || v_first !== e.f || v_last !== e.l || v_wb !== e.wb) begin
        failures++; $display("line mismatch first %0d/%0d last %0d/%0d", v_first, e.f, v_last, e.l);
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; instr = '0; wr_en = 0; wr_row = 0; wr_data = '0; refused = 0;
    comp = 0; comp_addr = 0; v_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = '1; wr_row = 6'(r);
      for (int i = 0; i < 32; i++) wr_data[i*32 +: 32] = $urandom;
      for (int l = 0; l < 4; l++) M[r*4 + l] = wr_data[l*256 +: 256];
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 120; it++) begin
      int a, n;
      bit f, l;
      vinstr_t v;
      a = $urandom % 240; n = 1 + $urandom % 9; f = $urandom % 2; l = $urandom % 2;
      v = '0; v.op = OP_MAX; v.a = 32'(a) | (32'(f) << F_FIRST) | (32'(l) << F_LAST) | (32'hF << 28);
      v.imm = 12'(16 * n); v.wb[3] = 14'($urandom);
      for (int k = 0; k < n; k++) begin
        exp_t e;
        e.d = M[a + k]; e.f = f && k == 0; e.l = l && k == n - 1; e.wb = v.wb[3];
        exp_q.push_back(e);
      end
      @(negedge clk);
      while (!ready) @(negedge clk);
      push = 1; instr = v;
      @(negedge clk); push = 0;
    end
    while (!idle || exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (refused == 0) begin failures++; $display("no refused read happened"); end
    $display("refused reads %0d", refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
