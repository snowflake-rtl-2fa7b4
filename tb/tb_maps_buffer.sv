// tb_maps_buffer: random chunk writes and random reads on all four ports of
// the maps buffer (ROWS reduced to 64 for speed). Checks read data against a
// shadow copy, that port 0 is always granted, that lane conflicts are
// resolved in the order 0 > 2 > 1 > 3, and that non-conflicting ports are all
// granted in the same cycle.
module tb_maps_buffer;
  import snowflake_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] rd_req, rd_gnt;
  logic [3:0][$clog2(ROWS)+1:0] rd_addr;
  line_t [3:0] rd_data;
  logic [15:0] wr_en;
  logic [$clog2(ROWS)-1:0] wr_row;
  row_t wr_data;

  maps_buffer #(.ROWS(ROWS)) dut (.*);

  line_t shadow [ROWS*4];
  logic [3:0] pend;
  line_t pexp [4];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_req = 0; rd_addr = '0; wr_en = 0; wr_row = 0; wr_data = '0; pend = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill everything
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = '1; wr_row = 6'(r);
      for (int i = 0; i < 32; i++) wr_data[i*32 +: 32] = $urandom;
      for (int l = 0; l < 4; l++) shadow[r*4 + l] = wr_data[l*256 +: 256];
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 3000; it++) begin
      logic [3:0] exp_g;
      logic [3:0] used;
      @(negedge clk);
      // check data of last cycle's grants
      for (int p = 0; p < 4; p++) if (pend[p]) begin
        checks++;
        if (rd_data[p] !== pexp[p]) begin failures++; $display("port %0d data mismatch", p); end
      end
      rd_req = 4'($urandom);
      for (int p = 0; p < 4; p++) rd_addr[p] = 8'($urandom % (ROWS*4));
      wr_en = ($urandom % 2) ? 16'($urandom) : '0;
      wr_row = 6'($urandom % ROWS);
      for (int i = 0; i < 32; i++) wr_data[i*32 +: 32] = $urandom;
      #1;
      used = 0; exp_g = 0;
      foreach (PR[i]) begin
        int p;
        p = PR[i];
        if (rd_req[p] && !used[rd_addr[p][1:0]]) begin
          used[rd_addr[p][1:0]] = 1; exp_g[p] = 1;
        end
      end
      checks++;
      if (rd_gnt !== exp_g) begin failures++; $display("grant %b exp %b", rd_gnt, exp_g); end
      for (int p = 0; p < 4; p++) begin
        pend[p] = rd_gnt[p];
        pexp[p] = shadow[rd_addr[p]];
      end
      // update shadow after capturing old data (read-before-write)
      for (int c = 0; c < 16; c++) if (wr_en[c])
        shadow[int'(wr_row)*4 + c/4][(c%4)*64 +: 64] = wr_data[c*64 +: 64];
    end
    @(negedge clk); rd_req = 0; wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  localparam int PR [4] = '{0, 2, 1, 3};
endmodule
