// tb_gather_adder: COOP reductions and INDP bias additions with random
// partials, ReLU on and off; checks the results, the 16-cycle latency and
// back-to-back latches 16 cycles apart.
module tb_gather_adder;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic latch, mode, relu, busy, out_valid, out_mode;
  logic [13:0] wb_in, out_wb;
  logic signed [15:0][31:0] partial;
  logic [15:0][15:0] bias, out_data;

  gather_adder dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] fin(input logic signed [31:0] v, input logic r);
    logic signed [31:0] s;
    s = v >>> 8;
    return (r && s[15]) ? 16'd0 : s[15:0];
  endfunction

  logic [15:0][15:0] expect_q [$];
  logic [13:0]       expwb_q [$];
  int                t_latch [$];
  int                cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [15:0][15:0] e;
    int tl;
    e = expect_q.pop_front();
    tl = t_latch.pop_front();
    checks += 3;
    if (out_data !== e) begin failures++; $display("data mismatch"); end
    if (out_wb !== expwb_q.pop_front()) begin failures++; $display("wb mismatch"); end
    // latch set before edge k (cyc = k-1); 16 partials at edges k+1..k+16;
    // out_valid seen at edge k+17
    if (cyc - tl != 18) begin failures++; $display("latency %0d", cyc - tl); end
  end

  initial begin
    latch = 0; mode = 0; relu = 0; wb_in = 0; partial = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic [15:0][15:0] e;
      logic signed [31:0] sum;
      @(negedge clk);
      latch = 1; mode = $urandom % 2; relu = $urandom % 2; wb_in = 14'($urandom);
      for (int i = 0; i < 16; i++) begin
        partial[i] = $signed(32'($urandom)) >>> 6;
        bias[i]    = 16'($urandom);
      end
      e = '0;
      if (mode) begin
        sum = 32'(signed'(bias[0])) <<< 8;
        for (int i = 0; i < 16; i++) sum += partial[i];
        e[0] = fin(sum, relu);
      end else
        for (int i = 0; i < 16; i++) e[i] = fin(partial[i] + (32'(signed'(bias[i])) <<< 8), relu);
      expect_q.push_back(e);
      expwb_q.push_back(wb_in);
      t_latch.push_back(cyc);
      @(negedge clk); latch = 0;
      repeat (14 + (($urandom % 3 == 0) ? $urandom % 5 : 0)) @(negedge clk);
    end
    repeat (40) @(posedge clk);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
