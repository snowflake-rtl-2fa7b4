// tb_vmax: feeds random pooling windows (1 to 9 lines) into the vMAX unit with
// random input gaps and random output back-pressure, checks every set of 16
// maxima and its write-back address against a software model, and checks
// that an uninterrupted 3x3 window takes 36 cycles.
module tb_vmax;
  import snowflake_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_first, in_last, out_valid, out_ready;
  line_t in_data, out_data;
  logic [WBA_W-1:0] in_wb, out_wb;
  logic bp;

  vmax dut (.*);

  line_t exp_q [$];
  logic [WBA_W-1:0] expwb_q [$];
  int t_first, t_out;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign out_ready = !bp;
  always @(posedge clk) begin
    bp <= ($urandom % 4 == 0) && rst_n;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== exp_q.pop_front() || out_wb !== expwb_q.pop_front()) begin
        failures++; $display("vmax mismatch at %0t", $time);
      end
    end
  end

  initial begin
    logic [15:0][15:0] m;
    bp = 0;
    in_valid = 0; in_data = '0; in_first = 0; in_last = 0; in_wb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 60; w++) begin
      int n;
      n = 1 + $urandom % 9;
      for (int l = 0; l < n; l++) begin
        line_t d;
        d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        for (int k = 0; k < 16; k++)
          if (l == 0 || $signed(d[k*16 +: 16]) > $signed(m[k])) m[k] = d[k*16 +: 16];
        @(negedge clk);
        while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_data = d; in_first = (l == 0); in_last = (l == n - 1); in_wb = 14'(w);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
      end
      exp_q.push_back(m); expwb_q.push_back(14'(w));
    end
    repeat (40) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    // Timing: a 3x3 window fed back to back with the output free.
    @(negedge clk);
    for (int l = 0; l < 9; l++) begin
      line_t d;
      d = {8{$urandom}};
      for (int k = 0; k < 16; k++)
        if (l == 0 || $signed(d[k*16 +: 16]) > $signed(m[k])) m[k] = d[k*16 +: 16];
      in_valid = 1; in_data = d; in_first = (l == 0); in_last = (l == 8); in_wb = 14'd99;
      if (l == 0) t_first = $time / 10;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    exp_q.push_back(m); expwb_q.push_back(14'd99);
    while (!out_valid) @(posedge clk);
    t_out = $time / 10;
    checks++;
    if (t_out - t_first != 36 + 1) begin
      failures++; $display("3x3 window took %0d cycles", t_out - t_first);
    end
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
