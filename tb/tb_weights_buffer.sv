// tb_weights_buffer: writes random lines, reads them back one cycle later and
// checks that MAC i sees word i of each line.
module tb_weights_buffer;
  import snowflake_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [8:0] raddr, waddr;
  logic [15:0][15:0] rdata, wdata;
  logic we;
  logic [15:0][15:0] ref_m [512];

  weights_buffer dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr = 0; waddr = 0; wdata = '0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a);
      for (int i = 0; i < 16; i++) wdata[i] = 16'($urandom);
      ref_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 600; t++) begin
      int a;
      a = $urandom % 512;
      @(negedge clk); raddr = 9'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_m[a]) begin
        failures++;
        $display("mismatch addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
