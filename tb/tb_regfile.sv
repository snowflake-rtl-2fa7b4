// tb_regfile: random writes and dual reads of the 32 x 32-bit register file;
// checks both read ports against a model and that register 0 reads zero.
module tb_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [4:0] ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic we;
  logic [31:0] m [32];

  regfile dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = 0; wd = 0; ra1 = 0; ra2 = 0;
    foreach (m[i]) m[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      ra1 = 5'($urandom); ra2 = 5'($urandom);
      #1;
      checks += 2;
      if (rd1 !== m[ra1] || rd2 !== m[ra2]) begin failures++; $display("read mismatch r%0d r%0d", ra1, ra2); end
      we = $urandom % 2; wa = 5'($urandom); wd = $urandom;
      @(posedge clk);
      if (we && wa != 0) m[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
