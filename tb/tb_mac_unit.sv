// tb_mac_unit: checks accumulate, first-beat restart and third-operand
// preload of one MAC unit against a software model, with random operands.
module tb_mac_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, first, use_pre;
  logic signed [31:0] pre_val, acc, model;
  logic signed [15:0] m, w;

  mac_unit dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; first = 0; use_pre = 0; pre_val = 0; m = 0; w = 0; model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en      = ($urandom % 4) != 0;
      first   = ($urandom % 8) == 0;
      use_pre = $urandom % 2;
      pre_val = $urandom;
      m       = $urandom;
      w       = $urandom;
      if (en) model = (first ? (use_pre ? pre_val : 0) : model) + m * w;
      @(posedge clk); #1;
      checks++;
      if (acc !== model) begin
        failures++;
        $display("mismatch t=%0d acc=%0d model=%0d", t, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
