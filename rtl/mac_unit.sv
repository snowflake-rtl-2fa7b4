// mac_unit: one multiply-accumulate unit of a vMAC.
//
// A 16x16-bit signed multiplier feeds a 32-bit adder. The adder's second
// operand is either its own registered output (accumulate) or, on the first
// beat of a new output, a third operand: zero, or a preloaded partial result
// or residual activation (pre_val, already aligned to the accumulator's
// fixed-point scale). This follows the paper's MAC structure (multiplier,
// adder, feedback path, third-operand select).
//
// Timing: when en is high the accumulator updates at the clock edge, so acc
// holds the sum of all products up to and including the previous cycle's
// beat. One result per cycle, no internal pipeline.
module mac_unit
  import snowflake_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,       // perform one MAC this cycle
  input  logic                     first,    // second adder operand = third operand
  input  logic                     use_pre,  // third operand = pre_val (else 0)
  input  logic signed [ACC_W-1:0]  pre_val,
  input  logic signed [WORD_W-1:0] m,        // maps operand
  input  logic signed [WORD_W-1:0] w,        // weights operand
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [ACC_W-1:0] prod, addend;

  assign prod   = ACC_W'(m * w);
  assign addend = first ? (use_pre ? pre_val : '0) : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (en)  acc <= prod + addend;
  end
endmodule
