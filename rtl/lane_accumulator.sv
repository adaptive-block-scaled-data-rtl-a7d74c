// lane_accumulator: one lane's FP32 running sum.
//
// Each cycle with en high the scaled product y is added to the sum with an
// FP32 adder (round to nearest even). clr restarts the accumulation: with en
// the new sum is y, without en it is zero. rst_n clears the sum
// asynchronously. Accumulating in FP32 until a clear follows the IF4 MAC
// design; the separate synchronous clear is this design's choice so that a
// new accumulation can start without a gap.
//
// Interface: clk, rst_n, clr, en, y in, acc out. acc changes on the rising
// clock edge after the cycle in which en/clr are high.
module lane_accumulator
  import if4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  fp32_t y,
  output fp32_t acc
);
  fp32_t base, sum;

  assign base = clr ? FP32_ZERO : acc;

  fp32_add u_add (.a(base), .b(y), .y(sum));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  acc <= FP32_ZERO;
    else if (en) acc <= sum;
    else if (clr) acc <= FP32_ZERO;
endmodule
