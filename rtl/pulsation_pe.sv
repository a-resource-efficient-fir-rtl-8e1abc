// pulsation_pe -- one processing element of the pulsation (systolic,
// transposed-form) FIR chain.
//
// The input sample is broadcast to every element; each element receives
// the product of that sample with its own coefficient, adds it to the
// partial sum coming from the previous element and registers the result
// for the next one.  Chaining N of these, the first fed with 0, yields
// y(n) = sum_k h(k) x(n-k) at the end of the chain.
//
// SIGN selects what the element does with its product: +1 adds it, -1
// subtracts it (a negative coefficient realised from its magnitude), 0
// ignores it and the element is a plain one-sample delay of the partial
// sum (a tap whose coefficient is handled elsewhere).
//
// Timing: sum_out is registered; it changes on a rising clk edge with en
// high.  rst_n is an asynchronous active-low clear.
//
// Follows the paper's processing element (adder and unit delay per tap).
// In the paper's drawing the unit delay sits between the multiplier and
// the adder; here it sits after the adder, the usual transposed form, which
// is the placement for which the chain computes the convolution sum.
module pulsation_pe #(
  parameter int SUM_W  = 33,
  parameter int PROD_W = 26,
  parameter int SIGN   = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic signed [SUM_W-1:0]  sum_in,
  input  logic signed [PROD_W-1:0] prod,
  output logic signed [SUM_W-1:0]  sum_out
);

  logic signed [SUM_W-1:0] prod_ext;
  logic signed [SUM_W-1:0] sum_next;

  assign prod_ext = SUM_W'(prod);   // sign extension (prod is signed)

  always_comb begin
    if (SIGN > 0)      sum_next = sum_in + prod_ext;
    else if (SIGN < 0) sum_next = sum_in - prod_ext;
    else               sum_next = sum_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  sum_out <= '0;
    else if (en) sum_out <= sum_next;
  end

endmodule
