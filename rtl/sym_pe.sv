// sym_pe -- one processing element of the even-symmetric pulsation FIR.
//
// The input samples travel right through a forward delay line, turn at the
// far end and travel back left through a backward delay line.  Element j
// sees x(n-j) on the forward line and x(n-(N-1-j)) on the backward line,
// the two samples that share coefficient h(j) when h(n) = h(N-1-n).  It
// pre-adds them, multiplies the sum once by h(j) and adds the product to
// the partial sum passing through it, so N taps need only N/2 multipliers.
//
// Ports: fwd_in / fwd_out are the forward line into and out of this
// element (fwd_out is fwd_in delayed one sample); bwd_in comes from the
// element to the right (or from the turn of the line) and bwd_out, bwd_in
// delayed one sample, goes to the element on the left.  The pre-adder uses
// fwd_in and bwd_in.  sum_out = sum_in + COEF * (fwd_in + bwd_in) is
// combinational, as in the paper's drawing, where the partial-sum chain has
// no registers; the caller registers the end of the chain.
//
// COEF defaults to h(31) = 7624, the centre tap of the 64-tap filter.
// COEF = 0 builds an element with delay registers only (its tap is
// computed elsewhere).  BWD_REG = 0 leaves out the backward register, which
// the leftmost element does not need: a folded line of N taps holds N-1
// samples.  Those two options, the tap points of the pre-adder and the
// widths are this design's choices; the element itself follows the paper.
// Registers change on a rising clk edge with en high; rst_n clears them
// asynchronously.
module sym_pe #(
  parameter int DATA_W  = 16,
  parameter int SUM_W   = 33,
  parameter int COEF_W  = 14,
  parameter int COEF    = 7624,
  parameter bit BWD_REG = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] fwd_in,
  output logic signed [DATA_W-1:0] fwd_out,
  input  logic signed [DATA_W-1:0] bwd_in,
  output logic signed [DATA_W-1:0] bwd_out,
  input  logic signed [SUM_W-1:0]  sum_in,
  output logic signed [SUM_W-1:0]  sum_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  fwd_out <= '0;
    else if (en) fwd_out <= fwd_in;
  end

  if (BWD_REG) begin : g_bwd
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  bwd_out <= '0;
      else if (en) bwd_out <= bwd_in;
    end
  end else begin : g_no_bwd
    assign bwd_out = bwd_in;
  end

  if (COEF != 0) begin : g_mac
    localparam logic signed [COEF_W-1:0] C = COEF_W'(COEF);
    logic signed [DATA_W:0]          pre;
    logic signed [DATA_W+COEF_W:0]   product;
    logic signed [SUM_W-1:0]         product_ext;

    always_comb begin
      pre         = (DATA_W+1)'(fwd_in) + (DATA_W+1)'(bwd_in);
      product     = pre * C;
      product_ext = SUM_W'(product);
      sum_out     = sum_in + product_ext;
    end
  end else begin : g_pass
    assign sum_out = sum_in;
  end

endmodule
