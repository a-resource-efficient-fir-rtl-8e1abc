// rag_pulsation_chain -- the coeff-r half of the filter: a 64-element
// pulsation chain fed by the shared multiplier block.
//
// Element j (j = 0..63) carries coefficient h(j).  When |h(j)| is one of
// the coeff-r magnitudes the element takes the matching product of the
// current sample from rag_mult_block and adds or subtracts it according to
// the sign of h(j); otherwise (a coeff-s tap, computed in sym_section) the
// element only delays the partial sum.  The first element is fed with 0.
// With the chain ordered h(0) first, the sum at its end is
//   y_r(n) = sum_j h_r(j) x(n-63+j) = sum_k h_r(k) x(n-k),
// the second form because h is symmetric, where h_r keeps the coeff-r
// taps and is zero elsewhere.
//
// Interface: prod[] are the 15 products of the current sample (from
// rag_mult_block); y is the coeff-r part of the output.  Timing: y is
// registered and equals y_r(n) right after the clock edge that accepted
// x(n) (en high).  32 of the 64 elements use a product; the other 32 are
// delay-only.
//
// At elaboration the chain checks, tap by tap, that the coeff-r table agrees
// with the split rule (fir_pkg::is_small), so an edited coefficient table
// cannot silently route a tap to the wrong half.
//
// Using one broadcast sample with a shared multiplier block for the small
// coefficients follows the paper; leaving the coeff-s positions in the same
// chain as pure delays is this design's own way of keeping the two halves
// aligned.
module rag_pulsation_chain
  import fir_pkg::*;
#(
  parameter int DATA_W = 16
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 en,
  input  logic signed [DATA_W+RAG_GROWTH-1:0]  prod [N_R],
  output logic signed [DATA_W+SUM_GROWTH-1:0]  y
);

  localparam int SUM_W  = DATA_W + SUM_GROWTH;
  localparam int PROD_W = DATA_W + RAG_GROWTH;

  logic signed [SUM_W-1:0] chain [N_TAPS+1];

  assign chain[0] = '0;

  for (genvar j = 0; j < N_TAPS; j++) begin : g_pe
    // R_SET must be exactly the small half chosen by the split rule.
    if ((r_index(j) >= 0) != is_small(j)) begin : g_bad_split
      $error("tap %0d: coeff-r table disagrees with the split rule", j);
    end
    localparam int RIDX = (r_index(j) < 0) ? 0 : r_index(j);
    pulsation_pe #(
      .SUM_W (SUM_W),
      .PROD_W(PROD_W),
      .SIGN  (r_sign(j))
    ) u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (en),
      .sum_in (chain[j]),
      .prod   (prod[RIDX]),
      .sum_out(chain[j+1])
    );
  end

  assign y = chain[N_TAPS];

endmodule
