// rag_mult_block -- shared shift-and-add multiplier block (RAG adder graph).
//
// Multiplies one input sample by all 15 coeff-r constants at once
// (9, 49, 79, 127, 137, 162, 168, 174, 219, 269, 428, 450, 470, 592, 733)
// without a multiplier.  Each product is built from the input and from
// products already built, using only shifts, adds and subtracts, so the
// 15 products share one adder graph of 27 adders:
//   x9   = (x<<3) + x            x127 = (x<<7) - x
//   x49  = (x9<<2) + x9 + (x<<2) x79  = x127 - x49 + x
//   x137 = x127 + x9 + x         x162 = x137 + x9 + (x<<4)
//   x168 = x162 + (x<<2) + (x<<1)
//   x174 = x127 + x49 - (x<<1)   x219 = x168 + x49 + (x<<1)
//   x269 = x219 + x49 + x        x428 = x174 + (x127<<1)
//   x450 = x428 + (x9<<1) + (x<<2)
//   x470 = x450 + (x9<<1) + (x<<1)
//   x592 = x450 + x269 - x127    x733 = x592 + x137 + (x<<2)
// The graph follows the paper's equations, with two exceptions that are
// this design's own: the paper prints x219 with "- xin<<1", which gives
// 215, so the sign is turned to "+"; and the paper uses x269 and x428
// without giving their equations, so the two lines above are chosen here.
//
// Interface: xin is a signed DATA_W-bit sample; prod[i] = xin * R_SET[i],
// signed, DATA_W + RAG_GROWTH bits wide, exact (no product exceeds
// 733 * |xin|).  Purely combinational: the products are registered by the
// processing elements that use them.
module rag_mult_block
  import fir_pkg::*;
#(
  parameter int DATA_W = 16
) (
  input  logic signed [DATA_W-1:0]            xin,
  output logic signed [DATA_W+RAG_GROWTH-1:0] prod [N_R]
);

  localparam int PROD_W = DATA_W + RAG_GROWTH;
  typedef logic signed [PROD_W-1:0] prod_t;

  prod_t x1;
  prod_t x9, x127;                          // adder depth 1
  prod_t x49, x79, x137, x162, x168;
  prod_t x174, x219, x269, x428;
  prod_t x450, x470, x592, x733;

  always_comb begin
    x1   = prod_t'(xin);
    x9   = (x1 <<< 3) + x1;
    x127 = (x1 <<< 7) - x1;
    x49  = (x9 <<< 2) + x9 + (x1 <<< 2);
    x79  = x127 - x49 + x1;
    x137 = x127 + x9 + x1;
    x162 = x137 + x9 + (x1 <<< 4);
    x168 = x162 + (x1 <<< 2) + (x1 <<< 1);
    x174 = x127 + x49 - (x1 <<< 1);
    x219 = x168 + x49 + (x1 <<< 1);
    x269 = x219 + x49 + x1;
    x428 = x174 + (x127 <<< 1);
    x450 = x428 + (x9 <<< 1) + (x1 <<< 2);
    x470 = x450 + (x9 <<< 1) + (x1 <<< 1);
    x592 = x450 + x269 - x127;
    x733 = x592 + x137 + (x1 <<< 2);
  end

  // Output order is R_SET's order.
  assign prod = '{x9, x49, x79, x127, x137, x162, x168, x174,
                  x219, x269, x428, x450, x470, x592, x733};

endmodule
