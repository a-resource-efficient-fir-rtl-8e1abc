// sym_section -- the coeff-s half of the filter: a folded delay line of
// 32 symmetric processing elements (sym_pe).
//
// The sample enters the forward line at element 0; after element 31 the
// line turns back (the fold) and runs through the backward registers to
// element 1.  Element j pre-adds x(n-j) and x(n-63+j).  Elements whose
// coefficient is a coeff-s value (taps 12..16 and 21..31) multiply that sum
// by h(j) and add it into the partial-sum chain; the others (coeff-r taps,
// computed by rag_pulsation_chain) only carry the delay line.  The chain
// starts at 0 at element 0 and its end is registered:
//   y_s(n) = sum_{j in coeff-s} h(j) (x(n-j) + x(n-63+j)).
//
// Interface: din is the current sample, y the coeff-s part of the output.
// Timing: everything advances on a rising clk edge with en high; y equals
// y_s(n) right after the edge that accepted x(n), the same timing as
// rag_pulsation_chain.  The line holds 63 samples (32 forward, 31 backward
// registers).  16 multipliers in all.
//
// The folded structure and the set of taps it serves follow the paper;
// the single register at the end of the partial-sum chain is this design's
// choice (the paper's drawing of the chain has none).
module sym_section
  import fir_pkg::*;
#(
  parameter int DATA_W = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic signed [DATA_W-1:0]            din,
  output logic signed [DATA_W+SUM_GROWTH-1:0] y
);

  localparam int SUM_W = DATA_W + SUM_GROWTH;

  logic signed [DATA_W-1:0] fwd [N_HALF+1];   // fwd[j]: into element j
  logic signed [DATA_W-1:0] bwd [N_HALF+1];   // bwd[j]: out of element j
  logic signed [SUM_W-1:0]  psum [N_HALF+1];

  assign fwd[0]       = din;
  assign bwd[N_HALF]  = fwd[N_HALF];          // the fold
  assign psum[0]      = '0;

  for (genvar j = 0; j < N_HALF; j++) begin : g_pe
    sym_pe #(
      .DATA_W (DATA_W),
      .SUM_W  (SUM_W),
      .COEF_W (COEF_W),
      .COEF   (s_coef(j)),
      .BWD_REG(j != 0)
    ) u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (en),
      .fwd_in (fwd[j]),
      .fwd_out(fwd[j+1]),
      .bwd_in (bwd[j+1]),
      .bwd_out(bwd[j]),
      .sum_in (psum[j]),
      .sum_out(psum[j+1])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= psum[N_HALF];
  end

endmodule
