// fir_rag_improved -- 64-tap linear-phase FIR filter with fixed
// coefficients, built by the improved reduced-adder-graph (RAG) method.
//
// The 64 taps are split by coefficient magnitude.  The 32 taps with small
// magnitudes (coeff-r, 15 distinct values up to 733) need no multiplier:
// one shift-and-add graph (rag_mult_block) forms the current sample times
// every coeff-r value, and a transposed pulsation chain of 64 elements
// (rag_pulsation_chain) adds or subtracts those products tap by tap.  The
// 32 taps with large magnitudes (coeff-s, 747 and up) share 16 multipliers:
// a folded delay line (sym_section) pre-adds the two samples that meet the
// same coefficient and multiplies once.  The two partial results are added
// in an output register:
//   dout = y(n) = sum_{k=0}^{63} h(k) x(n-k),  h(k) = h(63-k).
//
// Interface: din (signed DATA_W bits) is taken on a rising clk edge with
// in_valid high; in_valid low freezes the whole filter, so a gap in the
// input stream is a stall and does not change the response.  Each accepted
// sample produces one result: dout (signed, DATA_W + 17 bits, full
// precision, it cannot overflow) with out_valid high exactly two clock
// edges after the edge that accepted the sample.  rst_n is an asynchronous
// active-low clear of all state (the delay lines start at zero).
//
// The coefficient table, the coeff-r / coeff-s split, the adder graph and
// the two processing-element structures follow the paper; the data width,
// the valid/stall interface, reset and the output register are this
// design's own.
module fir_rag_improved
  import fir_pkg::*;
#(
  parameter int DATA_W = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic signed [DATA_W-1:0]            din,
  output logic                                out_valid,
  output logic signed [DATA_W+SUM_GROWTH-1:0] dout
);

  localparam int SUM_W  = DATA_W + SUM_GROWTH;
  localparam int PROD_W = DATA_W + RAG_GROWTH;

  logic signed [PROD_W-1:0] prod [N_R];
  logic signed [SUM_W-1:0]  y_r, y_s;
  logic                     part_valid;

  rag_mult_block #(.DATA_W(DATA_W)) u_mult_block (
    .xin (din),
    .prod(prod)
  );

  rag_pulsation_chain #(.DATA_W(DATA_W)) u_rag_chain (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (in_valid),
    .prod (prod),
    .y    (y_r)
  );

  sym_section #(.DATA_W(DATA_W)) u_sym (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (in_valid),
    .din  (din),
    .y    (y_s)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      part_valid <= 1'b0;
      out_valid  <= 1'b0;
      dout       <= '0;
    end else begin
      part_valid <= in_valid;
      out_valid  <= part_valid;
      if (part_valid) dout <= y_r + y_s;
    end
  end

endmodule
