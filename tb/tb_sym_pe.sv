// tb_sym_pe -- checks a multiplying symmetric element (coefficient 7624,
// with backward register) and a delay-only one (coefficient 0, no backward
// register): both delay lines, the pre-add and multiply, and the partial
// sum, under random data and enables.
module tb_sym_pe;
  localparam int DATA_W = 16, SUM_W = 33, COEF_W = 14;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [DATA_W-1:0] fwd_in = '0, bwd_in = '0;
  logic signed [SUM_W-1:0]  sum_in = '0;
  logic signed [DATA_W-1:0] fwd_a, bwd_a, fwd_b, bwd_b;
  logic signed [SUM_W-1:0]  sum_a, sum_b;
  longint e_fwd, e_bwd;
  int checks = 0, failures = 0;

  sym_pe #(.DATA_W(DATA_W), .SUM_W(SUM_W), .COEF_W(COEF_W), .COEF(7624), .BWD_REG(1'b1)) u_a
    (.clk, .rst_n, .en, .fwd_in, .fwd_out(fwd_a), .bwd_in, .bwd_out(bwd_a), .sum_in, .sum_out(sum_a));
  sym_pe #(.DATA_W(DATA_W), .SUM_W(SUM_W), .COEF_W(COEF_W), .COEF(0), .BWD_REG(1'b0)) u_b
    (.clk, .rst_n, .en, .fwd_in, .fwd_out(fwd_b), .bwd_in, .bwd_out(bwd_b), .sum_in, .sum_out(sum_b));

  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint expv);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, expv);
    end
  endtask

  initial begin
    e_fwd = 0; e_bwd = 0;
    #12 rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      chk("fwd", longint'(fwd_a), e_fwd);
      chk("bwd", longint'(bwd_a), e_bwd);
      chk("fwd (delay-only)", longint'(fwd_b), e_fwd);
      en = ($urandom_range(3) != 0);
      if (n < 20) begin
        fwd_in = (n[0]) ? 16'sh8000 : 16'sh7fff;
        bwd_in = fwd_in;
      end else begin
        fwd_in = DATA_W'($urandom);
        bwd_in = DATA_W'($urandom);
      end
      sum_in = SUM_W'($signed($urandom_range(32'h3fffffff)) - 32'sh20000000);
      #1;
      chk("mac", longint'(sum_a),
          longint'(sum_in) + 64'sd7624 * (longint'(fwd_in) + longint'(bwd_in)));
      chk("pass", longint'(sum_b), longint'(sum_in));
      chk("bwd pass", longint'(bwd_b), longint'(bwd_in));
      if (en) begin
        e_fwd = longint'(fwd_in);
        e_bwd = longint'(bwd_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
