// tb_pulsation_pe -- drives three processing elements (adding, subtracting
// and delay-only) with random partial sums, products and enables and
// compares their registered outputs with a cycle model, including the
// asynchronous reset.
module tb_pulsation_pe;
  localparam int SUM_W = 33, PROD_W = 26;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [SUM_W-1:0]  sum_in = '0;
  logic signed [PROD_W-1:0] prod = '0;
  logic signed [SUM_W-1:0]  out_p, out_m, out_z;
  longint exp_p, exp_m, exp_z;
  int checks = 0, failures = 0;

  pulsation_pe #(.SUM_W(SUM_W), .PROD_W(PROD_W), .SIGN(1))  u_p
    (.clk, .rst_n, .en, .sum_in, .prod, .sum_out(out_p));
  pulsation_pe #(.SUM_W(SUM_W), .PROD_W(PROD_W), .SIGN(-1)) u_m
    (.clk, .rst_n, .en, .sum_in, .prod, .sum_out(out_m));
  pulsation_pe #(.SUM_W(SUM_W), .PROD_W(PROD_W), .SIGN(0))  u_z
    (.clk, .rst_n, .en, .sum_in, .prod, .sum_out(out_z));

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic signed [SUM_W-1:0] got, input longint expv);
    checks++;
    if (longint'(got) != expv) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, expv);
    end
  endtask

  initial begin
    exp_p = 0; exp_m = 0; exp_z = 0;
    #12 rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      chk("add", out_p, exp_p);
      chk("sub", out_m, exp_m);
      chk("delay", out_z, exp_z);
      en     = ($urandom_range(3) != 0);
      sum_in = SUM_W'($signed($urandom_range(32'h3fffffff)) - 32'sh20000000);
      prod   = PROD_W'($urandom);
      if (en) begin
        exp_p = longint'(sum_in) + longint'(prod);
        exp_m = longint'(sum_in) - longint'(prod);
        exp_z = longint'(sum_in);
      end
      if (n == 1000) begin
        // asynchronous clear between edges
        #2 rst_n = 1'b0;
        #1;
        chk("reset add", out_p, 0);
        chk("reset sub", out_m, 0);
        chk("reset delay", out_z, 0);
        rst_n = 1'b1;
        en = 1'b0;
        exp_p = 0; exp_m = 0; exp_z = 0;
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
