// tb_sym_section -- drives the folded symmetric section with an impulse,
// sign-matched full-scale samples and random samples with gaps in en, and
// checks its output after every clock against the direct convolution over
// the large-coefficient taps, y_s(n) = sum_k h_s(k) x(n-k).
module tb_sym_section;
  import tb_ref_pkg::*;

  localparam int DATA_W = 16;
  localparam int SUM_W  = DATA_W + 17;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [DATA_W-1:0] din = '0;
  logic signed [SUM_W-1:0]  y;
  longint xh [TB_TAPS];
  longint expv;
  int checks = 0, failures = 0, stalls = 0;

  sym_section #(.DATA_W(DATA_W)) dut (.clk, .rst_n, .en, .din, .y);

  always #5 clk = ~clk;

  initial begin
    foreach (xh[i]) xh[i] = 0;
    expv = 0;
    #12 rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (longint'(y) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d: got %0d expected %0d", n, y, expv);
      end
      en = (n < 100) ? 1'b1 : ($urandom_range(4) != 0);
      if (n < 64)        din = (n == 0) ? 16'sd1 : 16'sd0;
      else if (n < 200)  din = (ref_h((n - 64) % 64) < 0) ? 16'sh8000 : 16'sh7fff;
      else               din = DATA_W'($urandom);
      if (!en) stalls++;
      if (en) begin
        for (int k = TB_TAPS - 1; k > 0; k--) xh[k] = xh[k-1];
        xh[0] = longint'(din);
        expv = 0;
        for (int k = 0; k < TB_TAPS; k++) expv += ref_h_part(k, 1'b1) * xh[k];
      end
    end
    if (stalls == 0) begin failures++; $display("FAIL no stall cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
