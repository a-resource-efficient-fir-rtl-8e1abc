// tb_fir_rag_improved -- end-to-end test of the 64-tap filter at its
// default parameters.
//
// Phases: an impulse (the output must reproduce the 64 coefficients in
// order); sign-matched full-scale inputs that drive the output to its
// largest positive and negative values (results that need more than 32
// bits, checking that the full-precision output does not wrap); a long
// random stream with random gaps in in_valid (stalls); a reset in the
// middle of a stream; and a second random stream.  Every result is compared
// with the direct convolution y(n) = sum_k h(k) x(n-k), and out_valid must
// follow every accepted sample by exactly two clock edges and come at no
// other time.  Each mechanism is counted and must occur at least once.
module tb_fir_rag_improved;
  import tb_ref_pkg::*;

  localparam int DATA_W = 16;
  localparam int OUT_W  = DATA_W + 17;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [DATA_W-1:0] din = '0;
  logic                     out_valid;
  logic signed [OUT_W-1:0]  dout;

  longint xh [TB_TAPS];
  longint exp_q [$];
  bit     vhist [3];
  int checks = 0, failures = 0;
  int n_impulse = 0, n_fullscale = 0, n_stall = 0, n_reset = 0, n_both = 0, n_out = 0;
  int impulse_idx = -1;

  fir_rag_improved dut (
    .clk, .rst_n, .in_valid, .din, .out_valid, .dout
  );

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  // One clock step: check what the previous edges produced, then drive the
  // next input (taken on the coming rising edge).
  task automatic step(input bit v, input logic signed [DATA_W-1:0] x);
    @(negedge clk);
    // latency: out_valid now iff a sample was driven two steps ago
    checks++;
    if (out_valid != vhist[1]) fail($sformatf("out_valid=%0b, expected %0b", out_valid, vhist[1]));
    if (out_valid) begin
      longint e;
      n_out++;
      checks++;
      if (exp_q.size() == 0) fail("result with nothing expected");
      else begin
        e = exp_q.pop_front();
        if (longint'(dout) != e) fail($sformatf("dout=%0d expected %0d", dout, e));
        if (e >= 64'sh80000000 || e < -64'sh80000000) n_fullscale++;
        if (impulse_idx >= 0 && impulse_idx < TB_TAPS) begin
          checks++;
          if (longint'(dout) != longint'(ref_h(impulse_idx)))
            fail($sformatf("impulse tap %0d: %0d vs table %0d", impulse_idx, dout, ref_h(impulse_idx)));
          else n_impulse++;
          impulse_idx++;
        end
      end
    end
    if (dut.y_r != 0 && dut.y_s != 0) n_both++;
    vhist[1] = vhist[0];
    vhist[0] = v;
    in_valid = v;
    din      = x;
    if (rst_n && !v) n_stall++;
    if (v) begin
      longint acc;
      for (int k = TB_TAPS - 1; k > 0; k--) xh[k] = xh[k-1];
      xh[0] = longint'(x);
      acc = 0;
      for (int k = 0; k < TB_TAPS; k++) acc += longint'(ref_h(k)) * xh[k];
      exp_q.push_back(acc);
    end
  endtask

  task automatic clear_model();
    foreach (xh[i]) xh[i] = 0;
    exp_q.delete();
    vhist = '{0, 0, 0};
  endtask

  task automatic random_stream(input int len);
    for (int i = 0; i < len; i++) begin
      bit v;
      v = ($urandom_range(5) != 0);
      step(v, DATA_W'($urandom));
    end
  endtask

  initial begin
    clear_model();
    #12 rst_n = 1'b1;

    // impulse response
    step(1'b1, 16'sd1);
    impulse_idx = 0;
    for (int i = 0; i < TB_TAPS + 4; i++) step(1'b1, 16'sd0);
    impulse_idx = -1;

    // sign-matched full-scale input, both polarities
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < TB_TAPS; i++) begin
        bit pos;
        pos = (ref_h(TB_TAPS - 1 - i) >= 0) ^ p[0];
        step(1'b1, pos ? 16'sh7fff : 16'sh8000);
      end

    random_stream(1500);

    // reset in the middle of a stream
    @(negedge clk);
    rst_n = 1'b0;
    in_valid = 1'b0;
    #1;
    checks++;
    if (out_valid !== 1'b0 || dout != 0) fail("outputs not cleared by reset");
    else n_reset++;
    clear_model();
    @(negedge clk);
    rst_n = 1'b1;

    random_stream(1500);
    for (int i = 0; i < 4; i++) step(1'b0, '0);

    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d results never came out", exp_q.size()));
    $display("mechanisms: impulse_taps=%0d full_scale_results=%0d stalls=%0d resets=%0d both_sections=%0d outputs=%0d",
             n_impulse, n_fullscale, n_stall, n_reset, n_both, n_out);
    if (n_impulse != TB_TAPS) fail("impulse response incomplete");
    if (n_fullscale == 0) fail("no full-scale result");
    if (n_stall == 0)     fail("no stall");
    if (n_reset == 0)     fail("no reset");
    if (n_both == 0)      fail("sections never both active");
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
