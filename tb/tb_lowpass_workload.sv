// tb_lowpass_workload -- runs the 64-tap low-pass filter (Fs = 250 kHz) on
// its intended job: sinusoids in the pass band and in the stop band.
//
// For each tone the filter is fed 600 samples of a 30000-amplitude sine.
// Every output is checked exactly against the direct convolution, and over
// the last 250 samples (a whole number of periods for all tones used) the
// RMS of the output is compared with A * |H(f)| / sqrt(2), where |H(f)| is
// the magnitude of the coefficients' discrete-time Fourier transform,
// evaluated here from the coefficient table.  Pass-band tones must keep
// their gain within 0.2 dB of the DC gain (94922); stop-band tones must be
// at least 40 dB down.  Runs at the filter's default parameters.
module tb_lowpass_workload;
  import tb_ref_pkg::*;

  localparam int    DATA_W = 16;
  localparam int    OUT_W  = DATA_W + 17;
  localparam real   FS     = 250.0e3;
  localparam real   AMP    = 30000.0;
  localparam real   PI     = 3.14159265358979;
  localparam int    N_RUN  = 600;
  localparam int    N_WIN  = 250;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [DATA_W-1:0] din = '0;
  logic                     out_valid;
  logic signed [OUT_W-1:0]  dout;

  longint xh [TB_TAPS];
  longint exp_q [$];
  int checks = 0, failures = 0;
  int n_pass = 0, n_stop = 0;
  real dc_gain;

  fir_rag_improved dut (.clk, .rst_n, .in_valid, .din, .out_valid, .dout);

  always #5 clk = ~clk;

  function automatic real mag_h(real f);
    real re, im, w;
    re = 0.0; im = 0.0;
    w  = 2.0 * PI * f / FS;
    for (int k = 0; k < TB_TAPS; k++) begin
      re += ref_h(k) * $cos(w * k);
      im -= ref_h(k) * $sin(w * k);
    end
    return $sqrt(re * re + im * im);
  endfunction

  task automatic run_tone(input real f, input bit passband);
    real sumsq, rms, want, db;
    int  n_out;
    foreach (xh[i]) xh[i] = 0;
    exp_q.delete();
    sumsq = 0.0;
    n_out = 0;
    // restart from a cleared filter
    @(negedge clk); rst_n = 1'b0; in_valid = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    for (int i = 0; i < N_RUN + 2; i++) begin
      @(negedge clk);
      if (out_valid) begin
        longint e;
        e = exp_q.pop_front();
        checks++;
        if (longint'(dout) != e) begin
          failures++;
          if (failures < 10) $display("FAIL f=%0f: dout=%0d expected %0d", f, dout, e);
        end
        if (n_out >= N_RUN - N_WIN) sumsq += real'(dout) * real'(dout);
        n_out++;
      end
      if (i < N_RUN) begin
        in_valid = 1'b1;
        din = DATA_W'($rtoi(AMP * $sin(2.0 * PI * f * i / FS)));
        for (int k = TB_TAPS - 1; k > 0; k--) xh[k] = xh[k-1];
        xh[0] = longint'(din);
        begin
          longint acc = 0;
          for (int k = 0; k < TB_TAPS; k++) acc += longint'(ref_h(k)) * xh[k];
          exp_q.push_back(acc);
        end
      end else in_valid = 1'b0;
    end
    rms  = $sqrt(sumsq / N_WIN);
    want = AMP * mag_h(f) / $sqrt(2.0);
    db   = 20.0 * $log10(rms / (AMP / $sqrt(2.0)) / dc_gain);
    $display("tone %7.1f Hz: output rms %12.1f, expected %12.1f, gain %6.1f dB re DC",
             f, rms, want, db);
    checks++;
    if (n_out != N_RUN) begin
      failures++; $display("FAIL f=%0f: %0d results for %0d samples", f, n_out, N_RUN);
    end
    checks++;
    if (rms < 0.98 * want - 50.0 || rms > 1.02 * want + 50.0) begin
      failures++; $display("FAIL f=%0f: rms off the expected response", f);
    end
    checks++;
    if (passband) begin
      if (db < -0.2 || db > 0.2) begin failures++; $display("FAIL pass-band gain %f dB", db); end
      else n_pass++;
    end else begin
      if (db > -40.0) begin failures++; $display("FAIL stop-band gain %f dB", db); end
      else n_stop++;
    end
  endtask

  initial begin
    dc_gain = 0.0;
    for (int k = 0; k < TB_TAPS; k++) dc_gain += ref_h(k);
    #12 rst_n = 1'b1;
    run_tone(1000.0, 1'b1);
    run_tone(2000.0, 1'b1);
    run_tone(5000.0, 1'b1);
    run_tone(25000.0, 1'b0);
    run_tone(40000.0, 1'b0);
    run_tone(50000.0, 1'b0);
    run_tone(100000.0, 1'b0);
    checks++;
    if (n_pass != 3 || n_stop != 4) failures++;
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
