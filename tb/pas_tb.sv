// pas_tb: end-to-end testbench of the PAS at its default parameters.
//
// A small ADC model converts a synthetic ECG-like waveform: on each
// sampling_f strobe it latches the next waveform value and holds it on
// input_sample, which is where the PAS (ADC latency 1) expects it one cycle
// later. Every sample the PAS consumes is also stepped through the reference
// model (pas_ref_pkg) with the threshold in force, and output_valid,
// output_sample and output_index are compared in the cycle after each step.
// The run covers, in order: one 20-second window at 360 samples/s with the
// clock equal to the sample clock (sample_div = 1), the same beat at three
// thresholds (printing the sampling reduction factor of each), a divided
// sampling rate (sample_div = 5), a constant input that overflows the 16-bit
// index counter, and a return to full rate. Forwarding without a peak, at a
// peak and on overflow, threshold changes and rate changes are counted, and a
// mechanism that never happened is a failure.
`timescale 1ns/1ps
module pas_tb;
  import pas_ref_pkg::*;

  logic               clk = 1'b0;
  logic               rst_n;
  logic signed [15:0] input_sample;
  logic               sampling_f;
  logic        [31:0] threshold;
  logic        [15:0] sample_div;
  logic signed [15:0] output_sample;
  logic        [15:0] output_index;
  logic               output_valid;

  pas dut (
    .clk, .rst_n, .input_sample, .sampling_f, .threshold, .sample_div,
    .output_sample, .output_index, .output_valid
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  initial begin
    #(10 * 1_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- ADC model
  typedef enum int {W_ECG, W_CONST} wave_e;
  wave_e  wave;
  longint wave_n;

  function automatic longint ecg(longint n);
    longint p, v;
    p = n % 300;
    v = 0;
    if (p >= 40  && p < 70)  v = 60 - ((p - 55) * (p - 55) * 60) / 225;
    if (p >= 100 && p < 104) v = -(p - 100) * 40;
    if (p >= 104 && p < 110) v = -160 + (p - 104) * 230;
    if (p >= 110 && p < 116) v = 1220 - (p - 110) * 260;
    if (p >= 116 && p < 120) v = -340 + (p - 116) * 85;
    if (p >= 160 && p < 220) v = 200 - ((p - 190) * (p - 190) * 200) / 900;
    return 1024 + v + longint'($urandom_range(4)) - 2;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      input_sample <= '0;
      wave_n       <= 0;
    end else if (sampling_f) begin
      input_sample <= 16'((wave == W_ECG) ? ecg(wave_n) : 64'sd1500);
      wave_n       <= wave_n + 1;
    end
  end

  // --------------------------------------------------------- checking
  pas_ref ref_m;
  logic   take;        // sampling_f delayed by the ADC latency
  bit     exp_v;
  longint exp_s, exp_i;
  longint n_in, n_out;
  int     n_kind [4];
  int     n_eps_changes = 0;
  int     n_rate_changes = 0;
  int     n_divided = 0;

  always_ff @(posedge clk) take <= rst_n && sampling_f;

  always @(negedge clk) begin
    kind_e k;
    if (rst_n) begin
      if (exp_v || output_valid) begin
        checks++;
        if (exp_v != output_valid || (exp_v && (longint'(output_sample) != exp_s ||
                                                 longint'(output_index) != exp_i))) begin
          failures++;
          if (failures < 10)
            $display("mismatch t=%0t: valid %0d/%0d sample %0d/%0d index %0d/%0d", $time,
                     output_valid, exp_v, output_sample, exp_s, output_index, exp_i);
        end
      end
      exp_v = 0;
      if (take) begin
        exp_v = ref_m.step(longint'(input_sample), longint'(threshold), exp_s, exp_i, k);
        n_kind[k]++;
        n_in++;
        if (exp_v) n_out++;
        if (sample_div > 1) n_divided++;
      end
    end
  end

  task automatic run_samples(longint count);
    longint start;
    start = n_in;
    while (n_in - start < count) @(negedge clk);
  endtask

  task automatic set_eps(longint e);
    @(negedge clk);
    threshold = 32'(e);
    n_eps_changes++;
  endtask

  longint out0, in0;
  longint eps_list [3] = '{100, 2000, 20000};

  initial begin
    ref_m = new(65535);
    exp_v = 0; n_in = 0; n_out = 0;
    rst_n = 1'b0; threshold = 32'd2000; sample_div = 16'd1; wave = W_ECG;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // One 20-second ECG window at 360 samples/s, one sample per clock.
    run_samples(7200);
    $display("20 s window at 360 Hz, eps=2000: %0d of %0d samples forwarded", n_out, n_in);

    // The same beat at three thresholds.
    foreach (eps_list[j]) begin
      set_eps(eps_list[j]);
      in0 = n_in; out0 = n_out;
      run_samples(3000);
      $display("eps=%0d: forwarded %0d of %0d, SRF %0d%%", eps_list[j], n_out - out0, n_in - in0,
               100 - ((n_out - out0) * 100) / (n_in - in0));
    end

    // Divided sampling rate: one sample every 5 clock cycles.
    @(negedge clk); sample_div = 16'd5; n_rate_changes++;
    run_samples(1500);

    // Constant input, largest threshold: the index counter overflows.
    set_eps(64'hFFFF_FFFF);
    @(negedge clk); sample_div = 16'd1; n_rate_changes++; wave = W_CONST;
    run_samples(140_000);

    // Back to the ECG beat at full rate.
    set_eps(2000);
    wave = W_ECG;
    run_samples(1000);
    repeat (4) @(negedge clk);

    if (n_kind[FWD_TH_NOPEAK] == 0) begin failures++; $display("never forwarded without a peak"); end
    if (n_kind[FWD_TH_PEAK] == 0)   begin failures++; $display("never forwarded at a peak"); end
    if (n_kind[FWD_OVF] == 0)       begin failures++; $display("index counter never overflowed"); end
    if (n_eps_changes == 0)         begin failures++; $display("threshold never changed"); end
    if (n_divided == 0)             begin failures++; $display("divided rate never used"); end
    $display("samples %0d, forwarded %0d (no-peak %0d, peak %0d, overflow %0d), eps changes %0d, rate changes %0d",
             n_in, n_out, n_kind[FWD_TH_NOPEAK], n_kind[FWD_TH_PEAK], n_kind[FWD_OVF],
             n_eps_changes, n_rate_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
