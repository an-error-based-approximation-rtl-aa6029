// pas_channel: one sensor channel for system-level testbenches: a behavioural
// ADC model, a PAS at its default widths, and a checker against the reference
// model (pas_ref_pkg).
//
// The ADC model is behavioural, not the part it stands for: on each
// sampling_f strobe it latches the next value of a synthetic waveform (integer
// ADC codes) and holds it on the PAS input, where the PAS reads it one clock
// later. WAVE selects the waveform: 0 an ECG-like beat at 360 samples/s,
// 1 an inertial (accelerometer/gyroscope) axis at 50 samples/s alternating every 30 s
// between static postures and walking, 2 an impedance-respiration signal at
// 125 samples/s. CH varies the phase, amplitude and noise seed of a waveform
// so that channels differ. DIV is the sampling period in clock cycles.
// Every consumed sample is stepped through the reference model; mismatches in
// output_valid, output_sample or output_index, or a latency other than one
// cycle, count as failures. The counters are outputs for the enclosing bench.
`timescale 1ns/1ps
module pas_channel
  import pas_ref_pkg::*;
#(
  parameter int WAVE = 0,
  parameter int CH   = 0,
  parameter int DIV  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] threshold,
  output int          checks,
  output int          failures,
  output longint      n_in,
  output longint      n_out,
  output int          n_peak
);

  localparam real PI = 3.14159265358979;

  logic signed [15:0] input_sample;
  logic               sampling_f;
  logic signed [15:0] output_sample;
  logic        [15:0] output_index;
  logic               output_valid;

  pas dut (
    .clk, .rst_n, .input_sample, .sampling_f, .threshold,
    .sample_div (16'(DIV)),
    .output_sample, .output_index, .output_valid
  );

  // ------------------------------------------------------------ waveforms
  int unsigned seed = 32'd12345 + 32'(CH) * 32'd7919 + 32'(WAVE) * 32'd104729;

  function automatic real gauss(real t, real mu, real sigma);
    return $exp(-((t - mu) * (t - mu)) / (2.0 * sigma * sigma));
  endfunction

  function automatic longint wave_value(longint n, int unsigned noise);
    real t, v;
    case (WAVE)
      0: begin  // ECG, 360 Hz, ~72 beats/min, 200 codes per mV, 11-bit range
        t = real'((n + 37 * CH) % 300) / 360.0;
        v = 1024.0 + 30.0 * gauss(t, 0.15, 0.025) - 30.0 * gauss(t, 0.285, 0.006)
          + 240.0 * gauss(t, 0.30, 0.008) - 60.0 * gauss(t, 0.315, 0.007)
          + 60.0 * gauss(t, 0.52, 0.045) + 10.0 * $sin(2.0 * PI * real'(n) / 3600.0);
        return longint'(v) + (longint'(noise) % 5) - 2;
      end
      1: begin  // inertial axis, 50 Hz: 30 s posture, 30 s walking, repeated
        t = real'(n) / 50.0;
        if (((n / 1500) % 2) == 0)
          v = 2000.0 * real'(CH % 3 - 1) + 300.0 * real'((n / 3000) % 3);
        else
          v = 1500.0 * $sin(2.0 * PI * 1.8 * t + real'(CH)) +
              500.0 * $sin(2.0 * PI * 3.6 * t + 0.5 * real'(CH));
        return longint'(v) + (longint'(noise) % 41) - 20;
      end
      default: begin  // impedance respiration, 125 Hz, ~15 breaths/min
        t = real'(n) / 125.0;
        v = 3000.0 * $sin(2.0 * PI * 0.25 * t) + 600.0 * $sin(2.0 * PI * 0.5 * t + 1.0)
          + 400.0 * $sin(2.0 * PI * 0.02 * t);
        return longint'(v) + (longint'(noise) % 21) - 10;
      end
    endcase
  endfunction

  longint wave_n;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      input_sample <= '0;
      wave_n       <= 0;
    end else if (sampling_f) begin
      input_sample <= 16'(wave_value(wave_n, $urandom(seed + 32'(wave_n))));
      wave_n       <= wave_n + 1;
    end
  end

  // ------------------------------------------------------------ checking
  pas_ref ref_m = new(65535);
  logic   take;
  bit     exp_v;
  longint exp_s, exp_i;

  always_ff @(posedge clk) take <= rst_n && sampling_f;

  initial begin
    checks = 0; failures = 0; n_in = 0; n_out = 0; n_peak = 0; exp_v = 0;
  end

  always @(negedge clk) begin
    kind_e k;
    if (rst_n) begin
      if (exp_v || output_valid) begin
        checks++;
        if (exp_v != output_valid || (exp_v && (longint'(output_sample) != exp_s ||
                                                 longint'(output_index) != exp_i))) begin
          failures++;
          if (failures < 5)
            $display("channel %0d/%0d mismatch t=%0t: valid %0d/%0d sample %0d/%0d index %0d/%0d",
                     WAVE, CH, $time, output_valid, exp_v, output_sample, exp_s, output_index, exp_i);
        end
      end
      exp_v = 0;
      if (take) begin
        exp_v = ref_m.step(longint'(input_sample), longint'(threshold), exp_s, exp_i, k);
        n_in++;
        if (exp_v) n_out++;
        if (k == FWD_TH_PEAK) n_peak++;
      end
    end
  end

endmodule
