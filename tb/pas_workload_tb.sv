// pas_workload_tb: the three signal types of the PAS evaluation, run on the
// PAS at its default widths with synthetic data.
//
// One common clock stands for 9 kHz. Eight channels run side by side, each a
// PAS with its own ADC model and reference checker (pas_channel):
//   - one ECG lead sampled at 360 Hz (sample_div 25),
//   - six inertial axes (3-axis accelerometer + 3-axis gyroscope) at 50 Hz
//     (sample_div 180), one PAS per axis,
//   - one impedance-respiration signal at 125 Hz (sample_div 72).
// Eight minutes of signal (the length of one respiration recording) are
// simulated in four two-minute phases with increasing thresholds, and the
// sampling reduction factor SRF = 1 - forwarded/acquired of each phase is
// printed per signal type. The waveforms are synthetic, so the SRF values only
// show the trend with the threshold; they are not the published figures.
// Each channel checks every output against the reference model; channels that
// never forwarded a sample, or never forwarded one at a peak, count as
// failures.
`timescale 1ns/1ps
module pas_workload_tb;

  localparam int NCH = 8;
  localparam int CYCLES_PER_PHASE = 120 * 9000;  // two minutes

  logic clk = 1'b0;
  logic rst_n;
  logic [31:0] eps [3];   // per signal type: 0 ECG, 1 IMU, 2 respiration

  int     ch_checks [NCH];
  int     ch_fail   [NCH];
  longint ch_in     [NCH];
  longint ch_out    [NCH];
  int     ch_peak   [NCH];

  always #5 clk = ~clk;

  pas_channel #(.WAVE(0), .CH(0), .DIV(25)) u_ecg (
    .clk, .rst_n, .threshold (eps[0]),
    .checks (ch_checks[0]), .failures (ch_fail[0]), .n_in (ch_in[0]), .n_out (ch_out[0]),
    .n_peak (ch_peak[0])
  );

  for (genvar c = 0; c < 6; c++) begin : g_imu
    pas_channel #(.WAVE(1), .CH(c), .DIV(180)) u_imu (
      .clk, .rst_n, .threshold (eps[1]),
      .checks (ch_checks[1+c]), .failures (ch_fail[1+c]), .n_in (ch_in[1+c]),
      .n_out (ch_out[1+c]), .n_peak (ch_peak[1+c])
    );
  end

  pas_channel #(.WAVE(2), .CH(0), .DIV(72)) u_resp (
    .clk, .rst_n, .threshold (eps[2]),
    .checks (ch_checks[7]), .failures (ch_fail[7]), .n_in (ch_in[7]), .n_out (ch_out[7]),
    .n_peak (ch_peak[7])
  );

  int checks = 0;
  int failures = 0;

  initial begin
    #(64'd10 * (64'd4 * 64'(CYCLES_PER_PHASE) + 64'd1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Thresholds per phase and signal type (ADC codes squared).
  longint eps_tab [4][3] = '{'{50, 200, 1000}, '{500, 2000, 10000},
                             '{2000, 20000, 100000}, '{10000, 200000, 1000000}};
  string  names [3] = '{"ECG 360 Hz", "IMU 6 x 50 Hz", "respiration 125 Hz"};

  function automatic void sums(int ty, output longint a, output longint f);
    a = 0; f = 0;
    for (int c = 0; c < NCH; c++)
      if ((ty == 0 && c == 0) || (ty == 1 && c >= 1 && c <= 6) || (ty == 2 && c == 7)) begin
        a += ch_in[c];
        f += ch_out[c];
      end
  endfunction

  longint a0 [3], f0 [3], a1, f1;

  initial begin
    rst_n = 1'b0;
    foreach (eps[k]) eps[k] = 32'(eps_tab[0][k]);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int ph = 0; ph < 4; ph++) begin
      @(negedge clk);
      for (int ty = 0; ty < 3; ty++) begin
        eps[ty] = 32'(eps_tab[ph][ty]);
        sums(ty, a0[ty], f0[ty]);
      end
      repeat (CYCLES_PER_PHASE) @(negedge clk);
      for (int ty = 0; ty < 3; ty++) begin
        sums(ty, a1, f1);
        $display("%-20s eps=%8d: acquired %7d forwarded %6d SRF %0.1f%%", names[ty],
                 eps_tab[ph][ty], a1 - a0[ty], f1 - f0[ty],
                 100.0 * (1.0 - real'(f1 - f0[ty]) / real'(a1 - a0[ty])));
      end
    end
    repeat (4) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks   += ch_checks[c];
      failures += ch_fail[c];
      if (ch_out[c] == 0)  begin failures++; $display("channel %0d never forwarded", c); end
      if (ch_peak[c] == 0) begin failures++; $display("channel %0d never forwarded at a peak", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
