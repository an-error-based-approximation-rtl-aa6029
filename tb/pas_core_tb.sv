// pas_core_tb: self-checking testbench of pas_core.
//
// Three cores see the same sample stream: one at the default parameters, one
// with a 6-bit OUTPUT_INDEX so that the counter-overflow rule is hit often, and
// one with the signed-area error update (ERR_AREA). Each has its own instance of
// the reference model (pas_ref_pkg). Samples are offered
// with random gaps (in_en low), and every accepted sample is stepped through the
// reference model; the forwarded value, index difference and the one-cycle
// latency (out_valid in the cycle after the step) are compared.
// Stimulus phases: an ECG-like waveform, a random walk with the threshold
// changed every 100 samples, piecewise-linear ramps (which produce peaks),
// full-range random samples with extreme thresholds (width corner cases), and a
// long constant stretch that overflows the 16-bit index counter, and a constant
// stretch with a small threshold (the area-form core must then forward only on
// counter overflow).
// The causes of forwarding (threshold without peak, threshold at a peak,
// counter overflow) and the threshold changes are counted; a cause that never
// happened is a failure.
`timescale 1ns/1ps
module pas_core_tb;
  import pas_ref_pkg::*;

  localparam int unsigned SW = 16;
  localparam int unsigned IW = 16;
  localparam int unsigned TW = 32;
  localparam int unsigned IW_SMALL = 6;

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic                 in_en;
  logic signed [SW-1:0] in_sample;
  logic        [TW-1:0] threshold;

  logic                 v_a, v_b, v_c;
  logic signed [SW-1:0] s_a, s_b, s_c;
  logic [IW-1:0]        i_a, i_c;
  logic [IW_SMALL-1:0]  i_b;

  pas_core dut_a (
    .clk, .rst_n, .in_en, .in_sample, .threshold,
    .out_valid (v_a), .out_sample (s_a), .out_index (i_a)
  );

  pas_core #(.SAMPLE_W(SW), .INDEX_W(IW_SMALL), .THRESH_W(TW)) dut_b (
    .clk, .rst_n, .in_en, .in_sample, .threshold,
    .out_valid (v_b), .out_sample (s_b), .out_index (i_b)
  );

  pas_core #(.ERR_FORM(pas_pkg::ERR_AREA)) dut_c (
    .clk, .rst_n, .in_en, .in_sample, .threshold,
    .out_valid (v_c), .out_sample (s_c), .out_index (i_c)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_kind_a [4];
  int n_kind_b [4];
  int n_kind_c [4];
  int n_ovf_c_small_eps = 0;
  bit small_eps_phase = 0;
  int n_eps_changes = 0;
  int n_out_a = 0;

  pas_ref ref_a, ref_b, ref_c;

  // Expected outputs for the step driven in the previous cycle.
  bit     exp_v_a, exp_v_b, exp_v_c;
  longint exp_s_a, exp_i_a, exp_s_b, exp_i_b, exp_s_c, exp_i_c;

  initial begin
    #(10 * 800_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clip(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // Synthetic ECG-like beat with period 300 samples: P wave, sharp QRS, T wave.
  function automatic longint ecg(int n);
    longint p;
    longint v;
    p = longint'(n) % 300;
    v = 0;
    if (p >= 40  && p < 70)  v = 60 - ((p - 55) * (p - 55) * 60) / 225;
    if (p >= 100 && p < 104) v = -(p - 100) * 40;
    if (p >= 104 && p < 110) v = -160 + (p - 104) * 230;
    if (p >= 110 && p < 116) v = 1220 - (p - 110) * 260;
    if (p >= 116 && p < 120) v = -340 + (p - 116) * 85;
    if (p >= 160 && p < 220) v = 200 - ((p - 190) * (p - 190) * 200) / 900;
    return v + longint'($urandom_range(6)) - 3;
  endfunction

  // Checks the outputs of the previous step, then steps both models.
  task automatic check_outputs();
    if (exp_v_a || v_a) begin
      checks++;
      if (exp_v_a != v_a || (exp_v_a && (longint'(s_a) != exp_s_a || longint'(i_a) != exp_i_a))) begin
        failures++;
        if (failures < 10)
          $display("A mismatch t=%0t: valid %0d/%0d sample %0d/%0d index %0d/%0d", $time,
                   v_a, exp_v_a, s_a, exp_s_a, i_a, exp_i_a);
      end
    end
    if (exp_v_b || v_b) begin
      checks++;
      if (exp_v_b != v_b || (exp_v_b && (longint'(s_b) != exp_s_b || longint'(i_b) != exp_i_b))) begin
        failures++;
        if (failures < 10)
          $display("B mismatch t=%0t: valid %0d/%0d sample %0d/%0d index %0d/%0d", $time,
                   v_b, exp_v_b, s_b, exp_s_b, i_b, exp_i_b);
      end
    end
    if (exp_v_c || v_c) begin
      checks++;
      if (exp_v_c != v_c || (exp_v_c && (longint'(s_c) != exp_s_c || longint'(i_c) != exp_i_c))) begin
        failures++;
        if (failures < 10)
          $display("C mismatch t=%0t: valid %0d/%0d sample %0d/%0d index %0d/%0d", $time,
                   v_c, exp_v_c, s_c, exp_s_c, i_c, exp_i_c);
      end
    end
  endtask

  // One clock cycle: check what the previous cycle's step produced, then
  // maybe offer a new sample and step the models with it.
  task automatic cycle(bit en, longint s, longint eps);
    kind_e k;
    @(negedge clk);
    check_outputs();
    in_en     = en;
    in_sample = SW'(s);
    threshold = TW'(eps);
    exp_v_a = 0;
    exp_v_b = 0;
    exp_v_c = 0;
    if (en) begin
      exp_v_a = ref_a.step(s, eps, exp_s_a, exp_i_a, k);
      n_kind_a[k]++;
      if (exp_v_a) n_out_a++;
      exp_v_b = ref_b.step(s, eps, exp_s_b, exp_i_b, k);
      n_kind_b[k]++;
      exp_v_c = ref_c.step(s, eps, exp_s_c, exp_i_c, k);
      n_kind_c[k]++;
      if (small_eps_phase && k != FWD_NONE && k != FWD_OVF) begin
        failures++;
        $display("area-form core forwarded a constant signal on the threshold");
      end
      if (small_eps_phase && k == FWD_OVF) n_ovf_c_small_eps++;
    end
  endtask

  // Offers sample s after 0..gap idle cycles.
  task automatic offer(longint s, longint eps, int gap);
    int g;
    g = (gap > 0) ? $urandom_range(gap) : 0;
    for (int k = 0; k < g; k++) cycle(1'b0, 0, eps);
    cycle(1'b1, clip(s), eps);
  endtask

  longint eps;
  longint walk;
  longint ramp, slope;

  initial begin
    ref_a = new((64'd1 << IW) - 1);
    ref_b = new((64'd1 << IW_SMALL) - 1);
    ref_c = new((64'd1 << IW) - 1, 1'b1);
    rst_n = 1'b0; in_en = 1'b0; in_sample = '0; threshold = '0;
    exp_v_a = 0; exp_v_b = 0; exp_v_c = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. ECG-like signal.
    for (int n = 0; n < 3000; n++) offer(ecg(n), 200, 1);

    // 2. Random walk, threshold changed at run time.
    walk = 0;
    eps  = 5000;
    for (int n = 0; n < 3000; n++) begin
      if (n % 100 == 0) begin
        eps = longint'($urandom_range(20000));
        n_eps_changes++;
      end
      walk = clip(walk + longint'($urandom_range(100)) - 50);
      offer(walk, eps, 2);
    end

    // 3. Piecewise-linear ramps with random slopes.
    ramp = 0;
    for (int seg = 0; seg < 60; seg++) begin
      slope = longint'($urandom_range(60)) - 30;
      for (int n = 0; n < 40; n++) begin
        ramp = clip(ramp + slope);
        offer(ramp, 2000, 0);
      end
    end

    // 4. Full-range random samples, extreme thresholds.
    for (int n = 0; n < 2000; n++) begin
      case ($urandom_range(3))
        0: eps = 0;
        1: eps = 64'hFFFF_FFFF;
        default: eps = longint'($urandom());
      endcase
      offer(longint'($signed(16'($urandom()))), eps, 1);
    end

    // 5. Constant signal with the largest threshold: 16-bit index overflow.
    for (int n = 0; n < 140_000; n++) offer(1234, 64'hFFFF_FFFF, 0);

    // 6. Constant signal, small threshold: only the area form lets the counter
    //    overflow (its error stays zero on a straight line).
    for (int n = 0; n < 140_000; n++) begin
      small_eps_phase = (n >= 10);   // after the step into the constant has been forwarded
      offer(-777, 10, 0);
    end
    small_eps_phase = 0;

    cycle(1'b0, 0, 0);
    cycle(1'b0, 0, 0);

    if (n_kind_a[FWD_TH_NOPEAK] == 0) begin failures++; $display("never forwarded on threshold without peak"); end
    if (n_kind_a[FWD_TH_PEAK] == 0)   begin failures++; $display("never forwarded at a peak"); end
    if (n_kind_a[FWD_OVF] == 0)       begin failures++; $display("16-bit counter never overflowed"); end
    if (n_kind_b[FWD_OVF] == 0)       begin failures++; $display("6-bit counter never overflowed"); end
    if (n_kind_c[FWD_TH_PEAK] == 0)   begin failures++; $display("area-form core never forwarded at a peak"); end
    if (n_ovf_c_small_eps == 0)       begin failures++; $display("area-form core never overflowed on a constant"); end
    if (n_eps_changes == 0)           begin failures++; $display("threshold never changed"); end
    $display("forwarded (16-bit core): %0d; no-peak %0d, peak %0d, overflow %0d; 6-bit core overflows %0d",
             n_out_a, n_kind_a[FWD_TH_NOPEAK], n_kind_a[FWD_TH_PEAK], n_kind_a[FWD_OVF], n_kind_b[FWD_OVF]);
    $display("area-form core: no-peak %0d, peak %0d, overflow %0d (on constant, small eps: %0d)",
             n_kind_c[FWD_TH_NOPEAK], n_kind_c[FWD_TH_PEAK], n_kind_c[FWD_OVF], n_ovf_c_small_eps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
