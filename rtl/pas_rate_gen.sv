// pas_rate_gen: sampling-rate generator of the PAS (the SAMPLING_F output).
//
// What it does: the PAS, not the ADC, sets the sampling frequency. This block
// divides the PAS clock by a run-time programmable ratio and issues
// sampling_f, a one-cycle conversion strobe for the ADC, once per sampling
// period. ADC_LAT clock cycles after each strobe it raises sample_take for one
// cycle, telling the approximation core that the converted sample is on
// INPUT_SAMPLE.
//
// How it works: a down-counter reloads with sample_div-1 every time it reaches
// zero; the strobe is issued on the zero count. A new sample_div therefore
// takes effect at the next reload (the current period is finished first).
// sample_div = 0 is treated like 1, which makes every clock cycle a sampling
// period: the PAS clock is then the sample clock and the core consumes one
// sample per cycle, as in the published timing figures. sample_take is
// sampling_f delayed through an ADC_LAT-stage shift register.
//
// Interface and timing: sampling_f is first asserted in the cycle after reset
// is released. Reset is synchronous and active low.
// Following the paper: the existence and role of SAMPLING_F and that the rate
// is set by the PAS at run time. This design's own choices: the strobe
// encoding, the divider, the sample_div input that carries the rate (the paper
// does not say who programs it) and the fixed ADC latency.
module pas_rate_gen
  import pas_pkg::*;
#(
  parameter int unsigned DIV_W   = DIV_W_DEF,
  parameter int unsigned ADC_LAT = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DIV_W-1:0] sample_div,   // sampling period in clock cycles (0 = 1)
  output logic             sampling_f,   // conversion strobe to the ADC
  output logic             sample_take   // converted sample is on INPUT_SAMPLE
);

  logic [DIV_W-1:0] cnt_q;
  logic             run_q;

  assign sampling_f = run_q && (cnt_q == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q <= '0;
      run_q <= 1'b0;
    end else begin
      run_q <= 1'b1;
      if (run_q) begin
        if (cnt_q == '0) cnt_q <= (sample_div == '0) ? '0 : sample_div - DIV_W'(1);
        else             cnt_q <= cnt_q - DIV_W'(1);
      end
    end
  end

  if (ADC_LAT == 0) begin : g_no_lat
    assign sample_take = sampling_f;
  end else begin : g_lat
    logic [ADC_LAT-1:0] take_q;
    always_ff @(posedge clk) begin
      if (!rst_n) take_q <= '0;
      else        take_q <= ADC_LAT'({take_q, sampling_f});  // shift in at bit 0
    end
    assign sample_take = take_q[ADC_LAT-1];
  end

endmodule
