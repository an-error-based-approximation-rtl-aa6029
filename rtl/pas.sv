// pas: the Polygonal Approximation Sampler, placed between an ADC and a
// processor.
//
// What it does: the ADC delivers uniformly spaced samples; the PAS forwards to
// the processor only the samples that a polygonal (piecewise-linear)
// approximation needs, so that the straight lines between forwarded samples
// stay within an integral error bound epsilon (THRESHOLD) of the original
// signal. Each forwarded sample comes with the number of input samples since
// the previous forwarded one, so the processor can rebuild the time axis, and
// a valid pulse that can serve as its wake-up interrupt.
//
// How it works: pas_rate_gen produces the ADC conversion strobe SAMPLING_F and
// marks the cycle in which the converted value is on INPUT_SAMPLE; pas_core
// runs one step of the approximation on that value in the same cycle.
//
// Interface (names follow the system block diagram of the PAS): CLOCK/RESET
// are clk and the synchronous active-low rst_n; input_sample and threshold
// come from the ADC and the processor; output_sample, output_index and
// output_valid go to the processor; sampling_f goes to the ADC. sample_div
// (sampling period in clock cycles) is this design's addition: the paper says
// the PAS sets the sampling rate at run time but not through which signal.
// Timing: with sample_div = 0 or 1 one sample is processed every clock
// cycle; output_valid rises one clock after the step that forwards a sample.
module pas
  import pas_pkg::*;
#(
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEF,
  parameter int unsigned INDEX_W  = INDEX_W_DEF,
  parameter int unsigned THRESH_W = THRESH_W_DEF,
  parameter int unsigned DIV_W    = DIV_W_DEF,
  parameter int unsigned ADC_LAT  = 1,
  parameter err_form_e   ERR_FORM = ERR_PRINTED   // see pas_core
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ADC side
  input  logic signed [SAMPLE_W-1:0] input_sample,
  output logic                       sampling_f,
  // processor side
  input  logic        [THRESH_W-1:0] threshold,
  input  logic        [DIV_W-1:0]    sample_div,
  output logic signed [SAMPLE_W-1:0] output_sample,
  output logic        [INDEX_W-1:0]  output_index,
  output logic                       output_valid
);

  logic sample_take;

  pas_rate_gen #(
    .DIV_W   (DIV_W),
    .ADC_LAT (ADC_LAT)
  ) u_rate (
    .clk         (clk),
    .rst_n       (rst_n),
    .sample_div  (sample_div),
    .sampling_f  (sampling_f),
    .sample_take (sample_take)
  );

  pas_core #(
    .SAMPLE_W (SAMPLE_W),
    .INDEX_W  (INDEX_W),
    .THRESH_W (THRESH_W),
    .ERR_FORM (ERR_FORM)
  ) u_core (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_en      (sample_take),
    .in_sample  (input_sample),
    .threshold  (threshold),
    .out_valid  (output_valid),
    .out_sample (output_sample),
    .out_index  (output_index)
  );

endmodule
