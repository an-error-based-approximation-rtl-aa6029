// pas_core: the polygonal-approximation datapath of the PAS.
//
// What it does: for every ADC sample it is given, the core advances the
// Wall-Danielsson polygonal approximation by one step and decides whether an
// earlier sample must be forwarded to the processor. A sample is forwarded
// when the integral error between the signal and the straight line from the
// last forwarded sample exceeds the threshold epsilon.
//
// How it works (one step per accepted sample i, with sample[i-1] held in a
// register):
//   dy = sample[i] - sample[i-1];  x = x + 1;  y = y + dy
//   f  = f + x - y*dy                      (integral error, dx fixed to 1)
//   displacement = |y| + x
//   if displacement < length and no peak yet: peak = i-1 (remember sample[i-1])
//   length = displacement
//   if |f| > epsilon: t = peak if a peak is held, else i-1;
//       forward (sample[t], t - t_prev); f = 0; drop the peak;
//       x = i - t; y = sample[i] - sample[t]; length = |y| + x; t_prev = t
// This is the published PAS procedure line for line.
// Error-update form: the procedure prints the update as f = f + x*dx - y*dy,
// and that is the default (ERR_FORM = ERR_PRINTED). The same text also says
// that a constant input can run the index counter into overflow, which the
// printed update cannot do for small thresholds (a constant input adds x at
// every step), while the signed-area update of the original Wall-Danielsson
// method, f = f + x*dy - y*dx, keeps f at zero on any straight line. That form
// is available as ERR_FORM = ERR_AREA; it costs a multiplier of x by dy
// instead of y by dy.
// Indices are kept relative to the last forwarded sample: x always equals
// i - t_prev, so
// the same register is both the segment's horizontal extent and the
// OUTPUT_INDEX counter, and the peak is stored as its offset from t_prev plus a
// valid flag (the procedure's "peak = 0" test).
// Counter overflow: when x reaches the largest value INDEX_W bits hold, the
// forwarding branch is taken as if the threshold had been crossed, so the
// index difference always fits OUTPUT_INDEX and x starts again from i - t.
// The procedure's text only says the counter is reset and the sample sent;
// reusing the normal forwarding branch for it is this design's choice.
// The very first sample after reset only primes sample[i-1]; it is the
// procedure's sample[0] and is never forwarded.
//
// Interface: in_en marks a cycle whose in_sample is a new sample (signed
// two's complement). threshold is unsigned and may change at any time; it is
// used by the step it is sampled with. out_valid is a one-cycle pulse;
// out_sample/out_index hold their value until the next forwarded sample.
// Timing: one sample per clock at most; the result of the step for the sample
// presented in cycle n appears on the outputs after the clock edge ending
// cycle n. The sample width (16) follows the paper; the index width, the
// threshold width, the signed encoding, the synchronous active-low reset and
// the registered outputs are this design's choices.
module pas_core
  import pas_pkg::*;
#(
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEF,
  parameter int unsigned INDEX_W  = INDEX_W_DEF,
  parameter int unsigned THRESH_W = THRESH_W_DEF,
  parameter err_form_e   ERR_FORM = ERR_PRINTED
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_en,
  input  logic signed [SAMPLE_W-1:0] in_sample,
  input  logic        [THRESH_W-1:0] threshold,
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] out_sample,
  output logic        [INDEX_W-1:0]  out_index
);

  localparam int unsigned F_W = f_width(SAMPLE_W, INDEX_W, THRESH_W);
  localparam int unsigned L_W = len_width(SAMPLE_W, INDEX_W);
  localparam int unsigned D_W = SAMPLE_W + 1;  // differences of two samples
  localparam logic [INDEX_W-1:0] X_MAX = '1;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [D_W-1:0]      diff_t;
  typedef logic signed [F_W-1:0]      facc_t;
  typedef logic        [INDEX_W-1:0]  index_t;
  typedef logic        [L_W-1:0]      len_t;

  // Architectural state of the procedure.
  logic    primed_q;        // sample[i-1] is valid
  sample_t prev_q;          // sample[i-1]
  index_t  x_q;             // x = i - t_prev
  diff_t   y_q;             // y = sample[i] - sample[t_prev]
  facc_t   f_q;             // integral error f
  len_t    len_q;           // length
  logic    peak_v_q;        // peak != 0
  index_t  peak_off_q;      // peak - t_prev
  sample_t peak_s_q;        // sample[peak]

  // Combinational step.
  diff_t                   dy, y_n, y_r;
  index_t                  x_n, x_r, t_off;
  logic signed [2*D_W-1:0] prod;        // y*dy      (ERR_PRINTED)
  logic signed [F_W-1:0]   xdy;         // x*dy      (ERR_AREA)
  facc_t                   f_n, f_abs;
  len_t                    disp, len_r;
  logic                    set_peak, peak_v_n, fire_th, fire_ovf, fire;
  index_t                  peak_off_n;
  sample_t                 peak_s_n, t_sample;

  function automatic len_t abs_len(diff_t v);
    diff_t a;
    a = (v < 0) ? -v : v;
    return len_t'(unsigned'(a));
  endfunction

  always_comb begin
    dy   = diff_t'(in_sample) - diff_t'(prev_q);
    x_n  = x_q + index_t'(1);
    y_n  = y_q + dy;
    prod = (2*D_W)'(y_n) * (2*D_W)'(dy);
    xdy  = facc_t'({1'b0, x_n}) * facc_t'(dy);
    if (ERR_FORM == ERR_PRINTED) f_n = f_q + facc_t'({1'b0, x_n}) - facc_t'(prod);
    else                         f_n = f_q + xdy - facc_t'(y_n);
    disp = abs_len(y_n) + len_t'(x_n);

    set_peak   = (disp < len_q) && !peak_v_q;
    peak_v_n   = peak_v_q | set_peak;
    peak_off_n = set_peak ? x_q    : peak_off_q;   // (i-1) - t_prev = x before the step
    peak_s_n   = set_peak ? prev_q : peak_s_q;

    f_abs    = (f_n < 0) ? -f_n : f_n;
    fire_th  = f_abs > facc_t'({1'b0, threshold});
    fire_ovf = (x_n == X_MAX);
    fire     = fire_th || fire_ovf;

    // Forwarded point t, relative to t_prev.
    t_off    = peak_v_n ? peak_off_n : (x_n - index_t'(1));
    t_sample = peak_v_n ? peak_s_n   : prev_q;

    // Segment restart at t.
    x_r   = x_n - t_off;
    y_r   = diff_t'(in_sample) - diff_t'(t_sample);
    len_r = abs_len(y_r) + len_t'(x_r);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      primed_q   <= 1'b0;
      prev_q     <= '0;
      x_q        <= '0;
      y_q        <= '0;
      f_q        <= '0;
      len_q      <= '0;
      peak_v_q   <= 1'b0;
      peak_off_q <= '0;
      peak_s_q   <= '0;
      out_valid  <= 1'b0;
      out_sample <= '0;
      out_index  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_en) begin
        prev_q   <= in_sample;
        primed_q <= 1'b1;
        if (!primed_q) begin
          // sample[0]: the procedure starts with f = x = y = length = peak = 0.
          x_q      <= '0;
          y_q      <= '0;
          f_q      <= '0;
          len_q    <= '0;
          peak_v_q <= 1'b0;
        end else if (fire) begin
          out_valid  <= 1'b1;
          out_sample <= t_sample;
          out_index  <= t_off;
          x_q        <= x_r;
          y_q        <= y_r;
          f_q        <= '0;
          len_q      <= len_r;
          peak_v_q   <= 1'b0;
        end else begin
          x_q        <= x_n;
          y_q        <= y_n;
          f_q        <= f_n;
          len_q      <= disp;
          peak_v_q   <= peak_v_n;
          peak_off_q <= peak_off_n;
          peak_s_q   <= peak_s_n;
        end
      end
    end
  end

  // x is i - t_prev; the overflow rule keeps it below X_MAX between steps, and
  // a held peak always lies strictly between t_prev and i; an output follows
  // a cycle that offered a sample.
  a_x_below_max : assert property (@(posedge clk) disable iff (!rst_n) x_q != X_MAX);
  a_valid_after_step : assert property (@(posedge clk) disable iff (!rst_n)
                                        out_valid |-> $past(in_en));
  a_peak_inside : assert property (@(posedge clk) disable iff (!rst_n)
                                   peak_v_q |-> (peak_off_q != '0) && (peak_off_q < x_q));

endmodule
