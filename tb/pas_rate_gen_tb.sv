// pas_rate_gen_tb: self-checking testbench of pas_rate_gen.
//
// Two generators (ADC latency 1, the default, and 3) share a sample_div input
// that is changed at random moments, including to 0 and 1. An independent
// model predicts every strobe: the first comes in the cycle after the first
// clock edge with reset released, and each strobe schedules the next one max(sample_div, 1) cycles
// later, sample_div being the value held at the end of the strobe's cycle. sampling_f is compared in
// every cycle, and sample_take against the model's strobe history delayed by the
// ADC latency. Runs at full rate (period 1) and at divided rates are counted.
`timescale 1ns/1ps
module pas_rate_gen_tb;

  localparam int unsigned DW = 16;

  logic          clk = 1'b0;
  logic          rst_n;
  logic [DW-1:0] sample_div;
  logic          sf_a, st_a, sf_b, st_b;

  pas_rate_gen dut_a (
    .clk, .rst_n, .sample_div, .sampling_f (sf_a), .sample_take (st_a)
  );

  pas_rate_gen #(.DIV_W(DW), .ADC_LAT(3)) dut_b (
    .clk, .rst_n, .sample_div, .sampling_f (sf_b), .sample_take (st_b)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_full_rate = 0;
  int n_divided = 0;
  int n_div_changes = 0;

  initial begin
    #(10 * 200_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc;          // cycles since reset release
  longint next_strobe;
  bit     hist [$];     // expected strobe per cycle

  task automatic expect_bit(string what, logic got, bit exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s mismatch at cycle %0d: got %0d expected %0d", what, cyc, got, exp);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    sample_div = 16'd1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    cyc = 0;
    next_strobe = 0;
    // Cycle 0 follows the first clock edge that sees reset released.
    for (int n = 0; n < 60_000; n++) begin
      bit exp_sf;
      @(posedge clk);
      #1;
      exp_sf = (cyc == next_strobe);
      expect_bit("sampling_f(lat1)", sf_a, exp_sf);
      expect_bit("sampling_f(lat3)", sf_b, exp_sf);
      hist.push_back(exp_sf);
      expect_bit("sample_take(lat1)", st_a, (hist.size() > 1) ? hist[hist.size()-2] : 1'b0);
      expect_bit("sample_take(lat3)", st_b, (hist.size() > 3) ? hist[hist.size()-4] : 1'b0);
      if (hist.size() > 8) void'(hist.pop_front());
      // Change the divider now and then, away from or on strobe cycles.
      if ($urandom_range(150) == 0) begin
        case ($urandom_range(3))
          0: sample_div = 16'd0;
          1: sample_div = 16'd1;
          default: sample_div = 16'($urandom_range(40));
        endcase
        n_div_changes++;
      end
      if (exp_sf) begin
        next_strobe = cyc + ((sample_div == 0) ? 1 : longint'(sample_div));
        if (sample_div <= 1) n_full_rate++; else n_divided++;
      end
      cyc++;
    end
    if (n_full_rate == 0)   begin failures++; $display("full-rate sampling never seen"); end
    if (n_divided == 0)     begin failures++; $display("divided sampling never seen"); end
    if (n_div_changes == 0) begin failures++; $display("divider never changed"); end
    $display("strobes: full-rate %0d, divided %0d, divider changes %0d", n_full_rate, n_divided, n_div_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
