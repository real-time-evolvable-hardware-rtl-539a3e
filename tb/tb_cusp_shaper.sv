// Testbench of cusp_shaper: feeds exponential pulses (the shaper's intended
// input) and random bounded sequences with several parameter sets, among
// them the paper's reference shapers (31,15,57,13) and (63,31,19,2), extreme
// delays 0 and 63 and negative gains, and compares every s(n) with the
// reference model. Checks the one-clock latency: s_valid follows en by one
// clock, and no output changes without en (sample strobes with gaps).
module tb_cusp_shaper;
  import cusp_pkg::*;
  import cusp_model_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  shaper_params_t params = '0;
  logic signed [DATA_W-1:0] v_in = '0;
  logic signed [S_W-1:0] s_out;
  logic s_valid;
  int checks = 0, failures = 0;

  cusp_shaper dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(lq_t v, int k, int l, int m1, int m2, bit gaps);
    lq_t exp_s = shaper(v, k, l, m1, m2);
    @(negedge clk);
    params = '{k: 6'(k), l: 6'(l), m1: 14'(m1), m2: 14'(m2)};
    clear = 1; en = 0;
    @(negedge clk);
    clear = 0;
    for (int n = 0; n < v.size(); n++) begin
      if (gaps) begin
        int g = $urandom_range(0, 2);
        repeat (g) begin
          en = 0;
          @(negedge clk);
          checks++;
          if (s_valid !== 1'b0) failures++;  // no sample, no output strobe
        end
      end
      v_in = DATA_W'(v[n]);
      en = 1;
      @(negedge clk);
      en = 0;
      checks++;
      if (!s_valid || longint'(s_out) != exp_s[n]) begin
        failures++;
        if (failures < 10)
          $display("(%0d,%0d,%0d,%0d) n=%0d s=%0d exp=%0d valid=%0b",
                   k, l, m1, m2, n, s_out, exp_s[n], s_valid);
      end
    end
  endtask

  initial begin
    lq_t v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(exp_pulse(72, 0, 8000.0, 10.0), 63, 31, 19, 2, 0);
    run(exp_pulse(72, 0, 8000.0, 5.0), 31, 15, 57, 13, 0);
    run(exp_pulse(90, 5, 6000.0, 5.0), 31, 15, 68, 16, 1);
    run(exp_pulse(90, 3, 5000.0, 7.0), 31, 15, 89, 20, 1);
    run(exp_pulse(80, 2, 8191.0, 10.0), 0, 0, -8192, 8191, 0);
    run(exp_pulse(150, 10, 8000.0, 20.0), 63, 63, 1234, -4321, 1);
    for (int t = 0; t < 20; t++) begin
      v.delete();
      for (int n = 0; n < 120; n++) v.push_back(longint'($urandom_range(0, 8191)));
      run(v, $urandom_range(0, 63), $urandom_range(0, 63),
          int'($urandom_range(0, 16383)) - 8192, int'($urandom_range(0, 16383)) - 8192,
          t[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
