// Testbench of fitness_eval at its default size (72 samples): loads random
// reference vectors, then runs evaluations the way the controller does
// (v_shift for N clocks, s_valid one clock later) with random shaper outputs,
// and checks the v_ref sequence, that both registers are back at n = 0 for
// the next run, F2 against the model, the accumulator clear, the saturation
// of the accumulator and the 32-bit clipping of the output.
module tb_fitness_eval;
  import cusp_pkg::*;
  import cusp_model_pkg::*;
  localparam int N = 72;

  logic clk = 0, rst_n = 0;
  logic load = 0, v_shift = 0, acc_clear = 0, s_valid = 0;
  logic signed [DATA_W-1:0] load_v = '0, v_ref;
  logic signed [S_W-1:0] load_s = '0, s_in = '0;
  logic [FIT_W-1:0] fitness;
  logic saturated;
  int checks = 0, failures = 0;
  int sat_runs = 0;
  lq_t vr, sr;

  fitness_eval #(.N_SAMPLES(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // One evaluation; `spread` sets how far s strays from s_ref.
  task automatic evaluate(longint spread);
    lq_t s;
    longint exp_f;
    for (int n = 0; n < N; n++)
      s.push_back(wrap(sr[n] + longint'($urandom_range(0, 1 << 20)) * spread
                       - longint'($urandom_range(0, 1 << 20)) * spread, 35));
    exp_f = f2_fitness(s, sr);
    @(negedge clk);
    acc_clear = 1;
    @(negedge clk);
    acc_clear = 0;
    for (int n = 0; n <= N; n++) begin
      v_shift = (n < N);
      if (n < N) check(longint'(v_ref) == vr[n], $sformatf("v_ref[%0d]", n));
      s_valid = (n > 0);
      if (n > 0) s_in = S_W'(s[n-1]);
      @(negedge clk);
    end
    v_shift = 0; s_valid = 0;
    check(longint'(fitness) == exp_f, $sformatf("fitness %0d exp %0d", fitness, exp_f));
    check(saturated == (exp_f == 64'sd4294967295), "saturated flag");
    if (saturated) sat_runs++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      vr.delete(); sr.delete();
      @(negedge clk);
      for (int n = 0; n < N; n++) begin
        vr.push_back(longint'($urandom_range(0, 8191)));
        sr.push_back(wrap({$urandom, $urandom}, 35));
        load = 1;
        load_v = DATA_W'(vr[n]);
        load_s = S_W'(sr[n]);
        @(negedge clk);
      end
      load = 0;
      evaluate(0);      // perfect individual: F2 = 0
      evaluate(1);
      evaluate(100);
      evaluate(20000);  // clipped to 2^32-1
      evaluate(1 << 22);// accumulator saturates
    end
    check(sat_runs >= 3, "saturation seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
