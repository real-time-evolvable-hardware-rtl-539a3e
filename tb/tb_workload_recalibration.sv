// Recalibration workloads on evolvable_shaper_top at its default size, with
// ga_host_model as the processor.
//
//  A. Attenuated, noisy detector pulse: reference shaper (31,15,57,13) on an
//     exponential pulse (amplitude 8000, decay 5 samples); the input is
//     degraded as v_d = delta*v + (1-delta) + noise for v > 1, delta = 0.6,
//     noise uniform in -2..2. The GA starts from the deployed configuration.
//  B. Synthetic pulses: reference shaper (63,31,19,2) on A*exp(-n/10)
//     (tau = 200 us at a 20 us sample period, N = 72), with A = 8000 for the
//     20 V reference; degraded to tau = 7 samples (140 us), to A*0.7, and
//     both.
// For each case the GA runs a fixed number of generations; the testbench
// checks every fitness the hardware reports against the model, that the
// recalibrated shaper's F2 is below half the deployed one's, and, for B,
// that the relative error of the output peak is within 8 %.
module tb_workload_recalibration;
  import cusp_pkg::*;
  import cusp_model_pkg::*;

  localparam int N = 72, POP = 125, GENS = 25;

  logic clk = 0, rst_n = 0;
  logic signed [DATA_W-1:0] sensor_v = '0;
  logic sensor_valid = 0;
  logic signed [S_W-1:0] s_out;
  logic s_valid, eval_active;
  logic psel, penable, pwrite;
  logic [7:0] paddr;
  logic [31:0] pwdata, prdata;
  logic pready, pslverr, irq;
  logic ref_load = 0;
  logic signed [DATA_W-1:0] ref_load_v = '0;
  logic signed [S_W-1:0] ref_load_s = '0;

  int checks = 0, failures = 0, logged = 0;
  lq_t v_eval, s_ref;

  evolvable_shaper_top dut (.*);

  ga_host_model #(.POP(POP)) host (
    .clk, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr, .irq
  );

  always #5 clk = ~clk;

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic lq_t run_shaper(lq_t v, logic [CHROM_W-1:0] c);
    shaper_params_t p = shaper_params_t'(c);
    return shaper(v, int'(p.k), int'(p.l), int'(p.m1), int'(p.m2));
  endfunction

  function automatic longint peak(lq_t s);
    longint m = s[0];
    foreach (s[n]) if (s[n] > m) m = s[n];
    return m;
  endfunction

  task automatic recalibrate(string name, lq_t v_ref, lq_t v_deg, logic [CHROM_W-1:0] orig,
                             bit check_peak);
    longint f_orig, p_ref, p_new;
    real rel;
    shaper_params_t b;
    s_ref  = run_shaper(v_ref, orig);
    v_eval = v_deg;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      ref_load = 1;
      ref_load_v = DATA_W'(v_deg[n]);
      ref_load_s = S_W'(s_ref[n]);
    end
    @(negedge clk);
    ref_load = 0;
    f_orig = f2_fitness(run_shaper(v_deg, orig), s_ref);
    host.start();
    host.init_around(orig);
    for (int g = 0; g < GENS; g++) begin
      host.generation();
      while (logged < host.log_c.size()) begin
        longint e = f2_fitness(run_shaper(v_eval, host.log_c[logged]), s_ref);
        check(host.log_f[logged] == e, $sformatf("%s: fitness %0d, model %0d", name, host.log_f[logged], e));
        logged++;
      end
    end
    b = shaper_params_t'(host.best_c);
    p_ref = peak(s_ref);
    p_new = peak(run_shaper(v_deg, host.best_c));
    rel = 100.0 * real'(p_new - p_ref) / real'(p_ref);
    $display("%s: recalibrated (k,l,m1,m2) = (%0d,%0d,%0d,%0d), F2 %0d (deployed %0d), peak error %0.2f %%",
             name, int'(b.k), int'(b.l), int'(b.m1), int'(b.m2), host.best_f, f_orig, rel);
    check(host.best_f * 2 < f_orig, {name, ": F2 at least halved"});
    if (check_peak) check(rel < 8.0 && rel > -8.0, {name, ": peak error within 8 %"});
  endtask

  initial begin
    lq_t v0, vd;
    void'($urandom(11));
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A
    v0 = exp_pulse(N, 0, 8000.0, 5.0);
    vd.delete();
    foreach (v0[n])
      vd.push_back((v0[n] > 1) ? longint'($floor(0.6 * real'(v0[n]) + 0.4)) + longint'($urandom_range(0, 4)) - 2
                               : v0[n]);
    recalibrate("delta=0.6", v0, vd, {6'd31, 6'd15, 14'd57, 14'd13}, 0);

    // B
    v0 = exp_pulse(N, 0, 8000.0, 10.0);
    recalibrate("tau 200->140us", v0, exp_pulse(N, 0, 8000.0, 7.0), {6'd63, 6'd31, 14'd19, 14'd2}, 1);
    recalibrate("A 20->14V", v0, exp_pulse(N, 0, 5600.0, 10.0), {6'd63, 6'd31, 14'd19, 14'd2}, 1);
    recalibrate("combined", v0, exp_pulse(N, 0, 5600.0, 7.0), {6'd63, 6'd31, 14'd19, 14'd2}, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
