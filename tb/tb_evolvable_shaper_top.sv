// End-to-end testbench of evolvable_shaper_top at its default size
// (72 reference samples, population of 125), with ga_host_model as the
// processor on the APB bus.
//
//  1. Loads the reference vectors: v_ref is an exponential pulse
//     (amplitude 8000, decay 5 samples) and s_ref the output of the
//     reference shaper (k,l,m1,m2) = (31,15,57,13) for it.
//  2. Evolves from a random population, into which the reference
//     configuration is seeded, for a few generations: F2 = 0 must be found.
//  3. Applies the reference configuration as the deployed one; a quality
//     CHECK passes (F2 = 0). Degrades the reference input (attenuation
//     delta = 0.8) and reloads it; a CHECK now finds F2 above the threshold
//     and raises EVOLVE. Recalibrates, starting from the deployed
//     configuration.
//  4. Applies the best individual and filters sensor samples with it, with
//     an evaluation in between (sensor samples then are not filtered).
// Every fitness the hardware reports is compared with the model's F2; the
// evaluation time (N+2 clocks from the command to the fitness) is measured;
// GEN_DONE must come exactly on every 125th evaluation; elitism makes the
// best fitness non-increasing; recalibration must beat the deployed
// configuration; s(n) in normal operation is compared with the model.
// Each mechanism (evaluation, end of generation, saturated fitness,
// reference reload, apply, quality check, evolution trigger, filtering of
// sensor samples, samples dropped during an evaluation) is counted and must
// have happened.
module tb_evolvable_shaper_top;
  import cusp_pkg::*;
  import cusp_model_pkg::*;

  localparam int N = 72, POP = 125;
  localparam int SCRATCH_GENS = 4, RECAL_GENS = 25;

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

  int checks = 0, failures = 0;
  int n_eval = 0, n_gen_done = 0, n_sat = 0, n_reload = 0, n_apply = 0;
  int n_filtered = 0, n_dropped = 0, n_check = 0, n_trigger = 0;
  lq_t v_orig, v_deg, s_ref, v_eval;

  evolvable_shaper_top dut (.*);

  ga_host_model #(.POP(POP)) host (
    .clk, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr, .irq
  );

  always #5 clk = ~clk;

  initial begin
    repeat (3_000_000) @(posedge clk);
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

  // evaluation time: from the EVAL command pulse to the fitness write
  int eval_start = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if ((dut.cmd_eval || dut.cmd_check) && !dut.busy) eval_start = cyc;
    if (dut.fit_we) begin
      checks++;
      if (cyc - eval_start != N + 2) begin
        failures++;
        $display("FAIL: evaluation took %0d clocks", cyc - eval_start);
      end
    end
  end

  task automatic load_ref(lq_t v, lq_t s);
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      ref_load = 1;
      ref_load_v = DATA_W'(v[n]);
      ref_load_s = S_W'(s[n]);
    end
    @(negedge clk);
    ref_load = 0;
    n_reload++;
    v_eval = v;
  endtask

  function automatic logic [CHROM_W-1:0] enc(int k, int l, int m1, int m2);
    return {6'(k), 6'(l), 14'(m1), 14'(m2)};
  endfunction

  function automatic longint model_fitness(logic [CHROM_W-1:0] c);
    shaper_params_t p = shaper_params_t'(c);
    return f2_fitness(shaper(v_eval, int'(p.k), int'(p.l), int'(p.m1), int'(p.m2)), s_ref);
  endfunction

  // Compare the hardware fitness of every logged evaluation with the model.
  int logged = 0;
  task automatic check_log();
    while (logged < host.log_c.size()) begin
      longint e = model_fitness(host.log_c[logged]);
      n_eval++;
      check(host.log_f[logged] == e,
            $sformatf("fitness %0d, model %0d", host.log_f[logged], e));
      check(host.log_sat[logged] == (e == 64'sd4294967295), "saturation flag");
      check(host.log_gen_done[logged] == (n_eval % POP == 0), "GEN_DONE position");
      n_sat += int'(host.log_sat[logged]);
      n_gen_done += int'(host.log_gen_done[logged]);
      logged++;
    end
  endtask

  // Stream a pulse as sensor input with random gaps; compare s(n).
  task automatic stream(lq_t v, logic [CHROM_W-1:0] c);
    shaper_params_t p = shaper_params_t'(c);
    lq_t e = shaper(v, int'(p.k), int'(p.l), int'(p.m1), int'(p.m2));
    for (int n = 0; n < v.size(); n++) begin
      @(negedge clk);
      sensor_v = DATA_W'(v[n]);
      sensor_valid = 1;
      @(negedge clk);
      sensor_valid = 0;
      check(s_valid && longint'(s_out) == e[n],
            $sformatf("sensor n=%0d s=%0d exp=%0d", n, s_out, e[n]));
      n_filtered++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  initial begin
    longint prev_best, f_orig;
    logic [CHROM_W-1:0] orig = enc(31, 15, 57, 13);
    void'($urandom(7));
    v_orig = exp_pulse(N, 0, 8000.0, 5.0);
    s_ref  = shaper(v_orig, 31, 15, 57, 13);
    v_deg.delete();
    foreach (v_orig[n]) v_deg.push_back((v_orig[n] > 1) ? longint'($floor(0.8 * real'(v_orig[n]) + 0.2)) : v_orig[n]);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1-2: from scratch
    load_ref(v_orig, s_ref);
    host.start();
    host.init_random();
    host.pop[5] = orig;  // the reference configuration must score 0
    prev_best = 64'h7fff_ffff_ffff;
    for (int g = 0; g < SCRATCH_GENS; g++) begin
      host.generation();
      check_log();
      check(host.best_f <= prev_best, "elitism keeps the best");
      prev_best = host.best_f;
    end
    check(prev_best == 0, "reference configuration found with F2 = 0");

    // 3: deployed configuration, quality checks, degraded sensor, recalibration
    host.apply(orig);
    n_apply++;
    begin
      longint f;
      bit ev;
      host.quality_check(32'd100000, f, ev);
      n_check++;
      n_trigger += int'(ev);
      check(f == 0 && !ev, $sformatf("healthy sensor passes the check (F2 %0d)", f));
      load_ref(v_deg, s_ref);
      f_orig = model_fitness(orig);
      host.quality_check(32'd100000, f, ev);
      n_check++;
      n_trigger += int'(ev);
      check(f == f_orig && ev && irq, $sformatf("degraded sensor triggers evolution (F2 %0d)", f));
    end
    host.start();
    check(!dut.evolve, "START clears EVOLVE");
    host.init_around(orig);
    for (int g = 0; g < RECAL_GENS; g++) begin
      host.generation();
      check_log();
    end
    begin
      shaper_params_t b;
      b = shaper_params_t'(host.best_c);
      $display("recalibrated (k,l,m1,m2) = (%0d,%0d,%0d,%0d), F2 = %0d, deployed F2 = %0d",
               int'(b.k), int'(b.l), int'(b.m1), int'(b.m2), host.best_f, f_orig);
      check(host.best_f * 2 < f_orig, "recalibration at least halves F2");
      check(b.k == 31 && b.l == 15 && b.m1 > 57 && b.m2 >= 13, "gain raised, delays kept");
    end

    // 4: operation with the recalibrated shaper
    host.apply(host.best_c);
    n_apply++;
    @(negedge clk);
    stream(v_deg, host.best_c);
    // an evaluation while sensor samples keep arriving
    fork
      begin
        longint f;
        host.evaluate(orig, f);
        check_log();
      end
      begin
        @(negedge clk);
        while (!eval_active) @(negedge clk);
        while (eval_active) begin
          sensor_v = DATA_W'($urandom_range(0, 8000));
          sensor_valid = 1;
          @(negedge clk);
          check(!s_valid, "no output for sensor samples during an evaluation");
          n_dropped++;
        end
        sensor_valid = 0;
      end
    join
    // the shaper restarts from zero state with the operating configuration
    stream(v_deg, host.best_c);
    check(host.bus_errors == 0, "no APB errors");

    $display("evaluations=%0d generations=%0d saturated=%0d reloads=%0d applies=%0d checks=%0d triggers=%0d filtered=%0d dropped=%0d",
             n_eval, n_gen_done, n_sat, n_reload, n_apply, n_check, n_trigger, n_filtered, n_dropped);
    check(n_eval > 0 && n_gen_done > 0 && n_sat > 0 && n_reload > 1 && n_apply > 0 &&
          n_check > 0 && n_trigger > 0 && n_filtered > 0 && n_dropped > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
