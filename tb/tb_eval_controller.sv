// Testbench of eval_controller with N_SAMPLES = 8 and POP_SIZE = 5: checks
// the START/EVAL/APPLY handshake, that an evaluation feeds exactly N_SAMPLES
// reference samples, that fit_we comes N_SAMPLES+2 clocks after the EVAL
// command, that acc_en is ref_valid delayed by one clock, the REQ and BUSY
// status, GEN_DONE after every POP_SIZE evaluations, the parameter selection
// (evaluated individual while busy, operating configuration otherwise), the
// shaper and accumulator clears, that commands are ignored while busy, and
// the CHECK command: an evaluation of the operating configuration that is
// not counted, raises no REQ, and raises EVOLVE only when the fitness is
// above the threshold; START clears EVOLVE.
module tb_eval_controller;
  import cusp_pkg::*;
  localparam int N = 8, POP = 5;

  logic clk = 0, rst_n = 0;
  logic cmd_eval = 0, cmd_apply = 0, cmd_start = 0, cmd_check = 0;
  logic [FIT_W-1:0] fitness = '0, threshold = '1;
  logic [CHROM_W-1:0] chrom = '0;
  shaper_params_t params;
  logic sel_ref, ref_valid, shaper_clear, acc_clear, acc_en, fit_we;
  logic req, gen_done, busy, irq, evolve;
  logic [7:0] count;
  int checks = 0, failures = 0;
  logic prev_ref_valid = 0;

  eval_controller #(.N_SAMPLES(N), .POP_SIZE(POP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // acc_en must always be ref_valid of the previous clock
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (acc_en != prev_ref_valid) failures++;
    end
    prev_ref_valid <= ref_valid;
  end

  task automatic pulse(ref logic sig);
    @(negedge clk);
    sig = 1;
    @(negedge clk);
    sig = 0;
  endtask

  // One evaluation from the EVAL command on; returns clocks until fit_we.
  task automatic evaluate(logic [39:0] c, shaper_params_t op, bit last);
    int samples = 0, clocks = 0;
    bit seen_we = 0;
    @(negedge clk);
    chrom = c;
    cmd_eval = 1;
    #1 check(shaper_clear && acc_clear, "clears on EVAL");
    @(negedge clk);
    cmd_eval = 0;
    chrom = ~c;  // processor may change the registers while busy
    while (!seen_we) begin
      clocks++;
      check(busy && sel_ref && !req && params == shaper_params_t'(c), "busy state");
      samples += int'(ref_valid);
      if (fit_we) begin
        seen_we = 1;
        check(shaper_clear, "clear with fitness write");
      end
      if (clocks == 3) begin  // ignored while busy
        cmd_eval = 1; cmd_apply = 1; cmd_start = 1;
      end else begin
        cmd_eval = 0; cmd_apply = 0; cmd_start = 0;
      end
      @(negedge clk);
      if (clocks > 100) break;
    end
    check(clocks == N + 2, $sformatf("fit_we after %0d clocks", clocks));
    check(samples == N, $sformatf("%0d reference samples", samples));
    check(!busy && !sel_ref && req && irq, "request after evaluation");
    check(gen_done == last, "gen_done");
    check(params == op, "operating configuration back");
  endtask

  initial begin
    shaper_params_t op;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!req && !busy && !sel_ref, "idle after reset");
    op = '0;
    // APPLY
    @(negedge clk);
    chrom = {6'd31, 6'd15, 14'd57, 14'd13};
    cmd_apply = 1;
    #1 check(shaper_clear, "clear on APPLY");
    @(negedge clk);
    cmd_apply = 0;
    op = shaper_params_t'(chrom);
    check(params == op && !busy, "applied");
    // two generations
    pulse(cmd_start);
    check(req && count == 0 && !gen_done, "start");
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < POP; i++) begin
        evaluate(40'({$urandom, $urandom}), op, i == POP - 1);
        check(count == 8'((i + 1) % POP), $sformatf("count %0d", count));
      end
    // START clears gen_done
    pulse(cmd_start);
    check(!gen_done && req, "start after generation");
    // CHECK below and above the threshold
    threshold = 32'd1000;
    for (int t = 0; t < 4; t++) begin
      int clocks;
      logic [7:0] c0;
      logic       r0;
      clocks = 0;
      c0 = count;
      r0 = req;
      fitness = (t[0]) ? 32'd1001 : 32'd1000;
      @(negedge clk);
      chrom = 40'({$urandom, $urandom});
      cmd_check = 1;
      #1 check(shaper_clear && acc_clear, "clears on CHECK");
      @(negedge clk);
      cmd_check = 0;
      while (!fit_we && clocks < 100) begin
        check(busy && sel_ref && params == op, "CHECK evaluates the operating configuration");
        clocks++;
        @(negedge clk);
      end
      check(clocks == N + 1, $sformatf("CHECK fitness after %0d clocks", clocks + 1));
      @(negedge clk);
      check(!busy && count == c0 && req == r0, "CHECK not counted, no request");
      check(evolve == (t >= 1), $sformatf("evolve after check %0d", t));
      check(irq == (req || evolve), "irq");
    end
    pulse(cmd_start);
    check(!evolve, "START clears EVOLVE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
