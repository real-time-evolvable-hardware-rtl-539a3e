// Evolvable cusp-like pulse shaper: everything of the prototype except the
// processor.
//
// A configurable cusp-like shaper (cusp_shaper) normally filters the sampled
// sensor input v(n) into s(n). To re-tune it after the sensor has degraded,
// a processor on the APB bus runs a genetic algorithm whose individuals are
// the 40-bit shaper configurations {k, l, m1, m2}. The processor writes an
// individual into the register file and commands an evaluation; the
// evaluation controller then switches the input multiplexer to the stored
// reference input v_ref(n), runs the shaper over the N_SAMPLES reference
// samples with that configuration, and the fitness evaluation block
// accumulates F2 = sum |s(n) - s_ref(n)| against the stored golden output.
// The fitness goes back to the processor through the register file, and the
// controller requests the next individual and signals each complete
// population. Finally the processor applies the best individual as the
// operating configuration. A CHECK command evaluates the operating
// configuration the same way and, if its F2 exceeds a programmable
// threshold, raises an EVOLVE request: this is how the fitness evaluation
// triggers a re-tuning.
//
// Interface: sensor samples with a strobe (the shaper advances on each
// strobe in normal operation), s(n) with its strobe (high only for sensor
// samples, not during evaluations), the APB slave port and `irq` for the
// processor, and a load port that shifts the reference vectors in (one
// (v_ref, s_ref) pair per clock, N_SAMPLES pairs, while no evaluation runs).
// `eval_active` is high while the shaper is lent to an evaluation; sensor
// samples arriving then are not filtered.
module evolvable_shaper_top
  import cusp_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 72,
  parameter int unsigned POP_SIZE  = 125
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // sensor path
  input  logic signed [DATA_W-1:0] sensor_v,
  input  logic                     sensor_valid,
  output logic signed [S_W-1:0]    s_out,
  output logic                     s_valid,
  output logic                     eval_active,
  // APB slave (processor side)
  input  logic                     psel,
  input  logic                     penable,
  input  logic                     pwrite,
  input  logic [7:0]               paddr,
  input  logic [31:0]              pwdata,
  output logic [31:0]              prdata,
  output logic                     pready,
  output logic                     pslverr,
  output logic                     irq,
  // reference vector loading
  input  logic                     ref_load,
  input  logic signed [DATA_W-1:0] ref_load_v,
  input  logic signed [S_W-1:0]    ref_load_s
);

  shaper_params_t           params;
  logic [CHROM_W-1:0]       chrom;
  logic                     cmd_eval, cmd_apply, cmd_start, cmd_check;
  logic [FIT_W-1:0]         threshold;
  logic                     sel_ref, ref_valid, shaper_clear;
  logic                     acc_clear, acc_en, fit_we;
  logic                     req, gen_done, busy, evolve;
  logic [7:0]               count;
  logic signed [DATA_W-1:0] v_ref, v_mux;
  logic                     v_mux_valid;
  logic signed [S_W-1:0]    s_shaper;
  logic                     s_shaper_valid;
  logic [FIT_W-1:0]         fitness;
  logic                     fit_sat;

  apb_regfile u_regfile (
    .clk, .rst_n,
    .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .chrom, .cmd_eval, .cmd_apply, .cmd_start, .cmd_check, .threshold,
    .fit_we, .fit_value(fitness), .fit_sat,
    .stat_req(req), .stat_gen_done(gen_done), .stat_busy(busy), .stat_evolve(evolve),
    .stat_count(count)
  );

  eval_controller #(.N_SAMPLES(N_SAMPLES), .POP_SIZE(POP_SIZE)) u_ctrl (
    .clk, .rst_n,
    .cmd_eval, .cmd_apply, .cmd_start, .cmd_check, .chrom,
    .params, .sel_ref, .ref_valid, .shaper_clear,
    .acc_clear, .acc_en, .fit_we, .fitness, .threshold,
    .req, .gen_done, .busy, .evolve, .count, .irq
  );

  input_mux u_mux (
    .sel_ref, .sensor_v, .sensor_valid, .ref_v(v_ref), .ref_valid,
    .v_out(v_mux), .v_valid(v_mux_valid)
  );

  cusp_shaper u_shaper (
    .clk, .rst_n, .clear(shaper_clear), .en(v_mux_valid), .params,
    .v_in(v_mux), .s_out(s_shaper), .s_valid(s_shaper_valid)
  );

  fitness_eval #(.N_SAMPLES(N_SAMPLES)) u_fitness (
    .clk, .rst_n,
    .load(ref_load && !busy), .load_v(ref_load_v), .load_s(ref_load_s),
    .v_shift(ref_valid), .v_ref,
    .acc_clear, .s_valid(acc_en), .s_in(s_shaper),
    .fitness, .saturated(fit_sat)
  );

  assign s_out       = s_shaper;
  assign s_valid     = s_shaper_valid && !acc_en && !busy;
  assign eval_active = busy;

endmodule
