// Behavioural model of the processor that runs the genetic algorithm, for
// the system testbenches. It is the APB master of the evolvable shaper and
// keeps the population; the evolvable shaper evaluates.
//
// GA (standard binary GA on 40-bit chromosomes {k,l,m1,m2}): population of
// POP individuals; each generation every individual is written to the
// chromosome registers and evaluated by the hardware (EVAL command, wait for
// the request interrupt, read the fitness); then the ELITE best are copied
// into the offspring, the rest is made by binary tournament selection and
// one-point crossover, and with probability `pm` one random bit of a child is
// inverted. Lower fitness is better. The mutation probability and the random
// generator are this model's choices.
//
// Every evaluation is logged (chromosome, fitness, saturation flag, whether
// GEN_DONE was set after it) so that the testbench can check the hardware's
// fitness against its own model. Tasks are called hierarchically.
module ga_host_model #(
  parameter int POP   = 125,
  parameter int ELITE = 4
) (
  input  logic        clk,
  output logic        psel,
  output logic        penable,
  output logic        pwrite,
  output logic [7:0]  paddr,
  output logic [31:0] pwdata,
  input  logic [31:0] prdata,
  input  logic        pready,
  input  logic        pslverr,
  input  logic        irq
);
  import cusp_pkg::*;

  logic [CHROM_W-1:0] pop [POP];
  longint             fit [POP];
  logic [CHROM_W-1:0] log_c[$];
  longint             log_f[$];
  bit                 log_sat[$];
  bit                 log_gen_done[$];
  int                 bus_errors = 0;
  real                pm = 0.5;
  logic [CHROM_W-1:0] best_c;
  longint             best_f;

  initial begin
    psel = 0; penable = 0; pwrite = 0; paddr = '0; pwdata = '0;
  end

  task automatic apb_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk);
    penable = 1;
    while (!pready) @(negedge clk);
    if (pslverr) bus_errors++;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  task automatic apb_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk);
    penable = 1;
    while (!pready) @(negedge clk);
    #1 d = prdata;
    if (pslverr) bus_errors++;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  task automatic write_chrom(logic [CHROM_W-1:0] c);
    apb_write(ADDR_CHROM_MSB, 32'(c[39:32]));
    apb_write(ADDR_CHROM_LSB, c[31:0]);
  endtask

  // Start an evolution: the controller raises its first request.
  task automatic start();
    apb_write(ADDR_CTRL, 32'(1 << CTRL_START));
    @(negedge clk);
    while (!irq) @(negedge clk);
  endtask

  task automatic apply(logic [CHROM_W-1:0] c);
    write_chrom(c);
    apb_write(ADDR_CTRL, 32'(1 << CTRL_APPLY));
  endtask

  // Quality check of the operating configuration; returns its fitness and
  // whether the hardware raised EVOLVE.
  task automatic quality_check(logic [31:0] threshold, output longint f, output bit evolve);
    logic [31:0] d, st;
    apb_write(ADDR_THRESHOLD, threshold);
    apb_write(ADDR_CTRL, 32'(1 << CTRL_CHECK));
    apb_read(ADDR_CTRL, st);
    while (st[STAT_BUSY]) apb_read(ADDR_CTRL, st);
    apb_read(ADDR_FITNESS, d);
    f = longint'(d);
    evolve = st[STAT_EVOLVE];
  endtask

  task automatic evaluate(logic [CHROM_W-1:0] c, output longint f);
    logic [31:0] d, st;
    while (!irq) @(negedge clk);  // wait for the request
    write_chrom(c);
    apb_write(ADDR_CTRL, 32'(1 << CTRL_EVAL));
    @(negedge clk);
    while (!irq) @(negedge clk);
    apb_read(ADDR_FITNESS, d);
    apb_read(ADDR_CTRL, st);
    f = longint'(d);
    log_c.push_back(c);
    log_f.push_back(f);
    log_sat.push_back(st[STAT_SAT]);
    log_gen_done.push_back(st[STAT_GEN_DONE]);
  endtask

  function automatic logic [CHROM_W-1:0] rand_chrom();
    return CHROM_W'({$urandom, $urandom});
  endfunction

  function automatic int tournament();
    int a = $urandom_range(0, POP - 1);
    int b = $urandom_range(0, POP - 1);
    return (fit[a] <= fit[b]) ? a : b;
  endfunction

  // Evaluate the population, then build the next one.
  task automatic generation();
    int                 order [POP];
    logic [CHROM_W-1:0] nxt [POP];
    for (int i = 0; i < POP; i++) evaluate(pop[i], fit[i]);
    for (int i = 0; i < POP; i++) order[i] = i;
    // selection sort of the indices by fitness (stable for equal fitness)
    for (int i = 0; i < ELITE; i++)
      for (int j = i + 1; j < POP; j++)
        if (fit[order[j]] < fit[order[i]]) begin
          int t = order[i];
          order[i] = order[j];
          order[j] = t;
        end
    best_c = pop[order[0]];
    best_f = fit[order[0]];
    for (int i = 0; i < ELITE; i++) nxt[i] = pop[order[i]];
    for (int i = ELITE; i < POP; i++) begin
      logic [CHROM_W-1:0] a = pop[tournament()];
      logic [CHROM_W-1:0] b = pop[tournament()];
      int                 cp = $urandom_range(1, CHROM_W - 1);
      logic [CHROM_W-1:0] mask = (40'd1 << cp) - 40'd1;
      logic [CHROM_W-1:0] c = (a & ~mask) | (b & mask);
      if (real'($urandom_range(0, 9999)) < pm * 10000.0)
        c[$urandom_range(0, CHROM_W - 1)] ^= 1'b1;
      nxt[i] = c;
    end
    for (int i = 0; i < POP; i++) pop[i] = nxt[i];
  endtask

  // Random population (evolution from scratch).
  task automatic init_random();
    for (int i = 0; i < POP; i++) pop[i] = rand_chrom();
  endtask

  // Population around a known configuration: itself and two-bit mutants.
  task automatic init_around(logic [CHROM_W-1:0] c);
    pop[0] = c;
    for (int i = 1; i < POP; i++) begin
      logic [CHROM_W-1:0] m = c;
      m[$urandom_range(0, CHROM_W - 1)] ^= 1'b1;
      m[$urandom_range(0, CHROM_W - 1)] ^= 1'b1;
      pop[i] = m;
    end
  endtask

endmodule
