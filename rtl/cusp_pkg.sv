// Shared widths, types and the register map of the evolvable cusp-like shaper.
//
// The widths are the bus widths of the shaper datapath: 14-bit samples and
// first differences, 6-bit delay parameters k and l, 14-bit two's complement
// gains m1 and m2, a 21-bit p(n) path and a 35-bit q(n)/s(n) path. An
// individual of the genetic algorithm is the 40-bit concatenation
// {k, l, m1, m2}, k in the most significant bits, so the chromosome can be
// cast straight onto shaper_params_t. The fitness register is 32 bits wide.
//
// The register map (byte addresses on the 32-bit APB bus) has the three
// registers of the prototype, chrom_msb, chrom_lsb and fitness, plus a
// control/status word and a threshold register that this design adds so that
// the processor and the evaluation controller can hand individuals to each
// other and the fitness evaluation can trigger a re-tuning.
package cusp_pkg;

  localparam int unsigned DATA_W   = 14;  // v(n), d^k(n), d^1(n)
  localparam int unsigned KL_W     = 6;   // k and l
  localparam int unsigned M_W      = 14;  // m1 and m2, two's complement
  localparam int unsigned P_W      = 21;  // p(n) and the X3 product
  localparam int unsigned S_W      = 35;  // q(n), s(n) and the X1/X2 products
  localparam int unsigned CHROM_W  = KL_W + KL_W + M_W + M_W;  // 40
  localparam int unsigned FIT_W    = 32;  // fitness as seen by the processor
  localparam int unsigned MAX_DELAY = 63; // largest delay of DELAY1 and DELAY2

  // One shaper configuration, laid out exactly like the chromosome.
  typedef struct packed {
    logic [KL_W-1:0]       k;
    logic [KL_W-1:0]       l;
    logic signed [M_W-1:0] m1;
    logic signed [M_W-1:0] m2;
  } shaper_params_t;

  // Byte addresses of the APB register file.
  localparam logic [7:0] ADDR_CHROM_MSB = 8'h00;  // chromosome bits 39..32 in bits 7..0
  localparam logic [7:0] ADDR_CHROM_LSB = 8'h04;  // chromosome bits 31..0
  localparam logic [7:0] ADDR_FITNESS   = 8'h08;  // read only
  localparam logic [7:0] ADDR_CTRL      = 8'h0C;  // write: commands, read: status
  localparam logic [7:0] ADDR_THRESHOLD = 8'h10;  // F2 above which CHECK triggers evolution

  // Bits of a write to ADDR_CTRL (each is a one-cycle command).
  localparam int unsigned CTRL_EVAL  = 0;  // evaluate the chromosome in chrom_msb/lsb
  localparam int unsigned CTRL_APPLY = 1;  // make it the operating configuration
  localparam int unsigned CTRL_START = 2;  // start an evolution: new population count
  localparam int unsigned CTRL_CHECK = 3;  // evaluate the operating configuration

  // Bits of a read of ADDR_CTRL.
  localparam int unsigned STAT_REQ      = 0;  // controller requests the next individual
  localparam int unsigned STAT_GEN_DONE = 1;  // a whole population has been evaluated
  localparam int unsigned STAT_BUSY     = 2;  // an evaluation is running
  localparam int unsigned STAT_SAT      = 3;  // last fitness was clipped to 2^32-1
  localparam int unsigned STAT_EVOLVE   = 4;  // a CHECK found F2 above the threshold
  // bits 15..8: number of individuals evaluated in the current generation

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,  // shaper filters the sensor input with the operating configuration
    ST_RUN   = 2'd1,  // reference vector is being fed to the shaper
    ST_DRAIN = 2'd2,  // last output sample reaches the fitness accumulator
    ST_DONE  = 2'd3   // fitness is written to the register file
  } ctrl_state_t;

endpackage
