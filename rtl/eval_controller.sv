// Evaluation controller: runs the evolvable shaper's side of the GA.
//
// The processor keeps the population and applies the genetic operators; this
// controller conducts the process. It requests individuals one at a time
// (REQ), evaluates each on the shaper and hands back its fitness, counts the
// evaluations and, after POP_SIZE of them, tells the processor that the
// population is complete and the GA step should run (GEN_DONE).
//
// States:
//   IDLE   normal operation: the shaper filters the sensor input with the
//          operating configuration. An EVAL command latches the chromosome,
//          clears the shaper and the fitness accumulator, and goes to RUN.
//   RUN    N_SAMPLES clocks: one reference sample per clock into the shaper.
//   DRAIN  the last shaper output reaches the fitness accumulator.
//   DONE   fitness is written to the register file, the shaper is cleared,
//          REQ is raised again (and GEN_DONE on the last individual).
// An evaluation therefore takes N_SAMPLES + 2 clocks after the EVAL command
// (fit_we comes in the (N_SAMPLES+2)-th clock after cmd_eval). APPLY copies
// the chromosome into the operating configuration and clears the shaper;
// START begins an evolution (count reset, REQ and EVOLVE cleared, REQ
// raised). Commands that arrive while an evaluation runs are ignored.
//
// Triggering a re-tuning: CHECK runs the same evaluation on the operating
// configuration (not counted, no REQ). If its F2 is above `threshold`, the
// fitness evaluation has found the shaper out of tune and EVOLVE is raised
// until the next START. `irq` is REQ or EVOLVE.
//
// The whole handshake (REQ/GEN_DONE/EVOLVE, commands, threshold, interrupt)
// is this design's choice: the control module and its signals are not part
// of the published block diagram.
module eval_controller
  import cusp_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 72,
  parameter int unsigned POP_SIZE  = 125
) (
  input  logic               clk,
  input  logic               rst_n,
  // commands from the register file
  input  logic               cmd_eval,
  input  logic               cmd_apply,
  input  logic               cmd_start,
  input  logic               cmd_check,
  input  logic [CHROM_W-1:0] chrom,
  // shaper side
  output shaper_params_t     params,      // configuration the shaper uses now
  output logic               sel_ref,     // 1: shaper fed with v_ref
  output logic               ref_valid,   // one reference sample per clock in RUN
  output logic               shaper_clear,
  // fitness side
  output logic               acc_clear,
  output logic               acc_en,      // shaper output belongs to the evaluation
  output logic               fit_we,
  input  logic [FIT_W-1:0]   fitness,
  input  logic [FIT_W-1:0]   threshold,
  // status
  output logic               req,
  output logic               gen_done,
  output logic               busy,
  output logic               evolve,
  output logic [7:0]         count,
  output logic               irq
);

  localparam int unsigned NW = $clog2(N_SAMPLES + 1);

  ctrl_state_t    state;
  shaper_params_t op_params, ev_params;
  logic [NW-1:0]  n;
  logic           checking;  // the running evaluation is a CHECK

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      op_params <= '0;
      ev_params <= '0;
      n         <= '0;
      req       <= 1'b0;
      gen_done  <= 1'b0;
      count     <= '0;
      acc_en    <= 1'b0;
      evolve    <= 1'b0;
      checking  <= 1'b0;
    end else begin
      acc_en <= ref_valid;
      unique case (state)
        ST_IDLE: begin
          if (cmd_start) begin
            count    <= '0;
            req      <= 1'b1;
            gen_done <= 1'b0;
            evolve   <= 1'b0;
          end else if (cmd_eval) begin
            ev_params <= shaper_params_t'(chrom);
            req       <= 1'b0;
            gen_done  <= 1'b0;
            checking  <= 1'b0;
            n         <= '0;
            state     <= ST_RUN;
          end else if (cmd_check) begin
            ev_params <= op_params;
            checking  <= 1'b1;
            n         <= '0;
            state     <= ST_RUN;
          end else if (cmd_apply) begin
            op_params <= shaper_params_t'(chrom);
          end
        end
        ST_RUN: begin
          n <= n + 1'b1;
          if (n == NW'(N_SAMPLES - 1)) state <= ST_DRAIN;
        end
        ST_DRAIN: state <= ST_DONE;
        ST_DONE: begin
          if (checking) begin
            if (fitness > threshold) evolve <= 1'b1;
          end else begin
            req <= 1'b1;
            if (count == 8'(POP_SIZE - 1)) begin
              count    <= '0;
              gen_done <= 1'b1;
            end else begin
              count <= count + 1'b1;
            end
          end
          checking <= 1'b0;
          state    <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    sel_ref      = (state != ST_IDLE);
    ref_valid    = (state == ST_RUN);
    busy         = (state != ST_IDLE);
    fit_we       = (state == ST_DONE);
    acc_clear    = (state == ST_IDLE) && !cmd_start && (cmd_eval || cmd_check);
    shaper_clear = ((state == ST_IDLE) && !cmd_start && (cmd_eval || cmd_check || cmd_apply)) ||
                   (state == ST_DONE);
    params       = (state == ST_IDLE) ? op_params : ev_params;
    irq          = req || evolve;
  end

endmodule
