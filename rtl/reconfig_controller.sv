// reconfig_controller: the online reconfiguration controller that chooses,
// once per kernel, between scale-out SMs and fused (scale-up) SM pairs.
//
// It runs the loop "start a new kernel -> profile a CTA -> predict
// scalability -> fuse SMs (or not) -> run the kernel -> next kernel". It holds
// the CTA profiler and the scalability predictor. A kernel starts on
// scale-out SMs (fuse_mode = 0) while its first CTA is profiled; when the
// metrics are ready the predictor runs, and its decision is applied to every
// SM pair for the rest of the kernel (fuse_mode, with a one-cycle `reconfig`
// pulse). When the kernel ends the controller waits for the next kernel.
//
// Interface: `kernel_start` and `kernel_done` are one-cycle pulses from the
// kernel dispatcher, `cta_done` marks the end of the profiled CTA, `ev` are
// that CTA's SM events. `decision_valid` pulses with `fuse_mode` updated.
// Timing: the decision follows `cta_done` by the profiler time (459 cycles)
// plus the predictor (1 + 11 cycles): fuse_mode and decision_valid change on
// the 472nd clock edge after the one that samples `cta_done`.
//
// Profiling on scale-out SMs and keeping the mode until the next kernel are
// this design's reading of the loop; the loop itself follows the paper.
module reconfig_controller
  import amoeba_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          kernel_start,
  input  logic          kernel_done,
  input  logic          cta_done,
  input  prof_events_t  ev,
  output logic          fuse_mode,       // 1: SM pairs run fused (scale up)
  output logic          reconfig,        // pulse: fuse_mode has just been set
  output logic          decision_valid,
  output logic          profiling,
  output logic signed [ACC_W-1:0] logit, // last prediction's log-odds
  output metric_t       metrics [NUM_METRICS]
);
  typedef enum logic [2:0] {
    C_IDLE, C_PROFILE, C_PREDICT, C_RUN
  } cstate_e;
  cstate_e state;

  logic prof_start, prof_valid;
  logic pred_done, pred_busy, pred_fuse;

  assign prof_start = kernel_start;

  cta_profiler u_prof (
    .clk, .rst_n,
    .start    (prof_start),
    .cta_done (cta_done && state == C_PROFILE),
    .ev,
    .profiling,
    .valid    (prof_valid),
    .metrics
  );

  scalability_predictor u_pred (
    .clk, .rst_n,
    .start   (prof_valid),
    .metrics (metrics),
    .busy    (pred_busy),
    .done    (pred_done),
    .fuse    (pred_fuse),
    .logit
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= C_IDLE;
      fuse_mode      <= 1'b0;
      reconfig       <= 1'b0;
      decision_valid <= 1'b0;
    end else begin
      reconfig       <= 1'b0;
      decision_valid <= 1'b0;
      if (kernel_start) begin
        state     <= C_PROFILE;
        if (fuse_mode) reconfig <= 1'b1;
        fuse_mode <= 1'b0;           // profile on the scale-out baseline
      end else begin
        unique case (state)
          C_IDLE:    ;
          C_PROFILE: if (prof_valid) state <= C_PREDICT;
          C_PREDICT: if (pred_done) begin
            state          <= C_RUN;
            decision_valid <= 1'b1;
            fuse_mode      <= pred_fuse;
            reconfig       <= pred_fuse;
          end
          C_RUN:     if (kernel_done) state <= C_IDLE;
          default:   state <= C_IDLE;
        endcase
      end
    end
  end
endmodule
