// scalability_predictor: the binary logistic-regression model that decides
// whether a kernel should run on fused (scale-up) or on scale-out SMs.
//
// The model is linear in the log-odds domain: logit = b0 + sum(b_i * x_i).
// The probability of "scale up" exceeds one half exactly when the logit is
// positive, so no exponential is evaluated: a single multiply-accumulate unit
// walks the ten metrics, one per cycle, adds each metric times its
// coefficient to the constant term, and `fuse` is the sign test logit > 0.
// The coefficients are those of the trained model (amoeba_pkg::COEF).
//
// Interface and timing: pulse `start` with `metrics` valid (they are copied on
// that edge). The MAC is two stages (multiply register, then accumulate), so
// `done` pulses NUM_METRICS + 1 = 11 cycles after the `start` edge with
// `fuse` and the full-precision `logit` (signed, 26 fractional bits). `fuse`
// and `logit` then hold until the next `start`.
//
// The formats (metrics Q8.16, coefficients Q13.10) and the one-term-per-cycle
// schedule are this design's own choices; the model, its coefficients and the
// positive-sum rule follow the paper.
module scalability_predictor
  import amoeba_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  metric_t                 metrics [NUM_METRICS],
  output logic                    busy,
  output logic                    done,
  output logic                    fuse,
  output logic signed [ACC_W-1:0] logit
);
  localparam int unsigned PROD_W = COEF_W + MET_W + 1;
  localparam int unsigned IDX_W  = $clog2(NUM_METRICS + 1);

  metric_t                    x [NUM_METRICS];
  logic [IDX_W-1:0]           idx;       // term being multiplied
  logic                       mul_v;     // product register holds a term
  logic signed [PROD_W-1:0]   prod;
  logic signed [ACC_W-1:0]    acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      fuse  <= 1'b0;
      logit <= '0;
      idx   <= '0;
      mul_v <= 1'b0;
      prod  <= '0;
      acc   <= '0;
      for (int i = 0; i < NUM_METRICS; i++) x[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        idx   <= '0;
        mul_v <= 1'b0;
        // constant term, aligned to the product's 26 fractional bits
        acc   <= ACC_W'(COEF_CONST) <<< MET_FRAC;
        for (int i = 0; i < NUM_METRICS; i++) x[i] <= metrics[i];
      end else if (busy) begin
        // stage 1: multiply
        if (idx < IDX_W'(NUM_METRICS)) begin
          prod  <= COEF[idx] * $signed({1'b0, x[idx]});
          mul_v <= 1'b1;
          idx   <= idx + 1'b1;
        end else begin
          mul_v <= 1'b0;
        end
        // stage 2: accumulate
        if (mul_v) acc <= acc + ACC_W'(prod);
        if (mul_v && idx == IDX_W'(NUM_METRICS)) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          logit <= acc + ACC_W'(prod);
          fuse  <= (acc + ACC_W'(prod)) > 0;
        end
      end
    end
  end
endmodule
