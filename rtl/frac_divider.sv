// frac_divider: sequential restoring divider that turns a ratio of two event
// counts into an unsigned fixed-point fraction, q = (num << FRAC) / den,
// saturated to Q_W bits. A zero denominator gives 0.
//
// Interface: pulse `start` with `num` and `den` stable for that cycle; `done`
// pulses with `q` valid exactly NUM_W + FRAC + 1 cycles later (one quotient bit
// per cycle plus one cycle to saturate). `busy` is high in between. Used by the
// CTA profiler; its structure is this design's own choice.
module frac_divider #(
  parameter int unsigned NUM_W = 32,
  parameter int unsigned FRAC  = 16,
  parameter int unsigned Q_W   = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [NUM_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [Q_W-1:0]   q
);
  localparam int unsigned DIV_W = NUM_W + FRAC;

  logic [DIV_W-1:0]  dividend;  // shifts out toward the remainder
  logic [DIV_W-1:0]  quot;
  logic [NUM_W:0]    rem;
  logic [NUM_W-1:0]  divisor;
  logic [$clog2(DIV_W+1)-1:0] cnt;
  logic              fin;

  logic [NUM_W:0]    rem_sh;
  assign rem_sh = {rem[NUM_W-1:0], dividend[DIV_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      fin      <= 1'b0;
      done     <= 1'b0;
      q        <= '0;
      dividend <= '0;
      quot     <= '0;
      rem      <= '0;
      divisor  <= '0;
      cnt      <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        dividend <= {num, {FRAC{1'b0}}};
        divisor  <= den;
        quot     <= '0;
        rem      <= '0;
        cnt      <= DIV_W[$clog2(DIV_W+1)-1:0];
      end else if (busy) begin
        dividend <= dividend << 1;
        if (rem_sh >= {1'b0, divisor}) begin
          rem  <= rem_sh - {1'b0, divisor};
          quot <= {quot[DIV_W-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          quot <= {quot[DIV_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end
      end
      if (fin) begin
        done <= 1'b1;
        if (divisor == '0)                 q <= '0;
        else if (|quot[DIV_W-1:Q_W])       q <= '1;
        else                               q <= quot[Q_W-1:0];
      end
    end
  end
endmodule
