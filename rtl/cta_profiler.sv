// cta_profiler: the performance counters that sample one CTA of a new kernel
// and turn its event counts into the metric vector of the scalability
// predictor.
//
// While profiling, the counters add up the per-cycle events of the profiled SM
// (prof_events_t). When that CTA finishes (`cta_done`), the nine rates are
// computed one after another on a single shared fraction divider and the peak
// number of resident CTAs is taken as the concurrent-CTA metric. `valid`
// pulses once with the whole vector in `metrics` (unsigned Q8.16).
//
// Timing: `valid` rises 9 * (CNT_W + 16 + 3) cycles after the clock edge
// that samples `cta_done` (459 cycles at the defaults). A new `start` clears everything.
//
// The metric set and its definitions follow the paper: control divergence is
// idle cycles over execution cycles, coalescing is actual memory accesses over
// accesses in instructions, L1 miss rates, load and store instruction rates,
// and average NoC packet latency. Defining the MSHR rate as merged misses per
// L1D miss, taking the peak of resident CTAs, the counter widths and the
// sequential divider are this design's own choices.
module cta_profiler
  import amoeba_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // clear counters and begin profiling
  input  logic          cta_done,   // the profiled CTA has finished
  input  prof_events_t  ev,
  output logic          profiling,
  output logic          valid,
  output metric_t       metrics [NUM_METRICS]
);
  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_DIV, S_WAIT} state_e;
  state_e state;

  logic [CNT_W-1:0] c_cycles, c_ctrl_idle, c_inst, c_ld, c_st, c_mem_thread,
                    c_mem_actual, c_l1d_acc, c_l1d_miss, c_l1i_acc, c_l1i_miss,
                    c_l1c_acc, c_l1c_miss, c_mshr, c_noc_pkt, c_noc_lat;
  logic [3:0]       cta_peak;

  // ratio number r (0..8) -> metric slot and operands
  logic [3:0]       r;
  logic [CNT_W-1:0] num, den;
  metric_e          slot;

  always_comb begin
    unique case (r)
      4'd0:    begin slot = M_CTRL_DIV;   num = c_ctrl_idle;  den = c_cycles;     end
      4'd1:    begin slot = M_COALESCE;   num = c_mem_actual; den = c_mem_thread; end
      4'd2:    begin slot = M_L1D_MISS;   num = c_l1d_miss;   den = c_l1d_acc;    end
      4'd3:    begin slot = M_L1I_MISS;   num = c_l1i_miss;   den = c_l1i_acc;    end
      4'd4:    begin slot = M_L1C_MISS;   num = c_l1c_miss;   den = c_l1c_acc;    end
      4'd5:    begin slot = M_MSHR;       num = c_mshr;       den = c_l1d_miss;   end
      4'd6:    begin slot = M_LOAD_RATE;  num = c_ld;         den = c_inst;       end
      4'd7:    begin slot = M_STORE_RATE; num = c_st;         den = c_inst;       end
      default: begin slot = M_NOC;        num = c_noc_lat;    den = c_noc_pkt;    end
    endcase
  end

  logic             div_start, div_busy, div_done;
  logic [MET_W-1:0] div_q;

  frac_divider #(.NUM_W(CNT_W), .FRAC(MET_FRAC), .Q_W(MET_W)) u_div (
    .clk, .rst_n, .start(div_start), .num, .den,
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  assign profiling = (state == S_COUNT);
  assign div_start = (state == S_DIV);

  function automatic logic [CNT_W-1:0] sat_add(logic [CNT_W-1:0] a, logic [CNT_W-1:0] b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      valid <= 1'b0;
      r     <= '0;
      {c_cycles, c_ctrl_idle, c_inst, c_ld, c_st, c_mem_thread, c_mem_actual,
       c_l1d_acc, c_l1d_miss, c_l1i_acc, c_l1i_miss, c_l1c_acc, c_l1c_miss,
       c_mshr, c_noc_pkt, c_noc_lat} <= '0;
      cta_peak <= '0;
      for (int i = 0; i < NUM_METRICS; i++) metrics[i] <= '0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        state <= S_COUNT;
        {c_cycles, c_ctrl_idle, c_inst, c_ld, c_st, c_mem_thread, c_mem_actual,
         c_l1d_acc, c_l1d_miss, c_l1i_acc, c_l1i_miss, c_l1c_acc, c_l1c_miss,
         c_mshr, c_noc_pkt, c_noc_lat} <= '0;
        cta_peak <= '0;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_COUNT: begin
            c_cycles     <= sat_add(c_cycles,     CNT_W'(1));
            c_ctrl_idle  <= sat_add(c_ctrl_idle,  CNT_W'(ev.ctrl_idle));
            c_inst       <= sat_add(c_inst,       CNT_W'(ev.inst));
            c_ld         <= sat_add(c_ld,         CNT_W'(ev.ld_inst));
            c_st         <= sat_add(c_st,         CNT_W'(ev.st_inst));
            c_mem_thread <= sat_add(c_mem_thread, CNT_W'(ev.mem_thread));
            c_mem_actual <= sat_add(c_mem_actual, CNT_W'(ev.mem_actual));
            c_l1d_acc    <= sat_add(c_l1d_acc,    CNT_W'(ev.l1d_acc));
            c_l1d_miss   <= sat_add(c_l1d_miss,   CNT_W'(ev.l1d_miss));
            c_l1i_acc    <= sat_add(c_l1i_acc,    CNT_W'(ev.l1i_acc));
            c_l1i_miss   <= sat_add(c_l1i_miss,   CNT_W'(ev.l1i_miss));
            c_l1c_acc    <= sat_add(c_l1c_acc,    CNT_W'(ev.l1c_acc));
            c_l1c_miss   <= sat_add(c_l1c_miss,   CNT_W'(ev.l1c_miss));
            c_mshr       <= sat_add(c_mshr,       CNT_W'(ev.mshr_merge));
            c_noc_pkt    <= sat_add(c_noc_pkt,    CNT_W'(ev.noc_pkt));
            if (ev.noc_pkt)
              c_noc_lat  <= sat_add(c_noc_lat,    CNT_W'(ev.noc_lat));
            if (ev.cta_active > cta_peak) cta_peak <= ev.cta_active;
            if (cta_done) begin
              state <= S_DIV;
              r     <= '0;
              metrics[M_CONC_CTA] <= MET_W'(cta_peak) << MET_FRAC;
            end
          end
          S_DIV: state <= S_WAIT;   // divider started this cycle
          S_WAIT: begin
            if (div_done) begin
              metrics[slot] <= div_q;
              if (r == 4'd8) begin
                state <= S_IDLE;
                valid <= 1'b1;
              end else begin
                r     <= r + 1'b1;
                state <= S_DIV;
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
