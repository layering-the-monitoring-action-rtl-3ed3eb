// tmon: time monitor (TMON) of a nucleus.
//
// Measures the time between a start event instance (line START_SEL) and a
// done event instance (line DONE_SEL), in clock cycles, with a W-bit
// saturating counter (64 bits in the evaluated configurations). While a
// measurement runs the exported value is the time elapsed so far (so a
// watchdog rule in the global monitor can act before done arrives); after
// done it holds the execution time and is marked final, and the metric's
// update bit toggles. A start instance
// always restarts the measurement, also while one is running.
//
// Timing: if start is seen on ev_inst in cycle t0 and done in cycle t1,
// the final value is t1 - t0 and appears in cycle t1 + 1.
// From the paper: a TMON maps the assertion of start and done signals to an
// execution time; restart and saturation behaviour are this design's choice.
module tmon
  import mon_pkg::*;
#(
  parameter int unsigned N_EV      = 5,
  parameter int unsigned W         = 64,
  parameter int          START_SEL = 0,
  parameter int          DONE_SEL  = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_EV-1:0] ev_inst,
  output metric_t         metric,
  output logic            running
);

  localparam logic [W-1:0] MAX = '1;

  logic [W-1:0] cnt_q, cnt_inc;
  logic         final_q, upd_q, start, done;

  always_comb begin
    start   = ev_inst[START_SEL[$clog2(N_EV)-1:0]];
    done    = ev_inst[DONE_SEL[$clog2(N_EV)-1:0]];
    cnt_inc = (cnt_q != MAX) ? cnt_q + 1'b1 : cnt_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      running <= 1'b0;
      final_q <= 1'b0;
      upd_q   <= 1'b0;
    end else if (start) begin
      cnt_q   <= '0;
      running <= 1'b1;
      final_q <= 1'b0;
    end else if (running) begin
      cnt_q <= cnt_inc;
      if (done) begin
        running <= 1'b0;
        final_q <= 1'b1;
        upd_q   <= ~upd_q;
      end
    end
  end

  always_comb begin
    metric         = '0;
    metric.value   = MET_W'(cnt_q);
    metric.final_v = final_q;
    metric.upd     = upd_q;
  end

endmodule
