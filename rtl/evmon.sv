// evmon: event monitor (EVMON) of a nucleus.
//
// Counts the event instances of one event line coming from the adapter.
// The counter is W bits wide (32 and 10 in the evaluated configurations)
// and saturates at its maximum. If LATCH_SEL names an event line, an
// instance on that line (for example the "done" of a task) copies the count,
// including an instance of the same cycle, into the exported value, marks it
// final and restarts the count: the global monitor then sees one final count
// per task; the update bit of the metric toggles at each latch. With
// LATCH_SEL < 0 the exported value is the running count.
//
// With PROG = 1 (the "P", programmability, of the paper) software controls
// the enable, a clear pulse and which event line is counted (cfg_*).
// With PROG = 0 the monitor always counts line EV_SEL and cfg_* are unused.
//
// Timing: the count includes an instance one clock after it is seen on
// ev_inst; metric is a register output.
// From the paper: an EVMON aggregates event instances into a metric, with a
// size and optional programmability. Saturation, the latch event and the
// configuration fields are this design's choices.
module evmon
  import mon_pkg::*;
#(
  parameter int unsigned N_EV      = 5,
  parameter int unsigned W         = 32,
  parameter bit          PROG      = 1'b0,
  parameter int          EV_SEL    = 0,
  parameter int          LATCH_SEL = -1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_EV-1:0] ev_inst,
  input  logic            cfg_en,
  input  logic            cfg_clr,
  input  logic [7:0]      cfg_sel,
  output metric_t         metric
);

  localparam logic [W-1:0] MAX = '1;

  logic [W-1:0] cnt_q, snap_q, cnt_inc;
  logic         final_q, upd_q;
  logic         en, hit, latch, clr;
  logic [7:0]   sel;

  always_comb begin
    sel = PROG ? cfg_sel : 8'(EV_SEL);
    en  = PROG ? cfg_en  : 1'b1;
    clr = PROG ? cfg_clr : 1'b0;
    hit = en && (32'(sel) < N_EV) && ev_inst[sel[$clog2(N_EV)-1:0]];
    cnt_inc = (hit && cnt_q != MAX) ? cnt_q + 1'b1 : cnt_q;
    latch = (LATCH_SEL >= 0) && ev_inst[LATCH_SEL[$clog2(N_EV)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      snap_q  <= '0;
      final_q <= 1'b0;
      upd_q   <= 1'b0;
    end else if (clr) begin
      cnt_q   <= '0;
      snap_q  <= '0;
      final_q <= 1'b0;
    end else if (latch) begin
      snap_q  <= cnt_inc;
      cnt_q   <= '0;
      final_q <= 1'b1;
      upd_q   <= ~upd_q;
    end else begin
      cnt_q   <= cnt_inc;
    end
  end

  always_comb begin
    metric = '0;
    if (LATCH_SEL >= 0) begin
      metric.value   = MET_W'(snap_q);
      metric.final_v = final_q;
      metric.upd     = upd_q;
    end else begin
      metric.value   = MET_W'(cnt_q);
    end
  end

endmodule
