// gmi: global monitor interface (GMI).
//
// Collects the metrics of all nuclei and forwards them to the global
// monitor. The GMI remembers the last record it forwarded for each metric;
// a metric whose current record (value or final flag) differs from it is
// "dirty". Whenever the output register is free (empty, or its content is
// being accepted), the next dirty metric after the one sent last, in
// round-robin order, is loaded into the output register together with its
// index (out_id). The output follows a valid/ready handshake: id and
// record stay stable while out_valid is high and out_ready is low.
//
// Timing: a metric that changes in cycle t is presented in cycle t + 1 if
// the output is free and no other metric is ahead of it; with k dirty
// metrics each is visited at least once every k accepted transfers. A
// running time monitor is dirty every cycle, so it is resent as often as
// the round-robin allows.
// From the paper: the GMI sends the nucleus data toward the global monitor.
// Change detection, round-robin order and the handshake are this design's
// choices.
module gmi
  import mon_pkg::*;
#(
  parameter int unsigned N_MET = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  metric_t         metrics [N_MET],
  output logic            out_valid,
  input  logic            out_ready,
  output logic [ID_W-1:0] out_id,
  output metric_t         out_metric,
  output logic [N_MET-1:0] dirty
);

  localparam int unsigned PW = (N_MET > 1) ? $clog2(N_MET) : 1;

  metric_t         last_q [N_MET];
  logic [PW-1:0]   ptr_q;
  logic            found;
  logic [PW-1:0]   pick;
  logic            load;

  always_comb begin
    for (int i = 0; i < N_MET; i++) dirty[i] = (metrics[i] != last_q[i]);
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N_MET; k++) begin
      automatic int unsigned idx = (32'(ptr_q) + k) % N_MET;
      if (!found && dirty[idx]) begin
        found = 1'b1;
        pick  = PW'(idx);
      end
    end
    load = found && (!out_valid || out_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_MET; i++) last_q[i] <= '0;
      ptr_q      <= PW'(N_MET - 1);
      out_valid  <= 1'b0;
      out_id     <= '0;
      out_metric <= '0;
    end else begin
      if (load) begin
        out_valid    <= 1'b1;
        out_id       <= ID_W'(pick);
        out_metric   <= metrics[pick];
        last_q[pick] <= metrics[pick];
        ptr_q        <= pick;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // Handshake rule: a presented transfer is held until it is accepted.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_id) && $stable(out_metric));

endmodule
