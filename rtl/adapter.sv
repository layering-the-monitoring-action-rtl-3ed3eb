// adapter: event-trigger stage of the monitoring layer.
//
// The adapter is the only block (with the nucleus) that knows the monitored
// platform. It samples the raw trigger lines of the platform once per clock
// and turns each line into event instances: a one-cycle pulse on ev_inst.
// A line marked in EDGE_MASK is a level signal (a start or done flag) and
// produces one instance on its rising edge; any other line (a bus handshake
// such as valid&ready) produces one instance for every cycle it is high.
//
// Timing: ev_inst is registered; an instance appears one clock after the
// raw line was sampled high (level) or went high (edge).
// From the paper: an adapter samples the event instances and passes them to
// data capture. The level/edge choice and the single register stage (same
// clock domain as the platform) are this design's choices.
module adapter #(
  parameter int unsigned       N_EV      = 5,
  parameter logic [N_EV-1:0]   EDGE_MASK = '0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_EV-1:0] ev_raw,
  output logic [N_EV-1:0] ev_inst
);

  logic [N_EV-1:0] prev_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q  <= '0;
      ev_inst <= '0;
    end else begin
      prev_q  <= ev_raw;
      ev_inst <= (EDGE_MASK & ev_raw & ~prev_q) | (~EDGE_MASK & ev_raw);
    end
  end

endmodule
