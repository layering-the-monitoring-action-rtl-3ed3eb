// gm: global monitor (GM), the decision stage.
//
// Receives metric records from the GMI (valid/ready stream; always ready,
// one record per cycle). For every metric it keeps the last record, a
// count of records received and one programmable rule: compare the value
// with a 64-bit threshold (greater, less, not equal, equal; see
// mon_pkg::rule_mode_e), optionally only when the record is final. A record
// that breaks an enabled rule sets the metric's sticky violation flag and
// sends a one-cycle request on viol[id] to the interrupt controller.
// Examples: a watchdog is "time > limit" on a running time monitor; a
// transfer or computation fault check is "count != expected" on a final
// (latched) event count.
//
// Register window (word address, 8 bits, 8 words per metric m at 8*m):
//   +0 ctrl: bit0 enable, bit1 final-only, bits3:2 mode   (reset 0)
//   +1 threshold[31:0]   +2 threshold[63:32]
//   +3 last value[31:0]  +4 last value[63:32]             (read only)
//   +5 status: bit0 violated (write 1 to clear), bit1 last final
//   +6 number of records received (read only, wraps)
// Timing: viol is registered, one cycle after the record is accepted.
// From the paper: the GM makes the decision and triggers the reaction
// through the interrupt controller. The rule form and registers are this
// design's choices.
module gm
  import mon_pkg::*;
#(
  parameter int unsigned N_MET = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [ID_W-1:0]  in_id,
  input  metric_t          in_metric,
  input  reg_req_t         req,
  output logic [31:0]      rdata,
  output logic [N_MET-1:0] viol
);

  // Packed from bit 3 down to bit 0: mode[1:0], final-only, enable.
  typedef struct packed {
    rule_mode_e mode;
    logic       final_only;
    logic       en;
  } rule_ctrl_t;

  rule_ctrl_t      ctrl_q  [N_MET];
  logic [63:0]     thr_q   [N_MET];
  metric_t         last_q  [N_MET];
  logic            sticky_q[N_MET];
  logic [31:0]     nrec_q  [N_MET];

  logic [4:0] m_idx;
  logic [2:0] r_idx;
  assign m_idx = req.addr[7:3];
  assign r_idx = req.addr[2:0];

  // One record per cycle; no back-pressure is needed.
  assign in_ready = 1'b1;

  logic accept;
  logic broken;
  assign accept = in_valid && in_ready && (32'(in_id) < N_MET);

  always_comb begin
    broken = 1'b0;
    if (accept) begin
      automatic rule_ctrl_t  c = ctrl_q[in_id[$clog2(N_MET)-1:0]];
      automatic logic [63:0] t = thr_q[in_id[$clog2(N_MET)-1:0]];
      automatic logic [63:0] v = in_metric.value;
      if (c.en && (!c.final_only || in_metric.final_v)) begin
        unique case (c.mode)
          RULE_GT: broken = v >  t;
          RULE_LT: broken = v <  t;
          RULE_NE: broken = v != t;
          RULE_EQ: broken = v == t;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < N_MET; m++) begin
        ctrl_q[m]   <= '0;
        thr_q[m]    <= '0;
        last_q[m]   <= '0;
        sticky_q[m] <= 1'b0;
        nrec_q[m]   <= '0;
      end
      viol <= '0;
    end else begin
      viol <= '0;
      for (int m = 0; m < N_MET; m++) begin
        if (req.wr && 32'(m_idx) == m) begin
          unique case (r_idx)
            3'd0: ctrl_q[m] <= rule_ctrl_t'(req.wdata[3:0]);
            3'd1: thr_q[m][31:0]  <= req.wdata;
            3'd2: thr_q[m][63:32] <= req.wdata;
            3'd5: if (req.wdata[0]) sticky_q[m] <= 1'b0;
            default: ;
          endcase
        end
        if (accept && 32'(in_id) == m) begin
          last_q[m] <= in_metric;
          nrec_q[m] <= nrec_q[m] + 1'b1;
          if (broken) begin
            sticky_q[m] <= 1'b1;
            viol[m]     <= 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    rdata = '0;
    for (int m = 0; m < N_MET; m++) begin
      if (req.rd && 32'(m_idx) == m) begin
        unique case (r_idx)
          3'd0: rdata[3:0] = ctrl_q[m];
          3'd1: rdata = thr_q[m][31:0];
          3'd2: rdata = thr_q[m][63:32];
          3'd3: rdata = last_q[m].value[31:0];
          3'd4: rdata = last_q[m].value[63:32];
          3'd5: rdata[1:0] = {last_q[m].final_v, sticky_q[m]};
          3'd6: rdata = nrec_q[m];
          default: ;
        endcase
      end
    end
  end

endmodule
