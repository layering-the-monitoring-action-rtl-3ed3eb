// intc: interrupt controller, the reaction stage.
//
// Each request pulse on src sets a sticky pending bit. The interrupt line
// irq is high while any pending bit is also enabled; irq_id gives the
// lowest such source. Software clears pending bits by writing ones.
// Register window (word address, 4 bits):
//   0 pending (read; write 1 to clear)   1 enable (read/write, reset 0)
//   2 {irq, irq_id} (read only)
// A request and a clear of the same bit in the same cycle leave it set.
// Timing: irq rises one cycle after the request pulse.
// From the paper: the global monitor triggers the reaction through an
// interrupt controller; its organisation here is this design's choice.
module intc
  import mon_pkg::*;
#(
  parameter int unsigned N_SRC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_SRC-1:0] src,
  input  reg_req_t         req,
  output logic [31:0]      rdata,
  output logic             irq,
  output logic [ID_W-1:0]  irq_id
);

  logic [N_SRC-1:0] pend_q, en_q, act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0;
      en_q   <= '0;
    end else begin
      if (req.wr && req.addr[3:0] == 4'd0)
        pend_q <= (pend_q & ~req.wdata[N_SRC-1:0]) | src;
      else
        pend_q <= pend_q | src;
      if (req.wr && req.addr[3:0] == 4'd1) en_q <= req.wdata[N_SRC-1:0];
    end
  end

  always_comb begin
    act    = pend_q & en_q;
    irq    = |act;
    irq_id = '0;
    for (int i = N_SRC - 1; i >= 0; i--) if (act[i]) irq_id = ID_W'(i);
  end

  always_comb begin
    rdata = '0;
    if (req.rd) begin
      unique case (req.addr[3:0])
        4'd0: rdata[N_SRC-1:0] = pend_q;
        4'd1: rdata[N_SRC-1:0] = en_q;
        4'd2: rdata = {irq, 23'd0, irq_id};
        default: ;
      endcase
    end
  end

endmodule
