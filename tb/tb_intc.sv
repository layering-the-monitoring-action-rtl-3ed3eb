// tb_intc: self-checking test of the interrupt controller.
// Random request pulses, random enable masks and write-one-to-clear writes;
// pending bits, irq and irq_id are compared each cycle with a reference.
module tb_intc;
  import mon_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] src;
  reg_req_t req;
  logic [31:0] rdata;
  logic irq;
  logic [ID_W-1:0] irq_id;
  logic [31:0] rv;
  int checks = 0, failures = 0, n_irq = 0;
  logic [N-1:0] pend, en;

  intc #(.N_SRC(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic rd(int a, output logic [31:0] d);
    reg_req_t save = req;
    req = '{wr: 1'b0, rd: 1'b1, addr: 12'(a), wdata: '0};
    #1;
    d = rdata;
    req = save;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ID_W-1:0] id;
    src = '0; req = REQ_IDLE; pend = '0; en = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // A request with the source disabled: pending but no irq.
    @(negedge clk) src = 4'b0100;
    @(negedge clk) src = '0;
    pend = 4'b0100;
    rd(0, rv); check("pending set", rv, 4);
    check("no irq when disabled", 64'(irq), 0);
    // Enable: irq rises.
    @(negedge clk) req = '{wr: 1'b1, rd: 1'b0, addr: 12'd1, wdata: 32'hF};
    en = 4'hF;
    @(negedge clk) req = REQ_IDLE;
    check("irq", 64'(irq), 1);
    check("irq id", 64'(irq_id), 2);
    rd(2, rv); check("status reg", rv, 32'h8000_0002);
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      src = ($urandom_range(0, 3) == 0) ? N'($urandom) : '0;
      req = REQ_IDLE;
      case ($urandom_range(0, 5))
        0: req = '{wr: 1'b1, rd: 1'b0, addr: 12'd0, wdata: 32'($urandom)};
        1: req = '{wr: 1'b1, rd: 1'b0, addr: 12'd1, wdata: 32'($urandom)};
        default: ;
      endcase
      // Reference update for the coming clock edge.
      if (req.wr && req.addr == 0) pend = (pend & ~req.wdata[N-1:0]) | src;
      else                         pend = pend | src;
      if (req.wr && req.addr == 1) en = req.wdata[N-1:0];
      @(posedge clk);
      #1;
      id = '0;
      for (int i = N - 1; i >= 0; i--) if (pend[i] && en[i]) id = ID_W'(i);
      rd(0, rv); check("pending", rv, 64'(pend));
      rd(1, rv); check("enable", rv, 64'(en));
      check("irq", 64'(irq), 64'(|(pend & en)));
      if (|(pend & en)) begin
        check("irq id", 64'(irq_id), 64'(id));
        n_irq++;
      end
    end
    checks++;
    if (n_irq == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
