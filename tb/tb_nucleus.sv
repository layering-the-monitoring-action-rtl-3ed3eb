// tb_nucleus: self-checking test of a nucleus with two programmable 16-bit
// EVMONs (one latched at line 2) and one 64-bit TMON (lines 1 -> 2).
// Checks the metric order, the register window (read back of counts, time,
// status and select) and that register writes reprogram the EVMONs.
module tb_nucleus;
  import mon_pkg::*;
  localparam int unsigned N = 5;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] ev;
  reg_req_t req;
  logic [31:0] rdata;
  metric_t metrics [3];
  logic [31:0] rdata_f;
  metric_t metrics_f [1];
  logic [31:0] rv;
  int checks = 0, failures = 0;

  nucleus #(
    .N_EV(N), .N_EVMON(2), .N_TMON(1), .EV_W(16), .TM_W(64), .PROG(1'b1),
    .EV_SEL('{0, 3, 0, 0}), .LATCH_SEL('{-1, 2, -1, -1}),
    .START_SEL('{1, 0, 0, 0}), .DONE_SEL('{2, 0, 0, 0})
  ) dut (.clk, .rst_n, .ev_inst(ev), .req, .rdata, .metrics);

  // A fixed (PROG = 0) nucleus on the same bus: writes must not change it.
  nucleus #(.N_EV(N), .N_EVMON(1), .N_TMON(0), .EV_W(10), .PROG(1'b0),
            .EV_SEL('{3, 0, 0, 0}))
    u_fixed (.clk, .rst_n, .ev_inst(ev), .req, .rdata(rdata_f), .metrics(metrics_f));

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk) req = '{wr: 1'b1, rd: 1'b0, addr: 12'(a), wdata: d};
    @(negedge clk) req = REQ_IDLE;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    req = '{wr: 1'b0, rd: 1'b1, addr: 12'(a), wdata: '0};
    #1;
    d = rdata;
    req = REQ_IDLE;
  endtask

  task automatic pulse(logic [N-1:0] v, int n);
    repeat (n) begin
      @(negedge clk) ev = v;
      @(negedge clk) ev = '0;
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev = '0; req = REQ_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    rd(8'h01, rv); check("reset select 0", rv, 0);
    rd(8'h05, rv); check("reset select 1", rv, 3);
    rd(8'h00, rv); check("reset enable", rv, 1);
    // A task: start, 6 beats on line 0, 4 MACs on line 3, done.
    pulse(5'b00010, 1);                 // start
    pulse(5'b00001, 6);
    pulse(5'b01000, 4);
    @(negedge clk) ev = 5'b00100;       // done
    @(negedge clk) ev = '0;
    @(negedge clk);
    check("metric0 running count", metrics[0].value, 6);
    check("metric1 latched count", metrics[1].value, 4);
    check("metric1 final", 64'(metrics[1].final_v), 1);
    // start at the 1st pulse cycle; done 1 + 2*10 + 1 = 22 cycles later
    check("metric2 time", metrics[2].value, 22);
    check("metric2 final", 64'(metrics[2].final_v), 1);
    rd(8'h02, rv); check("reg count0", rv, 6);
    rd(8'h06, rv); check("reg count1", rv, 4);
    rd(8'h04, rv); check("reg final1", rv, 32'h8000_0001);
    rd(8'h0a, rv); check("reg time lo", rv, 22);
    rd(8'h0b, rv); check("reg time hi", rv, 0);
    rd(8'h08, rv); check("reg tmon status", rv, 32'h8000_0000);
    // Reprogram EVMON0 to line 4, clear it, count 3.
    wr(8'h01, 32'd4);
    wr(8'h00, 32'd3);                   // enable + clear
    pulse(5'b00001, 2);
    pulse(5'b10000, 3);
    rd(8'h02, rv); check("reprogrammed count", rv, 3);
    check("fixed nucleus keeps its select", 64'(metrics_f[0].value), 4);
    // Disable EVMON0.
    wr(8'h00, 32'd0);
    pulse(5'b10000, 3);
    rd(8'h02, rv); check("disabled count", rv, 3);
    rd(8'h00, rv); check("disabled readback", rv, 0);
    // TMON running status while a task runs.
    pulse(5'b00010, 1);
    pulse(5'b00000, 2);
    rd(8'h08, rv); check("tmon running", rv, 1);
    #1;
    check("no read without rd", 64'(rdata), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
