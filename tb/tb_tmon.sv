// tb_tmon: self-checking test of the time monitor.
// Measures tasks of known length (start instance in cycle t0, done in
// cycle t1, expected t1 - t0), checks the running value, the final flag,
// a restart while running, and the value appearing one cycle after done.
module tb_tmon;
  import mon_pkg::*;
  localparam int unsigned N = 5;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] ev;
  metric_t m;
  logic running;
  int checks = 0, failures = 0;

  tmon #(.N_EV(N), .W(64), .START_SEL(1), .DONE_SEL(2)) dut (
    .clk, .rst_n, .ev_inst(ev), .metric(m), .running);

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    ev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      len = 1 + int'($urandom_range(0, 200));
      @(negedge clk) ev = 5'b00010;          // start seen in cycle t0
      @(negedge clk) ev = '0;
      check("running", 64'(running), 1);
      check("not final", 64'(m.final_v), 0);
      repeat (len - 1) @(negedge clk);
      check("running value", m.value, 64'(len - 1));
      ev = 5'b00100;                         // done seen in cycle t0+len
      @(negedge clk) ev = '0;
      check("time", m.value, 64'(len));
      check("final", 64'(m.final_v), 1);
      check("update toggles per done", 64'(m.upd), 64'((t + 1) % 2));
      check("stopped", 64'(running), 0);
      repeat (3) @(negedge clk);
      check("held", m.value, 64'(len));
    end
    // Restart while running.
    @(negedge clk) ev = 5'b00010;
    @(negedge clk) ev = '0;
    repeat (30) @(negedge clk);
    ev = 5'b00010;
    @(negedge clk) ev = '0;
    repeat (9) @(negedge clk);
    ev = 5'b00100;
    @(negedge clk) ev = '0;
    check("restarted time", m.value, 64'd10);
    // Done without start leaves the value alone.
    ev = 5'b00100;
    @(negedge clk) ev = '0;
    repeat (2) @(negedge clk);
    check("done while idle", m.value, 64'd10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
