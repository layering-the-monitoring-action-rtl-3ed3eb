// tb_gmi: self-checking test of the global monitor interface.
// Four metrics change at random; the receiver applies random back-pressure.
// Checks: every accepted record equals the metric's value at the time it
// was loaded (tracked by a reference that records changes), nothing is sent
// for an unchanged metric, the last value of every metric is eventually
// delivered, the round-robin order, and the hold rule under back-pressure.
module tb_gmi;
  import mon_pkg::*;
  localparam int unsigned M = 4;

  logic clk = 0, rst_n = 0;
  metric_t metrics [M];
  logic out_valid, out_ready;
  logic [ID_W-1:0] out_id;
  metric_t out_metric;
  logic [M-1:0] dirty;
  int checks = 0, failures = 0, stalls = 0, contention = 0;
  metric_t delivered [M];
  int n_rx [M];

  gmi #(.N_MET(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor of accepted transfers and of the hold rule.
  logic            pv = 1'b0;
  logic [ID_W-1:0] pid;
  metric_t         pm;
  logic            pr;
  always @(posedge clk) if (rst_n) begin
    if (pv && !pr) begin
      checks++;
      if (!(out_valid && out_id == pid && out_metric == pm)) begin
        failures++;
        $display("hold rule broken");
      end
    end
    if (out_valid && out_ready) begin
      delivered[out_id] = out_metric;
      n_rx[out_id]++;
    end
    if (out_valid && !out_ready) stalls++;
    if ($countones(dirty) > 1) contention++;
    pv = out_valid; pid = out_id; pm = out_metric; pr = out_ready;
  end

  initial begin
    for (int i = 0; i < M; i++) begin metrics[i] = '0; delivered[i] = '0; n_rx[i] = 0; end
    out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Nothing changed: nothing sent.
    repeat (5) @(negedge clk);
    check("idle no valid", 64'(out_valid), 0);
    // One change on metric 2: sent once, one cycle later.
    metrics[2] = '{upd: 1'b0, final_v: 1'b1, value: 64'h1234};
    @(negedge clk);
    check("valid after change", 64'(out_valid), 1);
    check("id", 64'(out_id), 2);
    check("value", out_metric.value, 64'h1234);
    check("final", 64'(out_metric.final_v), 1);
    @(negedge clk);
    check("sent once", 64'(out_valid), 0);
    // All four change together with the receiver ready: round robin from
    // the one after metric 2.
    for (int i = 0; i < M; i++) metrics[i].value = 64'(100 + i);
    @(negedge clk); check("rr 0", 64'(out_id), 3);
    @(negedge clk); check("rr 1", 64'(out_id), 0);
    @(negedge clk); check("rr 2", 64'(out_id), 1);
    @(negedge clk); check("rr 3", 64'(out_id), 2);
    @(negedge clk); check("rr done", 64'(out_valid), 0);
    // Only the update bit changes: the same value is sent again.
    metrics[1].upd = ~metrics[1].upd;
    @(negedge clk);
    check("update resent", 64'(out_valid), 1);
    check("update id", 64'(out_id), 1);
    check("update value", out_metric.value, 101);
    // Random traffic with back-pressure.
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if ($urandom_range(0, 2) == 0) begin
        automatic int k = $urandom_range(0, M - 1);
        metrics[k].value   = metrics[k].value + 64'($urandom_range(1, 9));
        metrics[k].final_v = 1'($urandom);
      end
    end
    out_ready = 1;
    repeat (20) @(negedge clk);
    for (int i = 0; i < M; i++) begin
      check("last value delivered", delivered[i], metrics[i]);
      checks++;
      if (n_rx[i] == 0) failures++;
    end
    checks++;
    if (stalls == 0 || contention == 0) begin
      failures++;
      $display("stalls=%0d contention=%0d", stalls, contention);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
