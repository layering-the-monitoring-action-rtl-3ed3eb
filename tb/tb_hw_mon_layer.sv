// tb_hw_mon_layer: end-to-end test of the monitoring layer, with the top at
// its default parameters (configuration Y1: 1E32 programmable, 1T64, 2E10).
//
// The testbench plays the monitored platform: for each hardware task of a
// multiply-and-accumulate accelerator it drives data beats on the
// interconnect, the start level, one MAC event per operation, result
// writes and the done level. Software is modelled through the register
// port. Rules programmed in the global monitor:
//   metric 0 (beats per task, final)   != BEATS  -> transfer fault  (RQM1)
//   metric 1 (execution time)          >  LIMIT  -> watchdog        (RQM4)
//   metric 2 (MACs per task, final)    != MACS   -> computation fault (RQM3)
//   metric 3 (writes per task, final)  != WRITES -> computation fault (RQM3)
// The execution time (RQM2) and the counts for throughput (RQM5) are read
// back and compared with the cycle counts the testbench itself drove.
// Each mechanism must occur at least once: clean task, transfer fault,
// computation fault, watchdog, reprogrammed event select, GMI contention,
// interrupt clear.
module tb_hw_mon_layer;
  import mon_pkg::*;

  localparam int BEATS = 16, MACS = 16, WRITES = 1, LIMIT = 200;

  logic clk = 0, rst_n = 0;
  logic [4:0] ev_raw;
  reg_req_t req;
  logic [31:0] rdata;
  logic irq;
  logic [ID_W-1:0] irq_id;
  logic gmi_valid;
  logic [ID_W-1:0] gmi_id;
  logic [3:0] gmi_dirty;

  hw_mon_layer dut (.*);

  int checks = 0, failures = 0;
  int n_clean = 0, n_tf = 0, n_cf = 0, n_wd = 0, n_prog = 0, n_clear = 0, n_cont = 0;
  longint cyc = 0;
  logic [31:0] rv;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if ($countones(gmi_dirty) > 1) n_cont++;
  end

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk) req = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(negedge clk) req = REQ_IDLE;
  endtask

  task automatic rd(logic [11:0] a, output logic [31:0] d);
    req = '{wr: 1'b0, rd: 1'b1, addr: a, wdata: '0};
    #1;
    d = rdata;
    req = REQ_IDLE;
  endtask

  localparam logic [11:0] GM = 12'h400, IC = 12'h800, NUC_INT = 12'h000,
                          NUC_DM = 12'h100, NUC_CORE = 12'h200;

  task automatic rule(int m, rule_mode_e md, bit fo, logic [63:0] t);
    wr(GM + 12'(8 * m + 1), t[31:0]);
    wr(GM + 12'(8 * m + 2), t[63:32]);
    wr(GM + 12'(8 * m), {28'd0, md, fo, 1'b1});
  endtask

  // One hardware task; returns the execution time the testbench drove
  // (cycles from the rising edge of start to the rising edge of done).
  task automatic run_task(int beats, int macs, int writes, int extra, output longint t_exec);
    longint t0;
    for (int i = 0; i < beats; i++) begin
      @(negedge clk) ev_raw = 5'b00001;
      if (i % 3 == 2) begin @(negedge clk) ev_raw = '0; end
    end
    @(negedge clk) ev_raw = 5'b00010;            // start rises
    t0 = cyc;
    @(negedge clk) ev_raw = 5'b00010;
    for (int i = 0; i < macs; i++)   begin @(negedge clk) ev_raw = 5'b01010; end
    for (int i = 0; i < writes; i++) begin @(negedge clk) ev_raw = 5'b10010; end
    repeat (extra) begin @(negedge clk) ev_raw = 5'b00010; end
    @(negedge clk) ev_raw = 5'b00100;            // start falls, done rises
    t_exec = cyc - t0;
    @(negedge clk) ev_raw = 5'b00100;
    @(negedge clk) ev_raw = '0;
    repeat (12) @(negedge clk);
  endtask

  task automatic clear_all();
    for (int m = 0; m < 4; m++) wr(GM + 12'(8 * m + 5), 32'd1);
    wr(IC, 32'hF);
    @(negedge clk);
    check("irq cleared", 64'(irq), 0);
    n_clear++;
  endtask

  task automatic expect_clean(string what, longint t_exec, int beats);
    rd(GM + 12'(8 * 1 + 3), rv); check({what, ": exec time (GM)"}, rv, 64'(t_exec));
    rd(NUC_DM + 12'd2, rv);       check({what, ": exec time (TMON)"}, rv, 64'(t_exec));
    rd(GM + 12'(8 * 1 + 5), rv);  check({what, ": time final"}, rv, 2);
    rd(GM + 12'(8 * 0 + 3), rv);  check({what, ": beats"}, rv, 64'(beats));
    rd(GM + 12'(8 * 2 + 3), rv);  check({what, ": macs"}, rv, MACS);
    rd(GM + 12'(8 * 3 + 3), rv);  check({what, ": writes"}, rv, WRITES);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t;
    int wait_c;
    ev_raw = '0; req = REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rule(0, RULE_NE, 1'b1, 64'(BEATS));
    rule(1, RULE_GT, 1'b0, 64'(LIMIT));
    rule(2, RULE_NE, 1'b1, 64'(MACS));
    rule(3, RULE_NE, 1'b1, 64'(WRITES));
    wr(IC + 12'd1, 32'hF);

    // Clean tasks of different lengths: no interrupt, correct metrics.
    for (int k = 0; k < 4; k++) begin
      run_task(BEATS, MACS, WRITES, 5 * k, t);
      check("clean: no irq", 64'(irq), 0);
      expect_clean("clean", t, BEATS);
      rd(IC, rv); check("clean: nothing pending", rv, 0);
      if (!irq) n_clean++;
    end

    // Transfer fault: one beat lost, twice in a row with the same count;
    // the second must raise the interrupt again after the clear.
    for (int k = 0; k < 2; k++) begin
      run_task(BEATS - 1, MACS, WRITES, 0, t);
      check("transfer fault irq", 64'(irq), 1);
      check("transfer fault id", 64'(irq_id), 0);
      rd(IC, rv); check("transfer fault pending", rv, 1);
      if (irq && irq_id == 0) n_tf++;
      clear_all();
    end

    // Computation fault: one MAC missing.
    run_task(BEATS, MACS - 1, WRITES, 0, t);
    check("computation fault irq", 64'(irq), 1);
    check("computation fault id", 64'(irq_id), 2);
    if (irq && irq_id == 2) n_cf++;
    clear_all();

    // Watchdog: the task hangs; the interrupt must come before done, at most
    // a few cycles after the limit (adapter, GMI round robin, GM, controller).
    for (int i = 0; i < BEATS; i++) begin @(negedge clk) ev_raw = 5'b00001; end
    @(negedge clk) ev_raw = 5'b00010;
    t = cyc;
    wait_c = 0;
    while (!irq && wait_c < 4 * LIMIT) begin @(negedge clk); wait_c++; end
    check("watchdog irq", 64'(irq), 1);
    check("watchdog id", 64'(irq_id), 1);
    checks++;
    if (!(cyc - t > LIMIT && cyc - t <= LIMIT + 10)) begin
      failures++;
      $display("watchdog latency %0d cycles after start", cyc - t);
    end
    $display("watchdog interrupt %0d cycles after the start edge (limit %0d)", cyc - t, LIMIT);
    rd(NUC_DM + 12'd0, rv); check("task still running at watchdog", rv, 1);
    if (irq && irq_id == 1) n_wd++;
    // Software aborts the task: done, then clear.
    @(negedge clk) ev_raw = 5'b00100;
    @(negedge clk) ev_raw = '0;
    repeat (12) @(negedge clk);
    clear_all();
    // Remove the fault checks' stale counts with a clean task.
    run_task(BEATS, MACS, WRITES, 0, t);
    clear_all();

    // Programmability: count result writes on the interconnect monitor.
    wr(NUC_INT + 12'd1, 32'd4);
    wr(NUC_INT + 12'd0, 32'd3);                 // enable + clear
    rd(NUC_INT + 12'd1, rv); check("select readback", rv, 4);
    rule(0, RULE_NE, 1'b1, 64'(WRITES));
    run_task(BEATS, MACS, WRITES, 3, t);
    rd(NUC_INT + 12'd2, rv); check("reprogrammed count", rv, WRITES);
    check("reprogrammed: no irq", 64'(irq), 0);
    expect_clean("reprogrammed", t, WRITES);
    if (rv == WRITES && !irq) n_prog++;

    $display("clean=%0d transfer_fault=%0d compute_fault=%0d watchdog=%0d reprogram=%0d clear=%0d gmi_contention=%0d",
             n_clean, n_tf, n_cf, n_wd, n_prog, n_clear, n_cont);
    checks++; if (n_clean == 0) failures++;
    checks++; if (n_tf < 2)     failures++;
    checks++; if (n_cf == 0)    failures++;
    checks++; if (n_wd == 0)    failures++;
    checks++; if (n_prog == 0)  failures++;
    checks++; if (n_clear == 0) failures++;
    checks++; if (n_cont == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
