// tb_configs: the two reduced monitoring configurations, run side by side
// on the same platform activity.
//   Y2 (HAS_INT = 0): execution time, computation fault, watchdog.
//   Y3 (HAS_CORE = 0): transfer fault, watchdog, throughput.
// Throughput is obtained as software would: beats per task and execution
// time are read from the monitors and compared with what was driven. A
// fault a configuration does not monitor must not raise its interrupt.
module tb_configs;
  import mon_pkg::*;

  localparam int BEATS = 24, MACS = 12, WRITES = 2, LIMIT = 150;
  localparam logic [11:0] GM = 12'h400, IC = 12'h800, NUC_INT = 12'h000,
                          NUC_DM = 12'h100, NUC_CORE = 12'h200;

  logic clk = 0, rst_n = 0;
  logic [4:0] ev_raw;
  reg_req_t req2, req3;
  logic [31:0] rdata2, rdata3, rv;
  logic irq2, irq3;
  logic [ID_W-1:0] irq_id2, irq_id3;
  logic gv2, gv3;
  logic [ID_W-1:0] gid2, gid3;
  logic [3:0] gd2, gd3;
  int checks = 0, failures = 0;
  longint cyc = 0;

  hw_mon_layer #(.HAS_INT(1'b0)) u_y2 (
    .clk, .rst_n, .ev_raw, .req(req2), .rdata(rdata2), .irq(irq2), .irq_id(irq_id2),
    .gmi_valid(gv2), .gmi_id(gid2), .gmi_dirty(gd2));
  hw_mon_layer #(.HAS_CORE(1'b0)) u_y3 (
    .clk, .rst_n, .ev_raw, .req(req3), .rdata(rdata3), .irq(irq3), .irq_id(irq_id3),
    .gmi_valid(gv3), .gmi_id(gid3), .gmi_dirty(gd3));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Write the same register in both configurations.
  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    req2 = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    req3 = req2;
    @(negedge clk);
    req2 = REQ_IDLE; req3 = REQ_IDLE;
  endtask

  task automatic rd(bit y3, logic [11:0] a, output logic [31:0] d);
    if (y3) req3 = '{wr: 1'b0, rd: 1'b1, addr: a, wdata: '0};
    else    req2 = '{wr: 1'b0, rd: 1'b1, addr: a, wdata: '0};
    #1;
    d = y3 ? rdata3 : rdata2;
    req2 = REQ_IDLE; req3 = REQ_IDLE;
  endtask

  task automatic rule(int m, rule_mode_e md, bit fo, logic [63:0] t);
    wr(GM + 12'(8 * m + 1), t[31:0]);
    wr(GM + 12'(8 * m + 2), t[63:32]);
    wr(GM + 12'(8 * m), {28'd0, md, fo, 1'b1});
  endtask

  task automatic run_task(int beats, int macs, int writes, int extra, output longint t_exec);
    longint t0;
    for (int i = 0; i < beats; i++) begin @(negedge clk) ev_raw = 5'b00001; end
    @(negedge clk) ev_raw = 5'b00010;
    t0 = cyc;
    for (int i = 0; i < macs; i++)   begin @(negedge clk) ev_raw = 5'b01010; end
    for (int i = 0; i < writes; i++) begin @(negedge clk) ev_raw = 5'b10010; end
    repeat (extra) begin @(negedge clk) ev_raw = 5'b00010; end
    @(negedge clk) ev_raw = 5'b00100;
    t_exec = cyc - t0;
    @(negedge clk) ev_raw = '0;
    repeat (12) @(negedge clk);
  endtask

  task automatic clear_all();
    for (int m = 0; m < 4; m++) wr(GM + 12'(8 * m + 5), 32'd1);
    wr(IC, 32'hF);
    @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t;
    int n;
    ev_raw = '0; req2 = REQ_IDLE; req3 = REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rule(0, RULE_NE, 1'b1, 64'(BEATS));
    rule(1, RULE_GT, 1'b0, 64'(LIMIT));
    rule(2, RULE_NE, 1'b1, 64'(MACS));
    rule(3, RULE_NE, 1'b1, 64'(WRITES));
    wr(IC + 12'd1, 32'hF);

    // Clean tasks: execution time (Y2, Y3) and throughput inputs (Y3).
    for (int k = 0; k < 3; k++) begin
      run_task(BEATS, MACS, WRITES, 7 * k, t);
      check("Y2 clean no irq", 64'(irq2), 0);
      check("Y3 clean no irq", 64'(irq3), 0);
      rd(0, NUC_DM + 12'd2, rv); check("Y2 exec time", rv, 64'(t));
      rd(1, NUC_DM + 12'd2, rv); check("Y3 exec time", rv, 64'(t));
      rd(1, NUC_INT + 12'd2, rv); check("Y3 beats per task", rv, BEATS);
      rd(0, NUC_INT + 12'd2, rv); check("Y2 has no interconnect monitor", rv, 0);
      rd(1, NUC_CORE + 12'd2, rv); check("Y3 has no core monitor", rv, 0);
      rd(0, NUC_CORE + 12'd2, rv); check("Y2 MACs per task", rv, MACS);
    end

    // Computation fault: only Y2 sees it.
    run_task(BEATS, MACS + 1, WRITES, 0, t);
    check("Y2 computation fault irq", 64'(irq2), 1);
    check("Y2 computation fault id", 64'(irq_id2), 2);
    check("Y3 does not monitor the core", 64'(irq3), 0);
    clear_all();
    run_task(BEATS, MACS, WRITES, 0, t);
    clear_all();

    // Transfer fault: only Y3 sees it.
    run_task(BEATS + 2, MACS, WRITES, 0, t);
    check("Y3 transfer fault irq", 64'(irq3), 1);
    check("Y3 transfer fault id", 64'(irq_id3), 0);
    check("Y2 does not monitor the interconnect", 64'(irq2), 0);
    clear_all();
    run_task(BEATS, MACS, WRITES, 0, t);
    clear_all();

    // Watchdog in both.
    @(negedge clk) ev_raw = 5'b00010;
    t = cyc;
    @(negedge clk) ev_raw = '0;
    n = 0;
    while (!(irq2 && irq3) && n < 4 * LIMIT) begin @(negedge clk); n++; end
    check("Y2 watchdog", 64'(irq2), 1);
    check("Y3 watchdog", 64'(irq3), 1);
    check("Y2 watchdog id", 64'(irq_id2), 1);
    check("Y3 watchdog id", 64'(irq_id3), 1);
    checks++;
    if (cyc - t <= LIMIT || cyc - t > LIMIT + 10) begin
      failures++;
      $display("watchdog after %0d cycles", cyc - t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
