// tb_evmon: self-checking test of the event monitor.
// Three instances: a fixed 10-bit monitor with a latch event (checks the
// final count per task, including an instance in the latch cycle, and
// saturation), a programmable 32-bit one (enable, clear, event select) and
// a running (no latch) 8-bit one. A reference count is kept here.
module tb_evmon;
  import mon_pkg::*;
  localparam int unsigned N = 5;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] ev;
  logic en, clr;
  logic [7:0] sel;
  metric_t m_lat, m_prog, m_run;
  int checks = 0, failures = 0;

  evmon #(.N_EV(N), .W(10), .PROG(0), .EV_SEL(3), .LATCH_SEL(2)) u_lat (
    .clk, .rst_n, .ev_inst(ev), .cfg_en(1'b0), .cfg_clr(1'b0), .cfg_sel(8'd0), .metric(m_lat));
  evmon #(.N_EV(N), .W(32), .PROG(1), .EV_SEL(0), .LATCH_SEL(-1)) u_prog (
    .clk, .rst_n, .ev_inst(ev), .cfg_en(en), .cfg_clr(clr), .cfg_sel(sel), .metric(m_prog));
  evmon #(.N_EV(N), .W(8), .PROG(0), .EV_SEL(0), .LATCH_SEL(-1)) u_run (
    .clk, .rst_n, .ev_inst(ev), .cfg_en(1'b0), .cfg_clr(1'b0), .cfg_sel(8'd0), .metric(m_run));

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic pulse(logic [N-1:0] v);
    @(negedge clk) ev = v;
    @(negedge clk) ev = '0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_lat, ref_prog, ref_run;
  initial begin
    ev = '0; en = 1; clr = 0; sel = 8'd0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Latched count: 7 operations, then done together with an 8th.
    for (int t = 0; t < 3; t++) begin
      ref_lat = 0;
      for (int i = 0; i < 5 + 2 * t; i++) begin pulse(5'b01000); ref_lat++; end
      pulse(5'b01100); ref_lat++;
      @(negedge clk);
      check("latched count", m_lat.value, 64'(ref_lat));
      check("latched final", 64'(m_lat.final_v), 64'd1);
      check("update toggles per latch", 64'(m_lat.upd), 64'((t + 1) % 2));
    end
    // Running counters: random line-0 instances.
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    check("cleared", m_prog.value, 0);
    ref_prog = 0;
    ref_run = m_run.value[31:0];
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      ev = N'($urandom);
      if (ev[0]) begin ref_prog++; ref_run = (ref_run == 255) ? 255 : ref_run + 1; end
    end
    @(negedge clk) ev = '0;
    check("prog count", m_prog.value, 64'(ref_prog));
    check("running 8-bit saturates", m_run.value, 64'(ref_run));
    check("running never final", 64'(m_run.final_v), 0);
    // Disable: no counting.
    en = 0;
    repeat (5) pulse(5'b00001);
    @(negedge clk);
    check("disabled", m_prog.value, 64'(ref_prog));
    // Select line 4.
    en = 1; sel = 8'd4;
    repeat (4) pulse(5'b10001);
    repeat (3) pulse(5'b00001);
    @(negedge clk);
    check("selected line 4", m_prog.value, 64'(ref_prog + 4));
    // Out-of-range select counts nothing.
    sel = 8'd9;
    repeat (3) pulse(5'b11111);
    @(negedge clk);
    check("select out of range", m_prog.value, 64'(ref_prog + 4));
    // Saturation of the 10-bit latched counter.
    @(negedge clk) ev = 5'b01000;
    repeat (1100) @(negedge clk);
    ev = 5'b00100;
    @(negedge clk) ev = '0;
    @(negedge clk);
    check("10-bit saturation", m_lat.value, 64'd1023);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
