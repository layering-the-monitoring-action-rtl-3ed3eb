// tb_adapter: self-checking test of the adapter.
// Drives random trigger lines for 400 cycles and compares every cycle with
// a reference computed here: a level line gives an instance for each high
// cycle, an edge line only on its rising edge, both one clock later.
module tb_adapter;
  localparam int unsigned N = 5;
  localparam logic [N-1:0] EM = 5'b00110;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] ev_raw, ev_inst;
  logic [N-1:0] prev, expd;
  int checks = 0, failures = 0, n_edge = 0, n_level = 0;

  adapter #(.N_EV(N), .EDGE_MASK(EM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev_raw = '0;
    prev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      // Hold lines for a few cycles so edge lines see long pulses.
      if (c % 3 == 0) ev_raw = N'($urandom);
      @(posedge clk);
      expd = (EM & ev_raw & ~prev) | (~EM & ev_raw);
      prev = ev_raw;
      #1;
      checks++;
      if (ev_inst !== expd) begin
        failures++;
        $display("cycle %0d: raw=%b inst=%b expected=%b", c, ev_raw, ev_inst, expd);
      end
      n_edge  += $countones(expd & EM);
      n_level += $countones(expd & ~EM);
    end
    checks++;
    if (n_edge == 0 || n_level == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
