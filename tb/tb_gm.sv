// tb_gm: self-checking test of the global monitor.
// Programs one rule of each mode, sends records and compares the violation
// pulses, sticky status and stored values with the rule evaluated here.
// Also checks final-only rules, disabled rules, the one-cycle pulse timing
// and the record counter, then runs random records against a reference.
module tb_gm;
  import mon_pkg::*;
  localparam int unsigned M = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  logic [ID_W-1:0] in_id;
  metric_t in_metric;
  reg_req_t req;
  logic [31:0] rdata;
  logic [M-1:0] viol;
  int checks = 0, failures = 0;

  gm #(.N_MET(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr(int m, int r, logic [31:0] d);
    @(negedge clk) req = '{wr: 1'b1, rd: 1'b0, addr: 12'(8 * m + r), wdata: d};
    @(negedge clk) req = REQ_IDLE;
  endtask

  task automatic rd(int m, int r, output logic [31:0] d);
    req = '{wr: 1'b0, rd: 1'b1, addr: 12'(8 * m + r), wdata: '0};
    #1;
    d = rdata;
    req = REQ_IDLE;
  endtask

  logic [1:0]  mode  [M];
  logic        fonly [M];
  logic [63:0] thr   [M];

  task automatic prog_rule(int m, logic [1:0] md, logic fo, logic [63:0] t);
    mode[m] = md; fonly[m] = fo; thr[m] = t;
    wr(m, 1, t[31:0]);
    wr(m, 2, t[63:32]);
    wr(m, 0, {28'd0, md, fo, 1'b1});
  endtask

  function automatic logic expect_viol(int m, metric_t r);
    if (fonly[m] && !r.final_v) return 1'b0;
    case (mode[m])
      2'd0: return r.value >  thr[m];
      2'd1: return r.value <  thr[m];
      2'd2: return r.value != thr[m];
      default: return r.value == thr[m];
    endcase
  endfunction

  // Send one record; check the pulse in the next cycle.
  task automatic send(int m, logic [63:0] v, logic f, logic exp_v);
    @(negedge clk);
    in_valid = 1; in_id = ID_W'(m); in_metric = '{upd: 1'b0, final_v: f, value: v};
    check("ready", 64'(in_ready), 1);
    @(negedge clk);
    in_valid = 0;
    check("viol pulse", 64'(viol), exp_v ? 64'(1 << m) : 0);
    @(negedge clk);
    check("pulse is one cycle", 64'(viol), 0);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rv;
  initial begin
    int nrec;
    in_valid = 0; in_id = '0; in_metric = '0; req = REQ_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Disabled rules never fire.
    send(0, 64'hFFFF_FFFF_FFFF, 1'b1, 1'b0);
    prog_rule(0, 2'd0, 1'b0, 64'h1_0000_0000);   // watchdog: time > 2^32
    prog_rule(1, 2'd1, 1'b0, 64'd50);            // too few
    prog_rule(2, 2'd2, 1'b1, 64'd16);            // final count != 16
    prog_rule(3, 2'd3, 1'b0, 64'd7);             // equal
    rd(2, 0, rv); check("ctrl readback", rv, 32'b1011);
    rd(0, 2, rv); check("thr hi readback", rv, 1);
    send(0, 64'hFFFF_FFFF, 1'b0, 1'b0);
    send(0, 64'h1_0000_0001, 1'b0, 1'b1);
    rd(0, 3, rv); check("last lo", rv, 1);
    rd(0, 4, rv); check("last hi", rv, 1);
    rd(0, 5, rv); check("sticky", rv, 1);
    wr(0, 5, 1);
    rd(0, 5, rv); check("sticky cleared", rv, 0);
    send(1, 64'd49, 1'b1, 1'b1);
    send(1, 64'd50, 1'b1, 1'b0);
    rd(1, 5, rv); check("final flag stored", rv, 32'd3);
    send(2, 64'd15, 1'b0, 1'b0);               // not final: ignored
    send(2, 64'd15, 1'b1, 1'b1);
    send(2, 64'd16, 1'b1, 1'b0);
    send(3, 64'd7, 1'b0, 1'b1);
    send(3, 64'd8, 1'b0, 1'b0);
    rd(2, 6, rv); check("record count", rv, 3);
    // Random records, back to back, against the reference.
    for (int m = 0; m < M; m++) prog_rule(m, 2'($urandom), 1'($urandom), 64'($urandom_range(0, 40)));
    for (int i = 0; i < 500; i++) begin
      automatic int m = $urandom_range(0, M - 1);
      automatic metric_t r = '{upd: 1'b0, final_v: 1'($urandom), value: 64'($urandom_range(0, 40))};
      @(negedge clk);
      in_valid = 1; in_id = ID_W'(m); in_metric = r;
      @(negedge clk);
      check("random viol", 64'(viol), expect_viol(m, r) ? 64'(1 << m) : 0);
      in_valid = 0;
    end
    // Out-of-range id is ignored.
    rd(0, 6, rv); nrec = rv;
    @(negedge clk); in_valid = 1; in_id = 8'd9; in_metric = '{upd: 1'b0, final_v: 1'b1, value: 64'd999};
    @(negedge clk); in_valid = 0;
    check("bad id no pulse", 64'(viol), 0);
    rd(0, 6, rv); check("bad id no record", rv, nrec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
