// tb_load_gap_calc: self-checking test of the load-gap calculator.
//
// Checks the two gaps used in the published measurements (S = 1526 bytes:
// I_L = 12 at 100 % load and 1550 at 50 % load), the six frame sizes of the
// command-line tool at several loads, and a random sweep against the
// formula I_L = 12 + round((12 + S)(100 - L) / L). Every calculation must
// finish exactly 33 cycles after start, with busy high in between, and
// loads of 0 or above 100 must raise error.
module tb_load_gap_calc;
  import flag_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic        start = 1'b0;
  logic [6:0]  load_pct = 7'd100;
  logic [15:0] frame_size = 16'd72;
  logic        busy, done, error;
  logic [31:0] gap;

  int checks = 0, failures = 0;

  load_gap_calc dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint model(int l, int s);
    return 12 + ((longint'(s) + 12) * (100 - l) + l / 2) / l;
  endfunction

  // Runs one calculation; returns the result, checks latency and busy.
  task automatic calc(int l, int s, output logic [31:0] g, output logic e);
    int cyc, busy_lo;
    @(negedge clk);
    load_pct = 7'(l); frame_size = 16'(s); start = 1;
    @(negedge clk); start = 0;
    cyc = 1; busy_lo = 0;
    while (!done && cyc < 100) begin
      if (!busy) busy_lo++;
      @(negedge clk); cyc++;
    end
    g = gap; e = error;
    if (!(l == 0 || l > 100)) begin
      check(cyc == 33, $sformatf("L=%0d S=%0d: done after %0d cycles, expected 33", l, s, cyc));
      check(busy_lo == 0, $sformatf("L=%0d S=%0d: busy high until done", l, s));
    end
  endtask

  initial begin
    logic [31:0] g;
    logic e;
    int sizes[6] = '{72, 136, 268, 524, 1036, 1526};
    int loads[5] = '{1, 10, 33, 50, 99};
    repeat (3) @(posedge clk);
    rst_n = 1;

    calc(100, 1526, g, e); check(!e && g == 12,   $sformatf("100 %% load, S=1526: gap %0d expected 12", g));
    calc(50, 1526, g, e);  check(!e && g == 1550, $sformatf("50 %% load, S=1526: gap %0d expected 1550", g));

    foreach (sizes[i]) foreach (loads[j]) begin
      calc(loads[j], sizes[i], g, e);
      check(!e && longint'(g) == model(loads[j], sizes[i]),
            $sformatf("L=%0d S=%0d: gap %0d expected %0d", loads[j], sizes[i], g, model(loads[j], sizes[i])));
    end

    repeat (200) begin
      int l, s;
      l = 1 + int'($urandom_range(99));
      s = 64 + int'($urandom_range(9000));
      calc(l, s, g, e);
      check(!e && longint'(g) == model(l, s), $sformatf("random L=%0d S=%0d: gap %0d expected %0d", l, s, g, model(l, s)));
    end

    calc(0, 1526, g, e);   check(e && g == 0, "load 0 %: error");
    calc(101, 1526, g, e); check(e, "load 101 %: error");
    calc(127, 72, g, e);   check(e, "load 127 %: error");
    calc(100, 72, g, e);   check(!e && g == 12, "error cleared by the next valid calculation");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
