// tb_global_ctrl: self-checking test of the global control registers.
//
// Checks reset values (transparent mode, not running, 1 Gb/s, load 100 %,
// frame size 72), register write and read-back, that the time base advances
// by 8 ns per 125 MHz cycle, and the load-gap calculation started by a CALC
// write: busy, then done with LOAD_GAP = 1550 for S = 1526 at 50 % load, in
// 33 cycles.
module tb_global_ctrl;
  import flag_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  ocb_req_t     ocb = OCB_IDLE;
  logic [31:0]  ocb_rdata;
  nj_mode_e     mode;
  logic         run;
  logic [N-1:0] speed_100;
  logic [63:0]  now_ns;

  int checks = 0, failures = 0;

  global_ctrl #(.NUM_PORTS(N)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk); ocb = '{wr: 1'b1, rd: 1'b0, addr: {16'h0, a}, wdata: d};
    @(negedge clk); ocb = OCB_IDLE;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] d);
    @(negedge clk); ocb = '{wr: 1'b0, rd: 1'b1, addr: {16'h0, a}, wdata: 0};
    #1 d = ocb_rdata;
    @(negedge clk); ocb = OCB_IDLE;
  endtask

  initial begin
    logic [31:0] v, t0, t1;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(mode == MODE_TRANSPARENT && !run && speed_100 == 0, "reset: transparent, stopped, 1 Gb/s");
    rd(GREG_LOAD, v);       check(v == 100, "reset load 100 %");
    rd(GREG_FRAME_SIZE, v); check(v == 72, "reset frame size 72");

    wr(GREG_MODE, MODE_SCRIPTING); check(mode == MODE_SCRIPTING, "mode written");
    rd(GREG_MODE, v);       check(v == 2, "mode read back");
    wr(GREG_SPEED, 4'b0101); check(speed_100 == 4'b0101, "speed written");
    rd(GREG_SPEED, v);      check(v == 5, "speed read back");
    wr(GREG_RUN, 1);        check(run, "run set");
    rd(GREG_RUN, v);        check(v == 1, "run read back");
    wr(GREG_RUN, 0);        check(!run, "run cleared (stop)");

    // time base: 8 ns per cycle
    rd(GREG_TIME_LO, t0);
    repeat (98) @(negedge clk);
    rd(GREG_TIME_LO, t1);
    check(t1 - t0 == 100 * 8, $sformatf("time base advanced %0d ns in 100 cycles", t1 - t0));
    rd(GREG_TIME_HI, v);    check(v == 0, "time high word");

    // load-gap calculation
    wr(GREG_LOAD, 50); wr(GREG_FRAME_SIZE, 1526);
    @(negedge clk); ocb = '{wr: 1'b1, rd: 1'b0, addr: {16'h0, GREG_CALC}, wdata: 0};
    @(negedge clk); ocb = '{wr: 1'b0, rd: 1'b1, addr: {16'h0, GREG_CALC}, wdata: 0};
    cyc = 1;
    #1 check(ocb_rdata[0] == 1'b1, "CALC busy after start");
    while (ocb_rdata[1] == 1'b0 && cyc < 100) begin @(negedge clk); #1 cyc++; end
    ocb = OCB_IDLE;
    check(cyc == 34, $sformatf("CALC done flag seen %0d cycles after start", cyc));
    rd(GREG_LOAD_GAP, v);   check(v == 1550, $sformatf("LOAD_GAP %0d expected 1550", v));
    wr(GREG_LOAD, 100); wr(GREG_CALC, 0);
    rd(GREG_CALC, v);       check(v[1] == 0, "done cleared by a new start");
    repeat (40) @(negedge clk);
    rd(GREG_LOAD_GAP, v);   check(v == 12, "LOAD_GAP 12 at 100 %");
    wr(GREG_LOAD, 0); wr(GREG_CALC, 0);
    repeat (40) @(negedge clk);
    rd(GREG_CALC, v);       check(v[2] == 1 && v[1] == 1, "load 0: error flag");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
