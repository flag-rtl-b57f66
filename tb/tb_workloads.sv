// tb_workloads: the measured load runs, on the full-size top.
//
// Runs the top with its default parameters through the published load
// experiments at 100 Mb/s with S = 1526-byte frames (1514-byte packets),
// programmed over the bus as a script would: load gap from the load-gap
// unit, generator TXA, analyser RXC, Port A looped to Port C.
//   scope   100 % load, all 624 frames of the oscilloscope measurement.
//           The first-to-last SFD distance must be 623 * 123.04 us
//           = 76.65392 ms (measured on the real platform: 0.076653 s), and
//           the generator must report Done (S + I_L) * F byte times after
//           the start, i.e. T = (S + 12) * 8 * F / R.
//   half    50 % load (I_L = 1550): the first 200 frames of the 31702-frame
//           run, frame period 246.08 us, checked the same way.
// The 33510- and 31702-frame runs differ from these only in F; at
// 15380 or 30760 cycles per frame they are too long to simulate in full.
module tb_workloads;
  import flag_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic        ocb_wr = 1'b0, ocb_rd = 1'b0;
  logic [31:0] ocb_addr = '0, ocb_wdata = '0, ocb_rdata;
  logic        ocb_rvalid;
  gmii_t       phy_rx [N];
  gmii_t       phy_tx [N];
  logic [63:0] rx_ts  [N];
  logic [63:0] tx_ts  [N];
  logic [N-1:0] rx_ts_valid, tx_ts_valid;
  tx_state_e   gen_state [N];
  rx_state_e   ana_state [N];
  gmii_t       portl_tx;

  flag_top dut (.*);

  always_comb begin
    for (int p = 0; p < N; p++) phy_rx[p] = GMII_IDLE;
    phy_rx[2] = phy_tx[0];
  end

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // every transmit period on port A
  logic [63:0] prev_ts;
  longint n_ts = 0, bad_period = 0, want_period = 0;
  always @(posedge clk) if (rst_n && tx_ts_valid[0]) begin
    if (n_ts > 0 && tx_ts[0] - prev_ts != 64'(want_period)) bad_period++;
    prev_ts <= tx_ts[0];
    n_ts <= n_ts + 1;
  end

  task automatic wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); ocb_wr = 1; ocb_addr = a; ocb_wdata = d;
    @(negedge clk); ocb_wr = 0;
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); ocb_rd = 1; ocb_addr = a;
    @(negedge clk); ocb_rd = 0;
    d = ocb_rdata;
  endtask

  function automatic logic [31:0] txa(logic [15:0] off);
    return TXA_BASE + 32'(off);
  endfunction
  function automatic logic [31:0] rxc(logic [15:0] off);
    return TXA_BASE + 2 * PORT_STRIDE + RX_OFFSET + 32'(off);
  endfunction

  task automatic header(logic [31:0] b);
    wr(b + REG_ETHDST_HI, 32'h12EB); wr(b + REG_ETHDST_LO, 32'h74CF_66F9);
    wr(b + REG_ETHSRC_HI, 32'h12EB); wr(b + REG_ETHSRC_LO, 32'h7406_556B);
    wr(b + REG_HDR_AFTER_HI, 32'h8892); wr(b + REG_HDR_AFTER_LO, 0);
    wr(b + REG_HEADER_SIZE, 14); wr(b + REG_PAYLOAD_SIZE, 1500);
  endtask

  task automatic workload(string name, int load, int f, longint exp_gap);
    logic [31:0] v, gap, flo, fhi, llo, lhi;
    longint t0, t_done, span, exp_span;
    int n;
    // load gap from the hardware unit
    wr(GLOBAL_BASE + GREG_LOAD, load); wr(GLOBAL_BASE + GREG_FRAME_SIZE, 1526);
    wr(GLOBAL_BASE + GREG_CALC, 0);
    n = 0;
    do begin rd(GLOBAL_BASE + GREG_CALC, v); n++; end while (v[1] == 0 && n < 100);
    rd(GLOBAL_BASE + GREG_LOAD_GAP, gap);
    check(gap == 32'(exp_gap), $sformatf("%s: I_L %0d expected %0d", name, gap, exp_gap));
    // analyser C, generator A
    header(rxc(0)); wr(rxc(REG_FRAMES_EXP), f); wr(rxc(REG_TR_CTRL), 1);
    header(txa(0));
    wr(txa(REG_START_DELAY), 0); wr(txa(REG_INTERFRAME_GAP), gap);
    wr(txa(REG_NUMBER_OF_FRAMES), f); wr(txa(REG_TR_CTRL), 1);
    want_period = (1526 + longint'(gap)) * 80;
    n_ts = 0; bad_period = 0;
    // start and wait for the generator's Done
    @(negedge clk); ocb_wr = 1; ocb_addr = GLOBAL_BASE + GREG_RUN; ocb_wdata = 1;
    @(negedge clk); ocb_wr = 0; t0 = cyc;
    wait (gen_state[0] == TX_DONE);
    t_done = cyc - t0;
    do begin
      repeat (100) @(negedge clk);
      rd(rxc(REG_TR_STAT), v);
    end while ((v & 32'h2) != 32'h2 && cyc - t0 < 64'd20_000_000);
    wr(GLOBAL_BASE + GREG_RUN, 0);
    rd(rxc(REG_RECV_OK), v);  check(v == f, $sformatf("%s: RECV_OK %0d of %0d", name, v, f));
    rd(rxc(REG_RECV_NOK), v); check(v == 0, $sformatf("%s: RECV_NOK %0d", name, v));
    check(n_ts == f && bad_period == 0, $sformatf("%s: %0d frames, %0d periods differ from %0d ns", name, n_ts, bad_period, want_period));
    rd(rxc(REG_FIRST_TS_LO), flo); rd(rxc(REG_FIRST_TS_HI), fhi);
    rd(rxc(REG_LAST_TS_LO), llo);  rd(rxc(REG_LAST_TS_HI), lhi);
    span = longint'({lhi, llo} - {fhi, flo});
    exp_span = longint'(f - 1) * want_period;
    check(span == exp_span, $sformatf("%s: first to last SFD %0d ns expected %0d ns", name, span, exp_span));
    // T = F * (S + I_L) byte times of 10 cycles, to within one byte time
    // (strobe phase at the start, Done raised in the last gap byte time)
    check(t_done >= longint'(f) * (1526 + longint'(gap)) * 10 - 10 &&
          t_done <= longint'(f) * (1526 + longint'(gap)) * 10 + 30,
          $sformatf("%s: Done after %0d cycles = %0d ns", name, t_done, t_done * 8));
    $display("%s: %0d frames, period %0d ns, first-to-last SFD %0d ns, run time %0d ns",
             name, f, want_period, span, t_done * 8);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    wr(GLOBAL_BASE + GREG_MODE, MODE_SCRIPTING);
    wr(GLOBAL_BASE + GREG_SPEED, 4'b0101);
    workload("scope 100 %", 100, 624, 12);
    workload("half 50 %", 50, 200, 1550);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
