// tb_flag_top: end-to-end test of the whole load generator at full size.
//
// The top is used with its default parameters (four ports, 2048-byte monitor
// buffers). A test "script" drives the On-Chip Bus like the processor does:
// it selects the mode, computes the load gap, programs generator A and
// analyser C, starts the run and polls TR_STAT until the analyser reports
// Hold. Port A's PHY transmit pins are looped to Port C's receive pins,
// as in the published example script (TXA sends, RXC checks).
//
// Mechanisms exercised and counted (each must occur at least once):
//   transparent  monitor copies a received frame to Port L unchanged
//   switching    A <-> B bridge forwards frames in both directions
//   calc         load-gap unit gives 1550 (S=1526, 50 %) and 12 (100 %)
//   generate     generator frames received and matched by the analyser
//   hold         analyser stops by itself after the expected frames
//   rate100      at 100 Mb/s, 100 % load, S=1526 the frame period is
//                exactly 123.04 us (published oscilloscope value), and
//                246.08 us at 50 % load (I_L = 1550)
//   timestamp    SFD timestamps of TX A and RX C agree
//   buf_drop     monitor loses frames under load and counts them
//   filter_drop  monitor filter drops a frame with a foreign destination
//   trailer      analyser error code and port tag appear as trailer on Port L
//   stop         RUN = 0 (stop command) ends a run at a frame boundary
module tb_flag_top;
  import flag_pkg::*;
  import tb_eth_pkg::*;

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

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int mech[string];
  task automatic saw(string m);
    mech[m] = mech[m] + 1;
  endtask

  // ---------------- stimulus: PHY side ----------------
  gmii_t drv [N];
  logic  loop_en = 1'b1;
  always_comb begin
    for (int p = 0; p < N; p++) phy_rx[p] = drv[p];
    if (loop_en) phy_rx[2] = phy_tx[0];
  end

  task automatic inject(int p, bytes_t body);
    bytes_t w = wire_frame(body);
    foreach (w[i]) begin @(negedge clk); drv[p] = '{stb: 1, dv: 1, data: w[i]}; end
    for (int g = 0; g < 12; g++) begin @(negedge clk); drv[p] = '{stb: 1, dv: 0, data: 0}; end
    @(negedge clk); drv[p] = GMII_IDLE;
  endtask

  // ---------------- capture ----------------
  bytes_t portl[$], cur_l;
  bytes_t ptx [2][$];
  bytes_t cur_t [2];
  always @(posedge clk) if (rst_n) begin
    if (portl_tx.dv) cur_l.push_back(portl_tx.data);
    else if (cur_l.size() != 0) begin portl.push_back(cur_l); cur_l.delete(); end
    for (int p = 0; p < 2; p++) begin
      if (phy_tx[p].stb && phy_tx[p].dv) cur_t[p].push_back(phy_tx[p].data);
      else if (phy_tx[p].stb && cur_t[p].size() != 0) begin ptx[p].push_back(cur_t[p]); cur_t[p].delete(); end
    end
  end

  logic [63:0] txa_ts[$], rxc_ts[$];
  always @(posedge clk) if (rst_n) begin
    if (tx_ts_valid[0]) txa_ts.push_back(tx_ts[0]);
    if (rx_ts_valid[2]) rxc_ts.push_back(rx_ts[2]);
  end

  // ---------------- processor side ----------------
  task automatic wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); ocb_wr = 1; ocb_addr = a; ocb_wdata = d;
    @(negedge clk); ocb_wr = 0;
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); ocb_rd = 1; ocb_addr = a;
    @(negedge clk); ocb_rd = 0;
    if (!ocb_rvalid) begin failures++; $display("FAIL: no rvalid for read of %h", a); end
    d = ocb_rdata;
  endtask

  function automatic logic [31:0] txr(int p, logic [15:0] off);
    return TXA_BASE + 32'(p) * PORT_STRIDE + 32'(off);
  endfunction
  function automatic logic [31:0] rxr(int p, logic [15:0] off);
    return TXA_BASE + 32'(p) * PORT_STRIDE + RX_OFFSET + 32'(off);
  endfunction
  function automatic logic [31:0] glr(logic [15:0] off);
    return GLOBAL_BASE + 32'(off);
  endfunction
  function automatic logic [31:0] mnr(int p, logic [15:0] off);
    return MONITOR_BASE + 32'(p) * 32'(MREG_STRIDE) + 32'(off);
  endfunction

  localparam bit [47:0] SRC = 48'h12EB_7406_556B;   // published source MAC
  localparam bit [47:0] DST = 48'h12EB_74CF_66F9;   // published destination MAC
  localparam bit [47:0] HDR = 48'h8892_0000_0000;   // Profinet Ethertype

  // Frame description shared by generator p and analyser q (S = full size).
  task automatic set_frame(bit ana, int p, int s);
    logic [31:0] b;
    b = ana ? rxr(p, 0) : txr(p, 0);
    wr(b + REG_ETHDST_HI, 32'(DST[47:32])); wr(b + REG_ETHDST_LO, DST[31:0]);
    wr(b + REG_ETHSRC_HI, 32'(SRC[47:32])); wr(b + REG_ETHSRC_LO, SRC[31:0]);
    wr(b + REG_HDR_AFTER_HI, 32'(HDR[47:32])); wr(b + REG_HDR_AFTER_LO, HDR[31:0]);
    wr(b + REG_HEADER_SIZE, 14);
    wr(b + REG_PAYLOAD_SIZE, s - 8 - 14 - 4);
  endtask

  task automatic calc_gap(int load, int s, output logic [31:0] gap);
    logic [31:0] v;
    int n;
    wr(glr(GREG_LOAD), load); wr(glr(GREG_FRAME_SIZE), s); wr(glr(GREG_CALC), 0);
    n = 0;
    do begin rd(glr(GREG_CALC), v); n++; end while (v[1] == 0 && n < 100);
    rd(glr(GREG_LOAD_GAP), gap);
  endtask

  // Scripted run: TXA sends f frames of s bytes with gap ifg, RXC expects them.
  task automatic script_run(int s, int ifg, int f, output int polls);
    logic [31:0] v;
    set_frame(1, 2, s);
    wr(rxr(2, REG_FRAMES_EXP), f); wr(rxr(2, REG_FRAMES_EXP_OK), 0);
    wr(rxr(2, REG_TR_CTRL), 1);
    set_frame(0, 0, s);
    wr(txr(0, REG_START_DELAY), 0);
    wr(txr(0, REG_INTERFRAME_GAP), ifg);
    wr(txr(0, REG_NUMBER_OF_FRAMES), f);
    wr(txr(0, REG_TR_CTRL), 1);
    txa_ts.delete(); rxc_ts.delete();
    wr(glr(GREG_RUN), 1);
    polls = 0;
    // EXITONCHECKM RXC TR_STAT 0x2 0x2
    do begin
      repeat (50) @(negedge clk);
      rd(rxr(2, REG_TR_STAT), v); polls++;
    end while ((v & 32'h2) != 32'h2 && polls < 40_000);
    wr(glr(GREG_RUN), 0);   // ETH_TXRX_STOP
  endtask

  // Checks a scripted run: counts, Hold, frame period and timestamps.
  task automatic check_run(string name, int s, int ifg, int f, int div);
    logic [31:0] v, lo, hi, flo;
    longint period;
    rd(rxr(2, REG_TR_STAT), v);    check(v == RX_HOLD, {name, ": RXC in Hold"});
    if (v == RX_HOLD) saw("hold");
    rd(rxr(2, REG_RECV_OK), v);    check(v == f, $sformatf("%s: RECV_OK %0d of %0d", name, v, f));
    if (v == f && f > 0) saw("generate");
    rd(rxr(2, REG_RECV_NOK), v);   check(v == 0, {name, ": no mismatches"});
    rd(txr(0, REG_FRAMES_SENT), v); check(v == f, {name, ": FRAMES_SENT"});
    period = 64'(s + ifg) * 8 * div;
    check(txa_ts.size() == f && rxc_ts.size() == f, $sformatf("%s: %0d/%0d timestamps", name, txa_ts.size(), rxc_ts.size()));
    if (txa_ts.size() == f && f > 1) begin
      int bad = 0;
      for (int i = 1; i < f; i++) if (txa_ts[i] - txa_ts[i-1] != period) bad++;
      check(bad == 0, $sformatf("%s: every frame period is %0d ns", name, period));
      if (bad == 0 && div == 10) saw("rate100");
    end
    if (txa_ts.size() == f && rxc_ts.size() == f) begin
      int bad = 0;
      foreach (rxc_ts[i]) if (rxc_ts[i] != txa_ts[i]) bad++;
      rd(rxr(2, REG_FIRST_TS_LO), flo);
      rd(rxr(2, REG_LAST_TS_LO), lo);
      rd(rxr(2, REG_LAST_TS_HI), hi);
      check(bad == 0 && flo == txa_ts[0][31:0] && {hi, lo} == txa_ts[f-1],
            {name, ": RX C timestamps equal TX A timestamps (first/last registers too)"});
      if (bad == 0) saw("timestamp");
    end
  endtask

  initial begin
    logic [31:0] v, gap50, gap100;
    int polls, drops, drops0, n_l;
    bytes_t fr;
    for (int p = 0; p < N; p++) drv[p] = GMII_IDLE;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- transparent mode (reset default): Port D traffic to Port L ----
    rd(glr(GREG_MODE), v); check(v == MODE_TRANSPARENT, "reset mode transparent");
    fr = frame_body(DST, SRC, HDR, 2, 46);
    portl.delete();
    inject(3, fr);
    repeat (200) @(negedge clk);
    check(portl.size() == 1 && portl[0] == wire_frame(fr), "transparent: frame of D copied to Port L");
    if (portl.size() == 1 && portl[0] == wire_frame(fr)) saw("transparent");

    // ---- switching mode: A <-> B ----
    wr(glr(GREG_MODE), MODE_SWITCHING);
    loop_en = 0;
    ptx[0].delete(); ptx[1].delete();
    fork
      inject(0, frame_body(DST, SRC, HDR, 2, 100));
      inject(1, frame_body(SRC, DST, HDR, 2, 46));
    join
    repeat (20) @(negedge clk);
    check(ptx[1].size() == 1 && ptx[1][0] == wire_frame(frame_body(DST, SRC, HDR, 2, 100)), "switching: A -> B");
    check(ptx[0].size() == 1 && ptx[0][0] == wire_frame(frame_body(SRC, DST, HDR, 2, 46)), "switching: B -> A");
    if (ptx[0].size() == 1 && ptx[1].size() == 1) saw("switching");
    loop_en = 1;

    // ---- load-gap unit ----
    calc_gap(50, 1526, gap50);
    calc_gap(100, 1526, gap100);
    check(gap50 == 1550 && gap100 == 12, $sformatf("load gaps %0d / %0d, expected 1550 / 12", gap50, gap100));
    if (gap50 == 1550 && gap100 == 12) saw("calc");

    // ---- scripting mode, 100 Mb/s on A and C: published workloads, fewer frames ----
    wr(glr(GREG_MODE), MODE_SCRIPTING);
    wr(glr(GREG_SPEED), 4'b0101);
    wr(mnr(2, MREG_CTRL), 0);
    script_run(1526, int'(gap100), 8, polls);
    check_run("100 % load, S=1526", 1526, int'(gap100), 8, 10);
    script_run(1526, int'(gap50), 5, polls);
    check_run("50 % load, S=1526", 1526, int'(gap50), 5, 10);

    // ---- 1 Gb/s, short frames, monitor watching A's transmit and C's receive ----
    wr(glr(GREG_SPEED), 0);
    repeat (500) @(negedge clk);     // let Port L drain
    wr(mnr(0, MREG_CTRL), 32'b10000);
    rd(mnr(0, MREG_DROPS), v); drops0 = int'(v);
    rd(mnr(2, MREG_DROPS), v); drops0 += int'(v);
    portl.delete();
    script_run(72, 12, 40, polls);
    check_run("1 Gb/s, S=72", 72, 12, 40, 1);
    repeat (2000) @(negedge clk);
    rd(mnr(0, MREG_DROPS), v); drops = int'(v);
    rd(mnr(2, MREG_DROPS), v); drops += int'(v) - drops0;
    n_l = 0;
    foreach (portl[i]) if (portl[i].size() == 72) n_l++;
    check(drops > 0, $sformatf("monitor overrun: %0d frames lost", drops));
    check(n_l + drops == 80, $sformatf("monitor: %0d copied + %0d lost", n_l, drops));
    if (drops > 0) saw("buf_drop");
    wr(mnr(0, MREG_CTRL), 0);
    wr(txr(0, REG_TR_CTRL), 0);      // generator A disabled while C is tested alone

    // ---- filter and trailer on C (frames injected at C's pins) ----
    loop_en = 0;
    wr(mnr(2, MREG_DST_HI), 32'(DST[47:32])); wr(mnr(2, MREG_DST_LO), DST[31:0]);
    wr(mnr(2, MREG_CTRL), 32'b00001);
    set_frame(1, 2, 72);
    wr(rxr(2, REG_ERROR_CODE), 8'hE7);
    wr(rxr(2, REG_FRAMES_EXP), 100);
    wr(rxr(2, REG_TR_CTRL), 3);
    wr(glr(GREG_RUN), 1);
    repeat (500) @(negedge clk);
    portl.delete();
    inject(2, frame_body(DST ^ 48'h10, SRC, HDR, 2, 46));       // foreign destination
    repeat (200) @(negedge clk);
    check(portl.size() == 0, "filter: foreign destination not copied");
    if (portl.size() == 0) saw("filter_drop");
    fr = frame_body(DST, SRC, 48'h0800_0000_0000, 2, 46);       // wrong Ethertype
    inject(2, fr);
    repeat (200) @(negedge clk);
    begin
      bytes_t e;
      e = fr;
      repeat (4) void'(e.pop_back());
      e.push_back(8'd2); e.push_back(8'hE7);
      e = {e, fcs_of(e)};
      check(portl.size() == 1 && portl[0] == wire_frame(e), "trailer: analyser code {2, E7} on Port L");
      if (portl.size() == 1 && portl[0] == wire_frame(e)) saw("trailer");
    end
    portl.delete();
    wr(mnr(2, MREG_CTRL), 32'b01001);                            // port tag on
    fr = frame_body(DST, SRC, HDR, 2, 46);
    inject(2, fr);
    repeat (200) @(negedge clk);
    begin
      bytes_t e;
      e = fr;
      repeat (4) void'(e.pop_back());
      e.push_back(8'd2); e.push_back(8'h00);
      e = {e, fcs_of(e)};
      check(portl.size() == 1 && portl[0] == wire_frame(e), "trailer: port tag {2, 0} on a matching frame");
      if (portl.size() == 1 && portl[0] == wire_frame(e)) saw("trailer");
    end
    rd(rxr(2, REG_RECV_OK), v);  check(v == 1, "analyser C: one match");
    rd(rxr(2, REG_RECV_NOK), v); check(v == 2, "analyser C: two mismatches (foreign destination, wrong Ethertype)");
    wr(glr(GREG_RUN), 0);
    wr(mnr(2, MREG_CTRL), 0);
    loop_en = 1;

    // ---- stop command in the middle of a long run ----
    set_frame(1, 2, 72);
    wr(rxr(2, REG_FRAMES_EXP), 0); wr(rxr(2, REG_TR_CTRL), 1);
    set_frame(0, 0, 72);
    wr(txr(0, REG_INTERFRAME_GAP), 12);
    wr(txr(0, REG_NUMBER_OF_FRAMES), 100_000);
    wr(txr(0, REG_TR_CTRL), 1);
    txa_ts.delete(); ptx[0].delete();
    wr(glr(GREG_RUN), 1);
    repeat (3000) @(negedge clk);
    wr(glr(GREG_RUN), 0);
    repeat (300) @(negedge clk);
    begin
      logic [31:0] sent, ok, nok;
      int whole;
      rd(txr(0, REG_FRAMES_SENT), sent);
      rd(rxr(2, REG_RECV_OK), ok);
      rd(rxr(2, REG_RECV_NOK), nok);
      check(sent > 0 && sent < 100_000, $sformatf("stop: %0d frames sent before stopping", sent));
      check(gen_state[0] != TX_TRANSMITTING && phy_tx[0].dv == 0, "stop: generator A silent");
      whole = 0;
      foreach (ptx[0][i]) if (ptx[0][i] == wire_frame(frame_body(DST, SRC, HDR, 2, 46))) whole++;
      check(whole == int'(sent) && ptx[0].size() == int'(sent) && cur_t[0].size() == 0,
            $sformatf("stop: %0d whole frames of %0d on A's pins, none cut", whole, sent));
      // the analyser stops counting with the same command: the frame in flight may be left out
      check(nok == 0 && (ok == sent || ok + 1 == sent), $sformatf("stop: RXC counted %0d of %0d, %0d broken", ok, sent, nok));
      if (sent > 0 && sent < 100_000 && whole == int'(sent) && nok == 0) saw("stop");
    end

    // ---- every mechanism must have happened ----
    foreach (MECHS[i]) begin
      check(mech.exists(MECHS[i]), {"mechanism never exercised: ", MECHS[i]});
      $display("mechanism %-12s %0d", MECHS[i], mech.exists(MECHS[i]) ? mech[MECHS[i]] : 0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam string MECHS[11] = '{"transparent", "switching", "calc", "generate", "hold",
                                  "rate100", "timestamp", "buf_drop", "filter_drop",
                                  "trailer", "stop"};

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
