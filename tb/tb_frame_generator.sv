// tb_frame_generator: self-checking test of the per-port frame generator.
//
// Programs the generator through its register port, starts it and captures
// every byte time on tx. The captured line is compared byte for byte with
// frames built by the reference model: START_DELAY idle bytes, then
// NUMBER_OF_FRAMES frames each followed by INTERFRAME_GAP idle bytes. The
// run time from start to TR_STAT = Done is checked against
// START_DELAY + N * (S + gap) byte times, at 1 Gb/s (a byte per cycle) and
// at 100 Mb/s (a byte every 10 cycles). Also covered: an 802.1Q-tagged
// header, stop at a frame boundary when run falls, zero frames, register
// read-back.
module tb_frame_generator;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  ocb_req_t    ocb = OCB_IDLE;
  logic [31:0] rdata;
  logic        run = 1'b0;
  logic        stb;
  gmii_t       tx;
  tx_state_e   state;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  frame_generator dut (.clk, .rst_n, .ocb, .ocb_rdata(rdata), .run, .stb, .tx, .state);

  int div = 1, dcnt = 0;
  always @(posedge clk) dcnt <= (dcnt + 1 >= div) ? 0 : dcnt + 1;
  assign stb = (dcnt == 0);

  bit           capture = 0;
  byte unsigned capd[$];
  bit           capv[$];
  always @(posedge clk) if (capture && tx.stb) begin
    capd.push_back(tx.data);
    capv.push_back(tx.dv);
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    ocb = '{wr: 1'b1, rd: 1'b0, addr: {16'h0, a}, wdata: d};
    @(negedge clk);
    ocb = OCB_IDLE;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    ocb = '{wr: 1'b0, rd: 1'b1, addr: {16'h0, a}, wdata: 0};
    #1 d = rdata;
    @(negedge clk);
    ocb = OCB_IDLE;
  endtask

  task automatic setup_gen(bit [47:0] dst, bit [47:0] src, bit [47:0] hdr, int hdr_len,
                         int pay, int delay, int ifg, int n);
    wr(REG_ETHDST_HI, 32'(dst[47:32])); wr(REG_ETHDST_LO, dst[31:0]);
    wr(REG_ETHSRC_HI, 32'(src[47:32])); wr(REG_ETHSRC_LO, src[31:0]);
    wr(REG_HDR_AFTER_HI, 32'(hdr[47:32])); wr(REG_HDR_AFTER_LO, hdr[31:0]);
    wr(REG_HEADER_SIZE, 12 + hdr_len);
    wr(REG_PAYLOAD_SIZE, pay);
    wr(REG_START_DELAY, delay);
    wr(REG_INTERFRAME_GAP, ifg);
    wr(REG_NUMBER_OF_FRAMES, n);
    wr(REG_TR_CTRL, 1);
  endtask

  // Runs one case and compares the line with the reference.
  task automatic run_case(string name, int d, bit [47:0] dst, bit [47:0] src, bit [47:0] hdr,
                          int hdr_len, int pay, int delay, int ifg, int n);
    bytes_t body;
    int t0, t1, first, k, S, exp_bt;
    logic [31:0] v;
    div = d;
    setup_gen(dst, src, hdr, hdr_len, pay, delay, ifg, n);
    rd(REG_TR_STAT, v);
    check(v == 0, {name, ": TR_STAT Disable before start"});
    capd.delete(); capv.delete();
    @(negedge clk);
    capture = 1; run = 1; t0 = cyc;
    repeat (4 * div) @(posedge clk);
    check(state == TX_TRANSMITTING || n == 0, {name, ": Transmitting after start"});
    while (state != TX_DONE && cyc - t0 < 2_000_000) @(posedge clk);
    t1 = cyc;
    repeat (3 * div) @(posedge clk);
    capture = 0;
    @(negedge clk); run = 0;
    rd(REG_TR_STAT, v);
    check(v == 2, {name, ": TR_STAT reads 2 (Done)"});
    rd(REG_FRAMES_SENT, v);
    check(v == 32'(n), $sformatf("%s: FRAMES_SENT %0d expected %0d", name, v, n));

    body = frame_body(dst, src, hdr, hdr_len, pay);
    S = 8 + body.size();
    first = 0;
    while (first < capv.size() && !capv[first]) first++;
    if (n > 0) check(first >= delay && first <= delay + 2,
          $sformatf("%s: %0d idle bytes before the first frame, START_DELAY %0d", name, first, delay));
    k = first;
    for (int f = 0; f < n; f++) begin
      bytes_t w;
      int bad;
      w = wire_frame(body);
      bad = 0;
      foreach (w[i]) if (k + i >= capd.size() || !capv[k + i] || capd[k + i] != w[i]) bad++;
      check(bad == 0, $sformatf("%s: frame %0d has %0d wrong bytes", name, f, bad));
      k += w.size();
      bad = 0;
      for (int i = 0; i < ifg; i++) if (k + i >= capv.size() || capv[k + i]) bad++;
      check(bad == 0, $sformatf("%s: gap after frame %0d wrong in %0d bytes", name, f, bad));
      k += ifg;
    end
    while (k < capv.size()) begin
      if (capv[k]) begin check(0, {name, ": extra data after the last gap"}); break; end
      k++;
    end
    // duration: start to Done in byte times (Done is set in the last byte time)
    exp_bt = delay + n * (S + ifg);
    check((t1 - t0) >= (exp_bt - 1) * d && (t1 - t0) <= (exp_bt + 2) * d + 2,
          $sformatf("%s: %0d cycles from start to Done, expected about %0d", name, t1 - t0, exp_bt * d));
    $display("%s: S=%0d gap=%0d frames=%0d -> %0d cycles", name, S, ifg, n, t1 - t0);
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // read-back and reset values
    rd(REG_INTERFRAME_GAP, v); check(v == 12, "INTERFRAME_GAP resets to 12");
    rd(REG_HEADER_SIZE, v);    check(v == 14, "HEADER_SIZE resets to 14");
    wr(REG_START_DELAY, 32'h1234_5678);
    rd(REG_START_DELAY, v);    check(v == 32'h1234_5678, "START_DELAY read-back");

    // setup of the published sample script: delay 10, gap 12, 10 frames, 50 byte payload
    run_case("sample", 1, 48'hFFFF_FFFF_FFFF, 48'h1234_5678_90AB, 48'h0800_0000_0000, 2,
             50, 10, 12, 10);
    // PROFINET Ethertype, minimum frame, 100 Mb/s
    run_case("fast72", 10, 48'h12EB_74CF_66F9, 48'h12EB_7406_556B, 48'h8892_0000_0000, 2,
             46, 0, 12, 3);
    // 50% load gap, VLAN-tagged header, 100 Mb/s
    run_case("vlan50", 10, 48'h12EB_74CF_66F9, 48'h12EB_7406_556B, 48'h8100_0005_8892, 6,
             42, 3, 1550 - 4 * 0, 2);
    // zero gap (back to back)
    run_case("b2b", 1, 48'h0102_0304_0506, 48'h0A0B_0C0D_0E0F, 48'h8892_0000_0000, 2,
             46, 0, 0, 4);
    // zero frames: Done at once
    run_case("none", 1, 48'h0, 48'h0, 48'h0, 2, 46, 0, 12, 0);

    // stop: run falls while frames are being sent; only whole frames leave
    begin
      int runs, len, bad;
      div = 1;
      setup_gen(48'h12EB_74CF_66F9, 48'h12EB_7406_556B, 48'h8892_0000_0000, 2, 46, 0, 12, 1000);
      capd.delete(); capv.delete();
      @(negedge clk); capture = 1; run = 1;
      repeat (300) @(posedge clk);
      @(negedge clk); run = 0;
      repeat (200) @(posedge clk);
      capture = 0;
      check(state == TX_DONE, "stop: Done after run falls");
      runs = 0; len = 0; bad = 0;
      foreach (capv[i]) begin
        if (capv[i]) len++;
        else if (len != 0) begin
          runs++;
          if (len != 72) bad++;
          len = 0;
        end
      end
      check(bad == 0 && len == 0, "stop: every frame sent was complete");
      check(runs >= 3 && runs <= 5, $sformatf("stop: %0d frames before stopping", runs));
    end

    // disabling returns to Disable
    wr(REG_TR_CTRL, 0);
    rd(REG_TR_STAT, v); check(v == 0, "TR_CTRL=0 gives TR_STAT Disable");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
