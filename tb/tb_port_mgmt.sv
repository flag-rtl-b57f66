// tb_port_mgmt: self-checking test of one port (generator, adaptor, analyser).
//
// The port's PHY transmit pins are looped back to its receive pins. Checks:
// in transparent mode the forward stream reaches the PHY one cycle later and
// the generator stays silent even with run set; in scripting mode the
// generator's frames travel through the adaptor and the loop into the
// analyser, which counts all of them as matching and stops in Hold; the
// transmit and receive SFD timestamps agree (zero-length loop); the run at
// 100 Mb/s takes ten times as many cycles per byte as the run at 1 Gb/s.
module tb_port_mgmt;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  nj_mode_e    mode = MODE_TRANSPARENT;
  logic        run = 1'b0, speed_100 = 1'b0;
  logic [63:0] now_ns = '0;
  ocb_req_t    gen_req = OCB_IDLE, ana_req = OCB_IDLE;
  logic [31:0] gen_rdata, ana_rdata;
  gmii_t       phy_rx, phy_tx, fwd_in = GMII_IDLE, rx_out, tx_out;
  logic [7:0]  rx_code;
  logic [63:0] rx_ts, tx_ts;
  logic        rx_ts_valid, tx_ts_valid;
  tx_state_e   gen_state;
  rx_state_e   ana_state;

  int checks = 0, failures = 0;

  port_mgmt dut (.*);

  always_comb phy_rx = phy_tx;
  always @(posedge clk) now_ns <= now_ns + 8;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(bit ana, logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    if (ana) ana_req = '{wr: 1'b1, rd: 1'b0, addr: {16'h0, a}, wdata: d};
    else     gen_req = '{wr: 1'b1, rd: 1'b0, addr: {16'h0, a}, wdata: d};
    @(negedge clk); gen_req = OCB_IDLE; ana_req = OCB_IDLE;
  endtask

  task automatic rd(bit ana, logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    if (ana) ana_req = '{wr: 1'b0, rd: 1'b1, addr: {16'h0, a}, wdata: 0};
    else     gen_req = '{wr: 1'b0, rd: 1'b1, addr: {16'h0, a}, wdata: 0};
    #1 d = ana ? ana_rdata : gen_rdata;
    @(negedge clk); gen_req = OCB_IDLE; ana_req = OCB_IDLE;
  endtask

  localparam bit [47:0] DST = 48'h12EB_74CF_66F9, SRC = 48'h12EB_7406_556B;

  // Both sides share the frame description.
  task automatic setup(int pay, int ifg, int n);
    for (int s = 0; s < 2; s++) begin
      wr(s, REG_ETHDST_HI, 32'(DST[47:32])); wr(s, REG_ETHDST_LO, DST[31:0]);
      wr(s, REG_ETHSRC_HI, 32'(SRC[47:32])); wr(s, REG_ETHSRC_LO, SRC[31:0]);
      wr(s, REG_HDR_AFTER_HI, 32'h8892);     wr(s, REG_HDR_AFTER_LO, 0);
      wr(s, REG_HEADER_SIZE, 14);            wr(s, REG_PAYLOAD_SIZE, pay);
    end
    wr(0, REG_INTERFRAME_GAP, ifg); wr(0, REG_NUMBER_OF_FRAMES, n); wr(0, REG_START_DELAY, 0);
    wr(1, REG_FRAMES_EXP, n);
    wr(0, REG_TR_CTRL, 1); wr(1, REG_TR_CTRL, 1);
  endtask

  int ntx = 0, nrx = 0, ts_bad = 0, act = 0;
  logic [63:0] last_tx_ts;
  always @(posedge clk) if (rst_n) begin
    if (tx_ts_valid) begin ntx++; last_tx_ts = tx_ts; end
    if (rx_ts_valid) begin nrx++; if (rx_ts != last_tx_ts) ts_bad++; end
    if (phy_tx.dv) act++;
  end

  // Runs n frames; returns the cycles from run to the analyser's Hold.
  task automatic loop_run(int pay, int ifg, int n, output int cyc);
    logic [31:0] v;
    setup(pay, ifg, n);
    ntx = 0; nrx = 0;
    @(negedge clk); run = 1;
    @(negedge clk); cyc = 1;
    while (ana_state != RX_HOLD && cyc < 400_000) begin @(negedge clk); cyc++; end
    rd(1, REG_RECV_OK, v);  check(v == n, $sformatf("loop: RECV_OK %0d of %0d", v, n));
    rd(1, REG_RECV_NOK, v); check(v == 0, "loop: RECV_NOK 0");
    rd(0, REG_FRAMES_SENT, v); check(v == n, "loop: generator sent all frames");
    repeat (200) @(negedge clk);
    check(gen_state == TX_DONE, "loop: generator Done after its last gap");
    check(ntx == n && nrx == n, $sformatf("loop: %0d tx and %0d rx timestamps", ntx, nrx));
    @(negedge clk); run = 0;
  endtask

  initial begin
    int c1, c2, bad;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // transparent: forward path only
    setup(46, 12, 3);
    @(negedge clk); run = 1;
    act = 0; bad = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      fwd_in = '{stb: 1, dv: (i % 50) < 40, data: 8'(i)};
      #1 if (i > 0 && phy_tx.data != 8'(i - 1) && (i - 1) % 50 < 40) bad++;
    end
    @(negedge clk); fwd_in = GMII_IDLE; run = 0;
    check(bad == 0, "transparent: forward stream on phy_tx one cycle later");
    check(gen_state != TX_TRANSMITTING, "transparent: generator not started");
    repeat (30) @(negedge clk);

    // scripting: generator to analyser through the loop
    mode = MODE_SCRIPTING;
    loop_run(46, 12, 10, c1);
    check(ts_bad == 0, "loop: rx timestamp equals tx timestamp of the same frame");

    speed_100 = 1;
    repeat (20) @(negedge clk);
    loop_run(46, 12, 10, c2);
    // 10 frames of 72 bytes + 9 gaps of 12 bytes, plus a few cycles of pipeline
    check(c1 >= 10 * 72 + 9 * 12 && c1 <= 10 * 72 + 9 * 12 + 20, $sformatf("1 Gb/s run %0d cycles", c1));
    check(c2 >= 10 * (10 * 72 + 9 * 12) && c2 <= 10 * (10 * 72 + 9 * 12) + 60, $sformatf("100 Mb/s run %0d cycles", c2));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
