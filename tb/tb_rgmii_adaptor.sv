// tb_rgmii_adaptor: self-checking test of the port adaptor.
//
// Checks the byte strobe (every cycle at 1 Gb/s, exactly every 10th cycle at
// 100 Mb/s), the one-cycle registers in both directions, and the SFD
// timestamps: rx_ts must equal the time base value of the cycle in which the
// SFD was presented at the PHY pins (latency compensated), tx_ts the value
// of the cycle in which the SFD leaves on phy_tx. A 0xD5 byte that does not
// follow a preamble byte must not be timestamped.
module tb_rgmii_adaptor;
  import flag_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic        speed_100 = 1'b0;
  logic [63:0] now_ns = 64'd5000;
  logic        stb;
  gmii_t       tx_in = GMII_IDLE, phy_tx, phy_rx = GMII_IDLE, rx_out;
  logic [63:0] rx_ts, tx_ts;
  logic        rx_ts_valid, tx_ts_valid;

  int checks = 0, failures = 0;

  rgmii_adaptor dut (.*);

  always @(posedge clk) now_ns <= now_ns + 8;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // pass-through registers, checked every cycle
  gmii_t tx_d, rx_d;
  always @(posedge clk) begin
    tx_d <= tx_in;
    rx_d <= phy_rx;
  end
  int reg_bad = 0;
  always @(negedge clk) if (rst_n) begin
    if (phy_tx != tx_d) reg_bad++;
    if (rx_out != rx_d) reg_bad++;
  end

  initial begin
    int n, last, gapbad;
    logic [63:0] t_sfd;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // strobe at 1 Gb/s
    n = 0;
    repeat (50) begin @(negedge clk); if (stb) n++; end
    check(n == 50, $sformatf("1G: %0d strobes in 50 cycles", n));
    // strobe at 100 Mb/s
    @(negedge clk); speed_100 = 1;
    repeat (12) @(negedge clk);
    n = 0; last = -1; gapbad = 0;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      if (stb) begin
        if (last >= 0 && c - last != 10) gapbad++;
        last = c; n++;
      end
    end
    check(n == 20 && gapbad == 0, $sformatf("100M: %0d strobes in 200 cycles, %0d bad spacings", n, gapbad));

    // receive: preamble then SFD at the pins
    @(negedge clk); speed_100 = 0;
    for (int i = 0; i < 7; i++) begin @(negedge clk); phy_rx = '{stb: 1, dv: 1, data: 8'h55}; end
    @(negedge clk); phy_rx = '{stb: 1, dv: 1, data: 8'hD5};
    @(posedge clk) t_sfd = now_ns;     // time base in the cycle the SFD is at the pins
    @(negedge clk); phy_rx = '{stb: 1, dv: 1, data: 8'h01};
    @(posedge clk); #1;
    check(rx_ts_valid, "rx_ts_valid pulses after the SFD");
    check(rx_ts == t_sfd, $sformatf("rx_ts %0d, SFD at the pins at %0d", rx_ts, t_sfd));
    // a D5 byte inside the frame is not an SFD
    @(negedge clk); phy_rx = '{stb: 1, dv: 1, data: 8'hD5};
    @(negedge clk); phy_rx = '{stb: 1, dv: 1, data: 8'hD5};
    @(negedge clk); phy_rx = GMII_IDLE;
    repeat (3) @(posedge clk); #1;
    check(rx_ts == t_sfd, "payload D5 bytes are not timestamped");

    // transmit
    for (int i = 0; i < 7; i++) begin @(negedge clk); tx_in = '{stb: 1, dv: 1, data: 8'h55}; end
    @(negedge clk); tx_in = '{stb: 1, dv: 1, data: 8'hD5};
    @(negedge clk); tx_in = '{stb: 1, dv: 1, data: 8'h02};
    check(phy_tx.data == 8'hD5, "SFD on phy_tx one cycle after tx_in");
    t_sfd = now_ns;
    check(tx_ts_valid, "tx_ts_valid pulses with the SFD on phy_tx");
    check(tx_ts == t_sfd, $sformatf("tx_ts %0d, SFD left at %0d", tx_ts, t_sfd));
    @(negedge clk); tx_in = GMII_IDLE;
    repeat (3) @(posedge clk);
    check(reg_bad == 0, $sformatf("%0d register mismatches", reg_bad));

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
