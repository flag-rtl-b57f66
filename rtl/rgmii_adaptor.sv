// rgmii_adaptor: the port-side adaptor between one Ethernet PHY and the
// port's generator, analyser and stream path, with SFD timestamping.
//
// Byte timing: the adaptor produces the transmit byte strobe stb for the
// port's speed: every cycle at 1 Gb/s (speed_100 = 0) and every
// FAST_ETH_DIV = 10th cycle at 100 Mb/s, as one byte at 100 Mb/s lasts 80 ns
// = 10 cycles of the 125 MHz clock. Whatever drives the port samples stb
// and presents its byte on tx_in one cycle later.
//
// Transmit: tx_in is registered once towards the PHY (phy_tx). When the SFD
// byte leaves, tx_ts takes the time base value of that cycle and tx_ts_valid
// pulses.
//
// Receive: phy_rx (byte stream with its own strobe, supplied by the PHY) is
// registered once (rx_out). When the SFD byte appears on rx_out, rx_ts takes
// now_ns minus the RX_LATENCY_CYC * 8 ns spent in this adaptor, i.e. the time
// at which the SFD arrived at the pins, and rx_ts_valid pulses. rx_ts stays
// valid for the rest of the frame.
//
// The timestamp at the SFD with compensation of the buffering latency and
// the 8 ns precision follow the platform description; the byte-wide PHY
// side (the double-data-rate pin conversion of RGMII is left to the device's
// I/O cells) and the one-register buffering are this design's choices.
module rgmii_adaptor
  import flag_pkg::*;
#(
  parameter int unsigned RX_LATENCY_CYC = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        speed_100,
  input  logic [63:0] now_ns,
  output logic        stb,
  input  gmii_t       tx_in,
  output gmii_t       phy_tx,
  input  gmii_t       phy_rx,
  output gmii_t       rx_out,
  output logic [63:0] rx_ts,
  output logic        rx_ts_valid,
  output logic [63:0] tx_ts,
  output logic        tx_ts_valid
);

  logic [3:0] div_q;
  logic       rx_pre_q;   // last received byte was a preamble byte
  logic       tx_pre_q;

  always_comb stb = !speed_100 || (div_q == 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      div_q       <= '0;
      phy_tx      <= GMII_IDLE;
      rx_out      <= GMII_IDLE;
      rx_ts       <= '0;
      tx_ts       <= '0;
      rx_ts_valid <= 1'b0;
      tx_ts_valid <= 1'b0;
      rx_pre_q    <= 1'b0;
      tx_pre_q    <= 1'b0;
    end else begin
      div_q  <= (div_q == 4'(FAST_ETH_DIV - 1)) ? '0 : div_q + 1;
      phy_tx <= tx_in;
      rx_out <= phy_rx;
      rx_ts_valid <= 1'b0;
      tx_ts_valid <= 1'b0;

      // transmit SFD: the byte leaving now on phy_tx is tx_in registered
      if (tx_in.stb) begin
        tx_pre_q <= tx_in.dv && tx_in.data == PREAMBLE_BYTE;
        if (tx_in.dv && tx_in.data == SFD_BYTE && tx_pre_q) begin
          tx_ts       <= now_ns + 64'(NS_PER_CYCLE);
          tx_ts_valid <= 1'b1;
        end
      end

      // receive SFD as it appears on rx_out
      if (rx_out.stb) begin
        rx_pre_q <= rx_out.dv && rx_out.data == PREAMBLE_BYTE;
        if (rx_out.dv && rx_out.data == SFD_BYTE && rx_pre_q) begin
          rx_ts       <= now_ns - 64'(RX_LATENCY_CYC * NS_PER_CYCLE);
          rx_ts_valid <= 1'b1;
        end
      end
    end
  end

endmodule
