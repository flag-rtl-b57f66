// stream_switch: the Ethernet stream path between ports.
//
// In switching mode Port A (index 0) and Port B (index 1) are bridged: every
// byte received on one is forwarded, one cycle later and with its own byte
// strobe, to the other port's transmit path (fwd). Ports C and D are not
// bridged; their fwd outputs stay idle (constant, which synthesis reports
// and which is intended). In the other modes nothing is forwarded.
//
// A mode change never cuts a frame: each bridge direction switches on or off
// only while its source port is between frames (the byte stream is idle).
// Forwarding is cut-through, so both bridged ports must run at the same
// speed.
//
// Bridging A with B in switching mode follows the platform description; the
// frame-boundary rule and cut-through forwarding are this design's choices.
module stream_switch
  import flag_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  nj_mode_e mode,
  input  gmii_t    rx  [NUM_PORTS],
  output gmii_t    fwd [NUM_PORTS]
);

  // Bridge partner of each port (-1: none).
  function automatic int partner(input int p);
    if (p == 0) return 1;
    if (p == 1) return 0;
    return -1;
  endfunction

  logic [NUM_PORTS-1:0] busy_q;   // source port is inside a frame
  logic [NUM_PORTS-1:0] on_q;     // forwarding from port p to its partner

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        busy_q[p] <= 1'b0;
        on_q[p]   <= 1'b0;
      end else begin
        if (rx[p].stb) busy_q[p] <= rx[p].dv;
        if (!busy_q[p] && !(rx[p].stb && rx[p].dv))
          on_q[p] <= (mode == MODE_SWITCHING) && (partner(p) >= 0);
      end
    end

    if (partner(p) >= 0) begin : g_bridged
      localparam int Q = partner(p);
      always_ff @(posedge clk) begin
        if (!rst_n)      fwd[p] <= GMII_IDLE;
        else if (on_q[Q]) fwd[p] <= rx[Q];
        else             fwd[p] <= GMII_IDLE;
      end
    end else begin : g_none
      assign fwd[p] = GMII_IDLE;
    end
  end

endmodule
