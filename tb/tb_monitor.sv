// tb_monitor: self-checking test of the monitor (filters, buffers, arbiter).
//
// Frames are injected on the ports' receive and transmit streams; the frames
// leaving Port L are captured and compared with the expected frames.
// Checked: in transparent mode every received frame is copied unchanged;
// outside transparent mode the destination filter drops a wrong frame and
// keeps a right one; port tagging and a non-zero analyser code add the
// trailer {port, code} with a new FCS; the transmit-stream select copies
// transmitted frames and ignores received ones; a burst larger than the
// one-frame buffer loses frames and DROPS counts every lost frame; the
// registers read back.
module tb_monitor;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  ocb_req_t    ocb = OCB_IDLE;
  logic [31:0] ocb_rdata;
  nj_mode_e    mode = MODE_TRANSPARENT;
  gmii_t       port_rx [N];
  gmii_t       port_tx [N];
  logic [7:0]  rx_code [N];
  gmii_t       portl_tx;

  int checks = 0, failures = 0;

  monitor #(.NUM_PORTS(N)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(int p, logic [15:0] a, logic [31:0] d);
    @(negedge clk); ocb = '{wr: 1'b1, rd: 1'b0, addr: {16'h0, 16'(p) * MREG_STRIDE + a}, wdata: d};
    @(negedge clk); ocb = OCB_IDLE;
  endtask

  task automatic rd(int p, logic [15:0] a, output logic [31:0] d);
    @(negedge clk); ocb = '{wr: 1'b0, rd: 1'b1, addr: {16'h0, 16'(p) * MREG_STRIDE + a}, wdata: 0};
    #1 d = ocb_rdata;
    @(negedge clk); ocb = OCB_IDLE;
  endtask

  // Port L capture
  bytes_t frames[$];
  bytes_t cur;
  always @(posedge clk) if (rst_n) begin
    if (portl_tx.dv) cur.push_back(portl_tx.data);
    else if (cur.size() != 0) begin frames.push_back(cur); cur.delete(); end
  end

  localparam bit [47:0] DST = 48'h12EB_74CF_66F9, SRC = 48'h12EB_7406_556B;

  function automatic bytes_t body(int p, bit [47:0] dst, int pay);
    return frame_body(dst, SRC + 48'(p), 48'h8892_0000_0000, 2, pay);
  endfunction

  function automatic bytes_t with_trailer(bytes_t b, int p, byte unsigned c);
    repeat (4) void'(b.pop_back());
    b.push_back(8'(p)); b.push_back(c);
    return {b, fcs_of(b)};
  endfunction

  // Sends body b (wire form) with a 12-byte gap on port p's rx (tx if on_tx).
  task automatic send(int p, bytes_t b, bit on_tx = 0);
    bytes_t w = wire_frame(b);
    foreach (w[i]) begin
      @(negedge clk);
      if (on_tx) port_tx[p] = '{stb: 1, dv: 1, data: w[i]};
      else       port_rx[p] = '{stb: 1, dv: 1, data: w[i]};
    end
    for (int g = 0; g < 12; g++) begin
      @(negedge clk);
      if (on_tx) port_tx[p] = '{stb: 1, dv: 0, data: 0};
      else       port_rx[p] = '{stb: 1, dv: 0, data: 0};
    end
    @(negedge clk);
    port_tx[p] = GMII_IDLE; port_rx[p] = GMII_IDLE;
  endtask

  task automatic drain();
    repeat (600) @(posedge clk);
  endtask

  initial begin
    bytes_t exp_b[N];
    logic [31:0] v;
    int got, drops_total;
    for (int p = 0; p < N; p++) begin port_rx[p] = GMII_IDLE; port_tx[p] = GMII_IDLE; rx_code[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // transparent: all four ports copied, filters bypassed
    wr(0, MREG_CTRL, 1); wr(0, MREG_DST_HI, 0); wr(0, MREG_DST_LO, 0);
    for (int p = 0; p < N; p++) exp_b[p] = body(p, 48'h1 + 48'(p), 46 + p);
    fork
      send(0, exp_b[0]); send(1, exp_b[1]); send(2, exp_b[2]); send(3, exp_b[3]);
    join
    drain();
    check(frames.size() == 4, $sformatf("transparent: %0d of 4 frames on Port L", frames.size()));
    got = 0;
    foreach (frames[i]) for (int p = 0; p < N; p++) if (frames[i] == wire_frame(exp_b[p])) got |= 1 << p;
    check(got == 4'hF, $sformatf("transparent: frames of ports %b copied unchanged", got[3:0]));

    // scripting: destination filter on A
    mode = MODE_SCRIPTING;
    wr(0, MREG_DST_HI, 32'(DST[47:32])); wr(0, MREG_DST_LO, DST[31:0]);
    rd(0, MREG_DST_LO, v); check(v == DST[31:0], "DST read back");
    rd(0, MREG_CTRL, v);   check(v == 1, "CTRL read back");
    frames.delete();
    send(0, body(0, DST ^ 48'h4, 46));
    drain();
    check(frames.size() == 0, "filter: wrong destination not copied");
    send(0, body(0, DST, 46));
    drain();
    check(frames.size() == 1 && frames[0] == wire_frame(body(0, DST, 46)), "filter: right destination copied");

    // port tag on B
    frames.delete();
    wr(1, MREG_CTRL, 32'b01000);
    send(1, body(1, DST, 50));
    drain();
    check(frames.size() == 1 && frames[0] == wire_frame(with_trailer(body(1, DST, 50), 1, 0)),
          "port tag: trailer {1, 0} and new FCS");

    // analyser code on C, tagging off
    frames.delete();
    wr(2, MREG_CTRL, 0);
    rx_code[2] = 8'hE7;
    send(2, body(2, DST, 46));
    rx_code[2] = 0;
    drain();
    check(frames.size() == 1 && frames[0] == wire_frame(with_trailer(body(2, DST, 46), 2, 8'hE7)),
          "analyser code: trailer {2, E7}");

    // transmit stream of D
    frames.delete();
    wr(3, MREG_CTRL, 32'b10000);
    send(3, body(3, 48'h77, 46), 0);
    send(3, body(3, 48'h88, 46), 1);
    drain();
    check(frames.size() == 1 && frames[0] == wire_frame(body(3, 48'h88, 46)),
          "transmit select: transmitted frame copied, received frame ignored");

    // burst on A: buffer overrun counted
    frames.delete();
    for (int i = 0; i < 6; i++) send(0, body(0, DST, 46));
    drain();
    rd(0, MREG_DROPS, v);
    drops_total = int'(v);
    check(drops_total > 0, $sformatf("burst: %0d frames lost", drops_total));
    check(frames.size() + drops_total == 6, $sformatf("burst: %0d copied + %0d lost = 6", frames.size(), drops_total));
    rd(1, MREG_DROPS, v); check(v == 0, "no losses on B");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
