// tb_stream_switch: self-checking test of the Ethernet stream switch.
//
// Sends 72-byte frames into ports A..D and records the forwarded streams.
// In transparent and scripting mode nothing may be forwarded. In switching
// mode every frame of A must appear on B's forward path one cycle later and
// byte for byte, and vice versa, while C and D stay idle. Turning switching
// on or off in the middle of a frame must never produce a partial frame.
module tb_stream_switch;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  nj_mode_e mode = MODE_TRANSPARENT;
  gmii_t    rx  [N];
  gmii_t    fwd [N];

  int checks = 0, failures = 0;

  stream_switch #(.NUM_PORTS(N)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference: previous-cycle input
  gmii_t rx_d [N];
  always @(posedge clk) rx_d <= rx;

  // per-output: run lengths of dv and mismatches against the partner's input
  int runs [N], cur [N], bad_len [N], mism [N], active [N];
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N; p++) begin
      if (fwd[p].stb || fwd[p].dv) active[p]++;
      if (fwd[p].stb && fwd[p].dv) cur[p]++;
      else if (fwd[p].stb && cur[p] != 0) begin
        runs[p]++;
        if (cur[p] != 72) bad_len[p]++;
        cur[p] = 0;
      end
      if (p < 2 && fwd[p].dv && fwd[p] != rx_d[1 - p]) mism[p]++;
    end
  end

  bytes_t frm;
  task automatic send_both(int nfr);
    for (int f = 0; f < nfr; f++) begin
      foreach (frm[i]) begin
        @(negedge clk);
        for (int p = 0; p < N; p++) rx[p] = '{stb: 1, dv: 1, data: frm[i] ^ 8'(p)};
      end
      for (int g = 0; g < 12; g++) begin
        @(negedge clk);
        for (int p = 0; p < N; p++) rx[p] = '{stb: 1, dv: 0, data: 0};
      end
    end
  endtask

  initial begin
    for (int p = 0; p < N; p++) begin
      rx[p] = GMII_IDLE; runs[p] = 0; cur[p] = 0; bad_len[p] = 0; mism[p] = 0; active[p] = 0;
    end
    frm = wire_frame(frame_body(48'h12EB_74CF_66F9, 48'h12EB_7406_556B, 48'h8892_0000_0000, 2, 46));
    repeat (3) @(posedge clk);
    rst_n = 1;

    // transparent and scripting: nothing forwarded
    send_both(2);
    mode = MODE_SCRIPTING;
    send_both(2);
    repeat (3) @(posedge clk);
    for (int p = 0; p < N; p++) check(active[p] == 0, $sformatf("port %0d: nothing forwarded outside switching mode", p));

    // switching: A <-> B
    mode = MODE_SWITCHING;
    send_both(3);
    repeat (3) @(posedge clk);
    check(runs[0] == 3 && runs[1] == 3, $sformatf("switching: %0d/%0d frames forwarded to A/B", runs[0], runs[1]));
    check(mism[0] == 0 && mism[1] == 0, "switching: forwarded bytes equal the partner's input, one cycle later");
    check(active[2] == 0 && active[3] == 0, "switching: C and D not bridged");

    // mode changes in the middle of frames
    fork
      send_both(4);
      begin
        repeat (30) @(negedge clk); mode = MODE_TRANSPARENT;    // inside frame 0 (84 cycles per frame)
        repeat (130) @(negedge clk); mode = MODE_SWITCHING;     // inside frame 1
      end
    join
    repeat (3) @(posedge clk);
    check(bad_len[0] == 0 && bad_len[1] == 0, "mode change never cuts a frame");
    check(runs[1] == 6, $sformatf("frame 0 completed after switching off, frame 1 skipped, 2 and 3 sent: %0d frames", runs[1]));
    check(mism[0] == 0 && mism[1] == 0, "no byte mismatches");

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
