// tb_frame_analyser: self-checking test of the receive analyser.
//
// Feeds the analyser a sequence of frames built by the reference model:
// matching frames and frames with a wrong destination MAC, a wrong
// Ethertype, a corrupted byte (bad CRC) or a wrong length. Checks per-frame
// verdicts and trailer codes, NUMBER_OF_RECV_OK / NOK, the automatic stop
// (Hold, TR_STAT = 2) after FRAMES_EXP frames and after FRAMES_EXP_OK
// matches, the first/last timestamps, and that nothing is counted while
// disabled, and the masked 4-byte payload pattern. Bytes arrive at 1 Gb/s
// and, in one run, at 100 Mb/s.
module tb_frame_analyser;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  ocb_req_t    ocb = OCB_IDLE;
  logic [31:0] rdata;
  logic        run = 1'b0;
  gmii_t       rx = GMII_IDLE;
  logic [63:0] rx_ts = '0;
  logic        verdict_valid, verdict_ok;
  logic [7:0]  tag_code;
  rx_state_e   state;

  int checks = 0, failures = 0;

  frame_analyser dut (.clk, .rst_n, .ocb, .ocb_rdata(rdata), .run, .rx, .rx_ts,
                      .verdict_valid, .verdict_ok, .tag_code, .state);

  localparam bit [47:0] DST = 48'h12EB_74CF_66F9, SRC = 48'h12EB_7406_556B;
  localparam bit [47:0] HDR = 48'h8892_0000_0000;

  // verdict log
  bit   vok[$];
  byte unsigned vcode[$];
  always @(posedge clk) if (verdict_valid) begin vok.push_back(verdict_ok); vcode.push_back(tag_code); end

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
    #1 d = rdata;
    @(negedge clk); ocb = OCB_IDLE;
  endtask

  int div = 1;
  // Sends one frame (wire bytes) followed by 12 idle bytes, one byte per div cycles.
  task automatic send(bytes_t w, logic [63:0] ts);
    foreach (w[i]) begin
      @(negedge clk);
      rx = '{stb: 1'b1, dv: 1'b1, data: w[i]};
      if (i == 7) rx_ts = ts;
      for (int k = 1; k < div; k++) begin @(negedge clk); rx = '{stb: 1'b0, dv: 1'b1, data: w[i]}; end
    end
    for (int g = 0; g < 12 * div; g++) begin
      @(negedge clk);
      rx = '{stb: (g % div) == 0, dv: 1'b0, data: 8'h00};
    end
    @(negedge clk); rx = GMII_IDLE;
  endtask

  typedef enum {GOOD, BAD_DST, BAD_TYPE, BAD_CRC, BAD_LEN} kind_e;

  function automatic bytes_t make(kind_e k);
    bytes_t b;
    case (k)
      BAD_DST:  b = frame_body(DST ^ 48'h1, SRC, HDR, 2, 46);
      BAD_TYPE: b = frame_body(DST, SRC, 48'h0800_0000_0000, 2, 46);
      BAD_LEN:  b = frame_body(DST, SRC, HDR, 2, 50);
      default:  b = frame_body(DST, SRC, HDR, 2, 46);
    endcase
    if (k == BAD_CRC) b[20] = b[20] ^ 8'h10;
    return wire_frame(b);
  endfunction

  initial begin
    logic [31:0] v;
    kind_e seq[$];
    int exp_ok, exp_nok;
    repeat (3) @(posedge clk);
    rst_n = 1;

    wr(REG_ETHDST_HI, 32'(DST[47:32])); wr(REG_ETHDST_LO, DST[31:0]);
    wr(REG_ETHSRC_HI, 32'(SRC[47:32])); wr(REG_ETHSRC_LO, SRC[31:0]);
    wr(REG_HDR_AFTER_HI, 32'(HDR[47:32])); wr(REG_HDR_AFTER_LO, HDR[31:0]);
    wr(REG_HEADER_SIZE, 14); wr(REG_PAYLOAD_SIZE, 46);
    wr(REG_ERROR_CODE, 8'hE7);
    wr(REG_FRAMES_EXP, 8);
    wr(REG_TR_CTRL, 3);          // enable + tagging
    rd(REG_TR_STAT, v); check(v == 0, "TR_STAT Disable before start");

    // run 1: 8 frames expected, mixed; a 9th frame must not be counted
    @(negedge clk); run = 1;
    @(negedge clk);
    rd(REG_TR_STAT, v); check(v == 1, "TR_STAT Receiving after start");
    seq = '{GOOD, BAD_DST, GOOD, BAD_CRC, GOOD, BAD_TYPE, BAD_LEN, GOOD, GOOD};
    vok.delete(); vcode.delete();
    foreach (seq[i]) send(make(seq[i]), 64'(1000 * (i + 1)));
    repeat (4) @(posedge clk);
    check(vok.size() == seq.size(), $sformatf("%0d verdicts for %0d frames", vok.size(), seq.size()));
    foreach (seq[i]) if (i < vok.size()) begin
      check(vok[i] == (seq[i] == GOOD), $sformatf("verdict of frame %0d (%s)", i, seq[i].name()));
      check(vcode[i] == ((seq[i] == GOOD) ? 8'h00 : 8'hE7), $sformatf("tag code of frame %0d", i));
    end
    rd(REG_RECV_OK, v);  check(v == 4, $sformatf("NUMBER_OF_RECV_OK %0d expected 4", v));
    rd(REG_RECV_NOK, v); check(v == 4, $sformatf("NUMBER_OF_RECV_NOK %0d expected 4", v));
    rd(REG_TR_STAT, v);  check(v == 2, "Hold after FRAMES_EXP frames");
    rd(REG_FIRST_TS_LO, v); check(v == 1000, $sformatf("FIRST_TS %0d", v));
    rd(REG_LAST_TS_LO, v);  check(v == 8000, $sformatf("LAST_TS %0d (9th frame not counted)", v));
    @(negedge clk); run = 0;

    // run 2: stop after 2 matching frames, tagging off, 100 Mb/s
    div = 10;
    wr(REG_FRAMES_EXP, 0); wr(REG_FRAMES_EXP_OK, 2); wr(REG_TR_CTRL, 1);
    @(negedge clk); run = 1;
    vok.delete(); vcode.delete();
    seq = '{BAD_CRC, GOOD, BAD_DST, GOOD, GOOD};
    foreach (seq[i]) send(make(seq[i]), 64'(5000 + i));
    repeat (4) @(posedge clk);
    rd(REG_RECV_OK, v);  check(v == 2, $sformatf("run 2: RECV_OK %0d expected 2", v));
    rd(REG_RECV_NOK, v); check(v == 2, $sformatf("run 2: RECV_NOK %0d expected 2", v));
    rd(REG_TR_STAT, v);  check(v == 2, "run 2: Hold after FRAMES_EXP_OK matches");
    foreach (vcode[i]) check(vcode[i] == 0, "run 2: no tag code with tagging off");
    @(negedge clk); run = 0;

    // run 3: disabled analyser counts nothing but still gives verdicts
    div = 1;
    wr(REG_TR_CTRL, 0);
    @(negedge clk); run = 1;
    vok.delete();
    send(make(GOOD), 64'd1);
    rd(REG_RECV_OK, v); check(v == 2, "disabled: counters unchanged");
    check(vok.size() == 1 && vok[0] == 1, "disabled: verdict still given");
    rd(REG_TR_STAT, v); check(v == 0, "disabled: TR_STAT Disable");
    @(negedge clk); run = 0;

    // run 4: payload pattern (payload byte i is i, payload starts at byte 14)
    wr(REG_FRAMES_EXP, 0); wr(REG_FRAMES_EXP_OK, 0); wr(REG_TR_CTRL, 1);
    wr(REG_PAT_OFFSET, 20); wr(REG_PAT_VALUE, 32'h0607_0809); wr(REG_PAT_MASK, 32'hFFFF_FFFF);
    rd(REG_PAT_VALUE, v); check(v == 32'h0607_0809, "PAT_VALUE read back");
    @(negedge clk); run = 1;
    vok.delete();
    send(make(GOOD), 64'd1);                                        // pattern present
    wr(REG_PAT_VALUE, 32'h0607_0800);
    send(make(GOOD), 64'd2);                                        // last byte differs
    wr(REG_PAT_MASK, 32'h00FF_0000); wr(REG_PAT_VALUE, 32'h5507_AAAA);
    send(make(GOOD), 64'd3);                                        // masked compare matches
    wr(REG_PAT_OFFSET, 100); wr(REG_PAT_MASK, 32'h0000_00FF);
    send(make(GOOD), 64'd4);                                        // frame too short for the pattern
    wr(REG_PAT_MASK, 0);
    send(make(GOOD), 64'd5);                                        // pattern off
    repeat (4) @(posedge clk);
    check(vok.size() == 5, $sformatf("pattern: %0d verdicts", vok.size()));
    if (vok.size() == 5)
      check(vok[0] && !vok[1] && vok[2] && !vok[3] && vok[4],
            $sformatf("pattern verdicts %0d%0d%0d%0d%0d, expected 10101", vok[0], vok[1], vok[2], vok[3], vok[4]));
    rd(REG_RECV_OK, v);  check(v == 3, $sformatf("pattern: RECV_OK %0d expected 3", v));
    rd(REG_RECV_NOK, v); check(v == 2, $sformatf("pattern: RECV_NOK %0d expected 2", v));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
