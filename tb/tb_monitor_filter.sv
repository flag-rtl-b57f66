// tb_monitor_filter: self-checking test of the monitor filter.
//
// For a list of (filter setting, frame) cases it checks that the frame
// bytes after the SFD come out unchanged on fb, that eof pulses once after
// the last byte, and that keep equals the decision worked out here from the
// frame's fields: destination MAC, source MAC and Ethertype, the latter
// also behind an 802.1Q tag. Bypass keeps everything.
module tb_monitor_filter;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  mon_cfg_t cfg = '0;
  logic     bypass = 1'b0;
  gmii_t    in = GMII_IDLE;
  fbyte_t   fb;
  logic     eof, keep;

  int checks = 0, failures = 0;

  monitor_filter dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  byte unsigned got[$];
  int  neof = 0;
  bit  last_keep;
  always @(posedge clk) begin
    if (fb.vld) got.push_back(fb.data);
    if (eof) begin neof++; last_keep = keep; end
  end

  localparam bit [47:0] DST = 48'h12EB_74CF_66F9, SRC = 48'h12EB_7406_556B;

  task automatic one(string name, bit dst_en, bit src_en, bit type_en, bit byp,
                     bit [47:0] fdst, bit [47:0] fsrc, bit [47:0] hdr, int hlen, int div);
    bytes_t body, w;
    bit exp_keep;
    body = frame_body(fdst, fsrc, hdr, hlen, 46);
    w = wire_frame(body);
    cfg = '{dst_en: dst_en, src_en: src_en, type_en: type_en, port_tag: 0, watch_tx: 0,
            dst: DST, src: SRC, etype: 16'h8892};
    bypass = byp;
    got.delete(); neof = 0;
    foreach (w[i]) for (int k = 0; k < div; k++) begin
      @(negedge clk); in = '{stb: k == 0, dv: 1, data: w[i]};
    end
    for (int g = 0; g < 12 * div; g++) begin @(negedge clk); in = '{stb: (g % div) == 0, dv: 0, data: 0}; end
    @(negedge clk); in = GMII_IDLE;
    repeat (2) @(posedge clk);
    exp_keep = byp ||
               ((!dst_en || fdst == DST) && (!src_en || fsrc == SRC) &&
                (!type_en || (hlen == 2 && hdr[47:32] == 16'h8892) ||
                             (hlen == 6 && hdr[47:32] == 16'h8100 && hdr[15:0] == 16'h8892)));
    check(got.size() == body.size() && got == body, {name, ": frame bytes passed unchanged"});
    check(neof == 1, $sformatf("%s: %0d eof pulses", name, neof));
    check(last_keep == exp_keep, $sformatf("%s: keep %0d expected %0d", name, last_keep, exp_keep));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    one("no filter",      0, 0, 0, 0, 48'h1, 48'h2, 48'h0800_0000_0000, 2, 1);
    one("dst match",      1, 0, 0, 0, DST, 48'h2, 48'h0800_0000_0000, 2, 1);
    one("dst miss",       1, 0, 0, 0, DST ^ 48'h100, SRC, 48'h8892_0000_0000, 2, 1);
    one("src match",      0, 1, 0, 0, 48'h5, SRC, 48'h0800_0000_0000, 2, 1);
    one("src miss",       1, 1, 0, 0, DST, SRC ^ 48'h1, 48'h8892_0000_0000, 2, 1);
    one("type match",     0, 0, 1, 0, DST, SRC, 48'h8892_0000_0000, 2, 1);
    one("type miss",      0, 0, 1, 0, DST, SRC, 48'h0800_0000_0000, 2, 1);
    one("vlan type match",1, 1, 1, 0, DST, SRC, 48'h8100_0005_8892, 6, 1);
    one("vlan type miss", 0, 0, 1, 0, DST, SRC, 48'h8100_0005_0800, 6, 1);
    one("all, 100M",      1, 1, 1, 0, DST, SRC, 48'h8892_0000_0000, 2, 10);
    one("bypass",         1, 1, 1, 1, 48'h9, 48'h9, 48'h0800_0000_0000, 2, 1);
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
