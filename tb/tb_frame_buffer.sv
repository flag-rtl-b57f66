// tb_frame_buffer: self-checking test of one monitor buffer.
//
// Writes frames byte by byte as the monitor filter would, followed by the
// eof pulse with keep and a trailer code, and checks: a kept frame is held
// (full, len, code) and reads back byte for byte through the asynchronous
// read port; a frame arriving while the buffer is full is dropped and
// counted; a frame that is not kept leaves the buffer empty and is not
// counted; a frame longer than DEPTH bytes is dropped; a frame that started
// while full is dropped even if the buffer is released during it.
module tb_frame_buffer;
  import flag_pkg::*;

  localparam int unsigned DEPTH = 2048;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  fbyte_t        fb = '0;
  logic          eof = 1'b0, keep = 1'b0, release_frame = 1'b0;
  logic [7:0]    tag_code = '0, code, rd_data;
  logic          full;
  logic [AW:0]   len;
  logic [AW-1:0] rd_addr = '0;
  logic [31:0]   drops;

  int checks = 0, failures = 0;

  frame_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  byte unsigned ref_q[$];

  task automatic put(int n, bit k, logic [7:0] c, byte unsigned seed, bit rel_mid = 0);
    ref_q.delete();
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      fb = '{vld: 1'b1, data: 8'(seed + i * 7)};
      ref_q.push_back(8'(seed + i * 7));
      release_frame = rel_mid && (i == n / 2);
    end
    @(negedge clk); fb = '0; release_frame = 0;
    eof = 1; keep = k; tag_code = c;
    @(negedge clk); eof = 0; keep = 0; tag_code = 0;
  endtask

  task automatic readback(string name);
    int bad = 0;
    for (int i = 0; i < ref_q.size(); i++) begin
      rd_addr = AW'(i); #1;
      if (rd_data != ref_q[i]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d byte mismatches on read-back", name, bad));
  endtask

  task automatic rel();
    @(negedge clk); release_frame = 1;
    @(negedge clk); release_frame = 0;
  endtask

  initial begin
    byte unsigned first[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!full && drops == 0, "empty after reset");

    put(64, 1, 8'h00, 8'h10);
    check(full && len == 64 && code == 0, $sformatf("64-byte frame held: full %0d len %0d", full, len));
    readback("frame 1");
    first = ref_q;

    put(100, 1, 8'hE7, 8'h33);
    check(full && len == 64 && drops == 1, "frame while full dropped and counted");
    ref_q = first;
    readback("frame 1 kept after drop");

    rel();
    check(!full, "released");
    put(80, 0, 8'h00, 8'h44);
    check(!full && drops == 1, "frame not kept: buffer stays empty, not counted");

    put(1522, 1, 8'hE7, 8'h55);
    check(full && len == 1522 && code == 8'hE7, "1522-byte frame held with its code");
    readback("1522-byte frame");
    rel();

    put(DEPTH + 5, 1, 8'h00, 8'h66);
    check(!full && drops == 2, "frame longer than DEPTH dropped and counted");

    put(60, 1, 8'h00, 8'h77);
    check(full && len == 60, "frame held after an overflow");
    put(60, 1, 8'h00, 8'h88, 1);
    check(!full && drops == 3, "frame that started while full is dropped although released during it");
    put(60, 1, 8'h01, 8'h99);
    check(full && len == 60 && code == 1, "next frame held");
    readback("last frame");

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
