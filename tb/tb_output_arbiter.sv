// tb_output_arbiter: self-checking test of the Port L output arbiter.
//
// Models four held buffers (full, len, code, contents) and lets the arbiter
// drain them. Checks that Port L carries one byte per cycle, that every
// frame is sent as preamble, SFD and the stored bytes, that buffers are served
// round robin, that each buffer is released exactly once, that frames are
// separated by at least the 12-byte minimum gap, and that with port tagging
// or a non-zero analyser code the stored FCS is replaced by the trailer
// {port, code} and a freshly computed, valid FCS.
module tb_output_arbiter;
  import flag_pkg::*;
  import tb_eth_pkg::*;

  localparam int unsigned N = 4, DEPTH = 2048, AW = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [N-1:0]  full = '0, port_tag = '0, release_frame;
  logic [AW:0]   len  [N];
  logic [7:0]    code [N];
  logic [AW-1:0] rd_addr;
  logic [7:0]    rd_data [N];
  gmii_t         portl_tx;

  int checks = 0, failures = 0;

  output_arbiter #(.NUM_PORTS(N), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  bytes_t mem [N];
  always_comb for (int p = 0; p < N; p++) rd_data[p] = (rd_addr < mem[p].size()) ? mem[p][rd_addr] : 8'h00;

  int releases [N];
  always @(posedge clk) for (int p = 0; p < N; p++) if (rst_n && release_frame[p]) begin
    releases[p]++;
    full[p] <= 1'b0;
  end

  // Port L capture
  bytes_t frames[$];
  bytes_t cur;
  int idle_run = 0, min_gap = 1000, nostb = 0;
  always @(posedge clk) if (rst_n) begin
    if (!portl_tx.stb && $time > 40) nostb++;
    if (portl_tx.dv) begin
      if (cur.size() == 0 && frames.size() > 0 && idle_run < min_gap) min_gap = idle_run;
      cur.push_back(portl_tx.data);
      idle_run = 0;
    end else begin
      if (cur.size() != 0) begin frames.push_back(cur); cur.delete(); end
      idle_run++;
    end
  end

  function automatic bytes_t expected(int p, bit tag, byte unsigned c);
    bytes_t b = mem[p];
    if (tag || c != 0) begin
      repeat (4) void'(b.pop_back());
      b.push_back(8'(p)); b.push_back(c);
      b = {b, fcs_of(b)};
    end
    return wire_frame(b);
  endfunction

  task automatic load(int p, int pay, byte unsigned c);
    mem[p] = frame_body(48'h12EB_74CF_66F9, 48'(48'h12EB_7406_5500 + p), 48'h8892_0000_0000, 2, pay);
    len[p] = (AW+1)'(mem[p].size());
    code[p] = c;
    full[p] = 1'b1;
  endtask

  initial begin
    bytes_t exp_q[$];
    for (int p = 0; p < N; p++) begin len[p] = '0; code[p] = '0; releases[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(frames.size() == 0 && cur.size() == 0, "nothing sent while all buffers are empty");

    // round 1: all four full, no trailers; order A, B, C, D
    @(negedge clk);
    for (int p = 0; p < N; p++) load(p, 46 + 10 * p, 0);
    for (int p = 0; p < N; p++) exp_q.push_back(expected(p, 0, 0));
    wait (full == 0);
    repeat (20) @(posedge clk);
    check(frames.size() == 4, $sformatf("round 1: %0d frames on Port L", frames.size()));
    foreach (exp_q[i]) if (i < frames.size()) check(frames[i] == exp_q[i], $sformatf("round 1: frame %0d is buffer %0d, unchanged", i, i));

    // round 2: trailers; C and B filled, last served was D -> B first, then C
    frames.delete(); exp_q.delete();
    @(negedge clk);
    port_tag = 4'b0100;
    load(2, 100, 8'h00);
    load(1, 46, 8'hE7);
    exp_q.push_back(expected(1, 0, 8'hE7));
    exp_q.push_back(expected(2, 1, 8'h00));
    wait (full == 0);
    repeat (20) @(posedge clk);
    check(frames.size() == 2, $sformatf("round 2: %0d frames", frames.size()));
    foreach (exp_q[i]) if (i < frames.size()) check(frames[i] == exp_q[i], $sformatf("round 2: frame %0d with trailer and new FCS", i));
    if (frames.size() == 2) begin
      bytes_t b;
      bytes_t got_fcs;
      b = frames[0];
      repeat (8) void'(b.pop_front());
      got_fcs = b[b.size()-4:b.size()-1];
      repeat (4) void'(b.pop_back());
      check(fcs_of(b) == got_fcs, "round 2: trailer frame FCS valid");
    end

    // round 3: round robin continues after C -> D then A
    frames.delete(); exp_q.delete();
    @(negedge clk);
    port_tag = '0;
    load(0, 46, 0);
    load(3, 46, 0);
    exp_q.push_back(expected(3, 0, 0));
    exp_q.push_back(expected(0, 0, 0));
    wait (full == 0);
    repeat (20) @(posedge clk);
    check(frames.size() == 2 && frames[0] == exp_q[0] && frames[1] == exp_q[1], "round 3: D served before A");

    check(releases[0] == 2 && releases[1] == 2 && releases[2] == 2 && releases[3] == 2,
          $sformatf("each buffer released once per frame: %0d %0d %0d %0d", releases[0], releases[1], releases[2], releases[3]));
    check(min_gap >= MIN_IFG, $sformatf("minimum gap between frames %0d bytes", min_gap));
    check(min_gap <= MIN_IFG + 1, $sformatf("back-to-back frames leave only %0d idle bytes", min_gap));
    check(nostb == 0, "Port L strobe high every cycle (1 Gb/s)");

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
