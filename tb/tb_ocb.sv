// tb_ocb: self-checking test of the on-chip bus decoder.
//
// Stub devices answer reads with a value made of a device number and the
// offset they see. For random offsets inside every device's block (global,
// monitor, TXA..TXD, RXA..RXD) the test checks that a write reaches only
// the addressed device with the offset in addr and the data unchanged, and
// that a read returns that device's value with rvalid one cycle after rd.
// Unmapped addresses must reach no device and read as 0.
module tb_ocb;
  import flag_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  ocb_req_t    bus = OCB_IDLE;
  logic [31:0] rdata;
  logic        rvalid;
  ocb_req_t    glb_req, mon_req;
  ocb_req_t    gen_req [N];
  ocb_req_t    ana_req [N];
  logic [31:0] glb_rdata, mon_rdata;
  logic [31:0] gen_rdata [N];
  logic [31:0] ana_rdata [N];

  int checks = 0, failures = 0;

  ocb #(.NUM_PORTS(N)) dut (.*);

  // device d (0 global, 1 monitor, 2+p generator p, 6+p analyser p)
  always_comb begin
    glb_rdata = {8'hA0, 8'd0, glb_req.addr[15:0]};
    mon_rdata = {8'hA0, 8'd1, mon_req.addr[15:0]};
    for (int p = 0; p < N; p++) begin
      gen_rdata[p] = {8'hA0, 8'(2 + p), gen_req[p].addr[15:0]};
      ana_rdata[p] = {8'hA0, 8'(6 + p), ana_req[p].addr[15:0]};
    end
  end

  function automatic ocb_req_t dev_req(int d);
    if (d == 0) return glb_req;
    if (d == 1) return mon_req;
    if (d < 6)  return gen_req[d - 2];
    return ana_req[d - 6];
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // d < 0: unmapped
  task automatic probe(logic [31:0] addr, int d, logic [15:0] off);
    logic [31:0] wd;
    int others;
    wd = $urandom;
    @(negedge clk); bus = '{wr: 1'b1, rd: 1'b0, addr: addr, wdata: wd};
    #1 others = 0;
    for (int k = 0; k < 10; k++) begin
      ocb_req_t r;
      r = dev_req(k);
      if (k == d) check(r.wr && !r.rd && r.addr == {16'h0, off} && r.wdata == wd,
                        $sformatf("write %h reaches device %0d at offset %h", addr, d, off));
      else if (r.wr || r.rd) others++;
    end
    check(others == 0, $sformatf("write %h reaches no other device", addr));
    @(negedge clk); bus = '{wr: 1'b0, rd: 1'b1, addr: addr, wdata: 0};
    @(negedge clk); bus = OCB_IDLE;
    check(rvalid, "rvalid one cycle after rd");
    check(rdata == ((d < 0) ? 32'h0 : {8'hA0, 8'(d), off}), $sformatf("read %h returns %h", addr, rdata));
    @(negedge clk);
    check(!rvalid, "rvalid is a single pulse");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) begin
      logic [15:0] o;
      o = 16'($urandom_range(16'h3FFF)) & 16'hFFFC;
      probe(GLOBAL_BASE + 32'(o), 0, o);
      probe(MONITOR_BASE + 32'(o), 1, o);
      for (int p = 0; p < N; p++) begin
        probe(TXA_BASE + 32'(p) * PORT_STRIDE + 32'(o), 2 + p, o);
        probe(TXA_BASE + 32'(p) * PORT_STRIDE + RX_OFFSET + 32'(o), 6 + p, o);
      end
    end
    // the published TR_STAT addresses of TXA and RXC
    probe(32'h4003_2804, 2, 16'h2804);
    probe(32'h4005_6804, 8, 16'h2804);
    // unmapped
    probe(32'h4002_0000, -1, 0);
    probe(32'h4003_8000, -1, 0);
    probe(32'h4007_0000, -1, 0);
    probe(32'h0000_0000, -1, 0);

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
