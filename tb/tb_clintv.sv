// Self-checking testbench for clintv.
// Programs each timer kind through the register bus and checks: register read-back at the
// documented offsets, stime as a replica of mtime, vstime = mtime + htimedelta, that each
// of mtip/stip/vstip rises exactly on the first tick where its time exceeds its compare
// value and not before, msip set/clear, and the one-cycle read latency.
//
// Register offsets and the greater-than firing rule follow the CLINTv memory map and text;
// the 3-hart size, tick pattern and test values are this testbench's own. Bus requests are
// driven on the falling edge; read data is sampled one cycle after the request.
module tb_clintv;
  import hyp_pkg::*;
  localparam int NH = 3;
  logic clk = 0, rst_n = 0, tick = 0;
  mmio_req_t req;
  mmio_rsp_t rsp;
  logic [NH-1:0] msip, mtip, stip, vstip;
  int checks = 0, failures = 0;

  clintv #(.NHARTS(NH)) dut (.clk_i(clk), .rst_ni(rst_n), .rtc_tick_i(tick), .req_i(req),
    .rsp_o(rsp), .msip_o(msip), .mtip_o(mtip), .stip_o(stip), .vstip_o(vstip));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr32(logic [27:0] a, logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(posedge clk);
    #1 req = '0;
  endtask
  task automatic wr64(logic [27:0] a, logic [63:0] d);
    wr32(a, d[31:0]);
    wr32(a + 4, d[63:32]);
  endtask
  task automatic rd32(logic [27:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    @(posedge clk);
    #1 req = '0;
    checks++;
    if (!rsp.rvalid) begin failures++; $display("FAIL no rvalid one cycle after read"); end
    d = rsp.rdata;
  endtask
  task automatic rd64(logic [27:0] a, output logic [63:0] d);
    logic [31:0] lo, hi;
    rd32(a, lo);
    rd32(a + 4, hi);
    d = {hi, lo};
  endtask

  logic [63:0] v, t0, t1;
  logic [31:0] w;

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk("no timer irq after reset", {mtip, stip, vstip}, '0);
    chk("no msip after reset", msip, '0);

    // Register read-back at the memory-map offsets.
    for (int n = 0; n < NH; n++) begin
      wr64(28'h04000 + 8*n, 64'h1111_0000_0000_0000 + n);
      wr64(28'h0c000 + 8*n, 64'h2222_0000_0000_0000 + n);
      wr64(28'h1c000 + 8*n, 64'h3333_0000_0000_0000 + n);
      wr64(28'h24000 + 8*n, 64'h0000_0001_0000_0000 * (n + 1));
    end
    for (int n = 0; n < NH; n++) begin
      rd64(28'h04000 + 8*n, v); chk("mtimecmp readback", v, 64'h1111_0000_0000_0000 + n);
      rd64(28'h0c000 + 8*n, v); chk("stimecmp readback", v, 64'h2222_0000_0000_0000 + n);
      rd64(28'h1c000 + 8*n, v); chk("vstimecmp readback", v, 64'h3333_0000_0000_0000 + n);
      rd64(28'h24000 + 8*n, v); chk("htimedelta readback", v, 64'h0000_0001_0000_0000 * (n + 1));
    end

    // mtime write, stime replica and vstime = mtime + htimedelta (time frozen: no tick).
    wr64(28'h0bff8, 64'h0000_0000_0000_1000);
    rd64(28'h0bff8, v); chk("mtime readback", v, 64'h1000);
    rd64(28'h1bff8, v); chk("stime == mtime", v, 64'h1000);
    wr64(28'h1bff8, 64'hdead_beef);  // read-only
    rd64(28'h1bff8, v); chk("stime read-only", v, 64'h1000);
    for (int n = 0; n < NH; n++) begin
      rd64(28'h14000 + 8*n, v);
      chk("vstime = mtime + htimedelta", v, 64'h1000 + 64'h0000_0001_0000_0000 * (n + 1));
    end
    wr64(28'h14000, 64'h5);  // read-only
    rd64(28'h14000, v); chk("vstime read-only", v, 64'h1_0000_1000);

    // mtime counts ticks.
    @(negedge clk) tick = 1; repeat (10) @(posedge clk); #1 tick = 0;
    rd64(28'h0bff8, v); chk("mtime advanced by 10 ticks", v, 64'h100a);

    // Timer firing: hart 1 M timer at 0x1010, S timer at 0x1014; hart 2 VS timer with
    // htimedelta -8 (two's complement) at vstime 0x1012 -> mtime 0x101a.
    for (int n = 0; n < NH; n++) begin
      wr64(28'h04000 + 8*n, '1); wr64(28'h0c000 + 8*n, '1); wr64(28'h1c000 + 8*n, '1);
      wr64(28'h24000 + 8*n, '0);
    end
    wr64(28'h04000 + 8*1, 64'h1010);
    wr64(28'h0c000 + 8*1, 64'h1014);
    wr64(28'h24000 + 8*2, -64'sd8);
    wr64(28'h1c000 + 8*2, 64'h1012);
    chk("no irq before time passes", {mtip, stip, vstip}, '0);
    // Step the timer one tick at a time and compare against the expected rule.
    for (int t = 'h100b; t <= 'h1020; t++) begin
      @(negedge clk) tick = 1; @(posedge clk); #1 tick = 0;
      chk("mtip[1] iff mtime > mtimecmp",  mtip,  {1'b0, t > 'h1010, 1'b0});
      chk("stip[1] iff stime > stimecmp",  stip,  {1'b0, t > 'h1014, 1'b0});
      chk("vstip[2] iff vstime > vstimecmp", vstip, {t - 8 > 'h1012, 2'b00});
    end
    // Re-arming the compare clears the line.
    wr64(28'h04000 + 8*1, '1);
    #1 chk("mtip cleared by new compare", mtip, '0);

    // msip.
    wr32(28'h00000 + 4*2, 32'h1);
    #1 chk("msip[2] set", msip, 3'b100);
    rd32(28'h00008, w); chk("msip readback", w, 1);
    wr32(28'h00008, 32'h0);
    #1 chk("msip[2] cleared", msip, 3'b000);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
