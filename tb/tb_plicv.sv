// Self-checking testbench for plicv (small configuration: 2 harts, GEILEN 2, 8 devices,
// 2 injection blocks of 2 VIIRs). Contexts per hart: M, S, VS0, VS1 (c = 4*hart + k).
// Management interrupt IDs are 9 (block 0) and 10 (block 1).
// Checks: priority-ordered claims, pending clear on claim, gateway re-arm on complete,
// threshold masking, direct delivery to a VS context, VIIR injection to every context
// attached to a block, inFlight on claim, VIIR clear on complete, mixed physical/virtual
// priority order, both block management events, and the one-cycle delivery latency.
//
// Register offsets follow the PLICv memory map; VIIR/IBMSR bit positions are this design's
// own layout (see plicv). Bus requests are driven on the falling edge, read data sampled
// one cycle later.
module tb_plicv;
  import hyp_pkg::*;
  localparam int NH = 2, GL = 2, ND = 8, NB = 2, NV = 2;
  logic clk = 0, rst_n = 0;
  logic [ND:1] irq = '0;
  mmio_req_t req;
  mmio_rsp_t rsp;
  logic [NH-1:0] meip, seip;
  logic [NH-1:0][GL-1:0] vseip;
  int checks = 0, failures = 0;

  plicv #(.NHARTS(NH), .GEILEN(GL), .NDEV(ND), .NBLOCKS(NB), .NVIIR(NV), .PRIO_W(3)) dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .req_i(req), .rsp_o(rsp),
    .meip_o(meip), .seip_o(seip), .vseip_o(vseip));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask
  task automatic wr(logic [27:0] a, logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(posedge clk);
    #1 req = '0;
  endtask
  task automatic rd(logic [27:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    @(posedge clk);
    #1 req = '0;
    checks++;
    if (!rsp.rvalid) begin failures++; $display("FAIL rvalid"); end
    d = rsp.rdata;
  endtask

  function automatic logic [27:0] prio_a(int i);    return 28'(4 * i); endfunction
  function automatic logic [27:0] en_a(int c);      return 28'h0002000 + 28'(c * 'h80); endfunction
  function automatic logic [27:0] th_a(int c);      return 28'h0200000 + 28'(c * 'h1000); endfunction
  function automatic logic [27:0] cc_a(int c);      return 28'h0200004 + 28'(c * 'h1000); endfunction
  function automatic logic [27:0] vcibir_a(int c);  return 28'h4000000 + 28'(4 * c); endfunction
  function automatic logic [27:0] viir_a(int n, int j); return 28'h4010000 + 28'(n * 'h1000 + 4 * j); endfunction
  function automatic logic [27:0] ibmsr_a(int n);   return 28'h4110000 + 28'(4 * n); endfunction
  function automatic logic [31:0] viir(bit f, int p, int id);
    return {f, 7'd0, 8'(p), 6'd0, 10'(id)};
  endfunction

  logic [31:0] d;

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk("no lines after reset", {meip, seip, vseip}, '0);

    // --- physical interrupts on the M context of hart 0
    wr(prio_a(3), 5);
    wr(prio_a(5), 2);
    wr(en_a(0), (1 << 3) | (1 << 5));
    rd(prio_a(3), d); chk("priority readback", d, 5);
    rd(en_a(0), d);   chk("enable readback", d, 32'h28);
    @(negedge clk) irq[3] = 1; irq[5] = 1;
    @(posedge clk); #1;
    chk("meip[0] one cycle after the line rises", meip, 2'b01);
    chk("no other context raised", {seip, vseip}, '0);
    rd(28'h0001000, d); chk("pending bits 3 and 5", d, 32'h28);
    rd(cc_a(0), d); chk("claim returns highest priority (3)", d, 3);
    rd(28'h0001000, d); chk("claim clears pending 3", d, 32'h20);
    rd(cc_a(0), d); chk("second claim returns 5", d, 5);
    rd(cc_a(0), d); chk("claim with nothing pending returns 0", d, 0);
    chk("meip[0] low when nothing pending", meip, 2'b00);
    @(negedge clk) irq[5] = 0;
    wr(cc_a(0), 3);  // complete 3: line 3 still high, so it becomes pending again
    @(posedge clk); #1;
    chk("re-armed source 3 pending after complete", meip, 2'b01);
    rd(cc_a(0), d); chk("claim after re-arm returns 3", d, 3);
    rd(cc_a(0), d); chk("source 5 not re-armed before complete", d, 0);
    wr(cc_a(0), 5);
    @(negedge clk) irq[3] = 0;
    wr(cc_a(0), 3);

    // --- threshold
    @(negedge clk) irq[3] = 1;
    wr(th_a(0), 6);
    @(posedge clk); #1;
    chk("threshold 6 masks priority 5", meip, 2'b00);
    wr(th_a(0), 5);
    #1 chk("threshold 5 lets priority 5 through", meip, 2'b01);
    rd(th_a(0), d); chk("threshold readback", d, 5);
    rd(cc_a(0), d); chk("claim 3", d, 3);
    @(negedge clk) irq[3] = 0;
    wr(cc_a(0), 3);
    wr(th_a(0), 0);

    // --- physical interrupt assigned directly to hart 0 VS context 0 (context 2)
    wr(prio_a(4), 3);
    wr(en_a(2), 1 << 4);
    @(negedge clk) irq[4] = 1;
    @(posedge clk); #1;
    chk("vseip[0][0] raised", vseip, 4'b0001);
    chk("M/S lines stay low", {meip, seip}, '0);
    rd(cc_a(2), d); chk("guest claims 4 on its own context", d, 4);
    chk("vseip cleared by claim", vseip, '0);
    @(negedge clk) irq[4] = 0;
    wr(cc_a(2), 4);

    // --- virtual interrupt injection: block 0 attached to hart 0 VS1 (c3) and hart 1 VS1 (c7)
    wr(vcibir_a(3), 1);
    wr(vcibir_a(7), 1);
    wr(vcibir_a(0), 1);  // M context has no VCIBIR
    rd(vcibir_a(0), d); chk("VCIBIR only on VS contexts", d, 0);
    rd(vcibir_a(3), d); chk("VCIBIR readback", d, 1);
    chk("empty block injects nothing", vseip, '0);
    wr(viir_a(0, 0), viir(0, 4, 'h25));
    #1 chk("VIIR pending on both attached contexts", vseip, 4'b1010);
    rd(cc_a(3), d); chk("claim returns the virtual ID", d, 'h25);
    rd(viir_a(0, 0), d); chk("claim sets inFlight", d, viir(1, 4, 'h25));
    chk("in-flight VIIR no longer pending", vseip, '0);
    rd(cc_a(7), d); chk("other vhart sees nothing", d, 0);
    wr(cc_a(3), 'h25);
    rd(viir_a(0, 0), d); chk("complete clears the VIIR", d, 0);

    // --- mixed physical and virtual candidates on context 3
    wr(prio_a(6), 2);
    wr(en_a(3), 1 << 6);
    wr(viir_a(0, 1), viir(0, 6, 'h30));
    wr(viir_a(0, 0), viir(0, 1, 'h31));
    @(negedge clk) irq[6] = 1;
    @(posedge clk);
    rd(cc_a(3), d); chk("virtual priority 6 first", d, 'h30);
    rd(cc_a(3), d); chk("physical priority 2 second", d, 6);
    rd(cc_a(3), d); chk("virtual priority 1 last", d, 'h31);
    rd(cc_a(3), d); chk("then nothing", d, 0);
    wr(cc_a(3), 'h30);
    wr(cc_a(3), 'h31);
    @(negedge clk) irq[6] = 0;
    wr(cc_a(3), 6);
    rd(viir_a(0, 1), d); chk("VIIR 1 cleared", d, 0);

    // --- management interrupt: unknown ID completed in block 0 (ID 9 -> S context hart 0)
    wr(prio_a(9), 1);
    wr(en_a(1), 1 << 9);
    wr(ibmsr_a(0), 32'h2);
    wr(cc_a(3), 'h77);
    rd(ibmsr_a(0), d); chk("IBMSR unknown-ID status and ID", d, 32'h0077_0302);
    chk("block management interrupt reaches seip[0]", seip, 2'b01);
    rd(cc_a(1), d); chk("claim management interrupt ID 9", d, 9);
    wr(ibmsr_a(0), 32'h202);  // write 1 to clear the status
    rd(ibmsr_a(0), d); chk("IBMSR status cleared", d, 32'h0077_0102);
    wr(cc_a(1), 9);
    @(posedge clk); #1;
    chk("no management interrupt after clearing", seip, 2'b00);

    // --- management interrupt: no VIIR pending in block 1 (ID 10 -> M context hart 1)
    wr(prio_a(10), 7);
    wr(en_a(4), 1 << 10);
    @(posedge clk); #1;
    chk("event disabled: no interrupt", meip, 2'b00);
    wr(ibmsr_a(1), 32'h1);
    @(posedge clk); #1;
    chk("no-VIIR-pending event raises meip[1]", meip, 2'b10);
    rd(cc_a(4), d); chk("claim management interrupt ID 10", d, 10);
    wr(viir_a(1, 0), viir(0, 3, 'h40));
    wr(ibmsr_a(1), 32'h1);
    wr(cc_a(4), 10);
    @(posedge clk); #1;
    chk("block with a pending VIIR: no event", meip, 2'b00);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
