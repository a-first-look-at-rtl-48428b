// Self-checking testbench for hyp_irq (GEILEN 4).
// Checks the mip composition from the interrupt lines, hgeip and the VGEIN selection of
// the guest external line, SGEIP, the hvip/hip/vsip/vsie aliases (and sip/sie reaching vsip/vsie while V=1), delegation to M, HS and
// VS with the privilege/enable rules, the fixed priority order and the VS cause mapping.
//
// Expected values come from the H-extension rules (VGEIN selection, delegation, priority);
// the test sequence is this testbench's own. CSR writes take effect at the next rising
// edge; interrupt outputs are combinational and sampled 1 time unit after a change.
module tb_hyp_irq;
  import hyp_pkg::*;
  localparam int GL = 4;
  logic clk = 0, rst_n = 0;
  logic msip = 0, mtip = 0, stip = 0, vstip = 0, meip = 0, seip = 0;
  logic [GL-1:0] vseip = '0;
  priv_e priv = PRV_M;
  logic virt = 0, mie = 0, sie = 0, vssie = 0;
  logic we = 0;
  logic [11:0] addr = '0;
  logic [63:0] wdata = '0, rdata, mip;
  logic irq, to_m, to_vs;
  logic [3:0] cause;
  int checks = 0, failures = 0;

  hyp_irq #(.GEILEN(GL)) dut (.clk_i(clk), .rst_ni(rst_n), .msip_i(msip), .mtip_i(mtip),
    .stip_i(stip), .vstip_i(vstip), .meip_i(meip), .seip_i(seip), .vseip_i(vseip),
    .priv_i(priv), .virt_i(virt), .mstatus_mie_i(mie), .mstatus_sie_i(sie),
    .vsstatus_sie_i(vssie), .csr_we_i(we), .csr_addr_i(addr), .csr_wdata_i(wdata),
    .csr_rdata_o(rdata), .irq_o(irq), .irq_cause_o(cause), .irq_to_m_o(to_m),
    .irq_to_vs_o(to_vs), .mip_o(mip));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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
  task automatic csrw(logic [11:0] a, logic [63:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(posedge clk); #1 we = 0;
  endtask
  task automatic csrr(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); addr = a; #1 d = rdata;
  endtask
  // expected interrupt: {irq, to_m, to_vs, cause}
  task automatic chk_irq(string what, logic i, logic m, logic v, logic [3:0] c);
    #1 chk(what, {irq, to_m, to_vs, cause}, {i, m, v, c});
  endtask

  logic [63:0] d;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk("mip zero after reset", mip, 0);
    chk_irq("no interrupt after reset", 0, 0, 0, 0);

    // M timer: not delegated, taken in M when MIE or below M.
    csrw(12'h304, 64'h1EEE);           // mie: everything
    csrr(12'h304, d); chk("mie readback", d, 64'h1EEE);
    csrr(12'h303, d); chk("mideleg VS bits and SGEI read as one", d, 64'h1444);
    @(negedge clk) mtip = 1;
    chk_irq("M mode, MIE=0: masked", 0, 0, 0, 0);
    mie = 1;
    chk_irq("M mode, MIE=1: MTI to M", 1, 1, 0, 7);
    priv = PRV_S; mie = 0;
    chk_irq("S mode: MTI to M regardless of MIE", 1, 1, 0, 7);
    meip = 1;
    chk_irq("MEI beats MTI", 1, 1, 0, 11);
    meip = 0; mtip = 0;

    // Supervisor timer from the CLINTv line, delegated to HS.
    csrw(12'h303, 64'h222);            // mideleg SSI, STI, SEI
    @(negedge clk) stip = 1;
    #1 chk("mip.STIP follows stip line", mip[5], 1);
    chk_irq("S mode, SIE=0: masked", 0, 0, 0, 0);
    priv = PRV_U;
    chk_irq("U mode: STI to HS", 1, 0, 0, 5);
    stip = 0;

    // Guest external interrupt: VS context 1 line -> hgeip bit 2.
    priv = PRV_S; virt = 1; vssie = 1;
    @(negedge clk) vseip = 4'b0010;
    csrr(12'hE12, d); chk("hgeip bit 2 for VS context 1", d, 64'h4);
    chk("no VSEIP with VGEIN = 0", mip[10], 0);
    csrw(12'h600, 64'(1) << 12);       // VGEIN = 1
    #1 chk("no VSEIP with VGEIN = 1 (line 2 active)", mip[10], 0);
    csrw(12'h600, 64'(2) << 12);       // VGEIN = 2
    csrr(12'h600, d); chk("VGEIN readback", d, 64'h2000);
    #1 chk("VSEIP with VGEIN = 2", mip[10], 1);
    chk_irq("VSEI not delegated by hideleg: taken in HS", 1, 0, 0, 10);
    csrw(12'h603, 64'hFFFF);
    csrr(12'h603, d); chk("hideleg writable bits", d, 64'h444);
    chk_irq("VSEI delegated: taken in VS as SEI (9)", 1, 0, 1, 9);
    vssie = 0;
    chk_irq("vsstatus.SIE=0 masks it in VS-mode", 0, 0, 0, 0);
    virt = 0;
    chk_irq("VS interrupt not taken with V=0", 0, 0, 0, 0);
    virt = 1; vssie = 1;

    // SGEIP: hgeie selects which guest lines interrupt the hypervisor.
    csrw(12'h607, 64'h4);
    csrr(12'h607, d); chk("hgeie readback", d, 64'h4);
    #1 chk("SGEIP set", mip[12], 1);
    chk_irq("SGEI to HS beats VSEI", 1, 0, 0, 12);
    csrw(12'h607, 64'h0);
    @(negedge clk) vseip = '0;
    chk_irq("nothing pending", 0, 0, 0, 0);

    // VS timer from the CLINTv line and VS software interrupt from hvip.
    @(negedge clk) vstip = 1;
    chk_irq("VSTI in VS as STI (5)", 1, 0, 1, 5);
    vstip = 0;
    csrw(12'h645, 64'h4);              // hvip.VSSIP
    csrr(12'h244, d); chk("vsip shows SSIP", d, 64'h2);
    csrr(12'h144, d); chk("sip read with V=1 gives vsip", d, 64'h2);
    csrr(12'h644, d); chk("hip shows VSSIP", d, 64'h4);
    chk_irq("VSSI in VS as SSI (1)", 1, 0, 1, 1);
    csrw(12'h204, 64'h0);              // vsie = 0 clears VS enables
    csrr(12'h304, d); chk("vsie write clears mie VS bits", d, 64'h1AAA);
    chk_irq("masked by vsie", 0, 0, 0, 0);
    csrw(12'h204, 64'h2);
    csrr(12'h204, d); chk("vsie readback", d, 64'h2);
    csrr(12'h104, d); chk("sie read with V=1 gives vsie", d, 64'h2);
    chk_irq("vsie.SSIE re-enables", 1, 0, 1, 1);
    csrw(12'h244, 64'h0);
    chk_irq("vsip write clears VSSIP", 0, 0, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
