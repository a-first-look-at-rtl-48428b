// Self-checking testbench for hyp_trap.
// Walks a hart through the mode changes a hypervisor uses: M firmware delegates to HS and
// mret's into the hypervisor; the hypervisor enters a guest with sret (hstatus.SPV); the
// guest's ecall goes to HS with SPV/SPVP recorded; a delegated page fault from the guest
// goes to VS when hedeleg allows it; a guest-page fault goes to HS with htval = GPA >> 2 and
// GVA set, and to M with mtval2 when not delegated; interrupts use the mode hyp_irq chose
// and vectored tvec; sret inside the guest stays in the guest; CSR numbers of the
// supervisor set reach the VS copies while V=1; read-only zero fields (htinst, mtinst,
// hedeleg of non-delegable causes, hgatp VMID and root alignment).
// Expected values come from the H-extension trap rules; the sequence is this testbench's
// own. Events are driven on the falling edge and take effect at the next rising edge;
// trap_pc_o and csr_rdata_o are combinational and sampled before that edge.
module tb_hyp_trap;
  import hyp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic csr_we = 0; logic [11:0] csr_addr = '0; logic [63:0] csr_wdata = '0, csr_rdata;
  logic exc_valid = 0; logic [4:0] exc_cause = '0; logic [63:0] exc_pc = '0, exc_tval = '0, exc_gpa = '0;
  logic exc_gva = 0;
  logic irq = 0; logic [3:0] irq_cause = '0; logic irq_to_m = 0, irq_to_vs = 0;
  logic mret = 0, sret = 0;
  logic trap; logic [63:0] trap_pc, xret_pc;
  priv_e priv; logic virt, spvp, mie, sie, vsie, sum, mxr, hs_mxr;
  logic satp_en, vsatp_en, hgatp_en; logic [PPN_W-1:0] satp_ppn, vsatp_ppn, hgatp_ppn;

  hyp_trap dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .exc_valid_i(exc_valid), .exc_cause_i(exc_cause), .exc_pc_i(exc_pc),
    .exc_tval_i(exc_tval), .exc_gva_i(exc_gva), .exc_gpa_i(exc_gpa), .irq_i(irq), .irq_cause_i(irq_cause),
    .irq_to_m_i(irq_to_m), .irq_to_vs_i(irq_to_vs), .mret_i(mret), .sret_i(sret), .trap_o(trap),
    .trap_pc_o(trap_pc), .xret_pc_o(xret_pc), .priv_o(priv), .virt_o(virt), .spvp_o(spvp),
    .mstatus_mie_o(mie), .mstatus_sie_o(sie), .vsstatus_sie_o(vsie), .sum_o(sum), .mxr_o(mxr),
    .hs_mxr_o(hs_mxr), .satp_en_o(satp_en), .satp_ppn_o(satp_ppn), .vsatp_en_o(vsatp_en),
    .vsatp_ppn_o(vsatp_ppn), .hgatp_en_o(hgatp_en), .hgatp_ppn_o(hgatp_ppn));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask
  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk) csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk) csr_we = 0;
  endtask
  task automatic rd(logic [11:0] a, output logic [63:0] d);
    @(negedge clk) csr_addr = a; #1 d = csr_rdata;
  endtask
  task automatic mode(priv_e p, logic v, string what);
    chk({what, ": privilege"}, p, priv);
    chk({what, ": V"}, v, virt);
  endtask
  task automatic do_exc(logic [4:0] c, logic [63:0] pc, logic [63:0] tval, logic gva,
                        logic [63:0] gpa, output logic [63:0] npc);
    @(negedge clk) exc_valid = 1; exc_cause = c; exc_pc = pc; exc_tval = tval; exc_gva = gva; exc_gpa = gpa;
    #1 npc = trap_pc;
    checks++; if (!trap) begin failures++; $display("FAIL exception not taken"); end
    @(negedge clk) exc_valid = 0;
  endtask
  task automatic do_ret(bit is_m, output logic [63:0] npc);
    @(negedge clk) if (is_m) mret = 1; else sret = 1;
    #1 npc = xret_pc;
    @(negedge clk) mret = 0; sret = 0;
  endtask

  logic [63:0] d, pc;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    mode(PRV_M, 0, "reset");
    // firmware: vectors, delegation of page faults (13), ecall from VS (10), guest faults
    wr(12'h305, 64'h8000_0000);                      // mtvec
    wr(12'h302, 64'h00F0_A400);                      // medeleg: 10, 13, 15, 20-23 (11 is read-only 0)
    rd(12'h302, d); chk("medeleg keeps delegable causes", d, 64'h00F0_A400);
    wr(12'h105, 64'h8020_0001);                      // stvec, vectored
    wr(12'h300, 64'h0000_0800);                      // MPP = S
    do_ret(1, pc);
    mode(PRV_S, 0, "mret to HS");
    // hypervisor: hedeleg page faults only; guest state
    wr(12'h602, 64'h00F0_A400);
    rd(12'h602, d); chk("hedeleg drops non-delegable causes (10, 20-23)", d, 64'h0000_A000);
    wr(12'h205, 64'h4000_0000);                      // vstvec
    wr(12'h200, 64'h0000_0122);                      // vsstatus: SIE, SPIE, SPP
    wr(12'h280, 64'h8000_0000_0008_0000);            // vsatp Sv39
    wr(12'h680, 64'h8000_0000_0008_0003);            // hgatp Sv39x4, low ppn bits ignored
    rd(12'h680, d); chk("hgatp root is 16 KiB aligned, no VMID", d, 64'h8000_0000_0008_0000);
    chk("hgatp to the MMU", {hgatp_en, hgatp_ppn}, {1'b1, 44'h80000});
    wr(12'h680, 64'h9000_0000_0000_1000);            // Sv48x4 unsupported: no change
    chk("unsupported hgatp mode ignored", {hgatp_en, hgatp_ppn}, {1'b1, 44'h80000});
    rd(12'h64A, d); chk("htinst hardwired to zero", d, 0);
    rd(12'h34A, d); chk("mtinst hardwired to zero", d, 0);
    wr(12'h600, 64'h80);                             // hstatus.SPV = 1
    wr(12'h100, 64'h100);                            // sstatus.SPP = S
    wr(12'h141, 64'h1000);                           // sepc = guest entry
    do_ret(0, pc);
    chk("sret returns to sepc", pc, 64'h1000);
    mode(PRV_S, 1, "sret enters the guest (VS)");
    chk("first-stage root in use is vsatp", {vsatp_en, vsatp_ppn}, {1'b1, 44'h80000});
    // guest CSR accesses reach the VS copies
    rd(12'h105, d); chk("stvec in VS reads vstvec", d, 64'h4000_0000);
    wr(12'h140, 64'h1234);
    rd(12'h240, d); chk("sscratch in VS writes vsscratch", d, 64'h1234);
    // guest page fault (13): delegated by medeleg and hedeleg -> VS
    do_exc(5'd13, 64'h1004, 64'hdead_0000, 1'b0, 64'h0, pc);
    chk("delegated page fault goes to vstvec", pc, 64'h4000_0000);
    mode(PRV_S, 1, "page fault taken in VS");
    rd(12'h242, d); chk("vscause", d, 13);
    rd(12'h241, d); chk("vsepc", d, 64'h1004);
    rd(12'h243, d); chk("vstval", d, 64'hdead_0000);
    chk("vsstatus.SIE cleared on VS trap", vsie, 0);
    rd(12'h200, d); chk("vsstatus.SPP = S, SPIE = old SIE", {d[8], d[5]}, 2'b11);
    do_ret(0, pc);
    chk("guest sret returns to vsepc", pc, 64'h1004);
    mode(PRV_S, 1, "sret in VS stays in the guest");
    chk("vsstatus.SIE restored", vsie, 1);
    // ecall from VS (10) -> HS (hedeleg cannot take it)
    do_exc(5'd10, 64'h2000, 64'h0, 1'b0, 64'h0, pc);
    chk("ecall from VS goes to stvec base", pc, 64'h8020_0000);
    mode(PRV_S, 0, "ecall from VS taken in HS");
    rd(12'h142, d); chk("scause 10", d, 10);
    rd(12'h600, d); chk("hstatus.SPV=1, SPVP=1 (guest was in VS)", {d[7], d[8]}, 2'b11);
    chk("spvp to the MMU", spvp, 1);
    // back to the guest, then a load guest-page fault (21) -> HS with htval
    do_ret(0, pc);
    mode(PRV_S, 1, "back in the guest");
    do_exc(5'd21, 64'h2004, 64'h0000_7000, 1'b1, 64'h8_0001_0000, pc);
    mode(PRV_S, 0, "guest-page fault taken in HS");
    rd(12'h643, d); chk("htval = GPA >> 2", d, 64'h2_0000_4000);
    rd(12'h143, d); chk("stval = guest virtual address", d, 64'h7000);
    rd(12'h600, d); chk("hstatus.GVA set", d[6], 1);
    // interrupt chosen by hyp_irq for HS, vectored: stvec + 4*cause
    @(negedge clk) irq = 1; irq_cause = 4'd9; #1;
    chk("vectored interrupt PC", trap_pc, 64'h8020_0000 + 4 * 9);
    @(negedge clk) irq = 0;
    rd(12'h142, d); chk("scause interrupt 9", d, {1'b1, 59'd0, 4'd9});
    // guest-page fault with medeleg cleared goes to M with mtval2 and MPV
    wr(12'h600, 64'h80);
    do_ret(0, pc);
    mode(PRV_S, 1, "guest again");
    @(negedge clk) mret = 0;
    // M firmware would clear medeleg; here it is cleared directly from the testbench CSR port
    wr(12'h302, 64'h0);
    do_exc(5'd23, 64'h3000, 64'h0, 1'b0, 64'h1_0000_0004, pc);
    chk("undelegated fault to mtvec", pc, 64'h8000_0000);
    mode(PRV_M, 0, "guest-page fault taken in M");
    rd(12'h34B, d); chk("mtval2 = GPA >> 2", d, 64'h4000_0001);
    rd(12'h300, d); chk("mstatus.MPV=1, MPP=S", {d[39], d[12:11]}, 3'b101);
    do_ret(1, pc);
    chk("mret returns to mepc", pc, 64'h3000);
    mode(PRV_S, 1, "mret with MPV returns to the guest");
    // VS interrupt selected by hyp_irq
    @(negedge clk) irq = 1; irq_cause = 4'd5; irq_to_vs = 1; #1;
    chk("VS interrupt goes to vstvec", trap_pc, 64'h4000_0000);
    @(negedge clk) irq = 0; irq_to_vs = 0;
    rd(12'h242, d); chk("vscause interrupt 5", d, {1'b1, 59'd0, 4'd5});
    mode(PRV_S, 1, "VS interrupt keeps V");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
