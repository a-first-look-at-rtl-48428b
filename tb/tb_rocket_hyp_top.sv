// End-to-end testbench for rocket_hyp_top at its default size (6 harts, GEILEN 4,
// 31 devices, 8 injection blocks of 4 VIIRs, 32-entry TLBs).
// The testbench plays the cores and the memory: it sets each hart's privilege and status,
// programs CLINTv/PLICv registers and interrupt CSRs the way firmware, hypervisor and
// guest would, and serves the walkers' page-table reads from hand-built tables.
// Mechanisms exercised and counted (each must happen at least once):
//   direct guest interrupt injection through a PLICv VS context and VGEIN (with its
//   latency in cycles), a guest claim/complete on its own context, SGEI to the hypervisor
//   for a non-selected guest context, virtual interrupt injection through a VIIR block,
//   a block management interrupt, the HS, VS and M timers of the CLINTv, a two-stage walk,
//   a PTE-cache hit, a guest-page fault on a cached translation, an hlv from HS and an
//   hfence flush.
//
// Register offsets follow the CLINTv/PLICv memory maps; the scenario, hart states and page
// tables are this testbench's own. The walker memory answers 2 cycles after a request.
// It runs at the top's default parameters and doubles as the full-size test.
module tb_rocket_hyp_top;
  import hyp_pkg::*;
  localparam int NH = 6, GL = 4, ND = 31;
  localparam int CPH = 2 + GL;

  logic clk = 0, rst_n = 0, tick = 0;
  logic [ND:1] dev = '0;
  mmio_req_t clint_req = '0, plic_req = '0;
  mmio_rsp_t clint_rsp, plic_rsp;
  hart_state_t [NH-1:0] hs;
  trap_req_t [NH-1:0] treq = '0;
  trap_rsp_t [NH-1:0] trsp;
  csr_req_t [NH-1:0] csr = '0;
  logic [NH-1:0][63:0] csr_rdata;
  irq_req_t [NH-1:0] irq;
  logic [NH-1:0][63:0] mip;
  tlb_req_t [NH-1:0] itlb = '0, dtlb = '0;
  tlb_resp_t [NH-1:0] itlb_rsp, dtlb_rsp;
  logic [NH-1:0] flush = '0, flush_guest = '0;
  ptw_mem_req_t [NH-1:0] mreq;
  logic [NH-1:0] mready;
  ptw_mem_rsp_t [NH-1:0] mrsp;

  rocket_hyp_top dut (
    .clk_i(clk), .rst_ni(rst_n), .rtc_tick_i(tick), .dev_irq_i(dev),
    .clint_req_i(clint_req), .clint_rsp_o(clint_rsp), .plic_req_i(plic_req), .plic_rsp_o(plic_rsp),
    .trap_req_i(treq), .trap_rsp_o(trsp), .hart_o(hs), .csr_req_i(csr), .csr_rdata_o(csr_rdata), .irq_o(irq), .mip_o(mip),
    .itlb_req_i(itlb), .itlb_resp_o(itlb_rsp), .dtlb_req_i(dtlb), .dtlb_resp_o(dtlb_rsp),
    .flush_i(flush), .flush_guest_i(flush_guest),
    .ptw_mem_req_o(mreq), .ptw_mem_ready_i(mready), .ptw_mem_rsp_i(mrsp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  typedef enum int {
    M_DIRECT, M_GUEST_CLAIM, M_SGEI, M_VIIR, M_MGMT, M_STIMER, M_VSTIMER, M_MTIMER,
    M_TWO_STAGE, M_PTE_HIT, M_GPF, M_HLV, M_HFENCE, M_TRAP_VS, M_TRAP_GPF, M_COUNT
  } mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"direct injection", "guest claim", "SGEI", "VIIR injection",
    "management interrupt", "HS timer", "VS timer", "M timer", "two-stage walk",
    "PTE cache hit", "guest-page fault", "hlv", "hfence", "interrupt trap into VS",
    "guest-page fault trap with GPA"};

  initial begin
    repeat (200000) @(posedge clk);
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

  // ------------------------------------------------------------ register and CSR access
  task automatic plic_wr(logic [27:0] a, logic [31:0] d);
    @(negedge clk) plic_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d};
    @(posedge clk); #1 plic_req = '0;
  endtask
  task automatic plic_rd(logic [27:0] a, output logic [31:0] d);
    @(negedge clk) plic_req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    @(posedge clk); #1 plic_req = '0;
    d = plic_rsp.rdata;
  endtask
  task automatic clint_wr64(logic [27:0] a, logic [63:0] d);
    @(negedge clk) clint_req = '{valid: 1'b1, write: 1'b1, addr: a, wdata: d[31:0]};
    @(negedge clk) clint_req = '{valid: 1'b1, write: 1'b1, addr: a + 4, wdata: d[63:32]};
    @(negedge clk) clint_req = '0;
  endtask
  task automatic clint_rd64(logic [27:0] a, output logic [63:0] d);
    @(negedge clk) clint_req = '{valid: 1'b1, write: 1'b0, addr: a, wdata: '0};
    @(negedge clk) d[31:0] = clint_rsp.rdata;
    clint_req = '{valid: 1'b1, write: 1'b0, addr: a + 4, wdata: '0};
    @(negedge clk) d[63:32] = clint_rsp.rdata;
    clint_req = '0;
  endtask
  task automatic csrw(int h, logic [11:0] a, logic [63:0] d);
    @(negedge clk) csr[h] = '{we: 1'b1, addr: a, wdata: d};
    @(negedge clk) csr[h] = '0;
  endtask

  // mode changes as firmware and hypervisor make them: an exception (illegal instruction,
  // never delegated here) brings the hart to M; mret with MPP/MPV set enters any mode
  task automatic to_m(int h);
    @(negedge clk) treq[h].exc_valid = 1; treq[h].exc_cause = 5'd2;
    @(negedge clk) treq[h] = '0;
    chk("exception brings the hart to M", {hs[h].priv, hs[h].virt}, {PRV_M, 1'b0});
  endtask
  task automatic enter(int h, priv_e p, logic v);
    csrw(h, 12'h300, (64'(v) << 39) | (64'(p) << 11));
    @(negedge clk) treq[h].mret = 1;
    @(negedge clk) treq[h] = '0;
    chk("mret enters the requested mode", {hs[h].priv, hs[h].virt}, {p, v});
  endtask

  function automatic logic [27:0] ctx_base(int c);  return 28'h0200000 + 28'(c * 'h1000); endfunction
  function automatic int ctx(int h, int k);        return h * CPH + k; endfunction

  // ------------------------------------------------------------ page tables and memory
  logic [63:0] mem [logic [PADDR_W-1:0]];
  localparam logic [7:0] V = 8'h01, R = 8'h02, W = 8'h04, X = 8'h08, U = 8'h10, A = 8'h40, D = 8'h80;
  localparam logic [7:0] LEAF = V | R | W | X | A | D;
  function automatic logic [63:0] pte(logic [43:0] ppn, logic [7:0] fl);
    return {10'd0, ppn, 2'd0, fl};
  endfunction
  function automatic logic [PADDR_W-1:0] ea(logic [43:0] page, int idx);
    return {page, 12'd0} + PADDR_W'(idx * 8);
  endfunction
  function automatic logic [43:0] s2h(logic [43:0] gpn);
    return 44'h50000 + 3 * (gpn - 44'h80000);
  endfunction

  int reads [NH];
  int lat [NH];
  logic [PADDR_W-1:0] paddr [NH];
  always_comb for (int h = 0; h < NH; h++) mready[h] = lat[h] == 0;
  always @(posedge clk) begin
    for (int h = 0; h < NH; h++) begin
      mrsp[h].valid <= 1'b0;
      if (!rst_n) begin
        lat[h] <= 0;
      end else if (mreq[h].valid && lat[h] == 0) begin
        reads[h]++;
        paddr[h] <= mreq[h].addr;
        lat[h]   <= 2;
      end else if (lat[h] == 1) begin
        mrsp[h].valid <= 1'b1;
        mrsp[h].err   <= 1'b0;
        mrsp[h].data  <= mem.exists(paddr[h]) ? mem[paddr[h]] : 64'd0;
        lat[h] <= 0;
      end else if (lat[h] > 1) lat[h] <= lat[h] - 1;
    end
  end

  task automatic tlb_access(int h, bit instr, logic [28:0] v, acc_e k, bit hv,
                            output tlb_resp_t r, output int nreads);
    int r0 = reads[h];
    @(negedge clk);
    if (instr) itlb[h] = '{valid: 1'b1, vpn: v, acc: k, hv: 1'b0, hlvx: 1'b0};
    else       dtlb[h] = '{valid: 1'b1, vpn: v, acc: k, hv: hv, hlvx: 1'b0};
    #1;
    while (instr ? itlb_rsp[h].miss : dtlb_rsp[h].miss) begin
      @(negedge clk);
      #1;
    end
    r = instr ? itlb_rsp[h] : dtlb_rsp[h];
    nreads = reads[h] - r0;
    @(negedge clk) itlb[h] = '0; dtlb[h] = '0;
  endtask

  // ------------------------------------------------------------ scenario
  logic [31:0] d;
  logic [63:0] d64;
  int lat_cycles, n;
  tlb_resp_t r;

  initial begin
    // second stage: guest pages 0x80000+k -> host 0x50000+3k, one read-only page
    mem[ea(44'h80000, 2)] = pte(44'h82000, V);
    mem[ea(44'h82000, 0)] = pte(44'h83000, V);
    for (int k = 0; k < 16; k++) mem[ea(44'h83000, k)] = pte(s2h(44'h80000 + k), LEAF | U);
    mem[ea(44'h83000, 16)] = pte(44'h60000, V | R | A | U);
    // first stage in guest memory
    mem[ea(s2h(44'h80000), 0)] = pte(44'h80001, V);
    mem[ea(s2h(44'h80001), 0)] = pte(44'h80002, V);
    for (int i = 0; i < 4; i++) mem[ea(s2h(44'h80002), i)] = pte(44'h80008 + i, LEAF);
    mem[ea(s2h(44'h80002), 4)] = pte(44'h80010, LEAF);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk("no interrupts after reset", irq, '0);
    for (int h = 0; h < NH; h++) begin
      chk("reset in M", hs[h].priv, PRV_M);
      csrw(h, 12'h180, 64'h8000_0000_0007_0000);      // satp Sv39
      csrw(h, 12'h280, 64'h8000_0000_0008_0000);      // vsatp Sv39
      csrw(h, 12'h680, 64'h8000_0000_0008_0000);      // hgatp Sv39x4
      csrw(h, 12'h205, 64'h4000_0000);                // vstvec
    end

    // ---- direct injection: device 7 -> hart 0, VS context 1 (hgeip bit 2)
    csrw(0, 12'h200, 64'h2);                   // vsstatus.SIE
    enter(0, PRV_S, 1);
    csrw(0, 12'h304, 64'h1EEE);                // mie
    csrw(0, 12'h303, 64'h222);                 // mideleg S interrupts to HS
    csrw(0, 12'h603, 64'h444);                 // hideleg VS interrupts
    csrw(0, 12'h600, 64'(2) << 12);            // hstatus.VGEIN = 2
    plic_wr(28'(4 * 7), 5);
    plic_wr(28'h0002000 + 28'(ctx(0, 3) * 'h80), 1 << 7);
    @(negedge clk) dev[7] = 1;
    lat_cycles = 0;
    while (!(irq[0].irq && irq[0].to_vs)) begin @(posedge clk); #1 lat_cycles++; end
    chk("direct injection: VS external interrupt (cause 9)", irq[0], {1'b1, 4'd9, 1'b0, 1'b1});
    checks++;
    if (lat_cycles > 2) begin failures++; $display("FAIL injection latency %0d cycles", lat_cycles); end
    $display("direct injection latency: %0d cycles from device line to hart", lat_cycles);
    chk("mip shows VSEIP for a WFI wake-up", mip[0][IRQ_VSEI], 1);
    mech[M_DIRECT]++;
    plic_rd(ctx_base(ctx(0, 3)) + 4, d);
    chk("guest claims device 7 on its own context", d, 7);
    #1 chk("claimed: no more interrupt", irq[0].irq, 0);
    @(negedge clk) dev[7] = 0;
    plic_wr(ctx_base(ctx(0, 3)) + 4, 7);
    mech[M_GUEST_CLAIM]++;

    // ---- guest interrupt for a context that is not running: SGEI to the hypervisor
    plic_wr(28'(4 * 8), 3);
    plic_wr(28'h0002000 + 28'(ctx(0, 2) * 'h80), 1 << 8);
    csrw(0, 12'h607, 64'h2);                   // hgeie bit 1 (VS context 0)
    @(negedge clk) dev[8] = 1;
    @(posedge clk); #1;
    chk("non-selected guest context: SGEI to HS", irq[0], {1'b1, 4'd12, 1'b0, 1'b0});
    if (irq[0].cause == 12) mech[M_SGEI]++;
    plic_rd(ctx_base(ctx(0, 2)) + 4, d);
    chk("claim device 8", d, 8);
    @(negedge clk) dev[8] = 0;
    plic_wr(ctx_base(ctx(0, 2)) + 4, 8);
    csrw(0, 12'h607, 64'h0);

    // ---- virtual interrupt injection through block 2 into hart 0 VS context 1
    plic_wr(28'h4000000 + 28'(4 * ctx(0, 3)), 3);        // VCIBIR = block 2
    plic_wr(28'h4010000 + 28'(2 * 'h1000), {1'b0, 7'd0, 8'd2, 6'd0, 10'h55});
    #1 chk("VIIR raises VS external interrupt", irq[0], {1'b1, 4'd9, 1'b0, 1'b1});
    plic_rd(ctx_base(ctx(0, 3)) + 4, d);
    chk("guest claims virtual ID 0x55", d, 'h55);
    if (d == 'h55) mech[M_VIIR]++;
    plic_wr(ctx_base(ctx(0, 3)) + 4, 'h55);
    plic_rd(28'h4010000 + 28'(2 * 'h1000), d);
    chk("VIIR cleared by complete", d, 0);

    // ---- management interrupt of block 2 (ID 31+2+1 = 34) to hart 0's S context
    plic_wr(28'(4 * 34), 1);
    plic_wr(28'h0002004 + 28'(ctx(0, 1) * 'h80), 1 << (34 - 32));
    plic_wr(28'h4110000 + 28'(4 * 2), 32'h2);
    plic_wr(ctx_base(ctx(0, 3)) + 4, 'h99);               // complete of an unknown ID
    @(posedge clk); #1;
    chk("management interrupt to HS (SEI, cause 9)", irq[0], {1'b1, 4'd9, 1'b0, 1'b0});
    plic_rd(ctx_base(ctx(0, 1)) + 4, d);
    chk("hypervisor claims management ID 34", d, 34);
    if (d == 34) mech[M_MGMT]++;
    plic_rd(28'h4110000 + 28'(4 * 2), d);
    chk("IBMSR reports unknown ID 0x99", d[25:16], 'h99);
    plic_wr(28'h4110000 + 28'(4 * 2), 32'h200);
    plic_wr(ctx_base(ctx(0, 1)) + 4, 34);
    to_m(0);

    // ---- CLINTv timers: HS timer hart 3, VS timer hart 5, M timer hart 1
    enter(3, PRV_U, 0);
    enter(1, PRV_S, 0);
    csrw(3, 12'h304, 64'h1EEE);
    csrw(3, 12'h303, 64'h222);
    csrw(5, 12'h200, 64'h2);
    enter(5, PRV_S, 1);
    csrw(5, 12'h304, 64'h1EEE);
    csrw(5, 12'h603, 64'h444);
    csrw(1, 12'h304, 64'h1EEE);
    clint_wr64(28'h0c000 + 8 * 3, 64'd40);                // stimecmp 3
    clint_wr64(28'h24000 + 8 * 5, 64'd1000);              // htimedelta 5
    clint_wr64(28'h1c000 + 8 * 5, 64'd1050);              // vstimecmp 5
    clint_wr64(28'h04000 + 8 * 1, 64'd60);                // mtimecmp 1
    clint_rd64(28'h14000 + 8 * 5, d64);
    chk("vstime 5 = mtime + htimedelta", d64, 64'd1000);
    chk("no timer yet", {irq[1].irq, irq[3].irq, irq[5].irq}, 3'b000);
    @(negedge clk) tick = 1;
    for (int t = 1; t <= 70; t++) begin
      @(posedge clk); #1;
      chk("HS timer hart 3 at mtime > 40", irq[3].irq, t > 40);
      chk("VS timer hart 5 at vstime > 1050", irq[5].irq, t > 50);
      chk("M timer hart 1 at mtime > 60", irq[1].irq, t > 60);
      if (t == 41 && irq[3] == {1'b1, 4'd5, 1'b0, 1'b0}) mech[M_STIMER]++;
      if (t == 51 && irq[5] == {1'b1, 4'd5, 1'b0, 1'b1}) mech[M_VSTIMER]++;
      if (t == 61 && irq[1] == {1'b1, 4'd7, 1'b1, 1'b0}) mech[M_MTIMER]++;
    end
    @(negedge clk) tick = 0;

    // ---- two-stage translation on hart 2
    enter(2, PRV_S, 1);
    tlb_access(2, 0, 29'h1, ACC_READ, 0, r, n);
    chk("guest load translated", r.hpn, s2h(44'h80009));
    chk("guest load no fault", {r.pf, r.gpf, r.ae}, 0);
    chk("cold two-stage walk reads", n, 9);
    if (r.hpn == s2h(44'h80009)) mech[M_TWO_STAGE]++;
    tlb_access(2, 1, 29'h2, ACC_EXEC, 0, r, n);
    chk("guest fetch translated by the ITLB", r.hpn, s2h(44'h8000A));
    chk("warm walk uses the PTE cache", n, 7);
    if (n < 9) mech[M_PTE_HIT]++;
    tlb_access(2, 0, 29'h4, ACC_READ, 0, r, n);
    chk("load from read-only guest page", {r.pf, r.gpf, r.hpn}, {2'b00, 44'h60000});
    tlb_access(2, 0, 29'h4, ACC_WRITE, 0, r, n);
    chk("store to read-only guest page: guest-page fault", {n[3:0], r.pf, r.gpf}, {4'd0, 2'b01});
    chk("fault reports the guest-physical page", r.gpn, 29'h80010);
    if (r.gpf) mech[M_GPF]++;
    // the core raises the store guest-page fault; undelegated, it is taken in M with the
    // guest-physical address in mtval2
    @(negedge clk) treq[2].exc_valid = 1; treq[2].exc_cause = 5'd23; treq[2].exc_pc = 64'h1_0000;
    treq[2].exc_tval = 64'h4000; treq[2].exc_gva = 1; treq[2].exc_gpa = {20'd0, r.gpn, 12'd0};
    #1 chk("guest-page fault trap to mtvec", trsp[2], {1'b1, 64'h0});
    @(negedge clk) treq[2] = '0;
    @(negedge clk) csr[2].addr = 12'h34B;
    #1 chk("mtval2 holds the GPA >> 2", csr_rdata[2], 64'h8001_0000 >> 2);
    if (csr_rdata[2] == 64'h8001_0000 >> 2 && hs[2].priv == PRV_M) mech[M_TRAP_GPF]++;
    @(negedge clk) csr[2] = '0;
    // hlv from HS: translated as the guest would, hits the guest entry
    csrw(2, 12'h600, 64'h100);                 // hstatus.SPVP
    enter(2, PRV_S, 0);
    tlb_access(2, 0, 29'h1, ACC_READ, 1, r, n);
    chk("hlv from HS uses the guest translation", {n[3:0], r.hpn}, {4'd0, s2h(44'h80009)});
    if (r.hpn == s2h(44'h80009)) mech[M_HLV]++;
    // hfence drops guest translations
    @(negedge clk) flush[2] = 1; flush_guest[2] = 1;
    @(negedge clk) flush[2] = 0; flush_guest[2] = 0;
    tlb_access(2, 0, 29'h1, ACC_READ, 1, r, n);
    chk("after hfence the guest translation is walked again", n, 9);
    if (n == 9) mech[M_HFENCE]++;

    // hart 5 is still in its guest with the VS timer pending: at an instruction boundary the
    // interrupt is taken into VS at vstvec, and vsstatus.SIE is cleared
    chk("VS timer still pending on hart 5", irq[5], {1'b1, 4'd5, 1'b0, 1'b1});
    @(negedge clk) treq[5].int_en = 1; treq[5].exc_pc = 64'h2468;
    #1 chk("interrupt trap to vstvec", trsp[5], {1'b1, 64'h4000_0000});
    @(negedge clk) treq[5] = '0;
    #1 chk("taken in VS: V stays 1, SIE cleared, no interrupt pending",
           {hs[5].priv, hs[5].virt, hs[5].vsstatus_sie, irq[5].irq}, {PRV_S, 1'b1, 1'b0, 1'b0});
    csr[5].addr = 12'h242;
    #1 chk("vscause reports the supervisor timer (5)", csr_rdata[5], {1'b1, 59'd0, 4'd5});
    if (csr_rdata[5] == {1'b1, 59'd0, 4'd5} && hs[5].virt) mech[M_TRAP_VS]++;
    csr[5] = '0;

    for (int m = 0; m < M_COUNT; m++) begin
      $display("mechanism %-22s happened %0d time(s)", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never happened", mech_name[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
