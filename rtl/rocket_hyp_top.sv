// rocket_hyp_top: the hypervisor-extension hardware of a multi-hart RISC-V SoC, without
// the cores, caches and buses themselves.
//
// It holds one CLINTv and one PLICv shared by all harts and, per hart: the trap and status
// part of the H-extension CSR file (hyp_trap), which owns the hart's privilege, V bit,
// status fields and translation roots; the interrupt pending/selection logic (hyp_irq);
// and the two-stage MMU: an instruction TLB and a data TLB (tlbv) sharing one page-table
// walker (ptwv) through ptw_arbiter. The CLINTv timer lines (mtip, stip, vstip) and msip,
// and the PLICv lines (meip, seip and GEILEN VS-context lines per hart) go straight into
// each hart's hyp_irq, which selects the guest line through hstatus.VGEIN and reports the
// interrupt to take; hyp_trap takes it when the core signals an instruction boundary
// (trap_req_i.int_en), together with the core's exceptions and mret/sret, and returns the
// new PC (trap_rsp_o, same cycle) while the mode changes at the next rising edge.
// The core pipeline, the L1/L2 caches and the TileLink buses are outside: their
// connections are the ports below. The core issues CSR accesses (read data is the OR of
// the two CSR groups, which do not overlap), trap events and TLB lookups, and reads the
// current mode and status back from hart_o; the walker's page-table reads leave through
// ptw_mem_req_o (in the original SoC they go to the L1 data cache). CLINTv and PLICv
// registers are reached through their own register ports (in the SoC, behind the control
// bus).
//
// Defaults: 6 harts, the largest configuration evaluated; GEILEN 4, 31 device interrupt
// lines, 8 injection blocks of 4 VIIRs, 3 priority bits, 32-entry TLBs, an 8-entry PTE
// cache. The per-hart structure and the interrupt wiring follow the SoC and PLICv diagrams
// of the design; the sizes the paper leaves open are this design's choice.
//
// Lint notes: the concurrent assertions inside plicv, ptwv and tlbv use
// "disable iff (!rst_ni)", which verilator reports as rst_ni being used both as an
// asynchronous reset and synchronously (SYNCASYNCNET); the flops themselves all reset
// asynchronously. Unused-bit warnings in the submodules are explained in their headers.
module rocket_hyp_top
  import hyp_pkg::*;
#(
  parameter int unsigned NHARTS      = 6,
  parameter int unsigned GEILEN      = 4,
  parameter int unsigned NDEV        = 31,
  parameter int unsigned NBLOCKS     = 8,
  parameter int unsigned NVIIR       = 4,
  parameter int unsigned PRIO_W      = 3,
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned PTE_ENTRIES = 8
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      rtc_tick_i,
  input  logic [NDEV:1]             dev_irq_i,
  // CLINTv / PLICv registers
  input  mmio_req_t                 clint_req_i,
  output mmio_rsp_t                 clint_rsp_o,
  input  mmio_req_t                 plic_req_i,
  output mmio_rsp_t                 plic_rsp_o,
  // per hart: core state, interrupt CSRs, interrupt to take
  input  trap_req_t   [NHARTS-1:0]  trap_req_i,
  output trap_rsp_t   [NHARTS-1:0]  trap_rsp_o,
  output hart_state_t [NHARTS-1:0]  hart_o,
  input  csr_req_t    [NHARTS-1:0]  csr_req_i,
  output logic [NHARTS-1:0][63:0]   csr_rdata_o,
  output irq_req_t    [NHARTS-1:0]  irq_o,
  output logic [NHARTS-1:0][63:0]   mip_o,         // pending bits, for WFI wake-up
  // per hart: TLB lookups and flushes (sfence.vma / hfence)
  input  tlb_req_t    [NHARTS-1:0]  itlb_req_i,
  output tlb_resp_t   [NHARTS-1:0]  itlb_resp_o,
  input  tlb_req_t    [NHARTS-1:0]  dtlb_req_i,
  output tlb_resp_t   [NHARTS-1:0]  dtlb_resp_o,
  input  logic        [NHARTS-1:0]  flush_i,
  input  logic        [NHARTS-1:0]  flush_guest_i,
  // per hart: page-table reads of the walker
  output ptw_mem_req_t [NHARTS-1:0] ptw_mem_req_o,
  input  logic         [NHARTS-1:0] ptw_mem_ready_i,
  input  ptw_mem_rsp_t [NHARTS-1:0] ptw_mem_rsp_i
);

  logic [NHARTS-1:0]             msip, mtip, stip, vstip, meip, seip;
  logic [NHARTS-1:0][GEILEN-1:0] vseip;

  clintv #(.NHARTS(NHARTS)) u_clint (
    .clk_i, .rst_ni, .rtc_tick_i,
    .req_i  (clint_req_i),
    .rsp_o  (clint_rsp_o),
    .msip_o (msip),
    .mtip_o (mtip),
    .stip_o (stip),
    .vstip_o(vstip)
  );

  plicv #(.NHARTS(NHARTS), .GEILEN(GEILEN), .NDEV(NDEV), .NBLOCKS(NBLOCKS), .NVIIR(NVIIR),
          .PRIO_W(PRIO_W)) u_plic (
    .clk_i, .rst_ni,
    .irq_i  (dev_irq_i),
    .req_i  (plic_req_i),
    .rsp_o  (plic_rsp_o),
    .meip_o (meip),
    .seip_o (seip),
    .vseip_o(vseip)
  );

  for (genvar h = 0; h < NHARTS; h++) begin : g_hart
    logic [63:0] irq_rdata, trap_rdata;
    logic        trap_taken;
    logic [63:0] trap_pc, xret_pc;

    // ---------------------------------------------------------- mode, status and traps
    hyp_trap u_trap (
      .clk_i, .rst_ni,
      .csr_we_i      (csr_req_i[h].we),
      .csr_addr_i    (csr_req_i[h].addr),
      .csr_wdata_i   (csr_req_i[h].wdata),
      .csr_rdata_o   (trap_rdata),
      .exc_valid_i   (trap_req_i[h].exc_valid),
      .exc_cause_i   (trap_req_i[h].exc_cause),
      .exc_pc_i      (trap_req_i[h].exc_pc),
      .exc_tval_i    (trap_req_i[h].exc_tval),
      .exc_gva_i     (trap_req_i[h].exc_gva),
      .exc_gpa_i     (trap_req_i[h].exc_gpa),
      .irq_i         (irq_o[h].irq && trap_req_i[h].int_en),
      .irq_cause_i   (irq_o[h].cause),
      .irq_to_m_i    (irq_o[h].to_m),
      .irq_to_vs_i   (irq_o[h].to_vs),
      .mret_i        (trap_req_i[h].mret),
      .sret_i        (trap_req_i[h].sret),
      .trap_o        (trap_taken),
      .trap_pc_o     (trap_pc),
      .xret_pc_o     (xret_pc),
      .priv_o        (hart_o[h].priv),
      .virt_o        (hart_o[h].virt),
      .spvp_o        (hart_o[h].spvp),
      .mstatus_mie_o (hart_o[h].mstatus_mie),
      .mstatus_sie_o (hart_o[h].mstatus_sie),
      .vsstatus_sie_o(hart_o[h].vsstatus_sie),
      .sum_o         (hart_o[h].sum),
      .mxr_o         (hart_o[h].mxr),
      .hs_mxr_o      (hart_o[h].hs_mxr),
      .satp_en_o     (hart_o[h].satp_en),
      .satp_ppn_o    (hart_o[h].satp_ppn),
      .vsatp_en_o    (hart_o[h].vsatp_en),
      .vsatp_ppn_o   (hart_o[h].vsatp_ppn),
      .hgatp_en_o    (hart_o[h].hgatp_en),
      .hgatp_ppn_o   (hart_o[h].hgatp_ppn)
    );
    assign trap_rsp_o[h] = '{trap: trap_taken || trap_req_i[h].mret || trap_req_i[h].sret,
                             pc:   trap_taken ? trap_pc : xret_pc};
    // the two CSR groups are disjoint apart from hstatus, where hyp_trap reads VGEIN as 0
    assign csr_rdata_o[h] = irq_rdata | trap_rdata;

    // ---------------------------------------------------------- interrupts
    hyp_irq #(.GEILEN(GEILEN)) u_irq (
      .clk_i, .rst_ni,
      .msip_i        (msip[h]),
      .mtip_i        (mtip[h]),
      .stip_i        (stip[h]),
      .vstip_i       (vstip[h]),
      .meip_i        (meip[h]),
      .seip_i        (seip[h]),
      .vseip_i       (vseip[h]),
      .priv_i        (hart_o[h].priv),
      .virt_i        (hart_o[h].virt),
      .mstatus_mie_i (hart_o[h].mstatus_mie),
      .mstatus_sie_i (hart_o[h].mstatus_sie),
      .vsstatus_sie_i(hart_o[h].vsstatus_sie),
      .csr_we_i      (csr_req_i[h].we),
      .csr_addr_i    (csr_req_i[h].addr),
      .csr_wdata_i   (csr_req_i[h].wdata),
      .csr_rdata_o   (irq_rdata),
      .irq_o         (irq_o[h].irq),
      .irq_cause_o   (irq_o[h].cause),
      .irq_to_m_o    (irq_o[h].to_m),
      .irq_to_vs_o   (irq_o[h].to_vs),
      .mip_o         (mip_o[h])
    );

    // ---------------------------------------------------------- MMU
    tlb_req_t  [1:0]  treq;
    tlb_resp_t [1:0]  tresp;
    logic      [1:0]  t_ptw_valid, t_ptw_ready, t_resp_valid;
    ptw_req_t  [1:0]  t_ptw_req;
    logic             ptw_valid, ptw_ready, ptw_resp_valid;
    ptw_req_t         ptw_req;
    ptw_resp_t        ptw_resp;

    assign treq[0]        = itlb_req_i[h];
    assign treq[1]        = dtlb_req_i[h];
    assign itlb_resp_o[h] = tresp[0];
    assign dtlb_resp_o[h] = tresp[1];

    for (genvar t = 0; t < 2; t++) begin : g_tlb
      tlbv #(.ENTRIES(TLB_ENTRIES)) u_tlb (
        .clk_i, .rst_ni,
        .req_valid_i     (treq[t].valid),
        .req_vpn_i       (treq[t].vpn),
        .req_acc_i       (treq[t].acc),
        .req_hv_i        (treq[t].hv),
        .req_hlvx_i      (treq[t].hlvx),
        .priv_i          (hart_o[h].priv),
        .virt_i          (hart_o[h].virt),
        .spvp_i          (hart_o[h].spvp),
        .sum_i           (hart_o[h].sum),
        .mxr_i           (hart_o[h].mxr),
        .hs_mxr_i        (hart_o[h].hs_mxr),
        .satp_en_i       (hart_o[h].satp_en),
        .satp_ppn_i      (hart_o[h].satp_ppn),
        .vsatp_en_i      (hart_o[h].vsatp_en),
        .vsatp_ppn_i     (hart_o[h].vsatp_ppn),
        .hgatp_en_i      (hart_o[h].hgatp_en),
        .hgatp_ppn_i     (hart_o[h].hgatp_ppn),
        .flush_i         (flush_i[h]),
        .flush_guest_i   (flush_guest_i[h]),
        .hit_o           (tresp[t].hit),
        .miss_o          (tresp[t].miss),
        .hpn_o           (tresp[t].hpn),
        .gpn_o           (tresp[t].gpn),
        .pf_o            (tresp[t].pf),
        .gpf_o           (tresp[t].gpf),
        .ae_o            (tresp[t].ae),
        .ptw_req_valid_o (t_ptw_valid[t]),
        .ptw_req_ready_i (t_ptw_ready[t]),
        .ptw_req_o       (t_ptw_req[t]),
        .ptw_resp_valid_i(t_resp_valid[t]),
        .ptw_resp_i      (ptw_resp)
      );
    end

    ptw_arbiter u_arb (
      .clk_i, .rst_ni,
      .req_valid_i     (t_ptw_valid),
      .req_ready_o     (t_ptw_ready),
      .req_i           (t_ptw_req),
      .resp_valid_o    (t_resp_valid),
      .ptw_req_valid_o (ptw_valid),
      .ptw_req_ready_i (ptw_ready),
      .ptw_req_o       (ptw_req),
      .ptw_resp_valid_i(ptw_resp_valid)
    );

    ptwv #(.PTE_ENTRIES(PTE_ENTRIES)) u_ptw (
      .clk_i, .rst_ni,
      .req_valid_i     (ptw_valid),
      .req_ready_o     (ptw_ready),
      .req_i           (ptw_req),
      .resp_valid_o    (ptw_resp_valid),
      .resp_o          (ptw_resp),
      .flush_i         (flush_i[h]),
      .flush_guest_i   (flush_guest_i[h]),
      .mem_req_valid_o (ptw_mem_req_o[h].valid),
      .mem_req_ready_i (ptw_mem_ready_i[h]),
      .mem_req_addr_o  (ptw_mem_req_o[h].addr),
      .mem_resp_valid_i(ptw_mem_rsp_i[h].valid),
      .mem_resp_data_i (ptw_mem_rsp_i[h].data),
      .mem_resp_err_i  (ptw_mem_rsp_i[h].err)
    );
  end

endmodule
