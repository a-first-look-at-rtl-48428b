// hyp_trap: trap, mode-change and status part of a hart's CSR file with the hypervisor
// extension.
//
// It holds the hart's privilege and virtualization mode (V) and the CSRs that decide where
// a trap goes and what it records: mstatus (with MPV and GVA), medeleg, mtvec, mscratch,
// mepc, mcause, mtval, mtval2, mtinst; hstatus (SPV, SPVP, GVA, HU, VTSR/VTW/VTVM),
// hedeleg, hcounteren, htval, htinst, hgatp; the HS copies sstatus/stvec/sscratch/sepc/
// scause/stval/satp and the VS copies vsstatus/vstvec/vsscratch/vsepc/vscause/vstval/vsatp.
// While V=1 the supervisor CSR numbers reach the VS copies, as the extension requires.
//
// Traps. An interrupt (from hyp_irq, which already chose its target mode) or an exception
// is taken in the cycle trap_o is high: the new PC (trap_pc_o) is the target mode's tvec
// (vectored for interrupts when tvec[0] is set) and the state changes at the next rising
// edge. An exception goes to M unless medeleg delegates it from a mode below M; a delegated
// exception raised with V=1 goes on to VS if hedeleg also delegates it, otherwise to HS.
// Entering M or HS from a guest records V in mstatus.MPV / hstatus.SPV, whether tval holds
// a guest virtual address in GVA, and the faulting guest-physical address shifted right by
// 2 in mtval2 / htval; entering HS from a guest also records the guest privilege in SPVP.
// Interrupts are taken before a simultaneous exception. mret and sret return to the mode
// saved at entry and give xret_pc_o (mepc, sepc or vsepc); sret with V=1 uses the vsstatus
// fields, so a guest's sret never leaves the guest.
//
// Outputs: priv_o/virt_o and the status and translation-root fields that hyp_irq and the
// TLBs consume. CSR reads are combinational (csr_rdata_o, zero for numbers not held here);
// writes take effect at the rising edge.
//
// What follows the paper: the set of CSRs and exceptions it lists as implemented
// (hstatus/mstatus, hedeleg/mideleg, hcounteren, mtval2/htval, hgatp, the vs* CSRs, ecall
// from VS, guest-page faults, virtual instruction), htinst and mtinst hardwired to zero,
// hgatp supporting only Bare and Sv39x4 and no VMID (the VMID field reads zero). The bit
// positions follow the H-extension draft the design targets. The paper describes these
// mechanisms only by function; the register-level implementation is this design's own,
// and counters, FP/vector state, endianness and the TVM/TW/TSR-style virtual-instruction
// checks (raised by the core's decoder) are not modelled. mie/mip/mideleg/hideleg and the
// other interrupt CSRs live in hyp_irq.
//
// Lint notes: tvec bit 1 is always zero, status writes use only the implemented fields,
// and the assertion's "disable iff (!rst_ni)" makes verilator report SYNCASYNCNET; all
// flops reset asynchronously.
module hyp_trap
  import hyp_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // CSR access from the core
  input  logic              csr_we_i,
  input  logic [11:0]       csr_addr_i,
  input  logic [63:0]       csr_wdata_i,
  output logic [63:0]       csr_rdata_o,
  // exception raised by the retiring instruction
  input  logic              exc_valid_i,
  input  logic [4:0]        exc_cause_i,
  input  logic [63:0]       exc_pc_i,
  input  logic [63:0]       exc_tval_i,
  input  logic              exc_gva_i,      // tval is a guest virtual address
  input  logic [63:0]       exc_gpa_i,      // guest-physical address of a guest-page fault
  // interrupt chosen by hyp_irq
  input  logic              irq_i,
  input  logic [3:0]        irq_cause_i,
  input  logic              irq_to_m_i,
  input  logic              irq_to_vs_i,
  // return instructions
  input  logic              mret_i,
  input  logic              sret_i,
  // new PC
  output logic              trap_o,
  output logic [63:0]       trap_pc_o,
  output logic [63:0]       xret_pc_o,
  // mode and status for hyp_irq and the MMU
  output priv_e             priv_o,
  output logic              virt_o,
  output logic              spvp_o,
  output logic              mstatus_mie_o,
  output logic              mstatus_sie_o,
  output logic              vsstatus_sie_o,
  output logic              sum_o,          // SUM of the first-stage status in use
  output logic              mxr_o,          // MXR of the first-stage status in use
  output logic              hs_mxr_o,       // mstatus.MXR, for the second stage
  output logic              satp_en_o,
  output logic [PPN_W-1:0]  satp_ppn_o,
  output logic              vsatp_en_o,
  output logic [PPN_W-1:0]  vsatp_ppn_o,
  output logic              hgatp_en_o,
  output logic [PPN_W-1:0]  hgatp_ppn_o
);

  localparam logic [11:0] CSR_SSTATUS  = 12'h100, CSR_STVEC = 12'h105, CSR_SSCRATCH = 12'h140,
                          CSR_SEPC     = 12'h141, CSR_SCAUSE = 12'h142, CSR_STVAL = 12'h143,
                          CSR_SATP     = 12'h180;
  localparam logic [11:0] CSR_VSSTATUS = 12'h200, CSR_VSTVEC = 12'h205, CSR_VSSCRATCH = 12'h240,
                          CSR_VSEPC    = 12'h241, CSR_VSCAUSE = 12'h242, CSR_VSTVAL = 12'h243,
                          CSR_VSATP    = 12'h280;
  localparam logic [11:0] CSR_MSTATUS  = 12'h300, CSR_MEDELEG = 12'h302, CSR_MTVEC = 12'h305,
                          CSR_MSCRATCH = 12'h340, CSR_MEPC = 12'h341, CSR_MCAUSE = 12'h342,
                          CSR_MTVAL    = 12'h343, CSR_MTINST = 12'h34A, CSR_MTVAL2 = 12'h34B;
  localparam logic [11:0] CSR_HSTATUS  = 12'h600, CSR_HEDELEG = 12'h602, CSR_HCOUNTEREN = 12'h606,
                          CSR_HTVAL    = 12'h643, CSR_HTINST = 12'h64A, CSR_HGATP = 12'h680;

  // exception codes that hedeleg cannot delegate: ecall from HS/VS/M, guest-page faults,
  // virtual instruction
  localparam logic [23:0] HEDELEG_RO = 24'hF00E00;
  localparam logic [23:0] MEDELEG_RO = 24'h000800;   // ecall from M is never delegated

  typedef struct packed {
    logic       sie, spie, spp, sum, mxr;
  } sstat_t;

  typedef struct packed {
    logic       gva, spv, spvp, hu, vtvm, vtw, vtsr;
  } hstat_t;

  typedef struct packed {
    logic        en;
    logic [43:0] ppn;
  } root_t;

  priv_e        priv_q;
  logic         virt_q;
  // mstatus: M-level fields plus the HS sstatus fields
  logic         mie_q, mpie_q, mpv_q, mgva_q;
  priv_e        mpp_q;
  sstat_t       hss_q, vss_q;    // sstatus and vsstatus fields
  hstat_t       hst_q;
  logic [23:0]  medeleg_q, hedeleg_q;
  logic [31:0]  hcounteren_q;
  logic [63:0]  mtvec_q, stvec_q, vstvec_q;
  logic [63:0]  mscratch_q, sscratch_q, vsscratch_q;
  logic [63:0]  mepc_q, sepc_q, vsepc_q;
  logic [63:0]  mcause_q, scause_q, vscause_q;
  logic [63:0]  mtval_q, stval_q, vstval_q, mtval2_q, htval_q;
  root_t        satp_q, vsatp_q, hgatp_q;

  // ------------------------------------------------------------------ trap routing
  logic        take_irq, take_exc;
  logic        to_m, to_vs;
  logic [63:0] cause;
  logic [63:0] tvec;

  assign take_irq = irq_i;
  assign take_exc = exc_valid_i && !irq_i;
  assign trap_o   = take_irq || take_exc;

  always_comb begin
    if (take_irq) begin
      to_m  = irq_to_m_i;
      to_vs = irq_to_vs_i;
      cause = {1'b1, 59'd0, irq_cause_i};
    end else begin
      to_m  = priv_q == PRV_M || !medeleg_q[exc_cause_i];
      to_vs = !to_m && virt_q && hedeleg_q[exc_cause_i];
      cause = {59'd0, exc_cause_i};
    end
    tvec = to_m ? mtvec_q : to_vs ? vstvec_q : stvec_q;
    trap_pc_o = {tvec[63:2], 2'b00};
    if (tvec[0] && take_irq) trap_pc_o = {tvec[63:2], 2'b00} + {58'd0, irq_cause_i, 2'b00};
  end

  always_comb begin
    xret_pc_o = mepc_q;
    if (sret_i) xret_pc_o = virt_q ? vsepc_q : sepc_q;
  end

  // ------------------------------------------------------------------ CSR numbering
  // with V=1 the supervisor CSR numbers reach the VS copies
  logic [11:0] a;
  always_comb begin
    a = csr_addr_i;
    if (virt_q)
      unique case (csr_addr_i)
        CSR_SSTATUS:  a = CSR_VSSTATUS;
        CSR_STVEC:    a = CSR_VSTVEC;
        CSR_SSCRATCH: a = CSR_VSSCRATCH;
        CSR_SEPC:     a = CSR_VSEPC;
        CSR_SCAUSE:   a = CSR_VSCAUSE;
        CSR_STVAL:    a = CSR_VSTVAL;
        CSR_SATP:     a = CSR_VSATP;
        default: ;
      endcase
  end

  function automatic logic [63:0] sstatus_rd(sstat_t s);
    logic [63:0] r = '0;
    r[1] = s.sie; r[5] = s.spie; r[8] = s.spp; r[18] = s.sum; r[19] = s.mxr;
    return r;
  endfunction
  function automatic sstat_t sstatus_wr(logic [63:0] d);
    return '{sie: d[1], spie: d[5], spp: d[8], sum: d[18], mxr: d[19]};
  endfunction
  function automatic logic [63:0] satp_rd(root_t r);
    return {r.en ? 4'd8 : 4'd0, 16'd0, r.ppn};
  endfunction

  always_comb begin
    csr_rdata_o = '0;
    unique case (a)
      CSR_MSTATUS: begin
        csr_rdata_o = sstatus_rd(hss_q);
        csr_rdata_o[3]     = mie_q;
        csr_rdata_o[7]     = mpie_q;
        csr_rdata_o[12:11] = mpp_q;
        csr_rdata_o[38]    = mgva_q;
        csr_rdata_o[39]    = mpv_q;
      end
      CSR_SSTATUS:    csr_rdata_o = sstatus_rd(hss_q);
      CSR_VSSTATUS:   csr_rdata_o = sstatus_rd(vss_q);
      CSR_HSTATUS:    csr_rdata_o = {41'd0, hst_q.vtsr, hst_q.vtw, hst_q.vtvm, 10'd0,
                                     hst_q.hu, hst_q.spvp, hst_q.spv, hst_q.gva, 6'd0};
      CSR_MEDELEG:    csr_rdata_o = {40'd0, medeleg_q};
      CSR_HEDELEG:    csr_rdata_o = {40'd0, hedeleg_q};
      CSR_HCOUNTEREN: csr_rdata_o = {32'd0, hcounteren_q};
      CSR_MTVEC:      csr_rdata_o = mtvec_q;
      CSR_STVEC:      csr_rdata_o = stvec_q;
      CSR_VSTVEC:     csr_rdata_o = vstvec_q;
      CSR_MSCRATCH:   csr_rdata_o = mscratch_q;
      CSR_SSCRATCH:   csr_rdata_o = sscratch_q;
      CSR_VSSCRATCH:  csr_rdata_o = vsscratch_q;
      CSR_MEPC:       csr_rdata_o = mepc_q;
      CSR_SEPC:       csr_rdata_o = sepc_q;
      CSR_VSEPC:      csr_rdata_o = vsepc_q;
      CSR_MCAUSE:     csr_rdata_o = mcause_q;
      CSR_SCAUSE:     csr_rdata_o = scause_q;
      CSR_VSCAUSE:    csr_rdata_o = vscause_q;
      CSR_MTVAL:      csr_rdata_o = mtval_q;
      CSR_STVAL:      csr_rdata_o = stval_q;
      CSR_VSTVAL:     csr_rdata_o = vstval_q;
      CSR_MTVAL2:     csr_rdata_o = mtval2_q;
      CSR_HTVAL:      csr_rdata_o = htval_q;
      CSR_SATP:       csr_rdata_o = satp_rd(satp_q);
      CSR_VSATP:      csr_rdata_o = satp_rd(vsatp_q);
      CSR_HGATP:      csr_rdata_o = satp_rd(hgatp_q);
      CSR_MTINST, CSR_HTINST: csr_rdata_o = '0;   // hardwired to zero
      default: ;      // other numbers belong elsewhere
    endcase
  end

  // ------------------------------------------------------------------ state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      priv_q <= PRV_M;
      virt_q <= 1'b0;
      {mie_q, mpie_q, mpv_q, mgva_q} <= '0;
      mpp_q  <= PRV_U;
      hss_q  <= '0;
      vss_q  <= '0;
      hst_q  <= '0;
      medeleg_q <= '0; hedeleg_q <= '0; hcounteren_q <= '0;
      mtvec_q <= '0; stvec_q <= '0; vstvec_q <= '0;
      mscratch_q <= '0; sscratch_q <= '0; vsscratch_q <= '0;
      mepc_q <= '0; sepc_q <= '0; vsepc_q <= '0;
      mcause_q <= '0; scause_q <= '0; vscause_q <= '0;
      mtval_q <= '0; stval_q <= '0; vstval_q <= '0; mtval2_q <= '0; htval_q <= '0;
      satp_q <= '0; vsatp_q <= '0; hgatp_q <= '0;
    end else if (trap_o) begin
      if (to_m) begin
        mepc_q   <= exc_pc_i;
        mcause_q <= cause;
        mtval_q  <= take_exc ? exc_tval_i : '0;
        mtval2_q <= take_exc ? exc_gpa_i >> 2 : '0;
        mgva_q   <= take_exc && exc_gva_i;
        mpv_q    <= virt_q;
        mpp_q    <= priv_q;
        mpie_q   <= mie_q;
        mie_q    <= 1'b0;
        priv_q   <= PRV_M;
        virt_q   <= 1'b0;
      end else if (to_vs) begin
        vsepc_q   <= exc_pc_i;
        vscause_q <= cause;
        vstval_q  <= take_exc ? exc_tval_i : '0;
        vss_q.spp  <= priv_q[0];
        vss_q.spie <= vss_q.sie;
        vss_q.sie  <= 1'b0;
        priv_q    <= PRV_S;
      end else begin
        sepc_q    <= exc_pc_i;
        scause_q  <= cause;
        stval_q   <= take_exc ? exc_tval_i : '0;
        htval_q   <= take_exc ? exc_gpa_i >> 2 : '0;
        hst_q.gva <= take_exc && exc_gva_i;
        hst_q.spv <= virt_q;
        if (virt_q) hst_q.spvp <= priv_q[0];
        hss_q.spp  <= priv_q[0];
        hss_q.spie <= hss_q.sie;
        hss_q.sie  <= 1'b0;
        priv_q    <= PRV_S;
        virt_q    <= 1'b0;
      end
    end else if (mret_i) begin
      priv_q <= mpp_q;
      virt_q <= mpp_q != PRV_M && mpv_q;
      mie_q  <= mpie_q;
      mpie_q <= 1'b1;
      mpp_q  <= PRV_U;
      mpv_q  <= 1'b0;
    end else if (sret_i) begin
      if (virt_q) begin
        priv_q     <= vss_q.spp ? PRV_S : PRV_U;
        vss_q.sie  <= vss_q.spie;
        vss_q.spie <= 1'b1;
        vss_q.spp  <= 1'b0;
      end else begin
        priv_q     <= hss_q.spp ? PRV_S : PRV_U;
        virt_q     <= hst_q.spv;
        hss_q.sie  <= hss_q.spie;
        hss_q.spie <= 1'b1;
        hss_q.spp  <= 1'b0;
        hst_q.spv  <= 1'b0;
      end
    end else if (csr_we_i) begin
      unique case (a)
        CSR_MSTATUS: begin
          hss_q  <= sstatus_wr(csr_wdata_i);
          mie_q  <= csr_wdata_i[3];
          mpie_q <= csr_wdata_i[7];
          mpp_q  <= csr_wdata_i[12:11] == 2'b10 ? PRV_U : priv_e'(csr_wdata_i[12:11]);
          mgva_q <= csr_wdata_i[38];
          mpv_q  <= csr_wdata_i[39];
        end
        CSR_SSTATUS:    hss_q <= sstatus_wr(csr_wdata_i);
        CSR_VSSTATUS:   vss_q <= sstatus_wr(csr_wdata_i);
        CSR_HSTATUS:    hst_q <= '{gva: csr_wdata_i[6], spv: csr_wdata_i[7], spvp: csr_wdata_i[8],
                                   hu: csr_wdata_i[9], vtvm: csr_wdata_i[20], vtw: csr_wdata_i[21],
                                   vtsr: csr_wdata_i[22]};
        CSR_MEDELEG:    medeleg_q <= csr_wdata_i[23:0] & ~MEDELEG_RO;
        CSR_HEDELEG:    hedeleg_q <= csr_wdata_i[23:0] & ~HEDELEG_RO;
        CSR_HCOUNTEREN: hcounteren_q <= csr_wdata_i[31:0];
        CSR_MTVEC:      mtvec_q  <= {csr_wdata_i[63:2], 1'b0, csr_wdata_i[0]};
        CSR_STVEC:      stvec_q  <= {csr_wdata_i[63:2], 1'b0, csr_wdata_i[0]};
        CSR_VSTVEC:     vstvec_q <= {csr_wdata_i[63:2], 1'b0, csr_wdata_i[0]};
        CSR_MSCRATCH:   mscratch_q  <= csr_wdata_i;
        CSR_SSCRATCH:   sscratch_q  <= csr_wdata_i;
        CSR_VSSCRATCH:  vsscratch_q <= csr_wdata_i;
        CSR_MEPC:       mepc_q  <= {csr_wdata_i[63:1], 1'b0};
        CSR_SEPC:       sepc_q  <= {csr_wdata_i[63:1], 1'b0};
        CSR_VSEPC:      vsepc_q <= {csr_wdata_i[63:1], 1'b0};
        CSR_MCAUSE:     mcause_q  <= csr_wdata_i;
        CSR_SCAUSE:     scause_q  <= csr_wdata_i;
        CSR_VSCAUSE:    vscause_q <= csr_wdata_i;
        CSR_MTVAL:      mtval_q  <= csr_wdata_i;
        CSR_STVAL:      stval_q  <= csr_wdata_i;
        CSR_VSTVAL:     vstval_q <= csr_wdata_i;
        CSR_MTVAL2:     mtval2_q <= csr_wdata_i;
        CSR_HTVAL:      htval_q  <= csr_wdata_i;
        // satp/vsatp: Bare or Sv39 (mode 8); other modes leave the register unchanged
        CSR_SATP:
          if (csr_wdata_i[63:60] inside {4'd0, 4'd8})
            satp_q <= '{en: csr_wdata_i[63], ppn: csr_wdata_i[43:0]};
        CSR_VSATP:
          if (csr_wdata_i[63:60] inside {4'd0, 4'd8})
            vsatp_q <= '{en: csr_wdata_i[63], ppn: csr_wdata_i[43:0]};
        // hgatp: Bare or Sv39x4 only, no VMID, 16 KiB aligned root
        CSR_HGATP:
          if (csr_wdata_i[63:60] inside {4'd0, 4'd8})
            hgatp_q <= '{en: csr_wdata_i[63], ppn: {csr_wdata_i[43:2], 2'b00}};
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ outputs
  assign priv_o         = priv_q;
  assign virt_o         = virt_q;
  assign spvp_o         = hst_q.spvp;
  assign mstatus_mie_o  = mie_q;
  assign mstatus_sie_o  = hss_q.sie;
  assign vsstatus_sie_o = vss_q.sie;
  assign sum_o          = virt_q ? vss_q.sum : hss_q.sum;
  assign mxr_o          = virt_q ? vss_q.mxr : hss_q.mxr;
  assign hs_mxr_o       = hss_q.mxr;
  assign satp_en_o      = satp_q.en;
  assign satp_ppn_o     = satp_q.ppn;
  assign vsatp_en_o     = vsatp_q.en;
  assign vsatp_ppn_o    = vsatp_q.ppn;
  assign hgatp_en_o     = hgatp_q.en;
  assign hgatp_ppn_o    = hgatp_q.ppn;

  a_one_event: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                !(mret_i && sret_i))
    else $error("mret and sret in the same cycle");

endmodule
