// hyp_irq: interrupt-pending and interrupt-selection part of a hart's CSR file with the
// RISC-V hypervisor extension (v0.6.1).
//
// It holds mie, mideleg, hideleg, hvip, hgeie, hstatus.VGEIN and the software-writable mip
// bits, and merges them with the interrupt lines coming from the CLINTv (msip, mtip, stip,
// vstip) and the PLICv (meip, seip and one VS external line per guest external interrupt
// context). The VS context lines form hgeip[GEILEN:1] (bit 0 is reserved): hgeip bit g+1 is
// VS context g of the hart. The line selected by hstatus.VGEIN drives mip.VSEIP, so a
// physical interrupt assigned to the running guest is delivered with no hypervisor
// software in the path, and any hgeip & hgeie bit raises the supervisor guest external
// interrupt SGEIP for the hypervisor. The CLINTv stip/vstip lines directly set mip.STIP
// and mip.VSTIP, as the timer extension intends.
//
// The selection logic follows the privileged specification: an interrupt is taken in M
// when not delegated by mideleg and M interrupts are enabled, in HS when delegated by
// mideleg but not hideleg, and in VS when delegated by both and the hart runs with V=1.
// Fixed priority: MEI, MSI, MTI, SEI, SSI, STI, SGEI, VSEI, VSSI, VSTI. A VS-level
// interrupt taken in VS mode is reported with its supervisor code (VSEI 10 -> 9 and so
// on). VS interrupt bits and SGEI are always delegated by mideleg.
//
// Interface: a CSR read/write port by CSR number (mstatus, the rest of hstatus and the
// trap logic are in hyp_trap); while V=1 the sip/sie numbers reach vsip/vsie; csr_rdata_o is combinational and writes take effect at the
// clock edge. Status enables and the current privilege come in as inputs. All outputs are
// combinational from the registers and inputs.
//
// What follows the paper: the CSRs it lists as implemented (hvip/hip/hie/mip/mie,
// hgeip/hgeie, hideleg/mideleg), the VGEIN selection of the VS context and the direct
// timer lines. The CSR numbers and bit positions are those of the RISC-V specification;
// the port shape and reset values (all zero) are this design's choice.
//
// Lint note: CSR write data above bit 17 is unused because only the interrupt bits (and
// hstatus.VGEIN, bits 17:12) are implemented here; those upper bits read as zero.
module hyp_irq
  import hyp_pkg::*;
#(
  parameter int unsigned GEILEN = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // interrupt lines
  input  logic              msip_i,
  input  logic              mtip_i,
  input  logic              stip_i,
  input  logic              vstip_i,
  input  logic              meip_i,
  input  logic              seip_i,
  input  logic [GEILEN-1:0] vseip_i,
  // hart state
  input  priv_e             priv_i,
  input  logic              virt_i,
  input  logic              mstatus_mie_i,
  input  logic              mstatus_sie_i,   // HS-level SIE (sstatus)
  input  logic              vsstatus_sie_i,
  // CSR port
  input  logic              csr_we_i,
  input  logic [11:0]       csr_addr_i,
  input  logic [63:0]       csr_wdata_i,
  output logic [63:0]       csr_rdata_o,
  // interrupt to take
  output logic              irq_o,
  output logic [3:0]        irq_cause_o,
  output logic              irq_to_m_o,
  output logic              irq_to_vs_o,
  output logic [63:0]       mip_o
);

  localparam logic [11:0] CSR_SIE      = 12'h104;
  localparam logic [11:0] CSR_SIP      = 12'h144;
  localparam logic [11:0] CSR_VSIE     = 12'h204;
  localparam logic [11:0] CSR_VSIP     = 12'h244;
  localparam logic [11:0] CSR_MIDELEG  = 12'h303;
  localparam logic [11:0] CSR_MIE      = 12'h304;
  localparam logic [11:0] CSR_MIP      = 12'h344;
  localparam logic [11:0] CSR_HSTATUS  = 12'h600;
  localparam logic [11:0] CSR_HIDELEG  = 12'h603;
  localparam logic [11:0] CSR_HIE      = 12'h604;
  localparam logic [11:0] CSR_HGEIE    = 12'h607;
  localparam logic [11:0] CSR_HIP      = 12'h644;
  localparam logic [11:0] CSR_HVIP     = 12'h645;
  localparam logic [11:0] CSR_HGEIP    = 12'hE12;

  localparam logic [15:0] VS_BITS    = 16'h0444;              // VSSI, VSTI, VSEI
  localparam logic [15:0] HS_BITS    = VS_BITS | 16'h1000;    // plus SGEI
  localparam logic [15:0] S_BITS     = 16'h0222;              // SSI, STI, SEI
  localparam logic [15:0] MIE_BITS   = 16'h1EEE;
  localparam logic [15:0] MIPSW_BITS = 16'h0222;              // SSIP, STIP, SEIP by software

  logic [15:0]       mie_q, mideleg_q, hideleg_q, hvip_q, mipsw_q;
  logic [GEILEN:1]   hgeie_q;
  logic [5:0]        vgein_q;

  logic [GEILEN:1] hgeip;
  logic            vgein_line;
  logic [15:0]     mip, mideleg;

  assign hgeip = vseip_i;
  always_comb begin
    vgein_line = 1'b0;
    for (int g = 1; g <= GEILEN; g++)
      if (int'(vgein_q) == g) vgein_line = hgeip[g];
  end

  assign mideleg = mideleg_q | HS_BITS;

  always_comb begin
    mip = '0;
    mip[IRQ_SSI]  = mipsw_q[IRQ_SSI];
    mip[IRQ_VSSI] = hvip_q[IRQ_VSSI];
    mip[IRQ_MSI]  = msip_i;
    mip[IRQ_STI]  = mipsw_q[IRQ_STI] | stip_i;
    mip[IRQ_VSTI] = hvip_q[IRQ_VSTI] | vstip_i;
    mip[IRQ_MTI]  = mtip_i;
    mip[IRQ_SEI]  = mipsw_q[IRQ_SEI] | seip_i;
    mip[IRQ_VSEI] = hvip_q[IRQ_VSEI] | vgein_line;
    mip[IRQ_MEI]  = meip_i;
    mip[IRQ_SGEI] = |(hgeip & hgeie_q);
  end
  assign mip_o = 64'(mip);

  // VS-level view: VS bits shifted down by one to the S positions.
  function automatic logic [15:0] vs_to_s(logic [15:0] v);
    return (v & VS_BITS) >> 1;
  endfunction
  function automatic logic [15:0] s_to_vs(logic [15:0] s);
    return (s & S_BITS) << 1;
  endfunction

  // ------------------------------------------------------------------ CSR numbering
  // with V=1 the sip/sie numbers reach the guest's views vsip/vsie
  logic [11:0] csr_a;
  always_comb begin
    csr_a = csr_addr_i;
    if (virt_i && csr_addr_i == CSR_SIP) csr_a = CSR_VSIP;
    if (virt_i && csr_addr_i == CSR_SIE) csr_a = CSR_VSIE;
  end

  // ------------------------------------------------------------------ CSR reads
  always_comb begin
    csr_rdata_o = '0;
    unique case (csr_a)
      CSR_MIP:     csr_rdata_o = 64'(mip);
      CSR_MIE:     csr_rdata_o = 64'(mie_q);
      CSR_MIDELEG: csr_rdata_o = 64'(mideleg);
      CSR_SIP:     csr_rdata_o = {48'd0, mip   & mideleg & S_BITS};
      CSR_SIE:     csr_rdata_o = {48'd0, mie_q & mideleg & S_BITS};
      CSR_HIDELEG: csr_rdata_o = 64'(hideleg_q);
      CSR_HVIP:    csr_rdata_o = 64'(hvip_q);
      CSR_HIP:     csr_rdata_o = {48'd0, mip   & HS_BITS};
      CSR_HIE:     csr_rdata_o = {48'd0, mie_q & HS_BITS};
      CSR_HGEIE:   csr_rdata_o = 64'({hgeie_q, 1'b0});
      CSR_HGEIP:   csr_rdata_o = 64'({hgeip, 1'b0});
      CSR_HSTATUS: csr_rdata_o = 64'(vgein_q) << 12;
      CSR_VSIP:    csr_rdata_o = 64'(vs_to_s(mip   & hideleg_q));
      CSR_VSIE:    csr_rdata_o = 64'(vs_to_s(mie_q & hideleg_q));
      default:     csr_rdata_o = '0;
    endcase
  end

  // ------------------------------------------------------------------ CSR writes
  logic [15:0] wd;
  assign wd = csr_wdata_i[15:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mie_q     <= '0;
      mideleg_q <= '0;
      hideleg_q <= '0;
      hvip_q    <= '0;
      mipsw_q   <= '0;
      hgeie_q   <= '0;
      vgein_q   <= '0;
    end else if (csr_we_i) begin
      unique case (csr_a)
        CSR_MIE:     mie_q     <= wd & MIE_BITS;
        CSR_MIDELEG: mideleg_q <= wd & S_BITS;
        CSR_MIP: begin
          mipsw_q <= wd & MIPSW_BITS;
          hvip_q[IRQ_VSSI] <= wd[IRQ_VSSI];
        end
        CSR_SIE:     mie_q     <= (mie_q & ~(mideleg & S_BITS)) | (wd & mideleg & S_BITS);
        CSR_SIP:     if (mideleg[IRQ_SSI]) mipsw_q[IRQ_SSI] <= wd[IRQ_SSI];
        CSR_HIDELEG: hideleg_q <= wd & VS_BITS;
        CSR_HVIP:    hvip_q    <= wd & VS_BITS;
        CSR_HIE:     mie_q     <= (mie_q & ~HS_BITS) | (wd & HS_BITS);
        CSR_HIP:     hvip_q[IRQ_VSSI] <= wd[IRQ_VSSI];
        CSR_HGEIE:   hgeie_q   <= csr_wdata_i[GEILEN:1];
        CSR_HSTATUS: vgein_q   <= csr_wdata_i[17:12];
        CSR_VSIE:    mie_q     <= (mie_q & ~hideleg_q) | (s_to_vs(wd) & hideleg_q);
        CSR_VSIP:    if (hideleg_q[IRQ_VSSI]) hvip_q[IRQ_VSSI] <= wd[IRQ_SSI];
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ selection
  logic [15:0] pend, m_pend, hs_pend, vs_pend;
  logic        m_en, hs_en, vs_en;

  always_comb begin
    pend    = mip & mie_q;
    m_pend  = pend & ~mideleg;
    hs_pend = pend & mideleg & ~hideleg_q;
    vs_pend = pend & mideleg & hideleg_q;
    m_en  = (priv_i != PRV_M) || mstatus_mie_i;
    hs_en = (priv_i != PRV_M) && (virt_i || priv_i == PRV_U || mstatus_sie_i);
    vs_en = (priv_i != PRV_M) && virt_i && (priv_i == PRV_U || vsstatus_sie_i);
  end

  localparam int unsigned NPRIO = 10;
  localparam int unsigned PRIO_ORDER [NPRIO] = '{IRQ_MEI, IRQ_MSI, IRQ_MTI, IRQ_SEI, IRQ_SSI,
                                                 IRQ_STI, IRQ_SGEI, IRQ_VSEI, IRQ_VSSI, IRQ_VSTI};

  function automatic logic [4:0] pick(logic [15:0] p);  // {found, number}
    for (int k = 0; k < NPRIO; k++)
      if (p[PRIO_ORDER[k]]) return {1'b1, 4'(PRIO_ORDER[k])};
    return '0;
  endfunction

  logic [4:0] m_sel, hs_sel, vs_sel;
  assign m_sel  = m_en  ? pick(m_pend)  : '0;
  assign hs_sel = hs_en ? pick(hs_pend) : '0;
  assign vs_sel = vs_en ? pick(vs_pend) : '0;

  always_comb begin
    irq_o       = 1'b0;
    irq_cause_o = '0;
    irq_to_m_o  = 1'b0;
    irq_to_vs_o = 1'b0;
    if (m_sel[4]) begin
      irq_o = 1'b1; irq_to_m_o = 1'b1; irq_cause_o = m_sel[3:0];
    end else if (hs_sel[4]) begin
      irq_o = 1'b1; irq_cause_o = hs_sel[3:0];
    end else if (vs_sel[4]) begin
      irq_o = 1'b1; irq_to_vs_o = 1'b1; irq_cause_o = vs_sel[3:0] - 4'd1;
    end
  end

  initial assert (GEILEN >= 1 && GEILEN <= 63) else $error("hyp_irq: GEILEN out of range");

endmodule
