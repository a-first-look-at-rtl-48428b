// tlbv: fully associative TLB for two-stage (guest) translation.
//
// Each entry keeps, besides the tag and the host-physical page, the guest-physical page of
// the translation, the first-stage and second-stage permissions, the page level, and a
// guest bit telling hypervisor (HS/U) translations from guest (VS/VU) ones. The
// guest-physical page is kept because a cached two-stage translation can still fail a
// permission check later, and the resulting guest-page fault must report that address
// (htval). Lookups check the first-stage permissions (page fault) and then the
// second-stage ones (guest-page fault). For hypervisor virtual-machine loads and stores
// (hv_i: hlv, hlvx, hsv) the TLB ignores the current HS/HU privilege and translates and
// checks as the guest would: V=1 and privilege VS or VU from hstatus.SPVP. hlvx reads need
// execute instead of read permission. An hfence (flush_i with flush_guest_i) drops every
// guest entry, whatever its address or VMID argument; flush_i alone (sfence.vma from HS)
// drops the hypervisor entries. VMIDs and ASIDs are not tagged.
//
// Translation set-up: M-mode accesses (never hlv/hsv) are not translated; otherwise the
// first stage is on when satp (or vsatp for guest accesses) selects Sv39 and the second
// stage is on for guest accesses when hgatp selects Sv39x4. Bare/Bare guest accesses pass
// through untranslated.
//
// Interface and timing: the lookup is combinational. On a miss the TLB raises miss_o,
// sends one request to the walker and fills an entry from its response (round-robin
// replacement); the requester retries, as in an in-order pipeline replay. Walker faults
// are cached as 4 KiB entries too, so the retry sees the exception; a flush removes them.
// The permission rules (U/SUM/MXR, A and D must already be set) are those of the RISC-V
// privileged specification; the structure and sizes are this design's choice.
//
// Lint note: the matching/permission helper functions take whole entries and VPNs but
// use only the fields they need, so verilator reports unused function-argument bits.
// Its assertion uses "disable iff (!rst_ni)"; verilator then reports rst_ni as used both
// synchronously and asynchronously (SYNCASYNCNET), while every flop resets asynchronously.
// The walker request carries the root pointers straight from the inputs, which synthesis
// reports as outputs that only follow inputs.
module tlbv
  import hyp_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // lookup
  input  logic              req_valid_i,
  input  logic [GPN_W-1:0]  req_vpn_i,
  input  acc_e              req_acc_i,
  input  logic              req_hv_i,      // hypervisor VM load/store (hlv/hlvx/hsv)
  input  logic              req_hlvx_i,
  // hart state
  input  priv_e             priv_i,
  input  logic              virt_i,
  input  logic              spvp_i,        // hstatus.SPVP: hlv/hsv act as VS (1) or VU (0)
  input  logic              sum_i,         // SUM of the stage-1 status (vsstatus when V=1)
  input  logic              mxr_i,         // MXR of the stage-1 status
  input  logic              hs_mxr_i,      // sstatus.MXR, applied to the second stage
  input  logic              satp_en_i,
  input  logic [PPN_W-1:0]  satp_ppn_i,
  input  logic              vsatp_en_i,
  input  logic [PPN_W-1:0]  vsatp_ppn_i,
  input  logic              hgatp_en_i,
  input  logic [PPN_W-1:0]  hgatp_ppn_i,
  input  logic              flush_i,
  input  logic              flush_guest_i,
  // result
  output logic              hit_o,
  output logic              miss_o,
  output logic [PPN_W-1:0]  hpn_o,
  output logic [GPN_W-1:0]  gpn_o,         // for htval on a guest-page fault
  output logic              pf_o,
  output logic              gpf_o,
  output logic              ae_o,
  // walker
  output logic              ptw_req_valid_o,
  input  logic              ptw_req_ready_i,
  output ptw_req_t          ptw_req_o,
  input  logic              ptw_resp_valid_i,
  input  ptw_resp_t         ptw_resp_i
);

  typedef struct packed {
    logic             valid;
    logic             guest;
    logic [GPN_W-1:0] vpn;
    logic [1:0]       level;
    logic [PPN_W-1:0] hpn;
    logic [GPN_W-1:0] gpn;
    logic [7:0]       s1_perm;
    s2_perm_t         s2_perm;
    logic             pf;
    logic             gpf;
    logic             ae;
  } entry_t;

  entry_t                      tlb_q [ENTRIES];
  logic [$clog2(ENTRIES)-1:0]  rr_q;
  logic                        walking_q;
  logic [GPN_W-1:0]            walk_vpn_q;
  logic                        walk_guest_q;

  // ---------------------------------------------------------------- effective mode
  logic  eff_virt, st1_on, st2_on, translate;
  priv_e eff_priv;
  always_comb begin
    eff_virt  = virt_i || req_hv_i;
    eff_priv  = req_hv_i ? (spvp_i ? PRV_S : PRV_U) : priv_i;
    st1_on    = eff_virt ? vsatp_en_i : satp_en_i;
    st2_on    = eff_virt && hgatp_en_i;
    translate = (eff_priv != PRV_M) && (st1_on || st2_on);
  end

  // ---------------------------------------------------------------- lookup
  function automatic logic tag_match(entry_t e, logic [GPN_W-1:0] vpn, logic guest);
    logic [GPN_W-1:0] mask;
    case (e.level)
      2'd0:    mask = {{(GPN_W-18){1'b1}}, 18'd0};
      2'd1:    mask = {{(GPN_W-9){1'b1}}, 9'd0};
      default: mask = '1;
    endcase
    return e.valid && e.guest == guest && ((e.vpn ^ vpn) & mask) == '0;
  endfunction
  function automatic logic [PPN_W-1:0] low_merge(logic [PPN_W-1:0] pn, logic [GPN_W-1:0] vpn,
                                                 logic [1:0] lvl);
    case (lvl)
      2'd0:    return {pn[PPN_W-1:18], vpn[17:0]};
      2'd1:    return {pn[PPN_W-1:9], vpn[8:0]};
      default: return pn;
    endcase
  endfunction

  logic   hit_any;
  entry_t he;
  always_comb begin
    hit_any = 1'b0;
    he      = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (tag_match(tlb_q[i], req_vpn_i, eff_virt)) begin
        hit_any = 1'b1;
        he      = tlb_q[i];
      end
  end

  // ---------------------------------------------------------------- permission checks
  logic s1_ok, s2_ok;
  always_comb begin
    logic r, w, x, u, a, d;
    {d, a, u, x, w, r} = {he.s1_perm[7:6], he.s1_perm[4:1]};
    // first stage
    s1_ok = a;
    if (eff_priv == PRV_U && !u)                              s1_ok = 1'b0;
    if (eff_priv == PRV_S && u && (!sum_i || req_acc_i == ACC_EXEC)) s1_ok = 1'b0;
    unique case (req_acc_i)
      ACC_READ:  if (req_hlvx_i ? !x : !(r || (mxr_i && x))) s1_ok = 1'b0;
      ACC_WRITE: if (!(w && d))                               s1_ok = 1'b0;
      ACC_EXEC:  if (!x)                                      s1_ok = 1'b0;
      default:   s1_ok = 1'b0;
    endcase
    if (!st1_on) s1_ok = 1'b1;
    // second stage
    unique case (req_acc_i)
      ACC_READ:  s2_ok = req_hlvx_i ? he.s2_perm.x : (he.s2_perm.r || (hs_mxr_i && he.s2_perm.x));
      ACC_WRITE: s2_ok = he.s2_perm.w;
      ACC_EXEC:  s2_ok = he.s2_perm.x;
      default:   s2_ok = 1'b0;
    endcase
    if (!st2_on) s2_ok = 1'b1;
  end

  always_comb begin
    hit_o  = 1'b0;
    miss_o = 1'b0;
    hpn_o  = PPN_W'(req_vpn_i);
    gpn_o  = req_vpn_i;
    pf_o   = 1'b0;
    gpf_o  = 1'b0;
    ae_o   = 1'b0;
    if (req_valid_i) begin
      if (!translate) begin
        hit_o = 1'b1;
      end else if (hit_any) begin
        hit_o = 1'b1;
        hpn_o = low_merge(he.hpn, req_vpn_i, he.level);
        gpn_o = GPN_W'(low_merge(PPN_W'(he.gpn), req_vpn_i, he.level));
        ae_o  = he.ae;
        pf_o  = !he.ae && (he.pf || !s1_ok);
        gpf_o = !he.ae && !pf_o && (he.gpf || !s2_ok);
        if (he.gpf) gpn_o = he.gpn;
      end else begin
        miss_o = 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- refill
  assign ptw_req_valid_o = miss_o && !walking_q;
  always_comb begin
    ptw_req_o           = '0;
    ptw_req_o.vpn       = req_vpn_i;
    ptw_req_o.virt      = eff_virt;
    ptw_req_o.st1_en    = st1_on;
    ptw_req_o.st2_en    = st2_on;
    ptw_req_o.satp_ppn  = eff_virt ? vsatp_ppn_i : satp_ppn_i;
    ptw_req_o.hgatp_ppn = hgatp_ppn_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q         <= '0;
      walking_q    <= 1'b0;
      walk_vpn_q   <= '0;
      walk_guest_q <= 1'b0;
      for (int i = 0; i < ENTRIES; i++) tlb_q[i] <= '0;
    end else begin
      if (ptw_req_valid_o && ptw_req_ready_i) begin
        walking_q    <= 1'b1;
        walk_vpn_q   <= req_vpn_i;
        walk_guest_q <= eff_virt;
      end
      if (flush_i)
        for (int i = 0; i < ENTRIES; i++)
          if (tlb_q[i].guest == flush_guest_i) tlb_q[i].valid <= 1'b0;
      if (ptw_resp_valid_i) begin
        walking_q <= 1'b0;
        if (!flush_i) begin  // a flush during the walk discards its result
          tlb_q[rr_q] <= '{valid: 1'b1, guest: walk_guest_q, vpn: walk_vpn_q,
                           level: (ptw_resp_i.pf || ptw_resp_i.gpf || ptw_resp_i.ae) ?
                                  2'(PG_LEVELS - 1) : ptw_resp_i.level, hpn: ptw_resp_i.hpn, gpn: ptw_resp_i.gpn,
                           s1_perm: ptw_resp_i.s1_perm, s2_perm: ptw_resp_i.s2_perm,
                           pf: ptw_resp_i.pf, gpf: ptw_resp_i.gpf, ae: ptw_resp_i.ae};
          rr_q <= rr_q + 1'b1;
        end
      end
    end
  end

  a_one_walk: assert property (@(posedge clk_i) disable iff (!rst_ni)
    walking_q |-> !ptw_req_valid_o);

endmodule
