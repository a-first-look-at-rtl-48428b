// ptwv: page-table walker with two-stage (guest) address translation.
//
// Walks Sv39 first-stage tables (satp/vsatp) and Sv39x4 second-stage tables (hgatp; 41-bit
// guest-physical addresses, 16 KiB root with an 11-bit top index). When both stages are on,
// every first-stage page-table access is itself a guest-physical address: before each
// first-stage level the walker switches to the second stage, walks it to find where that
// table lives in host memory, switches back and reads the first-stage PTE there. When the
// first-stage leaf is reached, one final second-stage walk translates the leaf's
// guest-physical page. The response carries the host-physical page, the guest-physical
// page (which the TLB keeps so a later permission fault can report it in htval), the
// permissions of both stages and the fault kind.
//
// States (names from the paper's walker state diagram):
//   s_ready      idle; a request goes to s_switch when the second stage is on, otherwise
//                to s_req
//   s_switch     changes the root pointer to the second stage for a new guest-physical
//                page; stays while the PTE cache hits, then s_req
//   s_req        issues the PTE read (or follows a PTE-cache hit without memory)
//   s_wait1      waits for the memory response (an access error ends the walk)
//   s_wait2      registers the PTE
//   s_wait3      decides: next level (s_req), switch stage (s_switch), finished
//                (s_ready) or finished on a superpage (s_frag_super)
//   s_frag_super builds the 4 KiB host page from a superpage leaf, then s_ready
//
// The walker has no L2 TLB, so the paper's l2_hit / l2_error conditions never apply and
// the waits after the request are a memory handshake of this design. The PTE cache holds
// PTE_ENTRIES non-leaf PTEs tagged with their host-physical address, the stage and a guest
// bit; flush_i with flush_guest_i drops every guest entry (hfence.vvma/gvma, which always
// flush everything of the guest as in the paper), flush_i alone the non-guest ones.
// Faults follow the RISC-V rules: invalid or reserved (W without R) PTE, node at the last
// level, misaligned superpage, or a second-stage leaf without U give a page fault of the
// stage walked (guest-page fault for the second stage); a first-stage leaf whose
// guest-physical page does not fit 41 bits gives a guest-page fault. A and D are left to
// the TLB's permission check. Replacement in the PTE cache is round robin.
//
// Interface: req_valid_i/req_ready_o handshake (ready only in s_ready), one response pulse
// resp_valid_o. Memory: mem_req_valid_o/mem_req_ready_i, then mem_resp_valid_i with the
// 64-bit PTE or mem_resp_err_i.
//
// Lint note: PTE reserved/RSW bits, upper PPN bits beyond a level's index and request
// fields consumed only at the start of a walk are reported unused by verilator.
// Its assertion uses "disable iff (!rst_ni)"; verilator then reports rst_ni as used both
// synchronously and asynchronously (SYNCASYNCNET), while every flop resets asynchronously.
module ptwv
  import hyp_pkg::*;
#(
  parameter int unsigned PTE_ENTRIES = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  ptw_req_t           req_i,
  output logic               resp_valid_o,
  output ptw_resp_t          resp_o,
  input  logic               flush_i,
  input  logic               flush_guest_i,
  output logic               mem_req_valid_o,
  input  logic               mem_req_ready_i,
  output logic [PADDR_W-1:0] mem_req_addr_o,
  input  logic               mem_resp_valid_i,
  input  logic [63:0]        mem_resp_data_i,
  input  logic               mem_resp_err_i
);

  typedef enum logic [2:0] {
    S_READY, S_SWITCH, S_REQ, S_WAIT1, S_WAIT2, S_WAIT3, S_FRAG_SUPER
  } state_e;

  localparam int unsigned LAST = PG_LEVELS - 1;

  state_e           state_q;
  ptw_req_t         r_q;
  logic             s2_act_q;     // walking the second stage
  logic             s2_final_q;   // this second-stage walk translates the leaf GPA
  logic [1:0]       count_q;      // level inside the current walk
  logic [1:0]       s1_count_q;   // level of the first-stage walk
  logic [PPN_W-1:0] table_q;      // host page of the table being read
  logic [GPN_W-1:0] s2_gpn_q;     // guest page the second stage is translating
  pte_t             pte_q;
  ptw_resp_t        res_q;
  logic [1:0]       leaf_lvl_q;   // leaf level kept for s_frag_super
  logic [PPN_W-1:0] leaf_ppn_q;

  // ----------------------------------------------------------------- indices
  function automatic logic [10:0] s2_idx(logic [GPN_W-1:0] gpn, logic [1:0] lvl);
    case (lvl)
      2'd0:    return gpn[28:18];
      2'd1:    return {2'b00, gpn[17:9]};
      default: return {2'b00, gpn[8:0]};
    endcase
  endfunction
  function automatic logic [8:0] s1_idx(logic [GPN_W-1:0] vpn, logic [1:0] lvl);
    case (lvl)
      2'd0:    return vpn[26:18];
      2'd1:    return vpn[17:9];
      default: return vpn[8:0];
    endcase
  endfunction
  // Page of a superpage leaf for the 4 KiB page 'pn' inside it.
  function automatic logic [PPN_W-1:0] merge(logic [PPN_W-1:0] ppn, logic [GPN_W-1:0] pn,
                                             logic [1:0] lvl);
    case (lvl)
      2'd0:    return {ppn[PPN_W-1:18], pn[17:0]};
      2'd1:    return {ppn[PPN_W-1:9], pn[8:0]};
      default: return ppn;
    endcase
  endfunction
  function automatic logic misaligned(logic [PPN_W-1:0] ppn, logic [1:0] lvl);
    case (lvl)
      2'd0:    return ppn[17:0] != '0;
      2'd1:    return ppn[8:0] != '0;
      default: return 1'b0;
    endcase
  endfunction

  // Host address of the PTE read in the current state.
  logic [PADDR_W-1:0] pte_addr;
  always_comb begin
    if (s2_act_q)
      pte_addr = {table_q, 12'b0} + PADDR_W'({s2_idx(s2_gpn_q, count_q), 3'b000});
    else
      pte_addr = {table_q, 12'b0} + PADDR_W'({s1_idx(r_q.vpn, s1_count_q), 3'b000});
  end

  // ----------------------------------------------------------------- PTE cache
  typedef struct packed {
    logic                 valid;
    logic                 guest;
    logic [PADDR_W-4:0]   tag;    // PTE address bits 55:3
    logic [PPN_W-1:0]     ppn;    // next-level table
  } pte_entry_t;

  pte_entry_t                         pc_q [PTE_ENTRIES];
  logic [$clog2(PTE_ENTRIES)-1:0]     pc_ptr_q;
  logic                               pc_hit;
  logic [PPN_W-1:0]                   pc_ppn;

  always_comb begin
    pc_hit = 1'b0;
    pc_ppn = '0;
    for (int e = 0; e < PTE_ENTRIES; e++)
      if (pc_q[e].valid && pc_q[e].guest == r_q.virt && pc_q[e].tag == pte_addr[PADDR_W-1:3]) begin
        pc_hit = 1'b1;
        pc_ppn = pc_q[e].ppn;
      end
  end
  // A hit is used only below the last level (leaves are never cached), and never for a
  // first-stage table while the second stage is on: its next table is a guest-physical
  // page that still needs the second stage.
  logic cur_last, pc_use;
  assign cur_last = s2_act_q ? (count_q == 2'(LAST)) : (s1_count_q == 2'(LAST));
  assign pc_use   = pc_hit && !cur_last && (s2_act_q || !r_q.st2_en);

  // ----------------------------------------------------------------- PTE decode
  logic is_valid, is_leaf, is_node;
  assign is_valid = pte_q.v && !(pte_q.w && !pte_q.r);
  assign is_leaf  = is_valid && (pte_q.r || pte_q.x);
  assign is_node  = is_valid && !is_leaf;

  logic [1:0] lvl;
  assign lvl = s2_act_q ? count_q : s1_count_q;

  // ----------------------------------------------------------------- FSM
  assign req_ready_o     = state_q == S_READY;
  assign mem_req_valid_o = state_q == S_REQ && !pc_use;
  assign mem_req_addr_o  = pte_addr;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_READY;
      r_q          <= '0;
      s2_act_q     <= 1'b0;
      s2_final_q   <= 1'b0;
      count_q      <= '0;
      s1_count_q   <= '0;
      table_q      <= '0;
      s2_gpn_q     <= '0;
      pte_q        <= '0;
      res_q        <= '0;
      leaf_lvl_q   <= '0;
      leaf_ppn_q   <= '0;
      resp_valid_o <= 1'b0;
      resp_o       <= '0;
      pc_ptr_q     <= '0;
      for (int e = 0; e < PTE_ENTRIES; e++) pc_q[e] <= '0;
    end else begin
      resp_valid_o <= 1'b0;
      if (flush_i)
        for (int e = 0; e < PTE_ENTRIES; e++)
          if (pc_q[e].guest == flush_guest_i) pc_q[e].valid <= 1'b0;

      unique case (state_q)
        S_READY: if (req_valid_i) begin
          r_q          <= req_i;
          res_q        <= '0;
          res_q.s1_perm <= 8'hFF;
          res_q.s2_perm <= '1;
          res_q.level  <= '0;
          res_q.gpn    <= req_i.vpn;
          count_q      <= '0;
          s1_count_q   <= '0;
          if (req_i.st2_en) begin
            // second stage first: the root of the first stage (or the address itself)
            s2_act_q   <= 1'b1;
            s2_final_q <= !req_i.st1_en;
            s2_gpn_q   <= req_i.st1_en ? GPN_W'(req_i.satp_ppn) : req_i.vpn;
            table_q    <= req_i.hgatp_ppn;
            state_q    <= S_SWITCH;
          end else begin
            s2_act_q   <= 1'b0;
            s2_final_q <= 1'b0;
            table_q    <= req_i.satp_ppn;
            state_q    <= S_REQ;
          end
        end

        S_SWITCH: begin
          if (pc_use) begin
            table_q <= pc_ppn;
            count_q <= count_q + 2'd1;
          end else begin
            state_q <= S_REQ;
          end
        end

        S_REQ: begin
          if (pc_use) begin
            table_q <= pc_ppn;
            if (s2_act_q) count_q    <= count_q + 2'd1;
            else          s1_count_q <= s1_count_q + 2'd1;
          end else if (mem_req_ready_i) begin
            state_q <= S_WAIT1;
          end
        end

        S_WAIT1: if (mem_resp_valid_i) begin
          if (mem_resp_err_i) begin
            resp_o       <= res_q;
            resp_o.ae    <= 1'b1;
            resp_valid_o <= 1'b1;
            state_q      <= S_READY;
          end else begin
            pte_q   <= pte_t'(mem_resp_data_i);
            state_q <= S_WAIT2;
          end
        end

        S_WAIT2: state_q <= S_WAIT3;

        S_WAIT3: begin
          if (!is_valid || (is_node && lvl == 2'(LAST)) ||
              (is_leaf && misaligned(pte_q.ppn, lvl)) || (is_leaf && s2_act_q && !pte_q.u) ||
              (is_leaf && s2_act_q && !s2_final_q && !pte_q.r)) begin
            // fault of the stage being walked
            resp_o       <= res_q;
            resp_o.pf    <= !s2_act_q;
            resp_o.gpf   <= s2_act_q;
            if (s2_act_q) resp_o.gpn <= s2_gpn_q;
            resp_valid_o <= 1'b1;
            state_q      <= S_READY;
          end else if (is_node) begin
            // next level of the same walk; a first-stage table with the second stage on
            // must be translated first
            if (s2_act_q || !r_q.st2_en) begin
              pc_q[pc_ptr_q] <= '{valid: 1'b1, guest: r_q.virt, tag: pte_addr[PADDR_W-1:3],
                                  ppn: pte_q.ppn};
              pc_ptr_q <= pc_ptr_q + 1'b1;
            end
            if (s2_act_q) begin
              count_q <= count_q + 2'd1;
              table_q <= pte_q.ppn;
              state_q <= S_REQ;
            end else if (r_q.st2_en) begin
              s1_count_q <= s1_count_q + 2'd1;
              s2_act_q   <= 1'b1;
              s2_final_q <= 1'b0;
              s2_gpn_q   <= GPN_W'(pte_q.ppn);
              count_q    <= '0;
              table_q    <= r_q.hgatp_ppn;
              state_q    <= S_SWITCH;
              if (pte_q.ppn[PPN_W-1:GPN_W] != '0) begin   // table beyond 41-bit GPA
                resp_o       <= res_q;
                resp_o.gpf   <= 1'b1;
                resp_o.gpn   <= GPN_W'(pte_q.ppn);
                resp_valid_o <= 1'b1;
                state_q      <= S_READY;
              end
            end else begin
              s1_count_q <= s1_count_q + 2'd1;
              table_q    <= pte_q.ppn;
              state_q    <= S_REQ;
            end
          end else if (s2_act_q && !s2_final_q) begin
            // second stage found the host page of a first-stage table: read that PTE
            s2_act_q <= 1'b0;
            table_q  <= merge(pte_q.ppn, s2_gpn_q, count_q);
            state_q  <= S_REQ;
          end else if (s2_act_q) begin
            // final second-stage leaf
            res_q.s2_perm <= '{r: pte_q.r, w: pte_q.w, x: pte_q.x};
            if (count_q > res_q.level) res_q.level <= count_q;
            leaf_ppn_q <= pte_q.ppn;
            leaf_lvl_q <= count_q;
            if (count_q == 2'(LAST)) begin
              resp_o         <= res_q;
              resp_o.s2_perm <= '{r: pte_q.r, w: pte_q.w, x: pte_q.x};
              resp_o.level   <= 2'(LAST);
              resp_o.hpn     <= pte_q.ppn;
              resp_valid_o   <= 1'b1;
              state_q        <= S_READY;
            end else begin
              state_q <= S_FRAG_SUPER;
            end
          end else begin
            // first-stage leaf: its guest-physical page
            res_q.s1_perm <= 8'(pte_q);
            res_q.level   <= s1_count_q;
            res_q.gpn     <= GPN_W'(merge(pte_q.ppn, r_q.vpn, s1_count_q));
            if (r_q.st2_en) begin
              if (merge(pte_q.ppn, r_q.vpn, s1_count_q) >> GPN_W != '0) begin
                resp_o       <= res_q;
                resp_o.gpf   <= 1'b1;
                resp_o.gpn   <= GPN_W'(merge(pte_q.ppn, r_q.vpn, s1_count_q));
                resp_valid_o <= 1'b1;
                state_q      <= S_READY;
              end else begin
                s2_act_q   <= 1'b1;
                s2_final_q <= 1'b1;
                s2_gpn_q   <= GPN_W'(merge(pte_q.ppn, r_q.vpn, s1_count_q));
                count_q    <= '0;
                table_q    <= r_q.hgatp_ppn;
                state_q    <= S_SWITCH;
              end
            end else if (s1_count_q == 2'(LAST)) begin
              resp_o         <= res_q;
              resp_o.s1_perm <= 8'(pte_q);
              resp_o.level   <= 2'(LAST);
              resp_o.gpn     <= GPN_W'(pte_q.ppn);
              resp_o.hpn     <= pte_q.ppn;
              resp_valid_o   <= 1'b1;
              state_q        <= S_READY;
            end else begin
              leaf_ppn_q <= pte_q.ppn;
              leaf_lvl_q <= s1_count_q;
              state_q    <= S_FRAG_SUPER;
            end
          end
        end

        S_FRAG_SUPER: begin
          resp_o       <= res_q;
          resp_o.hpn   <= merge(leaf_ppn_q, s2_final_q ? s2_gpn_q : r_q.vpn, leaf_lvl_q);
          resp_valid_o <= 1'b1;
          state_q      <= S_READY;
        end

        default: state_q <= S_READY;
      endcase
    end
  end

  // A request is only taken in s_ready and memory is only requested in s_req.
  a_mem_in_req: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_req_valid_o |-> state_q == S_REQ);

endmodule
