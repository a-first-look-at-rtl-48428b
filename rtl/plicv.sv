// PLICv: platform-level interrupt controller with virtualization support.
//
// A standard PLIC (per-source gateway, priority and pending bit; per-context enable bits,
// priority threshold and claim/complete register) extended in two ways:
//  * Every hart has, besides its M and S contexts, GEILEN VS contexts whose interrupt
//    lines (vseip_o) feed the hart's guest-external-interrupt bits, so a physical
//    interrupt can reach a running guest with no hypervisor trap, and the guest can claim
//    and complete it on its own context page.
//  * Virtual interrupt injection blocks: NBLOCKS blocks of NVIIR virtual interrupt
//    injection registers (VIIR: interruptID, priority, inFlight). A VS context's VCIBIR
//    names the block it takes virtual interrupts from (0: none, b: block b-1). A VIIR
//    with interruptID > 0 and inFlight clear is pending for every VS context attached to
//    its block. A claim on such a context picks the highest-priority candidate among its
//    enabled physical interrupts and its block's pending VIIRs; claiming a VIIR sets its
//    inFlight bit, and completing an ID held by a VIIR of the block clears that VIIR.
//    Each block has a management interrupt (IBMSR) fed back through the PLIC as source
//    NDEV+1+n, signalling "no VIIR pending" and "complete of an ID not present".
//
// Contexts are numbered c = hart*(2+GEILEN) + k, k = 0 for M, 1 for S, 2+g for VS g.
// Interrupt IDs 1..NDEV are device lines, NDEV+1..NDEV+NBLOCKS the block management
// interrupts. Register map (byte offsets):
//   priority i 0x0000000+4i | pending 0x0001000 | enable c 0x0002000+0x80c
//   threshold c 0x0200000+0x1000c | claim/complete c 0x0200004+0x1000c
//   vcibir c 0x4000000+4c | viir j block n 0x4010000+0x1000n+4j | ibmsr n 0x4110000+4n
// VIIR layout: [31] inFlight, [23:16] priority (PRIO_W bits kept), [9:0] interruptID.
// IBMSR layout: [0] enable "no VIIR pending", [1] enable "unknown ID completed",
// [8] status no VIIR pending (read-only), [9] status unknown ID (write 1 to clear),
// [25:16] the last unknown ID completed.
//
// Timing: one 32-bit register access per cycle on mmio_req_t, read data registered
// (valid the next cycle); a claim read takes effect at the end of the request cycle. The
// interrupt outputs are combinational from the registers. A context's line is raised when
// its best candidate has a priority >= its threshold and > 0.
//
// What follows the paper: the contexts, the memory map, the VIIR fields and their
// pending/inFlight/complete rules, VCIBIR with 0 meaning no block, the block management
// interrupt with its two events. This design's own choices: the bit positions of the VIIR
// and IBMSR fields, block numbering in VCIBIR, the management interrupt IDs, context
// numbering, level-triggered gateways, tie-breaking (lowest index, physical before
// virtual), the threshold compare (the paper's "priority lower than the threshold is not
// delivered"), that claims ignore the threshold, and that a complete of an ID that is
// neither in the block nor an enabled physical source raises the unknown-ID event.
//
// Lint note: claim_viir/cpl_viir are int loop results of which only the low bits index a
// VIIR; the unused upper bits are reported by verilator.
// Its assertion uses "disable iff (!rst_ni)"; verilator then reports rst_ni as used both
// synchronously and asynchronously (SYNCASYNCNET), while every flop resets asynchronously.
module plicv
  import hyp_pkg::*;
#(
  parameter int unsigned NHARTS  = 6,
  parameter int unsigned GEILEN  = 4,
  parameter int unsigned NDEV    = 31,
  parameter int unsigned NBLOCKS = 8,
  parameter int unsigned NVIIR   = 4,
  parameter int unsigned PRIO_W  = 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [NDEV:1]                 irq_i,
  input  mmio_req_t                     req_i,
  output mmio_rsp_t                     rsp_o,
  output logic [NHARTS-1:0]             meip_o,
  output logic [NHARTS-1:0]             seip_o,
  output logic [NHARTS-1:0][GEILEN-1:0] vseip_o
);

  localparam int unsigned NINT   = NDEV + NBLOCKS;         // highest interrupt ID
  localparam int unsigned CPH    = 2 + GEILEN;              // contexts per hart
  localparam int unsigned NCTX   = NHARTS * CPH;
  localparam int unsigned NVS    = NHARTS * GEILEN;         // VS contexts
  localparam int unsigned NWORDS = (NINT + 1 + 31) / 32;   // pending/enable words
  localparam int unsigned NCAND  = NINT + NVIIR;            // fan-in candidates
  localparam int unsigned CIDX_W = $clog2(NCAND);
  localparam int unsigned BSEL_W = $clog2(NBLOCKS + 1);
  localparam int unsigned ID_W   = $clog2(NINT + 1);        // bits of an in-range ID

  typedef struct packed {
    logic             in_flight;
    logic [PRIO_W-1:0] prio;
    logic [9:0]       id;
  } viir_t;

  typedef struct packed {
    logic       en_np;    // enable: no VIIR pending
    logic       en_unk;   // enable: complete of an ID not present
    logic       st_unk;   // sticky status: unknown ID completed
    logic [9:0] unk_id;   // last unknown ID
  } ibmsr_t;

  // ---------------------------------------------------------------- state
  logic [PRIO_W-1:0]     prio_q    [NINT+1];
  logic [NINT:0]         pending_q;
  logic [NINT:1]         enable_q  [NCTX];
  logic [PRIO_W-1:0]     thresh_q  [NCTX];
  logic [BSEL_W-1:0]     vcibir_q  [NVS];     // VS contexts only
  viir_t                 viir_q    [NBLOCKS][NVIIR];
  ibmsr_t                ibmsr_q   [NBLOCKS];

  // ---------------------------------------------------------------- gateways
  logic [NINT:1] line, gw_valid, gw_complete;
  logic [NBLOCKS-1:0] blk_np, blk_irq;

  always_comb begin
    for (int n = 0; n < NBLOCKS; n++) begin
      blk_np[n] = 1'b1;
      for (int j = 0; j < NVIIR; j++)
        if (viir_q[n][j].id != '0 && !viir_q[n][j].in_flight) blk_np[n] = 1'b0;
      blk_irq[n] = (ibmsr_q[n].en_np && blk_np[n]) || (ibmsr_q[n].en_unk && ibmsr_q[n].st_unk);
    end
    line = {blk_irq, irq_i};
  end

  for (genvar i = 1; i <= NINT; i++) begin : g_gw
    plic_gateway u_gw (
      .clk_i, .rst_ni,
      .irq_i     (line[i]),
      .valid_o   (gw_valid[i]),
      .ready_i   (!pending_q[i]),
      .complete_i(gw_complete[i])
    );
  end

  // ---------------------------------------------------------------- fan-in per context
  // Candidates 0..NINT-1 are physical IDs 1..NINT ("format to VIIR"), NINT.. the VIIRs of
  // the block attached to the context.
  logic [NCTX-1:0][NCAND-1:0]             cand_valid;
  logic [NCTX-1:0][NCAND-1:0][PRIO_W-1:0] cand_prio;
  logic [NCTX-1:0][PRIO_W-1:0]            max_prio;
  logic [NCTX-1:0][CIDX_W-1:0]            max_idx;
  logic [NCTX-1:0]                        ctx_irq;
  logic [NCTX-1:0]                        ctx_has_blk;
  logic [NCTX-1:0][$clog2(NBLOCKS)-1:0]   ctx_blk;

  function automatic logic is_vs(int unsigned c);
    return (c % CPH) >= 2;
  endfunction
  // index of VS context c among the VS contexts (0 for the others, which are never used)
  function automatic int unsigned vs_idx(int unsigned c);
    return is_vs(c) ? (c / CPH) * GEILEN + (c % CPH) - 2 : 0;
  endfunction

  always_comb begin
    for (int c = 0; c < NCTX; c++) begin
      ctx_has_blk[c] = is_vs(c) && vcibir_q[vs_idx(c)] != '0
                       && vcibir_q[vs_idx(c)] <= BSEL_W'(NBLOCKS);
      ctx_blk[c]     = ctx_has_blk[c] ? $clog2(NBLOCKS)'(vcibir_q[vs_idx(c)] - 1'b1) : '0;
      for (int i = 1; i <= NINT; i++) begin
        cand_valid[c][i-1] = pending_q[i] && enable_q[c][i];
        cand_prio[c][i-1]  = prio_q[i];
      end
      for (int j = 0; j < NVIIR; j++) begin
        cand_valid[c][NINT+j] = ctx_has_blk[c] && viir_q[ctx_blk[c]][j].id != '0
                                && !viir_q[ctx_blk[c]][j].in_flight;
        cand_prio[c][NINT+j]  = viir_q[ctx_blk[c]][j].prio;
      end
    end
  end

  for (genvar c = 0; c < NCTX; c++) begin : g_fanin
    plic_fanin #(.N(NCAND), .PRIO_W(PRIO_W)) u_fanin (
      .valid_i   (cand_valid[c]),
      .prio_i    (cand_prio[c]),
      .max_prio_o(max_prio[c]),
      .max_idx_o (max_idx[c])
    );
    assign ctx_irq[c] = (max_prio[c] != '0) && (max_prio[c] >= thresh_q[c]);
  end

  for (genvar h = 0; h < NHARTS; h++) begin : g_out
    assign meip_o[h] = ctx_irq[h*CPH];
    assign seip_o[h] = ctx_irq[h*CPH + 1];
    for (genvar g = 0; g < GEILEN; g++) begin : g_vs
      assign vseip_o[h][g] = ctx_irq[h*CPH + 2 + g];
    end
  end

  // ---------------------------------------------------------------- register decode
  localparam logic [MMIO_AW-1:0] PEND_BASE   = 'h0001000;
  localparam logic [MMIO_AW-1:0] EN_BASE     = 'h0002000;
  localparam logic [MMIO_AW-1:0] CTX_BASE    = 'h0200000;
  localparam logic [MMIO_AW-1:0] VCIBIR_BASE = 'h4000000;
  localparam logic [MMIO_AW-1:0] VIIR_BASE   = 'h4010000;
  localparam logic [MMIO_AW-1:0] IBMSR_BASE  = 'h4110000;

  logic [MMIO_AW-1:0] a;
  assign a = {req_i.addr[MMIO_AW-1:2], 2'b00};
  logic rd, wr;
  assign rd = req_i.valid && !req_i.write;
  assign wr = req_i.valid &&  req_i.write;

  // Claim / complete decode.
  logic                     claim_hit, complete_hit;
  int unsigned              cc_ctx;
  logic [9:0]               claim_id;
  logic                     claim_virt;
  int unsigned              claim_viir;
  logic [9:0]               cpl_id;
  logic                     cpl_viir_hit;
  int unsigned              cpl_viir;
  logic                     cpl_phys;

  always_comb begin
    claim_hit    = 1'b0;
    complete_hit = 1'b0;
    cc_ctx       = 0;
    for (int c = 0; c < NCTX; c++)
      if (a == CTX_BASE + MMIO_AW'(c * 'h1000) + MMIO_AW'(4)) begin
        cc_ctx       = c;
        claim_hit    = rd;
        complete_hit = wr;
      end
    // claim result
    claim_virt = max_idx[cc_ctx] >= CIDX_W'(NINT);
    claim_viir = claim_virt ? int'(max_idx[cc_ctx]) - NINT : 0;
    if (max_prio[cc_ctx] == '0)
      claim_id = '0;
    else if (claim_virt)
      claim_id = viir_q[ctx_blk[cc_ctx]][claim_viir].id;
    else
      claim_id = 10'(max_idx[cc_ctx]) + 10'd1;
    // complete routing
    cpl_id       = req_i.wdata[9:0];
    cpl_viir_hit = 1'b0;
    cpl_viir     = 0;
    if (ctx_has_blk[cc_ctx] && cpl_id != '0)
      for (int j = NVIIR - 1; j >= 0; j--)
        if (viir_q[ctx_blk[cc_ctx]][j].id == cpl_id) begin
          cpl_viir_hit = 1'b1;
          cpl_viir     = j;
        end
    cpl_phys = !cpl_viir_hit && cpl_id != '0 && int'(cpl_id) <= NINT
               && enable_q[cc_ctx][cpl_id[ID_W-1:0]];
  end

  always_comb begin
    gw_complete = '0;
    if (complete_hit && cpl_phys) gw_complete[cpl_id] = 1'b1;
  end

  // ---------------------------------------------------------------- register writes
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q <= '0;
      for (int i = 0; i <= NINT; i++) prio_q[i] <= '0;
      for (int c = 0; c < NCTX; c++) begin
        enable_q[c] <= '0;
        thresh_q[c] <= '0;
      end
      for (int v = 0; v < NVS; v++) vcibir_q[v] <= '0;
      for (int n = 0; n < NBLOCKS; n++) begin
        ibmsr_q[n] <= '0;
        for (int j = 0; j < NVIIR; j++) viir_q[n][j] <= '0;
      end
    end else begin
      // gateways fill pending bits
      for (int i = 1; i <= NINT; i++)
        if (gw_valid[i]) pending_q[i] <= 1'b1;

      if (wr) begin
        for (int i = 1; i <= NINT; i++)
          if (a == MMIO_AW'(4 * i)) prio_q[i] <= req_i.wdata[PRIO_W-1:0];
        for (int c = 0; c < NCTX; c++) begin
          for (int w = 0; w < NWORDS; w++)
            if (a == EN_BASE + MMIO_AW'(c * 'h80 + 4 * w))
              for (int b = 0; b < 32; b++)
                if (w * 32 + b <= NINT && w * 32 + b > 0)
                  enable_q[c][w*32+b] <= req_i.wdata[b];
          if (a == CTX_BASE + MMIO_AW'(c * 'h1000))
            thresh_q[c] <= req_i.wdata[PRIO_W-1:0];
          if (a == VCIBIR_BASE + MMIO_AW'(4 * c) && is_vs(c))
            vcibir_q[vs_idx(c)] <= req_i.wdata[BSEL_W-1:0];
        end
        for (int n = 0; n < NBLOCKS; n++) begin
          for (int j = 0; j < NVIIR; j++)
            if (a == VIIR_BASE + MMIO_AW'(n * 'h1000 + 4 * j))
              viir_q[n][j] <= '{in_flight: req_i.wdata[31],
                                prio: req_i.wdata[16 +: PRIO_W],
                                id: req_i.wdata[9:0]};
          if (a == IBMSR_BASE + MMIO_AW'(4 * n)) begin
            ibmsr_q[n].en_np  <= req_i.wdata[0];
            ibmsr_q[n].en_unk <= req_i.wdata[1];
            if (req_i.wdata[9]) ibmsr_q[n].st_unk <= 1'b0;
          end
        end
      end

      // claim: clear the physical pending bit or mark the VIIR in flight
      if (claim_hit && claim_id != '0) begin
        if (claim_virt) viir_q[ctx_blk[cc_ctx]][claim_viir].in_flight <= 1'b1;
        else            pending_q[max_idx[cc_ctx] + 1'b1] <= 1'b0;
      end
      // complete: clear the VIIR, forward to the gateway, or flag an unknown ID
      if (complete_hit) begin
        if (cpl_viir_hit)
          viir_q[ctx_blk[cc_ctx]][cpl_viir] <= '0;
        else if (!cpl_phys && ctx_has_blk[cc_ctx]) begin
          ibmsr_q[ctx_blk[cc_ctx]].st_unk <= 1'b1;
          ibmsr_q[ctx_blk[cc_ctx]].unk_id <= cpl_id;
        end
      end
    end
  end

  // ---------------------------------------------------------------- register reads
  logic [31:0] rdata_d;
  always_comb begin
    rdata_d = '0;
    for (int i = 1; i <= NINT; i++)
      if (a == MMIO_AW'(4 * i)) rdata_d = 32'(prio_q[i]);
    for (int w = 0; w < NWORDS; w++)
      if (a == PEND_BASE + MMIO_AW'(4 * w))
        for (int b = 0; b < 32; b++)
          if (w * 32 + b <= NINT) rdata_d[b] = pending_q[w*32+b];
    for (int c = 0; c < NCTX; c++) begin
      for (int w = 0; w < NWORDS; w++)
        if (a == EN_BASE + MMIO_AW'(c * 'h80 + 4 * w))
          for (int b = 0; b < 32; b++)
            if (w * 32 + b <= NINT && w * 32 + b > 0) rdata_d[b] = enable_q[c][w*32+b];
      if (a == CTX_BASE + MMIO_AW'(c * 'h1000)) rdata_d = 32'(thresh_q[c]);
      if (a == VCIBIR_BASE + MMIO_AW'(4 * c) && is_vs(c))
        rdata_d = 32'(vcibir_q[vs_idx(c)]);
    end
    if (claim_hit) rdata_d = 32'(claim_id);
    for (int n = 0; n < NBLOCKS; n++) begin
      for (int j = 0; j < NVIIR; j++)
        if (a == VIIR_BASE + MMIO_AW'(n * 'h1000 + 4 * j)) begin
          rdata_d[31]            = viir_q[n][j].in_flight;
          rdata_d[16 +: PRIO_W]  = viir_q[n][j].prio;
          rdata_d[9:0]           = viir_q[n][j].id;
        end
      if (a == IBMSR_BASE + MMIO_AW'(4 * n)) begin
        rdata_d[0]     = ibmsr_q[n].en_np;
        rdata_d[1]     = ibmsr_q[n].en_unk;
        rdata_d[8]     = blk_np[n];
        rdata_d[9]     = ibmsr_q[n].st_unk;
        rdata_d[25:16] = ibmsr_q[n].unk_id;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rsp_o <= '0;
    else begin
      rsp_o.rvalid <= rd;
      rsp_o.rdata  <= rdata_d;
    end
  end

  // ---------------------------------------------------------------- checks
  initial assert (NINT <= 1023 && NBLOCKS <= 240 && NVIIR <= 1000 && GEILEN <= 64)
    else $error("plicv: size beyond what the register map allows");
  // A claim never hands out a source whose pending bit is clear.
  a_claim_pending: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (claim_hit && claim_id != '0 && !claim_virt) |-> pending_q[max_idx[cc_ctx] + 1'b1]);

endmodule
