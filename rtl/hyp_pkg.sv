// Shared types and constants for the hypervisor-extension interrupt and MMU blocks.
//
// mmio_req_t is the simple register-bus request used by CLINTv and PLICv: one 32-bit
// access per cycle, always accepted; read data comes back one cycle later with a valid
// flag. 64-bit timer registers are reached as two 32-bit words (low word at the register
// offset, high word at offset+4). The bus itself is this design's own choice; the
// register offsets it addresses follow the CLINTv and PLICv memory maps.
package hyp_pkg;

  localparam int unsigned MMIO_AW = 28;  // covers the PLICv map up to 0x4110000 + 4*blocks

  typedef struct packed {
    logic                valid;
    logic                write;
    logic [MMIO_AW-1:0]  addr;
    logic [31:0]         wdata;
  } mmio_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } mmio_rsp_t;

  // Privilege levels (RISC-V encoding) and the virtualization bit V.
  typedef enum logic [1:0] {
    PRV_U = 2'd0,
    PRV_S = 2'd1,
    PRV_M = 2'd3
  } priv_e;

  // Interrupt numbers of mip/mie (RISC-V privileged spec, H-extension 0.6.1).
  localparam int unsigned IRQ_SSI  = 1;
  localparam int unsigned IRQ_VSSI = 2;
  localparam int unsigned IRQ_MSI  = 3;
  localparam int unsigned IRQ_STI  = 5;
  localparam int unsigned IRQ_VSTI = 6;
  localparam int unsigned IRQ_MTI  = 7;
  localparam int unsigned IRQ_SEI  = 9;
  localparam int unsigned IRQ_VSEI = 10;
  localparam int unsigned IRQ_MEI  = 11;
  localparam int unsigned IRQ_SGEI = 12;

  // Sv39 / Sv39x4 page-table constants.
  localparam int unsigned PG_LEVELS = 3;
  localparam int unsigned PGIDX_W   = 12;
  localparam int unsigned GPN_W     = 29;   // Sv39x4 guest-physical page number (41-bit GPA)
  localparam int unsigned PPN_W     = 44;   // page number field of a PTE

  typedef struct packed {
    logic [9:0]       reserved;  // bits 63:54
    logic [PPN_W-1:0] ppn;       // bits 53:10
    logic [1:0]       rsw;
    logic             d;
    logic             a;
    logic             g;
    logic             u;
    logic             x;
    logic             w;
    logic             r;
    logic             v;
  } pte_t;

  localparam int unsigned PADDR_W = PPN_W + PGIDX_W;  // 56-bit host-physical address

  // Permission bits of a stage-2 leaf.
  typedef struct packed {
    logic r;
    logic w;
    logic x;
  } s2_perm_t;

  // Page-table walker request (from a TLB) and response (to the TLB).
  typedef struct packed {
    logic [GPN_W-1:0] vpn;       // guest-virtual (Sv39, 27 bits used) or guest-physical page
    logic             virt;      // guest translation: tag entries as guest (V=1 or hlv/hsv)
    logic             st1_en;    // first stage on (satp/vsatp mode Sv39)
    logic             st2_en;    // second stage on (hgatp mode Sv39x4)
    logic [PPN_W-1:0] satp_ppn;  // root of the first stage (vsatp.PPN when virt)
    logic [PPN_W-1:0] hgatp_ppn; // root of the second stage (16 KiB aligned)
  } ptw_req_t;

  typedef struct packed {
    logic [PPN_W-1:0] hpn;       // host-physical page of the 4 KiB page holding vpn
    logic [GPN_W-1:0] gpn;       // guest-physical page (reported in htval on faults)
    logic [1:0]       level;     // leaf depth of the finer stage: 0 1 GiB, 1 2 MiB, 2 4 KiB
    logic [7:0]       s1_perm;   // D A G U X W R V of the first-stage leaf (all ones if off)
    s2_perm_t         s2_perm;   // R W X of the second-stage leaf (all ones if off)
    logic             pf;        // first-stage page fault
    logic             gpf;       // second-stage (guest) page fault
    logic             ae;        // access error on a page-table read
  } ptw_resp_t;

  // Kind of memory access checked by a TLB.
  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } acc_e;

  // ---------------------------------------------------------------- top-level bundles
  // Mode, status and translation roots held by hyp_trap and used by the interrupt and MMU
  // logic (and by the core's decoder).
  typedef struct packed {
    priv_e            priv;
    logic             virt;
    logic             spvp;        // hstatus.SPVP
    logic             mstatus_mie;
    logic             mstatus_sie;
    logic             vsstatus_sie;
    logic             sum;         // SUM of the active stage-1 status
    logic             mxr;         // MXR of the active stage-1 status
    logic             hs_mxr;      // sstatus.MXR (second stage)
    logic             satp_en;
    logic [PPN_W-1:0] satp_ppn;
    logic             vsatp_en;
    logic [PPN_W-1:0] vsatp_ppn;
    logic             hgatp_en;
    logic [PPN_W-1:0] hgatp_ppn;
  } hart_state_t;

  // Trap events from the core's pipeline (one instruction retires or traps per cycle).
  typedef struct packed {
    logic        int_en;      // at an instruction boundary: a pending interrupt may be taken
    logic        exc_valid;
    logic [4:0]  exc_cause;
    logic [63:0] exc_pc;      // PC of the trapping / interrupted instruction
    logic [63:0] exc_tval;
    logic        exc_gva;     // tval is a guest virtual address
    logic [63:0] exc_gpa;     // guest-physical address of a guest-page fault
    logic        mret;
    logic        sret;
  } trap_req_t;

  typedef struct packed {
    logic        trap;        // a trap is taken: fetch from pc
    logic [63:0] pc;          // trap vector, or the return address of mret/sret
  } trap_rsp_t;

  typedef struct packed {
    logic        we;
    logic [11:0] addr;
    logic [63:0] wdata;
  } csr_req_t;

  typedef struct packed {
    logic       irq;       // an interrupt is to be taken
    logic [3:0] cause;
    logic       to_m;
    logic       to_vs;
  } irq_req_t;

  typedef struct packed {
    logic             valid;
    logic [GPN_W-1:0] vpn;
    acc_e             acc;
    logic             hv;       // hlv/hlvx/hsv
    logic             hlvx;
  } tlb_req_t;

  typedef struct packed {
    logic             hit;
    logic             miss;
    logic [PPN_W-1:0] hpn;
    logic [GPN_W-1:0] gpn;
    logic             pf;
    logic             gpf;
    logic             ae;
  } tlb_resp_t;

  typedef struct packed {
    logic               valid;
    logic [PADDR_W-1:0] addr;
  } ptw_mem_req_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] data;
    logic        err;
  } ptw_mem_rsp_t;

endpackage
