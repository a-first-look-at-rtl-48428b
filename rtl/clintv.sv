// CLINTv: core-local interruptor extended with hypervisor (HS) and virtual-supervisor (VS)
// timers.
//
// Besides the classic per-hart msip and mtimecmp registers and the shared free-running
// mtime counter, every hart gets an stimecmp (compared with stime, a read-only copy of
// mtime), a vstimecmp and an htimedelta. vstime n is mtime + htimedelta n and is compared
// with vstimecmp n. Each comparison drives one interrupt line straight into the hart's
// interrupt-pending bitmap (mtip, stip, vstip), so supervisor and guest timers need no
// firmware mediation. Register offsets follow the CLINTv memory map:
//   msip n 0x00000+4n, mtimecmp n 0x04000+8n, mtime 0x0bff8, stimecmp n 0x0c000+8n,
//   stime 0x1bff8 (RO), vstimecmp n 0x1c000+8n, vstime n 0x14000+8n (RO),
//   htimedelta n 0x24000+8n.
// The mtimecmp window (0x04000 up to mtime at 0x0bff8) limits the map to 4095 harts.
//
// Interface: mmio_req_t request every cycle, 32-bit data; 64-bit registers are two words
// (low at +0, high at +4). Read data is registered and returned the cycle after the
// request. mtime advances by one on each cycle rtc_tick is high.
//
// Design choices not fixed by the paper: the bus, the tick input, reset values (compare
// registers reset to all ones so no timer fires out of reset, htimedelta and mtime to 0),
// and the comparison, which fires when the time is strictly greater than the compare value
// as the paper's text puts it (the RISC-V specification uses greater-or-equal). msip keeps
// one writable bit per hart.
//
// Lint note: address bits [1:0] are not decoded (registers are accessed as aligned
// 32-bit words), so verilator reports them unused.
module clintv
  import hyp_pkg::*;
#(
  parameter int unsigned NHARTS = 6
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              rtc_tick_i,
  input  mmio_req_t         req_i,
  output mmio_rsp_t         rsp_o,
  output logic [NHARTS-1:0] msip_o,
  output logic [NHARTS-1:0] mtip_o,
  output logic [NHARTS-1:0] stip_o,
  output logic [NHARTS-1:0] vstip_o
);

  localparam logic [MMIO_AW-1:0] MSIP_BASE     = 'h00000;
  localparam logic [MMIO_AW-1:0] MTIMECMP_BASE = 'h04000;
  localparam logic [MMIO_AW-1:0] MTIME_ADDR    = 'h0bff8;
  localparam logic [MMIO_AW-1:0] STIMECMP_BASE = 'h0c000;
  localparam logic [MMIO_AW-1:0] STIME_ADDR    = 'h1bff8;
  localparam logic [MMIO_AW-1:0] VSTIME_BASE   = 'h14000;
  localparam logic [MMIO_AW-1:0] VSTIMECMP_BASE= 'h1c000;
  localparam logic [MMIO_AW-1:0] HTDELTA_BASE  = 'h24000;

  logic [63:0]       mtime_q;
  logic [NHARTS-1:0] msip_q;
  logic [63:0]       mtimecmp_q  [NHARTS];
  logic [63:0]       stimecmp_q  [NHARTS];
  logic [63:0]       vstimecmp_q [NHARTS];
  logic [63:0]       htdelta_q   [NHARTS];
  logic [63:0]       vstime      [NHARTS];

  always_comb begin
    for (int n = 0; n < NHARTS; n++) begin
      vstime[n]  = mtime_q + htdelta_q[n];
      mtip_o[n]  = mtime_q   > mtimecmp_q[n];
      stip_o[n]  = mtime_q   > stimecmp_q[n];   // stime is a replica of mtime
      vstip_o[n] = vstime[n] > vstimecmp_q[n];
    end
  end
  assign msip_o = msip_q;

  // Address decode: word address per array and hart; a[2] picks the 32-bit half.
  logic [MMIO_AW-1:0] a;
  logic               hi;
  assign a  = req_i.addr;
  assign hi = a[2];

  // 64-bit word update helper: replace the addressed half.
  function automatic logic [63:0] upd(logic [63:0] old, logic h, logic [31:0] d);
    return h ? {d, old[31:0]} : {old[63:32], d};
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q <= '0;
      msip_q  <= '0;
      for (int n = 0; n < NHARTS; n++) begin
        mtimecmp_q[n]  <= '1;
        stimecmp_q[n]  <= '1;
        vstimecmp_q[n] <= '1;
        htdelta_q[n]   <= '0;
      end
    end else begin
      if (rtc_tick_i) mtime_q <= mtime_q + 64'd1;
      if (req_i.valid && req_i.write) begin
        if ({a[MMIO_AW-1:3], 3'b000} == MTIME_ADDR)
          mtime_q <= upd(mtime_q, hi, req_i.wdata);
        for (int n = 0; n < NHARTS; n++) begin
          if (a[MMIO_AW-1:2] == (MSIP_BASE[MMIO_AW-1:2] + (MMIO_AW-2)'(n)))
            msip_q[n] <= req_i.wdata[0];
          if (a[MMIO_AW-1:3] == (MTIMECMP_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))
            mtimecmp_q[n] <= upd(mtimecmp_q[n], hi, req_i.wdata);
          if (a[MMIO_AW-1:3] == (STIMECMP_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))
            stimecmp_q[n] <= upd(stimecmp_q[n], hi, req_i.wdata);
          if (a[MMIO_AW-1:3] == (VSTIMECMP_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))
            vstimecmp_q[n] <= upd(vstimecmp_q[n], hi, req_i.wdata);
          if (a[MMIO_AW-1:3] == (HTDELTA_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))
            htdelta_q[n] <= upd(htdelta_q[n], hi, req_i.wdata);
        end
      end
    end
  end

  // Read path, registered.
  logic [31:0] rdata_d;
  always_comb begin
    logic [63:0] w;
    w = '0;
    if ({a[MMIO_AW-1:3], 3'b000} == MTIME_ADDR) w = mtime_q;
    if ({a[MMIO_AW-1:3], 3'b000} == STIME_ADDR) w = mtime_q;
    for (int n = 0; n < NHARTS; n++) begin
      if (a[MMIO_AW-1:2] == (MSIP_BASE[MMIO_AW-1:2] + (MMIO_AW-2)'(n)))
        w = {32'd0, 31'd0, msip_q[n]} << (hi ? 32 : 0);
      if (a[MMIO_AW-1:3] == (MTIMECMP_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))  w = mtimecmp_q[n];
      if (a[MMIO_AW-1:3] == (STIMECMP_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))  w = stimecmp_q[n];
      if (a[MMIO_AW-1:3] == (VSTIMECMP_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n))) w = vstimecmp_q[n];
      if (a[MMIO_AW-1:3] == (VSTIME_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))    w = vstime[n];
      if (a[MMIO_AW-1:3] == (HTDELTA_BASE[MMIO_AW-1:3] + (MMIO_AW-3)'(n)))   w = htdelta_q[n];
    end
    rdata_d = hi ? w[63:32] : w[31:0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_o <= '0;
    end else begin
      rsp_o.rvalid <= req_i.valid && !req_i.write;
      rsp_o.rdata  <= rdata_d;
    end
  end

  // The mtimecmp array must end below mtime.
  initial assert (NHARTS <= 4095) else $error("clintv: too many harts for the memory map");

endmodule
