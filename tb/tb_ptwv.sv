// Self-checking testbench for ptwv.
// A behavioural memory holds hand-built page tables: a second stage (Sv39x4, root at host
// page 0x80000) mapping guest pages 0x0-0x1ff with one 2 MiB page at host 0x40000 and
// guest pages 0x80000+k with 4 KiB pages at host 0x50000+3k; a first stage (Sv39, root at
// guest page 0x80000) with 4 KiB, 2 MiB, invalid and unmapped-guest-page entries; and a
// host first stage (root at host page 0x70000) with a 4 KiB and a 1 GiB page. Expected
// results come from these intended mappings, not from walking the tables. Also checked:
// the number of page-table reads of a cold and a warm two-stage walk (9 and 7 with the
// PTE cache, 15 without) and that hfence-style flushes drop only guest entries.
//
// Table formats follow Sv39/Sv39x4; the tables, the 2-cycle memory latency and the
// expected read counts belong to this testbench and this walker's PTE cache.
module tb_ptwv;
  import hyp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  ptw_req_t req;
  logic resp_valid;
  ptw_resp_t resp;
  logic flush = 0, flush_guest = 0;
  logic mem_req_valid, mem_req_ready, mem_resp_valid = 0, mem_resp_err = 0;
  logic [PADDR_W-1:0] mem_req_addr;
  logic [63:0] mem_resp_data = '0;
  int checks = 0, failures = 0, reads = 0;

  ptwv dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_i(req), .resp_valid_o(resp_valid), .resp_o(resp), .flush_i(flush),
    .flush_guest_i(flush_guest), .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready),
    .mem_req_addr_o(mem_req_addr), .mem_resp_valid_i(mem_resp_valid),
    .mem_resp_data_i(mem_resp_data), .mem_resp_err_i(mem_resp_err));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ memory model
  logic [63:0] mem [logic [PADDR_W-1:0]];
  logic [PADDR_W-1:0] err_addr = '1;
  int lat = 0;
  assign mem_req_ready = (lat == 0) && ($urandom_range(0, 3) != 0);
  logic [PADDR_W-1:0] pend_addr;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (mem_req_valid && mem_req_ready && lat == 0) begin
      reads++;
      pend_addr <= mem_req_addr;
      lat <= 1 + $urandom_range(0, 3);
    end else if (lat == 1) begin
      mem_resp_valid <= 1'b1;
      mem_resp_err   <= pend_addr == err_addr;
      mem_resp_data  <= mem.exists(pend_addr) ? mem[pend_addr] : 64'd0;
      lat <= 0;
    end else if (lat > 1) lat <= lat - 1;
  end

  localparam logic [7:0] V = 8'h01, R = 8'h02, W = 8'h04, X = 8'h08, U = 8'h10, A = 8'h40, D = 8'h80;
  localparam logic [7:0] LEAF = V | R | W | X | A | D;
  function automatic logic [63:0] pte(logic [43:0] ppn, logic [7:0] fl);
    return {10'd0, ppn, 2'd0, fl};
  endfunction
  function automatic logic [PADDR_W-1:0] ea(logic [43:0] page, int idx);
    return {page, 12'd0} + PADDR_W'(idx * 8);
  endfunction
  function automatic logic [43:0] s2h(logic [43:0] gpn);  // intended guest-page placement
    return 44'h50000 + 3 * (gpn - 44'h80000);
  endfunction

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic walk(logic [28:0] vpn, logic virt, logic s1, logic s2, logic [43:0] root,
                      output ptw_resp_t r, output int nreads);
    int r0;
    @(negedge clk);
    req = '{vpn: vpn, virt: virt, st1_en: s1, st2_en: s2, satp_ppn: root, hgatp_ppn: 44'h80000};
    req_valid = 1;
    checks++;
    if (!req_ready) begin failures++; $display("FAIL walker not ready"); end
    r0 = reads;
    @(posedge clk); #1 req_valid = 0;
    while (!resp_valid) @(posedge clk);
    r = resp;
    nreads = reads - r0;
    #1;
  endtask

  ptw_resp_t r;
  int n;

  initial begin
    req = '0;
    // second stage
    mem[ea(44'h80000, 0)] = pte(44'h81000, V);
    mem[ea(44'h81000, 0)] = pte(44'h40000, LEAF | U);             // 2 MiB guest 0..1ff
    mem[ea(44'h80000, 2)] = pte(44'h82000, V);                     // gpn 0x80000 region
    mem[ea(44'h82000, 0)] = pte(44'h83000, V);
    for (int k = 0; k < 16; k++) mem[ea(44'h83000, k)] = pte(s2h(44'h80000 + k), LEAF | U);
    mem[ea(44'h83000, 16)] = pte(44'h60000, V | R | A | U);        // read-only guest page
    // first stage in guest memory (addresses through the intended placement)
    mem[ea(s2h(44'h80000), 0)] = pte(44'h80001, V);
    mem[ea(s2h(44'h80001), 0)] = pte(44'h80002, V);
    for (int i = 0; i < 4; i++) mem[ea(s2h(44'h80002), i)] = pte(44'h80008 + i, LEAF);
    mem[ea(s2h(44'h80001), 1)] = pte(44'h0, LEAF);                 // 2 MiB -> guest 0
    mem[ea(s2h(44'h80001), 2)] = pte(44'h0, 8'h0);                 // invalid
    mem[ea(s2h(44'h80001), 3)] = pte(44'h80003, V);
    mem[ea(s2h(44'h80003), 0)] = pte(44'h12345, LEAF);             // guest page not mapped
    mem[ea(s2h(44'h80002), 4)] = pte(44'h80010, V | R | A);        // s1 leaf on RO s2 page
    // host first stage
    mem[ea(44'h70000, 0)] = pte(44'h71000, V);
    mem[ea(44'h71000, 0)] = pte(44'h72000, V);
    mem[ea(44'h72000, 3)] = pte(44'hABCDE, LEAF);
    mem[ea(44'h70000, 1)] = pte(44'hC0000, LEAF);                  // 1 GiB
    mem[ea(44'h70000, 2)] = pte(44'hC0001, LEAF);                  // misaligned 1 GiB

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // two-stage, cold then warm PTE cache
    walk(29'h0, 1, 1, 1, 44'h80000, r, n);
    chk("2-stage hpn", r.hpn, s2h(44'h80008));
    chk("2-stage gpn", r.gpn, 44'h80008);
    chk("2-stage 4K level", r.level, 2);
    chk("2-stage no fault", {r.pf, r.gpf, r.ae}, 0);
    chk("2-stage perms", {r.s1_perm, r.s2_perm}, {LEAF, 3'b111});
    chk("cold two-stage walk reads", n, 9);
    walk(29'h1, 1, 1, 1, 44'h80000, r, n);
    chk("2-stage hpn vpn1", r.hpn, s2h(44'h80009));
    chk("warm two-stage walk reads", n, 7);
    // a host flush leaves guest entries alone, a guest flush drops them
    @(negedge clk) flush = 1; flush_guest = 0; @(negedge clk) flush = 0;
    walk(29'h2, 1, 1, 1, 44'h80000, r, n);
    chk("host flush keeps guest PTE cache", n, 7);
    chk("2-stage hpn vpn2", r.hpn, s2h(44'h8000A));
    @(negedge clk) flush = 1; flush_guest = 1; @(negedge clk) flush = 0;
    walk(29'h3, 1, 1, 1, 44'h80000, r, n);
    chk("guest flush empties guest PTE cache", n, 9);
    chk("2-stage hpn vpn3", r.hpn, s2h(44'h8000B));

    // superpages at both stages: 2 MiB guest page on a 2 MiB host page
    walk(29'h205, 1, 1, 1, 44'h80000, r, n);
    chk("superpage hpn", r.hpn, 44'h40005);
    chk("superpage gpn", r.gpn, 44'h5);
    chk("superpage level", r.level, 1);
    chk("superpage no fault", {r.pf, r.gpf, r.ae}, 0);

    // first-stage fault, guest-page fault with the guest page reported
    walk(29'h400, 1, 1, 1, 44'h80000, r, n);
    chk("invalid first-stage PTE: page fault", {r.pf, r.gpf, r.ae}, 3'b100);
    walk(29'h600, 1, 1, 1, 44'h80000, r, n);
    chk("unmapped guest page: guest-page fault", {r.pf, r.gpf, r.ae}, 3'b010);
    chk("guest-page fault reports gpn", r.gpn, 44'h12345);
    walk(29'h4, 1, 1, 1, 44'h80000, r, n);
    chk("RO second stage perms returned", {r.pf, r.gpf, r.s2_perm}, {2'b00, 3'b100});
    chk("RO second stage hpn", r.hpn, 44'h60000);

    // second stage only (guest with vsatp bare)
    walk(29'h80005, 1, 0, 1, 44'h0, r, n);
    chk("G-stage only hpn", r.hpn, s2h(44'h80005));
    chk("G-stage only gpn", r.gpn, 44'h80005);
    walk(29'h10, 1, 0, 1, 44'h0, r, n);
    chk("G-stage only superpage hpn", r.hpn, 44'h40010);
    walk(29'h1000_0000, 1, 0, 1, 44'h0, r, n);
    chk("G-stage only unmapped: guest-page fault", {r.pf, r.gpf}, 2'b01);

    // host first stage only
    walk(29'h3, 0, 1, 0, 44'h70000, r, n);
    chk("host Sv39 hpn", r.hpn, 44'hABCDE);
    chk("host Sv39 reads", n, 3);
    walk(29'h4_1234, 0, 1, 0, 44'h70000, r, n);
    chk("host 1 GiB hpn", r.hpn, 44'hC1234);
    chk("host 1 GiB level", r.level, 0);
    walk(29'h8_0000, 0, 1, 0, 44'h70000, r, n);
    chk("misaligned superpage: page fault", {r.pf, r.gpf}, 2'b10);
    err_addr = ea(44'h72000, 5);
    walk(29'h5, 0, 1, 0, 44'h70000, r, n);
    chk("access error", {r.pf, r.gpf, r.ae}, 3'b001);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
