// Self-checking testbench for tlbv (16 entries).
// A behavioural walker answers each request after a few cycles from a small table of
// intended translations (host and guest). Checks: M-mode bypass, miss/refill/hit with the
// walker request fields, superpage merging, separation of host and guest entries by the
// guest bit, first-stage permission faults (U, SUM, MXR, D), second-stage guest-page
// faults reporting the stored guest-physical page, hlv/hsv checked as VS/VU via SPVP,
// hlvx needing execute permission, cached walker faults, and guest/host flushes.
//
// The guest bit, stored guest-physical page and whole-guest flush follow the paper's TLB
// description; the walker model and its latency are this testbench's own. Lookups are
// combinational: results are sampled 1 time unit after the request is driven.
module tb_tlbv;
  import hyp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, hv = 0, hlvx = 0;
  logic [GPN_W-1:0] vpn = '0;
  acc_e acc = ACC_READ;
  priv_e priv = PRV_M;
  logic virt = 0, spvp = 0, sum = 0, mxr = 0, hs_mxr = 0;
  logic flush = 0, flush_guest = 0;
  logic hit, miss, pf, gpf, ae;
  logic [PPN_W-1:0] hpn;
  logic [GPN_W-1:0] gpn;
  logic ptw_req_valid, ptw_resp_valid = 0;
  ptw_req_t ptw_req;
  ptw_resp_t ptw_resp = '0;
  int checks = 0, failures = 0, walks = 0;

  tlbv #(.ENTRIES(16)) dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid),
    .req_vpn_i(vpn), .req_acc_i(acc), .req_hv_i(hv), .req_hlvx_i(hlvx), .priv_i(priv),
    .virt_i(virt), .spvp_i(spvp), .sum_i(sum), .mxr_i(mxr), .hs_mxr_i(hs_mxr),
    .satp_en_i(1'b1), .satp_ppn_i(44'h111), .vsatp_en_i(1'b1), .vsatp_ppn_i(44'h222),
    .hgatp_en_i(1'b1), .hgatp_ppn_i(44'h333), .flush_i(flush), .flush_guest_i(flush_guest),
    .hit_o(hit), .miss_o(miss), .hpn_o(hpn), .gpn_o(gpn), .pf_o(pf), .gpf_o(gpf), .ae_o(ae),
    .ptw_req_valid_o(ptw_req_valid), .ptw_req_ready_i(1'b1), .ptw_req_o(ptw_req),
    .ptw_resp_valid_i(ptw_resp_valid), .ptw_resp_i(ptw_resp));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [7:0] V = 8'h01, R = 8'h02, W = 8'h04, X = 8'h08, U = 8'h10, A = 8'h40, D = 8'h80;

  // Behavioural walker: intended translations.
  ptw_req_t last_req;
  function automatic ptw_resp_t translate(ptw_req_t q);
    ptw_resp_t p = '0;
    p.level = 2; p.s1_perm = 8'hFF; p.s2_perm = '1;
    if (!q.virt) begin
      case (q.vpn)
        29'h10: begin p.hpn = 44'hA10; p.s1_perm = V|R|W|A|D; end
        29'h11: begin p.hpn = 44'hA11; p.s1_perm = V|R|W|U|A|D; end
        29'h12: begin p.hpn = 44'hA12; p.s1_perm = V|X|A; end
        29'h13: begin p.hpn = 44'hA13; p.s1_perm = V|R|W|A; end      // D clear
        default: begin p.hpn = 44'hB0000; p.level = 1; p.s1_perm = V|R|W|X|A|D; end
      endcase
    end else begin
      case (q.vpn)
        29'h10: begin p.hpn = 44'hC10; p.gpn = 29'h8010; p.s1_perm = V|R|W|A|D; end
        29'h20: begin p.hpn = 44'hC20; p.gpn = 29'h8020; p.s1_perm = V|R|W|U|A|D;
                      p.s2_perm = '{r: 1, w: 0, x: 0}; end
        29'h21: begin p.hpn = 44'hC21; p.gpn = 29'h8021; p.s1_perm = V|X|A; end
        29'h22: begin p.pf = 1; end
        29'h23: begin p.gpf = 1; p.gpn = 29'h1234; end
        default: begin p.hpn = 44'hDDD; p.gpn = 29'hEEE; end
      endcase
    end
    return p;
  endfunction

  always @(posedge clk) begin
    ptw_resp_valid <= 1'b0;
    if (ptw_req_valid) begin
      walks++;
      last_req = ptw_req;
      repeat (3) @(posedge clk);
      ptw_resp <= translate(last_req);
      ptw_resp_valid <= 1'b1;
    end
  end

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // Look up, retrying after misses like a pipeline replay; returns walks used.
  task automatic access(logic [GPN_W-1:0] v, acc_e k, output int nwalk);
    int w0 = walks;
    @(negedge clk);
    vpn = v; acc = k; req_valid = 1;
    #1;
    while (miss) begin
      @(negedge clk);
      #1;
    end
    nwalk = walks - w0;
  endtask
  task automatic done();
    @(negedge clk) req_valid = 0; hv = 0; hlvx = 0;
  endtask

  int n;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;

    // M mode: no translation
    access(29'h10, ACC_READ, n);
    chk("M-mode bypass hit, no walk", {hit, n[3:0]}, {1'b1, 4'd0});
    chk("M-mode bypass hpn", hpn, 44'h10);
    done();

    // HS: miss, refill, hit
    priv = PRV_S;
    access(29'h10, ACC_READ, n);
    chk("HS walk once", n, 1);
    chk("walker request host", {last_req.virt, last_req.st1_en, last_req.st2_en}, 3'b010);
    chk("walker root satp", last_req.satp_ppn, 44'h111);
    chk("HS hpn", hpn, 44'hA10);
    chk("HS no fault", {pf, gpf, ae}, 0);
    done();
    access(29'h10, ACC_WRITE, n);
    chk("HS second access hits without walk", n, 0);
    chk("HS write ok", {hit, pf}, 2'b10);
    done();
    // superpage: 2 MiB at 0xB0000 covers vpn 0x200..0x3ff
    access(29'h205, ACC_READ, n);
    chk("superpage hpn", hpn, 44'hB0005);
    done();
    access(29'h3FF, ACC_EXEC, n);
    chk("same superpage hits", {n[3:0], hpn}, {4'd0, 44'hB01FF});
    done();

    // first-stage permissions
    access(29'h11, ACC_READ, n);
    chk("S reads U page with SUM=0: page fault", pf, 1);
    done();
    sum = 1;
    access(29'h11, ACC_READ, n);
    chk("S reads U page with SUM=1", pf, 0);
    done();
    access(29'h11, ACC_EXEC, n);
    chk("S never executes U page", pf, 1);
    done();
    priv = PRV_U;
    access(29'h10, ACC_READ, n);
    chk("U on supervisor page: page fault", pf, 1);
    done();
    priv = PRV_S;
    access(29'h12, ACC_READ, n);
    chk("read X-only page without MXR: page fault", pf, 1);
    done();
    mxr = 1;
    access(29'h12, ACC_READ, n);
    chk("read X-only page with MXR", pf, 0);
    done();
    mxr = 0;
    access(29'h13, ACC_WRITE, n);
    chk("write with D clear: page fault", pf, 1);
    done();

    // guest translations are separate entries
    virt = 1;
    access(29'h10, ACC_READ, n);
    chk("guest access walks despite host entry", n, 1);
    chk("walker request guest", {last_req.virt, last_req.st1_en, last_req.st2_en}, 3'b111);
    chk("walker root vsatp/hgatp", {last_req.satp_ppn, last_req.hgatp_ppn}, {44'h222, 44'h333});
    chk("guest hpn", hpn, 44'hC10);
    done();
    // second-stage permission fault on a cached translation reports the guest page
    access(29'h20, ACC_READ, n);
    chk("guest read of RO stage-2 page ok", {pf, gpf}, 2'b00);
    done();
    access(29'h20, ACC_WRITE, n);
    chk("guest write to RO stage-2 page: guest-page fault", {n[3:0], pf, gpf}, {4'd0, 2'b01});
    chk("guest-page fault reports stored GPA page", gpn, 29'h8020);
    done();
    // walker faults are cached
    access(29'h22, ACC_READ, n);
    chk("walker page fault", {pf, gpf}, 2'b10);
    done();
    access(29'h23, ACC_READ, n);
    chk("walker guest-page fault", {pf, gpf, gpn}, {2'b01, 29'h1234});
    done();
    access(29'h23, ACC_READ, n);
    chk("cached guest-page fault, no walk", {n[3:0], gpf}, {4'd0, 1'b1});
    done();

    // hypervisor VM loads/stores from HS (V=0)
    virt = 0; priv = PRV_S; sum = 0;
    hv = 1; spvp = 1;
    access(29'h10, ACC_READ, n);
    chk("hlv hits the guest entry (VS)", {n[3:0], hpn}, {4'd0, 44'hC10});
    done();
    hv = 1; spvp = 0;
    access(29'h10, ACC_READ, n);
    chk("hlv as VU on a supervisor page: page fault", pf, 1);
    done();
    hv = 1; spvp = 0;
    access(29'h20, ACC_READ, n);
    chk("hlv as VU on a user page", {pf, gpf, hpn}, {2'b00, 44'hC20});
    done();
    hv = 1; spvp = 1; hlvx = 1;
    access(29'h21, ACC_READ, n);
    chk("hlvx reads an execute-only page", {pf, gpf}, 2'b00);
    done();
    hv = 1; spvp = 1;
    access(29'h21, ACC_READ, n);
    chk("hlv without x: page fault on execute-only page", pf, 1);
    done();

    // flushes
    @(negedge clk) flush = 1; flush_guest = 1; @(negedge clk) flush = 0;
    priv = PRV_S;
    access(29'h10, ACC_READ, n);
    chk("host entry survives guest flush", n, 0);
    done();
    virt = 1;
    access(29'h10, ACC_READ, n);
    chk("guest entry dropped by hfence", n, 1);
    done();
    @(negedge clk) flush = 1; flush_guest = 0; @(negedge clk) flush = 0;
    access(29'h10, ACC_READ, n);
    chk("guest entry survives host flush", n, 0);
    done();
    virt = 0;
    access(29'h10, ACC_READ, n);
    chk("host entry dropped by host flush", n, 1);
    done();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
