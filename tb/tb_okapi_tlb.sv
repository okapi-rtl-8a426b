// tb_okapi_tlb: random load translations against a reference model of the
// safe-access-bit DTLB.  The model keeps its own set of cached pages with a
// safe bit each and predicts, for every lookup, MISS / BLOCKED / FAULT / HIT,
// the physical page, the safe-bit update and the trust-domain size.  Requests
// mix safe and unsafe loads and OkapiLoads, privilege switches and OkapiReset
// clears, user and supervisor mode, and Okapi on and off.  The pages used fit
// in the TLB, so no eviction happens in the random phase; a second phase
// touches more pages than there are entries and checks that a refilled
// entry starts outside the trust domain.
module tb_okapi_tlb;
  import okapi_pkg::*;
  localparam int ENT = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic okapi_en;
  priv_e priv;
  tlb_req_t req;
  logic resp_valid;
  tlb_resp_e resp;
  logic [PPN_W-1:0] resp_ppn;
  logic clear_priv, clear_reset;
  logic ptw_req_valid, ptw_req_ready, refill_valid;
  logic [VPN_W-1:0] ptw_req_vpn, refill_vpn;
  pte_t refill_pte;
  logic ev_safe_set;
  logic [6:0] trust_domain_pages;
  int walks;

  okapi_tlb #(.ENTRIES(ENT)) dut (.*);
  tb_ptw_model #(.LATENCY(4)) ptw (
    .clk, .rst_n, .req_valid(ptw_req_valid), .req_vpn(ptw_req_vpn), .req_ready(ptw_req_ready),
    .refill_valid, .refill_vpn, .refill_pte, .walks);

  int checks = 0, failures = 0;
  int n_hit, n_blk, n_miss, n_fault, n_spec_hit;
  bit cached[logic [VPN_W-1:0]];
  bit safe_m[logic [VPN_W-1:0]];

  // same page table as tb_ptw_model
  function automatic pte_t pte_of(input logic [VPN_W-1:0] vpn);
    pte_t p;
    p.ppn      = PPN_W'(vpn * 3 + 'h100);
    p.present  = (vpn % 13) != 12;
    p.readable = (vpn % 11) != 10;
    p.user     = (vpn % 7) != 6;
    return p;
  endfunction

  function automatic int safe_count();
    int n = 0;
    foreach (safe_m[v]) if (safe_m[v]) n++;
    return n;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup_and_check(input logic [VPN_W-1:0] vpn, input bit uns, input bit ok);
    tlb_resp_e exp;
    pte_t p;
    bit set_exp;
    p = pte_of(vpn);
    set_exp = 0;
    if (!cached.exists(vpn)) exp = TLB_MISS;
    else if (okapi_en && uns && !safe_m[vpn]) exp = TLB_BLOCKED;
    else if (!p.present || !p.readable || (priv == PRIV_U && !p.user)) exp = TLB_FAULT;
    else begin exp = TLB_HIT; set_exp = !uns && !ok; end
    @(negedge clk);
    req.valid = 1; req.vpn = vpn; req.unsafe = uns; req.okapi_load = ok;
    @(negedge clk);
    req.valid = 0;
    checks++;
    if (!resp_valid || resp !== exp || (exp == TLB_HIT && resp_ppn !== p.ppn)) begin
      failures++;
      if (failures < 10) $display("vpn %h uns %b ok %b en %b: resp %s expected %s", vpn, uns, ok,
                                  okapi_en, resp.name(), exp.name());
    end
    case (exp)
      TLB_HIT:     begin n_hit++; if (uns) n_spec_hit++; end
      TLB_BLOCKED: n_blk++;
      TLB_MISS:    n_miss++;
      default:     n_fault++;
    endcase
    if (set_exp && !safe_m[vpn]) begin
      checks++;
      if (!ev_safe_set) begin failures++; $display("no safe_set event for %h", vpn); end
    end
    if (set_exp) safe_m[vpn] = 1;
    checks++;
    if (int'(trust_domain_pages) != safe_count()) begin
      failures++;
      if (failures < 10) $display("trust domain %0d expected %0d", trust_domain_pages, safe_count());
    end
  endtask

  task automatic wait_refills();
    // let any walk finish and record the refilled page in the model
    repeat (12) begin
      @(posedge clk);
      #1;
      if (refill_valid) begin cached[refill_vpn] = 1; safe_m[refill_vpn] = 0; end
    end
  endtask

  initial begin
    okapi_en = 1; priv = PRIV_U; req = '0; clear_priv = 0; clear_reset = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // ---- random phase on 40 pages
    for (int t = 0; t < 3000; t++) begin
      logic [VPN_W-1:0] vpn;
      int op;
      vpn = VPN_W'($urandom_range(0, 39) + 'h400);
      op  = $urandom_range(0, 99);
      if (op < 3) begin
        @(negedge clk); clear_priv = 1;
        @(negedge clk); clear_priv = 0;
        foreach (safe_m[v]) safe_m[v] = 0;
        priv = (priv == PRIV_U) ? PRIV_S : PRIV_U;
      end else if (op < 6) begin
        @(negedge clk); clear_reset = 1;
        @(negedge clk); clear_reset = 0;
        foreach (safe_m[v]) safe_m[v] = 0;
      end else if (op < 8) begin
        okapi_en = !okapi_en;
      end
      lookup_and_check(vpn, $urandom_range(0, 1), $urandom_range(0, 4) == 0);
      if (!cached.exists(vpn)) wait_refills();
      checks++;
      if (int'(trust_domain_pages) != safe_count()) begin
        failures++;
        if (failures < 10) $display("trust domain after clear %0d expected %0d",
                                    trust_domain_pages, safe_count());
      end
    end
    // ---- eviction phase: 70 fresh readable user pages, each accessed safely
    okapi_en = 1; priv = PRIV_S;
    @(negedge clk); clear_reset = 1; @(negedge clk); clear_reset = 0;
    begin
      int evicted = 0;
      for (int k = 0; k < 70; k++) begin
        logic [VPN_W-1:0] vpn;
        int tdp_before;
        pte_t pf;
        vpn = VPN_W'('h9000 + k * 1001);
        tdp_before = trust_domain_pages;
        req.valid = 1; req.vpn = vpn; req.unsafe = 0; req.okapi_load = 0;
        @(negedge clk); req.valid = 0;
        while (!refill_valid) @(negedge clk);
        @(negedge clk);
        // after a refill into a full TLB the victim leaves the trust domain
        if (k >= ENT && int'(trust_domain_pages) < tdp_before) evicted++;
        req.valid = 1; req.unsafe = 1;
        @(negedge clk); req.valid = 0;
        checks++;
        // the freshly refilled page is not yet in the trust domain
        pf = pte_of(vpn);
        if (pf.present && pf.readable && resp !== TLB_BLOCKED) begin
          failures++; $display("fresh page %h: %s, expected BLOCKED", vpn, resp.name());
        end
        req.valid = 1; req.unsafe = 0;
        @(negedge clk); req.valid = 0;
      end
      checks++;
      if (evicted == 0) begin failures++; $display("no eviction seen"); end
      checks++;
      if (trust_domain_pages > 7'(ENT)) begin failures++; $display("trust domain overflow"); end
    end
    $display("hits %0d (speculative %0d) blocked %0d misses %0d faults %0d walks %0d",
             n_hit, n_spec_hit, n_blk, n_miss, n_fault, walks);
    checks++;
    if (n_hit == 0 || n_spec_hit == 0 || n_blk == 0 || n_miss == 0 || n_fault == 0) begin
      failures++; $display("an outcome never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
