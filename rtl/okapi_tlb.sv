// okapi_tlb: fully associative data TLB with one safe access bit per entry.
//
// The safe access bit records that the page of an entry has been accessed
// legally (non-speculatively, without a fault) since the bits were last
// cleared.  The set of pages with the bit set is the current trust domain.
//   * A safe (non-speculative) load that translates without a fault sets the
//     bit of its entry.
//   * An unsafe (speculative) load only gets a translation if the bit is
//     already set; otherwise it is answered TLB_BLOCKED and must retry once it
//     is safe.  Its page therefore never reaches the cache speculatively.
//   * An OkapiLoad is checked the same way but never sets the bit.
//   * clear_priv (privilege switch) and clear_reset (OkapiReset executed)
//     clear every bit.  A clear wins over a set in the same cycle.
//   * With okapi_en low the checks are off and unsafe loads translate as in
//     an unprotected core; bits are still maintained.
// Faults: page not present, not readable, or a user-mode access to a
// supervisor page.  A faulting access never sets the bit.
//
// Timing: one lookup per cycle; req is looked up combinationally and the
// answer (resp_valid, resp, resp_ppn) is registered, one cycle later.  A miss
// starts a page walk on the ptw_req valid/ready port if none is in progress
// (speculative misses walk too, so that a later safe retry is not slowed
// down); any miss is answered TLB_MISS and the load retries after the next
// refill.  A refill allocates the first invalid entry, else a round-robin
// victim, with its safe access bit clear.
//
// The safe bit semantics and the two clear sources follow the design; the
// one-walk-at-a-time walker port, the replacement policy, the fault rules and
// the clear-over-set priority are this implementation's own choices.
//
// Tool note: rst_n also appears in the "disable iff" clauses of the
// assertions, which lint reports as a synchronous use of an asynchronous
// reset (SYNCASYNCNET).  That use is for simulation only.
module okapi_tlb
  import okapi_pkg::*;
#(
  parameter int unsigned ENTRIES = DEF_TLB_ENTRIES,
  localparam int unsigned EW = $clog2(ENTRIES),
  localparam int unsigned SW = $clog2(ENTRIES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             okapi_en,
  input  priv_e            priv,
  // lookup
  input  tlb_req_t         req,
  output logic             resp_valid,
  output tlb_resp_e        resp,
  output logic [PPN_W-1:0] resp_ppn,
  // safe access bit clearing
  input  logic             clear_priv,
  input  logic             clear_reset,
  // page walker
  output logic             ptw_req_valid,
  output logic [VPN_W-1:0] ptw_req_vpn,
  input  logic             ptw_req_ready,
  input  logic             refill_valid,
  input  logic [VPN_W-1:0] refill_vpn,
  input  pte_t             refill_pte,
  // observation
  output logic             ev_safe_set,     // a safe access bit was newly set
  output logic [SW-1:0]    trust_domain_pages
);

  typedef enum logic [1:0] {W_IDLE, W_REQ, W_WAIT} walk_e;

  logic [ENTRIES-1:0]             valid_q, safe_q;
  logic [ENTRIES-1:0][VPN_W-1:0]  vpn_q;
  pte_t [ENTRIES-1:0]             pte_q;
  logic [EW-1:0]                  rr_q;
  walk_e                          walk_q;
  logic [VPN_W-1:0]               walk_vpn_q;

  // ------------------------------------------------------------- lookup
  logic          hit;
  logic [EW-1:0] hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (valid_q[e] && vpn_q[e] == req.vpn) begin
        hit     = 1'b1;
        hit_idx = EW'(e);
      end
  end

  pte_t      hpte;
  logic      fault;
  tlb_resp_e outcome;
  logic      set_safe;
  assign hpte  = pte_q[hit_idx];
  assign fault = !hpte.present || !hpte.readable || (priv == PRIV_U && !hpte.user);

  always_comb begin
    set_safe = 1'b0;
    if (!hit)                                         outcome = TLB_MISS;
    else if (okapi_en && req.unsafe && !safe_q[hit_idx]) outcome = TLB_BLOCKED;
    else if (fault)                                   outcome = TLB_FAULT;
    else begin
      outcome  = TLB_HIT;
      set_safe = !req.unsafe && !req.okapi_load;
    end
  end

  // ------------------------------------------------------------- refill
  logic [EW-1:0] victim;
  logic          have_free;
  always_comb begin
    have_free = 1'b0;
    victim    = rr_q;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (!valid_q[e]) begin
        have_free = 1'b1;
        victim    = EW'(e);
      end
  end

  assign ptw_req_valid = (walk_q == W_REQ);
  assign ptw_req_vpn   = walk_vpn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q    <= '0;
      safe_q     <= '0;
      vpn_q      <= '0;
      pte_q      <= '0;
      rr_q       <= '0;
      walk_q     <= W_IDLE;
      walk_vpn_q <= '0;
      resp_valid <= 1'b0;
      resp       <= TLB_MISS;
      resp_ppn   <= '0;
      ev_safe_set <= 1'b0;
    end else begin
      resp_valid  <= req.valid;
      resp        <= outcome;
      resp_ppn    <= hpte.ppn;
      ev_safe_set <= 1'b0;
      // safe access bit update; clearing takes priority
      if (clear_priv || clear_reset) begin
        safe_q <= '0;
      end else if (req.valid && set_safe) begin
        safe_q[hit_idx] <= 1'b1;
        ev_safe_set     <= !safe_q[hit_idx];
      end
      // page walk control
      unique case (walk_q)
        W_IDLE: if (req.valid && !hit) begin
          walk_q     <= W_REQ;
          walk_vpn_q <= req.vpn;
        end
        W_REQ:  if (ptw_req_ready) walk_q <= W_WAIT;
        W_WAIT: ;
        default: walk_q <= W_IDLE;
      endcase
      if (refill_valid) begin
        valid_q[victim] <= 1'b1;
        vpn_q[victim]   <= refill_vpn;
        pte_q[victim]   <= refill_pte;
        if (!(clear_priv || clear_reset)) safe_q[victim] <= 1'b0;
        if (!have_free) rr_q <= (rr_q == EW'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
        walk_q <= W_IDLE;
      end
    end
  end

  always_comb trust_domain_pages = SW'($countones(safe_q));

  // a refill answers the walk in progress
  a_refill_matches_walk: assert property (@(posedge clk) disable iff (!rst_n)
    refill_valid |-> (walk_q == W_WAIT && refill_vpn == walk_vpn_q));
  // the page walker request is held until accepted
  a_ptw_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (ptw_req_valid && !ptw_req_ready) |=> (ptw_req_valid && $stable(ptw_req_vpn)));

endmodule
