// okapi_top: the Okapi extensions of an out-of-order core, wired together.
//
// Okapi lets a load execute speculatively only if its data page already
// belongs to the current trust domain: the pages the running software has
// accessed non-speculatively since the trust domain was last emptied.  This
// module holds every piece of logic the scheme adds to a core and connects
// them; the rest of the core (branch prediction, rename, issue, execution,
// caches, page walker) stays outside and talks to it through the ports.
//
//   fetch bundle -> okapi_page_cross (suspicious flag)
//                -> okapi_decode per lane (class bits, Okapi instructions)
//                -> okapi_rob_tracker (visibility point, unsafe /
//                   suspicious_load / fence flags) and okapi_lsq (loads)
//   okapi_lsq    -> okapi_tlb (safe access bits)  -> data cache request
//   okapi_wakeup    reschedules parked loads
//   okapi_priv_monitor and okapi_reset_ctrl empty the trust domain on a
//   privilege switch and on OkapiReset.
//
// Core interface (all synchronous to clk):
//   fetch_*      a bundle of FETCH_W instructions (pc, predicted next pc,
//                instruction word), valid lanes contiguous.  It is taken in
//                the cycle fetch_ready is high; disp_* then give each lane its
//                ROB index, load queue index and decoded class bits.
//   redirect_*   front-end redirect (resolved branch target or trap vector).
//   res_*        speculation sources resolved by the core (branches, stores,
//                other instructions that can trap).  Loads resolve inside.
//   agu_*        virtual address of a load queue entry.
//   commit_cnt   number of ROB entries the core retires this cycle; the core
//                must not retire an OkapiReset before reset_done.
//   squash_*     squash everything younger than squash_rob_idx, or all.
//   ptw_*, refill_*  page walker port of the DTLB.
//   dc_req_*     translated load sent to the data cache (load complete for
//                the core); fault_* a load translation fault.
//   ev           one-cycle event pulses for performance counters.
// The Okapi protections can be switched off with okapi_en = 0.
//
// Timing: a bundle is taken in the cycle fetch_ready is high, and its ROB
// flags are valid the next cycle.  A load with a ready address makes its
// DTLB lookup at the earliest one cycle later.  The DTLB outcome comes in the
// following cycle: dc_req, a parked state, or a page walk.  A safe access bit
// is set at the end of the lookup cycle.  OkapiReset needs two cycles once it
// is at the ROB head and the DTLB is idle: one clear cycle, then reset_done.
// A privilege change empties the trust domain one cycle after priv changes.
//
// From the paper: the per-page safe access bit in the DTLB; who may set it;
// refusing unsafe loads at the DTLB; the fetch page-crossing check and the
// suspicious_load rule; the ROB visibility point; OkapiReset / OkapiLoad;
// clearing on privilege change; rescheduling of blocked loads; sizes (192
// ROB, 32 LQ, 64 DTLB entries, 5-wide front end, 8-wide commit).
// Own choices (the paper does not say): instruction encodings, physical
// address width, one DTLB lookup per cycle, parked loads held in the load
// queue, registered DTLB response, resolve width 8.
//
// Tool notes: lane_cross of okapi_page_cross is a debug output left
// unconnected here on purpose (PINCONNECTEMPTY).  rst_n also appears in the
// "disable iff" clauses of the assertions, which tools report as rst_n
// being used both synchronously and asynchronously (SYNCASYNCNET).  It is a
// simulation-only use; the circuit uses rst_n only as an asynchronous reset.
module okapi_top
  import okapi_pkg::*;
#(
  parameter int unsigned FETCH_W     = DEF_DISPATCH_W,
  parameter int unsigned ROB_N       = DEF_ROB_ENTRIES,
  parameter int unsigned LQ_N        = DEF_LQ_ENTRIES,
  parameter int unsigned TLB_N       = DEF_TLB_ENTRIES,
  parameter int unsigned COMMIT_W    = DEF_COMMIT_W,
  parameter int unsigned RESOLVE_W   = DEF_RESOLVE_W,
  localparam int unsigned IW = $clog2(ROB_N),
  localparam int unsigned LW = $clog2(LQ_N),
  localparam int unsigned KW = $clog2(COMMIT_W + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             okapi_en,
  input  priv_e                            priv,
  // fetch / dispatch
  input  logic [FETCH_W-1:0]               fetch_valid,
  input  logic [FETCH_W-1:0][VADDR_W-1:0]  fetch_pc,
  input  logic [FETCH_W-1:0][VADDR_W-1:0]  fetch_npc,
  input  logic [FETCH_W-1:0][31:0]         fetch_inst,
  output logic                             fetch_ready,
  output logic [FETCH_W-1:0][IW-1:0]       disp_rob_idx,
  output logic [FETCH_W-1:0][LW-1:0]       disp_lq_idx,
  output uop_t [FETCH_W-1:0]               disp_uop,
  input  logic                             redirect_valid,
  input  logic [VADDR_W-1:0]               redirect_from_pc,
  input  logic [VADDR_W-1:0]               redirect_to_pc,
  // speculation resolution, address generation, commit, squash
  input  logic [RESOLVE_W-1:0]             res_valid,
  input  logic [RESOLVE_W-1:0][IW-1:0]     res_idx,
  input  logic                             agu_valid,
  input  logic [LW-1:0]                    agu_lq_idx,
  input  logic [VADDR_W-1:0]               agu_vaddr,
  input  logic [KW-1:0]                    commit_cnt,
  input  logic                             squash_valid,
  input  logic                             squash_all,
  input  logic [IW-1:0]                    squash_rob_idx,
  // page walker
  output logic                             ptw_req_valid,
  output logic [VPN_W-1:0]                 ptw_req_vpn,
  input  logic                             ptw_req_ready,
  input  logic                             refill_valid,
  input  logic [VPN_W-1:0]                 refill_vpn,
  input  pte_t                             refill_pte,
  // data cache / completion
  output logic                             dc_req_valid,
  output logic [LW-1:0]                    dc_req_lq_idx,
  output logic [IW-1:0]                    dc_req_rob_idx,
  output logic [PADDR_W-1:0]               dc_req_paddr,
  output logic                             dc_req_unsafe,
  output logic                             fault_valid,
  output logic [IW-1:0]                    fault_rob_idx,
  // status
  output logic [IW-1:0]                    rob_head,
  output logic                             head_reset_pending,
  output logic                             reset_done,
  output logic                             vp_valid,
  output logic [IW-1:0]                    vp_idx,
  output logic [$clog2(TLB_N+1)-1:0]       trust_domain_pages,
  output logic [$clog2(ROB_N+1)-1:0]       rob_count,
  output logic [$clog2(LQ_N+1)-1:0]        lq_count,
  output logic [31:0]                      priv_switches,
  output logic [31:0]                      resets_executed,
  output okapi_ev_t                        ev
);

  // ------------------------------------------------------------ front end
  logic [FETCH_W-1:0] lane_susp;
  logic               rob_ready, lq_ready, fire;

  assign fetch_ready = rob_ready && lq_ready && !squash_valid;
  assign fire        = fetch_ready && (fetch_valid != '0);

  okapi_page_cross #(.FETCH_W(FETCH_W)) u_page_cross (
    .clk, .rst_n,
    .lane_valid      (fetch_valid),
    .lane_pc         (fetch_pc),
    .lane_npc        (fetch_npc),
    .fire,
    .redirect_valid,
    .redirect_from_pc,
    .redirect_to_pc,
    .lane_suspicious (lane_susp),
    .lane_cross      ()
  );

  for (genvar l = 0; l < FETCH_W; l++) begin : g_dec
    okapi_decode u_decode (
      .inst       (fetch_inst[l]),
      .suspicious (lane_susp[l]),
      .uop        (disp_uop[l])
    );
  end

  // ------------------------------------------------------------ ROB tracker
  logic [FETCH_W-1:0]  disp_v, lq_alloc_v, lq_alloc_okapi;
  logic [ROB_N-1:0]    unsafe, susp_load, fence_blk;
  logic [KW-1:0]       commit_lq_cnt;
  logic                ld_res_valid;
  logic [IW-1:0]       ld_res_rob_idx;
  logic                rst_clear;

  always_comb begin
    for (int l = 0; l < FETCH_W; l++) begin
      disp_v[l]         = fire && fetch_valid[l];
      lq_alloc_v[l]     = disp_v[l] && (disp_uop[l].is_load || disp_uop[l].is_okapi_load);
      lq_alloc_okapi[l] = disp_uop[l].is_okapi_load;
    end
  end

  okapi_rob_tracker #(
    .N(ROB_N), .DISPATCH_W(FETCH_W), .COMMIT_W(COMMIT_W), .RESOLVE_W(RESOLVE_W)
  ) u_rob (
    .clk, .rst_n,
    .disp_valid   (disp_v),
    .disp_uop     (disp_uop),
    .disp_ready   (rob_ready),
    .disp_idx     (disp_rob_idx),
    .res_valid,
    .res_idx,
    .ld_res_valid,
    .ld_res_idx   (ld_res_rob_idx),
    .reset_done,
    .commit_cnt,
    .squash_valid,
    .squash_all,
    .squash_idx   (squash_rob_idx),
    .head         (rob_head),
    .count        (rob_count),
    .head_reset_pending,
    .vp_valid,
    .vp_idx,
    .commit_lq_cnt,
    .unsafe,
    .susp_load,
    .fence_blk
  );

  // ------------------------------------------------------------ load queue
  lq_state_e [LQ_N-1:0]       lq_state;
  logic [LQ_N-1:0][IW-1:0]    lq_rob_idx;
  logic [LQ_N-1:0]            wake;
  tlb_req_t                   tlb_req;
  logic                       tlb_resp_valid, tlb_busy;
  tlb_resp_e                  tlb_resp;
  logic [PPN_W-1:0]           tlb_resp_ppn;
  logic                       ev_safe_set, clear_priv;

  okapi_lsq #(
    .N(LQ_N), .ROB_N(ROB_N), .DISPATCH_W(FETCH_W), .COMMIT_W(COMMIT_W)
  ) u_lsq (
    .clk, .rst_n, .okapi_en,
    .alloc_valid    (lq_alloc_v),
    .alloc_rob_idx  (disp_rob_idx),
    .alloc_okapi    (lq_alloc_okapi),
    .alloc_ready    (lq_ready),
    .alloc_lq_idx   (disp_lq_idx),
    .agu_valid, .agu_lq_idx, .agu_vaddr,
    .rob_head,
    .unsafe, .susp_load, .fence_blk,
    .wake,
    .lq_state,
    .lq_rob_idx,
    .tlb_req,
    .tlb_resp_valid, .tlb_resp, .tlb_resp_ppn,
    .tlb_busy,
    .ld_res_valid, .ld_res_rob_idx,
    .dc_req_valid, .dc_req_lq_idx, .dc_req_rob_idx, .dc_req_paddr, .dc_req_unsafe,
    .fault_valid, .fault_rob_idx,
    .commit_cnt     (commit_lq_cnt),
    .squash_valid, .squash_all, .squash_rob_idx,
    .ev_blk_susp    (ev.blk_susp),
    .ev_blk_fence   (ev.blk_fence),
    .ev_blk_unsafe  (ev.blk_unsafe),
    .ev_miss        (ev.tlb_miss),
    .ev_spec_hit    (ev.spec_hit),
    .count          (lq_count)
  );

  okapi_wakeup #(.LQ_N(LQ_N), .ROB_N(ROB_N)) u_wakeup (
    .okapi_en,
    .lq_state,
    .lq_rob_idx,
    .unsafe, .susp_load, .fence_blk,
    .refill   (refill_valid),
    .wake
  );

  // ------------------------------------------------------------ DTLB
  okapi_tlb #(.ENTRIES(TLB_N)) u_tlb (
    .clk, .rst_n, .okapi_en, .priv,
    .req          (tlb_req),
    .resp_valid   (tlb_resp_valid),
    .resp         (tlb_resp),
    .resp_ppn     (tlb_resp_ppn),
    .clear_priv,
    .clear_reset  (rst_clear),
    .ptw_req_valid, .ptw_req_vpn, .ptw_req_ready,
    .refill_valid, .refill_vpn, .refill_pte,
    .ev_safe_set,
    .trust_domain_pages
  );

  // ------------------------------------------------- trust domain clearing
  okapi_priv_monitor u_priv (
    .clk, .rst_n,
    .priv,
    .clear_safe   (clear_priv),
    .switch_count (priv_switches)
  );

  okapi_reset_ctrl u_reset (
    .clk, .rst_n,
    .head_reset_pending,
    .tlb_busy,
    .flush        (squash_valid && squash_all),
    .clear_safe   (rst_clear),
    .reset_done,
    .reset_count  (resets_executed)
  );

  assign ev.safe_set    = ev_safe_set;
  assign ev.clear_priv  = clear_priv;
  assign ev.clear_reset = rst_clear;

endmodule
