// okapi_pkg: types and default sizes shared by the Okapi speculative-load
// protection logic.
//
// The sizes follow the simulated core configuration the Okapi design was
// evaluated on (192-entry ROB, 32-entry load queue, 64-entry DTLB, decode width
// 5, commit width 8, x86_64-sized 48-bit virtual addresses, 4 KiB pages).  The
// physical address width, the micro-op class bits and the TLB response codes
// are this implementation's own choices.
//
// Tool note: linted on its own, the package reports its DEF_* sizes as
// unused (UNUSEDPARAM) and the page-offset bits of vpn_of's argument as unused
// (UNUSEDSIGNAL).  The modules read the sizes, and vpn_of drops the offset on
// purpose.
package okapi_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned VADDR_W     = 48;   // virtual address width
  localparam int unsigned PADDR_W     = 52;   // physical address width
  localparam int unsigned PAGE_SHIFT  = 12;   // 4 KiB pages
  localparam int unsigned VPN_W       = VADDR_W - PAGE_SHIFT;
  localparam int unsigned PPN_W       = PADDR_W - PAGE_SHIFT;

  localparam int unsigned DEF_ROB_ENTRIES = 192;
  localparam int unsigned DEF_LQ_ENTRIES  = 32;
  localparam int unsigned DEF_TLB_ENTRIES = 64;
  localparam int unsigned DEF_DISPATCH_W  = 5;    // decode / dispatch width
  localparam int unsigned DEF_COMMIT_W    = 8;    // issue / commit width
  localparam int unsigned DEF_RESOLVE_W   = 8;    // speculation-resolve ports

  // ------------------------------------------------------ privilege levels
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // ------------------------------------------------ decoded micro-op class
  // Only the bits the Okapi logic needs travel with an instruction.
  typedef struct packed {
    logic is_load;        // ordinary load (sets the safe access bit when safe)
    logic is_store;
    logic is_branch;      // control-flow prediction: branch, jal, jalr
    logic is_okapi_load;  // OkapiLoad: load that never sets the safe access bit
    logic is_okapi_reset; // OkapiReset: clears all safe access bits at the ROB head
    logic opens_window;   // may open a transient window (mispredict / exception)
    logic suspicious;     // first instruction fetched on a newly entered code page
  } uop_t;

  // ------------------------------------------------------ DTLB interface
  typedef enum logic [1:0] {
    TLB_HIT     = 2'd0,   // translated; physical address valid
    TLB_BLOCKED = 2'd1,   // unsafe load, safe access bit clear: retry when safe
    TLB_MISS    = 2'd2,   // no entry: page walk requested, retry after refill
    TLB_FAULT   = 2'd3    // permission / not-present fault
  } tlb_resp_e;

  typedef struct packed {
    logic             valid;
    logic [VPN_W-1:0] vpn;
    logic             unsafe;      // load is still speculative
    logic             okapi_load;  // never set the safe access bit
  } tlb_req_t;

  typedef struct packed {
    logic [PPN_W-1:0] ppn;
    logic             readable;
    logic             user;        // accessible from U mode
    logic             present;
  } pte_t;

  // ------------------------------------------------- load queue entry state
  typedef enum logic [2:0] {
    LQ_ADDR_WAIT  = 3'd0,  // waiting for the address generation unit
    LQ_READY      = 3'd1,  // may be sent to the TLB
    LQ_INFLIGHT   = 3'd2,  // TLB lookup in progress
    LQ_BLK_SUSP   = 3'd3,  // held back by the LSQ: suspicious_load set
    LQ_BLK_FENCE  = 3'd4,  // held back: older OkapiReset / OkapiLoad pending
    LQ_BLK_UNSAFE = 3'd5,  // refused by the TLB: safe access bit clear
    LQ_BLK_MISS   = 3'd6,  // TLB miss, waiting for a refill
    LQ_DONE       = 3'd7   // translated (or faulted), waiting to commit
  } lq_state_e;

  // ------------------------------------------- observable Okapi events
  typedef struct packed {
    logic blk_susp;     // load held back in the LSQ: suspicious_load
    logic blk_fence;    // load held back behind OkapiReset / OkapiLoad
    logic blk_unsafe;   // speculative load refused by the TLB
    logic tlb_miss;     // load missed in the TLB
    logic spec_hit;     // speculative load translated (page in trust domain)
    logic safe_set;     // a page joined the trust domain
    logic clear_priv;   // trust domain emptied by a privilege switch
    logic clear_reset;  // trust domain emptied by OkapiReset
  } okapi_ev_t;

  // Virtual page number of a virtual address
  function automatic logic [VPN_W-1:0] vpn_of(input logic [VADDR_W-1:0] va);
    return va[PAGE_SHIFT +: VPN_W];
  endfunction

endpackage
