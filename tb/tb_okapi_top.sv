// tb_okapi_top: end-to-end test of the Okapi logic at its default sizes
// (192-entry ROB, 32-entry load queue, 64-entry DTLB, 5-wide fetch/dispatch,
// 8-wide commit).  A behavioural model of the host core stands around it:
// it fetches a scripted instruction stream (RISC-V encodings), lets branches
// and stores resolve after a set delay, squashes the wrong path of a
// mispredicted branch, generates load addresses, marks instructions complete
// and commits them in order.  tb_ptw_model answers page walks.
//
// The script runs six phases:
//   1 Spectre-PHT: a slow mispredicted bounds check; the wrong path loads a
//     secret page (never accessed legally) and a public page of the trust
//     domain.  The secret load must be refused, the public one may proceed.
//   2 Spectre-BTB: the wrong path jumps to a gadget on another code page and
//     loads from a trust-domain page; the load must be held back in the load
//     queue.  A correct-path page crossing is delayed and then completes.
//   3 OkapiReset empties the trust domain; younger loads wait behind it; a
//     later wrong-path load to a page trusted before the reset is refused.
//   4 OkapiLoad reads the secret page legally without adding it to the trust
//     domain; a later wrong-path load to it is refused.
//   5 A privilege switch empties the trust domain.
//   6 Okapi switched off: the phase-1 attack now reaches the secret page.
//   7 40 rounds of random programs: loads over six user pages, stores,
//     slow branches, mispredictions whose wrong paths load from the secret
//     page, an unused page and a non-present page, jumps to other code pages,
//     OkapiResets, OkapiLoads, and a privilege flip every third round.
// Throughout, every speculative load that reaches the data cache while Okapi
// is on must target a page of the trust domain as tracked here from the
// safe loads, the OkapiResets and the privilege switches.  Each mechanism
// (suspicious_load hold, TLB refusal, fence hold, speculative hit, TLB miss,
// OkapiReset clear, privilege clear, squash, unprotected leak) is counted and
// must happen at least once; every correct-path instruction must commit.
module tb_okapi_top;
  import okapi_pkg::*;

  localparam int ROB = 192, FW = 5, RW = 8, CWD = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ------------------------------------------------------------ DUT ports
  logic okapi_en;
  priv_e priv;
  logic [FW-1:0] fetch_valid;
  logic [FW-1:0][VADDR_W-1:0] fetch_pc, fetch_npc;
  logic [FW-1:0][31:0] fetch_inst;
  logic fetch_ready;
  logic [FW-1:0][7:0] disp_rob_idx;
  logic [FW-1:0][4:0] disp_lq_idx;
  uop_t [FW-1:0] disp_uop;
  logic redirect_valid;
  logic [VADDR_W-1:0] redirect_from_pc, redirect_to_pc;
  logic [RW-1:0] res_valid;
  logic [RW-1:0][7:0] res_idx;
  logic agu_valid;
  logic [4:0] agu_lq_idx;
  logic [VADDR_W-1:0] agu_vaddr;
  logic [3:0] commit_cnt;
  logic squash_valid, squash_all;
  logic [7:0] squash_rob_idx;
  logic ptw_req_valid, ptw_req_ready, refill_valid;
  logic [VPN_W-1:0] ptw_req_vpn, refill_vpn;
  pte_t refill_pte;
  logic dc_req_valid, dc_req_unsafe, fault_valid;
  logic [4:0] dc_req_lq_idx;
  logic [7:0] dc_req_rob_idx, fault_rob_idx, rob_head, vp_idx;
  logic [PADDR_W-1:0] dc_req_paddr;
  logic head_reset_pending, reset_done, vp_valid;
  logic [6:0] trust_domain_pages;
  logic [7:0] rob_count;
  logic [5:0] lq_count;
  logic [31:0] priv_switches, resets_executed;
  okapi_ev_t ev;
  int walks;

  okapi_top dut (.*);

  tb_ptw_model #(.LATENCY(20)) ptw (
    .clk, .rst_n, .req_valid(ptw_req_valid), .req_vpn(ptw_req_vpn), .req_ready(ptw_req_ready),
    .refill_valid, .refill_vpn, .refill_pte, .walks);

  // ------------------------------------------------------------ program
  typedef enum int {K_ALU, K_LOAD, K_STORE, K_BRANCH, K_OKRESET, K_OKLOAD} kind_e;
  typedef struct {
    logic [VADDR_W-1:0] pc, npc, va, redirect_to;
    logic [31:0] inst;
    kind_e kind;
    int delay;
    bit mispredict, wp;
    int id;
  } instr_t;

  localparam logic [31:0] I_ADD = 32'h0031_01b3, I_LW = 32'h0001_2283, I_SW = 32'h0051_2023,
                          I_BEQ = 32'h0000_0463, I_JAL = 32'h0000_006f,
                          I_OKRESET = 32'h0000_700b, I_OKLOAD = 32'h0001_22ab;

  // data pages (virtual page numbers; all present, readable, user)
  localparam logic [VADDR_W-1:0] PUB_A  = 48'h0010_0040, PUB_B = 48'h0010_1080,
                                 PROBE  = 48'h0010_4100, PUB_C = 48'h0010_5200,
                                 SECRET = 48'h0020_0010;
  localparam logic [VADDR_W-1:0] CODE0 = 48'h0040_0000, CODE1 = 48'h0041_0000,
                                 GADGET = 48'h0050_0000;

  instr_t prog[$];
  logic [VADDR_W-1:0] cur_pc;
  int next_id = 0, n_correct = 0, n_resets = 0;
  bit in_wp = 0;

  function automatic void emit(input kind_e k, input logic [VADDR_W-1:0] va = '0,
                               input int delay = 2);
    instr_t i;
    i.pc = cur_pc; i.npc = cur_pc + 4; i.va = va; i.redirect_to = '0;
    i.kind = k; i.delay = delay; i.mispredict = 0; i.wp = in_wp; i.id = next_id++;
    case (k)
      K_ALU:     i.inst = I_ADD;
      K_LOAD:    i.inst = I_LW;
      K_STORE:   i.inst = I_SW;
      K_BRANCH:  i.inst = I_BEQ;
      K_OKRESET: i.inst = I_OKRESET;
      default:   i.inst = I_OKLOAD;
    endcase
    if (!in_wp) n_correct++;
    if (!in_wp && k == K_OKRESET) n_resets++;
    prog.push_back(i);
    cur_pc = cur_pc + 4;
  endfunction

  // correctly predicted jump to another place
  function automatic void emit_jump(input logic [VADDR_W-1:0] target, input int delay = 3);
    emit(K_BRANCH, '0, delay);
    prog[$].inst = I_JAL;
    prog[$].npc  = target;
    cur_pc = target;
  endfunction

  // mispredicted branch: predicted to wrong_target, really falls through.
  // The wrong-path instructions are emitted by the caller between
  // begin_wrong_path and end_wrong_path.
  logic [VADDR_W-1:0] resume_pc;
  function automatic void begin_wrong_path(input logic [VADDR_W-1:0] wrong_target, input int delay);
    emit(K_BRANCH, '0, delay);
    prog[$].mispredict  = 1;
    prog[$].npc         = wrong_target;
    prog[$].redirect_to = cur_pc;
    resume_pc = cur_pc;
    cur_pc = wrong_target;
    in_wp = 1;
  endfunction
  function automatic void end_wrong_path();
    prog[$].npc = prog[$].pc + 4;
    in_wp = 0;
    cur_pc = resume_pc;
  endfunction

  // same page table as tb_ptw_model
  function automatic logic [PPN_W-1:0] ppn_of(input logic [VPN_W-1:0] vpn);
    return PPN_W'(vpn * 3 + 'h100);
  endfunction

  localparam logic [VPN_W-1:0] USER_PAGES[6] = '{36'h100, 36'h101, 36'h104, 36'h105, 36'h108, 36'h10a};
  // random data address; wrong-path loads may also pick the secret page, a
  // page the program never uses and a page that is not present
  function automatic logic [VADDR_W-1:0] rand_va(input bit wrong_path);
    logic [VPN_W-1:0] vpn;
    int t;
    t = $urandom_range(wrong_path ? 8 : 5);
    if (t < 6) vpn = USER_PAGES[t];
    else if (t == 6) vpn = vpn_of(SECRET);
    else if (t == 7) vpn = 36'h300;
    else vpn = 36'h103;
    return {vpn, 12'($urandom_range(1023) * 4)};
  endfunction

  // ------------------------------------------------------------ host state
  bit          r_valid[ROB], r_done[ROB], r_res_pend[ROB], r_wp[ROB], r_mis[ROB];
  int          r_res_at[ROB], r_id[ROB];
  kind_e       r_kind[ROB];
  logic [VADDR_W-1:0] r_va[ROB], r_pc[ROB], r_redir[ROB];
  int          inflight[$];
  typedef struct { int rob; int id; int lq; int at; } agu_t;
  agu_t        agu_q[$];
  int          now = 0;

  // trust domain as seen by the test
  bit trust[logic [VPN_W-1:0]];

  int checks = 0, failures = 0;
  int committed = 0, committed_wp = 0;
  int n_susp, n_fence, n_unsafe_blk, n_spec_hit, n_miss, n_clr_reset, n_clr_priv, n_squash;
  int n_secret_leak_protected, n_secret_leak_unprotected, n_gadget_hit, n_fault_wp;
  int n_safe_set;
  int n_priv_flips = 0;
  bit last_wp;        // last fetched instruction was on a wrong path
  bit last_cross;     // expected suspicious flag of the next fetched instruction

  task automatic fail(input string m);
    failures++;
    if (failures < 20) $display("[%0d] FAIL %s", now, m);
  endtask

  function automatic int age(input int idx);
    return (idx - int'(rob_head) + ROB) % ROB;
  endfunction

  // one simulated clock cycle of the host core
  task automatic step();
    int mis_idx;
    int nres;
    @(negedge clk);
    now++;
    fetch_valid = '0; res_valid = '0; agu_valid = 0; commit_cnt = '0;
    squash_valid = 0; squash_all = 0; redirect_valid = 0;
    // -------- resolutions, oldest mispredict squashes
    mis_idx = -1;
    nres = 0;
    foreach (inflight[k]) begin
      int r;
      r = inflight[k];
      if (r_res_pend[r] && r_res_at[r] <= now && nres < RW) begin
        res_valid[nres] = 1; res_idx[nres] = 8'(r); nres++;
        if (r_mis[r] && mis_idx < 0) mis_idx = r;
      end
    end
    if (mis_idx >= 0) begin
      squash_valid = 1; squash_rob_idx = 8'(mis_idx);
      redirect_valid = 1; redirect_from_pc = r_pc[mis_idx]; redirect_to_pc = r_redir[mis_idx];
    end else begin
      // -------- commit
      int n;
      n = 0;
      while (n < CWD && n < inflight.size() && r_done[inflight[n]]) n++;
      commit_cnt = 4'(n);
      // -------- fetch / dispatch
      // the wrong path ends where its mispredicted branch resolves: fetch
      // stalls there until the squash
      for (int l = 0; l < FW && l < prog.size(); l++) begin
        if (!prog[l].wp && (l == 0 ? last_wp : prog[l-1].wp)) break;
        fetch_valid[l] = 1;
        fetch_pc[l]    = prog[l].pc;
        fetch_npc[l]   = prog[l].npc;
        fetch_inst[l]  = prog[l].inst;
      end
    end
    // -------- address generation
    while (agu_q.size() > 0 && !(r_valid[agu_q[0].rob] && r_id[agu_q[0].rob] == agu_q[0].id))
      void'(agu_q.pop_front());
    if (agu_q.size() > 0 && agu_q[0].at <= now) begin
      agu_valid = 1; agu_lq_idx = 5'(agu_q[0].lq); agu_vaddr = r_va[agu_q[0].rob];
      void'(agu_q.pop_front());
    end
    #1;
    // -------- observe this cycle
    if (ev.blk_susp)   n_susp++;
    if (ev.blk_fence)  n_fence++;
    if (ev.blk_unsafe) n_unsafe_blk++;
    if (ev.spec_hit)   n_spec_hit++;
    if (ev.tlb_miss)   n_miss++;
    if (ev.safe_set)   n_safe_set++;
    if (dc_req_valid) begin
      int r;
      logic [VPN_W-1:0] vpn;
      r = int'(dc_req_rob_idx);
      vpn = vpn_of(r_va[r]);
      checks++;
      if (!r_valid[r] || !(r_kind[r] inside {K_LOAD, K_OKLOAD}) ||
          dc_req_paddr != {ppn_of(vpn), r_va[r][PAGE_SHIFT-1:0]})
        fail($sformatf("data cache request rob %0d paddr %h", r, dc_req_paddr));
      // the central property: speculative data accesses stay in the trust domain
      if (okapi_en && dc_req_unsafe) begin
        checks++;
        if (!trust.exists(vpn)) fail($sformatf("speculative load outside trust domain, vpn %h", vpn));
      end
      if (vpn == vpn_of(SECRET) && r_wp[r]) begin
        if (okapi_en) begin n_secret_leak_protected++; fail("wrong-path load reached the secret page"); end
        else n_secret_leak_unprotected++;
      end
      if (r_wp[r] && r_pc[r][VADDR_W-1:PAGE_SHIFT] == GADGET[VADDR_W-1:PAGE_SHIFT] && okapi_en) begin
        n_gadget_hit++; fail("gadget load on a foreign code page executed");
      end
      if (vpn == 36'h103) fail("data access to a page that is not present");
      if (!dc_req_unsafe && r_kind[r] == K_LOAD) trust[vpn] = 1;
      r_done[r] = 1;
    end
    if (fault_valid) begin
      // only wrong-path loads touch pages that fault; they are squashed later
      if (!r_wp[fault_rob_idx]) fail($sformatf("unexpected fault rob %0d", fault_rob_idx));
      else n_fault_wp++;
      r_done[fault_rob_idx] = 1;
    end
    if (ev.clear_reset) begin n_clr_reset++; trust.delete(); end
    if (ev.clear_priv)  begin n_clr_priv++;  trust.delete(); end
    if (reset_done) r_done[inflight[0]] = 1;
    // -------- update host state for the clock edge
    if (squash_valid) begin
      n_squash++;
      while (inflight[$] != mis_idx) begin
        r_valid[inflight[$]] = 0;
        void'(inflight.pop_back());
      end
      while (prog.size() > 0 && prog[0].wp) void'(prog.pop_front());
      last_wp = 0;
      last_cross = r_pc[mis_idx][VADDR_W-1:PAGE_SHIFT] != r_redir[mis_idx][VADDR_W-1:PAGE_SHIFT];
    end else begin
      for (int c = 0; c < int'(commit_cnt); c++) begin
        int r;
        r = inflight.pop_front();
        if (r_wp[r]) begin committed_wp++; fail("wrong-path instruction committed"); end
        committed++;
        r_valid[r] = 0;
      end
      if (fetch_ready) begin
        for (int l = 0; l < FW; l++) if (fetch_valid[l]) begin
          instr_t i;
          int r;
          i = prog.pop_front();
          r = int'(disp_rob_idx[l]);
          checks++;
          if (disp_uop[l].suspicious !== last_cross)
            fail($sformatf("suspicious flag of pc %h: %b expected %b", i.pc,
                           disp_uop[l].suspicious, last_cross));
          last_cross = i.pc[VADDR_W-1:PAGE_SHIFT] != i.npc[VADDR_W-1:PAGE_SHIFT];
          last_wp = i.wp;
          r_valid[r] = 1; r_id[r] = i.id; r_kind[r] = i.kind; r_va[r] = i.va; r_pc[r] = i.pc;
          r_wp[r] = i.wp; r_mis[r] = i.mispredict; r_redir[r] = i.redirect_to;
          r_done[r] = (i.kind == K_ALU);
          r_res_pend[r] = (i.kind == K_BRANCH || i.kind == K_STORE);
          r_res_at[r] = now + i.delay;
          inflight.push_back(r);
          if (i.kind == K_LOAD || i.kind == K_OKLOAD) begin
            agu_t a;
            a.rob = r; a.id = i.id; a.lq = int'(disp_lq_idx[l]); a.at = now + i.delay;
            agu_q.push_back(a);
          end
        end
      end
    end
    for (int k = 0; k < RW; k++) if (res_valid[k]) begin
      r_res_pend[res_idx[k]] = 0;
      if (r_kind[res_idx[k]] inside {K_BRANCH, K_STORE}) r_done[res_idx[k]] = 1;
    end
  endtask

  task automatic run_phase(input string name);
    int start;
    start = now;
    while (prog.size() > 0 || inflight.size() > 0) begin
      step();
      if (now - start > 20000) begin
        fail({"phase did not drain: ", name});
        if (inflight.size() > 0)
          $display("  head rob %0d kind %s done %0b res_pend %0b wp %0b va %h; prog %0d, agu %0d, rob_count %0d lq_count %0d, head_reset_pending %0b, ev %b",
                   inflight[0], r_kind[inflight[0]].name(), r_done[inflight[0]], r_res_pend[inflight[0]],
                   r_wp[inflight[0]], r_va[inflight[0]], prog.size(), agu_q.size(), rob_count, lq_count,
                   head_reset_pending, ev);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    repeat (3) step();
    $display("[%0d] phase %s done, trust domain %0d pages", now, name, trust_domain_pages);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    okapi_en = 1; priv = PRIV_U;
    fetch_valid = '0; fetch_pc = '0; fetch_npc = '0; fetch_inst = '0;
    redirect_valid = 0; redirect_from_pc = '0; redirect_to_pc = '0;
    res_valid = '0; res_idx = '0; agu_valid = 0; agu_lq_idx = '0; agu_vaddr = '0;
    commit_cnt = '0; squash_valid = 0; squash_all = 0; squash_rob_idx = '0;
    foreach (r_valid[i]) begin r_valid[i] = 0; r_done[i] = 0; r_res_pend[i] = 0; end
    last_cross = 0; last_wp = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cur_pc = CODE0;

    // ---------------- phase 1: Spectre-PHT
    emit(K_LOAD, PUB_A);
    emit(K_LOAD, PROBE);
    repeat (4) emit(K_ALU);
    emit(K_LOAD, PUB_A + 8);
    begin_wrong_path(cur_pc + 64, 60);        // slow bounds check, mistrained
      emit(K_LOAD, SECRET);                   // out-of-bounds read
      emit(K_ALU);
      emit(K_LOAD, PUB_A + 16);               // trusted page: may run ahead
      emit(K_LOAD, PROBE + 64);
    end_wrong_path();
    repeat (3) emit(K_ALU);
    emit(K_LOAD, PUB_B);
    emit(K_STORE, '0, 4);
    run_phase("spectre-pht");
    checks++;
    if (trust_domain_pages != 7'(trust.size())) fail("trust domain size after phase 1");

    // ---------------- phase 2: Spectre-BTB and a legal page crossing
    emit(K_BRANCH, '0, 50);                   // slow, correctly predicted
    begin_wrong_path(GADGET + 'h80, 60);      // poisoned indirect jump
      emit(K_LOAD, PUB_A + 24);               // gadget reads a trusted page
      emit(K_LOAD, PROBE + 128);
    end_wrong_path();
    emit(K_ALU);
    emit(K_BRANCH, '0, 40);                   // slow branch before a crossing
    emit_jump(CODE1 + 'h10);                  // legal call onto another code page
    emit(K_LOAD, PUB_B + 8);                  // delayed as suspicious, then runs
    emit(K_ALU);
    run_phase("spectre-btb");

    // ---------------- phase 3: OkapiReset
    emit(K_LOAD, PUB_C);
    emit(K_OKRESET);
    emit(K_LOAD, PUB_A + 32);                 // waits behind the reset
    emit(K_LOAD, PUB_B + 16);
    run_phase("okapi-reset-1");
    checks++;
    if (trust.exists(vpn_of(PUB_C)) || trust_domain_pages != 7'(trust.size()))
      fail("trust domain after OkapiReset");
    begin_wrong_path(cur_pc + 'h100, 60);
      emit(K_LOAD, PUB_C + 8);                // trusted before the reset only
    end_wrong_path();
    emit(K_ALU);
    run_phase("okapi-reset-2");

    // ---------------- phase 4: OkapiLoad
    emit(K_OKLOAD, SECRET + 4);               // legal vault access
    emit(K_LOAD, PUB_A + 40);                 // serialised behind it
    run_phase("okapi-load-1");
    checks++;
    if (trust.exists(vpn_of(SECRET))) fail("OkapiLoad added its page to the trust domain");
    begin_wrong_path(cur_pc + 'h100, 60);
      emit(K_LOAD, SECRET + 8);
    end_wrong_path();
    emit(K_ALU);
    run_phase("okapi-load-2");

    // ---------------- phase 5: privilege switch
    emit(K_LOAD, PUB_C + 16);
    run_phase("priv-1");
    priv = PRIV_S;                            // system call
    repeat (3) step();
    checks++;
    if (trust_domain_pages != 0) fail("trust domain not empty after privilege switch");
    begin_wrong_path(cur_pc + 'h100, 60);
      emit(K_LOAD, PUB_C + 24);               // user page trusted before the switch
    end_wrong_path();
    emit(K_ALU);
    run_phase("priv-2");
    priv = PRIV_U;
    repeat (3) step();

    // ---------------- phase 6: Okapi off, the phase-1 attack again
    okapi_en = 0;
    emit(K_LOAD, PUB_A);
    begin_wrong_path(cur_pc + 64, 60);
      emit(K_LOAD, SECRET);
    end_wrong_path();
    emit(K_ALU);
    run_phase("okapi-off");
    okapi_en = 1;

    // ---------------- phase 7: random programs, Okapi on
    // Correct-path loads use six user pages; wrong paths add the secret page,
    // a page outside the program and a non-present page.
    for (int round = 0; round < 40; round++) begin
      for (int k = 0; k < 150; k++) begin
        int t;
        t = $urandom_range(99);
        if (t < 35) emit(K_ALU);
        else if (t < 65) emit(K_LOAD, rand_va(0), $urandom_range(1, 6));
        else if (t < 72) emit(K_STORE, '0, $urandom_range(1, 10));
        else if (t < 82) emit(K_BRANCH, '0, $urandom_range(1, 40));
        else if (t < 92) begin
          int nwp;
          begin_wrong_path(cur_pc + 48'(4 * $urandom_range(2, 20)) +
                           ($urandom_range(3) == 0 ? 48'h0001_0000 : 48'h0), $urandom_range(5, 50));
          nwp = $urandom_range(1, 6);
          for (int w = 0; w < nwp; w++) begin
            if ($urandom_range(1) == 0) emit(K_LOAD, rand_va(1), $urandom_range(1, 4));
            else emit(K_ALU);
          end
          end_wrong_path();
        end
        else if (t < 95) emit_jump(cur_pc + 48'h0001_0000 + 48'(4 * $urandom_range(64)),
                                   $urandom_range(1, 20));
        else if (t < 97) emit(K_OKRESET);
        else emit(K_OKLOAD, rand_va(0), 2);
      end
      run_phase($sformatf("random-%0d", round));
      checks++;
      if (trust_domain_pages != 7'(trust.size()))
        fail($sformatf("trust domain %0d pages, expected %0d", trust_domain_pages, trust.size()));
      if (round % 3 == 2) begin
        priv = (priv == PRIV_U) ? PRIV_S : PRIV_U;
        n_priv_flips++;
        repeat (3) step();
      end
    end

    // ---------------- summary
    $display("committed %0d (expected %0d), squashes %0d, walks %0d", committed, n_correct,
             n_squash, walks);
    $display("events: suspicious hold %0d, fence hold %0d, TLB refusal %0d, speculative hit %0d,",
             n_susp, n_fence, n_unsafe_blk, n_spec_hit);
    $display("        TLB miss %0d, safe set %0d, reset clear %0d, privilege clear %0d, unprotected leak %0d,",
             n_miss, n_safe_set, n_clr_reset, n_clr_priv, n_secret_leak_unprotected);
    $display("        wrong-path faults %0d", n_fault_wp);
    checks++; if (committed != n_correct) fail("not every correct-path instruction committed");
    checks++; if (n_susp == 0)       fail("suspicious_load hold never happened");
    checks++; if (n_fence == 0)      fail("fence hold never happened");
    checks++; if (n_unsafe_blk == 0) fail("TLB refusal never happened");
    checks++; if (n_spec_hit == 0)   fail("speculative hit never happened");
    checks++; if (n_miss == 0)       fail("TLB miss never happened");
    checks++; if (n_safe_set == 0)   fail("safe bit never set");
    checks++; if (n_clr_reset == 0)  fail("OkapiReset clear never happened");
    checks++; if (n_clr_priv == 0)   fail("privilege clear never happened");
    checks++; if (n_squash < 6)      fail("too few squashes");
    checks++; if (n_secret_leak_unprotected == 0) fail("Okapi-off attack did not reach the secret");
    checks++; if (priv_switches != 2 + n_priv_flips || int'(resets_executed) != n_resets) fail("switch / reset counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
