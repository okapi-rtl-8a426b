// tb_okapi_lsq: directed scenarios for the load queue and its Okapi gate.
// The ROB flags and wake-up vector are driven directly; a small TLB model
// answers every request one cycle later from the page number:
//   vpn < 0x100          hit
//   0x100 .. 0x1ff       blocked while the load is unsafe (Okapi on), else hit
//   0x200 .. 0x2ff       miss the first time, hit afterwards
//   0x300 and above      fault
// The scenarios check that suspicious_load and fence-blocked loads never
// reach the TLB, that refused loads park in the right state and leave it only
// when woken, that the oldest ready load goes first, the physical address
// sent to the data cache, squash and commit bookkeeping (including a DTLB
// response that arrives in the squash cycle for a surviving load), and that
// with Okapi off the gate lets everything through.
module tb_okapi_lsq;
  import okapi_pkg::*;
  localparam int N = 32, ROB = 192, DW = 5, CWD = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic okapi_en;
  logic [DW-1:0] alloc_valid, alloc_okapi;
  logic [DW-1:0][7:0] alloc_rob_idx;
  logic alloc_ready;
  logic [DW-1:0][4:0] alloc_lq_idx;
  logic agu_valid;
  logic [4:0] agu_lq_idx;
  logic [VADDR_W-1:0] agu_vaddr;
  logic [7:0] rob_head;
  logic [ROB-1:0] unsafe, susp_load, fence_blk;
  logic [N-1:0] wake;
  lq_state_e [N-1:0] lq_state;
  logic [N-1:0][7:0] lq_rob_idx;
  tlb_req_t tlb_req;
  logic tlb_resp_valid;
  tlb_resp_e tlb_resp;
  logic [PPN_W-1:0] tlb_resp_ppn;
  logic tlb_busy, ld_res_valid, dc_req_valid, dc_req_unsafe, fault_valid;
  logic [7:0] ld_res_rob_idx, dc_req_rob_idx, fault_rob_idx;
  logic [4:0] dc_req_lq_idx;
  logic [PADDR_W-1:0] dc_req_paddr;
  logic [3:0] commit_cnt;
  logic squash_valid, squash_all;
  logic [7:0] squash_rob_idx;
  logic ev_blk_susp, ev_blk_fence, ev_blk_unsafe, ev_miss, ev_spec_hit;
  logic [5:0] count;

  okapi_lsq #(.N(N), .ROB_N(ROB), .DISPATCH_W(DW), .COMMIT_W(CWD)) dut (.*);

  // ---------------------------------------------------------------- TLB model
  bit walked[int];
  always_ff @(posedge clk) begin
    tlb_resp_valid <= tlb_req.valid;
    tlb_resp_ppn   <= PPN_W'(tlb_req.vpn) + 'h5000;
    if (tlb_req.vpn < 'h100) tlb_resp <= TLB_HIT;
    else if (tlb_req.vpn < 'h200) tlb_resp <= (okapi_en && tlb_req.unsafe) ? TLB_BLOCKED : TLB_HIT;
    else if (tlb_req.vpn < 'h300) begin
      if (walked.exists(int'(tlb_req.vpn))) tlb_resp <= TLB_HIT;
      else begin tlb_resp <= TLB_MISS; walked[int'(tlb_req.vpn)] = 1; end
    end else tlb_resp <= TLB_FAULT;
  end

  // ------------------------------------------------------------ monitors
  int checks = 0, failures = 0;
  int lq_map[int];        // load queue slot given to a ROB index at its latest allocation
  int sent[int];          // TLB requests per ROB index
  bit sent_unsafe[int];
  int order[$];           // ROB indices in TLB request order
  int dc_seen[int];
  logic [PADDR_W-1:0] dc_addr[int];
  int faults[int];
  int n_ev_susp, n_ev_fence, n_ev_unsafe, n_ev_miss, n_ev_spec;

  // a lookup issued in one cycle shows its entry as the only in-flight one
  // in the next cycle
  bit req_q, req_unsafe_q;
  always @(posedge clk) if (!rst_n) req_q <= 0; else begin
    req_q <= tlb_req.valid;
    req_unsafe_q <= tlb_req.unsafe;
    if (req_q) begin
      int r;
      r = -1;
      for (int i = 0; i < N; i++)
        if (lq_state[i] == LQ_INFLIGHT && lq_of(int'(lq_rob_idx[i])) == i) r = int'(lq_rob_idx[i]);
      sent[r] = sent.exists(r) ? sent[r] + 1 : 1;
      sent_unsafe[r] = req_unsafe_q;
      order.push_back(r);
    end
    if (dc_req_valid) begin dc_seen[int'(dc_req_rob_idx)] = 1; dc_addr[int'(dc_req_rob_idx)] = dc_req_paddr; end
    if (fault_valid) faults[int'(fault_rob_idx)] = 1;
    n_ev_susp += ev_blk_susp; n_ev_fence += ev_blk_fence; n_ev_unsafe += ev_blk_unsafe;
    n_ev_miss += ev_miss; n_ev_spec += ev_spec_hit;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("%t FAIL: %s", $time, m); end
  endtask

  function automatic int lq_of(input int rob);
    if (lq_map.exists(rob) && int'(lq_rob_idx[lq_map[rob]]) == rob) return lq_map[rob];
    return -1;
  endfunction

  task automatic expect_state(input int rob, input lq_state_e s);
    int i;
    i = lq_of(rob);
    chk(i >= 0 && lq_state[i] == s,
        $sformatf("rob %0d state %s expected %s", rob, (i >= 0) ? lq_state[i].name() : "none", s.name()));
  endtask

  task automatic alloc(input int first_rob, input int n, input logic [DW-1:0] okapi);
    @(negedge clk);
    for (int l = 0; l < DW; l++) begin
      alloc_valid[l]   = l < n;
      alloc_rob_idx[l] = 8'(first_rob + l);
      alloc_okapi[l]   = okapi[l];
    end
    #1;
    chk(alloc_ready, "alloc_ready");
    for (int l = 0; l < n; l++) lq_map[first_rob + l] = int'(alloc_lq_idx[l]);
    @(negedge clk);
    alloc_valid = '0;
  endtask

  task automatic agu(input int rob, input logic [VADDR_W-1:0] va);
    @(negedge clk);
    agu_valid = 1; agu_lq_idx = 5'(lq_of(rob)); agu_vaddr = va;
    @(negedge clk);
    agu_valid = 0;
  endtask

  task automatic wake_rob(input int rob);
    @(negedge clk);
    wake = '0; wake[lq_of(rob)] = 1;
    @(negedge clk);
    wake = '0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    okapi_en = 1; alloc_valid = '0; alloc_okapi = '0; alloc_rob_idx = '0; agu_valid = 0;
    agu_lq_idx = '0; agu_vaddr = '0; rob_head = 8'd10; unsafe = '0; susp_load = '0;
    fence_blk = '0; wake = '0; commit_cnt = '0; squash_valid = 0; squash_all = 0;
    squash_rob_idx = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // ---------------- scenario 1: the gate
    // loads at ROB 10..14; 11 suspicious_load, 12 behind a fence, 11..14 unsafe
    unsafe[14:11] = '1; susp_load[11] = 1; fence_blk[12] = 1;
    alloc(10, 5, 5'b00100);
    chk(count == 5, "count after alloc");
    chk(lq_of(10) == 0 && lq_of(14) == 4, "first lq indices");
    agu(10, 48'h0000_0001_0abc);   // vpn 0x10 hit
    agu(11, 48'h0000_0001_1008);   // vpn 0x11 hit but suspicious_load
    agu(12, 48'h0000_0015_0010);   // vpn 0x150 blocked while unsafe (OkapiLoad)
    agu(13, 48'h0000_0020_0020);   // vpn 0x200 miss
    agu(14, 48'h0000_0030_0030);   // vpn 0x300 fault
    repeat (4) @(negedge clk);
    expect_state(10, LQ_DONE);
    expect_state(11, LQ_BLK_SUSP);
    expect_state(12, LQ_BLK_FENCE);
    expect_state(13, LQ_BLK_MISS);
    expect_state(14, LQ_DONE);
    chk(!sent.exists(11), "suspicious_load reached the TLB");
    chk(!sent.exists(12), "fence-blocked load reached the TLB");
    chk(dc_seen.exists(10) && dc_addr[10] == {PPN_W'('h10 + 'h5000), 12'habc}, "dc request of rob 10");
    chk(sent.exists(10) && !sent_unsafe[10], "rob 10 sent as safe");
    chk(faults.exists(14) && !dc_seen.exists(14), "fault of rob 14");
    // parked loads stay parked without a wake
    repeat (5) @(negedge clk);
    expect_state(11, LQ_BLK_SUSP);
    expect_state(12, LQ_BLK_FENCE);
    // suspicious flag clears: load 11 goes speculatively and hits
    susp_load[11] = 0;
    wake_rob(11);
    repeat (3) @(negedge clk);
    expect_state(11, LQ_DONE);
    chk(sent.exists(11) && sent_unsafe[11], "rob 11 sent as unsafe after wake");
    // fence executes: OkapiLoad 12 goes, is refused (page not in trust domain)
    fence_blk[12] = 0;
    wake_rob(12);
    repeat (3) @(negedge clk);
    expect_state(12, LQ_BLK_UNSAFE);
    // it becomes safe: translated
    unsafe[12] = 0;
    wake_rob(12);
    repeat (3) @(negedge clk);
    expect_state(12, LQ_DONE);
    chk(sent[12] == 2 && !sent_unsafe[12], "rob 12 retried as safe");
    // refill wakes the missed load
    wake_rob(13);
    repeat (3) @(negedge clk);
    expect_state(13, LQ_DONE);
    chk(sent[13] == 2, "rob 13 retried once");
    // commit all five
    @(negedge clk); commit_cnt = 4'd5;
    @(negedge clk); commit_cnt = '0;
    chk(count == 0, "count after commit");

    // ---------------- scenario 2: oldest ready load first
    rob_head = 8'd20; unsafe = '0;
    alloc(20, 2, '0);
    agu(21, 48'h0000_0021_0000);   // younger first: vpn 0x210 miss
    agu(20, 48'h0000_0022_0000);   // vpn 0x220 miss
    repeat (3) @(negedge clk);
    expect_state(20, LQ_BLK_MISS);
    expect_state(21, LQ_BLK_MISS);
    order.delete();
    @(negedge clk); wake = '0; wake[lq_of(20)] = 1; wake[lq_of(21)] = 1;
    @(negedge clk); wake = '0;
    repeat (4) @(negedge clk);
    chk(order.size() == 2 && order[0] == 20 && order[1] == 21, "oldest ready first");
    @(negedge clk); commit_cnt = 4'd2;
    @(negedge clk); commit_cnt = '0;

    // ---------------- scenario 3: squash
    rob_head = 8'd30;
    alloc(30, 4, '0);
    @(negedge clk); squash_valid = 1; squash_rob_idx = 8'd31;
    @(negedge clk); squash_valid = 0;
    chk(count == 2, "count after squash");
    alloc(32, 1, '0);
    chk(lq_of(32) == (lq_of(30) + 2) % N, "slot reuse after squash");
    @(negedge clk); squash_valid = 1; squash_all = 1;
    @(negedge clk); squash_valid = 0; squash_all = 0;
    chk(count == 0, "count after full squash");

    // ---------------- scenario 4: Okapi switched off
    okapi_en = 0; rob_head = 8'd40;
    unsafe[41:40] = '1; susp_load[40] = 1; fence_blk[41] = 1;
    alloc(40, 2, '0);
    agu(40, 48'h0000_0001_2000);
    agu(41, 48'h0000_0016_0000);
    repeat (3) @(negedge clk);
    expect_state(40, LQ_DONE);
    expect_state(41, LQ_DONE);
    chk(sent.exists(40) && sent.exists(41), "Okapi off: loads reach the TLB");

    // ---------------- scenario 5: squash in the cycle of a DTLB response
    // The load at ROB 50 is older than the squash point, so its response
    // must still complete it; the load at ROB 51 is squashed.
    okapi_en = 1;
    alloc(50, 2, '0);
    agu(50, 48'h0000_0003_0040);
    @(negedge clk); squash_valid = 1; squash_rob_idx = 8'd50;
    #1;
    chk(dc_req_valid && dc_req_rob_idx == 8'd50, "response kept in the squash cycle");
    @(negedge clk); squash_valid = 0;
    expect_state(50, LQ_DONE);
    chk(count == 3, $sformatf("count after squash in response cycle: %0d", count));

    chk(n_ev_susp == 1 && n_ev_fence == 1, $sformatf("gate events %0d %0d", n_ev_susp, n_ev_fence));
    chk(n_ev_unsafe == 1, $sformatf("blocked events %0d", n_ev_unsafe));
    chk(n_ev_miss == 3, $sformatf("miss events %0d", n_ev_miss));
    chk(n_ev_spec >= 1, "speculative hit event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
