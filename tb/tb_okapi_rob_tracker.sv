// tb_okapi_rob_tracker: random dispatch / resolve / commit / squash traffic
// against a queue-based reference model of the visibility point.  The model
// keeps the in-flight instructions in program order and derives, for each,
// the expected unsafe, suspicious_load and fence flags with the rules:
// unsafe if an older instruction can still open a transient window;
// suspicious_load if it or an older instruction is suspicious and unsafe;
// fence-blocked if an older OkapiReset / OkapiLoad has not executed.  A
// 24-entry ROB (not a power of two, like the default 192) makes the indices
// wrap often.
module tb_okapi_rob_tracker;
  import okapi_pkg::*;
  localparam int N = 24, DW = 5, CWD = 8, RW = 8;
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DW-1:0] disp_valid;
  uop_t [DW-1:0] disp_uop;
  logic disp_ready;
  logic [DW-1:0][IW-1:0] disp_idx;
  logic [RW-1:0] res_valid;
  logic [RW-1:0][IW-1:0] res_idx;
  logic ld_res_valid;
  logic [IW-1:0] ld_res_idx;
  logic reset_done;
  logic [3:0] commit_cnt;
  logic squash_valid, squash_all;
  logic [IW-1:0] squash_idx;
  logic [IW-1:0] head;
  logic [$clog2(N+1)-1:0] count;
  logic head_reset_pending, vp_valid;
  logic [IW-1:0] vp_idx;
  logic [3:0] commit_lq_cnt;
  logic [N-1:0] unsafe, susp_load, fence_blk;

  okapi_rob_tracker #(.N(N), .DISPATCH_W(DW), .COMMIT_W(CWD), .RESOLVE_W(RW)) dut (
    .clk, .rst_n, .disp_valid, .disp_uop, .disp_ready, .disp_idx, .res_valid, .res_idx,
    .ld_res_valid, .ld_res_idx, .reset_done, .commit_cnt, .squash_valid, .squash_all,
    .squash_idx, .head, .count, .head_reset_pending, .vp_valid, .vp_idx, .commit_lq_cnt,
    .unsafe, .susp_load, .fence_blk);

  typedef struct {
    int idx;
    bit lq, open, susp, fence, is_reset;
  } ent_t;
  ent_t q[$];
  int tail_m = 0;
  int checks = 0, failures = 0;
  int n_unsafe, n_susp, n_fence, n_squash, n_reset;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string m);
    failures++;
    if (failures < 15) $display("%t %s", $time, m);
  endtask

  task automatic check_flags();
    bit so, ss, sf;
    so = 0; ss = 0; sf = 0;
    checks++;
    if (int'(count) != q.size()) fail($sformatf("count %0d expected %0d", count, q.size()));
    if (q.size() > 0 && int'(head) != q[0].idx) fail($sformatf("head %0d expected %0d", head, q[0].idx));
    checks++;
    begin
      bit vv; int vi;
      vv = 0; vi = 0;
      foreach (q[k]) if (q[k].open && !vv) begin vv = 1; vi = q[k].idx; end
      if (vp_valid !== vv || (vv && int'(vp_idx) != vi))
        fail($sformatf("vp %b/%0d expected %b/%0d", vp_valid, vp_idx, vv, vi));
    end
    foreach (q[k]) begin
      bit eu, es, ef;
      eu = so;
      ss = ss | (q[k].susp & so);
      es = ss;
      ef = sf;
      checks++;
      if (unsafe[q[k].idx] !== eu || susp_load[q[k].idx] !== es || fence_blk[q[k].idx] !== ef)
        fail($sformatf("entry %0d (age %0d): u/s/f %b%b%b expected %b%b%b", q[k].idx, k,
             unsafe[q[k].idx], susp_load[q[k].idx], fence_blk[q[k].idx], eu, es, ef));
      if (eu) n_unsafe++;
      if (es) n_susp++;
      if (ef) n_fence++;
      so = so | q[k].open;
      sf = sf | q[k].fence;
    end
    checks++;
    if (head_reset_pending !== (q.size() > 0 && q[0].is_reset && q[0].fence))
      fail("head_reset_pending");
  endtask

  function automatic uop_t rand_uop();
    uop_t u;
    int c;
    u = '0;
    c = $urandom_range(0, 99);
    if (c < 30)      u.is_load = 1;
    else if (c < 40) u.is_store = 1;
    else if (c < 55) u.is_branch = 1;
    else if (c < 59) u.is_okapi_load = 1;
    else if (c < 62) u.is_okapi_reset = 1;
    u.opens_window = u.is_load | u.is_store | u.is_branch | u.is_okapi_load | u.is_okapi_reset |
                     ($urandom_range(0, 9) == 0);
    u.suspicious = $urandom_range(0, 7) == 0;
    return u;
  endfunction

  initial begin
    disp_valid = '0; disp_uop = '0; res_valid = '0; res_idx = '0; ld_res_valid = 0;
    ld_res_idx = '0; reset_done = 0; commit_cnt = '0; squash_valid = 0; squash_all = 0;
    squash_idx = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      check_flags();
      // ---- choose this cycle's inputs
      disp_valid = '0; res_valid = '0; ld_res_valid = 0; reset_done = 0; commit_cnt = '0;
      squash_valid = 0; squash_all = 0;
      // resolutions of random in-flight entries (not OkapiResets)
      for (int r = 0; r < RW; r++)
        if (q.size() > 0 && $urandom_range(0, 3) == 0) begin
          int k;
          k = $urandom_range(0, q.size() - 1);
          if (!q[k].is_reset && !(q[k].lq)) begin res_valid[r] = 1; res_idx[r] = IW'(q[k].idx); end
        end
      if (q.size() > 0 && $urandom_range(0, 1) == 0) begin
        int k;
        k = $urandom_range(0, q.size() - 1);
        if (q[k].lq) begin ld_res_valid = 1; ld_res_idx = IW'(q[k].idx); end
      end
      if (head_reset_pending && $urandom_range(0, 1) == 0) reset_done = 1;
      if ($urandom_range(0, 49) == 0 && q.size() > 0) begin
        squash_valid = 1;
        squash_all   = $urandom_range(0, 3) == 0;
        squash_idx   = IW'(q[$urandom_range(0, q.size() - 1)].idx);
      end else begin
        // commit a prefix of entries that no longer open a window
        int n;
        n = 0;
        while (n < CWD && n < q.size() && !q[n].open && $urandom_range(0, 3) != 0) n++;
        commit_cnt = 4'(n);
        if (disp_ready) begin
          int nd;
          nd = $urandom_range(0, DW);
          for (int l = 0; l < DW; l++) begin
            disp_valid[l] = l < nd;
            disp_uop[l]   = rand_uop();
          end
        end
      end
      #1;
      if (commit_cnt != 0) begin
        int e;
        e = 0;
        for (int c = 0; c < int'(commit_cnt); c++) if (q[c].lq) e++;
        checks++;
        if (int'(commit_lq_cnt) != e) fail("commit_lq_cnt");
      end
      for (int l = 0; l < DW; l++) if (disp_valid[l]) begin
        checks++;
        if (int'(disp_idx[l]) != (tail_m + l) % N) fail("disp_idx");
      end
      // ---- model update (same order as the clock edge)
      for (int r = 0; r < RW; r++) if (res_valid[r])
        foreach (q[k]) if (q[k].idx == int'(res_idx[r])) q[k].open = 0;
      if (ld_res_valid)
        foreach (q[k]) if (q[k].idx == int'(ld_res_idx)) begin q[k].open = 0; q[k].fence = 0; end
      if (reset_done) begin q[0].open = 0; q[0].fence = 0; n_reset++; end
      if (squash_valid) begin
        n_squash++;
        if (squash_all) q.delete();
        else while (q[$].idx != int'(squash_idx)) void'(q.pop_back());
        tail_m = (q.size() == 0) ? (squash_all ? int'(head) : 0) : (q[$].idx + 1) % N;
        if (q.size() == 0 && squash_all) tail_m = int'(head);
      end else begin
        for (int c = 0; c < int'(commit_cnt); c++) void'(q.pop_front());
        for (int l = 0; l < DW; l++) if (disp_valid[l]) begin
          ent_t e;
          e.idx = tail_m;
          e.lq = disp_uop[l].is_load | disp_uop[l].is_okapi_load;
          e.open = disp_uop[l].opens_window;
          e.susp = disp_uop[l].suspicious;
          e.fence = disp_uop[l].is_okapi_reset | disp_uop[l].is_okapi_load;
          e.is_reset = disp_uop[l].is_okapi_reset;
          q.push_back(e);
          tail_m = (tail_m + 1) % N;
        end
      end
    end
    $display("unsafe %0d suspicious_load %0d fence %0d squashes %0d resets %0d",
             n_unsafe, n_susp, n_fence, n_squash, n_reset);
    checks++;
    if (n_unsafe == 0 || n_susp == 0 || n_fence == 0 || n_squash == 0 || n_reset == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
