// okapi_rob_tracker: Okapi state kept alongside the reorder buffer.
//
// Each ROB entry carries a few extra bits: whether it is a load, whether it
// can still open a transient window (an unresolved branch, a load or store
// whose translation may still fault, a pending Okapi instruction, ...), the
// suspicious flag from fetch, and whether it is an Okapi fence (OkapiReset or
// OkapiLoad) that has not executed yet.
//
// The *visibility point* is the oldest entry that can still open a transient
// window.  Every cycle one scan over the ROB in age order (head to tail)
// derives, for each entry i:
//   unsafe[i]      some older entry can still open a window, so i is not yet
//                  certain to commit;
//   susp_load[i]   some entry at or before i is suspicious and itself unsafe
//                  (its control flow is still speculative); loads between the
//                  visibility point and the first such entry see it clear;
//   fence_blk[i]   an older OkapiReset / OkapiLoad has not executed yet; the
//                  loads behind it are serialised.
// The flags are recomputed from the current state each cycle, so an entry
// turns safe (or loses suspicious_load) the cycle after the visibility point
// passes it.  Flags are valid for occupied entries only.
//
// Interface: up to DISPATCH_W instructions allocate at the tail per cycle
// (disp_valid contiguous from lane 0, accepted when disp_ready); RESOLVE_W
// ports from the core and one port from the load queue mark an entry
// resolved; reset_done marks the OkapiReset at the head executed; commit_cnt
// retires that many entries from the head; a squash keeps the entries up to
// and including squash_idx (or none with squash_all).  All updates take effect
// at the clock edge.
//
// Unsafe marking, the visibility point, the suspicious_load rule and holding
// loads behind OkapiReset follow the design.  Treating OkapiLoad as a fence
// follows its statement that both Okapi instructions act as pseudo-fences
// that serialise younger loads.  Counting the suspicious instruction itself
// (if it is a load) as a suspicious_load, and which instructions open a
// window, are this implementation's choices.
//
// Tool note: rst_n also appears in the "disable iff" clauses of the
// assertions, which lint reports as a synchronous use of an asynchronous
// reset (SYNCASYNCNET).  That use is for simulation only.
module okapi_rob_tracker
  import okapi_pkg::*;
#(
  parameter int unsigned N          = DEF_ROB_ENTRIES,
  parameter int unsigned DISPATCH_W = DEF_DISPATCH_W,
  parameter int unsigned COMMIT_W   = DEF_COMMIT_W,
  parameter int unsigned RESOLVE_W  = DEF_RESOLVE_W,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned KW = $clog2(COMMIT_W + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // dispatch
  input  logic [DISPATCH_W-1:0]          disp_valid,
  input  uop_t [DISPATCH_W-1:0]          disp_uop,
  output logic                           disp_ready,
  output logic [DISPATCH_W-1:0][IW-1:0]  disp_idx,
  // resolution of speculation sources
  input  logic [RESOLVE_W-1:0]           res_valid,
  input  logic [RESOLVE_W-1:0][IW-1:0]   res_idx,
  input  logic                           ld_res_valid,
  input  logic [IW-1:0]                  ld_res_idx,
  input  logic                           reset_done,
  // commit and squash
  input  logic [KW-1:0]                  commit_cnt,
  input  logic                           squash_valid,
  input  logic                           squash_all,
  input  logic [IW-1:0]                  squash_idx,
  // state
  output logic [IW-1:0]                  head,
  output logic [CW-1:0]                  count,
  output logic                           head_reset_pending,
  output logic                           vp_valid,
  output logic [IW-1:0]                  vp_idx,
  output logic [KW-1:0]                  commit_lq_cnt,
  output logic [N-1:0]                   unsafe,
  output logic [N-1:0]                   susp_load,
  output logic [N-1:0]                   fence_blk
);

  function automatic logic [IW-1:0] wrap(input logic [IW:0] a);
    return (a >= (IW+1)'(N)) ? IW'(a - (IW+1)'(N)) : IW'(a);
  endfunction

  logic [N-1:0] valid_q, is_lq_q, open_q, susp_q, fence_q, is_reset_q;
  logic [IW-1:0] head_q, tail_q;
  logic [CW-1:0] count_q;

  assign head  = head_q;
  assign count = count_q;

  // ---------------------------------------------------------- dispatch side
  logic [$clog2(DISPATCH_W+1)-1:0] n_disp;
  always_comb begin
    n_disp = '0;
    for (int l = 0; l < DISPATCH_W; l++)
      if (disp_valid[l]) n_disp = n_disp + 1'b1;
    for (int l = 0; l < DISPATCH_W; l++)
      disp_idx[l] = wrap((IW+1)'(tail_q) + (IW+1)'(l));
  end
  assign disp_ready = (count_q + CW'(DISPATCH_W)) <= CW'(N);

  // --------------------------------------------------- visibility point scan
  always_comb begin
    logic seen_open, seen_susp, seen_fence;
    logic [IW-1:0] idx;
    seen_open  = 1'b0;
    seen_susp  = 1'b0;
    seen_fence = 1'b0;
    vp_valid   = 1'b0;
    vp_idx     = head_q;
    unsafe     = '0;
    susp_load  = '0;
    fence_blk  = '0;
    for (int k = 0; k < N; k++) begin
      idx = wrap((IW+1)'(head_q) + (IW+1)'(k));
      if (CW'(k) < count_q) begin
        unsafe[idx]    = seen_open;
        fence_blk[idx] = seen_fence;
        // a suspicious entry that is itself unsafe taints it and all younger
        seen_susp      = seen_susp | (susp_q[idx] & seen_open);
        susp_load[idx] = seen_susp;
        if (open_q[idx] && !seen_open) begin
          vp_valid = 1'b1;
          vp_idx   = idx;
        end
        seen_open  = seen_open  | open_q[idx];
        seen_fence = seen_fence | fence_q[idx];
      end
    end
  end

  assign head_reset_pending = (count_q != '0) && is_reset_q[head_q] && fence_q[head_q];

  // loads (ordinary and OkapiLoad) among the committing entries
  always_comb begin
    commit_lq_cnt = '0;
    for (int c = 0; c < COMMIT_W; c++)
      if (KW'(c) < commit_cnt && is_lq_q[wrap((IW+1)'(head_q) + (IW+1)'(c))])
        commit_lq_cnt = commit_lq_cnt + 1'b1;
  end

  // age of the last entry a partial squash keeps
  logic [IW-1:0] keep;
  assign keep = (squash_idx >= head_q) ? IW'(squash_idx - head_q)
                                       : IW'((IW+1)'(squash_idx) + (IW+1)'(N) - (IW+1)'(head_q));

  // ------------------------------------------------------------ state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q    <= '0;
      is_lq_q    <= '0;
      open_q     <= '0;
      susp_q     <= '0;
      fence_q    <= '0;
      is_reset_q <= '0;
      head_q     <= '0;
      tail_q     <= '0;
      count_q    <= '0;
    end else begin
      // resolution
      for (int r = 0; r < RESOLVE_W; r++)
        if (res_valid[r]) open_q[res_idx[r]] <= 1'b0;
      if (ld_res_valid) begin
        open_q[ld_res_idx]  <= 1'b0;
        fence_q[ld_res_idx] <= 1'b0;
      end
      if (reset_done) begin
        open_q[head_q]  <= 1'b0;
        fence_q[head_q] <= 1'b0;
      end
      if (squash_valid) begin
        if (squash_all) begin
          valid_q <= '0;
          tail_q  <= head_q;
          count_q <= '0;
        end else begin
          for (int k = 0; k < N; k++)
            if (k > int'(keep)) valid_q[wrap((IW+1)'(head_q) + (IW+1)'(k))] <= 1'b0;
          tail_q  <= wrap((IW+1)'(squash_idx) + 1'b1);
          count_q <= CW'(keep) + 1'b1;
        end
      end else begin
        for (int c = 0; c < COMMIT_W; c++)
          if (KW'(c) < commit_cnt) valid_q[wrap((IW+1)'(head_q) + (IW+1)'(c))] <= 1'b0;
        for (int l = 0; l < DISPATCH_W; l++) begin
          if (disp_valid[l] && disp_ready) begin
            valid_q[disp_idx[l]]    <= 1'b1;
            is_lq_q[disp_idx[l]]    <= disp_uop[l].is_load | disp_uop[l].is_okapi_load;
            open_q[disp_idx[l]]     <= disp_uop[l].opens_window;
            susp_q[disp_idx[l]]     <= disp_uop[l].suspicious;
            fence_q[disp_idx[l]]    <= disp_uop[l].is_okapi_reset | disp_uop[l].is_okapi_load;
            is_reset_q[disp_idx[l]] <= disp_uop[l].is_okapi_reset;
          end
        end
        head_q  <= wrap((IW+1)'(head_q) + (IW+1)'(commit_cnt));
        if (disp_ready) begin
          tail_q  <= wrap((IW+1)'(tail_q) + (IW+1)'(n_disp));
          count_q <= count_q - CW'(commit_cnt) + CW'(n_disp);
        end else begin
          count_q <= count_q - CW'(commit_cnt);
        end
      end
    end
  end

  // ------------------------------------------------------------ protocol rules
  // Commit never retires more entries than are present, an OkapiReset only
  // after it executed, and the core neither dispatches nor commits while squashing.
  a_commit_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    CW'(commit_cnt) <= count_q);
  a_reset_executed: assert property (@(posedge clk) disable iff (!rst_n)
    (commit_cnt != '0) |-> !head_reset_pending);
  a_no_disp_on_squash: assert property (@(posedge clk) disable iff (!rst_n)
    squash_valid |-> (disp_valid == '0 && commit_cnt == '0));
  a_valid_matches_count: assert property (@(posedge clk) disable iff (!rst_n)
    $countones(valid_q) == int'(count_q));

endmodule
