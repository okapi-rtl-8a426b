// tb_okapi_wakeup: random load queue states and ROB flags; the expected wake
// vector is worked out here from the rescheduling rules (parked for
// suspicious_load: wake when the flag clears or the load is safe; refused by
// the TLB: wake when safe; behind a fence: wake when the fence is gone or the
// load is safe; TLB miss: wake on refill; everything else never; Okapi off
// wakes every Okapi-parked load).
module tb_okapi_wakeup;
  import okapi_pkg::*;
  localparam int LQ = 32, ROB = 192;

  logic                    okapi_en;
  lq_state_e [LQ-1:0]      lq_state;
  logic [LQ-1:0][7:0]      lq_rob_idx;
  logic [ROB-1:0]          unsafe, susp_load, fence_blk;
  logic                    refill;
  logic [LQ-1:0]           wake;

  okapi_wakeup #(.LQ_N(LQ), .ROB_N(ROB)) dut (.*);

  int checks = 0, failures = 0;
  int woke[8];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      okapi_en = ($urandom_range(0, 7) != 0);
      refill   = $urandom_range(0, 1);
      for (int r = 0; r < ROB; r++) begin
        unsafe[r]    = $urandom_range(0, 1);
        susp_load[r] = unsafe[r] & $urandom_range(0, 1);
        fence_blk[r] = unsafe[r] & $urandom_range(0, 1);
      end
      for (int i = 0; i < LQ; i++) begin
        lq_state[i]   = lq_state_e'($urandom_range(0, 7));
        lq_rob_idx[i] = 8'($urandom_range(0, ROB - 1));
      end
      #1;
      for (int i = 0; i < LQ; i++) begin
        bit s, e;
        int r;
        r = lq_rob_idx[i];
        s = !unsafe[r];
        case (lq_state[i])
          LQ_BLK_SUSP:   e = !okapi_en || s || !susp_load[r];
          LQ_BLK_UNSAFE: e = !okapi_en || s;
          LQ_BLK_FENCE:  e = !okapi_en || s || !fence_blk[r];
          LQ_BLK_MISS:   e = refill;
          default:       e = 0;
        endcase
        checks++;
        if (wake[i] !== e) begin
          failures++;
          if (failures < 10) $display("t %0d entry %0d state %s: wake %b expected %b",
                                      t, i, lq_state[i].name(), wake[i], e);
        end
        if (wake[i]) woke[int'(lq_state[i])]++;
      end
    end
    // each kind of parked load was woken at some point
    foreach (woke[k]) if (k >= 3 && k <= 6) begin
      checks++;
      if (woke[k] == 0) begin failures++; $display("state %0d never woken", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
