// tb_okapi_reset_ctrl: directed sequences for OkapiReset execution.  The
// reset must not start while a TLB lookup is in flight, must clear the safe
// access bits for exactly one cycle, report done one cycle later, count each
// execution, and abandon the sequence on a full flush.
module tb_okapi_reset_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic head_reset_pending, tlb_busy, flush, clear_safe, reset_done;
  logic [31:0] reset_count;

  okapi_reset_ctrl dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit c, input bit d, input int cnt, input string what);
    checks++;
    if (clear_safe !== c || reset_done !== d || reset_count !== 32'(cnt)) begin
      failures++;
      $display("%s: clear %b done %b count %0d, expected %b %b %0d", what,
               clear_safe, reset_done, reset_count, c, d, cnt);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    head_reset_pending = 0; tlb_busy = 0; flush = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    check(0, 0, 0, "idle");
    // pending but a translation is in flight: wait
    head_reset_pending = 1; tlb_busy = 1;
    repeat (3) begin @(negedge clk); check(0, 0, 0, "busy wait"); end
    tlb_busy = 0;
    @(negedge clk); check(1, 0, 0, "clear");
    @(negedge clk); check(0, 1, 0, "done");
    head_reset_pending = 0;          // the tracker marks it executed
    @(negedge clk); check(0, 0, 1, "back to idle");
    @(negedge clk); check(0, 0, 1, "stays idle");
    // back-to-back resets
    for (int k = 0; k < 5; k++) begin
      head_reset_pending = 1;
      @(negedge clk); check(1, 0, 1 + k, "clear b2b");
      @(negedge clk); check(0, 1, 1 + k, "done b2b");
      head_reset_pending = 0;
      @(negedge clk); check(0, 0, 2 + k, "idle b2b");
    end
    // flush in the middle of the sequence
    head_reset_pending = 1;
    @(negedge clk); check(1, 0, 6, "clear before flush");
    flush = 1; head_reset_pending = 0;
    @(negedge clk); check(0, 0, 6, "flushed");
    flush = 0;
    @(negedge clk); check(0, 0, 6, "idle after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
