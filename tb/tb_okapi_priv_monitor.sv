// tb_okapi_priv_monitor: drives random privilege-level sequences (mostly
// steady, with occasional switches between U, S and M) and expects a
// one-cycle clear pulse exactly one cycle after each change, none otherwise,
// and a switch counter equal to the number of changes.
module tb_okapi_priv_monitor;
  import okapi_pkg::*;

  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  priv_e priv;
  logic  clear_safe;
  logic [31:0] switch_count;

  okapi_priv_monitor dut (.*);

  int checks = 0, failures = 0, changes = 0;
  priv_e prev;
  bit exp_pulse;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    priv = PRIV_M;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    prev = PRIV_M;
    exp_pulse = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (clear_safe !== exp_pulse) begin
        failures++;
        if (failures < 10) $display("cycle %0d: clear %b expected %b", c, clear_safe, exp_pulse);
      end
      checks++;
      if (switch_count !== 32'(changes)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: count %0d expected %0d", c, switch_count, changes);
      end
      if ($urandom_range(0, 5) == 0) begin
        case ($urandom_range(0, 2))
          0: priv = PRIV_U;
          1: priv = PRIV_S;
          default: priv = PRIV_M;
        endcase
      end
      // the DUT sees this value at the next edge, the pulse follows one edge later
      exp_pulse = (priv != prev);
      if (priv != prev) changes++;
      prev = priv;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
