// tb_okapi_page_cross: random fetch bundles against a reference model of the
// page-crossing rule.  Each lane's PC and next PC are drawn so that about one
// pair in four crosses a 4 KiB page.  The expected suspicious flags are
// computed here from the page numbers: a lane is suspicious if the lane
// before it crossed, lane 0 if the youngest valid lane of the previous
// accepted bundle crossed or the last redirect crossed.
module tb_okapi_page_cross;
  import okapi_pkg::*;
  localparam int FW = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [FW-1:0]              lane_valid;
  logic [FW-1:0][VADDR_W-1:0] lane_pc, lane_npc;
  logic fire, redirect_valid;
  logic [VADDR_W-1:0] redirect_from_pc, redirect_to_pc;
  logic [FW-1:0] lane_suspicious, lane_cross;

  okapi_page_cross #(.FETCH_W(FW)) dut (.*);

  int checks = 0, failures = 0;
  bit carry_m = 0;

  function automatic logic [VADDR_W-1:0] rand_addr(input logic [VADDR_W-1:0] base, input bit do_cross);
    logic [VADDR_W-1:0] a;
    if (do_cross) a = base + VADDR_W'(4096 * ($urandom_range(1, 3)));
    else       a = {base[VADDR_W-1:12], 12'(($urandom_range(0, 1023)) * 4)};
    return a;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lane_valid = '0; lane_pc = '0; lane_npc = '0; fire = 0;
    redirect_valid = 0; redirect_from_pc = '0; redirect_to_pc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      begin
        int nv;
        logic [VADDR_W-1:0] pc;
        nv = $urandom_range(0, FW);
        pc = {4'h0, 32'($urandom), 12'($urandom_range(0, 1023) * 4)};
        lane_valid = '0;
        for (int l = 0; l < FW; l++) begin
          lane_pc[l]  = pc;
          lane_npc[l] = rand_addr(pc, $urandom_range(0, 3) == 0);
          if (l < nv) lane_valid[l] = 1'b1;
          pc = lane_npc[l];
        end
        fire = $urandom_range(0, 3) != 0;
        redirect_valid = $urandom_range(0, 15) == 0;
        redirect_from_pc = pc;
        redirect_to_pc = rand_addr(pc, $urandom_range(0, 1) == 0);
      end
      #1;
      for (int l = 0; l < FW; l++) begin
        bit exp_cross, exp_susp;
        exp_cross = lane_valid[l] && (lane_pc[l][VADDR_W-1:12] != lane_npc[l][VADDR_W-1:12]);
        if (l == 0) exp_susp = lane_valid[0] && carry_m;
        else        exp_susp = lane_valid[l] && lane_valid[l-1] &&
                               (lane_pc[l-1][VADDR_W-1:12] != lane_npc[l-1][VADDR_W-1:12]);
        checks++;
        if (lane_suspicious[l] !== exp_susp || lane_cross[l] !== exp_cross) begin
          failures++;
          if (failures < 10) $display("cycle %0d lane %0d: susp %b exp %b cross %b exp %b",
                                      cyc, l, lane_suspicious[l], exp_susp, lane_cross[l], exp_cross);
        end
      end
      // model update at the clock edge
      if (redirect_valid)
        carry_m = redirect_from_pc[VADDR_W-1:12] != redirect_to_pc[VADDR_W-1:12];
      else if (fire && lane_valid != '0) begin
        for (int l = 0; l < FW; l++)
          if (lane_valid[l]) carry_m = lane_pc[l][VADDR_W-1:12] != lane_npc[l][VADDR_W-1:12];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
