// okapi_page_cross: instruction-page crossing detector in the fetch stage.
//
// Every fetched instruction comes with the PC the front end will fetch next
// (the predicted next PC).  When the next PC lies on a different 4 KiB page than
// the instruction itself, the control flow (speculatively) leaves the current
// code page, and the first instruction fetched on the new page is flagged
// *suspicious*.  Loads at or after a suspicious instruction are later held
// back until that instruction is no longer speculative, which keeps
// Spectre-BTB/RSB style gadgets on other code pages from loading data.
//
// Interface: a bundle of FETCH_W lanes (valid, pc, next pc) in program order,
// valid lanes contiguous from lane 0.  lane_suspicious is combinational for
// the same bundle.  A crossing by the last valid lane of a bundle is carried
// in a register and flags lane 0 of the next bundle accepted (fire).  A fetch
// redirect (from a resolved branch or an exception) replaces that register
// with the page comparison of the redirecting PC and its target.
//
// Comparing {PC, next PC} pairs follows the design.  Flagging the instruction
// on the new page (rather than the one that jumps) follows the concept
// description; the carry register and the redirect rule are this design's own.
module okapi_page_cross
  import okapi_pkg::*;
#(
  parameter int unsigned FETCH_W = DEF_DISPATCH_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [FETCH_W-1:0]         lane_valid,
  input  logic [FETCH_W-1:0][VADDR_W-1:0] lane_pc,
  input  logic [FETCH_W-1:0][VADDR_W-1:0] lane_npc,
  input  logic                       fire,
  input  logic                       redirect_valid,
  input  logic [VADDR_W-1:0]         redirect_from_pc,
  input  logic [VADDR_W-1:0]         redirect_to_pc,
  output logic [FETCH_W-1:0]         lane_suspicious,
  output logic [FETCH_W-1:0]         lane_cross
);

  logic carry_q;   // next instruction to arrive starts on a new page

  always_comb begin
    for (int i = 0; i < FETCH_W; i++) begin
      lane_cross[i] = lane_valid[i] &&
                      (vpn_of(lane_pc[i]) != vpn_of(lane_npc[i]));
      if (i == 0) lane_suspicious[i] = lane_valid[i] && carry_q;
      else        lane_suspicious[i] = lane_valid[i] && lane_cross[i-1];
    end
  end

  // crossing of the youngest valid lane of the bundle
  logic last_cross;
  always_comb begin
    last_cross = 1'b0;
    for (int i = 0; i < FETCH_W; i++)
      if (lane_valid[i]) last_cross = lane_cross[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              carry_q <= 1'b0;
    else if (redirect_valid) carry_q <= vpn_of(redirect_from_pc) != vpn_of(redirect_to_pc);
    else if (fire && (lane_valid != '0)) carry_q <= last_cross;
  end

endmodule
