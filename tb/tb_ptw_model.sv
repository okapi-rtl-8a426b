// tb_ptw_model: behavioural page table walker for the testbenches.  It
// accepts one walk request after a random 0-3 cycle wait, and answers it with
// a refill LATENCY cycles later.  The page table is a fixed function of the
// virtual page number, shared with the checkers through pte_of():
//   not present      when vpn % 13 == 12
//   not readable     when vpn % 11 == 10
//   supervisor only  when vpn % 7 == 6
//   ppn              vpn * 3 + 0x100 (truncated)
module tb_ptw_model
  import okapi_pkg::*;
#(
  parameter int LATENCY = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  input  logic [VPN_W-1:0] req_vpn,
  output logic             req_ready,
  output logic             refill_valid,
  output logic [VPN_W-1:0] refill_vpn,
  output pte_t             refill_pte,
  output int               walks
);

  function automatic pte_t pte_of(input logic [VPN_W-1:0] vpn);
    pte_t p;
    p.ppn      = PPN_W'(vpn * 3 + 'h100);
    p.present  = (vpn % 13) != 12;
    p.readable = (vpn % 11) != 10;
    p.user     = (vpn % 7) != 6;
    return p;
  endfunction

  int               wait_cnt, busy_cnt;
  bit               busy;
  logic [VPN_W-1:0] vpn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready    <= 1'b0;
      refill_valid <= 1'b0;
      refill_vpn   <= '0;
      refill_pte   <= '0;
      busy         <= 1'b0;
      wait_cnt     <= 0;
      busy_cnt     <= 0;
      walks        <= 0;
      vpn_q        <= '0;
    end else begin
      refill_valid <= 1'b0;
      req_ready    <= 1'b0;
      if (!busy && req_valid && !req_ready) begin
        if (wait_cnt == 0) begin
          req_ready <= 1'b1;
          wait_cnt  <= $urandom_range(0, 3);
        end else wait_cnt <= wait_cnt - 1;
      end
      if (req_valid && req_ready) begin
        busy     <= 1'b1;
        busy_cnt <= LATENCY;
        vpn_q    <= req_vpn;
        walks    <= walks + 1;
      end
      if (busy) begin
        if (busy_cnt == 0) begin
          busy         <= 1'b0;
          refill_valid <= 1'b1;
          refill_vpn   <= vpn_q;
          refill_pte   <= pte_of(vpn_q);
        end else busy_cnt <= busy_cnt - 1;
      end
    end
  end
endmodule
