// okapi_priv_monitor: privilege-switch detector.
//
// Watches the control/status register that holds the current privilege level
// of the hart and raises clear_safe for one cycle whenever the value differs
// from the one seen in the previous cycle.  Every privilege switch (system
// call, trap, return to user mode, context switch) therefore empties the
// trust domain: the kernel cannot speculatively read pages the interrupted
// thread touched and vice versa.  switch_count counts detected switches
// (saturating) for performance monitoring.
//
// Timing: priv is sampled each cycle; clear_safe is registered and appears
// the cycle after the new level is first seen.  After reset the first sampled
// level is taken as the reference without a pulse (the bits are empty then).
//
// Clearing on every change of the privilege CSR follows the design; the
// registered one-cycle pulse and the counter are this implementation's own.
module okapi_priv_monitor
  import okapi_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  priv_e            priv,
  output logic             clear_safe,
  output logic [CNT_W-1:0] switch_count
);

  priv_e prev_q;
  logic  seen_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q       <= PRIV_M;
      seen_q       <= 1'b0;
      clear_safe   <= 1'b0;
      switch_count <= '0;
    end else begin
      prev_q     <= priv;
      seen_q     <= 1'b1;
      clear_safe <= seen_q && (priv != prev_q);
      if (seen_q && (priv != prev_q) && (switch_count != '1))
        switch_count <= switch_count + 1'b1;
    end
  end

endmodule
