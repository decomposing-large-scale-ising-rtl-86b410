// pulse_sync: carries single-cycle pulses from one clock domain to another.
//
// Each source pulse flips a toggle flip-flop in the source domain. The
// toggle crosses through two flip-flops in the destination domain, and a
// change of the synchronised toggle gives one destination-clock pulse,
// three destination clocks after the source edge at most. Source pulses
// must be further apart than about three destination clocks, or two of
// them merge into one; the link's control pulses are thousands of clocks
// apart. Used for tx_start, tx_done and spins_valid between the
// decomposer clock and the link clock (a choice of this design).
module pulse_sync (
  input  logic rst_n,
  input  logic src_clk,
  input  logic src_pulse,
  input  logic dst_clk,
  output logic dst_pulse
);
  logic tog, s1, s2, s3;
  always_ff @(posedge src_clk or negedge rst_n)
    if (!rst_n) tog <= 1'b0;
    else if (src_pulse) tog <= ~tog;
  always_ff @(posedge dst_clk or negedge rst_n)
    if (!rst_n) begin s1 <= 1'b0; s2 <= 1'b0; s3 <= 1'b0; end
    else begin s1 <= tog; s2 <= s1; s3 <= s2; end
  assign dst_pulse = s2 ^ s3;
endmodule
