// gen_counters: generic counter facility of the DAVE firmware.
//
// N independent 32-bit counters. Each counts the BC clocks in which its
// selected internal signal (4-bit dave_pkg::src_e code, the same list the
// output map uses) is high; for the one-cycle pulses (L1A, BCR, ECR, lost
// trigger ...) that is the number of events, for levels (deadtime, veto,
// BUSY) it is their duration in BCs. `clr` zeroes all counters; they
// saturate at 2^32-1 instead of wrapping.
//
// The paper lists a "generic counter facility" among the card's uses but
// gives nothing more; the number of counters, their width, the selectable
// signals and saturation are this design's choices.
module gen_counters #(
  parameter int unsigned N = dave_pkg::N_CNT
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clr,
  input  logic [15:0]        srcs,
  input  logic [N-1:0][3:0]  sel,
  output logic [N-1:0][31:0] count
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst || clr)                         count[i] <= '0;
      else if (srcs[sel[i]] && ~&count[i])   count[i] <= count[i] + 32'd1;
    end
  end
endmodule
