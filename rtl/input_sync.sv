// input_sync: "Input Enable Sync" block of the DAVE firmware.
//
// Every front-panel LEMO data input and every auxiliary/daughter-card input
// is an asynchronous signal. Each one goes through a two-flip-flop
// synchroniser onto the BC clock and is then ANDed with its enable bit from
// the register block. The block gives the enabled level of each input and a
// one-cycle pulse on each rising edge. The edge pulse is what the trigger,
// orbit and ECR logic use, so a long external pulse counts once.
//
// Timing: a level change at the pin appears at `level` two clocks later and
// the edge pulse in the same cycle. Disabling an input forces its level low;
// no edge is reported when it is enabled again while high.
//
// The published description gives only the block's name ("Input Enable
// Sync"). The two-stage synchroniser and the edge detector are this design's
// choice.
module input_sync #(
  parameter int unsigned N = dave_pkg::N_IO
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] pins,     // asynchronous inputs
  input  logic [N-1:0] enable,   // per-input enable
  output logic [N-1:0] level,    // synchronised, enabled level
  output logic [N-1:0] rise      // one-cycle pulse on a rising edge
);
  logic [N-1:0] meta, sync, prev;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= '0;
      sync <= '0;
      prev <= '0;
    end else begin
      meta <= pins;
      sync <= meta;
      prev <= sync & enable;
    end
  end

  assign level = sync & enable;
  assign rise  = level & ~prev;
endmodule
