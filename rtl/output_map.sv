// output_map: "Output Enable Map" block of the DAVE firmware.
//
// Any internal timing signal can be sent to any output. Each of the N
// outputs has a 4-bit source code (dave_pkg::src_e: L1A, BCR, ECR, random
// trigger, deadtime, veto, BUSY, the three playback signals, a software
// pulse, a static level, recording, lost trigger, constant 0 or 1) and an
// enable bit. A disabled output is driven low and, on the bidirectional
// header pins, not driven at all (`oe` low). Outputs are registered, so every
// output is one BC clock behind its source and all outputs change together.
//
// The published description names the block ("Output Enable Map") and says
// the outputs are individually programmable; the source list and the
// registered output are this design's choices.
module output_map #(
  parameter int unsigned N = dave_pkg::N_IO
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [15:0]       srcs,      // indexed by dave_pkg::src_e; bits 0, 12, 15 unused here
  input  logic [N-1:0][3:0] sel,
  input  logic [N-1:0]      en,
  input  logic [N-1:0]      lvl,
  output logic [N-1:0]      out,
  output logic [N-1:0]      oe
);
  import dave_pkg::*;

  logic [N-1:0] nxt;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      unique case (sel[i])
        SRC_ZERO:  nxt[i] = 1'b0;
        SRC_ONE:   nxt[i] = en[i];
        SRC_LEVEL: nxt[i] = en[i] & lvl[i];
        default:   nxt[i] = en[i] & srcs[sel[i]];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out <= '0;
      oe  <= '0;
    end else begin
      out <= nxt;
      oe  <= en;
    end
  end
endmodule
