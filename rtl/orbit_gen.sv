// orbit_gen: "Orbit Gen" block of the DAVE firmware.
//
// It keeps the bunch-crossing number (BCID) and issues the Bunch Counter
// Reset (BCR) once per LHC orbit. The BCID counts 0 .. orbit_len-1 on every
// BC clock. In internal mode the counter wraps by itself and raises `bcr` in
// the cycle in which BCID is 0. In external mode an orbit pulse from an input
// restarts the count: the cycle after the pulse has BCID 0 and BCR, so a
// standalone card can follow a real orbit signal. In internal mode external
// pulses are ignored. In external mode without pulses the counter still wraps
// at orbit_len, so BCR is never lost. A 32-bit orbit counter counts BCRs for the register block.
//
// Follows the paper: BCID reset once per orbit by BCR; the card is a BC/ORBIT
// source. This design's choices: orbit length programmable with the LHC value
// of 3564 BCs as reset default, the external-orbit option and its timing.
module orbit_gen #(
  parameter int unsigned        BCID_W      = dave_pkg::BCID_W,
  parameter logic [BCID_W-1:0]  ORBIT_LEN   = BCID_W'(3564)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [BCID_W-1:0] orbit_len,   // BCs per orbit (0 is taken as ORBIT_LEN)
  input  logic              ext_mode,    // follow external orbit pulses
  input  logic              ext_orbit,   // one-cycle pulse
  input  logic              cnt_clr,
  output logic [BCID_W-1:0] bcid,
  output logic              bcr,
  output logic [31:0]       orbit_cnt
);
  logic [BCID_W-1:0] len, last;
  logic              restart;

  assign len     = (orbit_len == '0) ? ORBIT_LEN : orbit_len;
  assign last    = len - BCID_W'(1);
  assign restart = ext_mode && ext_orbit;

  always_ff @(posedge clk) begin
    if (rst) begin
      bcid <= '0;
    end else if (restart || bcid >= last) begin
      bcid <= '0;
    end else begin
      bcid <= bcid + BCID_W'(1);
    end
  end

  // BCR is raised in the cycle whose BCID is 0, one cycle after the wrap.
  always_ff @(posedge clk) begin
    if (rst) bcr <= 1'b0;
    else     bcr <= restart || bcid >= last;
  end

  always_ff @(posedge clk) begin
    if (rst || cnt_clr) orbit_cnt <= '0;
    else if (bcr)       orbit_cnt <= orbit_cnt + 32'd1;
  end
endmodule
