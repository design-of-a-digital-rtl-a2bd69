// mask_gate: "Mask/Gate" part of the CTP-like trigger module.
//
// Combines the trigger sources and applies the vetoes that do not depend on
// earlier accepts:
//   * source mask: bit TS_* of `mask` enables the random, external,
//     software and playback trigger sources; their enabled OR is `cand`;
//   * global enable `trig_en`;
//   * busy gating: with `busy_gate` set, an asserted system BUSY blocks
//     triggers;
//   * BCR veto: with `bcr_veto` set, no trigger is passed in the BCR bunch
//     (BCID 0), in the `veto_after` BCs that follow it, and in the
//     `veto_before` BCs that precede the next BCR (BCID >= orbit_len -
//     veto_before). This is the core SCT requirement: no triggers around a
//     BCR.
// `pass` = candidate that survived; `veto` and `busy_blk` say why one did
// not. Purely combinational; deadtime is applied afterwards by ctp_trigger.
//
// Follows the paper: trigger masking, busy gating and vetoing trigger
// generation around a BCR. The window encoding is this design's choice.
module mask_gate #(
  parameter int unsigned BCID_W = dave_pkg::BCID_W
) (
  input  logic [3:0]        src,        // TS_* trigger requests
  input  logic [3:0]        mask,
  input  logic              trig_en,
  input  logic              busy,
  input  logic              busy_gate,
  input  logic              bcr_veto,
  input  logic [BCID_W-1:0] bcid,
  input  logic [BCID_W-1:0] orbit_len,
  input  logic [7:0]        veto_before,
  input  logic [7:0]        veto_after,
  output logic              cand,
  output logic              veto,
  output logic              busy_blk,
  output logic              pass
);
  logic [BCID_W:0] lo_edge;

  // First BCID of the "before" window; with veto_before = 0 it lies past the
  // end of the orbit and vetoes nothing.
  assign lo_edge  = {1'b0, orbit_len} - {{(BCID_W-7){1'b0}}, veto_before};
  assign cand     = trig_en && |(src & mask);
  assign veto     = bcr_veto && (({1'b0, bcid} >= lo_edge) ||
                                 ({1'b0, bcid} <= {{(BCID_W-7){1'b0}}, veto_after}));
  assign busy_blk = busy_gate && busy;
  assign pass     = cand && !veto && !busy_blk;
endmodule
