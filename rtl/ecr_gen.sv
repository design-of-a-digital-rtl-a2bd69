// ecr_gen: "ECR Gen" block of the DAVE firmware.
//
// Issues the Event Counter Reset that restarts the Level-1 event number
// (L1ID). Three sources, all ORed into a one-cycle `ecr` pulse:
//   * periodic: with `periodic` set, one ECR every `period` orbits;
//   * host command: a register write (`cmd`) requests one ECR;
//   * external: with `ext_en` set, an edge on the external ECR input.
// Periodic and commanded ECRs are issued in the BCR bunch (the cycle in which
// `bcr` is high), so they always fall at the same point of the orbit; a host
// command waits up to one orbit for that. External ECRs pass in the cycle
// they arrive. `ecr_cnt` counts issued ECRs (8 bits, wrapping); it forms the
// top byte of the extended L1ID.
//
// Follows the paper: the L1ID is periodically reset by an ECR, and the card
// generates ECRs for standalone running. The period unit (orbits), the
// alignment to BCR and the external input are this design's choices.
module ecr_gen (
  input  logic        clk,
  input  logic        rst,
  input  logic        bcr,        // from orbit_gen
  input  logic        periodic,
  input  logic [15:0] period,     // orbits between ECRs, 0 = no periodic ECR
  input  logic        cmd,        // one-cycle host request
  input  logic        ext_en,
  input  logic        ext_ecr,    // one-cycle pulse from an input
  output logic        ecr,
  output logic [7:0]  ecr_cnt
);
  logic [15:0] orbits;
  logic        pending, per_fire, ecr_d;

  assign per_fire = periodic && (period != '0) && bcr && (orbits >= period - 16'd1);

  always_ff @(posedge clk) begin
    if (rst || !periodic)      orbits <= '0;
    else if (bcr)              orbits <= per_fire ? 16'd0 : orbits + 16'd1;
  end

  always_ff @(posedge clk) begin
    if (rst)       pending <= 1'b0;
    else if (bcr)  pending <= 1'b0;
    else if (cmd)  pending <= 1'b1;
  end

  assign ecr_d = per_fire || (bcr && (pending || cmd)) || (ext_en && ext_ecr);

  always_ff @(posedge clk) begin
    if (rst) begin
      ecr     <= 1'b0;
      ecr_cnt <= '0;
    end else begin
      ecr <= ecr_d;
      if (ecr_d) ecr_cnt <= ecr_cnt + 8'd1;
    end
  end
endmodule
