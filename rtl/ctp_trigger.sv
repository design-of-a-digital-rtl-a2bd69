// ctp_trigger: "CTP-like Trigger Module" of the DAVE firmware.
//
// Generates the Level-1 Accept (L1A) in the way the ATLAS Central Trigger
// Processor does, for standalone runs without the CTP. Per BC clock:
//   1. random_trig offers a random request; with the external, software and
//      playback requests it forms four trigger sources;
//   2. mask_gate masks the sources and applies the global enable, BUSY
//      gating and the veto window around BCR;
//   3. deadtime refuses the request while simple or complex deadtime is on;
//   4. a surviving request becomes `l1a` on the next clock (registered).
// With each L1A the module presents the 8-bit trigger type and the L1ID:
// {ECR count[7:0], event number[23:0]}. The event number counts L1As since
// the last ECR, so the first L1A after an ECR carries event number 0.
// A request that was refused raises `lost` for one cycle. 32-bit counters
// of L1As and lost requests are kept for the register block.
//
// Timing: request in cycle t -> l1a in cycle t+1. The random source itself
// has one cycle of latency (see random_trig).
//
// Follows the paper: random trigger, simple and complex deadtime, busy
// gating, veto around BCR, 8-bit trigger type sent with each L1A, L1ID reset
// by ECR. Register-level encodings and counter widths are this design's.
module ctp_trigger #(
  parameter int unsigned BCID_W = dave_pkg::BCID_W,
  parameter int unsigned NB     = dave_pkg::N_BKT
) (
  input  logic                 clk,
  input  logic                 rst,
  // trigger sources (one-cycle requests)
  input  logic                 ext_trig,
  input  logic                 sw_trig,
  input  logic                 pb_trig,
  // timing
  input  logic [BCID_W-1:0]    bcid,
  input  logic                 ecr,
  input  logic [7:0]           ecr_cnt,
  input  logic                 busy,
  // configuration
  input  logic                 trig_en,
  input  logic [3:0]           mask,
  input  logic [31:0]          rnd_thresh,
  input  logic                 busy_gate,
  input  logic                 bcr_veto,
  input  logic [BCID_W-1:0]    orbit_len,
  input  logic [7:0]           veto_before,
  input  logic [7:0]           veto_after,
  input  logic [7:0]           simple_dt,
  input  logic [NB-1:0]        bkt_en,
  input  logic [NB-1:0][7:0]   bkt_size,
  input  logic [NB-1:0][15:0]  bkt_rate,
  input  logic [7:0]           trig_type,
  input  logic                 cnt_clr,
  // results
  output logic                 l1a,
  output logic [7:0]           ttype,
  output logic [31:0]          l1id,
  output logic                 rnd,
  output logic                 veto,
  output logic                 busy_blk,
  output logic                 dead,
  output logic                 dead_simple,
  output logic                 dead_complex,
  output logic                 lost,
  output logic [31:0]          l1a_cnt,
  output logic [31:0]          lost_cnt
);
  import dave_pkg::*;

  logic [3:0]  src;
  logic        cand, pass, accept;
  logic [23:0] evt;

  random_trig u_rnd (
    .clk, .rst, .thresh(rnd_thresh), .fire(rnd)
  );

  always_comb begin
    src           = '0;
    src[TS_RANDOM] = rnd;
    src[TS_EXT]    = ext_trig;
    src[TS_SW]     = sw_trig;
    src[TS_PLAY]   = pb_trig;
  end

  mask_gate #(.BCID_W(BCID_W)) u_mg (
    .src, .mask, .trig_en, .busy, .busy_gate, .bcr_veto, .bcid, .orbit_len,
    .veto_before, .veto_after, .cand, .veto, .busy_blk, .pass
  );

  // The bucket fill levels are not needed here: only the dead flags are used.
  deadtime #(.NB(NB)) u_dt (
    .clk, .rst, .l1a, .simple_dt, .bkt_en, .bkt_size, .bkt_rate,
    .dead, .dead_simple, .dead_complex, .bkt_level()
  );

  assign accept = pass && !dead;

  always_ff @(posedge clk) begin
    if (rst) begin
      l1a   <= 1'b0;
      lost  <= 1'b0;
      ttype <= '0;
      l1id  <= '0;
      evt   <= '0;
    end else begin
      l1a  <= accept;
      lost <= cand && !accept;
      if (accept) begin
        ttype <= trig_type;
        l1id  <= {ecr_cnt, evt};
      end
      if (ecr)         evt <= '0;
      else if (accept) evt <= evt + 24'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || cnt_clr) begin
      l1a_cnt  <= '0;
      lost_cnt <= '0;
    end else begin
      if (l1a)  l1a_cnt  <= l1a_cnt + 32'd1;
      if (lost) lost_cnt <= lost_cnt + 32'd1;
    end
  end
endmodule
