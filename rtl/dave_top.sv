// dave_top: FPGA firmware of the DAVE trigger card.
//
// DAVE replaces the NIM trigger logic of a detector's standalone runs with
// one VME card whose FPGA behaves like the experiment's Central Trigger
// Processor: it makes the bunch-crossing and orbit timing (BCR), event
// counter resets (ECR), random or external Level-1 Accepts (L1A) with the
// CTP's simple and complex deadtime, BUSY gating and a veto around BCR, and
// it can record the resulting trigger/BCR/ECR sequence in a 4M-word SRAM and
// play it back later.
//
// Structure (one BC clock domain, synchronous active-high reset):
//
//   VME bus / USB MCU -> vme_usb_if -> reg_block -> cfg / cmd bundles
//   LEMO + header inputs -> input_sync -> external trigger, BUSY, orbit, ECR
//   orbit_gen (BCID, BCR) -> ecr_gen (ECR) -> ctp_trigger (L1A, type, L1ID)
//   sram_seq records L1A/BCR/ECR or plays them back (playback L1A is one of
//     the trigger sources)
//   output_map sends any internal signal to any LEMO or header output;
//   gen_counters count any of the same signals.
//
// Inputs 0..3 (the first LEMO inputs) have fixed roles: external trigger,
// system BUSY, external orbit, external ECR (dave_pkg::IN_*). The header
// pins are bidirectional on the board; here they appear as separate in, out
// and output-enable vectors for the pad ring. The clock itself comes from
// the board's clock multiplexer/PLL; `clk_sel_80` tells the on-board
// oscillator circuit whether to provide ~40 or ~80 MHz. The Delay25 fine
// delay chip, the clock multiplexer, the SRAM itself, the USB controller and
// the level translators are outside the FPGA.
//
// The block structure follows the firmware block diagram of the DAVE paper
// (VME/USB interface, register block, input enable/sync, orbit gen, ECR gen,
// CTP-like trigger with random trigger, deadtime and mask/gate, output
// enable map) plus the SRAM record/playback and generic counters its text
// describes. Everything inside the blocks is this design's reading of the
// functions the paper names.
module dave_top (
  input  logic                clk,
  input  logic                rst,
  // VME
  input  logic                vme_as_n,
  input  logic [1:0]          vme_ds_n,
  input  logic                vme_write_n,
  input  logic                vme_lword_n,
  input  logic                vme_iack_n,
  input  logic [5:0]          vme_am,
  input  logic [31:1]         vme_addr,
  input  logic [15:0]         vme_d_in,
  output logic [15:0]         vme_d_out,
  output logic                vme_d_oe,
  output logic                vme_dtack_n,
  // USB microcontroller
  input  dave_pkg::hbus_req_t usb_req,
  output dave_pkg::hbus_rsp_t usb_rsp,
  // switches, LEDs, clock selection
  input  logic [7:0]          base_sw,
  input  logic [7:0]          serial_sw,
  input  logic [7:0]          modrec_sw,
  input  logic [3:0]          mode_sw,
  input  logic                prog_reset,
  output logic [dave_pkg::N_LED-1:0] leds,
  output logic                clk_sel_80,
  // front-panel LEMO and header I/O
  input  logic [dave_pkg::N_LEMO-1:0] lemo_in,
  output logic [dave_pkg::N_LEMO-1:0] lemo_out,
  input  logic [dave_pkg::N_AUX-1:0]  aux_in,
  output logic [dave_pkg::N_AUX-1:0]  aux_out,
  output logic [dave_pkg::N_AUX-1:0]  aux_oe,
  // trigger word for a TTC encoder
  output logic                l1a,
  output logic [7:0]          ttype,
  // SRAM
  output logic                sram_ce_n,
  output logic                sram_we_n,
  output logic [dave_pkg::SRAM_AW-1:0] sram_addr,
  output logic [dave_pkg::SRAM_DW-1:0] sram_dout,
  output logic                sram_oe,
  input  logic [dave_pkg::SRAM_DW-1:0] sram_din
);
  import dave_pkg::*;

  hbus_req_t bus_req;
  hbus_rsp_t bus_rsp;
  cfg_t      cfg;
  cmd_t      cmd;
  status_t   sts;

  logic [N_IO-1:0] in_level, in_rise, outs, oes;
  logic [BCID_W-1:0] bcid;
  logic        bcr, ecr;
  logic [7:0]  ecr_cnt;
  logic [31:0] orbit_cnt, l1id, l1a_cnt, lost_cnt;
  logic        rnd, veto, busy_blk, dead, dead_simple, dead_complex, lost;
  logic        pb_l1a, pb_bcr, pb_ecr, rec_active, play_active, wrapped, underrun;
  logic        host_valid, host_busy;
  logic [SRAM_AW-1:0] wptr, hptr;
  logic [15:0] host_rdata;
  logic [15:0] srcs;
  logic [N_CNT-1:0][31:0] gcnt;

  vme_usb_if u_host (
    .clk, .rst,
    .vme_as_n, .vme_ds_n, .vme_write_n, .vme_lword_n, .vme_iack_n, .vme_am,
    .vme_addr, .vme_d_in, .vme_d_out, .vme_d_oe, .vme_dtack_n, .base_sw,
    .usb_req, .usb_rsp, .bus_req, .bus_rsp
  );

  reg_block u_regs (
    .clk, .rst, .req(bus_req), .rsp(bus_rsp),
    .serial_sw, .modrec_sw, .mode_sw, .base_sw, .prog_reset,
    .cfg, .cmd, .sts
  );

  input_sync #(.N(N_IO)) u_in (
    .clk, .rst, .pins({aux_in, lemo_in}), .enable(cfg.in_en),
    .level(in_level), .rise(in_rise)
  );

  orbit_gen u_orbit (
    .clk, .rst, .orbit_len(cfg.orbit_len), .ext_mode(cfg.orbit_ext),
    .ext_orbit(in_rise[IN_ORBIT]), .cnt_clr(cmd.cnt_clr),
    .bcid, .bcr, .orbit_cnt
  );

  ecr_gen u_ecr (
    .clk, .rst, .bcr, .periodic(cfg.ecr_periodic), .period(cfg.ecr_period),
    .cmd(cmd.ecr), .ext_en(cfg.ecr_ext), .ext_ecr(in_rise[IN_ECR]),
    .ecr, .ecr_cnt
  );

  ctp_trigger u_trig (
    .clk, .rst,
    .ext_trig(in_rise[IN_TRIG]), .sw_trig(cmd.trig), .pb_trig(pb_l1a),
    .bcid, .ecr, .ecr_cnt, .busy(in_level[IN_BUSY]),
    .trig_en(cfg.trig_en), .mask(cfg.trig_mask), .rnd_thresh(cfg.rnd_thresh),
    .busy_gate(cfg.busy_gate), .bcr_veto(cfg.bcr_veto), .orbit_len(cfg.orbit_len),
    .veto_before(cfg.veto_before), .veto_after(cfg.veto_after),
    .simple_dt(cfg.simple_dt), .bkt_en(cfg.bkt_en), .bkt_size(cfg.bkt_size),
    .bkt_rate(cfg.bkt_rate), .trig_type(cfg.trig_type), .cnt_clr(cmd.cnt_clr),
    .l1a, .ttype, .l1id, .rnd, .veto, .busy_blk, .dead, .dead_simple,
    .dead_complex, .lost, .l1a_cnt, .lost_cnt
  );

  sram_seq u_seq (
    .clk, .rst,
    .mode(cfg.seq_mode), .stop_on_busy(cfg.seq_stop_on_busy), .loop(cfg.seq_loop),
    .start(cfg.seq_start), .len(cfg.seq_len), .busy_rise(in_rise[IN_BUSY]),
    .rec_l1a(l1a), .rec_bcr(bcr), .rec_ecr(ecr),
    .host_ptr_ld(cmd.seq_ptr_ld), .host_ptr_in(cmd.seq_ptr),
    .host_wr(cmd.seq_wr), .host_wdata(cmd.seq_wdata), .host_rd(cmd.seq_rd),
    .host_ptr(hptr), .host_rdata, .host_valid, .host_busy,
    .pb_l1a, .pb_bcr, .pb_ecr, .rec_active, .play_active, .wrapped, .underrun,
    .wptr, .sram_ce_n, .sram_we_n, .sram_addr, .sram_dout, .sram_oe, .sram_din
  );

  always_comb begin
    srcs              = '0;
    srcs[SRC_ZERO]    = 1'b0;
    srcs[SRC_L1A]     = l1a;
    srcs[SRC_BCR]     = bcr;
    srcs[SRC_ECR]     = ecr;
    srcs[SRC_RANDOM]  = rnd;
    srcs[SRC_DEAD]    = dead;
    srcs[SRC_VETO]    = veto;
    srcs[SRC_BUSY]    = in_level[IN_BUSY];
    srcs[SRC_PB_L1A]  = pb_l1a;
    srcs[SRC_PB_BCR]  = pb_bcr;
    srcs[SRC_PB_ECR]  = pb_ecr;
    srcs[SRC_SWPULSE] = cmd.out;
    srcs[SRC_LEVEL]   = 1'b0;
    srcs[SRC_REC]     = rec_active;
    srcs[SRC_LOST]    = lost;
    srcs[SRC_ONE]     = 1'b1;
  end

  output_map #(.N(N_IO)) u_out (
    .clk, .rst, .srcs, .sel(cfg.out_sel), .en(cfg.out_en), .lvl(cfg.out_lvl),
    .out(outs), .oe(oes)
  );

  gen_counters #(.N(N_CNT)) u_cnt (
    .clk, .rst, .clr(cmd.cnt_clr), .srcs, .sel(cfg.cnt_sel), .count(gcnt)
  );

  // The LEMO outputs sit behind fixed-direction NIM/TTL drivers and are
  // always driven (a disabled one is low), so only the header pins use the
  // output enables; oes[N_LEMO-1:0] is left unused on purpose.
  assign lemo_out   = outs[N_LEMO-1:0];
  assign aux_out    = outs[N_IO-1:N_LEMO];
  assign aux_oe     = oes[N_IO-1:N_LEMO];
  assign leds       = cfg.leds;
  assign clk_sel_80 = cfg.clk_sel_80;

  always_comb begin
    sts                     = '0;
    sts.flags[ST_DEAD]      = dead;
    sts.flags[ST_SIMPLE]    = dead_simple;
    sts.flags[ST_COMPLEX]   = dead_complex;
    sts.flags[ST_VETO]      = veto;
    sts.flags[ST_BUSY]      = in_level[IN_BUSY];
    sts.flags[ST_REC]       = rec_active;
    sts.flags[ST_PLAY]      = play_active;
    sts.flags[ST_WRAP]      = wrapped;
    sts.flags[ST_HOST_BSY]  = host_busy;
    sts.flags[ST_HOST_VLD]  = host_valid;
    sts.flags[ST_UNDERRUN]  = underrun;
    sts.flags[ST_BUSY_BLK]  = busy_blk;
    sts.l1id                = l1id;
    sts.bcid                = bcid;
    sts.l1a_cnt             = l1a_cnt;
    sts.lost_cnt            = lost_cnt;
    sts.orbit_cnt           = orbit_cnt;
    sts.seq_wptr            = wptr;
    sts.seq_hptr            = hptr;
    sts.seq_rdata           = host_rdata;
    sts.in_state            = in_level;
    sts.gcnt                = gcnt;
  end
endmodule
