// reg_block: "Register Block" of the DAVE firmware.
//
// Holds every control register the functional blocks read and presents
// their status to the host. It is the single slave of the internal register
// bus: a request (dave_pkg::hbus_req_t) is answered on the next clock with a
// one-cycle ack and, for reads, the data. Register addresses are 16-bit word
// addresses; the map is the R_* list in dave_pkg.
//
//   * read/write registers form the `cfg` bundle (dave_pkg::cfg_t) and read
//     back what was written;
//   * writes to R_PULSE, R_SEQ_DATA and the SRAM host-pointer registers give
//     one-cycle commands in the `cmd` bundle; R_PULSE reads as 0;
//   * read-only registers show the board switches (serial number,
//     modification record, mode, VME base address, programmable reset) and
//     the `sts` bundle: status flags, L1ID, BCID, counters, SRAM pointers,
//     synchronised inputs and generic counters;
//   * the programmable reset button: its level passes two synchroniser
//     flip-flops; a press (rising edge) issues the one-cycle commands whose
//     PLS_* bits are set in R_PRST_FN, exactly as if the host had written
//     them to R_PULSE. After a press the button is ignored for DEBOUNCE
//     clocks (default 2^16, about 1.6 ms) so that contact bounce gives one
//     command. R_PRST_FN resets to 0: the button does nothing until set;
//   * writes to read-only or unused addresses are acked and ignored; reads
//     of unused addresses return 0.
// 32-bit values are split low word first. Reset loads the defaults listed
// below (orbit 3564 BCs, simple deadtime 4 BCs, one leaky bucket of 8
// triggers leaking one every 415 BCs, triggers disabled, all I/O disabled).
//
// The paper names the block and says the register map and control mechanisms
// exist, and that one of the two reset switches has programmable function;
// the map itself, the defaults, the bus timing and the set of functions the
// button can be given are this design's.
module reg_block #(
  parameter int unsigned DEBOUNCE = 65536    // BC clocks the button is ignored after a press
) (
  input  logic                    clk,
  input  logic                    rst,
  input  dave_pkg::hbus_req_t     req,
  output dave_pkg::hbus_rsp_t     rsp,
  // board switches
  input  logic [7:0]              serial_sw,
  input  logic [7:0]              modrec_sw,
  input  logic [3:0]              mode_sw,
  input  logic [7:0]              base_sw,
  input  logic                    prog_reset,
  // to and from the functional blocks
  output dave_pkg::cfg_t          cfg,
  output dave_pkg::cmd_t          cmd,
  input  dave_pkg::status_t       sts
);
  import dave_pkg::*;

  logic        wr, rd;
  logic [7:0]  a;
  logic [15:0] wd, rdata;
  logic [15:0] ctrl;
  cfg_t        cr;            // register storage; control bits come from `ctrl`

  assign wr = req.req &&  req.we;
  assign rd = req.req && !req.we;
  assign a  = req.addr;
  assign wd = req.wdata;

  // ---------------------------------------------------------------- writes
  always_ff @(posedge clk) begin
    if (rst) begin
      cr              <= '0;
      cr.orbit_len    <= BCID_W'(3564);
      cr.simple_dt    <= 8'd4;
      cr.trig_mask    <= 4'b0001;
      cr.bkt_en       <= N_BKT'(1);
      cr.bkt_size[0]  <= 8'd8;
      cr.bkt_rate[0]  <= 16'd415;
      ctrl            <= '0;
    end else if (wr) begin
      casez (a)
        R_CTRL:       ctrl <= wd;
        R_LED:        cr.leds <= wd[N_LED-1:0];
        R_ORBIT_LEN:  cr.orbit_len <= wd[BCID_W-1:0];
        R_VETO:       {cr.veto_after, cr.veto_before} <= wd;
        R_RND_LO:     cr.rnd_thresh[15:0]  <= wd;
        R_RND_HI:     cr.rnd_thresh[31:16] <= wd;
        R_SIMPLE_DT:  cr.simple_dt <= wd[7:0];
        R_TRIG_MASK:  cr.trig_mask <= wd[3:0];
        R_TRIG_TYPE:  cr.trig_type <= wd[7:0];
        R_ECR_PER:    cr.ecr_period <= wd;
        R_BKT_EN:     cr.bkt_en <= wd[N_BKT-1:0];
        8'b0001_00??: cr.bkt_size[a[1:0]] <= wd[7:0];
        8'b0001_01??: cr.bkt_rate[a[1:0]] <= wd;
        R_CNT_SEL:    cr.cnt_sel <= wd[4*N_CNT-1:0];
        8'b0001_11??: for (int i = 0; i < 16; i++)
                        if (16*int'(a[1:0]) + i < N_IO) cr.in_en[16*int'(a[1:0]) + i] <= wd[i];
        8'b0010_????: for (int i = 0; i < 4; i++)
                        if (4*int'(a[3:0]) + i < N_IO) cr.out_sel[4*int'(a[3:0]) + i] <= wd[4*i +: 4];
        8'b0011_00??: for (int i = 0; i < 16; i++)
                        if (16*int'(a[1:0]) + i < N_IO) cr.out_en[16*int'(a[1:0]) + i] <= wd[i];
        8'b0011_01??: for (int i = 0; i < 16; i++)
                        if (16*int'(a[1:0]) + i < N_IO) cr.out_lvl[16*int'(a[1:0]) + i] <= wd[i];
        R_SEQ_ST_L:   cr.seq_start[15:0] <= wd;
        R_SEQ_ST_H:   cr.seq_start[SRAM_AW-1:16] <= wd[SRAM_AW-17:0];
        R_SEQ_LEN_L:  cr.seq_len[15:0] <= wd;
        R_SEQ_LEN_H:  cr.seq_len[SRAM_AW-1:16] <= wd[SRAM_AW-17:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg                  = cr;
    cfg.clk_sel_80       = ctrl[CTRL_CLK80];
    cfg.trig_en          = ctrl[CTRL_TRIG_EN];
    cfg.orbit_ext        = ctrl[CTRL_ORBIT_EXT];
    cfg.busy_gate        = ctrl[CTRL_BUSY_GATE];
    cfg.bcr_veto         = ctrl[CTRL_BCR_VETO];
    cfg.ecr_periodic     = ctrl[CTRL_ECR_PER];
    cfg.ecr_ext          = ctrl[CTRL_ECR_EXT];
    cfg.seq_stop_on_busy = ctrl[CTRL_SEQ_STOP];
    cfg.seq_loop         = ctrl[CTRL_SEQ_LOOP];
    cfg.seq_mode         = ctrl[CTRL_SEQ_MODE +: 2];
  end

  // ---------------------------------------------------------------- button
  localparam int unsigned DB_W = $clog2(DEBOUNCE + 1);
  logic [2:0]      prst_s;
  logic [DB_W-1:0] prst_hold;
  logic [4:0]      prst_fn;
  logic            prst_press;

  assign prst_press = prst_s[1] && !prst_s[2] && prst_hold == '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      prst_s    <= '0;
      prst_hold <= '0;
      prst_fn   <= '0;
    end else begin
      prst_s <= {prst_s[1:0], prog_reset};
      if (prst_press)           prst_hold <= DB_W'(DEBOUNCE);
      else if (prst_hold != '0) prst_hold <= prst_hold - DB_W'(1);
      if (wr && a == R_PRST_FN) prst_fn <= wd[4:0];
    end
  end

  // ---------------------------------------------------------------- commands
  logic [SRAM_AW-1:0] hptr_wr;
  logic [4:0]         pls;

  assign pls = ((wr && a == R_PULSE) ? wd[4:0] : 5'b0) | (prst_press ? prst_fn : 5'b0);

  always_comb begin
    hptr_wr = sts.seq_hptr;
    if (a == R_SEQ_ADR_L) hptr_wr[15:0]         = wd;
    if (a == R_SEQ_ADR_H) hptr_wr[SRAM_AW-1:16] = wd[SRAM_AW-17:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cmd <= '0;
    end else begin
      cmd.ecr        <= pls[PLS_ECR];
      cmd.trig       <= pls[PLS_TRIG];
      cmd.out        <= pls[PLS_OUT];
      cmd.cnt_clr    <= pls[PLS_CNT_CLR];
      cmd.seq_rd     <= pls[PLS_SEQ_RD];
      cmd.seq_wr     <= wr && a == R_SEQ_DATA;
      cmd.seq_ptr_ld <= wr && (a == R_SEQ_ADR_L || a == R_SEQ_ADR_H);
      if (wr && a == R_SEQ_DATA) cmd.seq_wdata <= wd;
      if (wr && (a == R_SEQ_ADR_L || a == R_SEQ_ADR_H)) cmd.seq_ptr <= hptr_wr;
    end
  end

  // ---------------------------------------------------------------- reads
  function automatic logic [15:0] bits16(input logic [N_IO-1:0] v, input logic [1:0] w);
    logic [63:0] x;
    x = 64'(v);
    return x[16*w +: 16];
  endfunction

  always_comb begin
    rdata = '0;
    casez (a)
      R_ID:         rdata = ID_VALUE;
      R_VERSION:    rdata = VERSION_VALUE;
      R_SWITCH:     rdata = {serial_sw, modrec_sw};
      R_BOARD:      rdata = {base_sw, prog_reset, 3'b000, mode_sw};
      R_CTRL:       rdata = ctrl;
      R_LED:        rdata = 16'(cr.leds);
      R_ORBIT_LEN:  rdata = 16'(cr.orbit_len);
      R_VETO:       rdata = {cr.veto_after, cr.veto_before};
      R_RND_LO:     rdata = cr.rnd_thresh[15:0];
      R_RND_HI:     rdata = cr.rnd_thresh[31:16];
      R_SIMPLE_DT:  rdata = 16'(cr.simple_dt);
      R_TRIG_MASK:  rdata = 16'(cr.trig_mask);
      R_TRIG_TYPE:  rdata = 16'(cr.trig_type);
      R_ECR_PER:    rdata = cr.ecr_period;
      R_BKT_EN:     rdata = 16'(cr.bkt_en);
      8'b0001_00??: rdata = 16'(cr.bkt_size[a[1:0]]);
      8'b0001_01??: rdata = cr.bkt_rate[a[1:0]];
      R_CNT_SEL:    rdata = 16'(cr.cnt_sel);
      R_PRST_FN:    rdata = 16'(prst_fn);
      8'b0001_11??: rdata = bits16(cr.in_en, a[1:0]);
      8'b0010_????: for (int i = 0; i < 4; i++)
                      if (4*int'(a[3:0]) + i < N_IO) rdata[4*i +: 4] = cr.out_sel[4*int'(a[3:0]) + i];
      8'b0011_00??: rdata = bits16(cr.out_en, a[1:0]);
      8'b0011_01??: rdata = bits16(cr.out_lvl, a[1:0]);
      R_SEQ_ADR_L:  rdata = sts.seq_hptr[15:0];
      R_SEQ_ADR_H:  rdata = 16'(sts.seq_hptr[SRAM_AW-1:16]);
      R_SEQ_DATA:   rdata = sts.seq_rdata;
      R_SEQ_ST_L:   rdata = cr.seq_start[15:0];
      R_SEQ_ST_H:   rdata = 16'(cr.seq_start[SRAM_AW-1:16]);
      R_SEQ_LEN_L:  rdata = cr.seq_len[15:0];
      R_SEQ_LEN_H:  rdata = 16'(cr.seq_len[SRAM_AW-1:16]);
      R_STATUS:     rdata = sts.flags;
      R_L1ID_L:     rdata = sts.l1id[15:0];
      R_L1ID_H:     rdata = sts.l1id[31:16];
      R_BCID:       rdata = 16'(sts.bcid);
      R_L1A_CNT:    rdata = sts.l1a_cnt[15:0];
      R_L1A_CNT+1:  rdata = sts.l1a_cnt[31:16];
      R_LOST_CNT:   rdata = sts.lost_cnt[15:0];
      R_LOST_CNT+1: rdata = sts.lost_cnt[31:16];
      R_ORB_CNT:    rdata = sts.orbit_cnt[15:0];
      R_ORB_CNT+1:  rdata = sts.orbit_cnt[31:16];
      R_SEQ_WP:     rdata = sts.seq_wptr[15:0];
      R_SEQ_WP+1:   rdata = 16'(sts.seq_wptr[SRAM_AW-1:16]);
      8'b0100_11??: rdata = bits16(sts.in_state, a[1:0]);
      8'b0101_0???: rdata = sts.gcnt[a[2:1]][16*a[0] +: 16];
      default:      rdata = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rsp <= '0;
    end else begin
      rsp.ack   <= req.req;
      rsp.rdata <= rd ? rdata : '0;
    end
  end
endmodule
