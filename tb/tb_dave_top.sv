// tb_dave_top: end-to-end run of the whole firmware at its default sizes
// (full 4M-word SRAM model, 56 I/O, 4 buckets, 4 counters), configured only
// through the VME and USB ports as a host would.
//
// Sequence: identity and switch reads; one default LHC orbit of 3564 BCs
// measured on a LEMO output; then a 200-BC orbit with random triggers,
// simple and complex deadtime, the BCR veto window, periodic ECRs, external
// and software triggers, a software trigger from the programmable reset
// button, BUSY gating, recording into the SRAM stopped by the
// BUSY edge, host read-back of recorded words, and playback of the recording
// re-issued as L1As. Every mechanism is counted; one that never happened
// counts as a failure. L1As, ECRs and BCRs are checked against the register
// counters, the L1ID register, the veto window and the deadtime spacing.
module tb_dave_top;
  import dave_pkg::*;
  logic clk = 0, rst = 1;
  logic vme_as_n, vme_write_n, vme_lword_n, vme_iack_n, vme_d_oe, vme_dtack_n;
  logic [1:0] vme_ds_n;
  logic [5:0] vme_am;
  logic [31:1] vme_addr;
  logic [15:0] vme_d_in, vme_d_out;
  hbus_req_t usb_req;
  hbus_rsp_t usb_rsp;
  logic [7:0] base_sw, serial_sw, modrec_sw;
  logic [3:0] mode_sw;
  logic prog_reset, clk_sel_80, l1a;
  logic [N_LED-1:0] leds;
  logic [N_LEMO-1:0] lemo_in, lemo_out;
  logic [N_AUX-1:0] aux_in, aux_out, aux_oe;
  logic [7:0] ttype;
  logic sram_ce_n, sram_we_n, sram_oe;
  logic [SRAM_AW-1:0] sram_addr;
  logic [SRAM_DW-1:0] sram_dout, sram_din;
  logic [17:0] sram_q;
  int checks = 0, failures = 0;
  int t = 0;

  dave_top dut (.*);

  gs8642z18_model u_sram (
    .clk, .ce_n(sram_ce_n), .we_n(sram_we_n), .addr(sram_addr),
    .dq_in({2'b00, sram_oe ? sram_dout : 16'h0}), .dq_out(sram_q)
  );
  assign sram_din = sram_q[15:0];

  always #12.5 clk = ~clk;     // 40 MHz BC clock
  always @(posedge clk) t <= t + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at t=%0d", what, t); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host access
  task automatic vme_access(input bit we, input logic [7:0] a, input logic [15:0] wd,
                            output logic [15:0] rd);
    int n;
    @(negedge clk);
    vme_addr = {base_sw, 15'h0, a}; vme_am = 6'h09; vme_write_n = !we; vme_d_in = wd;
    @(negedge clk); vme_as_n = 0;
    @(negedge clk); vme_ds_n = 2'b00;
    n = 0;
    while (vme_dtack_n && n < 50) begin @(negedge clk); n++; end
    check(!vme_dtack_n, "VME DTACK");
    rd = vme_d_out;
    vme_ds_n = 2'b11;
    while (!vme_dtack_n) @(negedge clk);
    vme_as_n = 1;
    @(negedge clk);
  endtask

  task automatic wr(input logic [7:0] a, input logic [15:0] d);
    logic [15:0] dummy;
    vme_access(1, a, d, dummy);
  endtask

  task automatic rd(input logic [7:0] a, output logic [15:0] d);
    vme_access(0, a, 16'h0, d);
  endtask

  task automatic usb(input bit we, input logic [7:0] a, input logic [15:0] wd,
                     output logic [15:0] rdata);
    @(negedge clk); usb_req = '{req: 1'b1, we: we, addr: a, wdata: wd};
    @(negedge clk); usb_req.req = 0;
    while (!usb_rsp.ack) @(negedge clk);
    rdata = usb_rsp.rdata;
  endtask

  // ------------------------------------------------------------ monitors
  // LEMO outputs are programmed: 0 BCR, 1 L1A, 2 ECR, 3 deadtime, 4 veto,
  // 5 playback L1A, 6 static level, 7 lost trigger.
  int n_bcr = 0, last_bcr = -1, bcr_period = 0;
  int n_ecr = 0, last_ecr = -1, ecr_gap = 0;
  int n_l1a = 0, last_l1a = -1000, min_l1a_gap = 1 << 30;
  int n_pb = 0, n_veto_l1a = 0, evt_since_ecr = 0;
  int m_rand = 0, m_simple = 0, m_complex = 0, m_veto = 0, m_busy = 0, m_lost = 0;
  int m_ext = 0, m_sw = 0, m_rec_stop = 0, m_play = 0, m_button = 0;
  int rec_l1a = 0;
  bit was_rec = 0;
  logic [15:0] expw [$];
  int rec_prev;

  always @(negedge clk) if (!rst) begin
    if (lemo_out[0]) begin
      if (last_bcr >= 0) bcr_period = t - last_bcr;
      last_bcr = t; n_bcr++;
    end
    if (lemo_out[2]) begin
      if (last_ecr >= 0) ecr_gap = t - last_ecr;
      last_ecr = t; n_ecr++;
    end
    if (l1a) begin
      if (t - last_l1a < min_l1a_gap) min_l1a_gap = t - last_l1a;
      last_l1a = t; n_l1a++;
      if (dut.veto) n_veto_l1a++;
    end
    if (lemo_out[5]) n_pb++;
    // mechanisms seen inside the trigger module
    if (dut.u_trig.rnd && dut.cfg.trig_mask[TS_RANDOM]) m_rand++;
    if (dut.u_trig.dead_simple && dut.u_trig.cand) m_simple++;
    if (dut.u_trig.dead_complex && dut.u_trig.cand) m_complex++;
    if (dut.u_trig.veto && dut.u_trig.cand) m_veto++;
    if (dut.u_trig.busy_blk && dut.u_trig.cand) m_busy++;
    if (lemo_out[7]) m_lost++;
    if (dut.u_trig.src[TS_EXT] && dut.u_trig.accept) m_ext++;
    if (dut.u_trig.src[TS_SW] && dut.u_trig.accept) m_sw++;
    if (dut.play_active && dut.pb_l1a) m_play++;
    if (dut.u_regs.prst_press) m_button++;
    // expected SRAM words while recording (same encoding as the block)
    if (dut.rec_active) begin
      if (!was_rec) rec_prev = t - 1;
      if (dut.l1a || dut.bcr || dut.ecr || t - rec_prev == 8191) begin
        expw.push_back({dut.ecr, dut.bcr, dut.l1a, 13'(t - rec_prev)});
        rec_prev = t;
      end
      if (dut.l1a) rec_l1a++;
    end
    if (was_rec && !dut.rec_active) m_rec_stop++;
    was_rec = dut.rec_active;
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    logic [15:0] d, d2;
    int n0, t0, n_clr;
    vme_as_n = 1; vme_ds_n = 2'b11; vme_write_n = 1; vme_lword_n = 1; vme_iack_n = 1;
    vme_am = 0; vme_addr = 0; vme_d_in = 0; usb_req = '0;
    base_sw = 8'h3C; serial_sw = 8'd17; modrec_sw = 8'd2; mode_sw = 4'd5; prog_reset = 0;
    lemo_in = '0; aux_in = '0;
    repeat (4) @(posedge clk);
    rst = 0;

    // identity over VME, switches over USB, LEDs and clock select
    rd(R_ID, d);            check(d == 16'hDA7E, "ID over VME");
    usb(0, R_SWITCH, 0, d); check(d == {8'd17, 8'd2}, "switches over USB");
    usb(1, R_LED, 16'h5555, d);
    @(negedge clk);         check(leds == 15'h5555, "LEDs written over USB");
    wr(R_CTRL, 16'h0001);   check(clk_sel_80, "80 MHz clock select");

    // outputs: LEMO 0..7 enabled with their sources
    wr(R_OUT_SEL + 0, {SRC_DEAD, SRC_ECR, SRC_L1A, SRC_BCR});
    wr(R_OUT_SEL + 1, {SRC_LOST, SRC_LEVEL, SRC_PB_L1A, SRC_VETO});
    wr(R_OUT_LVL, 16'h0040);
    wr(R_OUT_EN, 16'h00FF);
    repeat (3) @(negedge clk);
    check(lemo_out[6], "static output level");
    check(aux_oe == '0, "header outputs not driven");

    // one default LHC orbit
    n0 = n_bcr;
    while (n_bcr < n0 + 3) @(negedge clk);
    check(bcr_period == 3564, "default orbit of 3564 BCs");

    // short orbit, random trigger, veto, deadtime, periodic ECR
    wr(R_ORBIT_LEN, 16'd200);
    wr(R_VETO, 16'h0302);                       // 2 before, 3 after the BCR
    wr(R_RND_LO, 16'h0000); wr(R_RND_HI, 16'h0200);   // 1/128 per BC
    wr(R_BKT_SIZE, 16'd4); wr(R_BKT_RATE, 16'd100);   // 4 in 100 BCs
    wr(R_ECR_PER, 16'd5);
    wr(R_IN_EN, 16'h000F);
    wr(R_TRIG_MASK, 16'h0007);                  // random, external, software
    wr(R_PULSE, 16'h0008);                      // clear counters
    n_clr = n_l1a;
    wr(R_CTRL, 16'h0001 | 16'h0002 | 16'h0008 | 16'h0010 | 16'h0020 | 16'h0040 | 16'h0100);
    n0 = n_l1a;
    t0 = t;
    repeat (20000) @(negedge clk);
    check(n_l1a - n0 > 40, "random L1As issued");
    check(ecr_gap == 1000, "periodic ECR every 5 orbits of 200 BCs");
    check(bcr_period == 200, "programmed orbit of 200 BCs");
    // external trigger pulse on LEMO input 0 and a software trigger
    repeat (3) begin
      @(negedge clk); while (dut.bcid < 20 || dut.bcid > 150 || dut.dead) @(negedge clk);
      lemo_in[0] = 1; repeat (2) @(negedge clk); lemo_in[0] = 0;
      @(negedge clk); lemo_in[0] = 1;           // second edge 3 BCs later: dead
      @(negedge clk); lemo_in[0] = 0;
      repeat (30) @(negedge clk);
      wr(R_PULSE, 16'h0002);
      repeat (30) @(negedge clk);
    end
    // programmable reset button given the software-trigger function
    wr(R_PRST_FN, 16'(1 << PLS_TRIG));
    n0 = m_sw;
    @(negedge clk); while (dut.bcid < 20 || dut.bcid > 150 || dut.dead) @(negedge clk);
    prog_reset = 1; repeat (20) @(negedge clk); prog_reset = 0;
    repeat (10) @(negedge clk);
    check(m_sw == n0 + 1, "button press gives one software trigger");
    // BUSY on LEMO input 1: gates triggers and stops the recording
    @(negedge clk); lemo_in[1] = 1;
    repeat (4) @(negedge clk);
    n0 = n_l1a;
    repeat (3000) @(negedge clk);
    check(n_l1a == n0, "no L1A while BUSY");
    lemo_in[1] = 0;
    rd(R_STATUS, d);
    check(!d[ST_REC], "BUSY stopped the recording");
    // counters and identifiers
    wr(R_CTRL, 16'h0001);                       // triggers off, sequencer idle
    repeat (10) @(negedge clk);
    rd(R_L1A_CNT, d); rd(R_L1A_CNT + 1, d2);
    check({d2, d} == 32'(n_l1a - n_clr) && {d2, d} > 0, "L1A counter matches L1As seen");
    check(min_l1a_gap >= 5, "simple deadtime spacing");
    check(n_veto_l1a == 0, "no L1A inside the BCR veto window");
    rd(R_STATUS, d);
    // recorded words read back through the host port
    rd(R_SEQ_WP, d); rd(R_SEQ_WP + 1, d2);
    check(int'({d2[5:0], d}) == expw.size(), "record pointer = words seen");
    wr(R_SEQ_ADR_L, 16'h0); wr(R_SEQ_ADR_H, 16'h0);
    for (int i = 0; i < 16 && i < expw.size(); i++) begin
      wr(R_PULSE, 16'h0010);
      rd(R_SEQ_DATA, d);
      check(d == expw[i], "recorded word via host port");
    end
    // playback re-issued as L1As (playback source only, deadtime off)
    wr(R_SEQ_ST_L, 16'h0); wr(R_SEQ_ST_H, 16'h0);
    wr(R_SEQ_LEN_L, 16'(expw.size())); wr(R_SEQ_LEN_H, 16'(expw.size() >> 16));
    wr(R_TRIG_MASK, 16'h0008);
    wr(R_SIMPLE_DT, 16'd0);
    wr(R_BKT_EN, 16'h0);
    n0 = n_pb;
    wr(R_CTRL, 16'h0001 | 16'h0002 | 16'h0200);
    repeat (10) @(negedge clk);
    while (dut.play_active) @(negedge clk);
    repeat (5) @(negedge clk);
    check(n_pb - n0 == rec_l1a, "playback gives the recorded L1As");
    rd(R_STATUS, d);
    check(!d[ST_UNDERRUN], "no playback underrun");
    wr(R_CTRL, 16'h0001);

    // every mechanism must have happened
    check(n_bcr > 0,      "mechanism: BCR");
    check(n_ecr > 0,      "mechanism: ECR");
    check(m_rand > 0,     "mechanism: random trigger");
    check(m_simple > 0,   "mechanism: simple deadtime");
    check(m_complex > 0,  "mechanism: complex deadtime");
    check(m_veto > 0,     "mechanism: BCR veto");
    check(m_busy > 0,     "mechanism: BUSY gating");
    check(m_lost > 0,     "mechanism: lost trigger");
    check(m_ext > 0,      "mechanism: external trigger");
    check(m_sw > 0,       "mechanism: software trigger");
    check(m_rec_stop > 0, "mechanism: recording stopped by BUSY");
    check(m_play > 0,     "mechanism: playback L1A");
    check(m_button > 0,   "mechanism: programmable reset button");
    $display("BCR %0d ECR %0d L1A %0d random %0d simple-dead %0d complex-dead %0d veto %0d busy %0d lost %0d ext %0d sw %0d rec-stop %0d play %0d button %0d words %0d",
             n_bcr, n_ecr, n_l1a, m_rand, m_simple, m_complex, m_veto, m_busy, m_lost,
             m_ext, m_sw, m_rec_stop, m_play, m_button, expw.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
