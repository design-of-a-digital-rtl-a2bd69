// tb_reg_block: register map checks. Reset defaults, write/read-back of the
// read/write registers and their effect on the configuration bundle, the
// one-cycle commands, the read-only switch and status registers, and the
// one-cycle ack timing. The programmable reset button is checked with a
// short debounce time (20 clocks): it does nothing until given a function,
// then one press gives exactly the selected commands once, bounces within the
// debounce time give nothing more, and a later press works again.
module tb_reg_block;
  import dave_pkg::*;
  logic clk = 0, rst = 1;
  hbus_req_t req;
  hbus_rsp_t rsp;
  logic [7:0] serial_sw, modrec_sw, base_sw;
  logic [3:0] mode_sw;
  logic prog_reset;
  cfg_t cfg;
  cmd_t cmd;
  status_t sts;
  int checks = 0, failures = 0;

  reg_block #(.DEBOUNCE(20)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [15:0] d);
    @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk); req = '0;
    check(rsp.ack, "write ack one cycle later");
  endtask

  task automatic rd(input logic [7:0] a, output logic [15:0] d);
    @(negedge clk); req = '{req: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk); req = '0;
    check(rsp.ack, "read ack one cycle later");
    d = rsp.rdata;
  endtask

  // Press the button at a falling edge (optionally bouncing for 8 clocks) and
  // count the commands seen in the next 16 clocks.
  task automatic press_count(input bit bounce, output int n_ecr, output int n_clr, output int n_trig);
    n_ecr = 0; n_clr = 0; n_trig = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      prog_reset = (bounce && i < 8) ? 1'(i % 2 == 0) : 1'b1;
      n_ecr  += int'(cmd.ecr);
      n_clr  += int'(cmd.cnt_clr);
      n_trig += int'(cmd.trig);
    end
  endtask

  initial begin
    int n_ecr, n_clr, n_trig;
    logic [15:0] d;
    bit seen;
    req = '0; serial_sw = 8'h2C; modrec_sw = 8'h03; base_sw = 8'hA5; mode_sw = 4'h9;
    prog_reset = 1; sts = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // identity and switches
    rd(R_ID, d);      check(d == 16'hDA7E, "ID");
    rd(R_SWITCH, d);  check(d == 16'h2C03, "serial / modification switches");
    rd(R_BOARD, d);   check(d == 16'hA589, "base, programmable reset, mode");
    // defaults
    check(cfg.orbit_len == 12'd3564, "default orbit 3564");
    check(cfg.simple_dt == 8'd4, "default simple deadtime");
    check(!cfg.trig_en && cfg.out_en == '0 && cfg.in_en == '0, "triggers and I/O off after reset");
    // control bits
    wr(R_CTRL, 16'h0203);
    check(cfg.clk_sel_80 && cfg.trig_en && cfg.seq_mode == 2'd2 && !cfg.orbit_ext, "control bits");
    rd(R_CTRL, d); check(d == 16'h0203, "control read back");
    // plain registers
    wr(R_ORBIT_LEN, 16'd100);  check(cfg.orbit_len == 12'd100, "orbit length");
    wr(R_VETO, 16'h0302);      check(cfg.veto_after == 3 && cfg.veto_before == 2, "veto window");
    wr(R_RND_LO, 16'h5678); wr(R_RND_HI, 16'h1234);
    check(cfg.rnd_thresh == 32'h1234_5678, "random threshold");
    rd(R_RND_HI, d); check(d == 16'h1234, "random threshold read back");
    wr(R_BKT_SIZE + 2, 16'd9); wr(R_BKT_RATE + 2, 16'd777);
    check(cfg.bkt_size[2] == 9 && cfg.bkt_rate[2] == 777, "bucket 2 settings");
    rd(R_BKT_RATE + 2, d); check(d == 16'd777, "bucket rate read back");
    wr(R_IN_EN + 3, 16'h00AB); check(cfg.in_en[55:48] == 8'hAB, "input enables 48..55");
    wr(R_OUT_SEL + 13, 16'hFEDC);
    check(cfg.out_sel[52] == 4'hC && cfg.out_sel[55] == 4'hF, "output selects 52..55");
    rd(R_OUT_SEL + 13, d); check(d == 16'hFEDC, "output selects read back");
    wr(R_OUT_EN, 16'h8001); check(cfg.out_en[0] && cfg.out_en[15] && !cfg.out_en[1], "output enables");
    wr(R_SEQ_LEN_H, 16'h003F); wr(R_SEQ_LEN_L, 16'h0001);
    check(cfg.seq_len == 22'h3F_0001, "playback length");
    // commands last one cycle
    @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: R_PULSE, wdata: 16'h0003};
    @(negedge clk); req = '0;
    check(cmd.ecr && cmd.trig && !cmd.cnt_clr, "pulse register commands");
    @(negedge clk);
    check(!cmd.ecr && !cmd.trig, "commands last one cycle");
    rd(R_PULSE, d); check(d == 0, "pulse register reads 0");
    for (int b = 0; b < 5; b++) begin
      @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: R_PULSE, wdata: 16'(1 << b)};
      @(negedge clk); req = '0;
      check({cmd.seq_rd, cmd.cnt_clr, cmd.out, cmd.trig, cmd.ecr} == 5'(1 << b), "one command per pulse bit");
    end
    @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: R_SEQ_DATA, wdata: 16'hCAFE};
    @(negedge clk); req = '0;
    check(cmd.seq_wr && cmd.seq_wdata == 16'hCAFE, "SRAM host write command");
    sts.seq_hptr = 22'h2A_0000;
    @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: R_SEQ_ADR_L, wdata: 16'h1111};
    @(negedge clk); req = '0;
    check(cmd.seq_ptr_ld && cmd.seq_ptr == 22'h2A_1111, "host pointer load keeps high part");
    // status read back
    sts.flags = 16'h0421; sts.l1id = 32'h0712_3456; sts.bcid = 12'd77;
    sts.l1a_cnt = 32'hDEAD_BEEF; sts.in_state = 56'hAB_0000_0000_0000; sts.gcnt[3] = 32'h0102_0304;
    sts.seq_rdata = 16'h5A5A;
    rd(R_STATUS, d);     check(d == 16'h0421, "status flags");
    rd(R_L1ID_H, d);     check(d == 16'h0712, "L1ID high");
    rd(R_L1ID_L, d);     check(d == 16'h3456, "L1ID low");
    rd(R_BCID, d);       check(d == 16'd77, "BCID");
    rd(R_L1A_CNT + 1, d); check(d == 16'hDEAD, "L1A counter high");
    rd(R_IN_STATE + 3, d); check(d == 16'h00AB, "input state");
    rd(R_GCNT + 7, d);   check(d == 16'h0102, "generic counter 3 high");
    rd(R_SEQ_DATA, d);   check(d == 16'h5A5A, "SRAM host read data");
    rd(8'hF0, d);        check(d == 0, "unused address reads 0");
    // programmable reset button
    prog_reset = 0; repeat (30) @(negedge clk);
    press_count(1'b0, n_ecr, n_clr, n_trig);
    check(n_ecr == 0 && n_clr == 0 && n_trig == 0, "button without function gives no command");
    wr(R_PRST_FN, 16'h0009);
    rd(R_PRST_FN, d); check(d == 16'h0009, "button function read back");
    prog_reset = 0; repeat (30) @(negedge clk);
    press_count(1'b0, n_ecr, n_clr, n_trig);
    check(n_ecr == 1 && n_clr == 1 && n_trig == 0, "button press gives ECR and counter clear once");
    prog_reset = 0; repeat (30) @(negedge clk);
    press_count(1'b1, n_ecr, n_clr, n_trig);
    check(n_ecr == 1 && n_clr == 1, "bouncing press gives one command");
    prog_reset = 0; repeat (30) @(negedge clk);
    press_count(1'b0, n_ecr, n_clr, n_trig);
    check(n_ecr == 1, "second press after the debounce time works");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
