// tb_dave_rates: the two operating points of the card run on the whole
// firmware at its default sizes (dave_top with the full 4M x 18 SRAM model),
// configured over the USB register port.
//
// 1. Random triggers at 100 kHz, the highest rate the card is specified for:
//    random threshold round(100e3 / 40.08e6 * 2^32), complex deadtime off,
//    default simple deadtime of 4 BCs, default 3564-BC orbit. Over 800 000
//    BCs (about 20 ms) the random request rate must be 100 kHz within 8 %,
//    at least 97 % of the requests must become L1As (the simple deadtime
//    costs about 1 %), and no two L1As may be closer than 5 BCs.
// 2. Recording at a 75 kHz L1A rate: the random rate is set a little above
//    75 kHz to make up for the deadtime, and the sequencer records for
//    1 600 000 BCs (about 40 ms). The number of words written, read from the
//    write-pointer register, must equal the number of BCs that carried an
//    L1A, BCR or ECR, as counted at the card's outputs. The measured word rate
//    is then scaled to the full 2^22-word memory: the recorded history must
//    last between 45 and 55 s (the card is quoted at about 50 s).
// The clock period used for the rate arithmetic is 40.08 MHz, the LHC bunch
// clock. The rates and capacity are printed.
module tb_dave_rates;
  import dave_pkg::*;
  localparam real F_BC = 40.08e6;
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
  longint t = 0;

  dave_top dut (.*);

  gs8642z18_model u_sram (
    .clk, .ce_n(sram_ce_n), .we_n(sram_we_n), .addr(sram_addr),
    .dq_in({2'b00, sram_oe ? sram_dout : 16'h0}), .dq_out(sram_q)
  );
  assign sram_din = sram_q[15:0];

  always #12.5 clk = ~clk;
  always @(posedge clk) t <= t + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at t=%0d", what, t); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic usb(input bit we, input logic [7:0] a, input logic [15:0] wd,
                     output logic [15:0] rdata);
    @(negedge clk); usb_req = '{req: 1'b1, we: we, addr: a, wdata: wd};
    @(negedge clk); usb_req.req = 0;
    while (!usb_rsp.ack) @(negedge clk);
    rdata = usb_rsp.rdata;
  endtask

  task automatic wr(input logic [7:0] a, input logic [15:0] d);
    logic [15:0] dummy;
    usb(1, a, d, dummy);
  endtask

  // Counts at the outputs of the firmware. LEMO 0 carries BCR, LEMO 1 L1A and
  // LEMO 2 ECR, each registered one BC after the signal itself.
  longint n_req = 0, n_l1a = 0, n_flag = 0, last_l1a = -1000, min_gap = 1 << 30;
  bit     counting = 0;

  always @(negedge clk) if (counting) begin
    if (dut.u_trig.rnd) n_req++;
    if (lemo_out[1]) begin
      n_l1a++;
      if (t - last_l1a < min_gap) min_gap = t - last_l1a;
      last_l1a = t;
    end
    if (dut.rec_active && (lemo_out[0] || lemo_out[1] || lemo_out[2])) n_flag++;
  end

  initial begin
    logic [15:0] lo, hi;
    longint words;
    real r_req, r_l1a, secs;
    vme_as_n = 1; vme_ds_n = 2'b11; vme_write_n = 1; vme_lword_n = 1; vme_iack_n = 1;
    vme_am = 0; vme_addr = 0; vme_d_in = 0; usb_req = '0;
    base_sw = 8'h3C; serial_sw = 0; modrec_sw = 0; mode_sw = 0; prog_reset = 0;
    lemo_in = '0; aux_in = '0;
    repeat (4) @(posedge clk);
    rst = 0;

    wr(R_OUT_SEL, {SRC_ZERO, SRC_ECR, SRC_L1A, SRC_BCR});
    wr(R_OUT_EN, 16'h0007);
    wr(R_BKT_EN, 16'h0000);

    // ---------------------------------------------------- 100 kHz random
    wr(R_RND_LO, 16'h8352);
    wr(R_RND_HI, 16'h00A3);
    wr(R_CTRL, 16'(1 << CTRL_TRIG_EN));
    repeat (10) @(negedge clk);
    counting = 1;
    repeat (800000) @(negedge clk);
    counting = 0;
    r_req = real'(n_req) * F_BC / 800000.0;
    r_l1a = real'(n_l1a) * F_BC / 800000.0;
    $display("100 kHz setting: requests %0.1f kHz, L1As %0.1f kHz, minimum gap %0d BCs",
             r_req / 1e3, r_l1a / 1e3, min_gap);
    check(r_req > 92e3 && r_req < 108e3, "random request rate 100 kHz within 8 %");
    check(real'(n_l1a) >= 0.97 * real'(n_req), "at least 97 % of requests accepted");
    check(min_gap >= 5, "simple deadtime keeps L1As 5 BCs apart");

    // ---------------------------------------------------- 75 kHz record
    wr(R_RND_LO, 16'h73CA);
    wr(R_RND_HI, 16'h007B);
    n_req = 0; n_l1a = 0; n_flag = 0;
    wr(R_CTRL, 16'((1 << CTRL_TRIG_EN) | (SEQ_RECORD << CTRL_SEQ_MODE)));
    counting = 1;
    repeat (1600000) @(negedge clk);
    wr(R_CTRL, 16'(1 << CTRL_TRIG_EN));
    repeat (10) @(negedge clk);
    counting = 0;
    usb(0, R_SEQ_WP, 0, lo);
    usb(0, R_SEQ_WP + 1, 0, hi);
    words = longint'({hi, lo});
    r_l1a = real'(n_l1a) * F_BC / 1600000.0;
    secs  = real'(1 << SRAM_AW) * 1600000.0 / F_BC / real'(words);
    $display("75 kHz recording: L1As %0.1f kHz, %0d words in 1600000 BCs, 4M words last %0.1f s",
             r_l1a / 1e3, words, secs);
    check(r_l1a > 70e3 && r_l1a < 80e3, "L1A rate 75 kHz within 7 %");
    check(words == n_flag, "one SRAM word per BC with L1A, BCR or ECR");
    check(secs > 45.0 && secs < 55.0, "about 50 s of history in the full SRAM");
    check(!dut.wrapped, "memory not wrapped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
