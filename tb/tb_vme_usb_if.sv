// tb_vme_usb_if: VME master and USB master against a register-bus memory.
// Checks A32/D16 writes and reads with user and supervisory data AMs, that
// the card ignores other base addresses, other AMs (A24, block transfer),
// 32-bit and single-byte transfers, IACK cycles, addresses above the
// register window and address-only cycles, that DTACK* is released after
// DS*, that USB accesses work, and that simultaneous VME and USB accesses
// both complete.
module tb_vme_usb_if;
  import dave_pkg::*;
  logic clk = 0, rst = 1;
  logic vme_as_n, vme_write_n, vme_lword_n, vme_iack_n, vme_d_oe, vme_dtack_n;
  logic [1:0] vme_ds_n;
  logic [5:0] vme_am;
  logic [31:1] vme_addr;
  logic [15:0] vme_d_in, vme_d_out;
  logic [7:0] base_sw;
  hbus_req_t usb_req, bus_req;
  hbus_rsp_t usb_rsp, bus_rsp;
  logic [15:0] regs [256];
  int checks = 0, failures = 0;
  int open_reqs = 0, n_usb_ok = 0;

  vme_usb_if dut (.*);

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

  // register-bus slave: answers 1..4 cycles after the request
  hbus_req_t r_open;
  int        r_wait;
  always @(posedge clk) begin
    bus_rsp <= '0;
    if (rst) begin
      open_reqs <= 0;
    end else if (open_reqs > 0) begin
      if (bus_req.req) begin failures++; $display("FAIL second request while one is open"); end
      if (r_wait == 0) begin
        if (r_open.we) regs[r_open.addr] <= r_open.wdata;
        bus_rsp   <= '{ack: 1'b1, rdata: r_open.we ? 16'h0 : regs[r_open.addr]};
        open_reqs <= 0;
      end else begin
        r_wait <= r_wait - 1;
      end
    end else if (bus_req.req) begin
      r_open    <= bus_req;
      r_wait    <= $urandom_range(3);
      open_reqs <= 1;
    end
  end

  task automatic vme(input logic [31:0] a, input logic [5:0] am, input bit we,
                     input logic [15:0] wd, input logic [1:0] ds, input bit lword_n,
                     input bit iack_n, output bit ack, output logic [15:0] rd);
    int n;
    @(negedge clk);
    vme_addr = a[31:1]; vme_am = am; vme_write_n = !we; vme_d_in = wd;
    vme_lword_n = lword_n; vme_iack_n = iack_n;
    @(negedge clk); vme_as_n = 0;
    @(negedge clk); vme_ds_n = ds;
    ack = 0; rd = 'x; n = 0;
    while (vme_dtack_n && n < 40) begin @(negedge clk); n++; end
    if (!vme_dtack_n) begin
      ack = 1;
      if (!we) begin
        rd = vme_d_out;
        checks++;
        if (!vme_d_oe) begin failures++; $display("FAIL data not driven on read"); end
      end
    end
    vme_ds_n = 2'b11;
    n = 0;
    while (!vme_dtack_n && n < 40) begin @(negedge clk); n++; end
    checks++;
    if (!vme_dtack_n || vme_d_oe) begin failures++; $display("FAIL DTACK/data not released"); end
    vme_as_n = 1;
    repeat (3) @(negedge clk);
  endtask

  task automatic usb(input bit we, input logic [7:0] a, input logic [15:0] wd,
                     output logic [15:0] rd);
    @(negedge clk); usb_req = '{req: 1'b1, we: we, addr: a, wdata: wd};
    @(negedge clk); usb_req.req = 0;
    while (!usb_rsp.ack) @(negedge clk);
    rd = usb_rsp.rdata;
  endtask

  initial begin
    bit ack;
    logic [15:0] rd;
    for (int i = 0; i < 256; i++) regs[i] = 16'(i * 7);
    vme_as_n = 1; vme_ds_n = 2'b11; vme_write_n = 1; vme_lword_n = 1; vme_iack_n = 1;
    vme_am = 0; vme_addr = 0; vme_d_in = 0; base_sw = 8'hA5; usb_req = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // D16 write and read, user data AM 0x09
    vme(32'hA500_0020, 6'h09, 1, 16'hBEEF, 2'b00, 1, 1, ack, rd);
    check(ack && regs[8'h10] == 16'hBEEF, "A32/D16 write, AM 0x09");
    vme(32'hA500_0020, 6'h09, 0, 0, 2'b00, 1, 1, ack, rd);
    check(ack && rd == 16'hBEEF, "A32/D16 read, AM 0x09");
    // supervisory AM 0x0D, other register
    vme(32'hA500_01FE, 6'h0D, 1, 16'h1357, 2'b00, 1, 1, ack, rd);
    check(ack && regs[8'hFF] == 16'h1357, "A32/D16 write, AM 0x0D");
    vme(32'hA500_0006, 6'h0D, 0, 0, 2'b00, 1, 1, ack, rd);
    check(ack && rd == 16'(3 * 7), "A32/D16 read, AM 0x0D");
    // not for this card
    vme(32'hA600_0020, 6'h09, 1, 16'h0BAD, 2'b00, 1, 1, ack, rd);
    check(!ack && regs[8'h10] == 16'hBEEF, "other base address ignored");
    vme(32'hA500_0020, 6'h39, 1, 16'h0BAD, 2'b00, 1, 1, ack, rd);
    check(!ack && regs[8'h10] == 16'hBEEF, "A24 AM ignored");
    vme(32'hA500_0020, 6'h0B, 0, 0, 2'b00, 1, 1, ack, rd);
    check(!ack, "block transfer AM ignored");
    vme(32'hA500_0020, 6'h09, 1, 16'h0BAD, 2'b00, 0, 1, ack, rd);
    check(!ack && regs[8'h10] == 16'hBEEF, "D32 (LWORD* low) ignored");
    vme(32'hA500_0020, 6'h09, 1, 16'h0BAD, 2'b10, 1, 1, ack, rd);
    check(!ack && regs[8'h10] == 16'hBEEF, "single-byte transfer ignored");
    vme(32'hA500_0020, 6'h09, 0, 0, 2'b00, 1, 0, ack, rd);
    check(!ack, "IACK cycle ignored");
    vme(32'hA500_0220, 6'h09, 1, 16'h0BAD, 2'b00, 1, 1, ack, rd);
    check(!ack && regs[8'h10] == 16'hBEEF, "address above register window ignored");
    // address-only cycle
    @(negedge clk); vme_addr = 32'hA500_0020 >> 1; vme_am = 6'h09;
    @(negedge clk); vme_as_n = 0;
    repeat (10) @(negedge clk);
    check(vme_dtack_n, "address-only cycle gets no DTACK");
    vme_as_n = 1;
    repeat (3) @(negedge clk);
    // USB
    usb(1, 8'h22, 16'h4242, rd);
    check(regs[8'h22] == 16'h4242, "USB write");
    usb(0, 8'h22, 0, rd);
    check(rd == 16'h4242, "USB read");
    // simultaneous accesses
    fork
      begin
        vme(32'hA500_0040, 6'h09, 1, 16'h7777, 2'b00, 1, 1, ack, rd);
        check(ack, "VME completes beside USB");
      end
      begin
        logic [15:0] r2;
        repeat (4) @(negedge clk);
        usb(1, 8'h21, 16'h6666, r2);
        n_usb_ok++;
      end
    join
    check(regs[8'h20] == 16'h7777 && regs[8'h21] == 16'h6666 && n_usb_ok == 1,
          "both hosts' writes landed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
