// tb_orbit_gen: checks BCID counting, the once-per-orbit BCR, the default
// LHC orbit of 3564 BCs, external orbit pulses and the orbit counter.
module tb_orbit_gen;
  logic clk = 0, rst = 1;
  logic [11:0] orbit_len, bcid;
  logic ext_mode, ext_orbit, cnt_clr, bcr;
  logic [31:0] orbit_cnt;
  int checks = 0, failures = 0;
  int last_bcr, nbcr;

  orbit_gen dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (bcid=%0d)", what, bcid); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    orbit_len = 12'd20; ext_mode = 0; ext_orbit = 0; cnt_clr = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    // internal orbit of 20: BCR every 20 cycles, always with BCID 0
    last_bcr = -1; nbcr = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      check(bcid < 20, "bcid range");
      check(bcr == (bcid == 0), "bcr at bcid 0");
      if (bcr) begin
        if (last_bcr >= 0) check(t - last_bcr == 20, "orbit period 20");
        last_bcr = t; nbcr++;
      end
    end
    check(orbit_cnt == 32'(nbcr) || orbit_cnt == 32'(nbcr) - 1, "orbit count");
    // default length 3564 when orbit_len = 0
    orbit_len = 0;
    @(negedge clk);
    while (!bcr) @(negedge clk);
    for (int t = 1; t <= 3564; t++) begin
      @(negedge clk);
      if (t < 3564) check(!bcr && bcid == 12'(t), "LHC orbit counting");
      else          check(bcr && bcid == 0, "LHC orbit 3564 BCs");
    end
    // external orbit: pulse at an arbitrary point, BCR the cycle after
    orbit_len = 12'd50; ext_mode = 1;
    repeat (7) @(negedge clk);
    ext_orbit = 1;
    @(negedge clk);
    ext_orbit = 0;
    check(bcr && bcid == 0, "external orbit restart");
    @(negedge clk);
    check(!bcr && bcid == 1, "count after external orbit");
    // external pulse ignored in internal mode
    ext_mode = 0;
    repeat (5) @(negedge clk);
    ext_orbit = 1;
    @(negedge clk);
    ext_orbit = 0;
    check(!bcr && bcid == 12'd7, "internal mode ignores pulse");
    // counter clear
    cnt_clr = 1; @(negedge clk); cnt_clr = 0;
    check(orbit_cnt == 0, "orbit counter clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
