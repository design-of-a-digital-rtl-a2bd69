// tb_random_trig: statistical check of the random trigger generator.
// With a threshold for 100 kHz at 40.08 MHz the number of triggers in
// 400 800 BCs must be about 1000 (within 5 sigma), successive triggers must
// not come in bursts, a threshold of 0 must give none and a threshold of
// 2^31 about half of the BCs. In every run each BC's output is also compared
// with a reference xorshift32 (shifts 13, 17, 5) started from the same seed.
module tb_random_trig;
  logic clk = 0, rst = 1;
  logic [31:0] thresh;
  logic fire, prev;
  int checks = 0, failures = 0;
  int n, pairs;

  random_trig dut (.*);

  // reference generator, written independently of the block
  logic [31:0] ref_state;
  logic        ref_fire;
  int          mism;
  always @(posedge clk) begin
    logic [31:0] x;
    if (rst) begin
      ref_state <= 32'h2545_F491;
      ref_fire  <= 1'b0;
    end else begin
      x = ref_state;
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      ref_state <= x;
      ref_fire  <= x < thresh;
    end
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (n=%0d pairs=%0d)", what, n, pairs); end
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int cycles);
    n = 0; pairs = 0; prev = 0; mism = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < cycles; i++) begin
      @(negedge clk);
      if (fire != ref_fire) mism++;
      if (fire) n++;
      if (fire && prev) pairs++;
      prev = fire;
    end
    check(mism == 0, "output matches the reference generator in every BC");
  endtask

  initial begin
    thresh = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    run(10000);
    check(n == 0, "threshold 0 gives no trigger");
    // 100 kHz: 2^32 * 100e3 / 40.08e6
    thresh = 32'd10_715_986;
    run(400_800);
    check(n > 842 && n < 1158, "mean rate 100 kHz at 40.08 MHz");
    check(pairs < 15, "no bursts of consecutive triggers");
    thresh = 32'h8000_0000;
    run(20000);
    check(n > 9600 && n < 10400, "threshold 2^31 gives half the BCs");
    check(pairs > 4600 && pairs < 5400, "consecutive pairs independent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
