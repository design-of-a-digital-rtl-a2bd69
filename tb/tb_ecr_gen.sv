// tb_ecr_gen: checks periodic ECRs every `period` orbits, host-commanded
// ECRs held until the next BCR, external ECRs and the ECR counter.
module tb_ecr_gen;
  logic clk = 0, rst = 1;
  logic bcr, periodic, cmd, ext_en, ext_ecr, ecr;
  logic [15:0] period;
  logic [7:0] ecr_cnt;
  int checks = 0, failures = 0;
  int t, n_ecr;

  ecr_gen dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at t=%0d", what, t); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // BCR every 10 cycles. `t` changes at the falling edge through a
  // non-blocking assignment, so a check right after a falling edge still sees
  // the value the last rising edge sampled.
  always @(negedge clk) if (!rst) t <= t + 1;
  assign bcr = !rst && (t % 10 == 0);

  initial begin
    t = 0; periodic = 0; period = 3; cmd = 0; ext_en = 0; ext_ecr = 0; n_ecr = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    // no source: no ECR
    repeat (60) begin @(negedge clk); check(!ecr, "no ECR when idle"); end
    // periodic: every 3rd BCR, one cycle after it
    periodic = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      if (ecr) begin
        n_ecr++;
        check(t % 10 == 0, "periodic ECR one cycle after BCR");
      end
    end
    check(n_ecr >= 9 && n_ecr <= 10, "periodic ECR every 3 orbits");
    check(ecr_cnt == 8'(n_ecr), "ECR counter");
    periodic = 0;
    // host command in mid orbit: ECR right after the next BCR only
    @(negedge clk); while (t % 10 != 4) @(negedge clk);
    cmd = 1; @(negedge clk); cmd = 0;
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      check(ecr == (t % 10 == 0 && k < 10), "commanded ECR aligned to BCR");
    end
    // external ECR: passes after one register
    ext_en = 1;
    @(negedge clk); while (t % 10 != 5) @(negedge clk);
    ext_ecr = 1; @(negedge clk); ext_ecr = 0;
    check(ecr, "external ECR");
    @(negedge clk); check(!ecr, "external ECR single");
    ext_en = 0;
    ext_ecr = 1; @(negedge clk); ext_ecr = 0;
    check(!ecr, "external ECR disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
