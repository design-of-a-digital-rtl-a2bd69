// tb_gen_counters: random source activity; each counter must equal the
// number of cycles its selected source was high, and clear must zero them.
module tb_gen_counters;
  localparam int N = 4;
  logic clk = 0, rst = 1, clr;
  logic [15:0] srcs;
  logic [N-1:0][3:0] sel;
  logic [N-1:0][31:0] count;
  int exp_cnt [N];
  int checks = 0, failures = 0;

  gen_counters #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; srcs = '0;
    for (int k = 0; k < N; k++) begin sel[k] = 4'(k * 3 + 1); exp_cnt[k] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int i = 0; i < 4000; i++) begin
      srcs = 16'($urandom) & 16'($urandom);
      for (int k = 0; k < N; k++) if (srcs[sel[k]]) exp_cnt[k]++;
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        checks++;
        if (count[k] !== 32'(exp_cnt[k])) begin
          failures++;
          if (failures < 5) $display("counter %0d = %0d, expected %0d", k, count[k], exp_cnt[k]);
        end
      end
    end
    srcs = '1; clr = 1;
    @(negedge clk);
    clr = 0; srcs = '0;
    for (int k = 0; k < N; k++) begin
      checks++;
      if (count[k] !== 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
