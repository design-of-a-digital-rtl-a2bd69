// tb_input_sync: checks the input synchroniser against a cycle model.
// Random pin levels and enable masks are applied between clock edges; after
// each edge the enabled level must equal the pins of two edges earlier ANDed
// with the enable, and the edge pulse must mark 0->1 changes of that level.
module tb_input_sync;
  localparam int unsigned N = 56;
  logic clk = 0, rst = 1;
  logic [N-1:0] pins, enable, level, rise;
  logic [N-1:0] h1, h2, lvl_prev;
  int checks = 0, failures = 0;

  input_sync #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pins = '0; enable = '0; h1 = '0; h2 = '0; lvl_prev = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check state produced by the last edge
      if (cyc > 3) begin
        checks++;
        if (level !== (h2 & enable) || rise !== (h2 & enable & ~lvl_prev)) begin
          failures++;
          if (failures < 5) $display("cyc %0d: level %h exp %h rise %h", cyc, level, h2 & enable, rise);
        end
      end
      // new stimulus
      for (int i = 0; i < N; i++) if ($urandom_range(3) == 0) pins[i] = ~pins[i];
      if (cyc % 500 == 0) enable = N'({$urandom, $urandom});
      lvl_prev = h2 & enable;   // what the block's edge register takes at this edge
      @(posedge clk);
      h2 = h1; h1 = pins;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
