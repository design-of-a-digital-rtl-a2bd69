// tb_output_map: random source vectors, selections, enables and static
// levels; each output must show, one clock later, its selected source (or
// its static level for SRC_LEVEL) when enabled and 0 otherwise, with the
// output enable following the enable bit.
module tb_output_map;
  localparam int N = 56;
  logic clk = 0, rst = 1;
  logic [15:0] srcs;
  logic [N-1:0][3:0] sel;
  logic [N-1:0] en, lvl, out, oe;
  logic [N-1:0] exp_out, exp_oe;
  int checks = 0, failures = 0;

  output_map #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    srcs = '0; sel = '0; en = '0; lvl = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int i = 0; i < 5000; i++) begin
      srcs = 16'($urandom);
      for (int k = 0; k < N; k++) sel[k] = 4'($urandom);
      en  = {$urandom, $urandom};
      lvl = {$urandom, $urandom};
      for (int k = 0; k < N; k++) begin
        case (sel[k])
          4'd0:  exp_out[k] = 1'b0;
          4'd12: exp_out[k] = lvl[k];
          4'd15: exp_out[k] = 1'b1;
          default: exp_out[k] = srcs[sel[k]];
        endcase
        exp_out[k] &= en[k];
      end
      exp_oe = en;
      @(negedge clk);
      checks++;
      if (out !== exp_out || oe !== exp_oe) begin
        failures++;
        if (failures < 5) begin
          $display("out %h exp %h", out, exp_out);
          for (int k = 0; k < N; k++) if (out[k] != exp_out[k]) $display(" bit %0d sel %0d en %0b lvl %0b srcs %h", k, sel[k], en[k], lvl[k], srcs);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
