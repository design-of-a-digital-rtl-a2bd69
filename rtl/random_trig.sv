// random_trig: "Random Trig" part of the CTP-like trigger module.
//
// Produces a random trigger request with a programmable mean rate. Every BC
// clock a 32-bit xorshift generator advances one step and the request `fire`
// is raised when the new value is below `thresh`. The chance per BC is
// thresh / 2^32, so the mean rate is f_BC * thresh / 2^32; with a 40.08 MHz
// BC clock, 100 kHz needs thresh = 2^32 * 100e3 / 40.08e6 ~ 10 716 000. A
// threshold of 0 switches the generator off. `fire` is registered (one cycle
// after the compare).
//
// Follows the paper: a random trigger generator up to 100 kHz. The generator
// type (xorshift32, which mixes the whole word each step so that successive
// decisions are not correlated the way one-bit LFSR shifts are), the
// threshold compare and the seed are this design's choices.
module random_trig #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] thresh,
  output logic        fire
);
  logic [31:0] state, nxt;

  always_comb begin
    nxt = state;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 17);
    nxt = nxt ^ (nxt << 5);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= (SEED == '0) ? 32'h1 : SEED;
      fire  <= 1'b0;
    end else begin
      state <= nxt;
      fire  <= nxt < thresh;
    end
  end
endmodule
