// deadtime: "Dead-time" part of the CTP-like trigger module.
//
// Decides whether the next Level-1 Accept may be issued. Two mechanisms:
//
//   Simple deadtime: after each L1A the next `simple_dt` BCs are dead, so
//   two L1As are at least simple_dt+1 BCs apart (0 switches it off).
//
//   Complex deadtime: NB leaky buckets. Each enabled bucket holds up to
//   `bkt_size` tokens; every L1A adds one token to every bucket, and each
//   bucket loses one token every `bkt_rate` BCs while it is not empty. A
//   full bucket is dead. A bucket of size S and rate R thus lets through
//   bursts of S L1As but no more than S + t/R in any window of t BCs.
//
// `l1a` is the accept issued in this cycle. `dead` already includes it, so
// the trigger logic that samples `dead` to decide the next cycle's L1A
// honours the new deadtime without a one-cycle hole. All outputs are
// combinational from registers and `l1a`.
//
// Follows the paper: simple and complex deadtime as in the ATLAS CTP. The
// leaky-bucket form of the complex deadtime, the number of buckets (4) and
// the counting conventions follow the CTP as the author of this design knows
// it; the paper names the mechanisms only.
module deadtime #(
  parameter int unsigned NB = dave_pkg::N_BKT
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 l1a,
  input  logic [7:0]           simple_dt,
  input  logic [NB-1:0]        bkt_en,
  input  logic [NB-1:0][7:0]   bkt_size,
  input  logic [NB-1:0][15:0]  bkt_rate,
  output logic                 dead,
  output logic                 dead_simple,
  output logic                 dead_complex,
  output logic [NB-1:0][7:0]   bkt_level
);
  // ---------------------------------------------------------- simple
  logic [7:0] sd_cnt;

  always_ff @(posedge clk) begin
    if (rst)                          sd_cnt <= '0;
    else if (l1a && simple_dt != '0)  sd_cnt <= simple_dt - 8'd1;
    else if (sd_cnt != '0)            sd_cnt <= sd_cnt - 8'd1;
  end

  assign dead_simple = (sd_cnt != '0) || (l1a && simple_dt != '0);

  // ---------------------------------------------------------- complex
  logic [NB-1:0][15:0] leak_cnt;
  logic [NB-1:0]       full;

  for (genvar b = 0; b < NB; b++) begin : g_bkt
    logic       leak_tick;
    logic [8:0] lvl_in;      // level with this cycle's L1A, before the leak

    assign leak_tick = (bkt_rate[b] != '0) && (leak_cnt[b] >= bkt_rate[b] - 16'd1);
    assign lvl_in    = {1'b0, bkt_level[b]} + {8'd0, l1a};

    always_ff @(posedge clk) begin
      if (rst || !bkt_en[b]) begin
        leak_cnt[b]  <= '0;
        bkt_level[b] <= '0;
      end else begin
        leak_cnt[b] <= leak_tick ? 16'd0 : leak_cnt[b] + 16'd1;
        if (leak_tick && lvl_in != '0) bkt_level[b] <= 8'(lvl_in - 9'd1);
        else if (lvl_in > 9'd255)      bkt_level[b] <= 8'd255;
        else                           bkt_level[b] <= lvl_in[7:0];
      end
    end

    assign full[b] = bkt_en[b] && (bkt_size[b] != '0) && (lvl_in >= {1'b0, bkt_size[b]});
  end

  assign dead_complex = |full;
  assign dead         = dead_simple || dead_complex;
endmodule
