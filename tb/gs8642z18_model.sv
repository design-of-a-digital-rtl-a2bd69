// gs8642z18_model: behavioural model of the card's 4M x 18 synchronous
// pipelined "no bus turnaround" SRAM, for simulation only.
//
// Only the behaviour the firmware relies on is modelled: on each rising clock
// edge with ce_n low the part takes a command (we_n low = write, else read)
// at `addr`. Read data appears on `dq_out` LAT cycles after the command cycle
// (it is valid during that cycle and is sampled by the FPGA at its end).
// Write data is taken from `dq_in` at the end of the cycle LAT cycles after
// the command cycle. Reads and writes may follow each other in any order
// without idle cycles; a read of a location written by a command still in
// the pipeline returns the new data. Byte writes, burst mode, sleep and the
// output-enable pin are not modelled. The array is initialised to 0.
module gs8642z18_model #(
  parameter int unsigned AW  = 22,
  parameter int unsigned DW  = 18,
  parameter int unsigned LAT = 2
) (
  input  logic          clk,
  input  logic          ce_n,
  input  logic          we_n,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] dq_in,
  output logic [DW-1:0] dq_out
);
  logic [DW-1:0] mem [2**AW];
  logic          p_v  [LAT+1];
  logic          p_we [LAT+1];
  logic [AW-1:0] p_a  [LAT+1];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
    for (int i = 0; i <= LAT; i++) begin
      p_v[i] = 1'b0; p_we[i] = 1'b0; p_a[i] = '0;
    end
    dq_out = '0;
  end

  // p_*[k] describes the command taken k edges ago; stage LAT-1 is the one
  // whose data cycle is the current cycle.
  always @(posedge clk) begin
    if (p_v[LAT-1] && p_we[LAT-1]) mem[p_a[LAT-1]] <= dq_in;
    for (int k = LAT; k > 0; k--) begin
      p_v[k] <= p_v[k-1]; p_we[k] <= p_we[k-1]; p_a[k] <= p_a[k-1];
    end
    p_v[0]  <= !ce_n;
    p_we[0] <= !we_n;
    p_a[0]  <= addr;
  end

  always_comb begin
    dq_out = '0;
    if (LAT >= 1 && p_v[LAT-1] && !p_we[LAT-1]) dq_out = mem[p_a[LAT-1]];
  end
endmodule
