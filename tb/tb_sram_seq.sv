// tb_sram_seq: record / playback engine with the SRAM model attached.
// 1. host writes and reads words through the host pointer;
// 2. records a random trigger/BCR/ECR pattern with a gap longer than 8191
//    BCs, and compares every stored word with the expected encoding;
// 3. plays the recording back and checks that each pulse keeps its flags and
//    its distance to the previous pulse, without underrun;
// 4. loops a short sequence; 5. stops a recording on a BUSY edge;
// 6. records past the end of memory and checks the wrap flag.
// The address width is reduced to 12 bits (4096 words) so that wrapping is
// quick; nothing else depends on it.
module tb_sram_seq;
  localparam int AW = 12, DW = 16, LAT = 2;
  logic clk = 0, rst = 1;
  logic [1:0] mode;
  logic stop_on_busy, loop, busy_rise, rec_l1a, rec_bcr, rec_ecr;
  logic [AW-1:0] start, len, host_ptr_in, host_ptr, wptr, sram_addr;
  logic host_ptr_ld, host_wr, host_rd, host_valid, host_busy;
  logic [DW-1:0] host_wdata, host_rdata, sram_dout, sram_din;
  logic pb_l1a, pb_bcr, pb_ecr, rec_active, play_active, wrapped, underrun;
  logic sram_ce_n, sram_we_n, sram_oe;
  int checks = 0, failures = 0;
  int t = 0;

  sram_seq #(.AW(AW), .DW(DW), .LAT(LAT)) dut (.*);

  gs8642z18_model #(.AW(AW), .DW(DW), .LAT(LAT)) u_sram (
    .clk, .ce_n(sram_ce_n), .we_n(sram_we_n), .addr(sram_addr),
    .dq_in(sram_oe ? sram_dout : '0), .dq_out(sram_din)
  );

  always #5 clk = ~clk;
  always @(posedge clk) t <= t + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0d", what, t); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_read(input logic [AW-1:0] a, output logic [DW-1:0] d);
    @(negedge clk); host_ptr_ld = 1; host_ptr_in = a;
    @(negedge clk); host_ptr_ld = 0; host_rd = 1;
    @(negedge clk); host_rd = 0;
    while (!host_valid) @(negedge clk);
    d = host_rdata;
  endtask

  logic [15:0] expw [$];
  logic [2:0]  pbf [$];
  int          pbt [$];

  always @(negedge clk) if (pb_l1a || pb_bcr || pb_ecr) begin
    pbf.push_back({pb_ecr, pb_bcr, pb_l1a});
    pbt.push_back(t);
  end

  initial begin
    logic [DW-1:0] d;
    int prev, n_words, gap_acc, k, nev;
    mode = 0; stop_on_busy = 0; loop = 0; busy_rise = 0;
    rec_l1a = 0; rec_bcr = 0; rec_ecr = 0; start = 0; len = 0;
    host_ptr_ld = 0; host_ptr_in = 0; host_wr = 0; host_wdata = 0; host_rd = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;

    // 1. host access
    @(negedge clk); host_ptr_ld = 1; host_ptr_in = 12'd100;
    @(negedge clk); host_ptr_ld = 0;
    for (int i = 0; i < 20; i++) begin
      host_wr = 1; host_wdata = 16'(16'h1234 * (i + 1));
      @(negedge clk);
    end
    host_wr = 0;
    check(host_ptr == 12'd120, "host pointer increments");
    for (int i = 0; i < 20; i++) begin
      host_read(12'(100 + i), d);
      check(d == 16'(16'h1234 * (i + 1)), "host write/read back");
    end

    // 2. record a random pattern; a word for each event, fillers every 8191
    @(negedge clk); mode = 1;          // recording starts in the next cycle
    prev = 0;
    for (int c = 1; c <= 14000; c++) begin
      @(negedge clk);
      rec_l1a = 0; rec_bcr = 0; rec_ecr = 0;
      if (c < 3000 || c > 12000) begin
        rec_l1a = ($urandom_range(15) == 0);
        rec_bcr = ($urandom_range(40) == 0);
        rec_ecr = ($urandom_range(200) == 0);
      end
      if (rec_l1a || rec_bcr || rec_ecr || c - prev == 8191) begin
        expw.push_back({rec_ecr, rec_bcr, rec_l1a, 13'(c - prev)});
        prev = c;
      end
    end
    @(negedge clk); rec_l1a = 0; rec_bcr = 0; rec_ecr = 0;
    repeat (5) @(negedge clk);
    mode = 0;
    repeat (5) @(negedge clk);
    n_words = expw.size();
    check(!rec_active, "recording stopped");
    check(int'(wptr) == n_words, "write pointer = number of words");
    check(!wrapped, "no wrap yet");
    for (int i = 0; i < n_words; i++) begin
      host_read(12'(i), d);
      check(d == expw[i], "recorded word");
    end

    // 3. play back and compare spacing
    pbf.delete(); pbt.delete();
    start = 0; len = 12'(n_words);
    @(negedge clk); mode = 2;
    @(negedge clk);
    while (play_active) @(negedge clk);
    mode = 0;
    k = 0; gap_acc = 0; nev = 0;
    for (int i = 0; i < n_words; i++) begin
      gap_acc += int'(expw[i][12:0]);
      if (expw[i][15:13] != 0) begin
        if (k < pbf.size()) begin
          check(pbf[k] == expw[i][15:13], "playback flags");
          if (k > 0) check(pbt[k] - pbt[k-1] == gap_acc, "playback spacing");
        end
        k++; gap_acc = 0; nev++;
      end
    end
    check(pbf.size() == nev, "playback pulse count");
    check(!underrun, "no underrun");

    // 4. loop the first 5 words
    pbf.delete(); pbt.delete();
    len = 5; loop = 1;
    @(negedge clk); mode = 2;
    repeat (3000) @(negedge clk);
    mode = 0; loop = 0;
    nev = 0;
    for (int i = 0; i < 5; i++) if (expw[i][15:13] != 0) nev++;
    check(pbf.size() >= 3 * nev && nev > 0, "looped playback repeats");

    // 5. BUSY stops the recording
    stop_on_busy = 1;
    @(negedge clk); mode = 1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk); rec_l1a = (c % 3 == 0); busy_rise = (c == 150);
    end
    rec_l1a = 0; busy_rise = 0;
    d = 16'(wptr);
    check(!rec_active, "BUSY stopped recording");
    check(wptr == 12'd51, "words recorded up to the BUSY edge");
    repeat (20) @(negedge clk);
    check(16'(wptr) == d, "nothing recorded after BUSY");
    mode = 0; stop_on_busy = 0;

    // 6. wrap around the end of memory
    @(negedge clk); mode = 1; rec_l1a = 1;
    repeat (5000) @(negedge clk);
    rec_l1a = 0;
    @(negedge clk);
    check(wrapped, "wrap flag after 4096 words");
    mode = 0;
    $display("words recorded %0d, playback pulses %0d", n_words, nev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
