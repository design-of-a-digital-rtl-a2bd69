// tb_ctp_trigger: directed and random checks of the CTP-like trigger module:
// one-cycle latency from request to L1A, trigger type and L1ID with each
// L1A, L1ID restart on ECR, source masking, BUSY gating, the veto window
// around BCR, simple deadtime spacing, complex deadtime, random triggers,
// and the L1A / lost counters against the testbench's own counts.
module tb_ctp_trigger;
  localparam int NB = 4;
  logic clk = 0, rst = 1;
  logic ext_trig, sw_trig, pb_trig;
  logic [11:0] bcid, orbit_len;
  logic ecr, busy, trig_en, busy_gate, bcr_veto, cnt_clr;
  logic [7:0] ecr_cnt, veto_before, veto_after, simple_dt, trig_type, ttype;
  logic [3:0] mask;
  logic [31:0] rnd_thresh, l1id, l1a_cnt, lost_cnt;
  logic [NB-1:0] bkt_en;
  logic [NB-1:0][7:0] bkt_size;
  logic [NB-1:0][15:0] bkt_rate;
  logic l1a, rnd, veto, busy_blk, dead, dead_simple, dead_complex, lost;
  int checks = 0, failures = 0;
  int n_l1a = 0, n_req = 0, last_t = -1000, min_gap = 1 << 30, t = 0;

  ctp_trigger dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at t=%0d", what, t); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // BCID runs over an orbit of 100 BCs
  always @(posedge clk) begin
    t <= t + 1;
    if (rst) bcid <= 12'd50;
    else     bcid <= (bcid == orbit_len - 1) ? 12'd0 : bcid + 12'd1;
  end

  // bookkeeping of every L1A
  always @(negedge clk) if (!rst && l1a) begin
    n_l1a++;
    if (t - last_t < min_gap) min_gap = t - last_t;
    last_t = t;
  end

  task automatic sw_pulse(output bit got, output logic [31:0] id);
    @(negedge clk); sw_trig = 1; n_req++;
    @(negedge clk); sw_trig = 0;
    got = l1a; id = l1id;
  endtask

  initial begin
    bit got;
    logic [31:0] id;
    int n0, seen_dead;
    ext_trig = 0; sw_trig = 0; pb_trig = 0; ecr = 0; ecr_cnt = 8'h05; busy = 0;
    trig_en = 1; mask = 4'b0100; rnd_thresh = 0; busy_gate = 0; bcr_veto = 0;
    orbit_len = 12'd100; veto_before = 0; veto_after = 0; simple_dt = 4;
    bkt_en = '0; bkt_size = '0; bkt_rate = '0; trig_type = 8'hA5; cnt_clr = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // single software trigger: L1A next cycle with type and L1ID 0
    sw_pulse(got, id);
    check(got, "L1A one cycle after request");
    check(ttype == 8'hA5, "trigger type with L1A");
    check(id == 32'h0500_0000, "first L1ID");
    repeat (10) @(negedge clk);
    sw_pulse(got, id);
    check(got && id == 32'h0500_0001, "L1ID increments");
    // ECR restarts the event number
    repeat (10) @(negedge clk);
    ecr = 1; ecr_cnt = 8'h06; @(negedge clk); ecr = 0;
    repeat (5) @(negedge clk);
    sw_pulse(got, id);
    check(got && id == 32'h0600_0000, "L1ID restarts after ECR");
    // masked source gives nothing
    repeat (10) @(negedge clk);
    ext_trig = 1; @(negedge clk); ext_trig = 0;
    check(!l1a, "masked external trigger");
    @(negedge clk);
    check(!l1a, "masked external trigger (2)");
    mask = 4'b1110;
    ext_trig = 1; @(negedge clk); ext_trig = 0;
    check(l1a, "external trigger when enabled");
    repeat (10) @(negedge clk);
    pb_trig = 1; @(negedge clk); pb_trig = 0;
    check(l1a, "playback trigger when enabled");
    // BUSY gating
    repeat (10) @(negedge clk);
    busy = 1; busy_gate = 1;
    sw_pulse(got, id);
    check(!got, "BUSY blocks trigger");
    check(lost, "blocked trigger counted as lost");
    busy_gate = 0;
    repeat (10) @(negedge clk);
    sw_pulse(got, id);
    check(got, "BUSY ignored without gating");
    busy = 0;
    // BCR veto: 2 before, 3 after
    bcr_veto = 1; veto_before = 2; veto_after = 3;
    for (int k = 0; k < 100; k++) begin
      logic [11:0] b;
      repeat (6) @(negedge clk);
      @(negedge clk);
      b = bcid;
      sw_trig = 1; n_req++;
      @(negedge clk); sw_trig = 0;
      check(l1a == !(b <= 3 || b >= 98), "veto window around BCR");
    end
    bcr_veto = 0;
    // simple deadtime: requests every cycle, L1As exactly 5 BCs apart
    @(negedge clk);
    min_gap = 1 << 30;
    begin
      n0 = n_l1a;
      sw_trig = 1;
      repeat (100) begin @(negedge clk); n_req++; end
      sw_trig = 0;
      @(negedge clk);
      check(min_gap == 5, "simple deadtime spacing of 5 BCs");
      $display("simple: %0d", n_l1a - n0); check(n_l1a - n0 == 20, "20 L1As in 100 BCs of requests");
    end
    // complex deadtime: bucket of 3 leaking every 40 BCs, no simple deadtime
    simple_dt = 0; bkt_en = 4'b0001; bkt_size[0] = 3; bkt_rate[0] = 40;
    repeat (200) @(negedge clk);
    begin
      n0 = n_l1a; seen_dead = 0;
      sw_trig = 1;
      repeat (400) begin @(negedge clk); n_req++; if (dead_complex) seen_dead++; end
      sw_trig = 0;
      @(negedge clk);
      check(seen_dead > 0, "complex deadtime active");
      $display("bucket: %0d", n_l1a - n0); check(n_l1a - n0 >= 12 && n_l1a - n0 <= 14, "leaky bucket: 3 + 400/40 L1As");
    end
    // random trigger at about 1/64 per BC with 4 BCs simple deadtime
    bkt_en = '0; simple_dt = 4; mask = 4'b0001; rnd_thresh = 32'h0400_0000;
    min_gap = 1 << 30;
    begin
      n0 = n_l1a;
      repeat (20000) @(negedge clk);
      $display("random: %0d", n_l1a - n0); check(n_l1a - n0 > 200 && n_l1a - n0 < 400, "random trigger rate");
      check(min_gap >= 5, "random triggers respect deadtime");
    end
    rnd_thresh = 0;
    repeat (5) @(negedge clk);
    check(l1a_cnt == 32'(n_l1a), "L1A counter");
    check(lost_cnt + l1a_cnt > 32'(n_req), "lost counter counts refused requests");
    cnt_clr = 1; @(negedge clk); cnt_clr = 0;
    check(l1a_cnt == 0 && lost_cnt == 0, "counter clear");
    $display("L1As %0d requests %0d", n_l1a, n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
