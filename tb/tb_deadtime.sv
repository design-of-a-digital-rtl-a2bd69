// tb_deadtime: drives the deadtime block the way the trigger module does
// (a request becomes an L1A on the next clock unless `dead`) and compares
// `dead` every cycle with an independent model: simple deadtime as "fewer
// than N BCs since the last L1A", each leaky bucket as an integer token count
// leaking on a fixed grid. Also checks the minimum L1A spacing and that the
// number of L1As in a window never exceeds what the buckets allow.
module tb_deadtime;
  localparam int NB = 4;
  logic clk = 0, rst = 1;
  logic l1a;
  logic [7:0] simple_dt;
  logic [NB-1:0] bkt_en;
  logic [NB-1:0][7:0] bkt_size;
  logic [NB-1:0][15:0] bkt_rate;
  logic dead, dead_simple, dead_complex;
  logic [NB-1:0][7:0] bkt_level;
  int checks = 0, failures = 0;
  int t, last_l1a, min_gap, n_l1a, n_dead_s, n_dead_c;
  int lvl [NB];
  bit req;

  deadtime #(.NB(NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit model_simple();
    if (simple_dt == 0) return 0;
    if (l1a) return 1;
    return last_l1a >= 0 && (t - last_l1a) <= int'(simple_dt) - 1;
  endfunction

  function automatic bit model_complex();
    bit d = 0;
    for (int b = 0; b < NB; b++)
      if (bkt_en[b] && bkt_size[b] != 0 && lvl[b] + int'(l1a) >= int'(bkt_size[b])) d = 1;
    return d;
  endfunction

  // Settings for the coming cycles; phase() applies them at the start of
  // each cycle so that the model and the block see them at the same time.
  logic [7:0] n_simple;
  logic [NB-1:0] n_en;
  logic [NB-1:0][7:0] n_size;
  logic [NB-1:0][15:0] n_rate;
  int t_en_b [NB];
  bit l1a_next;

  task automatic phase(input int cycles, input int p_req);
    for (int i = 0; i < cycles; i++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) if (n_en[b] && !bkt_en[b]) t_en_b[b] = t;
      simple_dt = n_simple; bkt_en = n_en; bkt_size = n_size; bkt_rate = n_rate;
      l1a = l1a_next;
      #1;
      checks++;
      if (dead_simple !== model_simple() || dead_complex !== model_complex() ||
          dead !== (model_simple() || model_complex())) begin
        failures++;
        if (failures < 6) $display("t=%0d dead s/c %0b%0b model %0b%0b lvl0 %0d",
                                   t, dead_simple, dead_complex, model_simple(), model_complex(), lvl[0]);
      end
      if (dead_simple) n_dead_s++;
      if (dead_complex) n_dead_c++;
      // model state after the coming rising edge
      for (int b = 0; b < NB; b++) begin
        int lin = lvl[b] + int'(l1a);
        bit tick = bkt_rate[b] != 0 && ((t - t_en_b[b]) % int'(bkt_rate[b])) == int'(bkt_rate[b]) - 1;
        if (!bkt_en[b]) lvl[b] = 0;
        else if (tick && lin > 0) lvl[b] = lin - 1;
        else lvl[b] = lin;
      end
      if (l1a) begin
        if (last_l1a >= 0 && t - last_l1a < min_gap) min_gap = t - last_l1a;
        last_l1a = t; n_l1a++;
      end
      req = ($urandom_range(99) < p_req);
      l1a_next = req && !dead;
      t++;
    end
  endtask

  initial begin
    l1a = 0; simple_dt = 4; bkt_en = '0; bkt_size = '0; bkt_rate = '0;
    n_simple = 4; n_en = '0; n_size = '0; n_rate = '0; l1a_next = 0;
    t = 0; last_l1a = -1; min_gap = 1 << 30; n_l1a = 0; n_dead_s = 0; n_dead_c = 0;
    for (int b = 0; b < NB; b++) begin lvl[b] = 0; t_en_b[b] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    // simple deadtime only (4 BCs), heavy request rate
    phase(3000, 60);
    checks++;
    if (min_gap != 5) begin failures++; $display("min gap %0d, expected 5", min_gap); end
    // two buckets: 3 in 50 BCs and 8 in 400 BCs
    n_size[0] = 3; n_rate[0] = 50;
    n_size[1] = 8; n_rate[1] = 400;
    n_en = 4'b0011;
    phase(20000, 30);
    checks++;
    if (n_dead_c == 0) begin failures++; $display("complex deadtime never active"); end
    // without simple deadtime the long-run rate is set by bucket 1 (8 in 400)
    n_simple = 0;
    n_l1a = 0;
    phase(8000, 100);
    checks++;
    if (n_l1a > 8 + 8000 / 400 + 1) begin failures++; $display("too many L1As %0d", n_l1a); end
    checks++;
    if (n_l1a < 8000 / 400 - 2) begin failures++; $display("too few L1As %0d", n_l1a); end
    $display("simple dead cycles %0d, complex dead cycles %0d", n_dead_s, n_dead_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
