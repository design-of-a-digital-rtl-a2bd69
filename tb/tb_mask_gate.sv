// tb_mask_gate: random vectors against an independent description of the
// mask, enable, BUSY gate and BCR veto window (BCs counted as a signed
// distance to the nearest BCR).
module tb_mask_gate;
  logic [3:0] src, mask;
  logic trig_en, busy, busy_gate, bcr_veto;
  logic [11:0] bcid, orbit_len;
  logic [7:0] veto_before, veto_after;
  logic cand, veto, busy_blk, pass;
  int checks = 0, failures = 0;
  int n_veto = 0, n_busy = 0, n_pass = 0;

  mask_gate dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      int len, d_after, d_before;
      bit e_cand, e_veto, e_busy;
      src = 4'($urandom); mask = 4'($urandom); trig_en = ($urandom_range(7) != 0);
      busy = $urandom; busy_gate = $urandom; bcr_veto = $urandom;
      len = $urandom_range(3564, 20);
      orbit_len = 12'(len);
      bcid = 12'($urandom_range(len - 1));
      veto_before = 8'($urandom_range(15)); veto_after = 8'($urandom_range(15));
      #1;
      d_after  = int'(bcid);                // BCs since the BCR
      d_before = len - int'(bcid);          // BCs until the next BCR
      e_cand = trig_en && ((src & mask) != 0);
      e_veto = bcr_veto && (d_after <= int'(veto_after) || d_before <= int'(veto_before));
      e_busy = busy && busy_gate;
      checks++;
      if (cand !== e_cand || veto !== e_veto || busy_blk !== e_busy ||
          pass !== (e_cand && !e_veto && !e_busy)) begin
        failures++;
        if (failures < 6) $display("bcid %0d len %0d b %0d a %0d: veto %0b exp %0b",
                                   bcid, len, veto_before, veto_after, veto, e_veto);
      end
      if (e_veto) n_veto++;
      if (e_busy) n_busy++;
      if (pass) n_pass++;
      #1;
    end
    checks++;
    if (n_veto == 0 || n_busy == 0 || n_pass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
