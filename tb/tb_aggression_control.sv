// tb_aggression_control -- random entries and events against a reference
// written with plain integer arithmetic.
//
// How: 20000 random training-table entries, each with random ReuseConf and
// SampleRate +/-1 requests and 0..2 PatternConf confirmations and
// refutations, are applied to the combinational block. The reference uses
// integers clipped to 0..15: Base +1/-2, High +1/-5 (the published biases),
// lookahead set at High = 15 and cleared at Base < 8, enable when ReuseConf
// > 8 and Base > 8, degree 4 when High > 8. The order in which several
// events of one access are applied (increments first) is this design's
// choice and is mirrored here. The run also counts that lookahead was set,
// cleared and degree 4 chosen at least once. Outputs are sampled 1 time
// unit after the inputs change; no clock. Watchdog included.
module tb_aggression_control;
  import triangel_pkg::*;
  tt_entry_t in_e, out_e;
  logic ri, rd, si, sd, en;
  logic [1:0] pi, pd;
  logic [2:0] deg;
  int checks = 0, failures = 0;
  aggression_control #(.MAX_DEGREE(4)) dut (.in_entry(in_e), .reuse_inc(ri), .reuse_dec(rd),
    .pat_inc(pi), .pat_dec(pd), .srate_inc(si), .srate_dec(sd), .out_entry(out_e),
    .enable(en), .degree(deg));
  function automatic int clip(int v); return v < 0 ? 0 : (v > 15 ? 15 : v); endfunction
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int r, b, h, s, e_r, e_b, e_h, e_s, e_look, e_en, e_deg;
    automatic int seen_look_set = 0, seen_look_clr = 0, seen_deg4 = 0;
    for (int n = 0; n < 20000; n++) begin
      in_e = 122'({$urandom, $urandom, $urandom, $urandom});
      ri = 1'($urandom); rd = 1'($urandom); si = 1'($urandom); sd = 1'($urandom);
      pi = 2'($urandom % 3); pd = 2'($urandom % 3);
      #1;
      r = int'(in_e.reuse); b = int'(in_e.base); h = int'(in_e.high); s = int'(in_e.srate);
      if (ri) r = clip(r + 1);
      if (rd) r = clip(r - 1);
      if (si) s = clip(s + 1);
      if (sd) s = clip(s - 1);
      for (int i = 0; i < pi; i++) begin b = clip(b + 1); h = clip(h + 1); end
      for (int i = 0; i < pd; i++) begin b = clip(b - 2); h = clip(h - 5); end
      e_look = (h == 15) ? 1 : ((b < 8) ? 0 : int'(in_e.look));
      e_en   = (r > 8 && b > 8) ? 1 : 0;
      e_deg  = (h > 8) ? 4 : 1;
      if (e_look != 0 && !in_e.look) seen_look_set++;
      if (e_look == 0 && in_e.look) seen_look_clr++;
      if (e_deg == 4) seen_deg4++;
      checks++;
      if (int'(out_e.reuse) != r || int'(out_e.base) != b || int'(out_e.high) != h ||
          int'(out_e.srate) != s || int'(out_e.look) != e_look || int'(en) != e_en ||
          int'(deg) != e_deg || out_e.last0 != in_e.last0 || out_e.ts != in_e.ts) begin
        failures++;
        if (failures < 10) $display("mismatch n=%0d r%0d/%0d b%0d/%0d h%0d/%0d", n,
                                    out_e.reuse, r, out_e.base, b, out_e.high, h);
      end
    end
    checks++; if (seen_look_set == 0 || seen_look_clr == 0 || seen_deg4 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
