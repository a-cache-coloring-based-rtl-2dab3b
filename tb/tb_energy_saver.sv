// tb_energy_saver: self-checking test of the energy saving algorithm.
// 1. The worked example of the algorithm: N = 64 colours, C* = 40, marginal gain 150
//    gives candidates {28..48}, gain 250 gives {32..52}. A second instance with a
//    sampling ratio of 16 is used so that the gain comes out at exactly 150 and 250.
// 2. Random intervals on the default instance: every scored candidate's energy and the
//    chosen colour count are compared with a reference model of the energy equations
//    written here, and the start-to-done latency (40 divider + 1 + 11 cycles) is checked.
module tb_energy_saver;
  localparam int N = 64, NP = 6, KW = 7;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // inputs shared by both instances
  logic          start_a = 0, start_b = 0;
  logic [KW-1:0] cur_colors;
  logic [31:0]   cycles, stall, access, lmiss, prof_access;
  logic [31:0]   pmiss [NP];
  logic [31:0]   plmiss [NP];

  logic          busy_a, done_a, gh_a, cv_a, busy_b, done_b, gh_b, cv_b;
  logic [KW-1:0] nc_a, cc_a, nc_b, cc_b;
  logic [63:0]   be_a, ce_a, be_b, ce_b;

  energy_saver dut_a (
    .clk, .rst_n, .start(start_a), .cur_colors, .cycles, .stall, .access, .lmiss, .prof_access,
    .pmiss, .plmiss, .busy(busy_a), .done(done_a), .new_colors(nc_a), .gain_high(gh_a),
    .best_energy(be_a), .cand_valid(cv_a), .cand_colors(cc_a), .cand_energy(ce_a));
  energy_saver #(.SAMPLE_R(16)) dut_b (
    .clk, .rst_n, .start(start_b), .cur_colors, .cycles, .stall, .access, .lmiss, .prof_access,
    .pmiss, .plmiss, .busy(busy_b), .done(done_b), .new_colors(nc_b), .gain_high(gh_b),
    .best_energy(be_b), .cand_valid(cv_b), .cand_colors(cc_b), .cand_energy(ce_b));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  // ---------------- reference model
  function automatic longint fdiv(longint a, longint b);   // floor division, b > 0
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction
  function automatic int pp(int k);
    int s[NP] = '{1, 2, 4, 8, 12, 16};
    return N / 16 * s[k];
  endfunction
  function automatic longint ref_interp(int which, int c);
    int k = 0;
    longint a, b, v;
    for (int i = 1; i < 5; i++) if (c >= pp(i)) k = i;
    a = which ? plmiss[k] : pmiss[k];
    b = which ? plmiss[k+1] : pmiss[k+1];
    v = a - fdiv((a - b) * (c - pp(k)), pp(k+1) - pp(k));
    return (v < 0) ? 0 : v;
  endfunction
  function automatic longint ref_energy(int c, int cur, int r);
    longint m, lm, ppm, t, e, dc;
    m   = ref_interp(0, c) * r;
    lm  = ref_interp(1, c) * r;
    ppm = (lmiss == 0) ? 0 : (longint'(stall) * 256) / longint'(lmiss);
    t   = longint'(cycles) - longint'(stall) + (ppm * lm) / 256;
    dc  = (c > cur) ? c - cur : cur - c;
    e   = 1086 * (longint'(access) + m) + 70000 * m + (1411 * t * c) / N + 120 * t
        + 2 * 64 * 8 * dc + 5 * longint'(prof_access) + 5 * t;
    return e;
  endfunction

  int seen_a[$], seen_b[$];
  longint seen_ea[$];
  always @(posedge clk) begin
    if (cv_a) begin seen_a.push_back(int'(cc_a)); seen_ea.push_back(longint'(ce_a)); end
    if (cv_b) seen_b.push_back(int'(cc_b));
  end

  task automatic run_b_example(int pm4, int exp_lo, int exp_hi, bit exp_high);
    int exp_list[$];
    cur_colors = 40; cycles = 1000000; stall = 200000; access = 50000; lmiss = 5000;
    prof_access = 800;
    pmiss  = '{1000, 800, 600, 400, pm4, 100};
    plmiss = '{500, 400, 300, 200, 100, 50};
    seen_b.delete();
    @(negedge clk) start_b = 1;
    @(negedge clk) start_b = 0;
    wait (done_b);
    @(negedge clk);
    for (int c = exp_lo; c <= exp_hi; c += 2) exp_list.push_back(c);
    chk("example candidate count", seen_b.size(), 11);
    foreach (exp_list[i]) chk($sformatf("example candidate %0d", i),
                              (i < seen_b.size()) ? seen_b[i] : -1, exp_list[i]);
    chk("example gain_high", gh_b, exp_high);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // G(40) = (400 - 250) * 16 / 16 = 150 and (400 - 150) = 250
    run_b_example(250, 28, 48, 1'b0);
    run_b_example(150, 32, 52, 1'b1);

    for (int t = 0; t < 60; t++) begin
      int cur, n_exp, lat, best_c;
      longint best_e, e;
      int lo, hi;
      bit high;
      cur = 2 * $urandom_range(2, 32);
      cur_colors = KW'(cur);
      cycles = 32'd5_000_000;
      stall  = $urandom_range(100000, 2000000);
      lmiss  = (t % 10 == 9) ? 0 : $urandom_range(1000, 40000);
      access = $urandom_range(50000, 400000);
      prof_access = access / 64;
      pmiss[5] = $urandom_range(10, 400);
      for (int k = 4; k >= 0; k--) pmiss[k] = pmiss[k+1] + $urandom_range(0, (t % 3 == 0) ? 20 : 400);
      for (int k = 0; k < NP; k++) plmiss[k] = pmiss[k] / 2;
      seen_a.delete(); seen_ea.delete();
      @(negedge clk) start_a = 1;
      @(negedge clk) start_a = 0;
      lat = 0;   // clock edges after the one that sampled start
      while (!done_a) begin @(negedge clk); lat++; end
      chk("latency", lat, (lmiss == 0) ? 13 : 52);
      // reference candidate space
      begin
        int k;
        longint dm;
        k = 0;
        for (int i = 1; i < 5; i++) if (cur >= pp(i)) k = i;
        dm = (longint'(pmiss[k]) - longint'(pmiss[k+1])) * 64;
        high = dm > 200 * (pp(k+1) - pp(k));
      end
      lo = high ? 4 : 6; hi = high ? 6 : 4;
      n_exp = 0; best_e = -1; best_c = -1;
      for (int c = cur - 2 * lo; c <= cur + 2 * hi; c += 2) begin
        if (c < N / 16 || c > N) continue;
        e = ref_energy(c, cur, 64);
        if (n_exp < seen_a.size()) begin
          chk("candidate colours", seen_a[n_exp], c);
          chk($sformatf("energy of %0d colours", c), seen_ea[n_exp], e);
        end
        n_exp++;
        if (best_c < 0 || e < best_e) begin best_e = e; best_c = c; end
      end
      chk("candidate count", seen_a.size(), n_exp);
      chk("gain_high", gh_a, high);
      chk("chosen colours", nc_a, best_c);
      chk("best energy", be_a, best_e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
