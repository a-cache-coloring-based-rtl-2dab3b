// tb_reconfig_ctrl: self-checking test of the reconfiguration controller together with
// the mapping table. A behavioural flush responder stands in for the L2 (random delay,
// logs each command). For a sequence of colour-count changes (64->40, 40->48, 48->4,
// 4->4, 4->64) the flush commands, the mapping table, the colour enables, the block
// transition count and busy/done are compared with a reference model of the rules.
module tb_reconfig_ctrl;
  localparam int N = 64, CW = 6, KW = 7, SPC = 64, WAYS = 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic          start = 0, busy, done;
  logic [KW-1:0] new_colors = '0, cur_colors;
  logic [N-1:0]  color_on;
  logic [63:0]   transitions;
  logic [CW-1:0] mt_rd_region, mt_rd_color, mt_wr_region, mt_wr_color, lk_region, lk_color;
  logic          mt_wr_en, fl_valid, fl_done;
  cc_pkg::flush_mode_e fl_mode;
  logic [CW-1:0] fl_color, fl_region;

  reconfig_ctrl dut (.*);
  mapping_table u_mt (
    .clk, .rst_n, .lk_region, .lk_color, .rc_region(mt_rd_region), .rc_color(mt_rd_color),
    .wr_en(mt_wr_en), .wr_region(mt_wr_region), .wr_color(mt_wr_color));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  // ---------------- behavioural flush responder
  typedef struct { int mode; int color; int region; } cmd_t;
  cmd_t log_q[$];
  initial begin
    fl_done = 0;
    forever begin
      @(negedge clk);
      if (fl_valid) begin
        cmd_t c;
        c.mode = int'(fl_mode); c.color = int'(fl_color); c.region = int'(fl_region);
        repeat ($urandom_range(0, 4)) begin
          @(negedge clk);
          if (!fl_valid) begin failures++; $display("fl_valid dropped early"); end
        end
        log_q.push_back(c);
        fl_done = 1;
        @(negedge clk) fl_done = 0;   // the L2 returns to idle for a cycle
      end
    end
  end

  // ---------------- reference
  int ref_mt [N];
  cmd_t exp_q[$];
  longint ref_tr;

  task automatic reconfigure(int nc);
    int oc, cyc;
    cmd_t c;
    oc = int'(cur_colors);
    exp_q.delete(); log_q.delete();
    if (nc < oc) begin
      for (int r = 0; r < N; r++) if (ref_mt[r] >= nc) ref_mt[r] = r % nc;
      for (int k = nc; k < oc; k++) begin c.mode = 0; c.color = k; c.region = k; exp_q.push_back(c); end
      ref_tr += longint'(oc - nc) * SPC * WAYS;
    end else if (nc > oc) begin
      for (int k = oc; k < nc; k++) begin c.mode = 2; c.color = k; c.region = k; exp_q.push_back(c); end
      for (int r = oc; r < nc; r++) begin
        c.mode = 1; c.color = ref_mt[r]; c.region = r; exp_q.push_back(c);
        ref_mt[r] = r;
      end
      ref_tr += longint'(nc - oc) * SPC * WAYS;
    end
    @(negedge clk); start = 1; new_colors = KW'(nc);
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin
      if (nc != oc) begin
        checks++;
        if (!busy) begin failures++; $display("busy low during reconfiguration"); end
      end
      @(negedge clk); cyc++;
    end
    chk("done seen", done, 1);
    @(negedge clk);
    chk($sformatf("%0d->%0d flush count", oc, nc), log_q.size(), exp_q.size());
    foreach (exp_q[i]) if (i < log_q.size()) begin
      chk($sformatf("%0d->%0d flush %0d mode", oc, nc, i), log_q[i].mode, exp_q[i].mode);
      chk($sformatf("%0d->%0d flush %0d colour", oc, nc, i), log_q[i].color, exp_q[i].color);
      if (exp_q[i].mode == 1)
        chk($sformatf("%0d->%0d flush %0d region", oc, nc, i), log_q[i].region, exp_q[i].region);
    end
    chk("cur_colors", cur_colors, nc);
    chk("busy after done", busy, 0);
    chk("transitions", transitions, ref_tr);
    for (int k = 0; k < N; k++) chk($sformatf("color_on[%0d]", k), color_on[k], k < nc);
    for (int r = 0; r < N; r++) begin
      lk_region = CW'(r); #1;
      chk($sformatf("MT[%0d]", r), lk_color, ref_mt[r]);
      if (r < nc) chk("region below count maps to itself", lk_color, r);
      else begin checks++; if (lk_color >= nc) begin failures++; $display("region %0d on dead colour", r); end end
    end
  endtask

  initial begin
    lk_region = 0; ref_tr = 0;
    for (int r = 0; r < N; r++) ref_mt[r] = r;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk("reset colours", cur_colors, N);
    reconfigure(40);
    reconfigure(48);
    reconfigure(4);
    reconfigure(4);
    reconfigure(64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
