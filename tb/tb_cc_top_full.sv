// tb_cc_top_full: one complete operation of the subsystem at its default size
// (2 MB, 8-way L2 of 64 colours, R = 64, 5M-cycle intervals). After a warm-up that
// leaves dirty lines in the cache, the core model streams through new lines for an
// interval; the energy saving algorithm must then shrink the cache, flushing the
// disabled colours. All data read back (during the run and at the end) are compared
// with a reference copy.
module tb_cc_top_full;
  localparam int NC = 64, PPN_W = 40, IV = 5_000_000;
  localparam int PA_W = 52, LW = 512, KW = 7;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, req_we = 0, req_load = 0;
  logic [PA_W-1:0] req_addr = '0, mem_addr;
  logic [LW-1:0] req_wdata = '0, resp_rdata, mem_wdata, mem_rdata;
  logic resp_valid, resp_hit, core_stall, task_switch = 0;
  logic mem_req, mem_we, mem_ack;
  logic [NC-1:0] color_on;
  logic [KW-1:0] active_colors, decision_colors;
  logic reconfig_busy, decision_valid, decision_gain_high, l2_ready;
  logic [63:0] decision_energy, block_transitions;
  logic ev_l2_hit, ev_l2_miss, ev_l2_writeback;

  cc_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0h, expected %0h", what, got, exp); end
  endtask

  // ---------------- behavioural memory
  logic [LW-1:0] mem [logic [PA_W-1:0]];
  function automatic logic [LW-1:0] mem_init(logic [PA_W-1:0] a);
    return {8{a[51:6], 18'h2A5A5}};
  endfunction
  initial begin
    mem_ack = 0; mem_rdata = '0;
    forever begin
      @(negedge clk);
      mem_ack = 0;
      if (mem_req) begin
        repeat ($urandom_range(2, 6)) @(negedge clk);
        if (mem_we) mem[mem_addr] = mem_wdata;
        else mem_rdata = mem.exists(mem_addr) ? mem[mem_addr] : mem_init(mem_addr);
        mem_ack = 1;
      end
    end
  end

  // ---------------- mechanism counters
  int n_shrink, n_grow, n_flc, n_flr, n_clr, n_wb, n_hit, n_miss, n_held, n_gh, n_gl, n_ts;
  always @(posedge clk) if (rst_n) begin
    if (dut.fl_valid && dut.fl_done) begin
      if (dut.fl_mode == cc_pkg::FL_COLOR)  n_flc++;
      if (dut.fl_mode == cc_pkg::FL_REGION) n_flr++;
      if (dut.fl_mode == cc_pkg::FL_CLEAR)  n_clr++;
    end
    if (ev_l2_writeback) n_wb++;
    if (ev_l2_hit) n_hit++;
    if (ev_l2_miss) n_miss++;
    if (req_valid && reconfig_busy && l2_ready) n_held++;
    if (task_switch) n_ts++;
    if (decision_valid) begin
      if (decision_gain_high) n_gh++; else n_gl++;
      if (decision_colors < active_colors) n_shrink++;
      if (decision_colors > active_colors) n_grow++;
      $display("decision at %0t: %0d -> %0d colours (gain %s)", $time, active_colors,
               decision_colors, decision_gain_high ? "high" : "low");
    end
  end

  // ---------------- core model
  logic [LW-1:0] ref_d [logic [PA_W-1:0]];
  logic waiting = 0;
  assign core_stall = waiting;

  task automatic access(logic [PA_W-1:0] a, bit we);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_we = we; req_load = !we;
    req_wdata = {16{$urandom()}};
    waiting = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    waiting = 0;
    if (we) ref_d[a] = req_wdata;
    else chk($sformatf("read %0h", a), resp_rdata, ref_d.exists(a) ? ref_d[a] : mem_init(a));
  endtask

  initial begin
    int stream_ppn, t0;
    n_shrink = 0; n_grow = 0; n_flc = 0; n_flr = 0; n_clr = 0; n_wb = 0; n_hit = 0;
    n_miss = 0; n_held = 0; n_gh = 0; n_gl = 0; n_ts = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (l2_ready);
    chk("all colours on after reset", active_colors, NC);
    // warm-up: a working set that fits, so the cache holds dirty data
    for (int i = 0; i < 600; i++)
      access({PPN_W'(100 + $urandom_range(0, 39)), 6'($urandom_range(63)), 6'b0}, $urandom_range(3) == 0);
    // streaming through new lines (no reuse) for one whole interval: the cache must shrink
    stream_ppn = 1000;
    t0 = 0;
    while (n_shrink == 0 && t0 < 2 * IV / 8) begin
      access({PPN_W'(stream_ppn), 6'(t0 % 64), 6'b0}, (t0 % 3) == 0);
      if (t0 % 64 == 63) stream_ppn++;
      t0++;
    end
    wait (!reconfig_busy);
    chk("cache shrank under streaming", active_colors < NC, 1);
    // a little more traffic after the last change, then read back everything written
    foreach (ref_d[a]) access(a, 0);
    $display("shrink=%0d grow=%0d colour_flush=%0d region_flush=%0d clear=%0d wb=%0d hit=%0d miss=%0d held=%0d gain_hi=%0d gain_lo=%0d task_switch=%0d transitions=%0d",
             n_shrink, n_grow, n_flc, n_flr, n_clr, n_wb, n_hit, n_miss, n_held, n_gh, n_gl,
             n_ts, block_transitions);
    chk("shrink happened", n_shrink > 0, 1);
    chk("colour flush happened", n_flc > 0, 1);
    chk("write-back happened", n_wb > 0, 1);
    chk("hit happened", n_hit > 0, 1);
    chk("miss happened", n_miss > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
