// tb_cc_top: end-to-end test of the colour-reconfigurable L2 subsystem at a reduced
// size (16 colours of 4 sets, 4 ways, 8-byte lines, R = 4, 4000-cycle intervals,
// marginal-gain threshold 20 to match the much smaller miss counts of short intervals).
// A core model issues L2 requests and reports stall cycles; a behavioural memory with
// random latency serves misses and write-backs. Every read is checked against a
// reference copy of the data, across all reconfigurations.
// Phase A streams through new lines (no reuse): the algorithm must shrink the cache.
// Phase B loops over a working set that needs most of the cache: it must grow again.
// A task switch is raised once. The test counts every mechanism (shrink, grow, colour
// flush, region flush, colour clear, write-back, hit, miss, request held off by a
// reconfiguration, both marginal-gain outcomes, task switch) and fails on any that
// never happened.
module tb_cc_top;
  localparam int NC = 16, SPC = 4, WAYS = 4, PPN_W = 12, LB = 8, R = 4, IV = 4000;
  localparam int PA_W = PPN_W + 2 + 3, LW = LB * 8, KW = 5;
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

  cc_top #(.N_COLORS(NC), .SPC(SPC), .WAYS(WAYS), .PPN_W(PPN_W), .LINE_BYTES(LB),
           .SAMPLE_R(R), .INTERVAL_CYCLES(IV), .LAMBDA(20)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
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
    return {a, 15'h5A5A, a, 15'h1234} ^ 64'h0123_4567_89AB_CDEF;
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
    req_wdata = {$urandom(), $urandom()};
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
      access({PPN_W'(100 + $urandom_range(0, 39)), 2'($urandom_range(3)), 3'b0}, $urandom_range(3) == 0);
    // phase A: streaming, until the cache has shrunk to at most half
    stream_ppn = 1000;
    t0 = 0;
    while (active_colors > NC / 2 && t0 < 40 * IV / 10) begin
      access({PPN_W'(stream_ppn), 2'(t0 % 4), 3'b0}, (t0 % 3) == 0);
      if (t0 % 4 == 3) stream_ppn++;
      t0++;
      if (t0 == 300) begin @(negedge clk) task_switch = 1; @(negedge clk) task_switch = 0; end
    end
    chk("cache shrank under streaming", active_colors <= NC / 2, 1);
    // phase B: reuse over 44 pages (176 lines; the full cache holds 256)
    t0 = 0;
    while (active_colors < NC - 2 && t0 < 60 * IV / 10) begin
      access({PPN_W'(200 + $urandom_range(0, 43)), 2'($urandom_range(3)), 3'b0}, $urandom_range(4) == 0);
      t0++;
    end
    chk("cache grew under reuse", active_colors >= NC - 2, 1);
    // a little more traffic after the last change, then read back everything written
    foreach (ref_d[a]) access(a, 0);
    $display("shrink=%0d grow=%0d colour_flush=%0d region_flush=%0d clear=%0d wb=%0d hit=%0d miss=%0d held=%0d gain_hi=%0d gain_lo=%0d task_switch=%0d transitions=%0d",
             n_shrink, n_grow, n_flc, n_flr, n_clr, n_wb, n_hit, n_miss, n_held, n_gh, n_gl,
             n_ts, block_transitions);
    chk("shrink happened", n_shrink > 0, 1);
    chk("grow happened", n_grow > 0, 1);
    chk("colour flush happened", n_flc > 0, 1);
    chk("region flush happened", n_flr > 0, 1);
    chk("colour clear happened", n_clr > 0, 1);
    chk("write-back happened", n_wb > 0, 1);
    chk("hit happened", n_hit > 0, 1);
    chk("miss happened", n_miss > 0, 1);
    chk("request held during reconfiguration", n_held > 0, 1);
    chk("high marginal gain seen", n_gh > 0, 1);
    chk("low marginal gain seen", n_gl > 0, 1);
    chk("task switch happened", n_ts > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
