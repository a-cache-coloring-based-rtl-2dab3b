// tb_task_model: the multitasking task model, at the reduced size of tb_cc_top.
// Three tasks with separate address spaces run in the order T1, T2, T3, T1, T2: T2
// preempts T1 at 80/300 of T1's length (P1), T3 preempts T2 at 130/300 of T2's length
// (P2), then T1 and T2 run to completion. T1 streams through memory, T2 and T3 reuse
// working sets of different sizes, standing in for benchmark mixes of low and high
// cache utility. At every switch the active size must stay unchanged and the profiling
// counters must restart; all data are checked; the cache must shrink and grow at least
// once over the run.
module tb_task_model;
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

  // ---------------- the three tasks, each with its own address space
  // T1 streams (no reuse), T2 reuses a 20-page set, T3 reuses a 48-page set.
  localparam int TASK_LEN = 3000;                 // accesses per task (300M instructions)
  localparam int P1 = TASK_LEN * 80 / 300;        // T1 preempted after 80M of 300M
  localparam int P2 = TASK_LEN * 130 / 300;       // T2 preempted after 130M of 300M
  int done_acc [3];
  int stream_pos;

  function automatic logic [PA_W-1:0] task_addr(int t);
    case (t)
      0: return {PPN_W'(12'h100 + stream_pos / 4), 2'(stream_pos % 4), 3'b0};
      1: return {PPN_W'(12'h400 + $urandom_range(0, 19)), 2'($urandom_range(3)), 3'b0};
      default: return {PPN_W'(12'h800 + $urandom_range(0, 47)), 2'($urandom_range(3)), 3'b0};
    endcase
  endfunction

  int n_switch_kept;
  task automatic run_task(int t, int upto);
    logic [KW-1:0] size_before;
    // context switch: counters restart, the active size must stay as it is
    wait (!reconfig_busy);
    @(negedge clk);
    size_before = active_colors;
    task_switch = 1;
    @(negedge clk) task_switch = 0;
    chk("size kept across a task switch", active_colors, size_before);
    chk("profiling counters cleared at the switch", dut.u_prof.acc_cnt, 0);
    n_switch_kept++;
    while (done_acc[t] < upto) begin
      if (t == 0) stream_pos++;
      access(task_addr(t), $urandom_range(3) == 0);
      done_acc[t]++;
    end
  endtask

  initial begin
    int decisions_before;
    n_shrink = 0; n_grow = 0; n_flc = 0; n_flr = 0; n_clr = 0; n_wb = 0; n_hit = 0;
    n_miss = 0; n_held = 0; n_gh = 0; n_gl = 0; n_ts = 0; n_switch_kept = 0;
    done_acc = '{0, 0, 0}; stream_pos = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (l2_ready);
    // T1 .. P1 | T2 .. P2 | T3 to the end | T1 to the end | T2 to the end
    run_task(0, P1);
    run_task(1, P2);
    run_task(2, TASK_LEN);
    run_task(0, TASK_LEN);
    run_task(1, TASK_LEN);
    foreach (ref_d[a]) access(a, 0);
    $display("shrink=%0d grow=%0d colour_flush=%0d region_flush=%0d clear=%0d wb=%0d hit=%0d miss=%0d held=%0d task_switch=%0d colours_now=%0d",
             n_shrink, n_grow, n_flc, n_flr, n_clr, n_wb, n_hit, n_miss, n_held, n_ts, active_colors);
    chk("task switches", n_ts, 5);
    chk("every task finished", done_acc[0] + done_acc[1] + done_acc[2], 3 * TASK_LEN);
    chk("shrink happened", n_shrink > 0, 1);
    chk("grow happened", n_grow > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
