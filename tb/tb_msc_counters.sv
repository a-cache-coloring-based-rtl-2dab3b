// tb_msc_counters: self-checking test of the interval timer and stall counters.
// Random stall/access/load-miss events are counted by a reference model; at every
// snapshot the four counts and the interval length (cycles between snapshots) are
// compared. A task switch in the middle of an interval must restart it.
module tb_msc_counters;
  localparam int IV = 100;
  logic clk = 0, rst_n = 0;
  logic core_stall = 0, ev_access = 0, ev_load_miss = 0, task_switch = 0;
  logic snap_valid;
  logic [31:0] snap_cycles, snap_stall, snap_access, snap_lmiss;
  int checks = 0, failures = 0;
  int r_st, r_acc, r_lm, r_cyc, since, snaps;

  msc_counters #(.INTERVAL_CYCLES(IV)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  initial begin
    // one idle clock edge (no events) passes between reset release and the loop
    r_st = 0; r_acc = 0; r_lm = 0; r_cyc = 0; since = 1; snaps = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int cyc = 0; cyc < 10 * IV; cyc++) begin
      @(negedge clk);
      core_stall   = ($urandom_range(3) == 0);
      ev_access    = ($urandom_range(1) == 0);
      ev_load_miss = ev_access && ($urandom_range(2) == 0);
      task_switch  = (cyc == 450);
      @(posedge clk); #1;
      if (task_switch) begin
        r_st = 0; r_acc = 0; r_lm = 0; since = 0;
      end else begin
        // a snapshot taken at this edge includes this cycle's events
        r_st += int'(core_stall); r_acc += int'(ev_access); r_lm += int'(ev_load_miss);
        since++;
      end
      if (snap_valid) begin
        chk("snap_stall", snap_stall, r_st);
        chk("snap_access", snap_access, r_acc);
        chk("snap_lmiss", snap_lmiss, r_lm);
        chk("snap_cycles", snap_cycles, IV);
        chk("interval length", since, IV);
        snaps++; since = 0; r_st = 0; r_acc = 0; r_lm = 0;
      end
    end
    chk("snapshots seen", snaps, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
