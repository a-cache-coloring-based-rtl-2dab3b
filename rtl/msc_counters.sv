// msc_counters: interval timer and memory-stall-cycle counters.
//
// The paper splits a program's cycles into base cycles and memory stall cycles and
// measures the effective stall cycles with hardware counters; the ratio of stall cycles
// to L2 load misses (penalty per miss) is later used to predict the run time under
// other cache sizes. This block counts, per interval: clock cycles, cycles in which the
// core reports an effective memory stall (core_stall, already corrected by the core
// for overlap with other miss events), L2 accesses and L2 load misses under the current
// configuration. After INTERVAL_CYCLES cycles it copies the counts (including the
// events of that last cycle) to the snap_* outputs, restarts the counters and raises
// snap_valid for one cycle, so snap_* are valid from that cycle until the next
// interval ends. task_switch restarts the interval and discards its counts (the paper
// resets the profiling counters at a task switch; this design restarts the stall
// counters with them). The interval length is not given in the paper beyond "a
// large interval length"; 5M cycles is this design's default.
module msc_counters #(
  parameter int unsigned INTERVAL_CYCLES = 5_000_000,
  parameter int unsigned CNT_W           = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             core_stall,
  input  logic             ev_access,
  input  logic             ev_load_miss,
  input  logic             task_switch,
  output logic             snap_valid,
  output logic [CNT_W-1:0] snap_cycles,
  output logic [CNT_W-1:0] snap_stall,
  output logic [CNT_W-1:0] snap_access,
  output logic [CNT_W-1:0] snap_lmiss
);
  logic [CNT_W-1:0] cyc_q, stall_q, acc_q, lmiss_q;
  logic [CNT_W-1:0] stall_n, acc_n, lmiss_n;
  logic             last;

  assign stall_n = stall_q + CNT_W'(core_stall);
  assign acc_n   = acc_q   + CNT_W'(ev_access);
  assign lmiss_n = lmiss_q + CNT_W'(ev_load_miss);
  assign last    = (cyc_q == CNT_W'(INTERVAL_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc_q <= '0; stall_q <= '0; acc_q <= '0; lmiss_q <= '0;
      snap_valid <= 1'b0;
      snap_cycles <= '0; snap_stall <= '0; snap_access <= '0; snap_lmiss <= '0;
    end else begin
      snap_valid <= 1'b0;
      if (task_switch) begin
        cyc_q <= '0; stall_q <= '0; acc_q <= '0; lmiss_q <= '0;
      end else if (last) begin
        snap_valid  <= 1'b1;
        snap_cycles <= CNT_W'(INTERVAL_CYCLES);
        snap_stall  <= stall_n;
        snap_access <= acc_n;
        snap_lmiss  <= lmiss_n;
        cyc_q <= '0; stall_q <= '0; acc_q <= '0; lmiss_q <= '0;
      end else begin
        cyc_q <= cyc_q + 1'b1;
        stall_q <= stall_n; acc_q <= acc_n; lmiss_q <= lmiss_n;
      end
    end
  end
endmodule
