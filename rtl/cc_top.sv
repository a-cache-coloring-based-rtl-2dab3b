// cc_top: colour-reconfigurable L2 subsystem that saves leakage energy.
//
// The L2 is divided into cache colours that can be powered off one by one. While the
// program runs, a small profiling cache estimates how many misses the L2 would have at
// six other sizes, and counters measure memory stall cycles. At the end of every
// interval the energy saving algorithm predicts the memory-subsystem energy of up to 11
// candidate colour counts near the current one and picks the cheapest; the
// reconfiguration controller then remaps memory regions, flushes the affected colours
// and switches colours on or off through per-colour enables (color_on, meant to drive
// gated-Vdd sleep transistors outside this block).
//
// Blocks: mapping_table (region -> colour), l2_colored_cache (colour-indexed L2 with
// flush engine), profiling_cache (six sampled tag-only levels), msc_counters
// (interval timer, stall cycles), energy_saver (algorithm), reconfig_ctrl.
//
// Interfaces: a line-wide request port from the L1 side (valid/ready, response
// 3 cycles after acceptance on a hit); core_stall high in every cycle the core counts as
// an effective memory stall; task_switch pulsed by the OS on a context switch (clears
// the profiling and stall counters, the active size is kept, as in the paper); a
// line-wide memory port held until mem_ack. L2 requests are held off while a
// reconfiguration runs. An interval end that arrives while the previous decision is
// still being applied is skipped.
module cc_top #(
  parameter int unsigned N_COLORS        = cc_pkg::N_COLORS,
  parameter int unsigned SPC             = cc_pkg::SPC,
  parameter int unsigned WAYS            = cc_pkg::WAYS,
  parameter int unsigned PPN_W           = cc_pkg::PPN_W,
  parameter int unsigned LINE_BYTES      = cc_pkg::LINE_BYTES,
  parameter int unsigned SAMPLE_R        = cc_pkg::SAMPLE_R,
  parameter int unsigned INTERVAL_CYCLES = 5_000_000,
  parameter int unsigned LAMBDA          = cc_pkg::LAMBDA,
  localparam int unsigned CW     = $clog2(N_COLORS),
  localparam int unsigned KW     = CW + 1,
  localparam int unsigned SW     = $clog2(SPC),
  localparam int unsigned OW     = $clog2(LINE_BYTES),
  localparam int unsigned PA_W   = PPN_W + SW + OW,
  localparam int unsigned LINE_W = LINE_BYTES * 8,
  localparam int unsigned N_PROF = cc_pkg::N_PROF,
  localparam int unsigned CNT_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // L1-side request port
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic              req_load,
  input  logic [PA_W-1:0]   req_addr,
  input  logic [LINE_W-1:0] req_wdata,
  output logic              resp_valid,
  output logic              resp_hit,
  output logic [LINE_W-1:0] resp_rdata,
  // core status
  input  logic              core_stall,
  input  logic              task_switch,
  // memory port
  output logic              mem_req,
  output logic              mem_we,
  output logic [PA_W-1:0]   mem_addr,
  output logic [LINE_W-1:0] mem_wdata,
  input  logic              mem_ack,
  input  logic [LINE_W-1:0] mem_rdata,
  // colour power enables and status
  output logic [N_COLORS-1:0] color_on,
  output logic [KW-1:0]     active_colors,
  output logic              reconfig_busy,
  output logic              decision_valid,
  output logic [KW-1:0]     decision_colors,
  output logic              decision_gain_high,
  output logic [63:0]       decision_energy,
  output logic [63:0]       block_transitions,
  output logic              l2_ready,
  output logic              ev_l2_hit,
  output logic              ev_l2_miss,
  output logic              ev_l2_writeback
);
  // ---------------- mapping table
  logic [CW-1:0] lk_color, mt_rd_region, mt_rd_color, mt_wr_region, mt_wr_color;
  logic          mt_wr_en;

  mapping_table #(.N_COLORS(N_COLORS)) u_mt (
    .clk, .rst_n,
    .lk_region(req_addr[OW + SW +: CW]), .lk_color,
    .rc_region(mt_rd_region), .rc_color(mt_rd_color),
    .wr_en(mt_wr_en), .wr_region(mt_wr_region), .wr_color(mt_wr_color));

  // ---------------- L2
  logic                fl_valid, fl_done;
  cc_pkg::flush_mode_e fl_mode;
  logic [CW-1:0]       fl_color, fl_region;
  logic ev_access, ev_load_miss;

  l2_colored_cache #(
    .N_COLORS(N_COLORS), .SPC(SPC), .WAYS(WAYS), .PPN_W(PPN_W), .LINE_BYTES(LINE_BYTES)
  ) u_l2 (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_load, .req_addr, .req_wdata,
    .req_color(lk_color), .req_hold(reconfig_busy),
    .resp_valid, .resp_hit, .resp_rdata,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .fl_valid, .fl_mode, .fl_color, .fl_region, .fl_done,
    .color_on,
    .ev_access, .ev_hit(ev_l2_hit), .ev_miss(ev_l2_miss), .ev_load_miss,
    .ev_writeback(ev_l2_writeback), .init_done(l2_ready));

  // ---------------- profiling cache, fed with every accepted request
  logic             snap_valid, saver_start, prof_clear;
  logic [CNT_W-1:0] p_acc;
  logic [CNT_W-1:0] p_miss [N_PROF];
  logic [CNT_W-1:0] p_lmiss [N_PROF];

  assign prof_clear = snap_valid || task_switch;

  profiling_cache #(
    .N_COLORS(N_COLORS), .SPC(SPC), .SAMPLE_R(SAMPLE_R), .WAYS(WAYS), .PPN_W(PPN_W),
    .CNT_W(CNT_W)
  ) u_prof (
    .clk, .rst_n,
    .acc_valid(req_valid && req_ready),
    .acc_load (req_load && !req_we),
    .acc_ppn  (req_addr[OW + SW +: PPN_W]),
    .acc_sic  (req_addr[OW +: SW]),
    .cnt_clear(prof_clear),
    .acc_cnt  (p_acc),
    .miss_cnt (p_miss),
    .lmiss_cnt(p_lmiss));

  // ---------------- stall-cycle counters and interval timer
  logic [CNT_W-1:0] s_cycles, s_stall, s_access, s_lmiss;

  msc_counters #(.INTERVAL_CYCLES(INTERVAL_CYCLES), .CNT_W(CNT_W)) u_msc (
    .clk, .rst_n,
    .core_stall, .ev_access, .ev_load_miss, .task_switch,
    .snap_valid, .snap_cycles(s_cycles), .snap_stall(s_stall),
    .snap_access(s_access), .snap_lmiss(s_lmiss));

  // ---------------- energy saving algorithm
  logic          saver_busy, saver_done;
  logic [KW-1:0] saver_colors;
  logic          cand_valid;
  logic [KW-1:0] cand_colors;
  logic [63:0]   cand_energy;

  assign saver_start = snap_valid && !saver_busy && !reconfig_busy;

  energy_saver #(
    .N_COLORS(N_COLORS), .SPC(SPC), .WAYS(WAYS), .SAMPLE_R(SAMPLE_R), .CNT_W(CNT_W),
    .LAMBDA(LAMBDA)
  ) u_saver (
    .clk, .rst_n,
    .start(saver_start), .cur_colors(active_colors),
    .cycles(s_cycles), .stall(s_stall), .access(s_access), .lmiss(s_lmiss),
    .prof_access(p_acc),
    .pmiss(p_miss), .plmiss(p_lmiss),
    .busy(saver_busy), .done(saver_done), .new_colors(saver_colors),
    .gain_high(decision_gain_high), .best_energy(decision_energy),
    .cand_valid, .cand_colors, .cand_energy);

  assign decision_valid  = saver_done;
  assign decision_colors = saver_colors;

  // ---------------- reconfiguration
  logic rc_done;

  reconfig_ctrl #(.N_COLORS(N_COLORS), .SPC(SPC), .WAYS(WAYS)) u_rc (
    .clk, .rst_n,
    .start(saver_done), .new_colors(saver_colors),
    .busy(reconfig_busy), .done(rc_done),
    .cur_colors(active_colors), .color_on, .transitions(block_transitions),
    .mt_rd_region, .mt_rd_color, .mt_wr_en, .mt_wr_region, .mt_wr_color,
    .fl_valid, .fl_mode, .fl_color, .fl_region, .fl_done);

endmodule
