// profiling_cache: multi-level, set-sampled, tag-only profiling cache.
//
// It watches the L2 access stream and estimates, in one pass, how many misses and
// load misses the L2 would have had with N/16, 2N/16, 4N/16, 8N/16, 12N/16 and
// 16N/16 active colours (N = N_COLORS); these six cache sizes are the profiling
// points. Set sampling: of the SPC sets in a colour only those whose in-colour index is
// a multiple of R are modelled, so each level holds colours*SPC/R sets and the whole
// cache 43*SETS/(16*R) sets (172 for the 2 MB, 8-way L2 with R = 64), as in the paper.
// Every sampled access goes to all six levels (prof_level) in parallel and is handled
// in the cycle it arrives; acc_cnt counts sampled accesses. Counts are raw sampled
// numbers; the consumer scales them by R. cnt_clear zeroes all counters; it is pulsed at
// the end of an interval and on a task switch (the paper resets the profiling counters
// when the running task changes). Interface: one access per cycle at most, with the
// page number, the region (low page-number bits) and the line's set-in-colour bits.
module profiling_cache #(
  parameter int unsigned N_COLORS = cc_pkg::N_COLORS,
  parameter int unsigned SPC      = cc_pkg::SPC,
  parameter int unsigned SAMPLE_R = cc_pkg::SAMPLE_R,
  parameter int unsigned WAYS     = cc_pkg::WAYS,
  parameter int unsigned PPN_W    = cc_pkg::PPN_W,
  parameter int unsigned CNT_W    = 32,
  localparam int unsigned N_PROF = cc_pkg::N_PROF,
  localparam int unsigned SW     = $clog2(SPC),
  localparam int unsigned RW     = $clog2(SAMPLE_R),
  localparam int unsigned SS     = SPC / SAMPLE_R,
  localparam int unsigned SSW    = (SS > 1) ? $clog2(SS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_valid,
  input  logic             acc_load,
  input  logic [PPN_W-1:0] acc_ppn,
  input  logic [SW-1:0]    acc_sic,
  input  logic             cnt_clear,
  output logic [CNT_W-1:0] acc_cnt,
  output logic [CNT_W-1:0] miss_cnt  [N_PROF],
  output logic [CNT_W-1:0] lmiss_cnt [N_PROF]
);
  if (SPC % SAMPLE_R != 0 || N_COLORS % 16 != 0) begin : g_bad_size
    $error("profiling_cache: SPC must be a multiple of R and N_COLORS of 16");
  end

  logic sampled;
  assign sampled = acc_valid && (acc_sic[RW-1:0] == '0);

  logic [SSW-1:0] sidx;
  assign sidx = SSW'(acc_sic >> RW);

  for (genvar k = 0; k < N_PROF; k++) begin : g_lvl
    prof_level #(
      .COLORS  (N_COLORS / 16 * cc_pkg::prof_sixteenths(k)),
      .N_COLORS(N_COLORS), .SS(SS), .WAYS(WAYS), .PPN_W(PPN_W), .CNT_W(CNT_W)
    ) u_lvl (
      .clk, .rst_n,
      .acc_valid (sampled),
      .acc_load,
      .acc_region(acc_ppn[$clog2(N_COLORS)-1:0]),
      .acc_ppn,
      .acc_sidx  (sidx),
      .cnt_clear,
      .miss_cnt  (miss_cnt[k]),
      .lmiss_cnt (lmiss_cnt[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         acc_cnt <= '0;
    else if (cnt_clear) acc_cnt <= '0;
    else if (sampled)   acc_cnt <= acc_cnt + 1'b1;
  end
endmodule
