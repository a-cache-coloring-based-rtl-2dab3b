// prof_level: one level (one profiling point) of the multi-level profiling cache.
//
// A tag-only, set-associative, true-LRU cache that models an L2 with COLORS active
// colours, seen through set sampling: it holds only the sampled sets, SS = SPC/R of
// them per colour. An access arrives as (region, page number, sampled set index);
// the modelled colour is region mod COLORS, so a level that stands for a cache with
// fewer colours folds several regions into one colour, as the mapping table would.
// Each access is looked up and the LRU state updated in the same cycle; misses and
// load misses are counted. cnt_clear zeroes the counters (end of interval, task
// switch) but keeps the tags. Reset clears one 'touched' flag per set, so the tag
// array itself needs no reset.
// Following the paper: tag-only, same associativity and replacement as the L2, one set
// in R sampled. The region-mod-COLORS folding and the single-cycle update are this
// design's choices.
module prof_level #(
  parameter int unsigned COLORS   = 64,
  parameter int unsigned N_COLORS = cc_pkg::N_COLORS,
  parameter int unsigned SS       = cc_pkg::SPC / cc_pkg::SAMPLE_R,
  parameter int unsigned WAYS     = cc_pkg::WAYS,
  parameter int unsigned PPN_W    = cc_pkg::PPN_W,
  parameter int unsigned CNT_W    = 32,
  localparam int unsigned CW  = $clog2(N_COLORS),
  localparam int unsigned SSW = (SS > 1) ? $clog2(SS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_valid,
  input  logic             acc_load,
  input  logic [CW-1:0]    acc_region,
  input  logic [PPN_W-1:0] acc_ppn,
  input  logic [SSW-1:0]   acc_sidx,
  input  logic             cnt_clear,
  output logic [CNT_W-1:0] miss_cnt,
  output logic [CNT_W-1:0] lmiss_cnt
);
  localparam int unsigned SETS = COLORS * SS;
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned XW   = (SETS > 1) ? $clog2(SETS) : 1;

  typedef struct packed {
    logic             valid;
    logic [WW-1:0]    age;
    logic [PPN_W-1:0] tag;
  } pway_t;

  typedef pway_t [WAYS-1:0] pset_t;

  // Tag/LRU words live in a plain array (a small RAM, read asynchronously); a
  // per-set flag marks sets not yet touched since reset, whose word reads as cleared.
  pset_t             tags_q [SETS];
  logic [SETS-1:0]   init_q;

  function automatic pset_t cleared_set();
    pset_t c;
    for (int w = 0; w < WAYS; w++) c[w] = '{valid: 1'b0, age: WW'(w), tag: '0};
    return c;
  endfunction

  logic [XW-1:0] set_idx;
  always_comb begin
    int unsigned col;
    col = int'(acc_region) % COLORS;
    set_idx = XW'(col * SS + ((SS > 1) ? int'(acc_sidx) : 0));
  end

  pset_t         cur, upd;
  logic          hit;
  logic [WW-1:0] hit_way, victim, use_way;
  always_comb begin
    cur = init_q[set_idx] ? tags_q[set_idx] : cleared_set();
    hit = 1'b0; hit_way = '0; victim = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (cur[w].valid && cur[w].tag == acc_ppn) begin
        hit = 1'b1; hit_way = WW'(w);
      end
    for (int w = WAYS - 1; w >= 0; w--)
      if (cur[w].age == WW'(WAYS - 1)) victim = WW'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!cur[w].valid) victim = WW'(w);
    use_way = hit ? hit_way : victim;
    upd = cur;
    for (int w = 0; w < WAYS; w++)
      if (cur[w].age < cur[use_way].age) upd[w].age = cur[w].age + 1'b1;
    upd[use_way].age   = '0;
    upd[use_way].valid = 1'b1;
    upd[use_way].tag   = acc_ppn;
  end

  always_ff @(posedge clk) begin
    if (acc_valid) tags_q[set_idx] <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         init_q <= '0;
    else if (acc_valid) init_q[set_idx] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      miss_cnt <= '0; lmiss_cnt <= '0;
    end else if (cnt_clear) begin
      miss_cnt <= '0; lmiss_cnt <= '0;
    end else if (acc_valid && !hit) begin
      miss_cnt <= miss_cnt + 1'b1;
      if (acc_load) lmiss_cnt <= lmiss_cnt + 1'b1;
    end
  end
endmodule
