// tb_profiling_cache: self-checking test of the multi-level profiling cache.
// A random stream over a pool of pages (half of the accesses in the sampled set) is
// fed to the block and to a reference model that keeps, for each of the six levels, an
// LRU list per set (colour = region mod level colours). Miss and load-miss counts of
// every level and the sampled-access count are compared before and after a counter
// clear, which must zero the counts but keep the tags.
module tb_profiling_cache;
  localparam int N = 64, SPC = 64, R = 64, WAYS = 8, PPN_W = 40, NP = 6;
  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_load = 0, cnt_clear = 0;
  logic [PPN_W-1:0] acc_ppn = '0;
  logic [5:0] acc_sic = '0;
  logic [31:0] acc_cnt;
  logic [31:0] miss_cnt [NP];
  logic [31:0] lmiss_cnt [NP];
  int checks = 0, failures = 0;

  profiling_cache dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned lru [NP][N][$];
  int r_miss [NP], r_lmiss [NP], r_acc;
  longint unsigned pool [300];

  function automatic int lvl_colors(int k);
    int s[NP] = '{1, 2, 4, 8, 12, 16};
    return N / 16 * s[k];
  endfunction

  task automatic model(longint unsigned ppn, int sic, bit ld);
    if (sic % R != 0) return;
    r_acc++;
    for (int k = 0; k < NP; k++) begin
      int set, pos;
      set = int'(ppn % N) % lvl_colors(k);
      pos = -1;
      foreach (lru[k][set][i]) if (lru[k][set][i] == ppn) pos = i;
      if (pos >= 0) lru[k][set].delete(pos);
      else begin
        r_miss[k]++;
        if (ld) r_lmiss[k]++;
        if (lru[k][set].size() == WAYS) void'(lru[k][set].pop_back());
      end
      lru[k][set].push_front(ppn);
    end
  endtask

  task automatic compare(string tag);
    checks++;
    if (acc_cnt != r_acc) begin failures++; $display("%s acc_cnt %0d exp %0d", tag, acc_cnt, r_acc); end
    for (int k = 0; k < NP; k++) begin
      checks += 2;
      if (miss_cnt[k] != r_miss[k]) begin
        failures++; $display("%s level %0d misses %0d exp %0d", tag, k, miss_cnt[k], r_miss[k]);
      end
      if (lmiss_cnt[k] != r_lmiss[k]) begin
        failures++; $display("%s level %0d load misses %0d exp %0d", tag, k, lmiss_cnt[k], r_lmiss[k]);
      end
    end
  endtask

  task automatic run(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      acc_valid = ($urandom_range(3) != 0);
      acc_ppn   = pool[$urandom_range(299)];
      acc_sic   = ($urandom_range(1) == 0) ? 6'd0 : 6'($urandom_range(63));
      acc_load  = ($urandom_range(2) != 0);
      if (acc_valid) model(acc_ppn, int'(acc_sic), acc_load);
    end
    @(negedge clk) acc_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < 300; i++) pool[i] = {$urandom(), $urandom()} & ((64'd1 << PPN_W) - 1);
    for (int k = 0; k < NP; k++) begin r_miss[k] = 0; r_lmiss[k] = 0; end
    r_acc = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(6000);
    compare("phase1");
    // the full-size level must miss least and the 4-colour level most
    checks++;
    if (!(miss_cnt[5] < miss_cnt[0])) begin failures++; $display("miss counts not decreasing with size"); end
    @(negedge clk) cnt_clear = 1;
    @(negedge clk) cnt_clear = 0;
    for (int k = 0; k < NP; k++) begin r_miss[k] = 0; r_lmiss[k] = 0; end
    r_acc = 0;
    compare("after clear");
    run(6000);
    compare("phase2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
