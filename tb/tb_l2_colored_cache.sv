// tb_l2_colored_cache: self-checking test of the colour-indexed L2 and its flush engine,
// at a small size (4 colours of 4 sets, 4 ways, 8-byte lines, 12-bit page numbers).
// A behavioural memory with random latency sits on the memory port. Random reads and
// writes over a pool of pages are checked against a reference copy of the data; an
// immediate re-read must hit with the fixed hit latency; the first touch of a line
// must miss. Then a colour is shrunk away (FL_COLOR, region remapped, colour off) and
// brought back (FL_CLEAR, FL_REGION, region mapped home), with data checked throughout
// and the memory image compared after each flush.
module tb_l2_colored_cache;
  localparam int NC = 4, SPC = 4, WAYS = 4, PPN_W = 12, LB = 8;
  localparam int PA_W = PPN_W + 2 + 3, LW = LB * 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, req_we = 0, req_load = 0, req_hold = 0;
  logic [PA_W-1:0] req_addr = '0;
  logic [LW-1:0] req_wdata = '0, resp_rdata, mem_wdata, mem_rdata;
  logic [1:0] req_color;
  logic resp_valid, resp_hit, mem_req, mem_we, mem_ack, fl_valid = 0, fl_done;
  logic [PA_W-1:0] mem_addr;
  cc_pkg::flush_mode_e fl_mode = cc_pkg::FL_COLOR;
  logic [1:0] fl_color = '0, fl_region = '0;
  logic [NC-1:0] color_on = '1;
  logic ev_access, ev_hit, ev_miss, ev_load_miss, ev_writeback, init_done;

  l2_colored_cache #(.N_COLORS(NC), .SPC(SPC), .WAYS(WAYS), .PPN_W(PPN_W), .LINE_BYTES(LB))
    dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
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
    return {a, 8'hA5, a} ^ 64'h0123_4567_89AB_CDEF;
  endfunction
  int n_wb;
  initial begin
    mem_ack = 0; mem_rdata = '0; n_wb = 0;
    forever begin
      @(negedge clk);
      mem_ack = 0;
      if (mem_req) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        if (mem_we) begin mem[mem_addr] = mem_wdata; n_wb++; end
        else mem_rdata = mem.exists(mem_addr) ? mem[mem_addr] : mem_init(mem_addr);
        mem_ack = 1;
      end
    end
  end

  // ---------------- reference
  logic [LW-1:0] ref_d [logic [PA_W-1:0]];
  int map [NC];
  assign req_color = 2'(map[req_addr[5 +: 2]]);
  logic [PPN_W-1:0] pool [24];

  task automatic access(logic [PA_W-1:0] a, bit we, output bit hit, output int lat);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_we = we; req_load = !we;
    req_wdata = {$urandom(), $urandom()};
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    hit = resp_hit;
    if (we) ref_d[a] = req_wdata;
    else chk($sformatf("read %0h", a), resp_rdata,
             ref_d.exists(a) ? ref_d[a] : mem_init(a));
  endtask

  function automatic logic [PA_W-1:0] rnd_addr();
    return {pool[$urandom_range(23)], 2'($urandom_range(3)), 3'b0};
  endfunction

  task automatic traffic(int n);
    bit h; int lat;
    for (int i = 0; i < n; i++) access(rnd_addr(), $urandom_range(2) == 0, h, lat);
  endtask

  task automatic flush(cc_pkg::flush_mode_e m, int c, int r);
    @(negedge clk);
    fl_valid = 1; fl_mode = m; fl_color = 2'(c); fl_region = 2'(r);
    while (!fl_done) @(negedge clk);
    fl_valid = 0;
  endtask

  // memory must hold the reference data of every written line not cached in colour set
  task automatic check_mem_for(int region_or_all, int colour);
    foreach (ref_d[a]) begin
      if (map[a[5 +: 2]] == colour && (region_or_all < 0 || a[5 +: 2] == region_or_all))
        chk($sformatf("memory image %0h", a), mem.exists(a) ? mem[a] : mem_init(a), ref_d[a]);
    end
  endtask

  initial begin
    bit h; int lat, misses_before;
    logic [PA_W-1:0] a;
    for (int i = 0; i < NC; i++) map[i] = i;
    for (int i = 0; i < 24; i++) pool[i] = PPN_W'($urandom());
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (init_done);
    // first touch misses, second hits with the fixed latency
    a = {pool[0], 2'd1, 3'b0};
    access(a, 0, h, lat); chk("first touch is a miss", h, 0);
    access(a, 0, h, lat); chk("second touch hits", h, 1); chk("hit latency", lat, 2);
    access(a, 1, h, lat); chk("write hit", h, 1);
    access(a, 0, h, lat); chk("read after write hits", h, 1);
    traffic(1500);
    chk("write-backs happened", n_wb > 0, 1);
    // shrink: remove colour 3 (region 3 moves to colour 0)
    flush(cc_pkg::FL_COLOR, 3, 0);
    check_mem_for(-1, 3);
    map[3] = 0; color_on[3] = 0;
    traffic(800);
    // grow: colour 3 powered and cleared, region 3 flushed out of colour 0 and moved home
    color_on[3] = 1;
    flush(cc_pkg::FL_CLEAR, 3, 0);
    flush(cc_pkg::FL_REGION, 0, 3);
    check_mem_for(3, 0);
    map[3] = 3;
    traffic(800);
    // a region flush touches only that region's blocks
    a = {pool[0][PPN_W-1:2], 2'd0, 2'd1, 3'b0};      // region 0, colour 0
    access(a, 0, h, lat);
    flush(cc_pkg::FL_REGION, 0, 2);
    access(a, 0, h, lat); chk("other region survives a region flush", h, 1);
    flush(cc_pkg::FL_REGION, 0, 0);
    access(a, 0, h, lat); chk("flushed region misses", h, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
