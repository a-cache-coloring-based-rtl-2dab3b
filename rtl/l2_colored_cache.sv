// l2_colored_cache: colour-indexed, write-back, LRU unified L2 with a flush engine.
//
// Indexing. A request carries a byte address (line-sized transfer) and the colour the
// mapping table gives for the address's region. The set index is {colour, the set bits
// of the page offset}, so every colour is SPC consecutive sets and holds exactly the
// blocks that one page can occupy. Because the region-to-colour mapping can change,
// the tag is the whole physical page number; its low bits are the region.
//
// Access timing (blocking, one request at a time, synchronous-read arrays):
//   IDLE --accept--> TAG (state word read) --hit--> RESP: on a hit resp_valid is high
//   in the second cycle after the cycle in which the request is accepted. A miss may write back a dirty LRU victim (WB_RD, WB), fetches
//   the line for a read (FETCH), then writes it (FILL) and answers (RESP). A write
//   request carries a whole line, so a write miss allocates without fetching.
//   The memory port holds mem_req until a one-cycle mem_ack; read data come with it.
//
// Flush engine (used by the reconfiguration controller). fl_valid is held until the
// one-cycle fl_done. FL_COLOR writes back every dirty block of colour fl_color and
// invalidates the colour; FL_REGION does this only for blocks whose tag region is
// fl_region; FL_CLEAR invalidates a colour without write-backs (used right after a
// colour is powered up, since gated-Vdd destroys its contents). Flushes have priority
// over requests; req_hold keeps requests out while the controller reconfigures.
//
// After reset the engine sweeps all sets to clear the state words (SETS cycles,
// req_ready low). Replacement is true LRU with an age per way (0 = most recent).
// The paper gives the cache geometry, LRU, the colour indexing and the flushing rules;
// the blocking controller, the line-sized port and the handshakes are this design's.
module l2_colored_cache
#(
  parameter int unsigned N_COLORS   = cc_pkg::N_COLORS,
  parameter int unsigned SPC        = cc_pkg::SPC,
  parameter int unsigned WAYS       = cc_pkg::WAYS,
  parameter int unsigned PPN_W      = cc_pkg::PPN_W,
  parameter int unsigned LINE_BYTES = cc_pkg::LINE_BYTES,
  localparam int unsigned CW     = $clog2(N_COLORS),
  localparam int unsigned SW     = $clog2(SPC),
  localparam int unsigned OW     = $clog2(LINE_BYTES),
  localparam int unsigned PA_W   = PPN_W + SW + OW,
  localparam int unsigned LINE_W = LINE_BYTES * 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // request port from the L1 side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic              req_load,
  input  logic [PA_W-1:0]   req_addr,
  input  logic [LINE_W-1:0] req_wdata,
  input  logic [CW-1:0]     req_color,
  input  logic              req_hold,
  output logic              resp_valid,
  output logic              resp_hit,
  output logic [LINE_W-1:0] resp_rdata,
  // memory port
  output logic              mem_req,
  output logic              mem_we,
  output logic [PA_W-1:0]   mem_addr,
  output logic [LINE_W-1:0] mem_wdata,
  input  logic              mem_ack,
  input  logic [LINE_W-1:0] mem_rdata,
  // flush engine
  input  logic              fl_valid,
  input  cc_pkg::flush_mode_e       fl_mode,
  input  logic [CW-1:0]     fl_color,
  input  logic [CW-1:0]     fl_region,
  output logic              fl_done,
  // colour power state (for checking only)
  input  logic [N_COLORS-1:0] color_on,
  // events of the current configuration
  output logic              ev_access,
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_load_miss,
  output logic              ev_writeback,
  output logic              init_done
);
  localparam int unsigned SETS = N_COLORS * SPC;
  localparam int unsigned IW   = $clog2(SETS);
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned AGW  = WW;

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [AGW-1:0]   age;
    logic [PPN_W-1:0] tag;
  } way_t;
  typedef way_t [WAYS-1:0] set_t;
  localparam int unsigned MW = $bits(set_t);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_TAG, S_WB_RD, S_WB, S_FETCH, S_FILL, S_RESP,
    S_FL_RD, S_FL_LATCH, S_FL_CHK, S_FL_DRD, S_FL_WB, S_FL_WR
  } state_e;

  state_e state_q;

  // state (tag) array and data array
  logic          m_en, m_we;
  logic [IW-1:0] m_addr;
  set_t          m_wdata, m_rdata;
  logic              d_en, d_we;
  logic [IW+WW-1:0]  d_addr;
  logic [LINE_W-1:0] d_wdata, d_rdata;

  sram_sp #(.DEPTH(SETS), .WIDTH(MW)) u_meta (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata));
  sram_sp #(.DEPTH(SETS * WAYS), .WIDTH(LINE_W)) u_data (
    .clk, .en(d_en), .we(d_we), .addr(d_addr), .wdata(d_wdata), .rdata(d_rdata));

  // latched request / flush command
  logic              r_we, r_load;
  logic [PPN_W-1:0]  r_ppn;
  logic [SW-1:0]     r_sic;          // set in colour
  logic [IW-1:0]     r_set;
  logic [LINE_W-1:0] r_wdata;
  logic [LINE_W-1:0] line_q;
  set_t              meta_r;
  logic [WW-1:0]     way_r;
  logic              resp_sram_q, resp_hit_q;
  cc_pkg::flush_mode_e       f_mode;
  logic [CW-1:0]     f_color, f_region;
  logic [SW-1:0]     f_sic;
  logic [IW-1:0]     init_idx;

  // cleared state word: invalid, ages form a permutation
  function automatic set_t cleared_set();
    set_t s;
    for (int w = 0; w < WAYS; w++) begin
      s[w].valid = 1'b0;
      s[w].dirty = 1'b0;
      s[w].age   = AGW'(w);
      s[w].tag   = '0;
    end
    return s;
  endfunction

  // make way w the most recently used
  function automatic set_t touch(set_t s, logic [WW-1:0] w);
    set_t o = s;
    for (int i = 0; i < WAYS; i++)
      if (s[i].age < s[w].age) o[i].age = s[i].age + 1'b1;
    o[w].age = '0;
    return o;
  endfunction

  // hit detection and victim choice on the word just read
  logic          hit;
  logic [WW-1:0] hit_way, victim;
  always_comb begin
    hit = 1'b0; hit_way = '0; victim = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (m_rdata[w].valid && m_rdata[w].tag == r_ppn) begin
        hit = 1'b1; hit_way = WW'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--)
      if (m_rdata[w].age == AGW'(WAYS - 1)) victim = WW'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!m_rdata[w].valid) victim = WW'(w);
  end

  // flush scan: does way way_r of meta_r need handling?
  logic f_match;
  assign f_match = meta_r[way_r].valid &&
                   (f_mode != cc_pkg::FL_REGION || meta_r[way_r].tag[CW-1:0] == f_region);

  logic [IW-1:0] f_set;
  assign f_set = {f_color, f_sic};

  assign req_ready = (state_q == S_IDLE) && !fl_valid && !req_hold;
  assign init_done = (state_q != S_INIT);

  // array and port controls
  always_comb begin
    m_en = 1'b0; m_we = 1'b0; m_addr = r_set; m_wdata = meta_r;
    d_en = 1'b0; d_we = 1'b0; d_addr = {r_set, way_r}; d_wdata = r_wdata;
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = {r_ppn, r_sic, OW'(0)}; mem_wdata = line_q;
    resp_valid = 1'b0; resp_hit = resp_hit_q; resp_rdata = resp_sram_q ? d_rdata : line_q;
    fl_done = 1'b0;
    ev_access = 1'b0; ev_hit = 1'b0; ev_miss = 1'b0; ev_load_miss = 1'b0; ev_writeback = 1'b0;
    unique case (state_q)
      S_INIT: begin
        m_en = 1'b1; m_we = 1'b1; m_addr = init_idx; m_wdata = cleared_set();
      end
      S_IDLE: begin
        if (req_valid && req_ready) begin
          m_en = 1'b1; m_addr = {req_color, req_addr[OW +: SW]};
        end
      end
      S_TAG: begin
        ev_access = 1'b1;
        if (hit) begin
          ev_hit = 1'b1;
          m_en = 1'b1; m_we = 1'b1; m_wdata = touch(m_rdata, hit_way);
          if (r_we) m_wdata[hit_way].dirty = 1'b1;
          d_en = 1'b1; d_we = r_we; d_addr = {r_set, hit_way};
        end else begin
          ev_miss = 1'b1;
          ev_load_miss = r_load;
          if (m_rdata[victim].valid && m_rdata[victim].dirty) begin
            d_en = 1'b1; d_addr = {r_set, victim};
          end
        end
      end
      S_WB: begin
        mem_req = 1'b1; mem_we = 1'b1;
        mem_addr = {meta_r[way_r].tag, r_sic, OW'(0)};
        ev_writeback = mem_ack;
      end
      S_FETCH: begin
        mem_req = 1'b1;
      end
      S_FILL: begin
        d_en = 1'b1; d_we = 1'b1; d_wdata = r_we ? r_wdata : line_q;
        m_en = 1'b1; m_we = 1'b1; m_wdata = touch(meta_r, way_r);
        m_wdata[way_r].valid = 1'b1;
        m_wdata[way_r].dirty = r_we;
        m_wdata[way_r].tag   = r_ppn;
      end
      S_RESP: resp_valid = 1'b1;
      S_FL_RD: begin
        m_en = 1'b1; m_addr = f_set;
        if (f_mode == cc_pkg::FL_CLEAR) begin
          m_we = 1'b1; m_wdata = cleared_set();
          fl_done = (f_sic == SW'(SPC - 1));
        end
      end
      S_FL_CHK: begin
        if (f_match && meta_r[way_r].dirty) begin
          d_en = 1'b1; d_addr = {f_set, way_r};
        end
      end
      S_FL_WB: begin
        mem_req = 1'b1; mem_we = 1'b1;
        mem_addr = {meta_r[way_r].tag, f_sic, OW'(0)};
        ev_writeback = mem_ack;
      end
      S_FL_WR: begin
        m_en = 1'b1; m_we = 1'b1; m_addr = f_set; m_wdata = meta_r;
        for (int w = 0; w < WAYS; w++)
          if (meta_r[w].valid &&
              (f_mode != cc_pkg::FL_REGION || meta_r[w].tag[CW-1:0] == f_region)) begin
            m_wdata[w].valid = 1'b0;
            m_wdata[w].dirty = 1'b0;
          end
        fl_done = (f_sic == SW'(SPC - 1));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_INIT; init_idx <= '0;
      r_we <= 1'b0; r_load <= 1'b0; r_ppn <= '0; r_sic <= '0; r_set <= '0; r_wdata <= '0;
      line_q <= '0; meta_r <= '0; way_r <= '0; resp_sram_q <= 1'b0; resp_hit_q <= 1'b0;
      f_mode <= cc_pkg::FL_COLOR; f_color <= '0; f_region <= '0; f_sic <= '0;
    end else begin
      unique case (state_q)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == IW'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (fl_valid) begin
            f_mode <= fl_mode; f_color <= fl_color; f_region <= fl_region; f_sic <= '0;
            state_q <= S_FL_RD;
          end else if (req_valid && !req_hold) begin
            r_we <= req_we; r_load <= req_load && !req_we;
            r_ppn <= req_addr[OW + SW +: PPN_W];
            r_sic <= req_addr[OW +: SW];
            r_set <= {req_color, req_addr[OW +: SW]};
            r_wdata <= req_wdata;
            state_q <= S_TAG;
          end
        end
        S_TAG: begin
          meta_r <= m_rdata;
          if (hit) begin
            resp_sram_q <= !r_we; resp_hit_q <= 1'b1; way_r <= hit_way;
            state_q <= S_RESP;
          end else begin
            resp_sram_q <= 1'b0; resp_hit_q <= 1'b0; way_r <= victim;
            if (m_rdata[victim].valid && m_rdata[victim].dirty) state_q <= S_WB_RD;
            else if (r_we)                                   state_q <= S_FILL;
            else                                             state_q <= S_FETCH;
          end
        end
        S_WB_RD: begin
          line_q <= d_rdata;
          state_q <= S_WB;
        end
        S_WB: if (mem_ack) state_q <= r_we ? S_FILL : S_FETCH;
        S_FETCH: if (mem_ack) begin
          line_q <= mem_rdata;
          state_q <= S_FILL;
        end
        S_FILL: state_q <= S_RESP;
        S_RESP: state_q <= S_IDLE;
        S_FL_RD: begin
          if (f_mode == cc_pkg::FL_CLEAR) begin
            f_sic <= f_sic + 1'b1;
            if (f_sic == SW'(SPC - 1)) state_q <= S_IDLE;
          end else begin
            state_q <= S_FL_LATCH;
          end
        end
        S_FL_LATCH: begin
          meta_r <= m_rdata; way_r <= '0;
          state_q <= S_FL_CHK;
        end
        S_FL_CHK: begin
          if (f_match && meta_r[way_r].dirty) state_q <= S_FL_DRD;
          else if (way_r == WW'(WAYS - 1))   state_q <= S_FL_WR;
          else                               way_r <= way_r + 1'b1;
        end
        S_FL_DRD: begin
          line_q <= d_rdata;
          state_q <= S_FL_WB;
        end
        S_FL_WB: if (mem_ack) begin
          if (way_r == WW'(WAYS - 1)) state_q <= S_FL_WR;
          else begin way_r <= way_r + 1'b1; state_q <= S_FL_CHK; end
        end
        S_FL_WR: begin
          f_sic <= f_sic + 1'b1;
          state_q <= (f_sic == SW'(SPC - 1)) ? S_IDLE : S_FL_RD;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // an accepted request must map to a powered colour
  a_color_on: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready) |-> color_on[req_color]);
  // memory request stays stable until acknowledged
  a_mem_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req && !mem_ack) |=> (mem_req && $stable(mem_addr) && $stable(mem_we)));

endmodule
