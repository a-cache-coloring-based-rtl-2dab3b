// energy_saver: the per-interval energy saving algorithm.
//
// Started once per interval with the interval's counts, it picks the active colour
// count for the next interval:
//  1. Penalty per miss. PPM = stall cycles / L2 load misses under the current
//     configuration C*, computed by a restoring divider (one quotient bit per cycle)
//     with 8 fraction bits. With no load misses PPM is taken as 0.
//  2. Marginal gain. Miss counts between two profiling points are taken as linear in
//     the colour count, so G(C*) is the miss drop per colour on the profiling segment
//     [p_k, p_k+1) that holds C*. G <= lambda is tested as dM <= lambda * (p_k+1 - p_k),
//     which needs no division (the segment widths are powers of two).
//  3. Candidate space. Step 2 colours around C*: with G <= lambda up to 6 below and 4
//     above, otherwise 4 below and 6 above (D = 11 including C*); candidates below
//     Min = N/16 or above N are skipped, so near the ends fewer than 11 remain.
//  4. Energy of each candidate C, one per cycle, in picojoules:
//       M(C), LM(C) = R * interpolated profiled misses / load misses
//       T(C)  = base cycles + PPM * LM(C)          (base = cycles - stall cycles)
//       E(C)  = Edyn_L2*(A + M) + Edyn_mem*M + Pleak_L2*T*C/N + Pleak_mem*T
//               + Etran * SPC*WAYS*|C - C*| + Edyn_prof*A_prof + Pleak_prof*T
//     where A is the L2 access count (hits + 2*misses = A + M), the Etran term is the
//     block on/off transition energy of the change and the last two terms are the
//     profiling cache's own energy (A_prof = profiling-cache accesses).
//  5. The least-energy candidate wins; scanning goes from small to large, and a tie keeps
//     the smaller cache.
// Timing: start (one cycle, inputs sampled then) -> busy for CNT_W+8 divider cycles,
// one gain cycle and 11 candidate cycles -> done pulse with new_colors. cand_valid /
// cand_colors / cand_energy show every evaluated candidate as it is scored.
// The steps, D, lambda, Min, the step of 2 colours and the energy model are the
// paper's; fixed-point units, the divider and the tie rule are this design's.
module energy_saver #(
  parameter int unsigned N_COLORS   = cc_pkg::N_COLORS,
  parameter int unsigned SPC        = cc_pkg::SPC,
  parameter int unsigned WAYS       = cc_pkg::WAYS,
  parameter int unsigned SAMPLE_R   = cc_pkg::SAMPLE_R,
  parameter int unsigned CNT_W      = 32,
  parameter int unsigned LAMBDA     = cc_pkg::LAMBDA,
  parameter int unsigned COLOR_STEP = cc_pkg::COLOR_STEP,
  parameter int unsigned N_WIDE     = 6,   // candidates on the favoured side
  parameter int unsigned N_NARROW   = 4,   // candidates on the other side
  parameter longint unsigned E_DYN_L2   = cc_pkg::E_DYN_L2_PJ,
  parameter longint unsigned E_DYN_MEM  = cc_pkg::E_DYN_MEM_PJ,
  parameter longint unsigned P_LEAK_L2  = cc_pkg::P_LEAK_L2_PJC,
  parameter longint unsigned P_LEAK_MEM = cc_pkg::P_LEAK_MEM_PJC,
  parameter longint unsigned E_TRAN     = cc_pkg::E_TRAN_PJ,
  parameter longint unsigned E_DYN_PROF = cc_pkg::E_DYN_PROF_PJ,
  parameter longint unsigned P_LEAK_PROF = cc_pkg::P_LEAK_PROF_PJC,
  localparam int unsigned N_PROF = cc_pkg::N_PROF,
  localparam int unsigned KW     = $clog2(N_COLORS) + 1,
  localparam int unsigned FRAC   = 8,
  localparam int unsigned DVW    = CNT_W + FRAC
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [KW-1:0]    cur_colors,
  input  logic [CNT_W-1:0] cycles,
  input  logic [CNT_W-1:0] stall,
  input  logic [CNT_W-1:0] access,
  input  logic [CNT_W-1:0] lmiss,
  input  logic [CNT_W-1:0] prof_access,
  input  logic [CNT_W-1:0] pmiss  [N_PROF],
  input  logic [CNT_W-1:0] plmiss [N_PROF],
  output logic             busy,
  output logic             done,
  output logic [KW-1:0]    new_colors,
  output logic             gain_high,
  output logic [63:0]      best_energy,
  output logic             cand_valid,
  output logic [KW-1:0]    cand_colors,
  output logic [63:0]      cand_energy
);
  localparam int unsigned BASE_SH = $clog2(N_COLORS / 16);
  localparam int unsigned RW      = $clog2(SAMPLE_R);

  if ((N_COLORS / 16) != (1 << BASE_SH) || N_COLORS < 16) begin : g_bad_size
    $error("energy_saver: N_COLORS/16 must be a power of two");
  end

  typedef enum logic [1:0] {E_IDLE, E_DIV, E_GAIN, E_EVAL} est_e;
  est_e st_q;

  logic [N_PROF-1:0][CNT_W-1:0] pm_q, plm_q;
  logic [KW-1:0]    cur_q;
  logic [CNT_W-1:0] cyc_q, stall_q, acc_q, lmiss_q, pacc_q;
  logic [DVW-1:0]   dvd_q, quo_q;
  logic [CNT_W:0]   rem_q;
  logic [$clog2(DVW+1)-1:0] bit_q;
  logic signed [7:0] off_q, off_hi_q;
  logic             have_best_q;

  function automatic int unsigned ppoint(int unsigned k);
    return (N_COLORS / 16) * cc_pkg::prof_sixteenths(k);
  endfunction
  function automatic int unsigned seg_sh(int unsigned k);
    return BASE_SH + ((k == 0) ? 0 : (k == 1) ? 1 : 2);
  endfunction
  function automatic int unsigned seg_of(int unsigned col);
    int unsigned k = 0;
    for (int unsigned i = 1; i < N_PROF - 1; i++) if (col >= ppoint(i)) k = i;
    return k;
  endfunction
  // profiled count at colour count col, linear between profiling points, >= 0
  function automatic logic [63:0] interp(logic [N_PROF-1:0][CNT_W-1:0] c, int unsigned col);
    int unsigned k = seg_of(col);
    longint signed a, d, v;
    a = longint'(c[k]);
    d = a - longint'(c[k + 1]);
    v = a - ((d * longint'(col - ppoint(k))) >>> seg_sh(k));
    return (v < 0) ? 64'd0 : 64'(v);
  endfunction

  // ---- candidate energy (combinational, one candidate per cycle)
  logic signed [KW+8:0] cand_s;
  logic        cand_ok;
  logic [63:0] m_est, lm_est, t_est, e_est, dcol;
  always_comb begin
    cand_s  = $signed({9'd0, cur_q}) + off_q * $signed(10'(COLOR_STEP));
    cand_ok = (cand_s >= $signed((KW+9)'(N_COLORS / 16))) && (cand_s <= $signed((KW+9)'(N_COLORS)));
    m_est   = interp(pm_q,  cand_ok ? int'(cand_s) : int'(cur_q)) << RW;
    lm_est  = interp(plm_q, cand_ok ? int'(cand_s) : int'(cur_q)) << RW;
    t_est   = 64'(cyc_q - stall_q) + ((64'(quo_q) * lm_est) >> FRAC);
    dcol    = (off_q < 0) ? 64'(-off_q) * COLOR_STEP : 64'(off_q) * COLOR_STEP;
    e_est   = E_DYN_L2 * (64'(acc_q) + m_est) + E_DYN_MEM * m_est
            + (P_LEAK_L2 * t_est * 64'(cand_s[KW-1:0])) / N_COLORS
            + P_LEAK_MEM * t_est
            + E_TRAN * SPC * WAYS * dcol
            + E_DYN_PROF * 64'(pacc_q) + P_LEAK_PROF * t_est;
  end

  // ---- marginal gain test at C*
  logic        high_n;
  always_comb begin
    int unsigned k;
    longint signed dm;
    k  = seg_of(int'(cur_q));
    dm = (longint'(pm_q[k]) - longint'(pm_q[k + 1])) * longint'(SAMPLE_R);
    high_n = dm > (longint'(LAMBDA) <<< seg_sh(k));
  end

  assign busy        = (st_q != E_IDLE);
  assign cand_valid  = (st_q == E_EVAL) && cand_ok;
  assign cand_colors = cand_s[KW-1:0];
  assign cand_energy = e_est;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= E_IDLE; done <= 1'b0; new_colors <= KW'(N_COLORS); gain_high <= 1'b0;
      best_energy <= '0; pm_q <= '0; plm_q <= '0; cur_q <= KW'(N_COLORS);
      cyc_q <= '0; stall_q <= '0; acc_q <= '0; lmiss_q <= '0; pacc_q <= '0;
      dvd_q <= '0; quo_q <= '0; rem_q <= '0; bit_q <= '0;
      off_q <= '0; off_hi_q <= '0; have_best_q <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        E_IDLE: if (start) begin
          for (int k = 0; k < N_PROF; k++) begin
            pm_q[k] <= pmiss[k]; plm_q[k] <= plmiss[k];
          end
          cur_q <= cur_colors; cyc_q <= cycles; stall_q <= stall;
          acc_q <= access; lmiss_q <= lmiss; pacc_q <= prof_access;
          dvd_q <= {stall, FRAC'(0)}; quo_q <= '0; rem_q <= '0;
          bit_q <= ($clog2(DVW+1))'(DVW);
          st_q  <= E_DIV;
        end
        E_DIV: begin
          if (lmiss_q == '0) begin
            quo_q <= '0;
            st_q  <= E_GAIN;
          end else begin
            // one restoring-division step
            logic [CNT_W+1:0] trial;
            trial = {rem_q, dvd_q[DVW-1]} - {1'b0, 1'b0, lmiss_q};
            if (!trial[CNT_W+1]) begin
              rem_q <= trial[CNT_W:0];
              quo_q <= {quo_q[DVW-2:0], 1'b1};
            end else begin
              rem_q <= {rem_q[CNT_W-1:0], dvd_q[DVW-1]};
              quo_q <= {quo_q[DVW-2:0], 1'b0};
            end
            dvd_q <= dvd_q << 1;
            bit_q <= bit_q - 1'b1;
            if (bit_q == 1) st_q <= E_GAIN;
          end
        end
        E_GAIN: begin
          gain_high   <= high_n;
          off_q       <= high_n ? -8'(N_NARROW) : -8'(N_WIDE);
          off_hi_q    <= high_n ?  8'(N_WIDE)   :  8'(N_NARROW);
          have_best_q <= 1'b0;
          st_q        <= E_EVAL;
        end
        E_EVAL: begin
          if (cand_ok && (!have_best_q || e_est < best_energy)) begin
            have_best_q <= 1'b1;
            best_energy <= e_est;
            new_colors  <= cand_s[KW-1:0];
          end
          off_q <= off_q + 1'b1;
          if (off_q == off_hi_q) begin
            st_q <= E_IDLE;
            done <= 1'b1;
          end
        end
        default: st_q <= E_IDLE;
      endcase
    end
  end
endmodule
