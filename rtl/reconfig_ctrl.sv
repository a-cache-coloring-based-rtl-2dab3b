// reconfig_ctrl: applies a new active-colour count to the L2 and the mapping table.
//
// Colours 0 .. cur_colors-1 are powered (color_on), the rest are gated off. The
// controller keeps the invariant that region r maps to colour r when r < cur_colors
// and to some active colour otherwise.
// Shrinking from C_old to C_new (paper: the disabled colours are flushed and the
// regions mapped to them are remapped to active colours):
//   1. every region whose colour is >= C_new is remapped to colour (r mod C_new)
//      (the modulo is done by repeated subtraction, a few cycles per region);
//   2. each colour C_new .. C_old-1 is flushed (FL_COLOR: dirty blocks written back,
//      all invalidated);
//   3. cur_colors becomes C_new, which gates those colours off.
// Growing from C_old to C_new (paper: some regions mapped to other colours are moved
// to the newly active colours and their blocks in the old colours are flushed):
//   1. cur_colors becomes C_new (colours powered up), and each new colour is cleared
//      (FL_CLEAR) because a gated colour loses its contents;
//   2. for each region r = C_old .. C_new-1 its blocks are flushed from its old colour
//      (FL_REGION) and MT[r] is set to r.
// busy is high from start to done and holds off L2 requests. transitions counts the
// cache blocks switched on or off (SPC*WAYS per colour), the Q of the paper's E_Tran.
// Flush commands use the L2's fl_valid / fl_done handshake. Which regions move, the
// modulo rule and the order of steps are this design's choices.
module reconfig_ctrl #(
  parameter int unsigned N_COLORS = cc_pkg::N_COLORS,
  parameter int unsigned SPC      = cc_pkg::SPC,
  parameter int unsigned WAYS     = cc_pkg::WAYS,
  localparam int unsigned CW = $clog2(N_COLORS),
  localparam int unsigned KW = CW + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [KW-1:0]       new_colors,
  output logic                busy,
  output logic                done,
  output logic [KW-1:0]       cur_colors,
  output logic [N_COLORS-1:0] color_on,
  output logic [63:0]         transitions,
  // mapping table port
  output logic [CW-1:0]       mt_rd_region,
  input  logic [CW-1:0]       mt_rd_color,
  output logic                mt_wr_en,
  output logic [CW-1:0]       mt_wr_region,
  output logic [CW-1:0]       mt_wr_color,
  // L2 flush port
  output logic                fl_valid,
  output cc_pkg::flush_mode_e fl_mode,
  output logic [CW-1:0]       fl_color,
  output logic [CW-1:0]       fl_region,
  input  logic                fl_done
);
  typedef enum logic [2:0] {
    R_IDLE, R_DN_MAP, R_DN_MOD, R_DN_FLUSH, R_UP_CLEAR, R_UP_MOVE, R_DONE
  } rst_e;
  rst_e st_q;

  logic [KW-1:0] old_q, new_q, idx_q;   // idx: region or colour being handled
  logic [KW-1:0] mod_q;                 // running remainder
  logic          fl_busy_q;

  assign busy = (st_q != R_IDLE);
  for (genvar c = 0; c < N_COLORS; c++) begin : g_on
    assign color_on[c] = (KW'(c) < cur_colors);
  end

  assign mt_rd_region = idx_q[CW-1:0];
  assign fl_valid     = fl_busy_q;

  always_comb begin
    mt_wr_en = 1'b0; mt_wr_region = idx_q[CW-1:0]; mt_wr_color = mod_q[CW-1:0];
    fl_mode  = cc_pkg::FL_COLOR; fl_color = idx_q[CW-1:0]; fl_region = idx_q[CW-1:0];
    unique case (st_q)
      R_DN_MOD:   mt_wr_en = (mod_q < new_q);
      R_UP_CLEAR: fl_mode = cc_pkg::FL_CLEAR;
      R_UP_MOVE: begin
        fl_mode  = cc_pkg::FL_REGION;
        fl_color = mt_rd_color;
        mt_wr_en = fl_done;
        mt_wr_color = idx_q[CW-1:0];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= R_IDLE; done <= 1'b0; cur_colors <= KW'(N_COLORS); transitions <= '0;
      old_q <= '0; new_q <= '0; idx_q <= '0; mod_q <= '0; fl_busy_q <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        R_IDLE: if (start) begin
          old_q <= cur_colors; new_q <= new_colors; idx_q <= '0;
          if (new_colors < cur_colors) begin
            st_q <= R_DN_MAP;
          end else if (new_colors > cur_colors) begin
            cur_colors  <= new_colors;
            transitions <= transitions + 64'(new_colors - cur_colors) * SPC * WAYS;
            idx_q       <= cur_colors;
            fl_busy_q   <= 1'b1;
            st_q        <= R_UP_CLEAR;
          end else begin
            done <= 1'b1;
          end
        end
        R_DN_MAP: begin
          // region idx_q: remap if its colour is being switched off
          if (KW'(mt_rd_color) >= new_q) begin
            mod_q <= idx_q;
            st_q  <= R_DN_MOD;
          end else if (idx_q == KW'(N_COLORS - 1)) begin
            idx_q <= new_q; fl_busy_q <= 1'b1;
            st_q  <= R_DN_FLUSH;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        R_DN_MOD: begin
          if (mod_q >= new_q) mod_q <= mod_q - new_q;
          else if (idx_q == KW'(N_COLORS - 1)) begin
            idx_q <= new_q; fl_busy_q <= 1'b1;
            st_q  <= R_DN_FLUSH;
          end else begin
            idx_q <= idx_q + 1'b1;
            st_q  <= R_DN_MAP;
          end
        end
        R_DN_FLUSH: if (fl_done) begin
          if (idx_q == old_q - 1'b1) begin
            fl_busy_q   <= 1'b0;
            cur_colors  <= new_q;
            transitions <= transitions + 64'(old_q - new_q) * SPC * WAYS;
            st_q        <= R_DONE;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        R_UP_CLEAR: if (fl_done) begin
          if (idx_q == new_q - 1'b1) begin
            idx_q <= old_q;
            st_q  <= R_UP_MOVE;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        R_UP_MOVE: if (fl_done) begin
          if (idx_q == new_q - 1'b1) begin
            fl_busy_q <= 1'b0;
            st_q      <= R_DONE;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        R_DONE: begin
          done <= 1'b1;
          st_q <= R_IDLE;
        end
        default: st_q <= R_IDLE;
      endcase
    end
  end

  // a flush command is held until the L2 reports it done
  a_fl_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (fl_valid && !fl_done) |=> fl_valid);
endmodule
