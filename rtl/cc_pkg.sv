// cc_pkg: constants and types shared by the colour-reconfigurable L2 design.
//
// The L2 is split into cache colours: one colour is the group of sets that the
// blocks of one 4 KB page can fall into. With a 2 MB, 8-way, 64 B-line L2 there are
// 4096 sets, 64 sets per colour and 64 colours. Physical pages are grouped into as
// many regions as there are colours (region = page number modulo the colour count),
// and a mapping table sends each region to a colour. The profiling cache samples one
// set in R=64 and models six cache sizes ("profiling points") of N/16, 2N/16, 4N/16,
// 8N/16, 12N/16 and 16N/16 colours. These numbers follow the paper; the 40-bit tag
// (a full physical page number) is the paper's overhead example, taken here as the
// physical page number width. The energy coefficients are the paper's CACTI numbers
// converted to picojoules per event or per 1.5 GHz clock cycle.
package cc_pkg;

  // ---------------- cache geometry (paper: 2 MB, 8-way, 64 B lines, 4 KB pages)
  localparam int unsigned L2_BYTES    = 2 * 1024 * 1024;
  localparam int unsigned WAYS        = 8;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned PAGE_BYTES  = 4096;
  localparam int unsigned SETS        = L2_BYTES / (WAYS * LINE_BYTES);   // 4096
  localparam int unsigned SPC         = PAGE_BYTES / LINE_BYTES;          // sets per colour, 64
  localparam int unsigned N_COLORS    = SETS / SPC;                       // 64
  localparam int unsigned PPN_W       = 40;                               // tag = page number
  localparam int unsigned PA_W        = PPN_W + $clog2(PAGE_BYTES);       // 52
  localparam int unsigned LINE_W      = LINE_BYTES * 8;                   // 512

  // ---------------- profiling cache (paper: R = 64, six profiling points)
  localparam int unsigned SAMPLE_R    = 64;
  localparam int unsigned N_PROF      = 6;

  // Profiling point k in sixteenths of the colour count: 1,2,4,8,12,16.
  function automatic int unsigned prof_sixteenths(int unsigned k);
    case (k)
      0: return 1;
      1: return 2;
      2: return 4;
      3: return 8;
      4: return 12;
      default: return 16;
    endcase
  endfunction

  // ---------------- energy saving algorithm (paper: D = 11, lambda = 200, step 2)
  localparam int unsigned LAMBDA      = 200;
  localparam int unsigned COLOR_STEP  = 2;

  // ---------------- energy model, integer picojoules
  // L2 dynamic energy 1.086 nJ/access; L2 leakage 2.016 W * 1.05 (gated-Vdd area) at
  // 1.5 GHz = 1411 pJ/cycle for the whole cache; memory 70 nJ/access and 0.18 W =
  // 120 pJ/cycle; 0.002 nJ per block on/off transition; profiling cache as noted below.
  localparam longint unsigned E_DYN_L2_PJ    = 1086;
  localparam longint unsigned P_LEAK_L2_PJC  = 1411;
  localparam longint unsigned E_DYN_MEM_PJ   = 70000;
  localparam longint unsigned P_LEAK_MEM_PJC = 120;
  localparam longint unsigned E_TRAN_PJ      = 2;
  // profiling cache: 0.005 nJ/access, 0.007 W = 4.67 pJ/cycle, rounded to 5
  localparam longint unsigned E_DYN_PROF_PJ  = 5;
  localparam longint unsigned P_LEAK_PROF_PJC = 5;

  // Flush engine commands of the L2.
  typedef enum logic [1:0] {
    FL_COLOR  = 2'd0,   // write back dirty blocks of a colour and invalidate all of it
    FL_REGION = 2'd1,   // same, only for blocks of one region that sit in the colour
    FL_CLEAR  = 2'd2    // invalidate a freshly powered colour, no write-backs
  } flush_mode_e;

endpackage
