// sram_sp: single-port synchronous RAM used for the L2 tag/state and data arrays and
// for the profiling-cache tag arrays.
//
// One access per cycle: with en=1 and we=1 the word at addr is written; with en=1 and
// we=0 it is read and appears on rdata at the next clock edge (one-cycle latency).
// rdata holds its value while en=0. The array has no reset; the caches that use it
// clear their state words by sweeping them. This is a generic memory of this
// design, not something the paper specifies.
module sram_sp #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
