// mapping_table: the region-to-colour mapping table (MT) of the colour-reconfigurable L2.
//
// Physical pages are grouped into N_COLORS regions (region = low bits of the physical
// page number) and every region is mapped to one cache colour. The table is read
// combinationally on every L2 access (lk_region -> lk_color) and is rewritten by the
// reconfiguration controller through a second, independent read port (rc_region ->
// rc_color) and a write port that takes effect at the clock edge. After reset the
// mapping is the identity, region r -> colour r, matching a fully active cache.
// The paper gives the table's purpose; the identity reset, the region = page-number
// modulo N rule and the port arrangement are this design's choices.
module mapping_table #(
  parameter int unsigned N_COLORS = cc_pkg::N_COLORS,
  localparam int unsigned CW = $clog2(N_COLORS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] lk_region,
  output logic [CW-1:0] lk_color,
  input  logic [CW-1:0] rc_region,
  output logic [CW-1:0] rc_color,
  input  logic          wr_en,
  input  logic [CW-1:0] wr_region,
  input  logic [CW-1:0] wr_color
);
  logic [CW-1:0] table_q [N_COLORS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_COLORS; r++) table_q[r] <= CW'(r);
    end else if (wr_en) begin
      table_q[wr_region] <= wr_color;
    end
  end

  assign lk_color = table_q[lk_region];
  assign rc_color = table_q[rc_region];
endmodule
