// tb_mapping_table: self-checking test of the region-to-colour mapping table.
// Checks the identity mapping after reset on both read ports, then random writes
// against a reference array, reading every entry through both ports after each write.
module tb_mapping_table;
  localparam int N = 64;
  localparam int CW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic [CW-1:0] lk_region, lk_color, rc_region, rc_color, wr_region, wr_color;
  logic wr_en = 0;
  int checks = 0, failures = 0;
  logic [CW-1:0] ref_t [N];

  mapping_table #(.N_COLORS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int r = 0; r < N; r++) begin
      lk_region = CW'(r); rc_region = CW'(N - 1 - r);
      #1;
      checks += 2;
      if (lk_color != ref_t[r]) begin
        failures++; $display("lookup region %0d: %0d, expected %0d", r, lk_color, ref_t[r]);
      end
      if (rc_color != ref_t[N-1-r]) begin
        failures++; $display("rc region %0d: %0d, expected %0d", N-1-r, rc_color, ref_t[N-1-r]);
      end
    end
  endtask

  initial begin
    lk_region = 0; rc_region = 0; wr_region = 0; wr_color = 0;
    for (int r = 0; r < N; r++) ref_t[r] = CW'(r);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      wr_en = 1; wr_region = CW'($urandom_range(N - 1)); wr_color = CW'($urandom_range(N - 1));
      @(posedge clk); #1;
      ref_t[wr_region] = wr_color;
      wr_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
