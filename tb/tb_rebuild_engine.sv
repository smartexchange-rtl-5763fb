// tb_rebuild_engine: self-checking test of the rebuild engine.
// Loads random basis matrices and coefficient rows (including zero codes and
// large values that saturate) and compares every rebuilt weight with a
// reference computed here: W[x] = sat8(sum_i sign_i * (B[i][x] >>> k_i)),
// k_i = 7 meaning zero. Also checks the original-weight path (MUX2 bypass)
// and that loading a coefficient row leaves the basis untouched.
module tb_rebuild_engine;
  import se_pkg::*;
  localparam int S = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_valid; ld_type_e ld_type; logic [1:0] ld_row; logic [S*8-1:0] ld_data;
  logic [1:0] col; logic signed [7:0] weight; logic raw_mode;
  int checks = 0, failures = 0;

  rebuild_engine #(.S(S)) dut (.*);

  logic signed [7:0] B [S][S];
  logic [3:0] ce [S];
  logic signed [7:0] rw [S];

  function automatic int ref_w(int x);
    int s = 0;
    for (int i = 0; i < S; i++)
      if (ce[i][2:0] != 3'd7) s += (ce[i][3] ? -1 : 1) * (int'(B[i][x]) >>> ce[i][2:0]);
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return s;
  endfunction

  task automatic load(ld_type_e t, int row, logic [S*8-1:0] d);
    @(negedge clk); ld_valid = 1; ld_type = t; ld_row = 2'(row); ld_data = d;
    @(negedge clk); ld_valid = 0;
  endtask

  initial begin
    ld_valid = 0; ld_type = LD_COEF; ld_row = 0; ld_data = '0; col = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < S; i++) begin
        for (int x = 0; x < S; x++) B[i][x] = 8'($urandom);
        load(LD_BASIS, i, {B[i][2], B[i][1], B[i][0]});
      end
      for (int r = 0; r < 4; r++) begin
        for (int i = 0; i < S; i++) begin
          ce[i] = 4'($urandom);
          if ($urandom % 4 == 0) ce[i][2:0] = 3'd7;
        end
        load(LD_COEF, 0, {12'h0, ce[2], ce[1], ce[0]});
        for (int x = 0; x < S; x++) begin
          col = 2'(x); #1;
          checks++;
          if (int'(weight) != ref_w(x) || raw_mode) begin
            failures++;
            $display("FAIL rebuild t=%0d x=%0d got %0d exp %0d", t, x, weight, ref_w(x));
          end
        end
      end
      // original weights through path 3
      for (int x = 0; x < S; x++) rw[x] = 8'($urandom);
      load(LD_RAW, 0, {rw[2], rw[1], rw[0]});
      for (int x = 0; x < S; x++) begin
        col = 2'(x); #1; checks++;
        if (weight != rw[x] || !raw_mode) begin failures++; $display("FAIL raw x=%0d", x); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
