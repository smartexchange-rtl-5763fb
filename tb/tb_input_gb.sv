// tb_input_gb: input global buffer at its default size (32 banks x 1638
// rows of 80 bits) with 16 read ports. Writes random and all-zero rows,
// then checks: the zero flags ("==0" detector) of written rows and of
// never-written rows (zero after reset); that each bank grants exactly the
// lowest requesting port and nothing else; and that every granted port gets
// its row one cycle later with rd_valid.
module tb_input_gb;
  import se_pkg::*;
  localparam int NB = 32, D = 1638, W = 80, NP = 16, FP = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [4:0] wr_bank; logic [10:0] wr_addr; logic [W-1:0] wr_data;
  logic [FP-1:0][4:0] fl_bank; logic [FP-1:0][10:0] fl_addr; logic [FP-1:0] fl_zero;
  logic [NP-1:0] rd_req, rd_gnt, rd_valid; logic [NP-1:0][4:0] rd_bank; logic [NP-1:0][10:0] rd_addr;
  logic [NP-1:0][W-1:0] rd_data;
  int checks = 0, failures = 0;
  input_gb dut (.*);

  logic [W-1:0] model [NB][64];
  initial begin
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0; fl_bank = 0; fl_addr = 0; rd_req = 0; rd_bank = 0; rd_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill rows 0..63 of every bank; every 4th row all zero
    for (int b = 0; b < NB; b++) for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      wr_en = 1; wr_bank = 5'(b); wr_addr = 11'(a);
      wr_data = (a % 4 == 0) ? '0 : {16'($urandom), $urandom, $urandom};
      model[b][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // zero flags
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < FP; i++) begin
        fl_bank[i] = 5'($urandom); fl_addr[i] = (i % 8 == 7) ? 11'(100 + $urandom % 1000) : 11'($urandom % 64);
      end
      #1;
      for (int i = 0; i < FP; i++) begin
        logic e;
        e = (fl_addr[i] >= 64) ? 1'b1 : (model[fl_bank[i]][fl_addr[i]] == '0);
        checks++;
        if (fl_zero[i] != e) begin failures++; $display("FAIL flag t=%0d i=%0d", t, i); end
      end
    end
    // reads with bank conflicts
    for (int t = 0; t < 300; t++) begin
      logic [NP-1:0] exp_g; logic [NB-1:0] used;
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        rd_req[p] = ($urandom % 4 != 0);
        rd_bank[p] = (t % 2) ? 5'($urandom % 4) : 5'(p);
        rd_addr[p] = 11'($urandom % 64);
      end
      #1;
      used = '0; exp_g = '0;
      for (int p = 0; p < NP; p++) if (rd_req[p] && !used[rd_bank[p]]) begin exp_g[p] = 1; used[rd_bank[p]] = 1; end
      checks++;
      if (rd_gnt != exp_g) begin failures++; $display("FAIL gnt t=%0d %h %h", t, rd_gnt, exp_g); end
      @(posedge clk); #1;
      checks++;
      if (rd_valid != exp_g) begin failures++; $display("FAIL valid t=%0d", t); end
      for (int p = 0; p < NP; p++) if (exp_g[p]) begin
        checks++;
        if (rd_data[p] != model[rd_bank[p]][rd_addr[p]]) begin failures++; $display("FAIL data t=%0d p=%0d", t, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
