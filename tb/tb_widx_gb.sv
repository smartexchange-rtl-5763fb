// tb_widx_gb: writes random words to random addresses of the widx_gb (default size,
// 512 words of 48 bits), keeps a model here, and checks random reads (one
// cycle of latency), including reads of a word written in the same cycle
// returning its old value.
module tb_widx_gb;
  localparam int D = 512, W = 48;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en; logic [$clog2(D)-1:0] wr_addr, rd_addr; logic [W-1:0] wr_data, rd_data;
  logic [W-1:0] model [D];
  logic [D-1:0] known;
  int checks = 0, failures = 0;
  widx_gb dut (.*);
  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    logic [W-1:0] expv; logic chk;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0; known = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      wr_en = ($urandom % 2 == 0); wr_addr = ($clog2(D))'($urandom % D); wr_data = rnd();
      rd_en = 1; rd_addr = (t % 5 == 0) ? wr_addr : ($clog2(D))'($urandom % D);
      chk = known[rd_addr]; expv = model[rd_addr];
      @(posedge clk); #1;
      if (wr_en) begin model[wr_addr] = wr_data; known[wr_addr] = 1'b1; end
      if (chk) begin
        checks++;
        if (rd_data !== expv) begin failures++; $display("FAIL t=%0d addr=%0d", t, rd_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
