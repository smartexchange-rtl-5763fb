// tb_out_fifo: random pushes and pops (only when allowed) on a depth-4 FIFO,
// compared with a queue model here: head data, full and empty flags.
module tb_out_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty; logic [15:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [15:0] q[$];
  out_fifo #(.W(16), .DEPTH(4)) dut (.*);
  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks += 3;
      if (full != (q.size() == 4)) begin failures++; $display("FAIL full t=%0d", t); end
      if (empty != (q.size() == 0)) begin failures++; $display("FAIL empty t=%0d", t); end
      if (q.size() > 0 && rdata != q[0]) begin failures++; $display("FAIL data t=%0d", t); end
      push = !full && ($urandom % 2 == 0);
      pop  = !empty && ($urandom % 3 == 0 || t > 1900);
      wdata = 16'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
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
