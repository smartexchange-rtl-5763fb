// tb_mac: self-checking test of the bit-serial MAC. Random signed weight and
// activation pairs are accumulated; after each multiply the psum must equal
// the running sum of products, and the multiply must take exactly
// max(1, number of non-zero radix-4 Booth digits of the activation) cycles
// (computed here from the Booth rule). `clr` restarts the sum.
module tb_mac;
  import se_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, start, busy; logic signed [7:0] weight, act; logic signed [23:0] psum;
  int checks = 0, failures = 0;
  mac dut (.*);

  function automatic int nnz(logic [7:0] a);
    int n = 0;
    for (int i = 0; i < 4; i++) begin
      int d = -2*a[2*i+1] + a[2*i] + ((i == 0) ? 0 : a[2*i-1]);
      if (d != 0) n++;
    end
    return n;
  endfunction

  initial begin
    int sum, cyc, exp_cyc;
    clr = 0; start = 0; weight = 0; act = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    sum = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      weight = 8'($urandom); act = 8'($urandom);
      if (t % 50 == 0) act = 0;
      if (t % 37 == 0) begin clr = 1; sum = 0; end
      start = 1;
      sum += int'(weight) * int'(act);
      exp_cyc = nnz(act) < 1 ? 1 : nnz(act);
      cyc = 1;
      @(negedge clk); start = 0; clr = 0;
      while (busy) begin cyc++; @(negedge clk); end
      checks += 2;
      if (int'(psum) != sum) begin failures++; $display("FAIL psum t=%0d got %0d exp %0d", t, psum, sum); end
      if (cyc != exp_cyc) begin failures++; $display("FAIL cycles t=%0d a=%0d got %0d exp %0d", t, act, cyc, exp_cyc); end
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
