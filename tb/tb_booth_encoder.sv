// tb_booth_encoder: exhaustive test of the radix-4 Booth encoder. For all 256
// activations it rebuilds sum_i d_i * 4^i from the encoder outputs and checks
// it equals the activation, and checks the number of non-zero digits against
// a count computed here from the Booth rule on the raw bits.
module tb_booth_encoder;
  logic [7:0] act; logic [3:0] nz, neg, two;
  int checks = 0, failures = 0;
  booth_encoder #(.AW(8)) dut (.*);
  initial begin
    for (int a = -128; a < 128; a++) begin
      int v, n_ref, n_dut;
      act = 8'(a); #1;
      v = 0; n_ref = 0; n_dut = 0;
      for (int i = 0; i < 4; i++) begin
        int d, b2, b1, b0;
        if (nz[i]) v += (neg[i] ? -1 : 1) * (two[i] ? 2 : 1) * (1 << (2*i));
        n_dut += nz[i];
        b2 = act[2*i+1]; b1 = act[2*i]; b0 = (i == 0) ? 0 : act[2*i-1];
        d = -2*b2 + b1 + b0;
        if (d != 0) n_ref++;
      end
      checks += 2;
      if (v != a) begin failures++; $display("FAIL value a=%0d got %0d", a, v); end
      if (n_ref != n_dut) begin failures++; $display("FAIL count a=%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
