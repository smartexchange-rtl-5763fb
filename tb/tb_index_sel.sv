// tb_index_sel: random job-valid, weight-index and input-zero patterns for
// 16 lines x 3 jobs; the selection and the two skip counts must match the
// rule computed here (select = valid and index and not zero).
module tb_index_sel;
  logic [15:0][2:0] job_valid, w_idx, in_zero, sel;
  logic [5:0] n_skip_w, n_skip_in;
  int checks = 0, failures = 0;
  index_sel #(.N(16), .S(3)) dut (.*);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      int sw, si;
      job_valid = 48'({$urandom, $urandom}); w_idx = 48'({$urandom, $urandom}); in_zero = 48'({$urandom, $urandom});
      if (t % 7 == 0) job_valid = '1;
      #1;
      sw = 0; si = 0;
      for (int c = 0; c < 16; c++) for (int j = 0; j < 3; j++) begin
        logic e;
        e = job_valid[c][j] && w_idx[c][j] && !in_zero[c][j];
        checks++;
        if (sel[c][j] != e) begin failures++; $display("FAIL sel t=%0d c=%0d j=%0d", t, c, j); end
        if (job_valid[c][j] && !w_idx[c][j]) sw++;
        else if (job_valid[c][j] && in_zero[c][j]) si++;
      end
      checks += 2;
      if (int'(n_skip_w) != sw) begin failures++; $display("FAIL skip_w t=%0d", t); end
      if (int'(n_skip_in) != si) begin failures++; $display("FAIL skip_in t=%0d", t); end
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
