// tb_adder_tree: random signed inputs (including extremes) for a 16-input
// and a 5-input tree; the sum must equal the sum computed here.
module tb_adder_tree;
  logic signed [15:0][23:0] in16; logic signed [31:0] sum16;
  logic signed [4:0][23:0]  in5;  logic signed [31:0] sum5;
  int checks = 0, failures = 0;
  adder_tree #(.N(16), .W_IN(24), .W_OUT(32)) dut16 (.in(in16), .sum(sum16));
  adder_tree #(.N(5),  .W_IN(24), .W_OUT(32)) dut5  (.in(in5),  .sum(sum5));
  initial begin
    for (int t = 0; t < 500; t++) begin
      longint r16, r5;
      r16 = 0; r5 = 0;
      for (int i = 0; i < 16; i++) begin
        in16[i] = (t < 10) ? ((t % 2) ? 24'h800000 : 24'h7fffff) : 24'($urandom);
        r16 += longint'(signed'(in16[i]));
      end
      for (int i = 0; i < 5; i++) begin in5[i] = 24'($urandom); r5 += longint'(signed'(in5[i])); end
      #1;
      checks += 2;
      if (longint'(sum16) != r16) begin failures++; $display("FAIL 16 t=%0d", t); end
      if (longint'(sum5)  != r5)  begin failures++; $display("FAIL 5 t=%0d", t); end
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
