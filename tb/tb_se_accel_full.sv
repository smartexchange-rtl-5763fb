// tb_se_accel_full: the accelerator at its full default size (64 slices of
// 16 lines of 8 MACs, 32 input banks, default buffer depths; no parameter is
// overridden). One basis load and one 2D CONV pass (16 input channels, 3
// kernel rows, 2 output rows) over random data; all 128 output words are
// compared with the reference model of se_accel_env.svh, and weight-row and
// input-row skipping must both occur.
module tb_se_accel_full;
  import se_pkg::*;
  localparam int unsigned NM = DIM_M, NC = DIM_C, F = DIM_F, S = KS;
  localparam int unsigned INB = IN_BANKS, IND = IN_DEPTH, WBD = WB_DEPTH, OD = OUT_DEPTH, XD = WIDX_DEPTH;

  `include "se_accel_env.svh"

  se_accel dut (.*);

  instr_t prog [$];

  initial begin
    instr_t p;
    logic [NC*SW-1:0] word;
    logic [NC*S-1:0]  wx;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // channel ch (< 16) in bank ch, rows 0..3
    for (int ch = 0; ch < int'(NC); ch++)
      for (int y = 0; y < 4; y++) begin
        logic signed [7:0] row [L];
        rand_act_row(row, 20);
        write_act(ch, y, row);
      end
    for (int m = 0; m < int'(NM); m++) begin
      for (int i = 0; i < int'(S); i++) begin
        word = '0;
        for (int x = 0; x < int'(S); x++) word[x*8 +: 8] = 8'($urandom);
        write_wb(m, i, word);
      end
      for (int j = 0; j < int'(S); j++) begin
        for (int c = 0; c < int'(NC); c++) word[c*SW +: SW] = rand_coef_slot();
        write_wb(m, 3 + j, word);
      end
    end
    for (int b = 0; b < int'(NC*S); b++) wx[b] = ($urandom % 100) < 70;
    write_wx(0, wx);

    p = '0; p.op = OP_BASIS; p.re_tgt = 1'b0; p.wb_base = 7'd0; prog.push_back(p);
    p = '0; p.op = OP_CONV; p.mode = MODE_CONV; p.rows = 2'd3; p.n_e = 8'd2; p.n_g = 6'd1;
    p.in_base = 11'd0; p.h_stride = 11'd4; p.widx_base = 9'd0; p.wb_base = 7'd3; p.out_base = 9'd0;
    p.shift = 4'd7; p.relu = 1'b1; prog.push_back(p);
    p = '0; p.op = OP_END; prog.push_back(p);

    ref_program(prog);
    load_program(prog);
    run_program();
    compare_outputs();
    $display("steps=%0d skip_w=%0d skip_in=%0d cycles=%0d", cnt_steps, cnt_skip_w, cnt_skip_in, cnt_cycles);
    check(cnt_steps == 2, "step count");
    check(cnt_skip_w > 0, "no weight-row skip");
    check(cnt_skip_in > 0, "no input-row skip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
