// tb_se_accel: end-to-end test of the accelerator at a reduced size
// (16 slices of 4 lines of 8 MACs, 4 input banks) so that a whole program of
// six passes simulates quickly. Random layers are written through the fill
// ports, a program runs, and every output word is compared with the
// reference model of se_accel_env.svh. The program covers:
//   pass 1  2D CONV, 3 kernel rows, 2 channel groups, ReLU, with the next
//           basis prefetched into the idle RE (ping-pong swap at the end)
//   pass 2  original (not decomposed) weights through the raw path
//   pass 3  2D CONV with 2 kernel rows on the prefetched basis
//   pass 4  cluster mode (both REs, different coefficient rows)
//   pass 5  depth-wise mode (kernel rows on the lines, one shared bank)
//   pass 6  a run over all-zero input rows with short steps, which fills the
//           slice output FIFOs and makes the controller stall
// Rows whose weight-index bit is 0 carry non-zero junk coefficients, so a row
// that is not skipped corrupts the result. Each mechanism is also counted from
// the DUT's counters or internal signals, and a mechanism that never happens
// is a failure.
module tb_se_accel;
  import se_pkg::*;
  localparam int unsigned NM = 16, NC = 4, F = 8, S = 3;
  localparam int unsigned INB = 4, IND = 64, WBD = 32, OD = 512, XD = 16;

  `include "se_accel_env.svh"

  se_accel #(.NM(NM), .NC(NC), .F(F), .S(S), .INB(INB), .IND(IND), .WBD(WBD), .OD(OD), .XD(XD)) dut (.*);

  // ------------------------------------------------------------ observed mechanisms
  int n_multi_cycle = 0, n_single_cycle = 0, n_prefetch_row = 0, n_bank_conflict = 0;
  int n_acc_add = 0, n_swap = 0;
  logic re_act_q = 1'b0, start_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    // bit-serial MACs: a step either ends in its first cycle or continues
    if (start_q) begin
      if (dut.g_slice[0].u_slice.g_line[0].u_line.g_mac[0].u_mac.busy) n_multi_cycle++;
      else n_single_cycle++;
    end
    start_q <= dut.g_slice[0].u_slice.g_line[0].u_line.mac_start;
    // bank MUX: a request waits because another line holds the bank
    for (int c = 0; c < NC; c++)
      if (dut.rd_req[c] && !dut.rd_gnt[c]) n_bank_conflict++;
    if (dut.u_ctrl.acc_add) n_acc_add++;
    // RE ping-pong: the active RE changes at the end of a compute pass
    if (dut.re_act != re_act_q && dut.u_ctrl.ins.op == OP_CONV) n_swap++;
    re_act_q <= dut.re_act;
  end

  // double-buffered input FIFO: a row arrives while the line computes
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk)
      if (rst_n && dut.g_slice[0].u_slice.g_line[c].u_line.rd_valid &&
          dut.g_slice[0].u_slice.g_line[c].u_line.computing) n_prefetch_row++;
  end

  instr_t prog [$];

  function automatic instr_t conv(input mode_e md, input bit raw, input int rows, input int n_e,
                                  input int n_g, input int in_base, input int h_stride,
                                  input int widx_base, input int wb_base, input int out_base);
    instr_t i;
    i = '0;
    i.op = OP_CONV; i.mode = md; i.raw = raw; i.rows = 2'(rows); i.n_e = 8'(n_e); i.n_g = 6'(n_g);
    i.in_base = 11'(in_base); i.h_stride = 11'(h_stride); i.widx_base = 9'(widx_base);
    i.wb_base = 7'(wb_base); i.out_base = 9'(out_base);
    return i;
  endfunction

  function automatic instr_t basis(input bit tgt, input int base);
    instr_t i;
    i = '0; i.op = OP_BASIS; i.re_tgt = tgt; i.wb_base = 7'(base);
    return i;
  endfunction

  // weight buffer words of a pass: coefficient (or raw) slots, junk where the
  // index says the row is empty
  task automatic fill_coef(input int wb_base, input int nwords, input int widx_base,
                           input int per_g, input bit dw, input bit raw);
    for (int m = 0; m < NM; m++)
      for (int w = 0; w < nwords; w++) begin
        logic [NC*SW-1:0] word;
        for (int c = 0; c < NC; c++)
          word[c*SW +: SW] = raw ? rand_raw_slot() : rand_coef_slot();
        write_wb(m, wb_base + w, word);
      end
    for (int g = 0; g < nwords / per_g; g++) begin
      logic [NC*S-1:0] wx;
      for (int b = 0; b < NC*S; b++) wx[b] = ($urandom % 100) < 70;
      if (dw) begin wx = '1; wx[S*(NC-1)] = 1'b0; end   // kernel rows 0..2 only
      write_wx(widx_base + g, wx);
    end
  endtask

  task automatic fill_basis(input int base);
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < S; i++) begin
        logic [NC*SW-1:0] word;
        word = '0;
        for (int x = 0; x < S; x++) word[x*8 +: 8] = 8'($urandom);
        write_wb(m, base + i, word);
      end
  endtask

  initial begin
    instr_t p;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 8 input channels of 8 rows (bank ch%4, row (ch/4)*8 + y); rows 40.. stay zero
    for (int ch = 0; ch < 8; ch++)
      for (int y = 0; y < 8; y++) begin
        logic signed [7:0] row [L];
        rand_act_row(row, (ch == 5) ? 0 : 20);   // channel 5 (depth-wise) has no zero rows
        write_act(ch % INB, (ch / INB) * 8 + y, row);
      end
    fill_basis(0);                               // basis 0       words 0..2
    fill_coef(3, 6, 0, 3, 0, 0);                 // pass 1        words 3..8, index 0..1
    fill_basis(9);                               // basis 1       words 9..11
    fill_coef(12, 3, 2, 3, 0, 1);                // pass 2 (raw)  words 12..14, index 2
    fill_coef(15, 4, 3, 2, 0, 0);                // pass 3        words 15..18, index 3..4
    fill_basis(19);                              // basis 2       words 19..21
    fill_coef(22, 6, 5, 3, 0, 0);                // pass 4        words 22..27, index 5..6
    fill_coef(28, 1, 7, 1, 1, 0);                // pass 5 (DW)   word 28, index 7
    fill_coef(29, 1, 8, 1, 0, 0);                // pass 6        word 29, index 8

    prog.push_back(basis(0, 0));
    p = conv(MODE_CONV, 0, 3, 4, 2, 0, 8, 0, 3, 0);
    p.relu = 1'b1; p.shift = 4'd7; p.nb_valid = 1'b1; p.nb_addr = 7'd9;
    prog.push_back(p);
    p = conv(MODE_CONV, 1, 3, 2, 1, 0, 8, 2, 12, 64);   p.shift = 4'd6;  prog.push_back(p);
    p = conv(MODE_CONV, 0, 2, 3, 2, 1, 8, 3, 15, 96);   p.shift = 4'd7;  prog.push_back(p);
    prog.push_back(basis(0, 19));
    prog.push_back(basis(1, 19));
    p = conv(MODE_CLUSTER, 0, 3, 2, 2, 0, 8, 5, 22, 144); p.shift = 4'd7; p.relu = 1'b1; prog.push_back(p);
    p = conv(MODE_DW, 0, 3, 3, 1, 0, 8, 7, 28, 176);    p.shift = 4'd5;  p.dw_ch = 10'd5; prog.push_back(p);
    p = conv(MODE_CONV, 0, 1, 8, 1, 40, 16, 8, 29, 224); prog.push_back(p);
    p = '0; p.op = OP_END; prog.push_back(p);

    ref_program(prog);
    load_program(prog);
    run_program();
    compare_outputs();

    // mechanism counts
    $display("steps=%0d skip_w=%0d skip_in=%0d overlap=%0d bstall=%0d fifo_stall=%0d dw=%0d cluster=%0d raw=%0d",
             cnt_steps, cnt_skip_w, cnt_skip_in, cnt_basis_overlap, cnt_basis_stall, cnt_fifo_stall,
             cnt_dw_steps, cnt_cluster_steps, cnt_raw_steps);
    $display("multi=%0d single=%0d rowprefetch=%0d conflict=%0d acc_add=%0d swap=%0d cycles=%0d",
             n_multi_cycle, n_single_cycle, n_prefetch_row, n_bank_conflict, n_acc_add, n_swap, cnt_cycles);
    check(cnt_steps == 32'(8 + 2 + 6 + 4 + 3 + 8), "step count");
    check(cnt_skip_w > 0,        "no weight-row skip");
    check(cnt_skip_in > 0,       "no input-row skip");
    check(cnt_basis_overlap > 0, "no basis load overlapped with compute");
    check(n_swap == 1,           "RE ping-pong swap");
    check(cnt_raw_steps == 2,    "raw-weight steps");
    check(cnt_cluster_steps == 4, "cluster steps");
    check(cnt_dw_steps == 3,     "depth-wise steps");
    check(cnt_fifo_stall > 0,    "no output FIFO stall");
    check(n_acc_add > 0,         "no accumulation over channel groups");
    check(n_multi_cycle > 0,     "no multi-cycle bit-serial step");
    check(n_single_cycle > 0,    "no single-cycle bit-serial step");
    check(n_prefetch_row > 0,    "no input row fetched during compute");
    check(n_bank_conflict > 0,   "no input bank conflict");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
