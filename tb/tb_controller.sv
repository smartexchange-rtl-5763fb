// tb_controller: the controller at its default size (16 lines, 64 slices)
// against behavioural slices and buffers. The program loads a basis, runs a
// 2D CONV pass (2 output rows x 2 channel groups, 3 kernel rows) that
// prefetches the next basis, then a depth-wise pass, then ends. Checked
// against expectations computed here:
//   * the weight-buffer read sequence (basis rows, coefficient words per
//     step, prefetched basis rows into the inactive RE during compute),
//   * every job list: addresses from the layer geometry and the mask
//     = index bit AND NOT input-zero flag AND job valid,
//   * accumulate-load/add and emission order and emission addresses,
//   * the RE swap after the prefetching pass, stall on a full FIFO, idle
//     at the end.
module tb_controller;
  import se_pkg::*;
  localparam int NC = 16, NM = 64, S = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic im_wr_en; logic [5:0] im_wr_addr; instr_t im_wr_data; logic go, idle;
  mode_e mode; logic raw, re_act, relu; logic [3:0] shift;
  logic wb_rd_en, wb_rd_basis, wb_rd_re; logic [6:0] wb_rd_addr; logic [1:0] wb_rd_idx;
  logic wx_rd_en; logic [8:0] wx_rd_addr; logic [NC*S-1:0] wx_rd_data;
  logic [NC*S-1:0][4:0] fl_bank; logic [NC*S-1:0][10:0] fl_addr; logic [NC*S-1:0] fl_zero;
  logic start; logic [NC-1:0][S-1:0] job_mask; logic [NC-1:0][S-1:0][4:0] job_bank; logic [NC-1:0][S-1:0][10:0] job_addr;
  logic slices_done, acc_load, acc_add, emit, any_fifo_full, all_fifo_empty; logic [8:0] emit_base;
  logic [31:0] cnt_cycles, cnt_steps, cnt_skip_w, cnt_skip_in, cnt_basis_overlap, cnt_basis_stall,
               cnt_fifo_stall, cnt_dw_steps, cnt_cluster_steps, cnt_raw_steps;
  int checks = 0, failures = 0;

  controller dut (.*);

  // behavioural environment
  logic [NC*S-1:0] widx_mem [512];
  always_ff @(posedge clk) if (wx_rd_en) wx_rd_data <= widx_mem[wx_rd_addr];
  function automatic logic zero_row(logic [4:0] b, logic [10:0] a);
    return ((int'(a) + int'(b)) % 5) == 0;
  endfunction
  always_comb for (int i = 0; i < NC*S; i++) fl_zero[i] = zero_row(fl_bank[i], fl_addr[i]);
  int busy_left;
  always_ff @(posedge clk) begin
    if (start) busy_left <= 2 + ($urandom % 6);
    else if (busy_left > 0) busy_left <= busy_left - 1;
  end
  assign slices_done = (busy_left == 0) && !start;
  // the FIFO reports full for the first two cycles of every emission
  logic full_r; int emit_wait = 0;
  always @(negedge clk) begin
    emit_wait = (dut.st == dut.S_EMIT) ? emit_wait + 1 : 0;
    full_r <= (emit_wait >= 1 && emit_wait <= 2);
  end
  assign any_fifo_full = full_r;
  assign all_fifo_empty = 1'b1;

  // event logs
  typedef struct { logic basis; int addr; int idx; logic re; } rd_t;
  rd_t rds[$];
  int accs[$];          // 0 load, 1 add, 2 emit (with base in emits)
  int emits[$];
  int n_start = 0;
  int n_stall = 0;

  // expected step geometry
  int e_exp, g_exp;
  instr_t prog [4];
  int pass;

  always @(posedge clk) if (rst_n) begin
    if (wb_rd_en) rds.push_back('{wb_rd_basis, int'(wb_rd_addr), int'(wb_rd_idx), wb_rd_re});
    if (acc_load) accs.push_back(0);
    if (acc_add)  accs.push_back(1);
    if (emit) begin accs.push_back(2); emits.push_back(int'(emit_base)); end
    if (dut.st == dut.S_EMIT && any_fifo_full) n_stall++;
    if (start) begin
      instr_t in;
      in = dut.ins;
      n_start++;
      for (int c = 0; c < NC; c++) for (int j = 0; j < S; j++) begin
        int ch, y, addr; logic v, m;
        if (in.mode == MODE_DW) begin ch = in.dw_ch; y = dut.e + c; v = (j == 0) && (c < in.rows); end
        else begin ch = dut.g * NC + c; y = dut.e + j; v = (j < in.rows); end
        addr = in.in_base + (ch / 32) * in.h_stride + y;
        m = v && widx_mem[in.widx_base + dut.g][c*S+j] && !zero_row(5'(ch % 32), 11'(addr));
        checks++;
        if (v && (job_bank[c][j] != 5'(ch % 32) || job_addr[c][j] != 11'(addr))) begin
          failures++; $display("FAIL job addr c=%0d j=%0d", c, j);
        end
        checks++;
        if (job_mask[c][j] != m) begin failures++; $display("FAIL mask c=%0d j=%0d got %0d exp %0d", c, j, job_mask[c][j], m); end
      end
    end
  end

  initial begin
    im_wr_en = 0; im_wr_addr = 0; im_wr_data = '0; go = 0;
    for (int i = 0; i < 512; i++) widx_mem[i] = {$urandom, $urandom};
    prog[0] = '0; prog[0].op = OP_BASIS; prog[0].re_tgt = 0; prog[0].wb_base = 0;
    prog[1] = '0; prog[1].op = OP_CONV; prog[1].mode = MODE_CONV; prog[1].rows = 3; prog[1].n_e = 2;
    prog[1].n_g = 2; prog[1].in_base = 5; prog[1].h_stride = 20; prog[1].widx_base = 10; prog[1].wb_base = 3;
    prog[1].out_base = 7; prog[1].nb_valid = 1; prog[1].nb_addr = 20;
    prog[2] = '0; prog[2].op = OP_CONV; prog[2].mode = MODE_DW; prog[2].rows = 3; prog[2].n_e = 1; prog[2].n_g = 1;
    prog[2].dw_ch = 37; prog[2].in_base = 2; prog[2].h_stride = 30; prog[2].widx_base = 20; prog[2].wb_base = 30;
    prog[2].out_base = 200;
    prog[3] = '0; prog[3].op = OP_END;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); im_wr_en = 1; im_wr_addr = 6'(i); im_wr_data = prog[i];
    end
    @(negedge clk); im_wr_en = 0; go = 1; @(negedge clk); go = 0;
    checks++;
    if (idle) begin failures++; $display("FAIL not started"); end
    // the first basis makes RE A active
    while (!idle) @(negedge clk);
    // expected weight-buffer reads
    begin
      rd_t exp[$];
      for (int i = 0; i < 3; i++) exp.push_back('{1'b1, i, i, 1'b0});
      for (int e = 0; e < 2; e++) for (int g = 0; g < 2; g++) for (int j = 0; j < 3; j++)
        exp.push_back('{1'b0, 3 + g*3 + j, j, 1'b0});
      exp.push_back('{1'b0, 30, 0, 1'b0});
      // prefetched rows: into RE B (re_act was 0), may interleave anywhere in pass 1
      begin
        rd_t main_rds[$], pf_rds[$];
        foreach (rds[i]) begin
          if (rds[i].basis && rds[i].addr >= 20) pf_rds.push_back(rds[i]);
          else main_rds.push_back(rds[i]);
        end
        checks++;
        if (main_rds.size() != exp.size()) begin failures++; $display("FAIL #reads %0d %0d", main_rds.size(), exp.size()); end
        else foreach (exp[i]) begin
          checks++;
          if (main_rds[i] != exp[i]) begin failures++; $display("FAIL read %0d addr %0d exp %0d", i, main_rds[i].addr, exp[i].addr); end
        end
        checks++;
        if (pf_rds.size() != 3) begin failures++; $display("FAIL prefetch count %0d", pf_rds.size()); end
        else foreach (pf_rds[i]) begin
          checks++;
          if (pf_rds[i].addr != 20 + i || pf_rds[i].idx != i || pf_rds[i].re != 1'b1) begin failures++; $display("FAIL prefetch %0d", i); end
        end
      end
    end
    // accumulate / emit order: pass 1: L A E L A E ; pass 2: L E
    begin
      int exp_acc[$] = '{0, 1, 2, 0, 1, 2, 0, 2};
      int exp_emit[$] = '{7, 7 + NM, 200};
      checks++;
      if (accs != exp_acc) begin failures++; $display("FAIL acc order"); end
      checks++;
      if (emits != exp_emit) begin failures++; $display("FAIL emit bases"); end
    end
    checks += 4;
    if (n_start != 5) begin failures++; $display("FAIL starts %0d", n_start); end
    if (re_act != 1'b1) begin failures++; $display("FAIL RE swap"); end
    if (cnt_fifo_stall != 32'(n_stall) || n_stall == 0) begin failures++; $display("FAIL stall count %0d %0d", cnt_fifo_stall, n_stall); end
    if (cnt_dw_steps != 1 || cnt_steps != 5) begin failures++; $display("FAIL step counters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
