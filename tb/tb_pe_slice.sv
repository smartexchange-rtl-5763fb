// tb_pe_slice: one PE slice at its default size (16 PE lines x 8 MACs).
// Fills the slice's weight buffer with a basis matrix and two channel groups
// of coefficient rows, loads the basis into RE A, then for each group reads
// the three coefficient words, starts all lines with random job masks and
// rows served by a behavioural input buffer, waits for `done` and loads/adds
// the adder-tree sums into the accumulation buffer. Finally emits the row
// and checks the FIFO head (address and 8 outputs) against a reference
// computed here: sat8(relu((sum over groups, lines, jobs, steps of
// W*I) >>> shift)) with W rebuilt from Ce x B in the testbench.
module tb_pe_slice;
  import se_pkg::*;
  localparam int NC = 16, F = 8, S = 3, L = F + S - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e mode; logic raw, re_act;
  logic wb_wr_en; logic [6:0] wb_wr_addr; logic [NC*24-1:0] wb_wr_data;
  logic wb_rd_en; logic [6:0] wb_rd_addr; logic wb_rd_basis; logic [1:0] wb_rd_idx; logic wb_rd_re;
  logic start; logic [NC-1:0][S-1:0] job_mask; logic [NC-1:0][S-1:0][4:0] job_bank; logic [NC-1:0][S-1:0][10:0] job_addr;
  logic [NC-1:0] rd_req, rd_gnt, rd_valid; logic [NC-1:0][4:0] rd_bank; logic [NC-1:0][10:0] rd_addr;
  logic [NC-1:0][L*8-1:0] rd_data; logic done;
  logic acc_load, acc_add, emit, relu; logic [8:0] emit_addr; logic [3:0] shift;
  logic fifo_pop, fifo_empty, fifo_full; logic [9+64-1:0] fifo_head;
  int checks = 0, failures = 0;

  pe_slice dut (.*);

  logic signed [7:0] B [S][S];
  logic [3:0] ce [2][NC][S][S];         // group, line, job, i
  logic signed [7:0] rows [2][NC][S][L];
  logic [S-1:0] msk [2][NC];
  int g_cur;

  function automatic int wgt(int g, int c, int j, int x);
    int s;
    s = 0;
    for (int i = 0; i < S; i++)
      if (ce[g][c][j][i][2:0] != 3'd7) s += (ce[g][c][j][i][3] ? -1 : 1) * (int'(B[i][x]) >>> ce[g][c][j][i][2:0]);
    return s > 127 ? 127 : (s < -128 ? -128 : s);
  endfunction

  // behavioural input buffer: every port granted at once, row next cycle
  assign rd_gnt = rd_req;
  always_ff @(posedge clk) begin
    rd_valid <= rd_gnt;
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < L; i++) rd_data[c][i*8 +: 8] <= rows[g_cur][c][rd_addr[c][1:0]][i];
  end

  task automatic wb_read(int addr, logic basis, int idx);
    @(negedge clk); wb_rd_en = 1; wb_rd_addr = 7'(addr); wb_rd_basis = basis; wb_rd_idx = 2'(idx); wb_rd_re = 0;
    @(negedge clk); wb_rd_en = 0;
  endtask

  initial begin
    mode = MODE_CONV; raw = 0; re_act = 0; wb_wr_en = 0; wb_wr_addr = 0; wb_wr_data = 0;
    wb_rd_en = 0; wb_rd_addr = 0; wb_rd_basis = 0; wb_rd_idx = 0; wb_rd_re = 0;
    start = 0; job_mask = 0; job_bank = 0; job_addr = 0; acc_load = 0; acc_add = 0; emit = 0;
    emit_addr = 0; relu = 0; shift = 0; fifo_pop = 0; g_cur = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      // weight buffer contents
      for (int i = 0; i < S; i++) begin
        for (int x = 0; x < S; x++) B[i][x] = 8'($urandom);
        @(negedge clk); wb_wr_en = 1; wb_wr_addr = 7'(i);
        wb_wr_data = '0; wb_wr_data[23:0] = {B[i][2], B[i][1], B[i][0]};
      end
      for (int g = 0; g < 2; g++) for (int j = 0; j < S; j++) begin
        for (int c = 0; c < NC; c++) for (int i = 0; i < S; i++) begin
          ce[g][c][j][i] = 4'($urandom);
          if ($urandom % 4 == 0) ce[g][c][j][i][2:0] = 3'd7;
        end
        @(negedge clk); wb_wr_en = 1; wb_wr_addr = 7'(42 + g*S + j);   // second bank
        for (int c = 0; c < NC; c++)
          wb_wr_data[c*24 +: 24] = {12'h0, ce[g][c][j][2], ce[g][c][j][1], ce[g][c][j][0]};
      end
      @(negedge clk); wb_wr_en = 0;
      for (int g = 0; g < 2; g++) for (int c = 0; c < NC; c++) begin
        msk[g][c] = 3'($urandom);
        for (int j = 0; j < S; j++) for (int i = 0; i < L; i++) rows[g][c][j][i] = 8'($urandom);
      end
      for (int i = 0; i < S; i++) wb_read(i, 1, i);
      for (int g = 0; g < 2; g++) begin
        g_cur = g;
        for (int j = 0; j < S; j++) wb_read(42 + g*S + j, 0, j);
        @(negedge clk);
        for (int c = 0; c < NC; c++) for (int j = 0; j < S; j++) begin
          job_mask[c] = msk[g][c]; job_bank[c][j] = 5'(c); job_addr[c][j] = 11'(j);
        end
        start = 1; @(negedge clk); start = 0; #1;
        while (!done) @(negedge clk);
        if (g == 0) acc_load = 1; else acc_add = 1;
        @(negedge clk); acc_load = 0; acc_add = 0;
      end
      relu = t[0]; shift = 4'(t % 6); emit_addr = 9'(t * 3);
      emit = 1; @(negedge clk); emit = 0; #1;
      checks++;
      if (fifo_empty || fifo_head[72:64] != emit_addr) begin failures++; $display("FAIL emit addr t=%0d", t); end
      for (int f = 0; f < F; f++) begin
        longint acc; int o;
        acc = 0;
        for (int g = 0; g < 2; g++) for (int c = 0; c < NC; c++) for (int j = 0; j < S; j++)
          if (msk[g][c][j]) for (int s = 0; s < S; s++) acc += wgt(g, c, j, s) * int'(rows[g][c][j][f+s]);
        acc = acc >>> shift;
        if (relu && acc < 0) acc = 0;
        o = acc > 127 ? 127 : (acc < -128 ? -128 : int'(acc));
        checks++;
        if (int'(signed'(fifo_head[f*8 +: 8])) != o) begin
          failures++; $display("FAIL out t=%0d f=%0d got %0d exp %0d", t, f, signed'(fifo_head[f*8 +: 8]), o);
        end
      end
      fifo_pop = 1; @(negedge clk); fifo_pop = 0;
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
