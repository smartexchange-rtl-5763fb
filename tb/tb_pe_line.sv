// tb_pe_line: self-checking test of one PE line (F = 8 MACs, S = 3).
// Each trial loads basis matrices into the REs, coefficient (or original
// weight) rows for three jobs, random input rows and a random job mask, then
// starts the line. A behavioural input buffer answers row reads, granting
// them after a random delay. Checked against a reference computed here:
//   * every MAC's psum = sum over selected jobs j and steps s of
//     W_j[s] * row_j[f+s], with W_j = Ce_j x B rebuilt in the testbench
//     (cluster mode: MACs 0-3 use RE A's filter, 4-7 RE B's),
//   * unselected jobs are never read,
//   * with immediate grants the run time equals the line's schedule (see
//     sched): each step lasts the largest number of non-zero Booth digits
//     over the 8 activations (at least 1), and the next row's coefficient
//     load overlaps the last step of the previous row; with delayed grants
//     the schedule is a lower bound.
module tb_pe_line;
  import se_pkg::*;
  localparam int F = 8, S = 3, L = F + S - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e mode; logic raw, re_act;
  logic bl_valid, bl_re; logic [1:0] bl_row; logic [23:0] bl_data;
  logic jb_valid; logic [1:0] jb_idx; logic [23:0] jb_slot;
  logic start; logic [S-1:0] job_mask;
  logic [S-1:0][4:0] job_bank; logic [S-1:0][10:0] job_addr;
  logic rd_req; logic [4:0] rd_bank; logic [10:0] rd_addr;
  logic rd_gnt, rd_valid; logic [L*8-1:0] rd_data;
  logic signed [F-1:0][23:0] psum; logic done;
  int checks = 0, failures = 0;

  pe_line #(.F(F), .S(S), .AB(5), .AA(11)) dut (.*);

  // reference data
  logic signed [7:0] B [2][S][S];
  logic [3:0] ce [S][2][S];       // job, RE, i
  logic signed [7:0] rw [S][S];   // job, x
  logic signed [7:0] row [S][L];
  int reads_of [S];

  function automatic int rebuilt(int re, int j, int x);
    int s = 0;
    if (raw) return rw[j][x];
    for (int i = 0; i < S; i++)
      if (ce[j][re][i][2:0] != 3'd7) s += (ce[j][re][i][3] ? -1 : 1) * (int'(B[re][i][x]) >>> ce[j][re][i][2:0]);
    return s > 127 ? 127 : (s < -128 ? -128 : s);
  endfunction

  function automatic int nnz(logic [7:0] a);
    int n = 0;
    for (int i = 0; i < 4; i++) if ((-2*a[2*i+1] + a[2*i] + ((i == 0) ? 0 : a[2*i-1])) != 0) n++;
    return n;
  endfunction

  // the line's schedule: first row in the front buffer 3 cycles after start;
  // a job's coefficient load follows the previous job's last step start; a
  // step starts when every MAC has finished the previous one
  function automatic int max_digits(int j, int s);
    int m;
    m = 1;
    for (int f = 0; f < F; f++) if (nnz(row[j][f+s]) > m) m = nnz(row[j][f+s]);
    return m;
  endfunction
  function automatic int sched(logic [S-1:0] mask);
    int load, st, last_st, last_m, first;
    if (mask == 0) return 1;
    first = 1; last_st = 0; last_m = 0;
    for (int j = 0; j < S; j++) if (mask[j]) begin
      load = first ? 3 : last_st + 1;
      st   = first ? load + 1 : ((load + 1 > last_st + last_m) ? load + 1 : last_st + last_m);
      for (int s = 0; s < S; s++) begin
        last_st = st; last_m = max_digits(j, s);
        st = st + last_m;
      end
      first = 0;
    end
    return last_st + last_m;
  endfunction

  // behavioural input buffer: grant after a random delay, data next cycle
  logic [1:0] jreq;
  always_comb begin
    jreq = 0;
    for (int j = 0; j < S; j++) if (rd_addr == job_addr[j]) jreq = 2'(j);
  end
  logic gnt_en;
  logic imm;
  always @(negedge clk) gnt_en <= imm || ($urandom % 3 != 0);
  assign rd_gnt = rd_req && gnt_en;
  always_ff @(posedge clk) begin
    rd_valid <= rd_gnt;
    if (rd_gnt) begin
      for (int i = 0; i < L; i++) rd_data[i*8 +: 8] <= row[jreq][i];
      reads_of[jreq]++;
    end
  end

  task automatic basis(int re);
    for (int i = 0; i < S; i++) begin
      for (int x = 0; x < S; x++) B[re][i][x] = 8'($urandom);
      @(negedge clk); bl_valid = 1; bl_re = re[0]; bl_row = 2'(i);
      bl_data = {B[re][i][2], B[re][i][1], B[re][i][0]};
    end
    @(negedge clk); bl_valid = 0;
  endtask

  initial begin
    imm = 1; bl_valid = 0; bl_re = 0; bl_row = 0; bl_data = 0; jb_valid = 0; jb_idx = 0; jb_slot = 0;
    start = 0; job_mask = 0; job_bank = 0; job_addr = 0; mode = MODE_CONV; raw = 0; re_act = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int cyc, exp_cyc, first;
      imm    = (t % 4 < 2);
      mode   = (t % 3 == 2) ? MODE_CLUSTER : MODE_CONV;
      raw    = (mode == MODE_CONV) && (t % 5 == 4);
      re_act = 1'($urandom);
      basis(0); basis(1);
      for (int j = 0; j < S; j++) begin
        for (int r = 0; r < 2; r++) for (int i = 0; i < S; i++) begin
          ce[j][r][i] = 4'($urandom);
          if ($urandom % 4 == 0) ce[j][r][i][2:0] = 3'd7;
        end
        for (int x = 0; x < S; x++) rw[j][x] = 8'($urandom);
        for (int i = 0; i < L; i++) begin
          row[j][i] = 8'($urandom);
          if (t % 2 == 0) row[j][i] = 8'(1 << ($urandom % 8)) & 8'h3f;  // few Booth digits
        end
        job_bank[j] = 5'(j); job_addr[j] = 11'(100 + j);
        reads_of[j] = 0;
        @(negedge clk); jb_valid = 1; jb_idx = 2'(j);
        jb_slot = raw ? {rw[j][2], rw[j][1], rw[j][0]}
                      : {ce[j][1][2], ce[j][1][1], ce[j][1][0], ce[j][0][2], ce[j][0][1], ce[j][0][0]};
      end
      @(negedge clk); jb_valid = 0;
      job_mask = 3'($urandom);
      start = 1; @(negedge clk); start = 0; #1;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      // reference psums
      for (int f = 0; f < F; f++) begin
        int sum;
        sum = 0;
        for (int j = 0; j < S; j++) if (job_mask[j])
          for (int s = 0; s < S; s++) begin
            int re, w;
            re = (mode == MODE_CLUSTER) ? (f < F/2 ? 0 : 1) : int'(re_act);
            // in non-cluster mode the job slot's low coefficient row is used
            w = (mode == MODE_CLUSTER) ? rebuilt(re, j, s) : rebuilt(0, j, s);
            if (mode != MODE_CLUSTER && !raw) begin
              // the active RE holds basis B[re_act] and coefficient row 0 of the slot
              int s2;
              s2 = 0;
              for (int i = 0; i < S; i++)
                if (ce[j][0][i][2:0] != 3'd7) s2 += (ce[j][0][i][3] ? -1 : 1) * (int'(B[re][i][s]) >>> ce[j][0][i][2:0]);
              w = s2 > 127 ? 127 : (s2 < -128 ? -128 : s2);
            end
            sum += w * int'(row[j][f+s]);
          end
        checks++;
        if (int'(signed'(psum[f])) != sum) begin
          failures++; $display("FAIL t=%0d mode=%0d raw=%0d f=%0d got %0d exp %0d", t, mode, raw, f, signed'(psum[f]), sum);
        end
      end
      for (int j = 0; j < S; j++) begin
        checks++;
        if (reads_of[j] != (job_mask[j] ? 1 : 0)) begin failures++; $display("FAIL reads t=%0d j=%0d", t, j); end
      end
      // timing (only when grants are immediate this is exact; else a lower bound)
      exp_cyc = sched(job_mask);
      checks++;
      if ((imm && cyc != exp_cyc) || cyc < exp_cyc) begin
        failures++; $display("FAIL timing t=%0d got %0d exp %0d", t, cyc, exp_cyc);
      end
    end
    // exact timing with immediate grants
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
