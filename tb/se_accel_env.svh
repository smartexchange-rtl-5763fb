// se_accel_env.svh: shared test environment for the se_accel testbenches.
//
// Included inside a testbench module after it has declared the localparams
// NM, NC, F, S, INB, IND, WBD, OD, XD (the sizes of the se_accel under test).
// Provides: clock and reset, the DUT port signals, images of every buffer's
// contents (written through the DUT's fill ports by the write_* tasks), an
// independent reference model of a program (basis loads, 2D CONV, raw,
// cluster and depth-wise passes, RE ping-pong, ReLU / shift / saturation),
// the comparison of the whole output buffer, and counters of the mechanisms
// observed inside the DUT. It only reads and writes variables of the
// including module.

  localparam int unsigned L  = F + S - 1;
  localparam int unsigned SW = S * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                          in_wr_en = 1'b0;
  logic [$clog2(INB)-1:0]        in_wr_bank = '0;
  logic [$clog2(IND)-1:0]        in_wr_addr = '0;
  logic [L*8-1:0]                in_wr_data = '0;
  logic                          wb_wr_en = 1'b0;
  logic [$clog2(NM)-1:0]         wb_wr_slice = '0;
  logic [$clog2(WBD)-1:0]        wb_wr_addr = '0;
  logic [NC*SW-1:0]              wb_wr_data = '0;
  logic                          wx_wr_en = 1'b0;
  logic [$clog2(XD)-1:0]         wx_wr_addr = '0;
  logic [NC*S-1:0]               wx_wr_data = '0;
  logic                          im_wr_en = 1'b0;
  logic [5:0]                    im_wr_addr = '0;
  instr_t                        im_wr_data = '0;
  logic                          go = 1'b0, idle;
  logic                          out_rd_en = 1'b0;
  logic [$clog2(OD)-1:0]         out_rd_addr = '0;
  logic [F*8-1:0]                out_rd_data;
  logic [31:0] cnt_cycles, cnt_steps, cnt_skip_w, cnt_skip_in, cnt_basis_overlap,
               cnt_basis_stall, cnt_fifo_stall, cnt_dw_steps, cnt_cluster_steps, cnt_raw_steps;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ------------------------------------------------------------ buffer images
  logic signed [7:0]  act_img [INB][IND][L];
  logic [NC*SW-1:0]   wb_img  [NM][WBD];
  logic [NC*S-1:0]    wx_img  [XD];
  logic [7:0]         exp_out [OD][F];
  bit                 exp_set [OD];

  // rows never written read as zero (as the input GB's zero flags say) and no
  // output is expected until the reference model sets it
  initial begin
    for (int b = 0; b < int'(INB); b++)
      for (int a = 0; a < int'(IND); a++)
        for (int i = 0; i < int'(L); i++) act_img[b][a][i] = '0;
    for (int o = 0; o < int'(OD); o++) exp_set[o] = 1'b0;
  end

  task automatic write_act(input int b, input int a, input logic signed [7:0] row [L]);
    @(negedge clk);
    in_wr_en = 1'b1; in_wr_bank = ($clog2(INB))'(b); in_wr_addr = ($clog2(IND))'(a);
    for (int i = 0; i < L; i++) begin
      in_wr_data[i*8 +: 8] = row[i];
      act_img[b][a][i] = row[i];
    end
    @(negedge clk); in_wr_en = 1'b0;
  endtask

  task automatic write_wb(input int m, input int a, input logic [NC*SW-1:0] w);
    @(negedge clk);
    wb_wr_en = 1'b1; wb_wr_slice = ($clog2(NM))'(m); wb_wr_addr = ($clog2(WBD))'(a); wb_wr_data = w;
    wb_img[m][a] = w;
    @(negedge clk); wb_wr_en = 1'b0;
  endtask

  task automatic write_wx(input int a, input logic [NC*S-1:0] w);
    @(negedge clk);
    wx_wr_en = 1'b1; wx_wr_addr = ($clog2(XD))'(a); wx_wr_data = w;
    wx_img[a] = w;
    @(negedge clk); wx_wr_en = 1'b0;
  endtask

  // random data: activations with many zeros (and some all-zero rows)
  task automatic rand_act_row(output logic signed [7:0] row [L], input int zero_row_pct);
    bit z;
    z = ($urandom % 100) < zero_row_pct;
    for (int i = 0; i < L; i++) begin
      if (z || ($urandom % 100) < 35) row[i] = '0;
      else if ($urandom % 2)          row[i] = 8'($urandom % 16);     // few Booth digits
      else                            row[i] = 8'($urandom);
    end
  endtask

  function automatic logic [3:0] rand_coef();
    if ($urandom % 100 < 30) return {1'($urandom), 3'd7};
    return {1'($urandom), 3'($urandom % 7)};
  endfunction

  // a coefficient slot: low row (RE A / normal modes) and high row (RE B in
  // cluster mode)
  function automatic logic [SW-1:0] rand_coef_slot();
    logic [SW-1:0] s;
    s = '0;
    for (int i = 0; i < 2*S; i++) s[i*4 +: 4] = rand_coef();
    return s;
  endfunction

  function automatic logic [SW-1:0] rand_raw_slot();
    logic [SW-1:0] s;
    for (int i = 0; i < S; i++) s[i*8 +: 8] = 8'($urandom % 64) - 8'd32;
    return s;
  endfunction

  // ------------------------------------------------------------ reference model
  logic signed [7:0] ref_basis [2][NM][S][S];   // [RE][slice][row][col]
  bit                ref_act;
  // loop bounds held in variables keep the model's loops rolled when compiled
  int n_m = NM, n_c = NC, n_f = F, n_s = S;

  function automatic logic signed [7:0] ref_rebuild(input int re, input int m,
                                                    input logic [4*S-1:0] cr, input int col);
    int sum;
    sum = 0;
    for (int i = 0; i < n_s; i++) begin
      int b, k;
      b = ref_basis[re][m][i][col];
      k = cr[i*4 +: 3];
      if (k != 7) sum += cr[i*4+3] ? -(b >>> k) : (b >>> k);
    end
    if (sum > 127) return 8'sd127;
    if (sum < -128) return -8'sd128;
    return 8'(sum);
  endfunction

  task automatic ref_basis_load(input int re, input int base);
    for (int m = 0; m < n_m; m++)
      for (int i = 0; i < n_s; i++)
        for (int x = 0; x < n_s; x++)
          ref_basis[re][m][i][x] = wb_img[m][base + i][x*8 +: 8];
  endtask

  task automatic ref_run(input instr_t in);
    int nw;
    nw = (in.mode == MODE_DW) ? 1 : int'(in.rows);
    for (int e = 0; e < int'(in.n_e); e++)
      for (int m = 0; m < n_m; m++) begin
        longint acc [F];
        for (int f = 0; f < n_f; f++) acc[f] = 0;
        for (int g = 0; g < int'(in.n_g); g++)
          for (int c = 0; c < n_c; c++)
            for (int j = 0; j < n_s; j++) begin
              int ch, y, b, a;
              bit v;
              logic [SW-1:0] slot;
              if (in.mode == MODE_DW) begin ch = in.dw_ch; y = e + c; v = (j == 0) && (c < int'(in.rows)); end
              else begin ch = g * NC + c; y = e + j; v = (j < int'(in.rows)); end
              if (!v || !wx_img[in.widx_base + g][c*S+j]) continue;
              b = ch % INB;
              a = in.in_base + (ch / INB) * in.h_stride + y;
              slot = wb_img[m][in.wb_base + g*nw + ((in.mode == MODE_DW) ? 0 : j)][c*SW +: SW];
              for (int f = 0; f < n_f; f++)
                for (int s = 0; s < n_s; s++) begin
                  int w;
                  if (in.mode == MODE_CLUSTER)
                    w = (f < F/2) ? ref_rebuild(0, m, slot[4*S-1:0], s) : ref_rebuild(1, m, slot[8*S-1:4*S], s);
                  else if (in.raw)
                    w = $signed(slot[s*8 +: 8]);
                  else
                    w = ref_rebuild(int'(ref_act), m, slot[4*S-1:0], s);
                  acc[f] += longint'(w) * longint'(act_img[b][a][f+s]);
                end
            end
        for (int f = 0; f < n_f; f++) begin
          longint v;
          int o;
          v = acc[f] >>> in.shift;
          if (in.relu && v < 0) v = 0;
          if (v > 127) v = 127;
          if (v < -128) v = -128;
          o = in.out_base + e * NM + m;
          exp_out[o][f] = 8'(v);
          exp_set[o] = 1'b1;
        end
      end
  endtask

  // the reference view of the program: basis loads, passes, prefetch + swap
  task automatic ref_program(input instr_t prog [$]);
    foreach (prog[i]) begin
      instr_t in;
      in = prog[i];
      if (in.op == OP_END) break;
      if (in.op == OP_BASIS) begin
        ref_basis_load(int'(in.re_tgt), int'(in.wb_base));
        ref_act = in.re_tgt;
      end else begin
        ref_run(in);
        if (in.nb_valid && in.mode != MODE_CLUSTER) begin
          ref_basis_load(int'(!ref_act), int'(in.nb_addr));
          ref_act = !ref_act;
        end
      end
    end
  endtask

  // ------------------------------------------------------------ run and compare
  task automatic load_program(input instr_t prog [$]);
    foreach (prog[i]) begin
      @(negedge clk);
      im_wr_en = 1'b1; im_wr_addr = 6'(i); im_wr_data = prog[i];
    end
    @(negedge clk); im_wr_en = 1'b0;
  endtask

  task automatic run_program();
    @(negedge clk); go = 1'b1;
    @(negedge clk); go = 1'b0;
    check(!idle, "accelerator did not start");
    while (!idle) @(negedge clk);
  endtask

  task automatic compare_outputs();
    for (int o = 0; o < OD; o++) begin
      if (!exp_set[o]) continue;
      @(negedge clk); out_rd_en = 1'b1; out_rd_addr = ($clog2(OD))'(o);
      @(negedge clk); out_rd_en = 1'b0;
      for (int f = 0; f < F; f++)
        check(out_rd_data[f*8 +: 8] == exp_out[o][f],
              $sformatf("out[%0d][%0d] = %0d, expected %0d", o, f,
                        $signed(out_rd_data[f*8 +: 8]), $signed(exp_out[o][f])));
    end
  endtask
