// controller: sequences the accelerator from a small instruction memory.
//
// A host (compiler side) writes instructions (se_pkg::instr_t) and pulses
// `go`; the controller runs them until OP_END and raises `idle` again once
// every slice FIFO has drained.
//
// OP_BASIS reads the S basis rows of every slice's filter (weight-buffer words
// wb_base .. wb_base+S-1) into RE `re_tgt` of every line and makes it the
// active RE.
//
// OP_CONV runs one pass: for each output row e < n_e and each channel group
// g < n_g it
//   1. reads the coefficient rows of the step (R words in 2D CONV / cluster
//      mode, one word in depth-wise mode) and the weight-index word,
//   2. forms every line's job list: job addresses from the layer geometry,
//      then the index selector keeps the jobs whose coefficient row and input
//      row are both non-zero,
//   3. starts the lines and waits until all slices are done,
//   4. loads (g = 0) or adds (g > 0) the adder-tree sums into the
//      accumulation buffers, and after the last group emits the output row to
//      the slice FIFOs, stalling while any FIFO is full.
// With `nb_valid`, the basis of the next pass is read into the inactive RE
// while the lines compute (the weight-buffer port is free then), and the REs
// swap roles at the end of the pass: the ping-pong use of the two REs that
// keeps basis loading off the critical path. Rows still missing at the end of
// the pass are loaded then (counted as basis stall cycles).
//
// Job geometry (own choice, the source gives only the mapping): input channel
// ch lives in input bank ch mod IN_BANKS at row in_base + (ch div IN_BANKS) *
// h_stride + y. 2D CONV / cluster: line c of group g takes channel
// g*DIM_C + c, job j reads row e + j. Depth-wise: line c takes kernel row c of
// channel dw_ch (row e + c), lines c >= R stay idle.
// Counters report how often each mechanism occurred.
module controller
  import se_pkg::*;
#(
  parameter int unsigned NC  = DIM_C,
  parameter int unsigned NM  = DIM_M,
  parameter int unsigned INB = IN_BANKS,
  parameter int unsigned S   = KS,
  parameter int unsigned WBD = WB_DEPTH,
  parameter int unsigned AB  = $clog2(INB),
  parameter int unsigned AA  = $clog2(IN_DEPTH),
  parameter int unsigned OA  = $clog2(OUT_DEPTH),
  parameter int unsigned XA  = $clog2(WIDX_DEPTH),
  parameter int unsigned IMD = IMEM_DEPTH
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // instruction memory fill and start
  input  logic                           im_wr_en,
  input  logic [$clog2(IMD)-1:0]         im_wr_addr,
  input  instr_t                         im_wr_data,
  input  logic                           go,
  output logic                           idle,
  // global configuration to the slices
  output mode_e                          mode,
  output logic                           raw,
  output logic                           re_act,
  output logic                           relu,
  output logic [3:0]                     shift,
  // weight-buffer reads (same in every slice)
  output logic                           wb_rd_en,
  output logic [$clog2(WBD)-1:0]         wb_rd_addr,
  output logic                           wb_rd_basis,
  output logic [$clog2(S)-1:0]           wb_rd_idx,
  output logic                           wb_rd_re,
  // weight index GB
  output logic                           wx_rd_en,
  output logic [XA-1:0]                  wx_rd_addr,
  input  logic [NC*S-1:0]                wx_rd_data,
  // input zero flags (input index)
  output logic [NC*S-1:0][AB-1:0]        fl_bank,
  output logic [NC*S-1:0][AA-1:0]        fl_addr,
  input  logic [NC*S-1:0]                fl_zero,
  // job lists and line control
  output logic                           start,
  output logic [NC-1:0][S-1:0]           job_mask,
  output logic [NC-1:0][S-1:0][AB-1:0]   job_bank,
  output logic [NC-1:0][S-1:0][AA-1:0]   job_addr,
  input  logic                           slices_done,
  output logic                           acc_load,
  output logic                           acc_add,
  output logic                           emit,
  output logic [OA-1:0]                  emit_base,
  input  logic                           any_fifo_full,
  input  logic                           all_fifo_empty,
  // statistics
  output logic [31:0]                    cnt_cycles,
  output logic [31:0]                    cnt_steps,
  output logic [31:0]                    cnt_skip_w,
  output logic [31:0]                    cnt_skip_in,
  output logic [31:0]                    cnt_basis_overlap,
  output logic [31:0]                    cnt_basis_stall,
  output logic [31:0]                    cnt_fifo_stall,
  output logic [31:0]                    cnt_dw_steps,
  output logic [31:0]                    cnt_cluster_steps,
  output logic [31:0]                    cnt_raw_steps
);
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_BASIS, S_BWAIT, S_WREAD, S_WWAIT, S_START, S_RUN,
    S_ACC, S_EMIT, S_NEXT, S_FIN, S_SWAP, S_DRAIN
  } state_e;

  state_e  st;
  instr_t  imem [IMD];
  instr_t  ins;
  logic [$clog2(IMD)-1:0] pc;
  logic [7:0]  e;
  logic [5:0]  g;
  logic [1:0]  k;           // read counter (basis rows / coefficient words)
  logic [NC*S-1:0] widx_q;
  logic        pf_act;      // basis prefetch in progress
  logic [1:0]  pf_cnt;

  always_ff @(posedge clk) if (im_wr_en) imem[im_wr_addr] <= im_wr_data;

  // ---------------------------------------------------------- job geometry
  logic [NC-1:0][S-1:0] jvalid, wbit, zbit;
  always_comb begin
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < S; j++) begin
        int unsigned ch, y;
        if (ins.mode == MODE_DW) begin
          ch = 32'(ins.dw_ch);
          y  = 32'(e) + 32'(c);
          jvalid[c][j] = (j == 0) && (c < int'(ins.rows));
        end else begin
          ch = 32'(g) * NC + 32'(c);
          y  = 32'(e) + 32'(j);
          jvalid[c][j] = (j < int'(ins.rows));
        end
        job_bank[c][j] = AB'(ch % INB);
        job_addr[c][j] = AA'(32'(ins.in_base) + (ch / INB) * 32'(ins.h_stride) + y);
        fl_bank[c*S+j] = job_bank[c][j];
        fl_addr[c*S+j] = job_addr[c][j];
        zbit[c][j]     = fl_zero[c*S+j];
        wbit[c][j]     = widx_q[c*S+j];
      end
  end

  logic [$clog2(NC*S+1)-1:0] n_skip_w, n_skip_in;
  index_sel #(.N(NC), .S(S)) u_isel (
    .job_valid(jvalid), .w_idx(wbit), .in_zero(zbit), .sel(job_mask),
    .n_skip_w(n_skip_w), .n_skip_in(n_skip_in));

  // ---------------------------------------------------------- control
  logic [1:0] n_words;
  assign n_words = (ins.mode == MODE_DW) ? 2'd1 : ins.rows;
  logic last_g, last_e;
  assign last_g = (g == ins.n_g - 1'b1);
  assign last_e = (e == ins.n_e - 1'b1);

  // the weight-buffer port: main sequence, else basis prefetch during S_RUN
  logic pf_issue;
  assign pf_issue = pf_act && (st == S_RUN || st == S_FIN);

  always_comb begin
    wb_rd_en    = 1'b0;
    wb_rd_addr  = '0;
    wb_rd_basis = 1'b0;
    wb_rd_idx   = '0;
    wb_rd_re    = 1'b0;
    if (st == S_BASIS) begin
      wb_rd_en    = 1'b1;
      wb_rd_addr  = ($clog2(WBD))'(ins.wb_base + 7'(k));
      wb_rd_basis = 1'b1;
      wb_rd_idx   = ($clog2(S))'(k);
      wb_rd_re    = ins.re_tgt;
    end else if (st == S_WREAD) begin
      wb_rd_en    = 1'b1;
      wb_rd_addr  = ($clog2(WBD))'(32'(ins.wb_base) + 32'(g) * 32'(n_words) + 32'(k));
      wb_rd_idx   = ($clog2(S))'(k);
    end else if (pf_issue) begin
      wb_rd_en    = 1'b1;
      wb_rd_addr  = ($clog2(WBD))'(ins.nb_addr + 7'(pf_cnt));
      wb_rd_basis = 1'b1;
      wb_rd_idx   = ($clog2(S))'(pf_cnt);
      wb_rd_re    = !re_act;
    end
  end

  assign wx_rd_en   = (st == S_WREAD) && (k == 2'd0);
  assign wx_rd_addr = XA'(32'(ins.widx_base) + 32'(g));

  assign mode     = ins.mode;
  assign raw      = ins.raw;
  assign relu     = ins.relu;
  assign shift    = ins.shift;
  assign start    = (st == S_START);
  assign acc_load = (st == S_ACC) && (g == '0);
  assign acc_add  = (st == S_ACC) && (g != '0);
  assign emit     = (st == S_EMIT) && !any_fifo_full;
  assign emit_base = OA'(32'(ins.out_base) + 32'(e) * NM);
  assign idle     = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; ins <= '0; e <= '0; g <= '0; k <= '0;
      widx_q <= '0; re_act <= 1'b0; pf_act <= 1'b0; pf_cnt <= '0;
      cnt_cycles <= '0; cnt_steps <= '0; cnt_skip_w <= '0; cnt_skip_in <= '0;
      cnt_basis_overlap <= '0; cnt_basis_stall <= '0; cnt_fifo_stall <= '0;
      cnt_dw_steps <= '0; cnt_cluster_steps <= '0; cnt_raw_steps <= '0;
    end else begin
      if (st != S_IDLE) cnt_cycles <= cnt_cycles + 1;
      if (pf_issue) begin
        if (st == S_RUN) cnt_basis_overlap <= cnt_basis_overlap + 1;
        else             cnt_basis_stall   <= cnt_basis_stall + 1;
        pf_cnt <= pf_cnt + 1'b1;
        if (pf_cnt == 2'(S-1)) pf_act <= 1'b0;
      end
      // the weight index word arrives one cycle after its read
      if (st == S_WREAD && k == 2'd1) widx_q <= wx_rd_data;
      unique case (st)
        S_IDLE:  if (go) begin pc <= '0; st <= S_FETCH; end
        S_FETCH: begin
          ins <= imem[pc];
          pc  <= pc + 1'b1;
          e <= '0; g <= '0; k <= '0;
          unique case (imem[pc].op)
            OP_BASIS: st <= S_BASIS;
            OP_CONV: begin
              st <= S_WREAD;
              if (imem[pc].nb_valid && imem[pc].mode != MODE_CLUSTER) begin
                pf_act <= 1'b1; pf_cnt <= '0;
              end
            end
            default:  st <= S_DRAIN;
          endcase
        end
        S_BASIS: begin
          k <= k + 1'b1;
          if (k == 2'(S-1)) begin k <= '0; st <= S_BWAIT; end
        end
        S_BWAIT: begin re_act <= ins.re_tgt; st <= S_FETCH; end
        S_WREAD: begin
          k <= k + 1'b1;
          if (k == n_words - 1'b1) begin k <= '0; st <= S_WWAIT; end
        end
        S_WWAIT: begin
          if (n_words == 2'd1) widx_q <= wx_rd_data;
          st <= S_START;
        end
        S_START: begin
          cnt_steps   <= cnt_steps + 1;
          cnt_skip_w  <= cnt_skip_w + 32'(n_skip_w);
          cnt_skip_in <= cnt_skip_in + 32'(n_skip_in);
          if (ins.mode == MODE_DW)      cnt_dw_steps      <= cnt_dw_steps + 1;
          if (ins.mode == MODE_CLUSTER) cnt_cluster_steps <= cnt_cluster_steps + 1;
          if (ins.raw)                  cnt_raw_steps     <= cnt_raw_steps + 1;
          st <= S_RUN;
        end
        S_RUN:  if (slices_done) st <= S_ACC;
        S_ACC:  st <= last_g ? S_EMIT : S_NEXT;
        S_EMIT: begin
          if (any_fifo_full) cnt_fifo_stall <= cnt_fifo_stall + 1;
          else               st <= S_NEXT;
        end
        S_NEXT: begin
          if (!last_g) begin
            g <= g + 1'b1; st <= S_WREAD;
          end else if (!last_e) begin
            g <= '0; e <= e + 1'b1; st <= S_WREAD;
          end else begin
            st <= S_FIN;
          end
        end
        S_FIN: begin
          // finish any basis prefetch, then swap the REs
          if (!pf_act || (pf_issue && pf_cnt == 2'(S-1))) begin
            if (ins.nb_valid && ins.mode != MODE_CLUSTER) st <= S_SWAP;
            else st <= S_FETCH;
          end
        end
        S_SWAP:  begin re_act <= !re_act; st <= S_FETCH; end
        S_DRAIN: if (all_fifo_empty) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
