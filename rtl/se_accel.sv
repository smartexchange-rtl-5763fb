// se_accel: top level of the SmartExchange-style DNN accelerator.
//
// The accelerator runs convolution and fully-connected layers whose weights
// are stored in decomposed form: every 3D filter is a sparse coefficient
// matrix with power-of-two entries times a small S x S basis matrix. Weights
// are rebuilt on chip next to the MACs by shift-and-add, so DRAM and SRAM only
// ever carry the compact form.
//
// Structure: NM = DIM_M PE slices, each with DIM_C PE lines of DIM_F
// bit-serial MACs and two rebuild engines per line; an input global buffer
// (with the zero-row detector), a weight-index global buffer, the index
// selector (inside the controller), an output global buffer fed from the
// slices' output FIFOs by a round-robin collector, and the controller.
// All slices share the input rows and the job lists and differ only in the
// filter in their weight buffer; because a line's timing depends only on its
// input activations, the slices run in lockstep, so slice 0's row requests
// drive the input GB and the rows are broadcast to every slice.
//
// External interface (what a DMA engine and a host would drive):
//   in_wr_*  : write input rows into the input GB (bank, row address, row)
//   wb_wr_*  : write a word into the weight buffer of slice wb_wr_slice
//   wx_wr_*  : write a weight-index word
//   im_wr_*  : write an instruction; `go` starts the program, `idle` returns
//              high when it has finished and every output is in the output GB
//   out_rd_* : read an output GB word (one cycle latency)
//   cnt_*    : event counters (cycles, steps, skipped rows, basis overlap,
//              stalls, per-mode steps)
// Output GB addressing: output row e of pass with out_base b from slice m is
// written at b + e*DIM_M + m.
module se_accel
  import se_pkg::*;
#(
  parameter int unsigned NM  = DIM_M,
  parameter int unsigned NC  = DIM_C,
  parameter int unsigned F   = DIM_F,
  parameter int unsigned S   = KS,
  parameter int unsigned INB = IN_BANKS,
  parameter int unsigned IND = IN_DEPTH,
  parameter int unsigned WBD = WB_DEPTH,
  parameter int unsigned OD  = OUT_DEPTH,
  parameter int unsigned XD  = WIDX_DEPTH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input GB fill
  input  logic                          in_wr_en,
  input  logic [$clog2(INB)-1:0]        in_wr_bank,
  input  logic [$clog2(IND)-1:0]        in_wr_addr,
  input  logic [(F+S-1)*ACT_W-1:0]      in_wr_data,
  // weight buffer fill
  input  logic                          wb_wr_en,
  input  logic [$clog2(NM)-1:0]         wb_wr_slice,
  input  logic [$clog2(WBD)-1:0]        wb_wr_addr,
  input  logic [NC*S*BAS_W-1:0]         wb_wr_data,
  // weight index GB fill
  input  logic                          wx_wr_en,
  input  logic [$clog2(XD)-1:0]         wx_wr_addr,
  input  logic [NC*S-1:0]               wx_wr_data,
  // instructions
  input  logic                          im_wr_en,
  input  logic [$clog2(IMEM_DEPTH)-1:0] im_wr_addr,
  input  instr_t                        im_wr_data,
  input  logic                          go,
  output logic                          idle,
  // output GB read
  input  logic                          out_rd_en,
  input  logic [$clog2(OD)-1:0]         out_rd_addr,
  output logic [F*OUT_W-1:0]            out_rd_data,
  // statistics
  output logic [31:0]                   cnt_cycles,
  output logic [31:0]                   cnt_steps,
  output logic [31:0]                   cnt_skip_w,
  output logic [31:0]                   cnt_skip_in,
  output logic [31:0]                   cnt_basis_overlap,
  output logic [31:0]                   cnt_basis_stall,
  output logic [31:0]                   cnt_fifo_stall,
  output logic [31:0]                   cnt_dw_steps,
  output logic [31:0]                   cnt_cluster_steps,
  output logic [31:0]                   cnt_raw_steps
);
  localparam int unsigned AB = $clog2(INB);
  localparam int unsigned AA = $clog2(IND);
  localparam int unsigned OA = $clog2(OD);
  localparam int unsigned RW = (F+S-1)*ACT_W;
  localparam int unsigned HW = OA + F*OUT_W;

  // ---------------------------------------------------------- controller
  mode_e                        mode;
  logic                         raw, re_act, relu;
  logic [3:0]                   shift;
  logic                         wb_rd_en, wb_rd_basis, wb_rd_re;
  logic [$clog2(WBD)-1:0]       wb_rd_addr;
  logic [$clog2(S)-1:0]         wb_rd_idx;
  logic                         wx_rd_en;
  logic [$clog2(XD)-1:0]        wx_rd_addr;
  logic [NC*S-1:0]              wx_rd_data;
  logic [NC*S-1:0][AB-1:0]      fl_bank;
  logic [NC*S-1:0][AA-1:0]      fl_addr;
  logic [NC*S-1:0]              fl_zero;
  logic                         start, acc_load, acc_add, emit;
  logic [NC-1:0][S-1:0]         job_mask;
  logic [NC-1:0][S-1:0][AB-1:0] job_bank;
  logic [NC-1:0][S-1:0][AA-1:0] job_addr;
  logic [OA-1:0]                emit_base;
  logic                         slices_done, any_fifo_full, all_fifo_empty;

  controller #(.NC(NC), .NM(NM), .INB(INB), .S(S), .WBD(WBD), .AB(AB), .AA(AA), .OA(OA),
               .XA($clog2(XD))) u_ctrl (
    .clk, .rst_n, .im_wr_en, .im_wr_addr, .im_wr_data, .go, .idle,
    .mode, .raw, .re_act, .relu, .shift,
    .wb_rd_en, .wb_rd_addr, .wb_rd_basis, .wb_rd_idx, .wb_rd_re,
    .wx_rd_en, .wx_rd_addr, .wx_rd_data,
    .fl_bank, .fl_addr, .fl_zero,
    .start, .job_mask, .job_bank, .job_addr, .slices_done,
    .acc_load, .acc_add, .emit, .emit_base, .any_fifo_full, .all_fifo_empty,
    .cnt_cycles, .cnt_steps, .cnt_skip_w, .cnt_skip_in, .cnt_basis_overlap,
    .cnt_basis_stall, .cnt_fifo_stall, .cnt_dw_steps, .cnt_cluster_steps, .cnt_raw_steps);

  // ---------------------------------------------------------- global buffers
  logic [NC-1:0]           rd_req, rd_gnt, rd_valid;
  logic [NC-1:0][AB-1:0]   rd_bank;
  logic [NC-1:0][AA-1:0]   rd_addr;
  logic [NC-1:0][RW-1:0]   rd_data;

  input_gb #(.BANKS(INB), .DEPTH(IND), .WORD_W(RW), .NP(NC), .FLAG_PORTS(NC*S)) u_in_gb (
    .clk, .rst_n, .wr_en(in_wr_en), .wr_bank(in_wr_bank), .wr_addr(in_wr_addr),
    .wr_data(in_wr_data), .fl_bank, .fl_addr, .fl_zero,
    .rd_req, .rd_bank, .rd_addr, .rd_gnt, .rd_valid, .rd_data);

  widx_gb #(.DEPTH(XD), .W(NC*S)) u_wx_gb (
    .clk, .wr_en(wx_wr_en), .wr_addr(wx_wr_addr), .wr_data(wx_wr_data),
    .rd_en(wx_rd_en), .rd_addr(wx_rd_addr), .rd_data(wx_rd_data));

  logic             og_wr_en;
  logic [OA-1:0]    og_wr_addr;
  logic [F*OUT_W-1:0] og_wr_data;
  output_gb #(.DEPTH(OD), .WORD_W(F*OUT_W)) u_out_gb (
    .clk, .wr_en(og_wr_en), .wr_addr(og_wr_addr), .wr_data(og_wr_data),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_data));

  // ---------------------------------------------------------- PE slices
  logic [NM-1:0]                   s_done, s_empty, s_full, s_pop;
  logic [NM-1:0][HW-1:0]           s_head;
  logic [NM-1:0][NC-1:0]           s_req;
  logic [NM-1:0][NC-1:0][AB-1:0]   s_bank;
  logic [NM-1:0][NC-1:0][AA-1:0]   s_addr;

  for (genvar m = 0; m < NM; m++) begin : g_slice
    pe_slice #(.NC(NC), .F(F), .S(S), .WBD(WBD), .AB(AB), .AA(AA), .OA(OA)) u_slice (
      .clk, .rst_n, .mode, .raw, .re_act,
      .wb_wr_en(wb_wr_en && (wb_wr_slice == ($clog2(NM))'(m))),
      .wb_wr_addr, .wb_wr_data,
      .wb_rd_en, .wb_rd_addr, .wb_rd_basis, .wb_rd_idx, .wb_rd_re,
      .start, .job_mask, .job_bank, .job_addr,
      .rd_req(s_req[m]), .rd_bank(s_bank[m]), .rd_addr(s_addr[m]),
      .rd_gnt, .rd_valid, .rd_data,
      .done(s_done[m]),
      .acc_load, .acc_add, .emit, .emit_addr(emit_base + OA'(m)), .relu, .shift,
      .fifo_pop(s_pop[m]), .fifo_head(s_head[m]), .fifo_empty(s_empty[m]),
      .fifo_full(s_full[m]));
  end

  // slice 0 drives the shared input row requests (all slices are in lockstep)
  assign rd_req  = s_req[0];
  assign rd_bank = s_bank[0];
  assign rd_addr = s_addr[0];

  assign slices_done    = &s_done;
  assign any_fifo_full  = |s_full;
  assign all_fifo_empty = &s_empty;

  // ---------------------------------------------------------- output collector
  // round robin over the slice FIFOs, one output GB write per cycle
  logic [$clog2(NM)-1:0] rr, pick;
  logic                  have;
  always_comb begin
    pick = rr;
    have = 1'b0;
    for (int i = NM-1; i >= 0; i--) begin
      int unsigned idx;
      idx = (32'(rr) + 32'(i)) % NM;
      if (!s_empty[idx]) begin pick = ($clog2(NM))'(idx); have = 1'b1; end
    end
    s_pop = '0;
    if (have) s_pop[pick] = 1'b1;
  end

  assign og_wr_en   = have;
  assign og_wr_addr = s_head[pick][HW-1 -: OA];
  assign og_wr_data = s_head[pick][F*OUT_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rr <= '0;
    else if (have) rr <= pick + 1'b1;
  end

  // every slice must request the same rows as slice 0
  for (genvar m = 1; m < NM; m++) begin : g_lockstep
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (s_req[m] == s_req[0]) && (s_done[m] == s_done[0]));
  end

endmodule
