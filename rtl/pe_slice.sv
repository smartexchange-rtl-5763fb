// pe_slice: one PE slice, computing one output channel (one filter).
//
// A slice holds NC = DIM_C PE lines, the slice's weight buffer, an adder tree
// per MAC column, the accumulation buffer and the output FIFO. All slices see
// the same input rows and the same job lists; they differ only in the filter
// stored in their weight buffer, so DIM_M slices compute DIM_M consecutive
// output channels at once and every input row read is reused DIM_M times.
//
// Weight delivery: the controller issues weight-buffer reads (`wb_rd_*`). One
// cycle later the word is handed to the lines: for a basis read, slot 0 of the
// word is a basis row and goes to every line's selected RE (the basis of a
// filter is shared by all its rows); for a job read, slot c goes to line c as
// the coefficient (or original weight) row of job `wb_rd_idx`.
//
// After the lines finish a step (`done`), `acc_op` loads or adds the adder-tree
// sums into the accumulation buffer (accumulating over channel groups), and
// `emit` pushes the finished row, after optional ReLU, an arithmetic right
// shift and saturation to 8 bits, with its output-GB address into the FIFO.
// Interface timing: wb reads deliver one cycle later; acc_op/emit act at the
// clock edge; the FIFO is first-word fall-through.
// From the source: slice contents, adder tree, accumulation buffer, FIFO.
// Own choices: the word/slot layout, the requantisation at emission.
module pe_slice
  import se_pkg::*;
#(
  parameter int unsigned NC   = DIM_C,
  parameter int unsigned F    = DIM_F,
  parameter int unsigned S    = KS,
  parameter int unsigned WBD  = WB_DEPTH,
  parameter int unsigned AB   = $clog2(IN_BANKS),
  parameter int unsigned AA   = $clog2(IN_DEPTH),
  parameter int unsigned OA   = $clog2(OUT_DEPTH),
  parameter int unsigned FD   = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  mode_e                              mode,
  input  logic                               raw,
  input  logic                               re_act,
  // weight buffer fill (DMA side)
  input  logic                               wb_wr_en,
  input  logic [$clog2(WBD)-1:0]             wb_wr_addr,
  input  logic [NC*S*BAS_W-1:0]              wb_wr_data,
  // weight buffer reads (controller)
  input  logic                               wb_rd_en,
  input  logic [$clog2(WBD)-1:0]             wb_rd_addr,
  input  logic                               wb_rd_basis,   // 1 = basis row, 0 = job row
  input  logic [$clog2(S)-1:0]               wb_rd_idx,     // basis row / job index
  input  logic                               wb_rd_re,      // RE for a basis row
  // job lists (shared by all slices)
  input  logic                               start,
  input  logic [NC-1:0][S-1:0]               job_mask,
  input  logic [NC-1:0][S-1:0][AB-1:0]       job_bank,
  input  logic [NC-1:0][S-1:0][AA-1:0]       job_addr,
  // input GB read ports, one per line
  output logic [NC-1:0]                      rd_req,
  output logic [NC-1:0][AB-1:0]              rd_bank,
  output logic [NC-1:0][AA-1:0]              rd_addr,
  input  logic [NC-1:0]                      rd_gnt,
  input  logic [NC-1:0]                      rd_valid,
  input  logic [NC-1:0][(F+S-1)*ACT_W-1:0]   rd_data,
  output logic                               done,
  // accumulation and emission
  input  logic                               acc_load,
  input  logic                               acc_add,
  input  logic                               emit,
  input  logic [OA-1:0]                      emit_addr,
  input  logic                               relu,
  input  logic [3:0]                         shift,
  // output FIFO head
  input  logic                               fifo_pop,
  output logic [OA+F*OUT_W-1:0]              fifo_head,   // {addr, row}
  output logic                               fifo_empty,
  output logic                               fifo_full
);
  localparam int unsigned SW = S * BAS_W;

  // ---------------------------------------------------------- weight buffer
  logic [NC*SW-1:0] wb_word;
  weight_buffer #(.DEPTH(WBD), .WORD_W(NC*SW)) u_wb (
    .clk, .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_word));

  logic                  dv_q, dbasis_q, dre_q;
  logic [$clog2(S)-1:0]  didx_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv_q <= 1'b0; dbasis_q <= 1'b0; dre_q <= 1'b0; didx_q <= '0;
    end else begin
      dv_q <= wb_rd_en; dbasis_q <= wb_rd_basis; dre_q <= wb_rd_re; didx_q <= wb_rd_idx;
    end
  end

  // ---------------------------------------------------------- PE lines
  logic signed [NC-1:0][F-1:0][PSUM_W-1:0] psum;
  logic [NC-1:0] line_done;

  for (genvar c = 0; c < NC; c++) begin : g_line
    pe_line #(.F(F), .S(S), .AB(AB), .AA(AA)) u_line (
      .clk, .rst_n, .mode, .raw, .re_act,
      .bl_valid(dv_q && dbasis_q), .bl_re(dre_q), .bl_row(didx_q), .bl_data(wb_word[0 +: SW]),
      .jb_valid(dv_q && !dbasis_q), .jb_idx(didx_q), .jb_slot(wb_word[c*SW +: SW]),
      .start, .job_mask(job_mask[c]), .job_bank(job_bank[c]), .job_addr(job_addr[c]),
      .rd_req(rd_req[c]), .rd_bank(rd_bank[c]), .rd_addr(rd_addr[c]),
      .rd_gnt(rd_gnt[c]), .rd_valid(rd_valid[c]), .rd_data(rd_data[c]),
      .psum(psum[c]), .done(line_done[c]));
  end

  assign done = &line_done;

  // ---------------------------------------------------------- adder trees
  logic signed [F-1:0][ACC_W-1:0] col_sum;
  for (genvar f = 0; f < F; f++) begin : g_tree
    logic signed [NC-1:0][PSUM_W-1:0] col_in;
    for (genvar c = 0; c < NC; c++) begin : g_in
      assign col_in[c] = psum[c][f];
    end
    adder_tree #(.N(NC), .W_IN(PSUM_W), .W_OUT(ACC_W)) u_tree (.in(col_in), .sum(col_sum[f]));
  end

  // ---------------------------------------------------------- accumulation buffer
  logic signed [ACC_W-1:0] acc [F];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < F; f++) acc[f] <= '0;
    end else if (acc_load) begin
      for (int f = 0; f < F; f++) acc[f] <= col_sum[f];
    end else if (acc_add) begin
      for (int f = 0; f < F; f++) acc[f] <= acc[f] + col_sum[f];
    end
  end

  logic [F*OUT_W-1:0] row_out;
  always_comb begin
    for (int f = 0; f < F; f++) begin
      logic signed [ACC_W-1:0] v;
      v = acc[f] >>> shift;
      if (relu && v < 0) v = '0;
      row_out[f*OUT_W +: OUT_W] = sat_out(v);
    end
  end

  out_fifo #(.W(OA + F*OUT_W), .DEPTH(FD)) u_fifo (
    .clk, .rst_n, .push(emit), .wdata({emit_addr, row_out}), .pop(fifo_pop),
    .rdata(fifo_head), .full(fifo_full), .empty(fifo_empty));

endmodule
