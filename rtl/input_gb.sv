// input_gb: the input global buffer with its zero-row detector and bank MUX.
//
// BANKS banks of DEPTH words; one word is one input row segment of DIM_F+S-1
// activations, the amount a PE line's FIFO takes for one 1D convolution.
// Rows of input channel ch live in bank ch mod BANKS, so the DIM_C lines of a
// 2D CONV pass (consecutive channels) read from different banks in parallel.
//
// "==0" detector: when a row is written (by the DMA side), the buffer also
// stores a flag saying whether the row is all zeros. The flags are the input
// index read by the index selector (FLAG_PORTS combinational flag reads), so a
// zero input row is skipped before it is ever read.
//
// Row reads: NP request ports (one per PE line). Each bank serves one port per
// cycle, the lowest-numbered requesting port wins (the bank MUX); the granted
// port gets its row on rd_data one cycle after rd_gnt, with rd_valid.
// Sizes are from the source (16 KB x 32 banks, 8-bit activations); the word
// format, the write-time zero detection and the fixed-priority arbitration are
// this design's choices.
module input_gb
  import se_pkg::*;
#(
  parameter int unsigned BANKS      = IN_BANKS,
  parameter int unsigned DEPTH      = IN_DEPTH,
  parameter int unsigned WORD_W     = ROW_LEN * ACT_W,
  parameter int unsigned NP         = DIM_C,
  parameter int unsigned FLAG_PORTS = DIM_C * KS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // write side (DMA)
  input  logic                              wr_en,
  input  logic [$clog2(BANKS)-1:0]          wr_bank,
  input  logic [$clog2(DEPTH)-1:0]          wr_addr,
  input  logic [WORD_W-1:0]                 wr_data,
  // zero-flag reads (input index)
  input  logic [FLAG_PORTS-1:0][$clog2(BANKS)-1:0] fl_bank,
  input  logic [FLAG_PORTS-1:0][$clog2(DEPTH)-1:0] fl_addr,
  output logic [FLAG_PORTS-1:0]             fl_zero,
  // row reads
  input  logic [NP-1:0]                     rd_req,
  input  logic [NP-1:0][$clog2(BANKS)-1:0]  rd_bank,
  input  logic [NP-1:0][$clog2(DEPTH)-1:0]  rd_addr,
  output logic [NP-1:0]                     rd_gnt,
  output logic [NP-1:0]                     rd_valid,
  output logic [NP-1:0][WORD_W-1:0]         rd_data
);
  logic [WORD_W-1:0] mem  [BANKS][DEPTH];
  logic [DEPTH-1:0]  zflag [BANKS];

  // bank arbitration: lowest requesting port per bank
  always_comb begin
    logic [BANKS-1:0] taken;
    taken  = '0;
    rd_gnt = '0;
    for (int p = 0; p < NP; p++)
      if (rd_req[p] && !taken[rd_bank[p]]) begin
        rd_gnt[p]         = 1'b1;
        taken[rd_bank[p]] = 1'b1;
      end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr] <= wr_data;
    for (int p = 0; p < NP; p++)
      if (rd_gnt[p]) rd_data[p] <= mem[rd_bank[p]][rd_addr[p]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= '0;
      for (int b = 0; b < BANKS; b++) zflag[b] <= '1;   // empty buffer reads as zero
    end else begin
      rd_valid <= rd_gnt;
      if (wr_en) zflag[wr_bank][wr_addr] <= (wr_data == '0);   // the "==0" detector
    end
  end

  always_comb
    for (int i = 0; i < FLAG_PORTS; i++) fl_zero[i] = zflag[fl_bank[i]][fl_addr[i]];

endmodule
