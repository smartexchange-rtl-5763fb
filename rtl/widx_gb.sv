// widx_gb: the weight index global buffer.
//
// Holds the 1-bit direct index of the coefficient matrices at row (vector)
// granularity: one bit per (PE line, kernel row) of a channel group, 1 when
// that coefficient row has any non-zero element. One word covers the DIM_C x S
// rows of one channel group, so a single read gives the index selector the
// weight side of a whole pass step. One write port, one read port with one
// cycle of latency. The depth is not given by the source (own choice: 512).
module widx_gb
  import se_pkg::*;
#(
  parameter int unsigned DEPTH = WIDX_DEPTH,
  parameter int unsigned W     = WIDX_W
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [W-1:0]              wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic [W-1:0]              rd_data
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
