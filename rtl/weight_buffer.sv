// weight_buffer: the distributed weight SRAM of one PE slice.
//
// Holds everything a slice's REs need for its filter: basis rows, coefficient
// rows and, for layers that are not decomposed, original weight rows. One word
// has one 24-bit slot per PE line, so one read feeds all DIM_C lines of the
// slice at once. The buffer is BANKS banks of DEPTH/BANKS words; the word
// address selects the bank (upper part) and the row in it, so the DMA side can
// refill one bank while the slice reads the other.
// Interface: one write port, one read port with one cycle of latency.
// Size from the source (2 KB x 2 banks per slice); word layout is own choice.
module weight_buffer
  import se_pkg::*;
#(
  parameter int unsigned BANKS  = WB_BANKS,
  parameter int unsigned DEPTH  = WB_DEPTH,
  parameter int unsigned WORD_W = WB_WORD_W
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [WORD_W-1:0]         wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic [WORD_W-1:0]         rd_data
);
  localparam int unsigned BD = DEPTH / BANKS;

  logic [WORD_W-1:0] mem [BANKS][BD];

  always_ff @(posedge clk) begin
    if (wr_en) mem[32'(wr_addr) / BD][32'(wr_addr) % BD] <= wr_data;
    if (rd_en) rd_data <= mem[32'(rd_addr) / BD][32'(rd_addr) % BD];
  end
endmodule
