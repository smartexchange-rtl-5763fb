// output_gb: the output global buffer.
//
// Receives the finished output rows (DIM_F 8-bit activations per word) from
// the slices' output FIFOs and holds them until the DMA side reads them out.
// Two banks of DEPTH/2 words; the upper address part selects the bank.
// One write port (from the output collector), one read port with one cycle of
// latency (DMA side). Size from the source (2 KB x 2 banks).
module output_gb
  import se_pkg::*;
#(
  parameter int unsigned BANKS  = OUT_BANKS,
  parameter int unsigned DEPTH  = OUT_DEPTH,
  parameter int unsigned WORD_W = OUT_WORD_W
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
