// out_fifo: synchronous FIFO between a PE slice's accumulation buffer and the
// output global buffer.
//
// Each output row of a slice is produced only after many cycles of
// computation, so a short FIFO per slice lets the slices share one narrow
// output-GB write port: results wait here until the output collector takes
// them. Circular buffer of DEPTH entries with read/write pointers and a count.
// Interface: push when !full, pop when !empty; `rdata` is the head entry
// (first-word fall-through). Writes and reads take effect at the clock edge.
// The FIFO's role is from the source; depth and width are this design's.
module out_fifo #(
  parameter int unsigned W     = 73,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         full,
  output logic         empty
);
  localparam int unsigned AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign full  = (cnt == (AW+1)'(DEPTH));
  assign empty = (cnt == '0);
  assign rdata = mem[rp];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
