// mac: bit-serial multiply-accumulate unit of a PE line.
//
// The weight is held in a register; the activation is Booth-recoded
// (booth_encoder) and each cycle one non-zero digit d_i is consumed: the
// shifter forms weight * 2^(2i) (times 2 for |d_i| = 2), the adder adds or
// subtracts it into the psum register. A multiplication therefore takes as
// many cycles as the activation has non-zero Booth digits, at least one, so
// zero bit-groups of activations cost no time.
//
// Interface/timing: `start` (only when !busy) latches `weight`/`act` and
// consumes the first digit in the same cycle; `busy` is high while digits
// remain. A multiply with n non-zero digits keeps busy high for n-1 cycles
// after the start cycle. `clr` zeroes the psum (before any add in that cycle).
// psum stays local to the MAC across the whole 2D convolution (output
// stationary within the line), as in the source; widths are own choices.
module mac
  import se_pkg::*;
#(
  parameter int unsigned PW = PSUM_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     start,
  input  logic signed [WGT_W-1:0]  weight,
  input  logic signed [ACT_W-1:0]  act,
  output logic                     busy,
  output logic signed [PW-1:0]     psum
);
  localparam int unsigned ND = ACT_W / 2;

  logic [ND-1:0] nz_n, neg_n, two_n;
  booth_encoder #(.AW(ACT_W)) u_booth (.act(act), .nz(nz_n), .neg(neg_n), .two(two_n));

  logic signed [WGT_W-1:0] w_q;
  logic [ND-1:0] mask_q, neg_q, two_q;

  // digit source this cycle
  logic signed [WGT_W-1:0] w_s;
  logic [ND-1:0] mask_s, neg_s, two_s;
  always_comb begin
    if (start) begin w_s = weight; mask_s = nz_n;   neg_s = neg_n; two_s = two_n; end
    else       begin w_s = w_q;    mask_s = mask_q; neg_s = neg_q; two_s = two_q; end
  end

  // lowest remaining non-zero digit
  logic [$clog2(ND)-1:0] sel;
  logic                  have;
  always_comb begin
    sel  = '0;
    have = 1'b0;
    for (int i = ND-1; i >= 0; i--)
      if (mask_s[i]) begin sel = i[$clog2(ND)-1:0]; have = 1'b1; end
  end

  // shifter and adder
  logic signed [PW-1:0] term, base;
  always_comb begin
    term = PW'(w_s) <<< ({sel, 1'b0} + (two_s[sel] ? 1 : 0));
    if (neg_s[sel]) term = -term;
    base = clr ? '0 : psum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum   <= '0;
      w_q    <= '0;
      mask_q <= '0;
      neg_q  <= '0;
      two_q  <= '0;
    end else begin
      psum <= (have && (start || busy)) ? base + term : base;
      if (start) begin
        w_q   <= weight;
        neg_q <= neg_n;
        two_q <= two_n;
      end
      if (start || busy) mask_q <= have ? (mask_s & ~(ND'(1) << sel)) : '0;
    end
  end

  assign busy = |mask_q;

endmodule
