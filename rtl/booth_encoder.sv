// booth_encoder: radix-4 Booth recoding of a signed activation.
//
// The bit-serial MAC spends one cycle per non-zero recoded digit of the
// activation, so recoding skips the zero bit-groups of an activation. Radix-4
// Booth turns an N-bit two's-complement value a into N/2 digits
// d_i in {-2,-1,0,+1,+2} with a = sum_i d_i * 4^i, where
// d_i = -2*a[2i+1] + a[2i] + a[2i-1] (a[-1] = 0).
// For each digit the encoder reports whether it is non-zero (`nz`), its sign
// (`neg`) and whether its magnitude is 2 (`two`). Purely combinational.
// The source names a Booth encoder inside each MAC and reports activation
// sparsity under 4-bit Booth encoding; radix-4 on a signed 8-bit activation is
// this design's reading of that.
module booth_encoder
  import se_pkg::*;
#(
  parameter int unsigned AW = ACT_W
) (
  input  logic [AW-1:0]   act,
  output logic [AW/2-1:0] nz,
  output logic [AW/2-1:0] neg,
  output logic [AW/2-1:0] two
);
  always_comb begin
    for (int i = 0; i < AW/2; i++) begin
      logic hi, mid, lo;
      hi  = act[2*i+1];
      mid = act[2*i];
      lo  = (i == 0) ? 1'b0 : act[2*i-1];
      unique case ({hi, mid, lo})
        3'b000, 3'b111: begin nz[i] = 1'b0; neg[i] = 1'b0; two[i] = 1'b0; end
        3'b001, 3'b010: begin nz[i] = 1'b1; neg[i] = 1'b0; two[i] = 1'b0; end
        3'b011:         begin nz[i] = 1'b1; neg[i] = 1'b0; two[i] = 1'b1; end
        3'b100:         begin nz[i] = 1'b1; neg[i] = 1'b1; two[i] = 1'b1; end
        default:        begin nz[i] = 1'b1; neg[i] = 1'b1; two[i] = 1'b0; end // 101, 110
      endcase
    end
  end
endmodule
