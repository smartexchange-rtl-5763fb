// rebuild_engine: the rebuild engine (RE) of a PE line.
//
// A decomposed 3D filter is stored as a coefficient matrix Ce ((C*R) x S) and
// one basis matrix B (S x S). Row r of the filter's weights is
// W[r][x] = sum_i Ce[r][i] * B[i][x]. Every non-zero coefficient is a signed
// power of two, 2^-k, so each product is an arithmetic right shift of a basis
// element. The RE keeps B stationary in an S x S register file ("Basis RF"),
// keeps one coefficient row stationary, and produces W[r][x] for the column x
// selected by `col` with S shifters and an adder chain (one weight per cycle,
// as the PE line streams one rebuilt weight at a time to its MACs).
//
// MUX1 is the single load port, used in time division: `ld_type` says whether
// `ld_data` is a coefficient row (path 1), basis row `ld_row` (path 2), or an
// original weight row (path 3, for layers that were not decomposed). MUX2
// selects the rebuilt weight or the stored original weight; the last loaded
// row (coefficient or original) decides which.
//
// Timing: loads take effect at the clock edge; `weight` is combinational from
// the registers and `col`.
// Follows the source: basis RF of S x S, stationary coefficient row, shift-and-
// add, three MUX1 paths, MUX2 bypass. Own choices: the 4-bit coefficient code
// (see se_pkg), saturation of the rebuilt sum to 8 bits, reset to zero.
module rebuild_engine
  import se_pkg::*;
#(
  parameter int unsigned S = KS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // MUX1: time-division load port
  input  logic                      ld_valid,
  input  ld_type_e                  ld_type,
  input  logic [$clog2(S)-1:0]      ld_row,    // basis row index for LD_BASIS
  input  logic [S*BAS_W-1:0]        ld_data,   // LD_COEF uses bits [S*COEF_W-1:0]
  // column of the weight row to produce
  input  logic [$clog2(S)-1:0]      col,
  output logic signed [WGT_W-1:0]   weight,    // MUX2 output
  output logic                      raw_mode
);

  logic signed [BAS_W-1:0]  basis_rf [S][S];   // [row i][column x]
  logic        [COEF_W-1:0] coef     [S];
  logic signed [WGT_W-1:0]  raw      [S];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < S; i++) begin
        for (int x = 0; x < S; x++) basis_rf[i][x] <= '0;
        coef[i] <= {1'b0, COEF_ZERO_K};
        raw[i]  <= '0;
      end
      raw_mode <= 1'b0;
    end else if (ld_valid) begin
      unique case (ld_type)
        LD_BASIS: for (int x = 0; x < S; x++)
                    basis_rf[ld_row][x] <= ld_data[x*BAS_W +: BAS_W];
        LD_COEF: begin
          for (int i = 0; i < S; i++) coef[i] <= ld_data[i*COEF_W +: COEF_W];
          raw_mode <= 1'b0;
        end
        LD_RAW: begin
          for (int x = 0; x < S; x++) raw[x] <= ld_data[x*WGT_W +: WGT_W];
          raw_mode <= 1'b1;
        end
        default: ;
      endcase
    end
  end

  // shift-and-add: sum_i sign_i * (B[i][col] >>> k_i)
  logic signed [15:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < S; i++) begin
      logic signed [15:0] b, t;
      b = 16'(basis_rf[i][col]);
      t = b >>> coef[i][2:0];
      if (coef[i][2:0] != COEF_ZERO_K)
        sum = coef[i][3] ? sum - t : sum + t;
    end
  end

  assign weight = raw_mode ? raw[col] : sat_wgt(sum);

endmodule
