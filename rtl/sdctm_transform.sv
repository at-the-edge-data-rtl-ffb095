// sdctm_transform: streaming matrix transform engine (SDCTM), serial in,
// parallel out. One parameterised module gives the DCT, DST, IDCT or IDST.
//
// The transform y = C * x of an M-word window is computed column by column
// as the words arrive: when word n arrives, column n of the M x M coefficient
// matrix is presented to M multipliers, each multiplying the same input word,
// and each product is added to its own accumulator. After the M-th word the
// M accumulators hold the whole output vector, which is truncated (floor) to
// OUT_F fraction bits, saturated to OUT_W bits and presented in parallel.
// No cycle is lost between windows: the first product of a window replaces
// the accumulator contents instead of adding to them.
//
// Coefficients (orthonormal forms, N = M):
//   DCT : C[n][k] = s_k cos(pi k(2n+1)/2M),      s_0 = sqrt(1/M), else sqrt(2/M)
//   DST : C[n][k] = s_k sin(pi (k+1)(2n+1)/2M),  s_{M-1} = sqrt(1/M), else sqrt(2/M)
//   IDCT: C[n][k] = s_n cos(pi n(2k+1)/2M),      s_0 = sqrt(1/M), else sqrt(2/M)
//   IDST: C[n][k] = sqrt(2/M) sin(pi (2k+1)(n+1)/2M) for n < M-1,
//         C[M-1][k] = sqrt(1/2M) (-1)^k
// where n is the input index and k the output index. Every entry of these
// matrices is +-sqrt(2/M) cos(pi j/2M) for some j, or one of the constants
// sqrt(1/M), sqrt(1/2M). The matrix is therefore stored as a 4M-entry ROM
// of sqrt(2/M) cos(pi j/2M) (COEF_W bits, COEF_F fraction bits) plus the
// constants, and lane k of column n reads the entry its index j selects. The
// column the multipliers see is the same as the paper's full M x M LUT.
// M must be a power of two.
//
// Interface: state advances only on `en` (one sample step) with `in_valid`.
// `in_first` marks word 0 of a window. `out_valid` is high for the one step
// after the last word of a window; `out_vec` holds that window's result
// until the next window completes.
// Timing: the result of a window is available one step after its last word.
//
// From the paper: the column-per-word multiply-accumulate structure, the
// transform equations and the word sizes (Cookiebox: LUT 20/18, DCT/DST out
// 20/8, IDCT/IDST out 25/10). Own choices: the compressed ROM, the DST
// scale exception at k = M-1 instead of k = 0 (see the block's notes), full
// precision accumulation with one truncation at the output, no pipelining.
module sdctm_transform
  import dcstm_pkg::*;
#(
  parameter transform_e KIND   = TR_DCT,
  parameter int         M      = 128,
  parameter int         IN_W   = 15,
  parameter int         IN_F   = 10,
  parameter int         COEF_W = 20,
  parameter int         COEF_F = 18,
  parameter int         OUT_W  = 20,
  parameter int         OUT_F  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_vec [M]
);

  localparam int NW    = $clog2(M);
  localparam int JW    = NW + 2;                 // index into the 4M-entry ROM
  localparam int PW    = IN_W + COEF_W;          // product width
  localparam int AW    = PW + NW + 1;            // accumulator width
  localparam int SHIFT = IN_F + COEF_F - OUT_F;

  // sqrt(2/M) cos(pi j / 2M), j = 0 .. 4M-1
  logic signed [COEF_W-1:0] cos_rom [4*M];
  for (genvar j = 0; j < 4 * M; j++) begin : g_rom
    localparam logic signed [COEF_W-1:0] C =
      COEF_W'(quant($sqrt(2.0 / M) * $cos(PI * j / (2.0 * M)), COEF_F));
    assign cos_rom[j] = C;
  end
  localparam logic signed [COEF_W-1:0] S_FULL = COEF_W'(quant($sqrt(1.0 / M), COEF_F));
  localparam logic signed [COEF_W-1:0] S_HALF = COEF_W'(quant($sqrt(0.5 / M), COEF_F));

  logic [NW-1:0] cnt;
  logic [NW-1:0] col;
  assign col = in_first ? '0 : cnt;

  // Column `col` of the coefficient matrix, one word per output lane.
  logic signed [COEF_W-1:0] coef [M];
  for (genvar k = 0; k < M; k++) begin : g_col
    localparam logic [JW-1:0] KC  = JW'(k);
    localparam logic [JW-1:0] MC  = JW'(M);
    logic [JW-1:0] c;
    logic [JW-1:0] j;
    assign c = JW'(col);
    always_comb begin
      j       = '0;
      coef[k] = '0;
      unique case (KIND)
        TR_DCT: begin
          j = KC * ((c << 1) + 1'b1);
          coef[k] = (k == 0) ? S_FULL : cos_rom[j];
        end
        TR_DST: begin
          j = (KC + 1'b1) * ((c << 1) + 1'b1) - MC;
          coef[k] = (k == M - 1) ? (col[0] ? -S_FULL : S_FULL) : cos_rom[j];
        end
        TR_IDCT: begin
          j = c * ((KC << 1) + 1'b1);
          coef[k] = (col == '0) ? S_FULL : cos_rom[j];
        end
        TR_IDST: begin
          j = ((KC << 1) + 1'b1) * (c + 1'b1) - MC;
          coef[k] = (32'(col) == M - 1) ? ((k % 2 == 1) ? -S_HALF : S_HALF) : cos_rom[j];
        end
        default: ;
      endcase
    end
  end

  localparam logic signed [AW-1:0] MAXV = AW'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(64'sd1 <<< (OUT_W - 1));

  function automatic logic signed [OUT_W-1:0] scale_sat(logic signed [AW-1:0] a);
    logic signed [AW-1:0] s;
    s = a >>> SHIFT;
    if (s > MAXV) return MAXV[OUT_W-1:0];
    if (s < MINV) return MINV[OUT_W-1:0];
    return s[OUT_W-1:0];
  endfunction

  logic signed [AW-1:0] acc [M];
  logic signed [AW-1:0] sum [M];
  for (genvar k = 0; k < M; k++) begin : g_mac
    logic signed [PW-1:0] prod;
    assign prod   = PW'(in_data) * PW'(coef[k]);
    assign sum[k] = ((col == '0) ? '0 : acc[k]) + AW'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      for (int k = 0; k < M; k++) begin
        acc[k]     <= '0;
        out_vec[k] <= '0;
      end
    end else if (en) begin
      out_valid <= in_valid && (32'(col) == M - 1);
      if (in_valid) begin
        cnt <= col + 1'b1;
        for (int k = 0; k < M; k++) acc[k] <= sum[k];
        if (32'(col) == M - 1)
          for (int k = 0; k < M; k++) out_vec[k] <= scale_sat(sum[k]);
      end
    end
  end

  if (M != (1 << NW)) begin : g_chk_m
    $error("sdctm_transform: M must be a power of two");
  end
  if (SHIFT < 0) begin : g_chk_shift
    $error("sdctm_transform: OUT_F must not exceed IN_F + COEF_F");
  end

endmodule
