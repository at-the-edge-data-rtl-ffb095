// dcstm_freq_mult: frequency multiplication between a forward and an inverse
// transform of one DCSTM branch (the Frequency LUT and multipliers).
//
// Differentiating a cosine series turns each cos term of frequency k into a
// sin term scaled by -pi*k/M (per sample), and a sine series into a cosine
// series scaled by +pi*k/M. The DCT output index k is frequency k, while the
// DST output index k is frequency k+1 and the IDST input index m is frequency
// m+1. So this block multiplies each coefficient by its frequency weight and
// moves it to the index the following inverse transform expects:
//   SRC = TR_DCT (feeds the IDST): out[m] = -w(m+1) * in[m+1], out[M-1] = 0
//   SRC = TR_DST (feeds the IDCT): out[m] = +w(m)   * in[m-1], out[0]   = 0
// with w(k) = pi*k/(2M). The factor 1/2 is there because the DCT and DST
// branches of a path are summed and each already yields the derivative.
// The weights form an M-entry LUT of FREQ_W signed bits (FREQ_F fraction
// bits); products are truncated (floor) to OUT_F bits and saturated to OUT_W.
//
// Interface and timing: when `en` and `in_valid` are high the whole vector is
// multiplied (M multipliers in parallel) and registered; `out_valid` is high
// for the following step.
//
// From the paper: multiplication by a value proportional to frequency,
// between the parallel output of DCT/DST and the inverse transform, and the
// Cookiebox output word of 28/8 bits. Own choices: the exact weights, the
// index shift, the 1/2 factor and the LUT word size.
module dcstm_freq_mult
  import dcstm_pkg::*;
#(
  parameter transform_e SRC    = TR_DCT,
  parameter int         M      = 128,
  parameter int         IN_W   = 20,
  parameter int         IN_F   = 8,
  parameter int         FREQ_W = 16,
  parameter int         FREQ_F = 14,
  parameter int         OUT_W  = 28,
  parameter int         OUT_F  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_vec [M],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_vec [M]
);

  localparam int PW    = IN_W + FREQ_W + 1;
  localparam int SHIFT = IN_F + FREQ_F - OUT_F;

  // Signed weight applied at output index m, and the input index it reads.
  function automatic int weight(int m);
    if (SRC == TR_DCT) return (m == M - 1) ? 0 : quant(-PI * (m + 1) / (2.0 * M), FREQ_F);
    else               return (m == 0)     ? 0 : quant( PI * m       / (2.0 * M), FREQ_F);
  endfunction

  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (OUT_W - 1));

  logic signed [OUT_W-1:0] res [M];
  for (genvar m = 0; m < M; m++) begin : g_lane
    localparam logic signed [FREQ_W-1:0] WGT = FREQ_W'(weight(m));
    localparam int SRC_IDX = (SRC == TR_DCT) ? ((m == M - 1) ? m : m + 1)
                                             : ((m == 0) ? 0 : m - 1);
    logic signed [PW-1:0] prod;
    logic signed [PW-1:0] s;
    assign prod = PW'(in_vec[SRC_IDX]) * PW'(WGT);
    assign s    = prod >>> SHIFT;
    assign res[m] = (s > MAXV) ? MAXV[OUT_W-1:0] :
                    (s < MINV) ? MINV[OUT_W-1:0] : s[OUT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int m = 0; m < M; m++) out_vec[m] <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      if (in_valid)
        for (int m = 0; m < M; m++) out_vec[m] <= res[m];
    end
  end

  if (SHIFT < 0) begin : g_chk_shift
    $error("dcstm_freq_mult: OUT_F must not exceed IN_F + FREQ_F");
  end

endmodule
