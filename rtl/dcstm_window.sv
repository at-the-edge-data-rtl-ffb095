// dcstm_window: window taper stage of one DCSTM path (sine-squared or
// cosine-squared coefficient LUT followed by one multiplier).
//
// Each input sample is multiplied by the taper value for its position n in
// the current M-sample window: sin^2(pi*n/M) for the top path, cos^2(pi*n/M)
// for the bottom path. Over any sample the two tapers sum to one, which is
// what lets the two paths be added back together at the end. The taper LUT
// (M entries, LUT_W unsigned bits with LUT_F fraction bits) is computed at
// elaboration. The product is truncated (floor) to OUT_F fraction bits and
// saturated to OUT_W bits.
//
// Interface: every register advances only when `en` (one input sample) is
// high. `in_first` marks the sample at window position 0 and restarts the
// position counter; otherwise the counter wraps every M samples by itself.
// Timing: one register stage; out_data/out_first for a sample appear on the
// next `en` step.
//
// From the paper: the LUT tapers, their period tied to the window size M and
// the Cookiebox word sizes (input 12/7, LUT 9/8, product 15/10). Own choices:
// unsigned LUT words, floor + saturate, the single output register.
module dcstm_window
  import dcstm_pkg::*;
#(
  parameter window_e KIND  = WIN_SIN2,
  parameter int      M     = 128,
  parameter int      IN_W  = 12,
  parameter int      IN_F  = 7,
  parameter int      LUT_W = 9,
  parameter int      LUT_F = 8,
  parameter int      OUT_W = 15,
  parameter int      OUT_F = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_first,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_first,
  output logic signed [OUT_W-1:0] out_data
);

  localparam int PW    = IN_W + LUT_W + 1;
  localparam int SHIFT = IN_F + LUT_F - OUT_F;
  localparam int NW    = $clog2(M);

  // Taper LUT, one entry per window position.
  logic [LUT_W-1:0] lut [M];
  for (genvar n = 0; n < M; n++) begin : g_lut
    localparam logic [LUT_W-1:0] C = LUT_W'(quant(window_value(KIND, n, M), LUT_F));
    assign lut[n] = C;
  end

  logic [NW-1:0] cnt;
  logic [NW-1:0] pos;
  assign pos = in_first ? '0 : cnt;

  logic signed [PW-1:0] prod;
  logic signed [PW-1:0] shifted;
  assign prod    = PW'(in_data) * $signed({1'b0, lut[pos]});
  assign shifted = prod >>> SHIFT;

  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (OUT_W - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_first <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      cnt       <= (32'(pos) == M - 1) ? '0 : pos + 1'b1;
      out_first <= (pos == '0);
      if (shifted > MAXV)      out_data <= MAXV[OUT_W-1:0];
      else if (shifted < MINV) out_data <= MINV[OUT_W-1:0];
      else                     out_data <= shifted[OUT_W-1:0];
    end
  end

endmodule
