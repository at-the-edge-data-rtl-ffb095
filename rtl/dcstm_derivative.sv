// dcstm_derivative: streaming derivative by the discrete cosine and sine
// transform method (DCSTM).
//
// The input stream is copied into two paths. The top path tapers it with
// sin^2(pi n/M) and differentiates each M-sample window with the DCT/DST
// pair (dcstm_path). The bottom path tapers with cos^2(pi n/M), delays the
// result by K = M/2 samples and differentiates it the same way, so its
// windows straddle the top path's window boundaries. The top path's output is
// then delayed by the same K samples, which brings both paths back to the same
// input sample, and the two are added (final output, K in the word-size
// table). Because sin^2 + cos^2 = 1, the sum is the derivative of the
// untapered signal, and a feature on a window edge of one path lies near the
// middle of a window of the other.
//
// The output is the derivative per sample step (d x / d n), in the input's
// units, with OUT_F fraction bits.
//
// Interface: one input word per `en` step, continuously (the windows are
// counted in steps). `out_valid` qualifies `out_data` on each `en` step.
// Timing: the derivative at input sample t is on `out_data` during step
// t + LATENCY, LATENCY = 2M + K + 6 (326 steps with the defaults). Samples
// before the first one are taken as zero.
//
// From the paper: the two-path structure, the taper LUTs, both FIFOs, the
// window size M = 128 and the Cookiebox word sizes. Own choices: K = M/2,
// the scaling of the frequency weights and the pipeline registers.
//
// The assertions are switched off while rst_n is low (registers hold
// arbitrary values until the first clock under reset), so the linter sees
// rst_n used both as an asynchronous reset and as a synchronous signal;
// that use is by simulation-only assertions and has no effect on logic.
module dcstm_derivative
  import dcstm_pkg::*;
#(
  parameter int M      = 128,
  parameter int K      = M / 2,
  parameter int IN_W   = 12,   // (A)
  parameter int IN_F   = 7,
  parameter int WIN_W  = 9,    // (B, C)
  parameter int WIN_F  = 8,
  parameter int TAP_W  = 15,   // (E, F)
  parameter int TAP_F  = 10,
  parameter int COEF_W = 20,   // (D)
  parameter int COEF_F = 18,
  parameter int TR_W   = 20,   // (G)
  parameter int TR_F   = 8,
  parameter int FREQ_W = 16,
  parameter int FREQ_F = 14,
  parameter int FM_W   = 28,   // (H)
  parameter int FM_F   = 8,
  parameter int IT_W   = 25,   // (I)
  parameter int IT_F   = 10,
  parameter int SUM_W  = 26,   // (J)
  parameter int OUT_W  = 27    // (K), IT_F fraction bits
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);

  // Window framing: the very first sample after reset is window position 0.
  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   started <= 1'b0;
    else if (en)  started <= 1'b1;
  end

  logic                    top_v, bot_v;
  logic signed [SUM_W-1:0] top_d, bot_d;

  dcstm_path #(
    .WIN(WIN_SIN2), .M(M), .PRE_DELAY(0), .POST_DELAY(K),
    .IN_W(IN_W), .IN_F(IN_F), .WIN_W(WIN_W), .WIN_F(WIN_F), .TAP_W(TAP_W), .TAP_F(TAP_F),
    .COEF_W(COEF_W), .COEF_F(COEF_F), .TR_W(TR_W), .TR_F(TR_F), .FREQ_W(FREQ_W),
    .FREQ_F(FREQ_F), .FM_W(FM_W), .FM_F(FM_F), .IT_W(IT_W), .IT_F(IT_F), .SUM_W(SUM_W)
  ) u_top (
    .clk, .rst_n, .en, .in_first(!started), .in_data,
    .out_valid(top_v), .out_data(top_d)
  );

  dcstm_path #(
    .WIN(WIN_COS2), .M(M), .PRE_DELAY(K), .POST_DELAY(0),
    .IN_W(IN_W), .IN_F(IN_F), .WIN_W(WIN_W), .WIN_F(WIN_F), .TAP_W(TAP_W), .TAP_F(TAP_F),
    .COEF_W(COEF_W), .COEF_F(COEF_F), .TR_W(TR_W), .TR_F(TR_F), .FREQ_W(FREQ_W),
    .FREQ_F(FREQ_F), .FM_W(FM_W), .FM_F(FM_F), .IT_W(IT_W), .IT_F(IT_F), .SUM_W(SUM_W)
  ) u_bot (
    .clk, .rst_n, .en, .in_first(!started), .in_data,
    .out_valid(bot_v), .out_data(bot_d)
  );

  // Final recombining addition.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= top_v;
      out_data  <= OUT_W'(top_d) + OUT_W'(bot_d);
    end
  end

  // The bottom path starts K steps before the delayed top path.
  a_paths_aligned: assert property (@(posedge clk) disable iff (!rst_n) en && top_v |-> bot_v)
    else $error("dcstm_derivative: path misalignment");

  if (OUT_W <= SUM_W) begin : g_chk_w
    $error("dcstm_derivative: OUT_W must exceed SUM_W");
  end

endmodule
