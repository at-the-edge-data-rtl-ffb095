// dcstm_path: one of the two rows of the DCSTM derivative.
//
// The input stream is tapered by sin^2 (top path) or cos^2 (bottom path),
// optionally delayed, and cut into M-sample windows. Each window goes through
// two branches that both differentiate it: DCT -> frequency weights -> IDST,
// and DST -> frequency weights -> IDCT. The two branch results are added
// ("first addition") and the window's M derivative samples leave serially,
// one per sample step, optionally delayed again.
//
//   window -> [PRE_DELAY fifo] -> DCT -> freq -> p2s -> IDST --+
//                              \-> DST -> freq -> p2s -> IDCT --+-> add -> p2s -> [POST_DELAY fifo]
//
// Windows are framed by the taper stage (its `out_first`), not by the
// delayed data: with PRE_DELAY = K the transforms of the bottom path see
// windows offset by K samples against the top path's windows.
//
// Interface: all state advances on `en` (one input sample). `in_first` marks
// window position 0 of the taper (only needed once after reset; the window
// counter wraps on its own). `out_valid` is high while `out_data` carries
// path output; sample t of the input leaves on step t + 2M + 5 + POST_DELAY.
//
// From the paper: the branch structure, the taper, the FIFOs and the
// word sizes of Table 2 (Cookiebox defaults). Own choices: the
// parallel-to-serial converters and the register stages between blocks.
//
// The assertions are switched off while rst_n is low (registers hold
// arbitrary values until the first clock under reset), so the linter sees
// rst_n used both as an asynchronous reset and as a synchronous signal;
// that use is by simulation-only assertions and has no effect on logic.
module dcstm_path
  import dcstm_pkg::*;
#(
  parameter window_e WIN        = WIN_SIN2,
  parameter int      M          = 128,
  parameter int      PRE_DELAY  = 0,
  parameter int      POST_DELAY = 64,
  parameter int      IN_W       = 12,   // (A) input signal
  parameter int      IN_F       = 7,
  parameter int      WIN_W      = 9,    // (B, C) taper LUT
  parameter int      WIN_F      = 8,
  parameter int      TAP_W      = 15,   // (E, F) taper products
  parameter int      TAP_F      = 10,
  parameter int      COEF_W     = 20,   // (D) transform LUT
  parameter int      COEF_F     = 18,
  parameter int      TR_W       = 20,   // (G) DCT/DST outputs
  parameter int      TR_F       = 8,
  parameter int      FREQ_W     = 16,   // frequency LUT
  parameter int      FREQ_F     = 14,
  parameter int      FM_W       = 28,   // (H) frequency products
  parameter int      FM_F       = 8,
  parameter int      IT_W       = 25,   // (I) IDCT/IDST outputs
  parameter int      IT_F       = 10,
  parameter int      SUM_W      = 26    // (J) first addition, IT_F fraction bits
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_first,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [SUM_W-1:0] out_data
);

  // ---- taper ----
  logic                    w_first;
  logic signed [TAP_W-1:0] w_data;
  logic                    run;       // first window boundary seen

  dcstm_window #(
    .KIND(WIN), .M(M), .IN_W(IN_W), .IN_F(IN_F), .LUT_W(WIN_W), .LUT_F(WIN_F),
    .OUT_W(TAP_W), .OUT_F(TAP_F)
  ) u_window (
    .clk, .rst_n, .en, .in_first, .in_data,
    .out_first(w_first), .out_data(w_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              run <= 1'b0;
    else if (en && w_first)  run <= 1'b1;
  end

  // ---- optional delay before the transforms ----
  logic [TAP_W-1:0] d_data;
  if (PRE_DELAY > 0) begin : g_pre
    delay_fifo #(.W(TAP_W), .DEPTH(PRE_DELAY)) u_pre (
      .clk, .rst_n, .en, .in_data(w_data), .out_data(d_data)
    );
  end else begin : g_no_pre
    assign d_data = w_data;
  end

  logic fwd_valid;
  assign fwd_valid = run || w_first;

  // ---- forward transforms ----
  logic                   dct_v, dst_v;
  logic signed [TR_W-1:0] dct_vec [M];
  logic signed [TR_W-1:0] dst_vec [M];

  sdctm_transform #(
    .KIND(TR_DCT), .M(M), .IN_W(TAP_W), .IN_F(TAP_F), .COEF_W(COEF_W), .COEF_F(COEF_F),
    .OUT_W(TR_W), .OUT_F(TR_F)
  ) u_dct (
    .clk, .rst_n, .en, .in_valid(fwd_valid), .in_first(w_first), .in_data(d_data),
    .out_valid(dct_v), .out_vec(dct_vec)
  );

  sdctm_transform #(
    .KIND(TR_DST), .M(M), .IN_W(TAP_W), .IN_F(TAP_F), .COEF_W(COEF_W), .COEF_F(COEF_F),
    .OUT_W(TR_W), .OUT_F(TR_F)
  ) u_dst (
    .clk, .rst_n, .en, .in_valid(fwd_valid), .in_first(w_first), .in_data(d_data),
    .out_valid(dst_v), .out_vec(dst_vec)
  );

  // ---- frequency multiplication ----
  logic                   fc_v, fs_v;
  logic signed [FM_W-1:0] fc_vec [M];
  logic signed [FM_W-1:0] fs_vec [M];

  dcstm_freq_mult #(
    .SRC(TR_DCT), .M(M), .IN_W(TR_W), .IN_F(TR_F), .FREQ_W(FREQ_W), .FREQ_F(FREQ_F),
    .OUT_W(FM_W), .OUT_F(FM_F)
  ) u_freq_c (
    .clk, .rst_n, .en, .in_valid(dct_v), .in_vec(dct_vec), .out_valid(fc_v), .out_vec(fc_vec)
  );

  dcstm_freq_mult #(
    .SRC(TR_DST), .M(M), .IN_W(TR_W), .IN_F(TR_F), .FREQ_W(FREQ_W), .FREQ_F(FREQ_F),
    .OUT_W(FM_W), .OUT_F(FM_F)
  ) u_freq_s (
    .clk, .rst_n, .en, .in_valid(dst_v), .in_vec(dst_vec), .out_valid(fs_v), .out_vec(fs_vec)
  );

  // ---- back to serial for the inverse transforms ----
  logic            sc_v, sc_first, ss_v, ss_first;
  logic [FM_W-1:0] sc_data, ss_data;
  logic [FM_W-1:0] fc_u [M];
  logic [FM_W-1:0] fs_u [M];
  for (genvar m = 0; m < M; m++) begin : g_cast_f
    assign fc_u[m] = fc_vec[m];
    assign fs_u[m] = fs_vec[m];
  end

  par2ser #(.M(M), .W(FM_W)) u_ser_c (
    .clk, .rst_n, .en, .load(fc_v), .in_vec(fc_u),
    .out_valid(sc_v), .out_first(sc_first), .out_data(sc_data)
  );
  par2ser #(.M(M), .W(FM_W)) u_ser_s (
    .clk, .rst_n, .en, .load(fs_v), .in_vec(fs_u),
    .out_valid(ss_v), .out_first(ss_first), .out_data(ss_data)
  );

  // ---- inverse transforms ----
  logic                   idst_v, idct_v;
  logic signed [IT_W-1:0] idst_vec [M];
  logic signed [IT_W-1:0] idct_vec [M];

  sdctm_transform #(
    .KIND(TR_IDST), .M(M), .IN_W(FM_W), .IN_F(FM_F), .COEF_W(COEF_W), .COEF_F(COEF_F),
    .OUT_W(IT_W), .OUT_F(IT_F)
  ) u_idst (
    .clk, .rst_n, .en, .in_valid(sc_v), .in_first(sc_first), .in_data(sc_data),
    .out_valid(idst_v), .out_vec(idst_vec)
  );

  sdctm_transform #(
    .KIND(TR_IDCT), .M(M), .IN_W(FM_W), .IN_F(FM_F), .COEF_W(COEF_W), .COEF_F(COEF_F),
    .OUT_W(IT_W), .OUT_F(IT_F)
  ) u_idct (
    .clk, .rst_n, .en, .in_valid(ss_v), .in_first(ss_first), .in_data(ss_data),
    .out_valid(idct_v), .out_vec(idct_vec)
  );

  // ---- first addition (J) ----
  logic             j_v;
  logic [SUM_W-1:0] j_vec [M];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_v <= 1'b0;
      for (int m = 0; m < M; m++) j_vec[m] <= '0;
    end else if (en) begin
      j_v <= idst_v;
      if (idst_v)
        for (int m = 0; m < M; m++) j_vec[m] <= SUM_W'(idst_vec[m]) + SUM_W'(idct_vec[m]);
    end
  end

  // ---- serial path output, optional delay ----
  logic             o_v, o_first;
  logic [SUM_W-1:0] o_data;
  par2ser #(.M(M), .W(SUM_W)) u_ser_o (
    .clk, .rst_n, .en, .load(j_v), .in_vec(j_vec),
    .out_valid(o_v), .out_first(o_first), .out_data(o_data)
  );

  logic [SUM_W:0] post;
  if (POST_DELAY > 0) begin : g_post
    delay_fifo #(.W(SUM_W + 1), .DEPTH(POST_DELAY)) u_post (
      .clk, .rst_n, .en, .in_data({o_v, o_data}), .out_data(post)
    );
  end else begin : g_no_post
    assign post = {o_v, o_data};
  end
  assign out_valid = post[SUM_W];
  assign out_data  = post[SUM_W-1:0];

  // The two branches of a path run in lock step.
  a_branch_lockstep: assert property (@(posedge clk) disable iff (!rst_n) en |-> idst_v == idct_v)
    else $error("dcstm_path: branch misalignment");

  logic unused;
  assign unused = ^{dst_v, fs_v, o_first};

endmodule
