// tb_sdctm_transform: streams random windows into the DCT, DST, IDCT and IDST
// engines (M = 128, Cookiebox word sizes) and compares every output word with
// a reference product of the window and the coefficient matrix, evaluated
// here element by element from the transform equations (quantised to 18
// fraction bits, exact integer accumulation, floor, saturate). Checks that
// the result appears one step after the window's last word, that consecutive
// windows are computed without a gap, and that DCT followed by IDCT returns
// the window.
//
// The equations are the paper's, except that the DST's special scale is taken
// at k = M-1 (orthonormal form), as the design does.
module tb_sdctm_transform;
  import dcstm_pkg::*;
  localparam int M = 128, IN_W = 15, IN_F = 10, CW = 20, CF = 18;
  localparam int OW = 20, OF = 8;
  localparam real P = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0, in_valid = 1'b0, in_first = 1'b0;
  logic signed [IN_W-1:0] x = '0;
  logic v [4];
  logic signed [OW-1:0] y [4][M];

  for (genvar t = 0; t < 4; t++) begin : g_dut
    sdctm_transform #(.KIND(transform_e'(t)), .M(M), .IN_W(IN_W), .IN_F(IN_F), .COEF_W(CW),
                      .COEF_F(CF), .OUT_W(OW), .OUT_F(OF)) dut (
      .clk, .rst_n, .en, .in_valid, .in_first, .in_data(x), .out_valid(v[t]), .out_vec(y[t]));
  end

  int checks = 0, failures = 0;

  // Coefficient of input n, output k, straight from the equations.
  function automatic longint coef(int t, int n, int k);
    real c;
    case (t)
      0: c = ((k == 0) ? $sqrt(1.0 / M) : $sqrt(2.0 / M)) * $cos(P * k * (2 * n + 1) / (2.0 * M));
      1: c = ((k == M - 1) ? $sqrt(1.0 / M) : $sqrt(2.0 / M)) * $sin(P * (k + 1) * (2 * n + 1) / (2.0 * M));
      2: c = ((n == 0) ? $sqrt(1.0 / M) : $sqrt(2.0 / M)) * $cos(P * n * (2 * k + 1) / (2.0 * M));
      default: c = (n == M - 1) ? $sqrt(0.5 / M) * ((k % 2) ? -1.0 : 1.0)
                                : $sqrt(2.0 / M) * $sin(P * (2 * k + 1) * (n + 1) / (2.0 * M));
    endcase
    return longint'($floor(c * 262144.0 + 0.5));
  endfunction

  longint cm [4][M][M];
  int     win [M];

  function automatic longint expect_out(int t, int k);
    longint acc = 0, s;
    for (int n = 0; n < M; n++) acc += longint'(win[n]) * cm[t][n][k];
    s = acc >>> (IN_F + CF - OF);
    if (s > (1 << (OW - 1)) - 1) s = (1 << (OW - 1)) - 1;
    if (s < -(1 << (OW - 1))) s = -(1 << (OW - 1));
    return s;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4; t++)
      for (int n = 0; n < M; n++)
        for (int k = 0; k < M; k++) cm[t][n][k] = coef(t, n, k);
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int w = 0; w < 3; w++) begin
      for (int n = 0; n < M; n++) begin
        @(negedge clk);
        // window 0: random; window 1: a smooth pulse; window 2: full scale
        case (w)
          0: win[n] = int'($urandom % 32768) - 16384;
          1: win[n] = $rtoi(8000.0 * $exp(-((n - 50.3) ** 2) / 50.0));
          default: win[n] = (n % 2) ? 16383 : -16384;
        endcase
        en <= 1'b1; in_valid <= 1'b1; in_first <= (n == 0); x <= IN_W'(win[n]);
        @(posedge clk); #1;
        checks++;
        if (v[0] !== (n == M - 1)) begin
          failures++;
          $display("FAIL out_valid at window %0d word %0d", w, n);
        end
      end
      @(negedge clk);
      // one step after the last word: the result is there
      checks++;
      if (!(v[0] && v[1] && v[2] && v[3])) begin failures++; $display("FAIL no out_valid after window %0d", w); end
      for (int t = 0; t < 4; t++)
        for (int k = 0; k < M; k++) begin
          checks++;
          if (longint'(y[t][k]) != expect_out(t, k)) begin
            failures++;
            if (failures < 10) $display("FAIL transform %0d window %0d out[%0d] = %0d, expected %0d",
                                        t, w, k, y[t][k], expect_out(t, k));
          end
        end
      // DCT then IDCT (real arithmetic) gives the window back (pulse window)
      if (w == 1) begin
        real back;
        for (int n = 0; n < M; n += 9) begin
          back = 0.0;
          for (int k = 0; k < M; k++) back += real'(y[0][k]) / 256.0 * real'(cm[2][k][n]) / 262144.0;
          checks++;
          if ((back - real'(win[n]) / 1024.0) > 0.05 || (back - real'(win[n]) / 1024.0) < -0.05) begin
            failures++;
            $display("FAIL DCT/IDCT round trip at %0d: %f vs %f", n, back, real'(win[n]) / 1024.0);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
