// tb_dcstm_window: streams random samples through the sin^2 and cos^2 taper
// stages and compares each registered product with floor(x * w(n) / 2^5),
// w(n) = round(256 sin^2(pi n/128)) or round(256 cos^2(pi n/128)), computed
// here from the closed form. Also checks that the window marker follows the
// 128-sample period and that the two tapers add up to one.
//
// LUT word sizes are the paper's Cookiebox values; the taper phase is this
// design's.
module tb_dcstm_window;
  import dcstm_pkg::*;
  localparam int M = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0, in_first = 1'b0;
  logic signed [11:0] x = '0;
  logic fs, fc;
  logic signed [14:0] ys, yc;

  dcstm_window #(.KIND(WIN_SIN2)) u_s (.clk, .rst_n, .en, .in_first, .in_data(x), .out_first(fs), .out_data(ys));
  dcstm_window #(.KIND(WIN_COS2)) u_c (.clk, .rst_n, .en, .in_first, .in_data(x), .out_first(fc), .out_data(yc));

  int checks = 0, failures = 0;

  function automatic int wq(bit cosine, int n);
    real s = $sin(3.14159265358979 * n / M);
    real v = cosine ? $cos(3.14159265358979 * n / M) ** 2 : s * s;
    return $rtoi($floor(v * 256.0 + 0.5));
  endfunction
  function automatic int floordiv32(int p);
    return (p >= 0) ? p / 32 : -((-p + 31) / 32);
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int s = 0; s < 3 * M + 17; s++) begin
      int xi;
      @(negedge clk);
      xi = int'($urandom % 4096) - 2048;
      if (s % 5 == 4) begin en <= 1'b0; @(negedge clk); end   // a stalled step
      en <= 1'b1;
      in_first <= (s == 0);
      x <= 12'(xi);
      @(posedge clk); #1;
      checks++;
      if (ys != 15'(floordiv32(xi * wq(0, n))) || yc != 15'(floordiv32(xi * wq(1, n))) ||
          fs != (n == 0) || fc != (n == 0)) begin
        failures++;
        if (failures < 10)
          $display("FAIL n=%0d x=%0d: sin2 %0d (exp %0d), cos2 %0d (exp %0d)", n, xi, ys,
                   floordiv32(xi * wq(0, n)), yc, floordiv32(xi * wq(1, n)));
      end
      checks++;
      if (wq(0, n) + wq(1, n) != 256) begin failures++; $display("FAIL tapers do not sum to one"); end
      n = (n + 1) % M;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
