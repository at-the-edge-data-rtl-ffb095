// tb_dcstm_path: runs the top (sin^2, post-delay 64) path on a stream of
// Gaussian pulses and compares its serial output with the analytic
// derivative of the tapered signal, d/dn [sin^2(pi n/M) x(n)], computed here
// in real arithmetic. Checks the path latency 2M + 5 + 64 = 325 steps and
// that the output carries a window-periodic taper (zero at the window edges
// for a constant input).
//
// The paper gives the structure of a path; its latency is this design's.
module tb_dcstm_path;
  import dcstm_pkg::*;
  localparam int  M = 128, LAT = 2 * M + 5 + 64, N = 6 * M;
  localparam real P = 3.14159265358979323846;
  localparam real TOL = 0.08;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0, in_first = 1'b0;
  logic signed [11:0] x = '0;
  logic ov;
  logic signed [25:0] od;

  dcstm_path #(.WIN(WIN_SIN2), .PRE_DELAY(0), .POST_DELAY(64)) dut (
    .clk, .rst_n, .en, .in_first, .in_data(x), .out_valid(ov), .out_data(od));

  int checks = 0, failures = 0;
  real c_pos [5] = '{40.0, 100.3, 200.7, 330.5, 420.2};

  function automatic real xv(real t);
    real s = 0.0;
    foreach (c_pos[i]) s += 9.0 * $exp(-((t - c_pos[i]) ** 2) / 8.0);
    if (t >= 5 * M) s += 3.0;                // constant tail
    return s;
  endfunction
  function automatic real dxv(real t);
    real s = 0.0;
    foreach (c_pos[i]) s += -9.0 * (t - c_pos[i]) / 4.0 * $exp(-((t - c_pos[i]) ** 2) / 8.0);
    return s;
  endfunction
  function automatic real ref_out(int t);
    real w, dw, tt;
    tt = real'(t);
    w  = $sin(P * tt / M) ** 2;
    dw = (P / M) * $sin(2.0 * P * tt / M);
    return dw * xv(tt) + w * dxv(tt);
  endfunction

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int taken = 0, outs = 0, first_out = -1;
  real max_err = 0.0;
  always @(posedge clk) if (rst_n && en) begin
    if (ov) begin
      real e;
      if (first_out < 0) first_out = taken;
      // skip the window where the constant tail starts (its step edge is not smooth)
      if (outs < N && !(outs >= 5 * M - 8 && outs < 5 * M + 8)) begin
        e = real'(od) / 1024.0 - ref_out(outs);
        if (e < 0) e = -e;
        if (e > max_err) max_err = e;
        checks++;
        if (e > TOL) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d] = %f, expected %f", outs, real'(od) / 1024.0, ref_out(outs));
        end
      end
      outs++;
    end
    taken++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int s = 0; s < N + LAT + 2; s++) begin
      @(negedge clk);
      en <= 1'b1;
      in_first <= (s == 0);
      x <= (s < N) ? 12'($rtoi($floor(xv(real'(s)) * 128.0 + 0.5))) : '0;
    end
    @(negedge clk) en <= 1'b0;
    checks++;
    if (first_out != LAT) begin failures++; $display("FAIL latency %0d, expected %0d", first_out, LAT); end
    $display("max error %f", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
