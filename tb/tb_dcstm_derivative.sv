// tb_dcstm_derivative: streams Gaussian pulses of both signs (some centred on
// top-path window edges, some on bottom-path window edges, some narrow) with
// random stalls of the sample strobe, and compares every output sample with
// the analytic derivative. Checks the latency of 2M + K + 6 = 326 steps and
// that a constant input gives a zero derivative (the two tapers cancel).
//
// The reference is computed independently in real arithmetic; the paper gives
// no latency or error bound, so the latency checked is this design's and the
// tolerance (0.08) is chosen from the word sizes.
module tb_dcstm_derivative;
  localparam int  M = 128, LAT = 2 * M + M / 2 + 6, N = 8 * M;
  localparam real TOL = 0.08;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0;
  logic signed [11:0] x = '0;
  logic ov;
  logic signed [26:0] od;

  dcstm_derivative dut (.clk, .rst_n, .en, .in_data(x), .out_valid(ov), .out_data(od));

  int checks = 0, failures = 0;
  real c_pos [8] = '{64.0, 128.0, 191.6, 256.4, 300.1, 400.9, 512.0, 575.5};
  real c_amp [8] = '{10.0, -8.0, 12.0, 9.0, -11.0, 7.0, 10.0, -10.0};
  real c_sig [8] = '{2.0, 2.0, 1.5, 3.0, 1.3, 4.0, 2.0, 1.3};

  function automatic real xv(real t);
    real s = (t >= 700.0) ? -4.0 : 0.0;         // constant level after a smooth step
    if (t >= 690.0 && t < 700.0) s = -4.0 * (1.0 - $cos(3.14159265358979 * (t - 690.0) / 10.0)) / 2.0;
    foreach (c_pos[i]) s += c_amp[i] * $exp(-((t - c_pos[i]) ** 2) / (2.0 * c_sig[i] ** 2));
    return s;
  endfunction
  function automatic real dxv(real t);
    real s = 0.0;
    if (t >= 690.0 && t < 700.0) s = -4.0 * 3.14159265358979 / 20.0 * $sin(3.14159265358979 * (t - 690.0) / 10.0);
    foreach (c_pos[i])
      s += -c_amp[i] * (t - c_pos[i]) / (c_sig[i] ** 2) * $exp(-((t - c_pos[i]) ** 2) / (2.0 * c_sig[i] ** 2));
    return s;
  endfunction

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int taken = 0, outs = 0, first_out = -1, stalls = 0;
  real max_err = 0.0;
  always @(posedge clk) if (rst_n && en) begin
    if (ov) begin
      real e;
      if (first_out < 0) first_out = taken;
      if (outs < N) begin
        e = real'(od) / 1024.0 - dxv(real'(outs));
        if (e < 0) e = -e;
        if (e > max_err) max_err = e;
        checks++;
        if (e > TOL) begin
          failures++;
          if (failures < 10) $display("FAIL d[%0d] = %f, expected %f", outs, real'(od) / 1024.0, dxv(real'(outs)));
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
      if (($urandom % 5) == 0) begin en <= 1'b0; stalls++; @(negedge clk); end
      en <= 1'b1;
      x <= 12'($rtoi($floor(xv(real'(s)) * 128.0 + 0.5)));
    end
    @(negedge clk) en <= 1'b0;
    checks++;
    if (first_out != LAT) begin failures++; $display("FAIL latency %0d, expected %0d", first_out, LAT); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("max error %f over %0d samples, %0d stalls", max_err, outs, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
