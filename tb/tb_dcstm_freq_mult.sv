// tb_dcstm_freq_mult: applies random vectors to both frequency multipliers
// and compares each output with the weight and index mapping worked out here
// from w(k) = pi k / (2M): the DCT branch gives out[m] = -w(m+1) in[m+1],
// the DST branch out[m] = w(m) in[m-1], both with floor to 8 fraction bits.
// Also checks the one-step latency of out_valid.
//
// The weights and index mapping are this design's reading of 'multiply by a
// value proportional to frequency'; the word sizes are the paper's.
module tb_dcstm_freq_mult;
  import dcstm_pkg::*;
  localparam int M = 128;
  localparam real P = 3.14159265358979323846;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0, in_valid = 1'b0;
  logic signed [19:0] vin [M];
  logic vc, vs;
  logic signed [27:0] oc [M];
  logic signed [27:0] os [M];

  dcstm_freq_mult #(.SRC(TR_DCT)) u_c (.clk, .rst_n, .en, .in_valid, .in_vec(vin), .out_valid(vc), .out_vec(oc));
  dcstm_freq_mult #(.SRC(TR_DST)) u_s (.clk, .rst_n, .en, .in_valid, .in_vec(vin), .out_valid(vs), .out_vec(os));

  int checks = 0, failures = 0;

  function automatic longint w(real f);
    return longint'($floor(f * 16384.0 + 0.5));
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < M; m++) vin[m] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      for (int m = 0; m < M; m++) vin[m] = (r == 0) ? ((m % 2) ? 20'sh7ffff : 20'sh80000) : 20'($urandom);
      en <= 1'b1; in_valid <= 1'b1;
      @(posedge clk); #1;
      in_valid <= 1'b0;
      checks++;
      if (!vc || !vs) begin failures++; $display("FAIL out_valid missing"); end
      for (int m = 0; m < M; m++) begin
        longint ec, es;
        ec = (m == M - 1) ? 0 : (longint'(vin[m + 1]) * w(-P * (m + 1) / (2.0 * M))) >>> 14;
        es = (m == 0) ? 0 : (longint'(vin[m - 1]) * w(P * m / (2.0 * M))) >>> 14;
        checks++;
        if (longint'(oc[m]) != ec || longint'(os[m]) != es) begin
          failures++;
          if (failures < 10) $display("FAIL m=%0d: %0d %0d, expected %0d %0d", m, oc[m], os[m], ec, es);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (vc || vs) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
