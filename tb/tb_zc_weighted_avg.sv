// tb_zc_weighted_avg: compares the estimator with a real-valued evaluation
// of the weighted-average ladder (equal magnitudes -> plain average) for
// chosen corner cases and random pairs that straddle zero; the result may
// differ from the exact quotient by at most one LSB of the 8 fraction bits.
//
// The ladder of weights is Algorithm 1 of the paper; the equal case follows
// the paper's text rather than its listing.
module tb_zc_weighted_avg;
  localparam int D_W = 27, POS_W = 16, TF = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0;
  logic [POS_W-1:0] t1 = '0, t2 = '0;
  logic signed [D_W-1:0] v1 = '0, v2 = '0;
  logic signed [POS_W+TF-1:0] t_offset = '0;
  logic out_valid;
  logic [POS_W+TF-1:0] t_out;

  zc_weighted_avg #(.D_W(D_W), .POS_W(POS_W), .TF(TF)) dut (
    .clk, .rst_n, .in_valid, .t1, .t2, .v1, .v2, .t_offset, .out_valid, .t_out);

  int checks = 0, failures = 0;

  function automatic real model(real a, real b, real ta, real tb);
    // a = |v1|, b = |v2|
    if (a == 0.0) return ta;
    if (b == 0.0) return tb;
    if (a == b) return (ta + tb) / 2.0;
    if (a > b) begin
      if (a <= 2 * b) return (2 * tb + ta) / 3.0;
      if (a <= 4 * b) return (4 * tb + ta) / 5.0;
      if (a <= 8 * b) return (8 * tb + ta) / 9.0;
      if (a <= 16 * b) return (16 * tb + ta) / 17.0;
      return tb;
    end
    if (b <= 2 * a) return (2 * ta + tb) / 3.0;
    if (b <= 4 * a) return (4 * ta + tb) / 5.0;
    if (b <= 8 * a) return (8 * ta + tb) / 9.0;
    if (b <= 16 * a) return (16 * ta + tb) / 17.0;
    return ta;
  endfunction

  task automatic one(int a1, int a2, bit neg_first, int t, int off);
    real exp_t, got, d;
    @(negedge clk);
    in_valid <= 1'b1;
    t1 <= POS_W'(t);
    t2 <= POS_W'(t + 1);
    v1 <= neg_first ? -D_W'(a1) : D_W'(a1);
    v2 <= neg_first ? D_W'(a2) : -D_W'(a2);
    t_offset <= (POS_W+TF)'(off);
    @(posedge clk); #1;
    in_valid <= 1'b0;
    exp_t = model(real'(a1), real'(a2), real'(t), real'(t + 1)) + real'(off) / 256.0;
    got = real'(t_out) / 256.0;
    d = got - exp_t;
    checks++;
    if (!out_valid || d > 1.0 / 256.0 || d < -1.0 / 256.0) begin
      failures++;
      $display("FAIL |v1|=%0d |v2|=%0d t1=%0d off=%0d: got %f expected %f", a1, a2, t, off, got, exp_t);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // every rung of the ladder, both orders
    one(0, 5, 1, 100, 0);   one(5, 0, 1, 100, 0);   one(7, 7, 0, 200, 0);
    one(10, 6, 1, 300, 0);  one(10, 5, 0, 300, 0);  one(12, 4, 1, 310, 0);
    one(30, 4, 1, 320, 0);  one(60, 4, 0, 330, 0);  one(65, 4, 1, 340, 0);
    one(6, 10, 1, 400, 0);  one(5, 10, 0, 400, 0);  one(4, 12, 1, 410, 0);
    one(4, 30, 1, 420, 0);  one(4, 60, 0, 430, 0);  one(4, 65, 1, 440, 0);
    one(3, 9, 0, 65530, 0); one(9, 3, 1, 0, 0);      one(9, 3, 1, 50, -300);
    one(100, 70, 1, 1234, 640);
    for (int i = 0; i < 300; i++)
      one(int'($urandom % 100000), int'($urandom % 100000) + 1, 1'($urandom), int'($urandom % 60000),
          int'($urandom % 2000) - 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
