// tb_zc_qualifier: drives hand-made derivative sequences through the
// qualifier (small array of 4 pairs) and checks every reported crossing,
// the pointer, the pair count, a rejected pair being overwritten, the
// mirrored polarity, clear, and overflow when the arrays are full.
//
// The three checks and the pointer moving back follow the paper; what counts
// as failing the last check is this design's choice and is tested as such.
module tb_zc_qualifier;
  import dcstm_pkg::*;
  localparam int D_W = 27, POS_W = 16, PAIRS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, polarity = 1'b0, in_valid = 1'b0;
  logic [D_W-2:0] th1 = 26'd100, th2 = 26'd200;
  logic signed [D_W-1:0] in_data = '0;
  logic wr_en, pair_valid, overflow;
  logic [2:0] wr_addr;
  logic [POS_W-1:0] wr_t1, wr_t2, pair_t1, pair_t2;
  logic [D_W-1:0] wr_v1, wr_v2;
  logic signed [D_W-1:0] pair_v1, pair_v2;
  logic [2:0] count;
  zc_state_e state;

  zc_qualifier #(.D_W(D_W), .POS_W(POS_W), .PAIRS(PAIRS)) dut (
    .clk, .rst_n, .clear, .polarity, .th1, .th2, .in_valid, .in_data,
    .wr_en, .wr_addr, .wr_t1, .wr_t2, .wr_v1, .wr_v2,
    .pair_valid, .pair_t1, .pair_t2, .pair_v1, .pair_v2, .count, .overflow, .state);

  int checks = 0, failures = 0;
  int exp_q [$];          // expected crossings: t1, v1, v2 (t2 = t1 + 1)
  int writes [$];         // addresses written

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (wr_en) writes.push_back(int'(wr_addr));
    if (pair_valid) begin
      if (exp_q.size() < 3) check(0, "unexpected crossing");
      else begin
        int et1, ev1, ev2;
        et1 = exp_q.pop_front(); ev1 = exp_q.pop_front(); ev2 = exp_q.pop_front();
        check(pair_t1 == POS_W'(et1) && pair_t2 == POS_W'(et1 + 1) &&
              pair_v1 == D_W'(ev1) && pair_v2 == D_W'(ev2),
              $sformatf("crossing (%0d,%0d)(%0d,%0d), expected (%0d,%0d)(%0d,%0d)",
                        pair_t1, pair_v1, pair_t2, pair_v2, et1, ev1, et1 + 1, ev2));
      end
    end
  end

  task automatic feed(int v);
    @(negedge clk);
    in_valid <= 1'b1;
    in_data  <= D_W'(v);
    @(negedge clk);
    in_valid <= 1'b0;        // a gap after each sample: positions count samples only
  endtask

  task automatic do_clear(bit pol);
    @(negedge clk);
    clear <= 1'b1; polarity <= pol;
    @(negedge clk);
    clear <= 1'b0;
    writes.delete();
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // A: threshold, sign change, last threshold two samples later
    exp_q.push_back(4); exp_q.push_back(120); exp_q.push_back(-80);
    feed(0); feed(50); feed(150); feed(300); feed(120); feed(-80); feed(-250); feed(-100); feed(0);
    check(count == 3'd1 && dut.ptr == 2, "count/pointer after A");
    // B: sign change that swings back (rejected), then an immediate qualification
    feed(150); feed(20); feed(-50);                       // positions 9..11, pair (10,11) stored
    @(negedge clk); check(dut.ptr == 4 && state == ZC_CHECK, "pair held while checking");
    feed(30);                                             // swung back: pointer returns
    @(negedge clk); check(dut.ptr == 2 && state == ZC_IDLE, "pointer moved back");
    exp_q.push_back(13); exp_q.push_back(400); exp_q.push_back(-300);
    feed(400); feed(-300);                                // positions 13, 14
    repeat (2) @(negedge clk);
    check(count == 3'd2 && dut.ptr == 4, "count/pointer after B");
    check(writes.size() == 3 && writes[1] == 2 && writes[2] == 2, "rejected pair overwritten");
    check(!overflow, "no overflow yet");
    // C: mirrored polarity after clear
    do_clear(1'b1);
    exp_q.push_back(1); exp_q.push_back(-20); exp_q.push_back(10);
    feed(-150); feed(-20); feed(10); feed(250); feed(0);
    repeat (2) @(negedge clk);
    check(count == 3'd1 && writes.size() == 1 && writes[0] == 0, "polarity 1 crossing");
    // D: fill the arrays and overflow
    do_clear(1'b0);
    for (int i = 0; i < PAIRS; i++) begin
      exp_q.push_back(3 * i + 1); exp_q.push_back(150); exp_q.push_back(-300);
      feed(0); feed(150); feed(-300);
    end
    check(count == 3'(PAIRS) && !overflow, "arrays full");
    feed(0); feed(150); feed(-300);
    @(negedge clk);
    check(overflow && count == 3'(PAIRS) && writes.size() == PAIRS, "overflow flagged, nothing written");
    check(exp_q.size() == 0, "all expected crossings seen");
    do_clear(1'b0);
    check(!overflow && count == 0 && dut.ptr == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
