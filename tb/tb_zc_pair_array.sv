// tb_zc_pair_array: writes pairs at random even addresses, keeps a model of
// the two arrays and reads every entry back through the synchronous port.
//
// The paper gives only the arrays' contents; the pair-wide write and the read
// port are this design's.
module tb_zc_pair_array;
  localparam int D_W = 27, POS_W = 16, PAIRS = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0;
  logic [5:0] wr_addr = '0, rd_addr = '0;
  logic [POS_W-1:0] wr_t1 = '0, wr_t2 = '0, rd_pos;
  logic [D_W-1:0] wr_v1 = '0, wr_v2 = '0, rd_val;

  zc_pair_array #(.D_W(D_W), .POS_W(POS_W), .PAIRS(PAIRS)) dut (
    .clk, .wr_en, .wr_addr, .wr_t1, .wr_t2, .wr_v1, .wr_v2, .rd_addr, .rd_pos, .rd_val);

  int checks = 0, failures = 0;
  logic [POS_W-1:0] mx [2*PAIRS];
  logic [D_W-1:0]   my [2*PAIRS];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every pair once, then overwrite random pairs
    for (int i = 0; i < PAIRS + 40; i++) begin
      int p;
      p = (i < PAIRS) ? i : int'($urandom % PAIRS);
      @(negedge clk);
      wr_en   <= 1'b1;
      wr_addr <= 6'(2 * p);
      wr_t1   <= POS_W'($urandom);
      wr_t2   <= POS_W'($urandom);
      wr_v1   <= D_W'($urandom);
      wr_v2   <= D_W'($urandom);
      @(posedge clk);
      #1;
      mx[2*p] = wr_t1; mx[2*p+1] = wr_t2; my[2*p] = wr_v1; my[2*p+1] = wr_v2;
    end
    @(negedge clk) wr_en <= 1'b0;
    for (int a = 0; a < 2 * PAIRS; a++) begin
      @(negedge clk) rd_addr <= 6'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_pos != mx[a] || rd_val != my[a]) begin
        failures++;
        $display("FAIL entry %0d: %h %h, expected %h %h", a, rd_pos, rd_val, mx[a], my[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
