// tb_delay_fifo: checks that the delay line returns each word exactly DEPTH
// accepted steps later, holds still while `en` is low, and starts from zeros.
//
// The paper names the FIFO and its length K; the depth tested is a free
// parameter.
module tb_delay_fifo;
  localparam int W = 15, DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [W-1:0] din = '0, dout;
  always #5 clk = ~clk;

  delay_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .en, .in_data(din), .out_data(dout));

  int checks = 0, failures = 0;
  logic [W-1:0] hist [$];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int s = 0; s < 600; s++) begin
      @(negedge clk);
      // output before this step = word accepted DEPTH steps ago (or reset zero)
      checks++;
      if (dout != ((hist.size() >= DEPTH) ? hist[hist.size() - DEPTH] : '0)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: got %h", s, dout);
      end
      en  <= ($urandom % 4) != 0;
      din <= W'($urandom);
      @(posedge clk);
      #1 if (en) hist.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
