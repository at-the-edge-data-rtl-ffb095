// delay_fifo: fixed-length delay line (the K-word FIFOs of the DCSTM
// datapath).
//
// A shift register DEPTH words deep. On every `en` step the input word enters
// and the word that entered DEPTH steps earlier leaves, so the output is the
// input delayed by exactly DEPTH samples. All stages reset to zero, so the
// first DEPTH outputs after reset are zeros. DEPTH must be at least 1; a
// zero delay is left out by the instantiating module.
//
// From the paper: a FIFO of K words offsets the bottom path before its
// transforms and the top path after them. Own choice: a shift register
// rather than a RAM with pointers (same behaviour, simplest form).
module delay_fifo #(
  parameter int W     = 15,
  parameter int DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] in_data,
  output logic [W-1:0] out_data
);

  if (DEPTH < 1) begin : g_bad_depth
    $error("delay_fifo: DEPTH must be at least 1");
  end

  begin : g_shift
    logic [W-1:0] stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else if (en) begin
        stage[0] <= in_data;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign out_data = stage[DEPTH-1];
  end

endmodule
