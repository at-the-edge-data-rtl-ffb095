// par2ser: parallel-to-serial converter between the parallel output of one
// DCSTM stage and the serial input of the next.
//
// When `load` is seen on an `en` step the M-word vector is captured; over the
// next M steps its words are presented one per step, word 0 first, with
// `out_first` marking word 0. The output stream is continuous: the next load
// is expected exactly M steps later, so a window's last word leaves on the
// step the next window is loaded. `out_valid` goes high with the first load
// and stays high.
//
// This converter is not drawn in the paper; it is this design's way to feed
// the serial-in inverse transforms and the serial recombination from
// parallel vectors.
module par2ser #(
  parameter int M = 128,
  parameter int W = 28
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         load,
  input  logic [W-1:0] in_vec [M],
  output logic         out_valid,
  output logic         out_first,
  output logic [W-1:0] out_data
);

  localparam int NW = $clog2(M);

  logic [W-1:0]  buffer [M];
  logic [NW-1:0] idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      for (int i = 0; i < M; i++) buffer[i] <= '0;
    end else if (en) begin
      out_first <= load;
      if (load) begin
        out_valid <= 1'b1;
        idx       <= '0;
        for (int i = 0; i < M; i++) buffer[i] <= in_vec[i];
      end else begin
        idx <= (32'(idx) == M - 1) ? '0 : idx + 1'b1;
      end
    end
  end

  assign out_data = buffer[idx];

endmodule
