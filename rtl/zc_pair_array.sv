// zc_pair_array: X-position and Y-value arrays of the zero-crossing finder.
//
// Two arrays of 2*PAIRS entries each: positions (POS_W bits) and derivative
// values (D_W bits). A qualified-or-pending crossing occupies two
// consecutive entries, the even one holding the sample before the sign change
// and the odd one the sample after it; both are written in one clock through
// the pair write port. A pair that later fails qualification is simply
// overwritten, because the qualifier moves its pointer back.
//
// Interface: write port from zc_qualifier (`wr_en`, even `wr_addr`); one
// synchronous read port (`rd_addr` -> `rd_pos`, `rd_val` one clock later)
// for whatever consumes the crossings downstream.
//
// From the paper: the two arrays of 2K entries, N-bit positions and
// derivative-wide values. Own choices: pair-wide write, synchronous read,
// no reset of the contents.
module zc_pair_array #(
  parameter int D_W   = 27,
  parameter int POS_W = 16,
  parameter int PAIRS = 32
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(2*PAIRS)-1:0] wr_addr,
  input  logic [POS_W-1:0]           wr_t1,
  input  logic [POS_W-1:0]           wr_t2,
  input  logic [D_W-1:0]             wr_v1,
  input  logic [D_W-1:0]             wr_v2,
  input  logic [$clog2(2*PAIRS)-1:0] rd_addr,
  output logic [POS_W-1:0]           rd_pos,
  output logic [D_W-1:0]             rd_val
);

  localparam int AW = $clog2(2 * PAIRS);

  // Even and odd entries live in separate banks so a pair is one write.
  logic [POS_W-1:0] x_even [PAIRS];
  logic [POS_W-1:0] x_odd  [PAIRS];
  logic [D_W-1:0]   y_even [PAIRS];
  logic [D_W-1:0]   y_odd  [PAIRS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      x_even[wr_addr[AW-1:1]] <= wr_t1;
      x_odd [wr_addr[AW-1:1]] <= wr_t2;
      y_even[wr_addr[AW-1:1]] <= wr_v1;
      y_odd [wr_addr[AW-1:1]] <= wr_v2;
    end
  end

  always_ff @(posedge clk) begin
    rd_pos <= rd_addr[0] ? x_odd[rd_addr[AW-1:1]] : x_even[rd_addr[AW-1:1]];
    rd_val <= rd_addr[0] ? y_odd[rd_addr[AW-1:1]] : y_even[rd_addr[AW-1:1]];
  end

  // The array has no reset; the check starts after the first clock, by which
  // time the writer's reset has cleared its write enable.
  logic chk_on = 1'b0;
  always_ff @(posedge clk) chk_on <= 1'b1;

  a_even_write: assert property (@(posedge clk) chk_on && wr_en |-> !wr_addr[0])
    else $error("zc_pair_array: pair written at an odd address");

endmodule
