// dcstm_peak_finder: streaming peak finder, DCSTM derivative followed by
// zero-crossing qualification and weighted-average position estimation.
//
// Samples of a detector waveform (for example time-of-flight spectra at one
// sample per step) stream into dcstm_derivative, which produces the
// derivative of the waveform with a fixed latency. Peaks of the waveform are
// zero crossings of the derivative: zc_qualifier accepts a crossing only
// after the derivative has exceeded th1, changed sign and passed -th2
// (mirrored for polarity = 1), stores the two samples around it in
// zc_pair_array and hands them to zc_weighted_avg, which returns the peak
// position with TF fraction bits.
//
// Positions count derivative samples from 0 after reset or `clear`; since
// the derivative stream starts with input sample 0, a position is the index
// of the input sample (plus `t_offset`). Derivative units: input units per
// sample, with 10 fraction bits (Cookiebox word sizes).
//
// Interface: `in_valid` is the sample strobe: one input word per step,
// continuous within a record (the transform windows count steps). Outputs:
// the derivative stream, each position estimate (`peak_valid`, `peak_t`),
// the number of stored pairs and an overflow flag, and a read port on the
// pair arrays. Timing: derivative of sample t appears on step t + 326 (2M +
// M/2 + 6); a peak estimate follows two clocks after the derivative sample
// that qualified it.
//
// The chain derivative -> qualified zero crossing -> weighted average, the
// three-threshold qualification and Algorithm 1's estimator follow the paper;
// the ports, the sample strobe, the array size of 32 pairs, the 16-bit
// positions and the overflow flag are this design's own choices.
module dcstm_peak_finder
  import dcstm_pkg::*;
#(
  parameter int M     = 128,          // transform window
  parameter int IN_W  = 12,           // input word (7 fraction bits)
  parameter int D_W   = 27,           // derivative word (10 fraction bits)
  parameter int POS_W = 16,           // data position counter
  parameter int PAIRS = 32,           // crossing pairs held
  parameter int TF    = 8             // fraction bits of the position estimate
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_data,
  // zero-crossing controls
  input  logic                        clear,
  input  logic                        polarity,
  input  logic [D_W-2:0]              th1,
  input  logic [D_W-2:0]              th2,
  input  logic signed [POS_W+TF-1:0]  t_offset,
  // derivative stream
  output logic                        deriv_valid,
  output logic signed [D_W-1:0]       deriv,
  // peak estimates
  output logic                        peak_valid,
  output logic [POS_W+TF-1:0]         peak_t,
  output logic [$clog2(PAIRS+1)-1:0]  pair_count,
  output logic                        overflow,
  // pair array read port
  input  logic [$clog2(2*PAIRS)-1:0]  rd_addr,
  output logic [POS_W-1:0]            rd_pos,
  output logic [D_W-1:0]              rd_val
);

  localparam int AW = $clog2(2 * PAIRS);

  logic                  d_v;
  logic signed [D_W-1:0] d;

  dcstm_derivative #(.M(M), .IN_W(IN_W), .OUT_W(D_W), .SUM_W(D_W - 1)) u_deriv (
    .clk, .rst_n, .en(in_valid), .in_data,
    .out_valid(d_v), .out_data(d)
  );

  assign deriv_valid = in_valid && d_v;
  assign deriv       = d;

  logic                  wr_en;
  logic [AW-1:0]         wr_addr;
  logic [POS_W-1:0]      wr_t1, wr_t2, p_t1, p_t2;
  logic [D_W-1:0]        wr_v1, wr_v2;
  logic                  p_v;
  logic signed [D_W-1:0] p_v1, p_v2;
  zc_state_e             zc_state;

  zc_qualifier #(.D_W(D_W), .POS_W(POS_W), .PAIRS(PAIRS)) u_qual (
    .clk, .rst_n, .clear, .polarity, .th1, .th2,
    .in_valid(deriv_valid), .in_data(d),
    .wr_en, .wr_addr, .wr_t1, .wr_t2, .wr_v1, .wr_v2,
    .pair_valid(p_v), .pair_t1(p_t1), .pair_t2(p_t2), .pair_v1(p_v1), .pair_v2(p_v2),
    .count(pair_count), .overflow, .state(zc_state)
  );

  zc_pair_array #(.D_W(D_W), .POS_W(POS_W), .PAIRS(PAIRS)) u_array (
    .clk, .wr_en, .wr_addr, .wr_t1, .wr_t2, .wr_v1, .wr_v2,
    .rd_addr, .rd_pos, .rd_val
  );

  zc_weighted_avg #(.D_W(D_W), .POS_W(POS_W), .TF(TF)) u_wavg (
    .clk, .rst_n, .in_valid(p_v), .t1(p_t1), .t2(p_t2), .v1(p_v1), .v2(p_v2),
    .t_offset, .out_valid(peak_valid), .t_out(peak_t)
  );

  logic unused;
  assign unused = ^zc_state;

endmodule
