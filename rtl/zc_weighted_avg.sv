// zc_weighted_avg: modified weighted-average estimate of a zero crossing's
// position from the two samples around it, (t1, v1) and (t2, v2).
//
// Instead of the exact interpolation t1 + (t2 - t1)|v1|/(|v1| + |v2|), the
// ratio of the two magnitudes is only bracketed by powers of two using
// shifts and comparisons, and the position is pulled towards the sample with
// the smaller magnitude by a fixed weight:
//   |v1| = 0 -> t1;   |v2| = 0 -> t2;   |v1| = |v2| -> (t1 + t2)/2
//   |v1| > |v2|:  |v1| <= 2|v2| -> (2 t2 + t1)/3,   <= 4|v2| -> (4 t2 + t1)/5,
//                 <= 8|v2| -> (8 t2 + t1)/9,        <= 16|v2| -> (16 t2 + t1)/17,
//                 else t2
//   |v2| > |v1|:  the same with t1 and t2 swapped.
// The division by 1, 2, 3, 5, 9 or 17 is a multiplication by a reciprocal
// from a six-entry LUT, round(2^RB / d), followed by rounding to TF fraction
// bits. A signed time-zero offset (TF fraction bits) is added to the result.
//
// Interface: `in_valid` with the two points; `out_valid` and `t_out` (an
// unsigned POS_W.TF fixed-point position, wrapping) one clock later.
//
// From the paper: the comparison ladder, the weights, reciprocal LUT and the
// time-zero adjustment. The printed algorithm tests |v1| >= |v2| before
// |v1| == |v2|, which would make the equal case unreachable; the text says
// equal magnitudes take the plain average, and that is what is done here.
// Own choices: TF = 8, RB = 30, round-half-up.
//
// The assertions are switched off while rst_n is low (registers hold
// arbitrary values until the first clock under reset), so the linter sees
// rst_n used both as an asynchronous reset and as a synchronous signal;
// that use is by simulation-only assertions and has no effect on logic.
module zc_weighted_avg #(
  parameter int D_W   = 27,
  parameter int POS_W = 16,
  parameter int TF    = 8,
  parameter int RB    = 30
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [POS_W-1:0]            t1,
  input  logic [POS_W-1:0]            t2,
  input  logic signed [D_W-1:0]       v1,
  input  logic signed [D_W-1:0]       v2,
  input  logic signed [POS_W+TF-1:0]  t_offset,
  output logic                        out_valid,
  output logic [POS_W+TF-1:0]         t_out
);

  localparam int NW = POS_W + 5;          // 17 * t fits
  localparam int RW = RB + 1;             // reciprocal word
  localparam int MW = NW + RW;            // product

  // Reciprocal LUT: index 0..5 -> d = 1, 2, 3, 5, 9, 17.
  function automatic logic [RW-1:0] recip(int i);
    int d;
    d = (i == 0) ? 1 : (i == 1) ? 2 : (1 << (i - 1)) + 1;
    return RW'(((64'd1 << RB) + 64'(d / 2)) / 64'(d));
  endfunction
  logic [RW-1:0] rlut [6];
  for (genvar i = 0; i < 6; i++) begin : g_rlut
    localparam logic [RW-1:0] R = recip(i);
    assign rlut[i] = R;
  end

  logic [D_W-1:0] a1, a2;
  assign a1 = v1[D_W-1] ? D_W'(-v1) : D_W'(v1);
  assign a2 = v2[D_W-1] ? D_W'(-v2) : D_W'(v2);

  // Weighted numerator and reciprocal index.
  logic [NW-1:0] num;
  logic [2:0]    ri;
  always_comb begin
    logic [D_W+4:0] big, sml;
    logic [NW-1:0]  tn, tf;            // near (smaller |v|) and far sample
    big = '0;
    sml = '0;
    tn  = '0;
    tf  = '0;
    num = '0;
    ri  = 3'd0;
    if (a1 == '0) begin
      num = NW'(t1);
    end else if (a2 == '0) begin
      num = NW'(t2);
    end else if (a1 == a2) begin
      num = NW'(t1) + NW'(t2);
      ri  = 3'd1;
    end else begin
      if (a1 > a2) begin
        big = (D_W+5)'(a1); sml = (D_W+5)'(a2); tn = NW'(t2); tf = NW'(t1);
      end else begin
        big = (D_W+5)'(a2); sml = (D_W+5)'(a1); tn = NW'(t1); tf = NW'(t2);
      end
      if (big <= (sml << 1))      begin num = (tn << 1) + tf; ri = 3'd2; end
      else if (big <= (sml << 2)) begin num = (tn << 2) + tf; ri = 3'd3; end
      else if (big <= (sml << 3)) begin num = (tn << 3) + tf; ri = 3'd4; end
      else if (big <= (sml << 4)) begin num = (tn << 4) + tf; ri = 3'd5; end
      else                        begin num = tn;             ri = 3'd0; end
    end
  end

  logic [MW-1:0] prod;
  logic [POS_W+TF-1:0] q;
  assign prod = MW'(num) * MW'(rlut[ri]);
  assign q    = (POS_W+TF)'((prod + (MW'(1) << (RB - TF - 1))) >> (RB - TF));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      t_out     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) t_out <= q + t_offset;
    end
  end

  // Algorithm precondition: the two points lie on opposite sides of zero.
  a_opposite_signs: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (v1 <= 0 && v2 >= 0) || (v2 <= 0 && v1 >= 0))
    else $error("zc_weighted_avg: points do not straddle zero");

endmodule
