// zc_qualifier: qualifies zero crossings of a streaming derivative and keeps
// the pointer into the crossing-pair arrays (first threshold comparator,
// change-of-sign checker, data position counter, last threshold comparator
// and array location controller).
//
// A peak of the original signal shows in its derivative as a swing from
// clearly positive, through zero, to clearly negative. With s = d (polarity
// 0, peaks) or s = -d (polarity 1, dips), each derivative sample d steps a
// three-state controller:
//   IDLE : s > th1                      -> ARMED   (first threshold)
//   ARMED: s <= 0                       -> sign change: the previous sample
//          and this one are written as a pair at the pointer, the pointer
//          moves on by two entries     -> CHECK   (or straight to IDLE with
//          a qualified crossing if s < -th2 already)
//   CHECK: s < -th2                     -> qualified crossing, IDLE
//          s > 0 (swung back)           -> disqualified: pointer moves back
//          by two so the pair is overwritten; ARMED if s > th1, else IDLE
// The data position counter numbers the derivative samples from 0 after
// reset or `clear`. A qualified crossing is reported on `pair_valid` with its
// two points (t1, v1) and (t2, v2), t2 = t1 + 1, for the position estimator.
// When the arrays are full a further sign change is not stored; `overflow`
// is set and the controller returns to IDLE.
//
// Interface: one derivative sample per step with `in_valid`; the pair write
// port (`wr_en`, `wr_addr` = even entry, two entries written at once) goes to
// zc_pair_array. `count` is the number of qualified pairs held.
// Timing: pair_valid and the write are registered: they appear one clock
// after the sample that caused them.
//
// From the paper: the three checks, the pair storage at a pointer, moving
// the pointer back on a failed last check and the (low)/(high) mirror case.
// Own choices: what counts as failing the last check (the derivative
// returning to its first sign), the overflow rule, the widths and `clear`.
//
// The assertions are switched off while rst_n is low (registers hold
// arbitrary values until the first clock under reset), so the linter sees
// rst_n used both as an asynchronous reset and as a synchronous signal;
// that use is by simulation-only assertions and has no effect on logic.
module zc_qualifier
  import dcstm_pkg::*;
#(
  parameter int D_W   = 27,  // derivative word
  parameter int POS_W = 16,  // data position counter
  parameter int PAIRS = 32   // pairs the arrays hold (2*PAIRS entries)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       polarity,
  input  logic        [D_W-2:0]      th1,
  input  logic        [D_W-2:0]      th2,
  input  logic                       in_valid,
  input  logic signed [D_W-1:0]      in_data,
  // pair write port
  output logic                       wr_en,
  output logic [$clog2(2*PAIRS)-1:0] wr_addr,
  output logic [POS_W-1:0]           wr_t1,
  output logic [POS_W-1:0]           wr_t2,
  output logic [D_W-1:0]             wr_v1,
  output logic [D_W-1:0]             wr_v2,
  // qualified crossing
  output logic                       pair_valid,
  output logic [POS_W-1:0]           pair_t1,
  output logic [POS_W-1:0]           pair_t2,
  output logic signed [D_W-1:0]      pair_v1,
  output logic signed [D_W-1:0]      pair_v2,
  output logic [$clog2(PAIRS+1)-1:0] count,
  output logic                       overflow,
  output zc_state_e                  state
);

  localparam int AW = $clog2(2 * PAIRS);
  localparam int PW = $clog2(2 * PAIRS + 1);

  logic [PW-1:0]         ptr;      // next free entry (even)
  logic [POS_W-1:0]      pos;      // position of the current sample
  logic signed [D_W-1:0] prev;     // previous sample
  logic [POS_W-1:0]      c_t1, c_t2;
  logic signed [D_W-1:0] c_v1, c_v2;

  // Sign-folded sample and thresholds, one bit wider so -d cannot overflow.
  logic signed [D_W:0] s, pth1, nth2;
  assign s    = polarity ? -(D_W+1)'(in_data) : (D_W+1)'(in_data);
  assign pth1 = (D_W+1)'({2'b00, th1});
  assign nth2 = -(D_W+1)'({2'b00, th2});

  logic pass_first, sign_change, pass_last, swung_back, full;
  assign pass_first  = s > pth1;     // first threshold comparator
  assign sign_change = s <= 0;       // change-of-sign checker (in ARMED)
  assign pass_last   = s < nth2;     // last threshold comparator
  assign swung_back  = s > 0;
  assign full        = 32'(ptr) >= 2 * PAIRS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ZC_IDLE;
      ptr        <= '0;
      pos        <= '0;
      prev       <= '0;
      count      <= '0;
      overflow   <= 1'b0;
      wr_en      <= 1'b0;
      wr_addr    <= '0;
      wr_t1      <= '0;
      wr_t2      <= '0;
      wr_v1      <= '0;
      wr_v2      <= '0;
      pair_valid <= 1'b0;
      pair_t1    <= '0;
      pair_t2    <= '0;
      pair_v1    <= '0;
      pair_v2    <= '0;
      c_t1       <= '0;
      c_t2       <= '0;
      c_v1       <= '0;
      c_v2       <= '0;
    end else if (clear) begin
      state      <= ZC_IDLE;
      ptr        <= '0;
      pos        <= '0;
      prev       <= '0;
      count      <= '0;
      overflow   <= 1'b0;
      wr_en      <= 1'b0;
      pair_valid <= 1'b0;
    end else begin
      wr_en      <= 1'b0;
      pair_valid <= 1'b0;
      if (in_valid) begin
        pos  <= pos + 1'b1;
        prev <= in_data;
        unique case (state)
          ZC_IDLE: if (pass_first) state <= ZC_ARMED;
          ZC_ARMED: begin
            if (sign_change) begin
              if (full) begin
                overflow <= 1'b1;
                state    <= ZC_IDLE;
              end else begin
                wr_en   <= 1'b1;
                wr_addr <= AW'(ptr);
                wr_t1   <= pos - 1'b1;
                wr_t2   <= pos;
                wr_v1   <= prev;
                wr_v2   <= in_data;
                c_t1    <= pos - 1'b1;
                c_t2    <= pos;
                c_v1    <= prev;
                c_v2    <= in_data;
                ptr     <= ptr + PW'(2);
                if (pass_last) begin
                  pair_valid <= 1'b1;
                  pair_t1    <= pos - 1'b1;
                  pair_t2    <= pos;
                  pair_v1    <= prev;
                  pair_v2    <= in_data;
                  count      <= count + 1'b1;
                  state      <= ZC_IDLE;
                end else begin
                  state <= ZC_CHECK;
                end
              end
            end
          end
          ZC_CHECK: begin
            if (pass_last) begin
              pair_valid <= 1'b1;
              pair_t1    <= c_t1;
              pair_t2    <= c_t2;
              pair_v1    <= c_v1;
              pair_v2    <= c_v2;
              count      <= count + 1'b1;
              state      <= ZC_IDLE;
            end else if (swung_back) begin
              ptr   <= ptr - PW'(2);
              state <= pass_first ? ZC_ARMED : ZC_IDLE;
            end
          end
          default: state <= ZC_IDLE;
        endcase
      end
    end
  end

  a_ptr_even: assert property (@(posedge clk) disable iff (!rst_n) !ptr[0])
    else $error("zc_qualifier: pointer must stay even");
  a_ptr_count: assert property (@(posedge clk) disable iff (!rst_n)
                                (state != ZC_CHECK) |-> 32'(ptr) == 2 * 32'(count))
    else $error("zc_qualifier: pointer and pair count disagree");

endmodule
