// tb_dcstm_peak_finder: end-to-end test of the streaming peak finder at its
// default size (M = 128, Cookiebox word sizes, 32 crossing pairs).
//
// The stimulus is a sum of Gaussian pulses whose derivative and peak
// positions are known in closed form. Record 1 holds positive pulses (some
// off the sample grid, some on it, some on a top or bottom window edge, one
// double pulse whose dip must be rejected) and is streamed with random
// gaps in the sample strobe. Record 2 follows after a `clear`, with
// polarity = 1, a time-zero offset and 36 negative pulses, more than the
// arrays hold. Checked: the derivative against the analytic one, the
// latency of the first derivative sample, each position estimate against
// the true peak, the number of estimates, overflow, and the stored pairs.
// Each mechanism (stall, qualify, disqualify, overflow, polarity switch,
// offset) must occur at least once.
//
// The pulse stimulus mimics the paper's generated Gaussian data set; the
// numbers of pulses and their positions are chosen here.
module tb_dcstm_peak_finder;
  import dcstm_pkg::*;

  localparam int    M       = 128;
  localparam int    LAT     = 2 * M + M / 2 + 6;
  localparam int    N1      = 700;          // record 1 length
  localparam int    N2      = 36 * 30 + 60; // record 2 length
  localparam int    NT      = N1 + N2;
  localparam real   DSCALE  = 1024.0;       // derivative fraction bits
  localparam real   TH1     = 0.5;
  localparam real   TH2     = 1.8;
  localparam real   OFFSET2 = 2.5;
  localparam real   DERIV_TOL = 0.08;       // absolute, input units per sample
  localparam real   POS_TOL   = 0.35;       // samples

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                in_valid = 1'b0;
  logic signed [11:0]  in_data = '0;
  logic                clear = 1'b0, polarity = 1'b0;
  logic [25:0]         th1, th2;
  logic signed [23:0]  t_offset = '0;
  logic                deriv_valid, peak_valid, overflow;
  logic signed [26:0]  deriv;
  logic [23:0]         peak_t;
  logic [5:0]          pair_count;
  logic [5:0]          rd_addr = '0;
  logic [15:0]         rd_pos;
  logic [26:0]         rd_val;

  dcstm_peak_finder dut (
    .clk, .rst_n, .in_valid, .in_data, .clear, .polarity, .th1, .th2, .t_offset,
    .deriv_valid, .deriv, .peak_valid, .peak_t, .pair_count, .overflow,
    .rd_addr, .rd_pos, .rd_val
  );

  int checks = 0, failures = 0;

  // ---------------- stimulus model ----------------
  real c_pos [$];   // pulse centres (global sample index)
  real c_amp [$];   // signed amplitude
  real c_sig [$];
  real peaks1 [$];  // expected peak guesses, record 1
  real peaks2 [$];

  function automatic real xval(real t);
    real s = 0.0;
    foreach (c_pos[i]) s += c_amp[i] * $exp(-((t - c_pos[i]) ** 2) / (2.0 * c_sig[i] ** 2));
    return s;
  endfunction
  function automatic real dxval(real t);
    real s = 0.0;
    foreach (c_pos[i])
      s += -c_amp[i] * (t - c_pos[i]) / (c_sig[i] ** 2)
           * $exp(-((t - c_pos[i]) ** 2) / (2.0 * c_sig[i] ** 2));
    return s;
  endfunction
  // Zero of the analytic derivative near a guess (bisection).
  function automatic real true_peak(real g);
    real lo = g - 1.0, hi = g + 1.0, mid;
    real flo = dxval(lo);
    for (int i = 0; i < 40; i++) begin
      mid = (lo + hi) / 2.0;
      if ((dxval(mid) > 0) == (flo > 0)) begin lo = mid; flo = dxval(mid); end
      else hi = mid;
    end
    return (lo + hi) / 2.0;
  endfunction
  function automatic logic signed [11:0] quant_in(real v);
    int q = $rtoi($floor(v * 128.0 + 0.5));
    if (q > 2047) q = 2047;
    if (q < -2048) q = -2048;
    return 12'(q);
  endfunction

  task automatic add_pulse(real c, real a, real s);
    c_pos.push_back(c); c_amp.push_back(a); c_sig.push_back(s);
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_qualify = 0, n_disqualify = 0, n_overflow = 0;
  int n_polarity = 0, n_offset = 0;

  // ---------------- monitor ----------------
  int   didx = 0;          // global derivative sample index
  int   first_deriv_step = -1;
  int   base = 0;          // derivative index at the last clear
  int   rec = 1;
  real  max_err = 0.0;
  real  sq_sum = 0.0;
  int   n_est1 = 0, n_est2 = 0;
  logic [6:0] ptr_q = '0;

  int   vsteps = 0;          // samples taken by the DUT so far
  always @(posedge clk) if (rst_n) begin
    if (in_valid) vsteps++;
    if (in_valid && deriv_valid) begin
      real got, exp_d, err;
      if (first_deriv_step < 0) begin
        first_deriv_step = vsteps - 1;
        checks++;
        if (first_deriv_step != LAT) begin
          failures++;
          $display("FAIL latency: first derivative on step %0d, expected %0d", first_deriv_step, LAT);
        end
      end
      if (didx < NT) begin
        got   = real'(deriv) / DSCALE;
        exp_d = dxval(real'(didx));
        err   = (got > exp_d) ? got - exp_d : exp_d - got;
        if (err > max_err) max_err = err;
        checks++;
        if (err > DERIV_TOL) begin
          failures++;
          if (failures < 10) $display("FAIL deriv[%0d] = %f, expected %f", didx, got, exp_d);
        end
      end
      didx++;
    end
    // pointer moved back = a pair was disqualified
    if (dut.u_qual.ptr < ptr_q && !clear) n_disqualify++;
    ptr_q <= dut.u_qual.ptr;
    if (peak_valid) begin
      real est, best, e;
      est = real'(peak_t) / 256.0 + real'(base);
      if (rec == 2) est -= OFFSET2;
      best = 1.0e9;
      if (rec == 1) foreach (peaks1[i]) begin
        e = est - true_peak(peaks1[i]);
        if ((e < 0 ? -e : e) < (best < 0 ? -best : best)) best = e;
      end else foreach (peaks2[i]) begin
        e = est - true_peak(peaks2[i]);
        if ((e < 0 ? -e : e) < (best < 0 ? -best : best)) best = e;
      end
      sq_sum += best * best;
      checks++;
      if ((best < 0 ? -best : best) > POS_TOL) begin
        failures++;
        $display("FAIL peak estimate %f is %f samples from the nearest true peak", est, best);
      end
      if (rec == 1) n_est1++; else n_est2++;
      n_qualify++;
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- driver ----------------
  initial begin
    logic signed [11:0] xs [NT];
    // record 1: positive pulses, sigma 2 unless noted
    add_pulse(40.3, 10.0, 2.0);   peaks1.push_back(40.3);
    add_pulse(127.6, 10.0, 2.0);  peaks1.push_back(127.6);  // top window edge
    add_pulse(192.25, 10.0, 2.0); peaks1.push_back(192.25); // bottom window edge
    add_pulse(260.5, 10.0, 2.0);  peaks1.push_back(260.5);
    add_pulse(330.0, 10.0, 2.0);  peaks1.push_back(330.0);  // on the grid
    add_pulse(400.8, 10.0, 2.0);  peaks1.push_back(400.8);
    add_pulse(470.0, 6.0, 2.0);                              // double pulse:
    add_pulse(477.0, 8.0, 2.0);   peaks1.push_back(477.0);  // dip is rejected
    add_pulse(540.4, 10.0, 1.3);  peaks1.push_back(540.4);
    add_pulse(600.7, 10.0, 1.3);  peaks1.push_back(600.7);
    // record 2: negative pulses, more than the arrays hold
    for (int i = 0; i < 36; i++) begin
      real c;
      c = real'(N1 + 30 + 30 * i) + 0.1 * real'(i % 7);
      add_pulse(c, -9.0, 1.5);
      peaks2.push_back(c);
    end
    for (int t = 0; t < NT; t++) xs[t] = quant_in(xval(real'(t)));

    th1 = 26'($rtoi(TH1 * DSCALE));
    th2 = 26'($rtoi(TH2 * DSCALE));
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    for (int s = 0; s < NT + LAT + 4; s++) begin
      // switch to record 2 when its first derivative sample is next
      if (s == N1 + LAT) begin
        in_valid <= 1'b0;
        clear    <= 1'b1;
        polarity <= 1'b1;
        t_offset <= 24'($rtoi(OFFSET2 * 256.0));
        @(posedge clk);
        clear <= 1'b0;
        base = N1;
        rec  = 2;
        n_polarity++;
        n_offset++;
      end
      // record 1 runs with random gaps in the sample strobe
      if (s < N1 + LAT && ($urandom % 6) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
        n_stall++;
      end
      in_valid <= 1'b1;
      in_data  <= (s < NT) ? xs[s] : '0;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);

    // estimates per record: all of record 1, only what fits of record 2
    checks++;
    if (n_est1 != peaks1.size()) begin
      failures++;
      $display("FAIL record 1: %0d estimates, expected %0d", n_est1, peaks1.size());
    end
    checks++;
    if (n_est2 != 32 || !overflow || pair_count != 6'd32) begin
      failures++;
      $display("FAIL record 2: %0d estimates, overflow %0b, count %0d", n_est2, overflow, pair_count);
    end
    if (overflow) n_overflow++;

    // the stored pairs straddle zero (polarity 1: negative then positive)
    for (int a = 0; a < 64; a += 2) begin
      logic [15:0] p0;
      logic signed [26:0] v0;
      rd_addr <= 6'(a);
      @(posedge clk); @(negedge clk);
      p0 = rd_pos; v0 = rd_val;
      rd_addr <= 6'(a + 1);
      @(posedge clk); @(negedge clk);
      checks++;
      if (rd_pos != p0 + 16'd1 || !(v0 <= 0 && $signed(rd_val) >= 0)) begin
        failures++;
        $display("FAIL pair %0d: (%0d, %0d) (%0d, %0d)", a / 2, p0, v0, rd_pos, $signed(rd_val));
      end
    end

    $display("max derivative error %f, position RMSE %f samples over %0d estimates",
             max_err, $sqrt(sq_sum / real'(n_est1 + n_est2)), n_est1 + n_est2);
    $display("mechanisms: stall=%0d qualify=%0d disqualify=%0d overflow=%0d polarity=%0d offset=%0d",
             n_stall, n_qualify, n_disqualify, n_overflow, n_polarity, n_offset);
    checks++; if (n_stall == 0)      begin failures++; $display("FAIL no stall"); end
    checks++; if (n_qualify == 0)    begin failures++; $display("FAIL no qualified crossing"); end
    checks++; if (n_disqualify == 0) begin failures++; $display("FAIL no disqualified crossing"); end
    checks++; if (n_overflow == 0)   begin failures++; $display("FAIL no overflow"); end
    checks++; if (n_polarity == 0)   begin failures++; $display("FAIL no polarity switch"); end
    checks++; if (n_offset == 0)     begin failures++; $display("FAIL no offset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
