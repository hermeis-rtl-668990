// tb_iq_bank -- self-checking test of the quarter-cycle I/Q integrators.
//
// Expected values are computed here by interval overlap, independently of the block's
// boundary tracking: with positions in units of 1/(4m) sample, sample n covers
// [n*4m, (n+1)*4m) and quarter j of period p covers [(4p+j)L, (4p+j+1)L); each sample
// adds code * overlap to that quarter's sum (so sums are 4m times the sample sums). Then
//   I = round((S0 + S1 - S2 - S3) / (2*4m)),  Q = round((S1 + S2 - S0 - S3) / (2*4m))
// on the raw codes (rounded half away from zero), compared exactly. Whole-sample and
// fractional periods, several periods back to back, a sinusoid whose amplitude and phase
// must come back through X = I - jQ, and the `lost` flag for too-short periods are tested.
module tb_iq_bank;
  import hermeis_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, sample_valid = 0;
  logic [U_W-1:0] four_m, qlen;
  logic [ADC_W-1:0] sample [NCH];
  logic iq_valid, lost;
  logic signed [ACC_W-1:0] i_out [NCH];
  logic signed [ACC_W-1:0] q_out [NCH];
  int checks = 0, failures = 0;

  iq_bank dut (.*);
  always #10 clk = ~clk;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real PI = 3.14159265358979;
  function automatic real rabs(input real v); return (v < 0.0) ? -v : v; endfunction

  // results seen on iq_valid
  longint got_i [$][NCH];
  longint got_q [$][NCH];
  always @(posedge clk) if (rst_n && iq_valid) begin
    longint gi [NCH], gq [NCH];
    for (int c = 0; c < NCH; c++) begin gi[c] = longint'(i_out[c]); gq[c] = longint'(q_out[c]); end
    got_i.push_back(gi);
    got_q.push_back(gq);
  end

  int codes [$][NCH];

  function automatic longint rdiv(input longint v, input longint d);   // round half away from 0
    if (v >= 0) return (v + d / 2) / d;
    else        return -((-v + d / 2) / d);
  endfunction

  // Runs `nper` periods of samples (spacing `gap` clocks); mode 0 random, 1 sinusoid.
  task automatic run(input longint fm, input longint lq, input int nper, input int gap,
                     input int mode, input real amp [NCH], input real ph [NCH], input bit chk = 1);
    longint nsamp;
    real tper;
    four_m = U_W'(fm); qlen = U_W'(lq);
    got_i.delete(); got_q.delete(); codes.delete();
    tper  = 4.0 * real'(lq) / real'(fm);                    // period in samples
    nsamp = (4 * lq * nper) / fm + 1;   // a period closes on the sample its end boundary cuts
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (longint n = 0; n < nsamp; n++) begin
      int cv [NCH];
      for (int c = 0; c < NCH; c++) begin
        if (mode == 0) cv[c] = int'($urandom % 1024);
        else cv[c] = int'($floor(512.0 + amp[c] * $sin(2.0 * PI * (real'(n) + 0.5) / tper + ph[c]) + 0.5));
        sample[c] = ADC_W'(cv[c]);
      end
      codes.push_back(cv);
      sample_valid = 1;
      @(negedge clk) sample_valid = 0;
      repeat (gap - 1) @(negedge clk);
    end
    repeat (1500) @(negedge clk);
    if (!chk) return;
    checks++;
    if (got_i.size() != nper) begin failures++; $display("FAIL %0d results for %0d periods", got_i.size(), nper); end
    for (int p = 0; p < nper && p < got_i.size(); p++) begin
      for (int c = 0; c < NCH; c++) begin
        longint sq [4], ie, qe;
        for (int j = 0; j < 4; j++) begin
          longint lo, hi;
          sq[j] = 0;
          lo = (4 * p + j) * lq;
          hi = lo + lq;
          for (longint n = lo / fm; n <= hi / fm && n < codes.size(); n++) begin
            longint a, b;
            a = (n * fm > lo) ? n * fm : lo;
            b = ((n + 1) * fm < hi) ? (n + 1) * fm : hi;
            if (b > a) sq[j] += longint'(codes[n][c]) * (b - a);
          end
        end
        ie = rdiv(sq[0] + sq[1] - sq[2] - sq[3], 2 * fm);
        qe = rdiv(sq[1] + sq[2] - sq[0] - sq[3], 2 * fm);
        checks += 2;
        if (got_i[p][c] != ie) begin failures++; $display("FAIL 4m=%0d L=%0d p%0d ch%0d I=%0d exp %0d", fm, lq, p, c, got_i[p][c], ie); end
        if (got_q[p][c] != qe) begin failures++; $display("FAIL 4m=%0d L=%0d p%0d ch%0d Q=%0d exp %0d", fm, lq, p, c, got_q[p][c], qe); end
        if (mode == 1) begin
          real mg, ang, da;
          mg = $sqrt(real'(got_i[p][c]) ** 2 + real'(got_q[p][c]) ** 2);
          ang = $atan2(-real'(got_q[p][c]), real'(got_i[p][c]));
          da = ang - ph[c];
          if (da > PI)  da -= 2.0 * PI;
          if (da < -PI) da += 2.0 * PI;
          checks += 2;
          if (rabs(mg / (amp[c] * tper / PI) - 1.0) > 0.03) begin
            failures++; $display("FAIL sine ch%0d |X|=%f exp %f", c, mg, amp[c] * tper / PI);
          end
          if (rabs(da) > 0.05) begin failures++; $display("FAIL sine ch%0d phase %f exp %f", c, ang, ph[c]); end
        end
      end
    end
  endtask

  initial begin
    real amp [NCH], ph [NCH];
    for (int c = 0; c < NCH; c++) begin sample[c] = '0; amp[c] = 100.0 + 80.0 * c; ph[c] = -1.2 + 0.6 * c; end
    four_m = 4; qlen = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(12, 60, 3, 40, 0, amp, ph);        // whole samples: 20 per period
    run(12, 67, 3, 40, 0, amp, ph);        // 22.33 samples per period: fractional boundaries
    run(40, 41, 2, 150, 0, amp, ph);       // about 4 samples per period (F_S/4)
    run(171796, 8589935, 2, 3, 1, amp, ph);// 1 kHz at the default rates: 200.003 samples
    run(1717988, 6882960, 2, 40, 1, amp, ph); // ~10 kHz, k = 312: 16.03 samples
    checks++;
    if (lost) begin failures++; $display("FAIL lost set"); end
    run(12, 60, 2, 2, 0, amp, ph, 0);      // periods of 40 clocks: too short to scale
    checks++;
    if (!lost) begin failures++; $display("FAIL lost not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
