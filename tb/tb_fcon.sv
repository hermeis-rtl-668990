// tb_fcon -- self-checking test of the frequency controller.
// For a set of test frequencies the expected samples-per-period and clock divider are
// computed here in floating point directly from the adaptive-sampling rule in its
// two-case form:  f_s' = floor(F_S/f_i)*f_i if floor(F_S/f_i) mod 4 == 0,
// else floor(F_S/(4 f_i))*4 f_i;  N_p = f_s'/f_i;  k = round(F_CLK/f_s').
// The quarter length L = round((F_CLK/k) 2^M / F_DDS) and 4m are checked as well.
// Frequencies above F_S/4 must be flagged. The result latency is checked too.
module tb_fcon;
  import hermeis_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [M_BITS-1:0] fcw;
  logic busy, cfg_valid;
  fcon_cfg_t cfg;
  int checks = 0, failures = 0;

  fcon dut (.*);
  always #10 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_m(input longint unsigned m);
    real fi, fs, fclk, fsp, r;
    longint unsigned np_exp, k_exp, fl;
    longint lq_exp;
    bit  fast_exp;
    int  cyc = 0;
    fs   = real'(FS_HZ);
    fclk = real'(FCLK_HZ);
    fi   = real'(m) * real'(FDDS_HZ) / (2.0 ** M_BITS);
    fl   = longint'($floor(fs / fi));
    if (fl % 4 == 0) fsp = real'(fl) * fi;
    else             fsp = $floor(fs / (4.0 * fi)) * 4.0 * fi;
    fast_exp = (fsp == 0.0);
    if (fast_exp) fsp = 4.0 * fi;
    np_exp = longint'(fsp / fi);   // real-to-integer casts round
    r      = fclk / fsp;
    k_exp  = longint'($floor(r + 0.5));
    if (k_exp > 65535) k_exp = 65535;
    @(negedge clk);
    fcw = M_BITS'(m); start = 1;
    @(negedge clk);
    start = 0;
    while (!cfg_valid) begin @(negedge clk); cyc++; end
    checks += 4;
    if (64'(cfg.n_per) != np_exp) begin failures++; $display("FAIL m=%0d N_p %0d exp %0d", m, cfg.n_per, np_exp); end
    if (64'(cfg.k) != k_exp)      begin failures++; $display("FAIL m=%0d k %0d exp %0d (%f)", m, cfg.k, k_exp, r); end
    if (cfg.too_fast != fast_exp) begin failures++; $display("FAIL m=%0d too_fast", m); end
    if (cyc > 3 * 64 + 8)         begin failures++; $display("FAIL latency %0d", cyc); end
    // quarter length in 1/(4m)-sample units: (F_CLK/k) * 2^M / F_DDS, rounded
    checks += 2;
    lq_exp = longint'($floor(real'(FCLK_HZ) / real'(k_exp) * (2.0 ** M_BITS) / real'(FDDS_HZ) + 0.5));
    if (64'(cfg.four_m) != 4 * m) begin failures++; $display("FAIL m=%0d four_m %0d", m, cfg.four_m); end
    if (longint'(cfg.qlen) - lq_exp > 1 || lq_exp - longint'(cfg.qlen) > 1) begin
      failures++; $display("FAIL m=%0d qlen %0d exp %0d", m, cfg.qlen, lq_exp);
    end
  endtask

  function automatic longint unsigned fcw_of(real f_hz);
    return longint'(f_hz * (2.0 ** M_BITS) / real'(FDDS_HZ));
  endfunction

  initial begin
    fcw = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check_m(fcw_of(0.05));     // lowest frequency of the published scan
    check_m(fcw_of(1.0));
    check_m(fcw_of(1000.0));
    check_m(fcw_of(10000.0));
    check_m(fcw_of(33333.0));
    check_m(fcw_of(50000.0));  // F_S/4
    check_m(fcw_of(80000.0));  // above F_S/4: flagged
    for (int i = 0; i < 60; i++) begin
      real f;
      f = 0.05 * (10.0 ** (6.0 * real'($urandom % 10000) / 10000.0));
      check_m(fcw_of(f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
