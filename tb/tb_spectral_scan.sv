// tb_spectral_scan -- a 100-point logarithmic frequency sweep, 0.05 Hz to 50 kHz, through
// the whole core at its default parameters.
//
// The grid is f_i = 0.05 Hz * 10^(6 i / 99), i = 0..99, the sweep used to characterise the
// prototype. Two periods at 0.05 Hz alone are 40 s of signal, so the points below 10 Hz
// (38 points, about 305 s of signal) are skipped and the remaining 62 points (1.53 s of
// signal) are measured back to back; the low-frequency end of the controller arithmetic is
// checked on its own by the controller's test. Each point is one host request: the time
// from the request to `acq_done` is checked against two signal periods (it may exceed them
// only by the set-up and the scaling of the last period, 30 us), and the impedances of the
// four working electrodes, a simplified Randles cell R_S + R_F / (1 + j w R_F C_dl) with
// R_S = 3.9 k, C_dl = 68 nF and R_F = 100, 53.6, 12, 3.9 k behind an inverting R_OUT = 5 k
// stage, are formed from the I/Q words as host software would and compared with the model:
// 5 % and 3 degrees, 8 % and 5 degrees where a period has only 4 or 8 samples
// (above 12.5 kHz). The electrode, DDS and ADC models are those of the end-to-end test.
// At the end it prints the signal time that two periods at all 100 points add up to.
module tb_spectral_scan;
  import hermeis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic host_acq_req = 0, host_rheo_go = 0;
  logic [M_BITS-1:0] host_fcw = '0;
  logic [2:0] host_chan_addr = '0;
  logic [6:0] host_n_in = '0;
  logic [6:0] host_n_out [NCH-1];
  logic [$clog2(2*NCH)-1:0] host_rd_addr = '0;
  logic [ACC_W-1:0] host_rd_data;
  logic acq_busy, acq_done, cfg_too_fast, adc_overrun, iq_lost, rheo_busy;
  logic [7:0] acq_periods;
  logic [N_W-1:0] cfg_n_per;
  logic [K_W-1:0] cfg_k;
  logic [NCH-1:0] rheo_nack;
  logic dds_wclk, dds_fqud, dds_data, adc_sclk, adc_cs_n, adc_mosi;
  logic [NCH-1:0] adc_miso, i2c_scl_oe, i2c_sda_oe, i2c_sda_in;

  hermeis_top dut (.*);
  always #10 clk = ~clk;          // 50 MHz

  int checks = 0, failures = 0;

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DDS ----------------
  real dds_f, dds_t0;
  int  dds_n;
  logic [31:0] dds_word;
  ad9850_model u_dds (.wclk(dds_wclk), .fqud(dds_fqud), .data(dds_data),
                      .freq_hz(dds_f), .t_update(dds_t0), .nupdates(dds_n), .word(dds_word));

  // ---------------- electrodes and ADCs ----------------
  localparam real PI    = 3.14159265358979;
  localparam real A_REF = 200.0;           // reference amplitude in ADC codes
  localparam real R_OUT = 5.0e3;
  localparam real R_S   = 3.9e3;
  real r_f [NCH-1] = '{100.0e3, 53.6e3, 12.0e3, 3.9e3};
  real c_dl [NCH-1] = '{68.0e-9, 68.0e-9, 68.0e-9, 68.0e-9};

  function automatic void z_model(input int j, input real f, output real mag, output real ang);
    real w, a, re, im;
    w  = 2.0 * PI * f;
    a  = w * r_f[j] * c_dl[j];
    re = R_S + r_f[j] / (1.0 + a * a);
    im = -r_f[j] * a / (1.0 + a * a);
    mag = $sqrt(re * re + im * im);
    ang = $atan2(im, re);
  endfunction

  logic [9:0] vin [NCH][8];
  logic [NCH-1:0] perr;
  int nconv [NCH];
  logic [2:0] laddr [NCH];
  for (genvar a = 0; a < NCH; a++) begin : g_adc
    mcp3008_model u_adc (.sclk(adc_sclk), .cs_n(adc_cs_n), .mosi(adc_mosi), .miso(adc_miso[a]),
                         .vin(vin[a]), .proto_err(perr[a]), .nconv(nconv[a]), .last_addr(laddr[a]));
  end

  bit   corrupt_first = 0;        // inject a switching transient into the first period
  int   conv_in_acq   = 0;
  always @(negedge adc_cs_n) begin
    real t, e [NCH];
    t = ($realtime - dds_t0) * 1.0e-9;
    e[0] = A_REF * $sin(2.0 * PI * dds_f * t);
    for (int j = 0; j < NCH - 1; j++) begin
      real mag, ang;
      z_model(j, dds_f, mag, ang);
      e[j+1] = -(A_REF * R_OUT / mag) * $sin(2.0 * PI * dds_f * t - ang);
    end
    if (corrupt_first && conv_in_acq < int'(cfg_n_per))
      for (int c = 0; c < NCH; c++) e[c] += 150.0 * $sin(real'(conv_in_acq) * 0.37 + c);
    conv_in_acq++;
    for (int a = 0; a < NCH; a++)
      for (int ch = 0; ch < 8; ch++) begin
        int v;
        v = int'($floor(512.0 + e[(a + ch) % NCH] + 0.5));
        if (v < 0) v = 0;
        if (v > 1023) v = 1023;
        vin[a][ch] = 10'(v);
      end
  end

  assign i2c_sda_in = ~i2c_sda_oe;       // rheostat buses unused here


  // ---------------- scan grid ----------------
  localparam int  NPTS     = 100;     // log-spaced points
  localparam real F_MIN    = 0.05;    // Hz
  localparam real DECADES  = 6.0;     // 0.05 Hz .. 50 kHz
  localparam int  NPTS_SIM = 62;      // points at or above 10 Hz

  // ---------------- helpers ----------------

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint unsigned fcw_of(real f_hz);
    return longint'($floor(f_hz * (2.0 ** M_BITS) / real'(FDDS_HZ)));   // tuning word rounded down
  endfunction

  // One acquisition at frequency f; returns the I/Q words (signed) of all channels.
  task automatic acquire(input real f, input int addr, input bit corrupt,
                         output longint iv [NCH], output longint qv [NCH]);
    longint unsigned tmo;
    int words [2*NCH];
    host_chan_addr = 3'(addr);
    corrupt_first  = corrupt;
    @(negedge clk);
    host_fcw = M_BITS'(fcw_of(f));
    host_acq_req = 1;
    @(negedge clk) host_acq_req = 0;
    expect_true(acq_busy && !acq_done, "acquisition started");
    conv_in_acq = 0;                 // no conversion runs between acquisitions
    while (!acq_done) @(negedge clk);
    expect_true(acq_periods == 8'(NCYC), "two periods acquired");
    expect_true(dds_word == host_fcw, "DDS holds the requested tuning word");
    begin
      longint nexp;   // two periods of 4L/(4m) samples, plus the sample that closes the second
      real lq;
      lq   = $floor((2.0 ** M_BITS) * real'(FCLK_HZ) / real'(FDDS_HZ) / real'(cfg_k) + 0.5);
      nexp = longint'($floor(8.0 * lq / (4.0 * real'(host_fcw))) + 1.0);
      // sampling runs on while the last period is being scaled (under 600 clocks)
      expect_true(longint'(conv_in_acq) >= nexp && longint'(conv_in_acq) <= nexp + 600 / longint'(cfg_k) + 1,
                  "one conversion per sample of two periods");
      if (!(longint'(conv_in_acq) >= nexp && longint'(conv_in_acq) <= nexp + 600 / longint'(cfg_k) + 1))
        $display("  conversions %0d, expected %0d", conv_in_acq, nexp);
    end
    for (int a = 0; a < 2 * NCH; a++) begin
      @(negedge clk) host_rd_addr = 4'(a);
      @(negedge clk);
      words[a] = int'(host_rd_data);
    end
    for (int c = 0; c < NCH; c++) begin iv[c] = longint'(words[2*c]); qv[c] = longint'(words[2*c+1]); end
  endtask

  // Checks the impedances of all working electrodes; `rot` is the electrode seen on channel 0.
  task automatic check_z(input real f, input int rot, input longint iv [NCH], input longint qv [NCH],
                         input real tol_mag, input real tol_deg);
    int ref_c;
    real xr_re, xr_im;
    ref_c = (NCH - rot) % NCH;      // channel that carries the reference
    xr_re = real'(iv[ref_c]);
    xr_im = -real'(qv[ref_c]);
    for (int c = 0; c < NCH; c++) begin
      int e;
      real xc_re, xc_im, zm, za, em, ea, d;
      e = (c + rot) % NCH;          // electrode on this channel
      if (e == 0) continue;
      xc_re = -real'(iv[c]);        // -X accounts for the inverting current amplifier
      xc_im =  real'(qv[c]);
      zm = R_OUT * $sqrt((xr_re ** 2 + xr_im ** 2) / (xc_re ** 2 + xc_im ** 2));
      za = $atan2(xr_im, xr_re) - $atan2(xc_im, xc_re);
      if (za > PI)  za -= 2.0 * PI;
      if (za < -PI) za += 2.0 * PI;
      z_model(e - 1, f, em, ea);
      d = (za - ea) * 180.0 / PI;
      checks += 2;
      if (zm / em > 1.0 + tol_mag || zm / em < 1.0 - tol_mag) begin
        failures++; $display("FAIL f=%0.1f WE%0d |Z|=%0.0f model %0.0f", f, e, zm, em);
      end
      if (d > tol_deg || d < -tol_deg) begin
        failures++; $display("FAIL f=%0.1f WE%0d angle %0.2f deg model %0.2f", f, e, za * 180.0 / PI, ea * 180.0 / PI);
      end
    end
  endtask

  initial begin
    longint iv [NCH], qv [NCH];
    real f, f_lo, t_req, t_acq, t_sig, t_all, t_done;
    int  npts, nn;
    f_lo = 10.0;
    r_f  = '{100.0e3, 53.6e3, 12.0e3, 3.9e3};
    c_dl = '{68.0e-9, 68.0e-9, 68.0e-9, 68.0e-9};
    for (int j = 0; j < NCH - 1; j++) host_n_out[j] = 7'd100;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (100) @(posedge clk);
    npts = 0; t_sig = 0.0; t_all = 0.0; t_done = 0.0;
    for (int i = 0; i < NPTS; i++) begin
      f = F_MIN * (10.0 ** (DECADES * real'(i) / real'(NPTS - 1)));
      t_all += 2.0 / f;                                  // two periods of signal per point
      if (f < f_lo) continue;
      t_req = $realtime;
      acquire(f, 0, 0, iv, qv);
      t_acq = ($realtime - t_req) * 1.0e-9;
      t_sig += 2.0 / f;
      // the core adds only its set-up (controller, DDS load) and the scaling of the last
      // period to the two periods of signal
      // (of the frequency the DDS actually makes: the tuning word is rounded down)
      checks++;
      if (t_acq < 2.0 / dds_f * 0.9999 || t_acq > 2.0 / dds_f * 1.0001 + 30.0e-6) begin
        failures++;
        $display("FAIL f=%0.2f acquisition took %0.6f s, two periods are %0.6f s", dds_f, t_acq, 2.0 / dds_f);
      end
      nn = int'(cfg_n_per);
      if (nn <= 8) check_z(dds_f, 0, iv, qv, 0.08, 5.0);   // 4 or 8 samples per period
      else         check_z(dds_f, 0, iv, qv, 0.05, 3.0);
      npts++;
    end
    t_done = ($realtime - 0.0) * 1.0e-9;
    expect_true(npts == NPTS_SIM, "all grid points from 10 Hz up were measured");
    expect_true(!adc_overrun && !iq_lost && perr == '0, "no overrun, no lost period, clean SPI");
    $display("measured %0d of %0d points in %0.3f s simulated (%0.3f s of signal);", npts, NPTS, t_done, t_sig);
    $display("two periods at all %0d points add up to %0.1f s of signal", NPTS, t_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
