// tb_hermeis_top -- end-to-end test of the HermEIS core at its default parameters.
//
// The board is modelled around the core: an AD9850 model decodes the tuning word and
// starts a reference sinusoid of that frequency; five MCP3008 models sample it. Channel 0
// carries the reference V_ref; channel j carries the inverted transimpedance output of
// working electrode j, -R_out * V_ref / Z_j, with Z_j a simplified Randles cell
// R_S + R_F / (1 + j w R_F C_dl) (R_S = 3.9 k, C_dl = 68 nF, R_F = 100 k, 53.6 k, 12 k,
// 3.9 k). Every input sits on the mid-scale offset. As on the board, channel c of ADC j
// sees electrode (j + c) mod 5, so the broadcast address selects a rotation of the
// electrodes. Each acquisition is checked by computing the impedance from the I/Q words
// read back, |Z| = R_out |X_ref / X_ch| and angle Z = angle X_ref - angle(-X_ch) with
// X = I - jQ, and comparing it with the model.
//
// Mechanisms exercised and counted: the adaptive sample count per period (several
// frequencies), a frequency above F_S/4 flagged by the controller, the second period
// overwriting a first period corrupted by a switching transient, the broadcast channel
// address (rotated channels), ADC overrun when the sample clock outruns a conversion,
// the rheostat writes over I2C with and without an answering
// device, and the DDS load. A mechanism that never happened counts as a failure.
module tb_hermeis_top;
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
    repeat (8_000_000) @(posedge clk);
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
  localparam real C_DL  = 68.0e-9;
  real r_f [NCH-1] = '{100.0e3, 53.6e3, 12.0e3, 3.9e3};

  function automatic void z_model(input int j, input real f, output real mag, output real ang);
    real w, a, re, im;
    w  = 2.0 * PI * f;
    a  = w * r_f[j] * C_DL;
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

  // ---------------- rheostats ----------------
  logic [NCH-1:0] answer = '1;
  logic [NCH-1:0] sda_pull;
  logic [6:0] wiper_seen [NCH];
  int nwr [NCH];
  for (genvar d = 0; d < NCH; d++) begin : g_rh
    i2c_target_model u_rh (.scl(~i2c_scl_oe[d]), .sda(~(i2c_sda_oe[d] | sda_pull[d])),
                           .answer(answer[d]), .sda_pull(sda_pull[d]),
                           .wiper(wiper_seen[d]), .nwrites(nwr[d]));
  end
  assign i2c_sda_in = ~(i2c_sda_oe | sda_pull);

  // ---------------- mechanism counters ----------------
  int n_overrun = 0, n_acq = 0, n_fast = 0, n_overwrite = 0, n_rotate = 0, n_rheo = 0, n_nack = 0, n_dds = 0, n_npers = 0;
  int last_n_per = -1;

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
    n_acq++;
    expect_true(acq_periods == 8'(NCYC), "two periods acquired");
    expect_true(dds_word == host_fcw, "DDS holds the requested tuning word");
    n_dds++;
    if (int'(cfg_n_per) != last_n_per) n_npers++;
    last_n_per = int'(cfg_n_per);
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
    for (int j = 0; j < NCH - 1; j++) host_n_out[j] = 7'd100;     // N_out = 100
    host_n_in = 7'd10;                                              // N_in = 10
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (100) @(posedge clk);

    // rheostats: all answer, then WE3's rheostat silent
    @(negedge clk) host_rheo_go = 1;
    @(negedge clk) host_rheo_go = 0;
    while (rheo_busy) @(negedge clk);
    expect_true(rheo_nack == '0, "all rheostats acknowledged");
    expect_true(wiper_seen[0] == 7'd10, "R_in wiper written");
    for (int d = 1; d < NCH; d++) expect_true(wiper_seen[d] == 7'd100, "R_out wiper written");
    n_rheo++;
    answer = 5'b01111;
    host_n_out[3] = 7'd55;
    @(negedge clk) host_rheo_go = 1;
    @(negedge clk) host_rheo_go = 0;
    while (rheo_busy) @(negedge clk);
    expect_true(rheo_nack == 5'b10000, "silent rheostat reported");
    if (rheo_nack == 5'b10000) n_nack++;
    answer = '1;

    // 1 kHz, with a transient in the first period that the second must overwrite
    acquire(1000.0, 0, 1, iv, qv);
    expect_true(cfg_n_per == 200 && cfg_k == 250, "1 kHz: N_p = 200, k = 250");
    begin
      int f0;
      f0 = failures;
      check_z(1000.0, 0, iv, qv, 0.05, 3.0);
      if (failures == f0) n_overwrite++;
    end
    // 10 kHz and 100 Hz
    acquire(10000.0, 0, 0, iv, qv);
    expect_true(cfg_n_per == 20 && cfg_k == 250, "10 kHz: N_p = 20");
    check_z(10000.0, 0, iv, qv, 0.05, 3.0);
    acquire(100.0, 0, 0, iv, qv);
    expect_true(cfg_n_per == 2000, "100 Hz: N_p = 2000");
    check_z(100.0, 0, iv, qv, 0.05, 3.0);
    // F_S/4 = 50 kHz: four samples per period
    acquire(50000.0, 0, 0, iv, qv);
    expect_true(cfg_n_per == 4 && !cfg_too_fast, "50 kHz: N_p = 4");
    expect_true(cfg_k == 250, "50 kHz: k = 250");
    check_z(50000.0, 0, iv, qv, 0.08, 5.0);
    // broadcast address 2: channels carry electrodes rotated by two
    acquire(2000.0, 2, 0, iv, qv);
    begin
      int f0;
      f0 = failures;
      expect_true(laddr[0] == 3'd2 && laddr[4] == 3'd2, "address broadcast to all ADCs");
      check_z(2000.0, 2, iv, qv, 0.05, 3.0);
      if (failures == f0) n_rotate++;
    end
    expect_true(!adc_overrun, "no ADC overrun within F_S/4");
    // above F_S/4: flagged, clamped to 4 samples per period; the ADC cannot keep up
    acquire(80000.0, 0, 0, iv, qv);
    expect_true(cfg_too_fast && cfg_n_per == 4, "80 kHz flagged as too fast");
    if (cfg_too_fast) n_fast++;
    expect_true(adc_overrun, "sample ticks faster than a conversion flagged as overrun");
    if (adc_overrun) n_overrun++;
    expect_true(perr == '0, "SPI frames well formed");
    expect_true(!iq_lost, "no period lost");

    $display("mechanisms: acquisitions=%0d distinct_N_p=%0d dds_loads=%0d overwrite=%0d rotate=%0d too_fast=%0d rheo=%0d nack=%0d overrun=%0d",
             n_acq, n_npers, n_dds, n_overwrite, n_rotate, n_fast, n_rheo, n_nack, n_overrun);
    expect_true(n_acq > 0 && n_dds > 0, "acquisition and DDS load happened");
    expect_true(n_npers >= 4, "adaptive sample count used several values");
    expect_true(n_overwrite > 0, "second-period overwrite happened");
    expect_true(n_rotate > 0, "rotated channel address happened");
    expect_true(n_fast > 0, "too-fast flag happened");
    expect_true(n_overrun > 0, "ADC overrun happened");
    expect_true(n_rheo > 0 && n_nack > 0, "rheostat write and NACK happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
