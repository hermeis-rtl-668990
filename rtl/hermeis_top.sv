// hermeis_top -- FPGA core of the HermEIS parallel impedance-spectroscopy system.
//
// One test frequency is measured per host request. The frequency controller turns the
// DDS tuning word into an adaptive sample count per period and a sample-clock divider;
// the tuning word is shifted into the AD9850 DDS, which drives the shared reference
// electrode through the analog front end; the SPI bank then samples the reference and all
// working-electrode current channels in parallel every k clocks, and the I/Q bank
// integrates each period in quarter windows into one I/Q pair per channel. Two periods
// are acquired back to back and each overwrites the staging buffer, so the buffer ends
// up holding the pairs of the second, settled period; `acq_done` then tells the host to
// read the 2*NCH words. Impedance magnitude and phase are formed in host software from
// the ratio of the reference and channel pairs. Independently, the host can reprogram
// the R_in and R_out,j rheostats over I2C.
//
// The host interface (a USB bridge in the prototype) is not part of this core: its
// register writes, trigger pulses and read port are plain ports here. Channel 0 is the
// reference, channels 1..NCH-1 the working electrodes.
module hermeis_top
  import hermeis_pkg::*;
#(
  parameter int unsigned SCLK_HALF = 7,      // SPI: 3.57 MHz SCLK at 50 MHz
  parameter int unsigned WCLK_HALF = 4,      // DDS serial load clock
  parameter int unsigned I2C_QTR   = 125     // I2C: 100 kHz at 50 MHz
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host side
  input  logic                  host_acq_req,          // start one acquisition
  input  logic [M_BITS-1:0]     host_fcw,              // tuning word m of the test frequency
  input  logic [2:0]            host_chan_addr,        // broadcast ADC channel (0 = parallel mode)
  input  logic                  host_rheo_go,          // write all rheostats
  input  logic [6:0]            host_n_in,             // N_in for R_in
  input  logic [6:0]            host_n_out [NCH-1],    // N_out,j for R_out,j
  input  logic [$clog2(2*NCH)-1:0] host_rd_addr,
  output logic [ACC_W-1:0]      host_rd_data,
  output logic                  acq_busy,
  output logic                  acq_done,
  output logic [7:0]            acq_periods,
  output logic [N_W-1:0]        cfg_n_per,             // samples per period in use
  output logic [K_W-1:0]        cfg_k,                 // clocks per sample in use
  output logic                  cfg_too_fast,          // test frequency above F_S/4
  output logic                  adc_overrun,
  output logic                  iq_lost,               // a period ended before the last was scaled
  output logic                  rheo_busy,
  output logic [NCH-1:0]        rheo_nack,
  // AD9850 DDS
  output logic                  dds_wclk,
  output logic                  dds_fqud,
  output logic                  dds_data,
  // MCP3008 A/D bank
  output logic                  adc_sclk,
  output logic                  adc_cs_n,
  output logic                  adc_mosi,
  input  logic [NCH-1:0]        adc_miso,
  // MCP40D17 rheostats, one bus each, open-drain enables
  output logic [NCH-1:0]        i2c_scl_oe,
  output logic [NCH-1:0]        i2c_sda_oe,
  input  logic [NCH-1:0]        i2c_sda_in
);
  fcon_cfg_t                fcon_cfg, cfg;
  logic                     fcon_start, fcon_valid, fcon_busy;
  logic                     dds_load, dds_busy, dds_done;
  logic                     iq_start, acq_run, iq_valid, mem_we;
  logic                     sample_valid;
  logic [ADC_W-1:0]         sample [NCH];
  logic signed [ACC_W-1:0]  i_pair [NCH];
  logic signed [ACC_W-1:0]  q_pair [NCH];
  logic [6:0]               wiper  [NCH];
  logic                     rheo_done;

  fcon u_fcon (
    .clk, .rst_n, .start(fcon_start), .fcw(host_fcw),
    .busy(fcon_busy), .cfg_valid(fcon_valid), .cfg(fcon_cfg)
  );

  sys_monitor u_mon (
    .clk, .rst_n, .acq_req(host_acq_req),
    .fcon_start, .fcon_valid, .fcon_cfg_in(fcon_cfg), .cfg,
    .dds_load, .dds_done, .iq_start, .acq_run, .iq_valid, .mem_we,
    .busy(acq_busy), .done(acq_done), .periods(acq_periods)
  );

  dds_loader #(.HALF(WCLK_HALF)) u_dds (
    .clk, .rst_n, .load(dds_load), .fcw(host_fcw),
    .busy(dds_busy), .done(dds_done), .dds_wclk, .dds_fqud, .dds_data
  );

  adc_spi_bank #(.SCLK_HALF(SCLK_HALF)) u_adc (
    .clk, .rst_n, .run(acq_run), .k(cfg.k), .chan_addr(host_chan_addr),
    .adc_sclk, .adc_cs_n, .adc_mosi, .adc_miso,
    .sample_valid, .sample, .overrun(adc_overrun)
  );

  iq_bank u_iq (
    .clk, .rst_n, .start(iq_start), .four_m(cfg.four_m), .qlen(cfg.qlen),
    .sample_valid(sample_valid && acq_run), .sample,
    .iq_valid, .i_out(i_pair), .q_out(q_pair), .lost(iq_lost)
  );

  iq_mem u_mem (
    .clk, .rst_n, .we(mem_we), .i_in(i_pair), .q_in(q_pair),
    .rd_addr(host_rd_addr), .rd_data(host_rd_data)
  );

  always_comb begin
    wiper[0] = host_n_in;
    for (int j = 1; j < NCH; j++) wiper[j] = host_n_out[j-1];
  end

  i2c_rheo #(.NDEV(NCH), .QTR(I2C_QTR)) u_i2c (
    .clk, .rst_n, .go(host_rheo_go), .wiper,
    .scl_oe(i2c_scl_oe), .sda_oe(i2c_sda_oe), .sda_in(i2c_sda_in),
    .busy(rheo_busy), .done(rheo_done), .nack(rheo_nack)
  );

  assign cfg_n_per    = cfg.n_per;
  assign cfg_k        = cfg.k;
  assign cfg_too_fast = cfg.too_fast;

  logic unused_status;
  assign unused_status = ^{fcon_busy, dds_busy, rheo_done};
endmodule
