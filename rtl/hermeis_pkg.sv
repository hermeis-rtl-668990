// hermeis_pkg -- constants and types shared by the HermEIS impedance-acquisition core.
//
// The numbers follow the published prototype: 4 working electrodes plus one reference
// channel (5 ADC streams), 10-bit SAR ADCs, 32-bit signed I/Q results, a 50 MHz fabric
// clock, a 100 MHz DDS reference clock and a 200 ksps ceiling on the ADC rate. The DDS
// tuning-word width M = 32 is the width of the AD9850 tuning word and is this design's
// choice; the publication leaves M symbolic.
//
// Two derived constants are used by the frequency controller (fcon):
//   C_FS  = round(F_S  * 2^M / F_DDS)   -- F_S expressed in tuning-word units
//   C_CLK = round(F_CLK * 2^M / F_DDS)  -- F_CLK expressed in tuning-word units
// With f_i = m * F_DDS / 2^M these give F_S / f_i = C_FS / m and F_CLK / f_i = C_CLK / m,
// so every division the controller needs is an integer division by a multiple of m.
// The quarter length in phase units, L = round(C_CLK / k), is the quantity
// 2^M f_hat_s / F_DDS that fixes where quarter boundaries fall between samples.
package hermeis_pkg;

  localparam int unsigned NCH      = 5;            // REF + 4 WE channels
  localparam int unsigned ADC_W    = 10;           // MCP3008 resolution
  localparam int unsigned ACC_W    = 32;           // signed I/Q precision
  localparam int unsigned M_BITS   = 32;           // DDS tuning word width
  localparam int unsigned NCYC     = 2;            // periods acquired per frequency
  localparam longint unsigned FCLK_HZ = 64'd50_000_000;
  localparam longint unsigned FDDS_HZ = 64'd100_000_000;
  localparam longint unsigned FS_HZ   = 64'd200_000;

  localparam int unsigned N_W = 32;                // width of samples-per-period word
  localparam int unsigned K_W = 16;                // width of the sample clock divider
  localparam int unsigned U_W = 40;                // width of phase words in 1/(4m)-sample units

  // Mid-scale of the single-ended ADC (inputs sit on a Vdd/2 offset).
  localparam int unsigned ADC_MID = 1 << (ADC_W - 1);

  function automatic longint unsigned to_fcw_units(longint unsigned f_hz,
                                                   longint unsigned fdds_hz,
                                                   int unsigned m_bits);
    return ((f_hz << m_bits) + (fdds_hz >> 1)) / fdds_hz;
  endfunction

  // Result of the frequency controller for one test frequency.
  // The last two fields describe the period as the integrators see it: one sample spans
  // 4m units and one quarter period spans L = round(C_CLK / k) = round(2^M f_hat_s / F_DDS)
  // units, so a quarter boundary can fall inside a sample.
  typedef struct packed {
    logic [N_W-1:0] n_per;      // samples per period N_p = f_s' / f_i, a multiple of 4
    logic [K_W-1:0] k;          // f_clk cycles per sample
    logic           too_fast;   // f_i above f_s/4: N_p clamped to 4
    logic [U_W-1:0] four_m;     // 4m: one sample in units
    logic [U_W-1:0] qlen;       // L: one quarter period in units
  } fcon_cfg_t;

endpackage
