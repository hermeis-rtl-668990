// fcon -- frequency controller: adaptive sampling rate and sample clock divider.
//
// For a test frequency given by its DDS tuning word m (f_i = m * F_DDS / 2^M) it computes
//   N_p = 4 * floor(F_S / (4 f_i))          samples per signal period (adaptive rule)
//   k   = round(F_CLK / (N_p * f_i))         fabric clocks per ADC sample
// so that the adaptive rate f_s' = N_p * f_i is an exact multiple of 4 samples per period
// and the effective rate F_CLK / k is the closest one the fabric clock can produce.
// The publication writes the adaptive rule with two cases (floor(F_S/f_i) when that is a
// multiple of 4, otherwise 4*floor(F_S/(4 f_i))); both cases equal 4*floor(F_S/(4 f_i)),
// which is what is computed here. In tuning-word units (see hermeis_pkg):
//   N_p = 4 * floor(C_FS / (4m)),  k = round(C_CLK / (N_p * m)).
// A third division gives the quarter-period length L = round(C_CLK / k) in units of
// 1/(4m) sample, used by the integrators to place quarter boundaries between samples
// (the effective rate F_CLK/k is not exactly N_p * f_i after the rounding of k).
// A frequency above F_S/4 (quotient 0) is flagged `too_fast` and N_p is clamped to 4;
// m = 0 is treated like m = 1. The three divisions are done one after the other by a
// shared sequential divider, so a result appears about 3*DIV_W + 6 clocks after `start`
// and is announced by a one-cycle `cfg_valid`. k is saturated to its K_W-bit width
// (and forced to at least 1).
module fcon
  import hermeis_pkg::*;
#(
  parameter longint unsigned P_FCLK_HZ = FCLK_HZ,
  parameter longint unsigned P_FDDS_HZ = FDDS_HZ,
  parameter longint unsigned P_FS_HZ   = FS_HZ,
  parameter int unsigned     P_M       = M_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,      // one-cycle request with a new tuning word
  input  logic [P_M-1:0]   fcw,        // tuning word m
  output logic             busy,
  output logic             cfg_valid,  // one-cycle: cfg holds the new result
  output fcon_cfg_t        cfg
);
  localparam int unsigned DIV_W = 64;
  localparam longint unsigned C_FS  = to_fcw_units(P_FS_HZ,   P_FDDS_HZ, P_M);
  localparam longint unsigned C_CLK = to_fcw_units(P_FCLK_HZ, P_FDDS_HZ, P_M);

  typedef enum logic [2:0] {S_IDLE, S_DIV_N, S_WAIT_N, S_DIV_K, S_WAIT_K, S_DIV_L, S_WAIT_L} state_t;
  state_t state;

  logic [DIV_W-1:0] m_q, numer, denom, quot, rem;
  logic             div_start, div_busy, div_done;

  udiv_seq #(.W(DIV_W)) u_div (
    .clk, .rst_n, .start(div_start), .numer, .denom,
    .busy(div_busy), .done(div_done), .quot, .rem
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      m_q       <= '0;
      numer     <= '0;
      denom     <= '0;
      div_start <= 1'b0;
      cfg_valid <= 1'b0;
      cfg       <= '0;
    end else begin
      div_start <= 1'b0;
      cfg_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          m_q       <= (fcw == '0) ? DIV_W'(1) : DIV_W'(fcw);
          numer     <= DIV_W'(C_FS);
          denom     <= ((fcw == '0) ? DIV_W'(1) : DIV_W'(fcw)) << 2;
          div_start <= 1'b1;
          state     <= S_DIV_N;
        end
        S_DIV_N: state <= S_WAIT_N;          // divider picks up the start pulse
        S_WAIT_N: if (div_done) begin
          if (quot == '0) begin
            cfg.too_fast <= 1'b1;
            cfg.n_per    <= N_W'(4);
            numer        <= DIV_W'(C_CLK) + ((m_q << 2) >> 1);
            denom        <= m_q << 2;
          end else begin
            cfg.too_fast <= 1'b0;
            cfg.n_per    <= N_W'(quot << 2);
            numer        <= DIV_W'(C_CLK) + (((quot << 2) * m_q) >> 1);
            denom        <= (quot << 2) * m_q;
          end
          div_start <= 1'b1;
          state     <= S_DIV_K;
        end
        S_DIV_K: state <= S_WAIT_K;
        S_WAIT_K: if (div_done) begin
          logic [K_W-1:0] k_sat;
          k_sat = (quot > DIV_W'({K_W{1'b1}})) ? {K_W{1'b1}} :
                  (quot == '0)                 ? K_W'(1)     : K_W'(quot);
          cfg.k       <= k_sat;
          cfg.four_m  <= U_W'(m_q << 2);
          numer       <= DIV_W'(C_CLK) + DIV_W'(k_sat >> 1);
          denom       <= DIV_W'(k_sat);
          div_start   <= 1'b1;
          state       <= S_DIV_L;
        end
        S_DIV_L: state <= S_WAIT_L;
        S_WAIT_L: if (div_done) begin
          cfg.qlen  <= U_W'(quot);
          cfg_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The remainder and busy flag of the shared divider are not needed here.
  logic unused_div;
  assign unused_div = ^{rem, div_busy};

  // 4m must fit the U_W-bit phase words.
  a_fcw_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> (DIV_W'(fcw) < (64'd1 << 36)));
endmodule
