// adc_spi_bank -- sample timer and SPI master for the bank of MCP3008 ADCs.
//
// Parallel acquisition: every ADC sees the same SCLK, CS_n and MOSI, so one channel
// address is broadcast to all of them, and each returns its own conversion on its own
// MISO line. Because channel 0 of ADC j is wired to electrode channel j (the other inputs
// follow in a ring), address 0 samples the REF and every WE at the same instant.
//
// While `run` is high a conversion is started every `k` fabric clocks, the first one in
// the cycle after `run` rises, giving an effective sample rate F_CLK / k. A conversion is
// 17 SCLK cycles (SPI mode 0,0, CS_n low for the whole frame): MOSI carries the start bit,
// SGL/DIFF = 1 and the 3 address bits on rising edges 1..5; the ADC samples, outputs a null
// bit (edge 7) and then B9..B0 which are captured on rising edges 8..17. Each SCLK level
// lasts SCLK_HALF fabric clocks; CS_n then stays high SCLK_HALF clocks. `sample_valid`
// pulses for one cycle with all NCH results; a tick that arrives while a conversion is
// still running is dropped and raises the sticky `overrun` flag (cleared when `run` rises).
// The frame format is the MCP3008's; the timer and framing are this design's.
module adc_spi_bank
  import hermeis_pkg::*;
#(
  parameter int unsigned P_NCH     = NCH,
  parameter int unsigned SCLK_HALF = 7       // 50 MHz / 14 = 3.57 MHz SCLK
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  run,
  input  logic [K_W-1:0]        k,            // fabric clocks per sample (>= 1)
  input  logic [2:0]            chan_addr,    // broadcast single-ended channel address
  output logic                  adc_sclk,
  output logic                  adc_cs_n,
  output logic                  adc_mosi,
  input  logic [P_NCH-1:0]      adc_miso,
  output logic                  sample_valid,
  output logic [ADC_W-1:0]      sample [P_NCH],
  output logic                  overrun
);
  localparam int unsigned NCLK = 17;

  logic [K_W-1:0]                timer;
  logic                          run_q, tick;
  logic                          active, cs_gap;
  logic [$clog2(SCLK_HALF+1)-1:0] div;
  logic [4:0]                    cyc;          // SCLK cycle 1..17
  logic [4:0]                    cmd;          // start, SGL, D2, D1, D0
  logic [ADC_W-1:0]              shreg [P_NCH];

  // sample timer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer <= '0;
      run_q <= 1'b0;
    end else begin
      run_q <= run;
      if (!run || !run_q) timer <= '0;
      else                timer <= (timer >= k - 1'b1) ? '0 : timer + 1'b1;
    end
  end
  assign tick = run && (!run_q || timer >= k - 1'b1);

  // SPI frame
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      cs_gap       <= 1'b0;
      div          <= '0;
      cyc          <= '0;
      cmd          <= '0;
      adc_sclk     <= 1'b0;
      adc_cs_n     <= 1'b1;
      adc_mosi     <= 1'b0;
      sample_valid <= 1'b0;
      overrun      <= 1'b0;
      for (int c = 0; c < P_NCH; c++) begin
        shreg[c]  <= '0;
        sample[c] <= '0;
      end
    end else begin
      sample_valid <= 1'b0;
      if (run && !run_q) overrun <= 1'b0;
      if (tick && (active || cs_gap) && run_q) overrun <= 1'b1;

      if (active) begin
        if (32'(div) == SCLK_HALF - 1) begin
          div <= '0;
          if (!adc_sclk) begin                    // rising edge
            adc_sclk <= 1'b1;
            if (cyc >= 8)
              for (int c = 0; c < P_NCH; c++) shreg[c] <= {shreg[c][ADC_W-2:0], adc_miso[c]};
          end else begin                          // falling edge: end of cycle
            adc_sclk <= 1'b0;
            if (32'(cyc) == NCLK) begin
              active       <= 1'b0;
              cs_gap       <= 1'b1;
              adc_cs_n     <= 1'b1;
              adc_mosi     <= 1'b0;
              sample_valid <= 1'b1;
              for (int c = 0; c < P_NCH; c++) sample[c] <= shreg[c];
            end else begin
              cyc      <= cyc + 1'b1;
              adc_mosi <= (cyc < 5) ? cmd[4 - cyc] : 1'b0;
            end
          end
        end else begin
          div <= div + 1'b1;
        end
      end else if (cs_gap) begin
        if (32'(div) == SCLK_HALF - 1) begin
          div    <= '0;
          cs_gap <= 1'b0;
        end else begin
          div <= div + 1'b1;
        end
      end else if (tick) begin
        active   <= 1'b1;
        adc_cs_n <= 1'b0;
        adc_sclk <= 1'b0;
        div      <= '0;
        cyc      <= 5'd1;
        cmd      <= {1'b1, 1'b1, chan_addr};
        adc_mosi <= 1'b1;                         // start bit
      end
    end
  end
endmodule
