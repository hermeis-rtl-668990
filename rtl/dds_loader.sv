// dds_loader -- loads a frequency tuning word into the external AD9850 DDS.
//
// The AD9850 is used in its serial load mode: 40 bits are clocked in on D7, LSB first,
// one per rising edge of W_CLK (bits 0..31 are the tuning word, bits 32..39 the control
// and phase byte, sent as zero: no power-down, zero phase), and a pulse on FQ_UD then
// transfers the word to the oscillator. After reset the loader first sends the
// W_CLK pulse followed by an FQ_UD pulse that switches the chip from parallel to serial
// mode (the chip's D0..D2 pins are assumed strapped for this). Each W_CLK / FQ_UD level
// lasts HALF fabric clocks, so a load takes about 2*HALF*41 clocks; `done` pulses when
// FQ_UD has returned low. The serial protocol is the chip's; that the controller feeds
// the tuning word to the DDS is what the publication shows, the rest is this design's.
module dds_loader
  import hermeis_pkg::*;
#(
  parameter int unsigned HALF = 4,           // fabric clocks per W_CLK half period
  parameter int unsigned P_M  = M_BITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,     // one-cycle request
  input  logic [P_M-1:0] fcw,
  output logic           busy,
  output logic           done,
  output logic           dds_wclk,
  output logic           dds_fqud,
  output logic           dds_data
);
  localparam int unsigned NBITS = 40;
  typedef enum logic [2:0] {S_INIT_W, S_INIT_F, S_IDLE, S_BIT_LO, S_BIT_HI, S_FQ_LO, S_FQ_HI} state_t;
  state_t state;

  logic [NBITS-1:0]           shreg;
  logic [$clog2(NBITS+1)-1:0] nleft;
  logic [$clog2(HALF+1)-1:0]  tick;
  logic                       tick_end;

  assign tick_end = (32'(tick) == HALF - 1);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT_W;
      shreg    <= '0;
      nleft    <= '0;
      tick     <= '0;
      done     <= 1'b0;
      dds_wclk <= 1'b0;
      dds_fqud <= 1'b0;
      dds_data <= 1'b0;
    end else begin
      done <= 1'b0;
      tick <= tick_end ? '0 : tick + 1'b1;
      unique case (state)
        // serial-mode entry: one W_CLK pulse, then one FQ_UD pulse
        S_INIT_W: if (tick_end) begin
          dds_wclk <= ~dds_wclk;
          if (dds_wclk) state <= S_INIT_F;
        end
        S_INIT_F: if (tick_end) begin
          dds_fqud <= ~dds_fqud;
          if (dds_fqud) state <= S_IDLE;
        end
        S_IDLE: begin
          tick <= '0;
          if (load) begin
            shreg    <= NBITS'(fcw) >> 1;      // control byte = 0
            dds_data <= fcw[0];
            nleft    <= NBITS[$clog2(NBITS+1)-1:0];
            state    <= S_BIT_LO;
          end
        end
        S_BIT_LO: if (tick_end) begin          // data set up, raise W_CLK
          dds_wclk <= 1'b1;
          state    <= S_BIT_HI;
        end
        S_BIT_HI: if (tick_end) begin          // lower W_CLK, present next bit
          dds_wclk <= 1'b0;
          dds_data <= shreg[0];
          shreg    <= shreg >> 1;
          nleft    <= nleft - 1'b1;
          state    <= (nleft == 1) ? S_FQ_LO : S_BIT_LO;
        end
        S_FQ_LO: if (tick_end) begin
          dds_fqud <= 1'b1;
          state    <= S_FQ_HI;
        end
        S_FQ_HI: if (tick_end) begin
          dds_fqud <= 1'b0;
          dds_data <= 1'b0;
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
