// sys_monitor -- acquisition sequencer and completion monitor.
//
// One acquisition per test frequency: a host request (`acq_req`, with the new tuning
// word already on the frequency controller's input) starts the frequency controller;
// its result is latched and drives the sample timer and the integrators; the tuning word
// is then loaded into the DDS; once the load is done the integrators are cleared and
// sampling runs. Every completed period writes its I/Q pairs to the staging buffer, so
// the pairs of the first period, which may carry the transient of the frequency switch,
// are overwritten by the second. When the pairs of the NCYC-th period (2) have been
// written, sampling stops and `done` is raised (the ADCs keep converting for the few
// samples that arrive while the integrators scale their last results); it stays high until the next request, which is what the host polls.
// `periods` counts completed periods of the current acquisition.
// That completion is signalled at the end of the second period follows the publication;
// the order of the steps before it is this design's choice.
module sys_monitor
  import hermeis_pkg::*;
#(
  parameter int unsigned P_NCYC = NCYC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       acq_req,       // one-cycle host request
  output logic       fcon_start,
  input  logic       fcon_valid,
  input  fcon_cfg_t  fcon_cfg_in,
  output fcon_cfg_t  cfg,           // latched configuration for this acquisition
  output logic       dds_load,
  input  logic       dds_done,
  output logic       iq_start,      // clears the integrators
  output logic       acq_run,       // sampling enabled
  input  logic       iq_valid,      // a period has been integrated
  output logic       mem_we,
  output logic       busy,
  output logic       done,
  output logic [7:0] periods
);
  typedef enum logic [1:0] {S_IDLE, S_FCON, S_DDS, S_ACQ} state_t;
  state_t state;

  assign busy   = (state != S_IDLE);
  assign mem_we = (state == S_ACQ) && iq_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg        <= '0;
      fcon_start <= 1'b0;
      dds_load   <= 1'b0;
      iq_start   <= 1'b0;
      acq_run    <= 1'b0;
      done       <= 1'b0;
      periods    <= '0;
    end else begin
      fcon_start <= 1'b0;
      dds_load   <= 1'b0;
      iq_start   <= 1'b0;
      unique case (state)
        S_IDLE: if (acq_req) begin
          done       <= 1'b0;
          periods    <= '0;
          fcon_start <= 1'b1;
          state      <= S_FCON;
        end
        S_FCON: if (fcon_valid) begin
          cfg      <= fcon_cfg_in;
          dds_load <= 1'b1;
          state    <= S_DDS;
        end
        S_DDS: if (dds_done) begin
          iq_start <= 1'b1;
          acq_run  <= 1'b1;
          state    <= S_ACQ;
        end
        S_ACQ: if (iq_valid) begin
          periods <= periods + 1'b1;
          if (32'(periods) + 1 >= P_NCYC) begin
            acq_run <= 1'b0;
            done    <= 1'b1;
            state   <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                     acq_req |-> !busy)
    else $warning("sys_monitor: request ignored while an acquisition is running");
endmodule
