// iq_bank -- quarter-cycle integrators that turn one signal period into I/Q pairs.
//
// This is the core of the method. For every channel the samples of one signal period are
// summed in four quarter windows S_0..S_3, and at the end of the period
//     I * f_s = (S_0 + S_1 - (S_2 + S_3)) / 2
//     Q * f_s = (S_1 + S_2 - (S_0 + S_3)) / 2
// i.e. the half-period sum minus half of the full-period sum, taken once from the start
// of the period (I) and once a quarter later (Q). No sine/cosine reference is needed: the
// ratio of a channel's I - jQ to the reference's gives the impedance.
//
// Fractional quarter boundaries. After the clock divider is rounded, a period is not a
// whole number of samples. Positions are therefore tracked in units of 1/(4m) sample
// (m = DDS tuning word): a sample spans four_m = 4m units and a quarter spans
// qlen = L = round(2^M f_hat_s / F_DDS) units. A sample that a boundary cuts r units
// after its start gives r/(4m) of its value to the ending quarter and (4m - r)/(4m) to the
// next, which is the boundary correction of the published quarter sums. To keep this
// exact, the sums are held multiplied by 4m (each sample adds X*units) in SUM_W-bit
// accumulators; at the end of a period the two combinations are divided by 2*4m, rounded
// to nearest, by one shared sequential divider, and the periods keep running back to back
// (the last sample of a period also opens the next one).
//
// Each sample is re-centred on the ADC mid-scale before use; a constant cancels in both
// combinations, and the re-centred products keep the sums small. The divisions take
// about 2*NCH*(SUM_W+2) clocks; a period must last longer than that (at the default
// rates it lasts at least 4*250 clocks). A period that ends while the previous one is
// still being divided is dropped and sets the sticky `lost` flag.
//
// Timing: `start` (one cycle) clears the sums and begins a period at the next sample.
// `iq_valid` pulses for one cycle when all NCH pairs of a period are on i_out/q_out;
// they stay there until the next period's results replace them.
module iq_bank
  import hermeis_pkg::*;
#(
  parameter int unsigned P_NCH   = NCH,
  parameter int unsigned P_ACC_W = ACC_W,
  parameter int unsigned SUM_W   = 52
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [U_W-1:0]             four_m,       // units per sample (4m)
  input  logic [U_W-1:0]             qlen,         // units per quarter period (L >= 4m)
  input  logic                       sample_valid,
  input  logic [ADC_W-1:0]           sample [P_NCH],
  output logic                       iq_valid,
  output logic signed [P_ACC_W-1:0]  i_out [P_NCH],
  output logic signed [P_ACC_W-1:0]  q_out [P_NCH],
  output logic                       lost
);
  localparam int unsigned NDIV = 2 * P_NCH;

  logic [1:0]                quarter;
  logic [U_W:0]              togo;                 // units from sample start to next boundary
  logic signed [SUM_W-1:0]   s   [P_NCH][4];
  logic signed [SUM_W-1:0]   cmb [NDIV];           // snapshot: I and Q combinations, x 4m
  logic signed [ADC_W:0]     x   [P_NCH];
  logic signed [SUM_W-1:0]   xfull [P_NCH];        // X * 4m
  logic signed [SUM_W-1:0]   xpart [P_NCH];        // X * togo (part before the boundary)
  logic                      crosses;

  always_comb begin
    crosses = (togo < {1'b0, four_m});
    for (int c = 0; c < P_NCH; c++) begin
      x[c]     = signed'({1'b0, sample[c]}) - signed'((ADC_W+1)'(ADC_MID));
      xfull[c] = SUM_W'(x[c]) * signed'(SUM_W'({1'b0, four_m}));
      xpart[c] = SUM_W'(x[c]) * signed'(SUM_W'(togo));
    end
  end

  // ---------------- integration ----------------
  logic snap;                                      // a period has just ended
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      quarter <= '0;
      togo    <= '0;
      snap    <= 1'b0;
      for (int c = 0; c < P_NCH; c++)
        for (int j = 0; j < 4; j++) s[c][j] <= '0;
      for (int d = 0; d < NDIV; d++) cmb[d] <= '0;
    end else begin
      snap <= 1'b0;
      if (start) begin
        quarter <= '0;
        togo    <= {1'b0, qlen};
        for (int c = 0; c < P_NCH; c++)
          for (int j = 0; j < 4; j++) s[c][j] <= '0;
      end else if (sample_valid) begin
        if (!crosses) begin
          for (int c = 0; c < P_NCH; c++) s[c][quarter] <= s[c][quarter] + xfull[c];
          togo <= togo - {1'b0, four_m};
        end else begin
          // boundary inside this sample: split it between this quarter and the next
          quarter <= quarter + 1'b1;
          togo    <= (togo + {1'b0, qlen} >= {1'b0, four_m}) ? togo + {1'b0, qlen} - {1'b0, four_m} : '0;
          if (quarter == 2'd3) begin
            snap <= 1'b1;
            for (int c = 0; c < P_NCH; c++) begin
              logic signed [SUM_W-1:0] s3;
              s3 = s[c][3] + xpart[c];
              cmb[2*c]     <= s[c][0] + s[c][1] - s[c][2] - s3;
              cmb[2*c + 1] <= s[c][1] + s[c][2] - s[c][0] - s3;
              s[c][0] <= xfull[c] - xpart[c];
              s[c][1] <= '0;
              s[c][2] <= '0;
              s[c][3] <= '0;
            end
          end else begin
            for (int c = 0; c < P_NCH; c++) begin
              s[c][quarter]        <= s[c][quarter] + xpart[c];
              s[c][quarter + 2'd1] <= s[c][quarter + 2'd1] + xfull[c] - xpart[c];
            end
          end
        end
      end
    end
  end

  // ---------------- scaling: divide each combination by 2*4m, rounded ----------------
  logic                    dv_busy, dv_start, dv_done, dv_run;
  logic [SUM_W-1:0]        dv_num, dv_den, dv_quot, dv_rem;
  logic [$clog2(NDIV+1)-1:0] idx;
  logic signed [P_ACC_W-1:0] res [NDIV];

  udiv_seq #(.W(SUM_W)) u_div (
    .clk, .rst_n, .start(dv_start), .numer(dv_num), .denom(dv_den),
    .busy(dv_busy), .done(dv_done), .quot(dv_quot), .rem(dv_rem)
  );

  function automatic logic [SUM_W-1:0] mag(input logic signed [SUM_W-1:0] v);
    return v[SUM_W-1] ? SUM_W'(-v) : SUM_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv_run   <= 1'b0;
      dv_start <= 1'b0;
      dv_num   <= '0;
      dv_den   <= '0;
      idx      <= '0;
      iq_valid <= 1'b0;
      lost     <= 1'b0;
      for (int d = 0; d < NDIV; d++) res[d] <= '0;
      for (int c = 0; c < P_NCH; c++) begin
        i_out[c] <= '0;
        q_out[c] <= '0;
      end
    end else begin
      dv_start <= 1'b0;
      iq_valid <= 1'b0;
      if (start) lost <= 1'b0;
      if (snap && dv_run) lost <= 1'b1;
      if (snap && !dv_run) begin
        dv_run   <= 1'b1;
        idx      <= '0;
        dv_num   <= mag(cmb[0]) + SUM_W'({1'b0, four_m});      // + half the divisor
        dv_den   <= SUM_W'({1'b0, four_m}) << 1;
        dv_start <= 1'b1;
      end else if (dv_run && dv_done) begin
        res[idx] <= cmb[idx][SUM_W-1] ? -P_ACC_W'(dv_quot) : P_ACC_W'(dv_quot);
        if (32'(idx) == NDIV - 1) begin
          dv_run   <= 1'b0;
          iq_valid <= 1'b1;
          for (int c = 0; c < P_NCH - 1; c++) begin
            i_out[c] <= res[2*c];
            q_out[c] <= res[2*c + 1];
          end
          i_out[P_NCH-1] <= res[NDIV-2];
          q_out[P_NCH-1] <= cmb[NDIV-1][SUM_W-1] ? -P_ACC_W'(dv_quot) : P_ACC_W'(dv_quot);
        end else begin
          idx      <= idx + 1'b1;
          dv_num   <= mag(cmb[idx + 1'b1]) + SUM_W'({1'b0, four_m});
          dv_start <= 1'b1;
        end
      end
    end
  end

  logic unused_div;
  assign unused_div = ^{dv_rem, dv_busy, dv_quot[SUM_W-1:P_ACC_W]};
endmodule
