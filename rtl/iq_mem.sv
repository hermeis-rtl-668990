// iq_mem -- staging buffer for the I/Q pairs of all channels.
//
// 2*NCH words of ACC_W bits (10 x 32 bits for 4 WEs plus REF): word 2c holds I and word
// 2c+1 holds Q of channel c (channel 0 = REF, 1..4 = WE1..WE4). A write stores all words
// of one period at once, so a later period overwrites an earlier one in a single cycle and
// a reader never sees pairs from two different periods. The host reads one word at a
// time: rd_data is registered and valid the cycle after rd_addr is presented. Addresses
// past the last word read as zero. The word order is this design's choice.
module iq_mem
  import hermeis_pkg::*;
#(
  parameter int unsigned P_NCH   = NCH,
  parameter int unsigned P_ACC_W = ACC_W,
  localparam int unsigned DEPTH  = 2 * P_NCH,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic signed [P_ACC_W-1:0] i_in [P_NCH],
  input  logic signed [P_ACC_W-1:0] q_in [P_NCH],
  input  logic [AW-1:0]             rd_addr,
  output logic [P_ACC_W-1:0]        rd_data
);
  logic [P_ACC_W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < DEPTH; w++) mem[w] <= '0;
      rd_data <= '0;
    end else begin
      if (we)
        for (int c = 0; c < P_NCH; c++) begin
          mem[2*c]     <= i_in[c];
          mem[2*c + 1] <= q_in[c];
        end
      rd_data <= ({1'b0, rd_addr} < (AW+1)'(DEPTH)) ? mem[rd_addr] : '0;
    end
  end
endmodule
