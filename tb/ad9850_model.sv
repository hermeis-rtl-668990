// ad9850_model -- behavioural model of the AD9850 DDS serial load port (test-bench only).
// Shifts D7 in LSB first on W_CLK rises; on an FQ_UD rise the low 32 bits become the
// tuning word, `freq_hz` = word * F_REF / 2^32, `t_update` the time of the update and
// `nupdates` counts updates with 40 bits loaded (the serial-mode entry pulse is ignored).
module ad9850_model #(
  parameter real F_REF_HZ = 100.0e6
) (
  input  logic  wclk,
  input  logic  fqud,
  input  logic  data,
  output real   freq_hz,
  output real   t_update,
  output int    nupdates,
  output logic [31:0] word
);
  logic [39:0] sh;
  int nbits;
  initial begin freq_hz = 0.0; t_update = 0.0; nupdates = 0; word = '0; sh = '0; nbits = 0; end
  always @(posedge wclk) begin sh = {data, sh[39:1]}; nbits++; end
  always @(posedge fqud) begin
    if (nbits == 40) begin
      word     = sh[31:0];
      freq_hz  = real'(sh[31:0]) * F_REF_HZ / (2.0 ** 32);
      t_update = $realtime;
      nupdates++;
    end
    nbits = 0;
  end
endmodule
