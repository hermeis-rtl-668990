// i2c_target_model -- behavioural I2C target for one MCP40D17 rheostat (test-bench only).
// Works on the line levels of one bus: detects START/STOP, shifts bits in on SCL rises,
// acknowledges every byte when `answer` is high by pulling SDA low (`sda_pull`) for the
// ninth clock, and after a complete write of address 0x5C, command 0x00 and a data byte
// updates `wiper` and increments `nwrites`.
module i2c_target_model (
  input  logic       scl,
  input  logic       sda,
  input  logic       answer,
  output logic       sda_pull,
  output logic [6:0] wiper,
  output int         nwrites
);
  int nb, byte_i;
  logic [7:0] sh;
  logic [7:0] b [3];
  initial begin sda_pull = 1'b0; wiper = '0; nwrites = 0; nb = -1; byte_i = 0; sh = '0; end
  always @(negedge sda) if (scl) begin nb = 0; byte_i = 0; end
  always @(posedge sda) if (scl && nb >= 0) begin
    if (byte_i == 3 && b[0] == 8'h5C && b[1] == 8'h00) begin
      wiper = b[2][6:0];
      nwrites++;
    end
    nb = -1;
  end
  always @(posedge scl) if (nb >= 0) begin
    if (nb < 8) sh = {sh[6:0], sda};
    nb++;
  end
  always @(negedge scl) if (nb >= 0) begin
    if (nb == 8) begin
      if (byte_i < 3) b[byte_i] = sh;
      sda_pull = answer;
    end else if (nb == 9) begin
      sda_pull = 1'b0;
      nb = 0;
      byte_i++;
    end
  end
endmodule
