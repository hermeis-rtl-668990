// mcp3008_model -- behavioural model of one MCP3008 8-channel 10-bit SAR ADC (SPI side).
// Test-bench only. Frame (SPI mode 0,0, CS_n low for the frame): start bit, SGL/DIFF and
// address D2..D0 are read on rising SCLK edges 1..5; the selected input code is held at
// edge 5; a null bit is driven after falling edge 6 and B9..B0 after falling edges 7..16.
// `vin` gives the code each input would convert to. `proto_err` is set if the start or
// SGL bit is not 1; `nconv` counts completed frames and `last_addr` is the last address.
module mcp3008_model (
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  input  logic [9:0] vin [8],
  output logic       proto_err,
  output int         nconv,
  output logic [2:0] last_addr
);
  int         nrise;
  logic [4:0] cmd;
  logic [9:0] held;

  initial begin
    miso = 1'b0; proto_err = 1'b0; nconv = 0; last_addr = '0;
    nrise = 0; cmd = '0; held = '0;
  end

  always @(negedge cs_n) begin
    nrise = 0;
    miso  = 1'b0;
  end

  always @(posedge sclk) if (!cs_n) begin
    nrise = nrise + 1;
    if (nrise <= 5) cmd = {cmd[3:0], mosi};
    if (nrise == 5) begin
      if (cmd[4] !== 1'b1 || cmd[3] !== 1'b1) proto_err = 1'b1;
      last_addr = cmd[2:0];
      held      = vin[cmd[2:0]];
    end
    if (nrise == 17) nconv = nconv + 1;
  end

  always @(negedge sclk) if (!cs_n) begin
    if (nrise == 6)                     miso = 1'b0;               // null bit
    else if (nrise >= 7 && nrise <= 16) miso = held[16 - nrise];   // B9 .. B0
  end
endmodule
