// tb_i2c_rheo -- self-checking test of the rheostat I2C master.
// Every bus has a small I2C target model built here from the open-drain enables: it
// detects START/STOP, shifts bits in on SCL rises, pulls SDA low for the ACK after every
// byte and records the three bytes of each write. The test checks address+W 0x5C, command
// 0x00 and the wiper byte on every device, the device order, the bit rate (4*QTR clocks
// per bit) and that a device that does not answer is reported through `nack`.
module tb_i2c_rheo;
  localparam int unsigned NDEV = 5;
  localparam int unsigned QTR  = 3;
  logic clk = 0, rst_n = 0, go = 0;
  logic [6:0] wiper [NDEV];
  logic [NDEV-1:0] scl_oe, sda_oe, sda_in;
  logic busy, done;
  logic [NDEV-1:0] nack;
  logic [NDEV-1:0] mute;                 // targets that do not acknowledge
  int checks = 0, failures = 0;

  i2c_rheo #(.NDEV(NDEV), .QTR(QTR)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NDEV-1:0] ack_pull;
  assign sda_in = ~(sda_oe | ack_pull);

  int order [$];
  logic [7:0] got [NDEV][3];
  int nstop [NDEV];

  for (genvar d = 0; d < NDEV; d++) begin : g_tgt
    wire scl = ~scl_oe[d];
    wire sda = ~(sda_oe[d] | ack_pull[d]);
    int nb = -1;         // bit count inside the transfer, -1 = idle
    int byte_i = 0;
    logic [7:0] sh;
    initial ack_pull[d] = 1'b0;
    always @(negedge sda) if (scl) begin nb = 0; byte_i = 0; order.push_back(d); end   // START
    always @(posedge sda) if (scl && nb >= 0) begin nb = -1; nstop[d]++; end            // STOP
    always @(posedge scl) if (nb >= 0) begin
      if (nb < 8) sh = {sh[6:0], sda};
      nb++;
    end
    always @(negedge scl) if (nb >= 0) begin
      if (nb == 8) begin
        if (byte_i < 3) got[d][byte_i] = sh;
        ack_pull[d] = !mute[d];
      end else if (nb == 9) begin
        ack_pull[d] = 1'b0;
        nb = 0;
        byte_i++;
      end
    end
  end

  task automatic write_all(input logic [NDEV-1:0] m);
    int cyc = 0;
    mute = m;
    order.delete();
    for (int d = 0; d < NDEV; d++) begin
      wiper[d] = 7'($urandom);
      for (int b = 0; b < 3; b++) got[d][b] = 8'hEE;
      nstop[d] = 0;
    end
    @(negedge clk) go = 1;
    @(negedge clk) go = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < NDEV * 29 * 4 * QTR - 2 || cyc > NDEV * 29 * 4 * QTR + 2) begin
      failures++; $display("FAIL write took %0d clocks", cyc);
    end
    checks++;
    if (order.size() != NDEV) begin failures++; $display("FAIL %0d transfers", order.size()); end
    for (int d = 0; d < NDEV; d++) begin
      checks += 2;
      if (order.size() > d && order[d] != d) begin failures++; $display("FAIL order"); end
      if (nstop[d] != 1) begin failures++; $display("FAIL dev %0d STOP count %0d", d, nstop[d]); end
      checks += 3;
      if (got[d][0] != 8'h5C) begin failures++; $display("FAIL dev %0d address byte %h", d, got[d][0]); end
      if (!m[d]) begin
        if (got[d][1] != 8'h00) begin failures++; $display("FAIL dev %0d command %h", d, got[d][1]); end
        if (got[d][2] != {1'b0, wiper[d]}) begin failures++; $display("FAIL dev %0d wiper %h exp %h", d, got[d][2], wiper[d]); end
      end
    end
    checks++;
    if (nack != m) begin failures++; $display("FAIL nack %b exp %b", nack, m); end
  endtask

  initial begin
    mute = '0;
    for (int d = 0; d < NDEV; d++) wiper[d] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_all('0);
    write_all(5'b00100);   // device 2 silent
    checks++;
    if (scl_oe != '0 || sda_oe != '0) begin failures++; $display("FAIL bus not released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
