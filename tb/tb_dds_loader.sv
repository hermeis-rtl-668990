// tb_dds_loader -- self-checking test of the AD9850 serial loader.
// The test bench acts as the DDS: after the serial-mode entry pulses (one W_CLK, then one
// FQ_UD, with no data bits) it shifts D7 in LSB first on every W_CLK rise, and on FQ_UD
// checks that exactly 40 bits arrived, the low 32 equal the requested tuning word and the
// control/phase byte is zero. The load duration is checked against 2*HALF*41 clocks.
module tb_dds_loader;
  localparam int unsigned HALF = 3;
  logic clk = 0, rst_n = 0, load = 0;
  logic [31:0] fcw;
  logic busy, done, dds_wclk, dds_fqud, dds_data;
  int checks = 0, failures = 0;

  dds_loader #(.HALF(HALF)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [39:0] sh = '0;
  int nbits = 0, nupd = 0, init_w = 0;
  logic [31:0] expect_w;
  always @(posedge dds_wclk) if (rst_n) begin
    sh = {dds_data, sh[39:1]};
    nbits++;
  end
  always @(posedge dds_fqud) if (rst_n) begin
    nupd++;
    if (nupd == 1) begin
      init_w = nbits;                 // serial-mode entry: exactly one W_CLK before it
      checks++;
      if (init_w != 1) begin failures++; $display("FAIL serial entry: %0d W_CLK", init_w); end
    end else begin
      checks += 3;
      if (nbits != 40)          begin failures++; $display("FAIL %0d bits", nbits); end
      if (sh[31:0] != expect_w) begin failures++; $display("FAIL word %h exp %h", sh[31:0], expect_w); end
      if (sh[39:32] != 8'h00)   begin failures++; $display("FAIL control byte %h", sh[39:32]); end
    end
    nbits = 0;
  end

  task automatic do_load(input logic [31:0] w);
    int cyc = 0;
    while (busy) @(negedge clk);
    expect_w = w;
    fcw = w; load = 1;
    @(negedge clk) load = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < 2 * HALF * 41 - 2 || cyc > 2 * HALF * 41 + 2) begin
      failures++; $display("FAIL load took %0d clocks", cyc);
    end
  endtask

  initial begin
    fcw = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_load(32'h0000_0002);            // 0.05 Hz
    do_load(32'h0020_C49C);            // ~ 50 kHz
    do_load(32'hA5A5_5A5A);
    for (int i = 0; i < 10; i++) do_load($urandom);
    repeat (20) @(negedge clk);
    checks++;
    if (nupd != 14) begin failures++; $display("FAIL %0d FQ_UD pulses", nupd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
