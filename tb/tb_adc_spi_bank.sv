// tb_adc_spi_bank -- self-checking test of the sample timer and the SPI master.
// NCH MCP3008 models share SCLK/CS_n/MOSI. Each conversion the test bench changes every
// model's input codes; the samples returned must equal the codes of the broadcast
// channel address. The sample period must be exactly k clocks, a too-small k must raise
// `overrun`, and the frame must be protocol-correct.
module tb_adc_spi_bank;
  import hermeis_pkg::*;
  localparam int unsigned HALF = 2;
  logic clk = 0, rst_n = 0, run = 0;
  logic [K_W-1:0] k;
  logic [2:0] chan_addr;
  logic adc_sclk, adc_cs_n, adc_mosi;
  logic [NCH-1:0] adc_miso;
  logic sample_valid, overrun;
  logic [ADC_W-1:0] sample [NCH];
  logic [9:0] vin [NCH][8];
  logic [NCH-1:0] perr;
  int nconv [NCH];
  logic [2:0] laddr [NCH];
  int checks = 0, failures = 0;

  adc_spi_bank #(.SCLK_HALF(HALF)) dut (.*);
  for (genvar c = 0; c < NCH; c++) begin : g_adc
    mcp3008_model u_adc (.sclk(adc_sclk), .cs_n(adc_cs_n), .mosi(adc_mosi), .miso(adc_miso[c]),
                         .vin(vin[c]), .proto_err(perr[c]), .nconv(nconv[c]), .last_addr(laddr[c]));
  end
  always #10 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // new random input codes at the start of every frame; remember the expected ones
  logic [NCH-1:0][9:0] expq [$];
  always @(negedge adc_cs_n) begin
    logic [NCH-1:0][9:0] e;
    for (int c = 0; c < NCH; c++) begin
      for (int a = 0; a < 8; a++) vin[c][a] = 10'($urandom);
      e[c] = vin[c][chan_addr];
    end
    expq.push_back(e);
  end

  longint last_t = -1, t;
  int period_err = 0, nsamp = 0;
  always @(posedge clk) if (rst_n && sample_valid) begin
    logic [NCH-1:0][9:0] e;
    nsamp++;
    t = $time / 20;
    if (last_t >= 0 && (t - last_t) != longint'(k)) period_err++;
    last_t = t;
    e = expq.pop_front();
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (sample[c] !== e[c]) begin
        failures++;
        $display("FAIL ch%0d sample %h exp %h at %0t k=%0d n=%0d", c, sample[c], e[c], $time, k, nsamp);
      end
    end
  end

  task automatic run_for(input int kk, input int addr, input int nsamples);
    k = K_W'(kk); chan_addr = 3'(addr);
    last_t = -1; period_err = 0; nsamp = 0;
    @(negedge clk) run = 1;
    while (nsamp < nsamples) @(negedge clk);
    run = 0;
    repeat (100) @(negedge clk);
    expq.delete();
  endtask

  initial begin
    k = 100; chan_addr = 0;
    for (int c = 0; c < NCH; c++) for (int a = 0; a < 8; a++) vin[c][a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // frame = 17*2*HALF + HALF = 70 clocks
    run_for(100, 0, 20);
    checks++; if (period_err != 0) begin failures++; $display("FAIL sample period (k=100)"); end
    checks++; if (overrun)         begin failures++; $display("FAIL spurious overrun"); end
    run_for(71, 5, 15);
    checks++; if (period_err != 0) begin failures++; $display("FAIL sample period (k=71)"); end
    checks++; if (laddr[0] != 3'd5) begin failures++; $display("FAIL address not broadcast"); end
    checks++; if (overrun)         begin failures++; $display("FAIL spurious overrun"); end
    // k shorter than a frame: ticks are dropped and overrun is flagged
    k = 40; chan_addr = 0;
    @(negedge clk) run = 1;
    repeat (400) @(negedge clk);
    run = 0;
    repeat (100) @(negedge clk);
    expq.delete();
    checks++; if (!overrun) begin failures++; $display("FAIL overrun not flagged"); end
    checks++; if (perr != '0) begin failures++; $display("FAIL protocol error in frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
