// tb_sys_monitor -- self-checking test of the acquisition sequencer.
// The test bench plays the frequency controller, the DDS loader and the integrators with
// fixed delays and checks the order fcon_start -> dds_load -> iq_start/acq_run, that every
// period produces a buffer write, that acquisition stops and `done` rises exactly at the
// end of the second period and that `done` holds until the next request.
module tb_sys_monitor;
  import hermeis_pkg::*;
  logic clk = 0, rst_n = 0, acq_req = 0;
  logic fcon_start, fcon_valid = 0, dds_load, dds_done = 0, iq_start, acq_run, iq_valid = 0;
  logic mem_we, busy, done;
  logic [7:0] periods;
  fcon_cfg_t fcon_cfg_in, cfg;
  int checks = 0, failures = 0;

  sys_monitor dut (.*);
  always #10 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  int nwe = 0;
  always @(posedge clk) if (rst_n && mem_we) nwe++;

  task automatic acquisition(input int n_per_cycles, input logic [N_W-1:0] np);
    int t;
    @(negedge clk) acq_req = 1;
    @(negedge clk) acq_req = 0;
    expect_true(fcon_start, "fcon_start after request");
    expect_true(busy && !done, "busy, done cleared");
    repeat (5) @(negedge clk);
    fcon_cfg_in = '{n_per: np, k: 16'd250, too_fast: 1'b0, four_m: 40'd12, qlen: 40'd123456};
    fcon_valid = 1;
    @(negedge clk) fcon_valid = 0;
    expect_true(dds_load, "dds_load after fcon result");
    expect_true(cfg.n_per == np && cfg.k == 16'd250, "configuration latched");
    expect_true(!acq_run, "no sampling before DDS load");
    repeat (7) @(negedge clk);
    dds_done = 1;
    @(negedge clk) dds_done = 0;
    expect_true(iq_start && acq_run, "integrators started with sampling");
    nwe = 0;
    for (int p = 0; p < 2; p++) begin
      repeat (n_per_cycles) @(negedge clk);
      expect_true(acq_run && !done, "still running before period end");
      iq_valid = 1;
      @(negedge clk) iq_valid = 0;
    end
    expect_true(nwe == 2, "both periods written to the buffer");
    expect_true(done && !acq_run && !busy, "done after the second period");
    expect_true(periods == 8'd2, "two periods counted");
    repeat (10) @(negedge clk);
    expect_true(done, "done holds");
  endtask

  initial begin
    fcon_cfg_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    acquisition(20, 32'd8);
    acquisition(3, 32'd4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
