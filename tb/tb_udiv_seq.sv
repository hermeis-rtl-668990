// tb_udiv_seq -- self-checking test of the sequential divider.
// Random and corner-case 64-bit divisions are compared with the language's own / and %,
// and the latency (W cycles from start to done) is checked.
module tb_udiv_seq;
  localparam int unsigned W = 64;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] numer, denom, quot, rem;
  logic busy, done;
  int checks = 0, failures = 0;

  udiv_seq #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic divide(input logic [W-1:0] n, input logic [W-1:0] d);
    int cyc = 0;
    @(negedge clk);
    numer = n; denom = d; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (quot !== n / d || rem !== n % d) begin
      failures++;
      $display("FAIL %0d / %0d: got q=%0d r=%0d", n, d, quot, rem);
    end
    checks++;
    if (cyc != W) begin       // done is seen W cycles after the start edge
      failures++;
      $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    numer = 0; denom = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    divide(64'd8589935, 64'd8);
    divide(64'd2147483648 + 64'd4294, 64'd8589940);
    divide(64'd1, 64'd1);
    divide(64'd5, 64'd7);
    divide({W{1'b1}}, 64'd3);
    divide({W{1'b1}}, {1'b1, {(W-1){1'b0}}});
    for (int i = 0; i < 300; i++) begin
      logic [W-1:0] n, d;
      n = {$urandom, $urandom};
      d = {$urandom, $urandom} >> ($urandom % 64);
      if (d == 0) d = 1;
      divide(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
