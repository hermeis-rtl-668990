// tb_iq_mem -- self-checking test of the I/Q staging buffer.
// Writes random pairs for all channels at once, reads every word back (one-cycle read
// latency), checks the I/Q word order, that a second write overwrites all words, that
// reads without a write keep the contents and that out-of-range addresses read zero.
module tb_iq_mem;
  import hermeis_pkg::*;
  localparam int unsigned AW = $clog2(2 * NCH);
  logic clk = 0, rst_n = 0, we = 0;
  logic signed [ACC_W-1:0] i_in [NCH];
  logic signed [ACC_W-1:0] q_in [NCH];
  logic [AW-1:0] rd_addr;
  logic [ACC_W-1:0] rd_data;
  logic [ACC_W-1:0] model [2*NCH];
  int checks = 0, failures = 0;

  iq_mem dut (.*);
  always #10 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all();
    @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      i_in[c] = $urandom; q_in[c] = $urandom;
      model[2*c] = i_in[c]; model[2*c+1] = q_in[c];
    end
    we = 1;
    @(negedge clk) we = 0;
    for (int c = 0; c < NCH; c++) begin i_in[c] = $urandom; q_in[c] = $urandom; end  // not written
  endtask

  task automatic read_all();
    for (int a = 0; a < (1 << AW); a++) begin
      @(negedge clk) rd_addr = AW'(a);
      @(negedge clk);
      checks++;
      if (a < 2 * NCH) begin
        if (rd_data !== model[a]) begin failures++; $display("FAIL addr %0d: %h exp %h", a, rd_data, model[a]); end
      end else if (rd_data !== '0) begin
        failures++; $display("FAIL addr %0d out of range reads %h", a, rd_data);
      end
    end
  endtask

  initial begin
    rd_addr = '0;
    for (int c = 0; c < NCH; c++) begin i_in[c] = '0; q_in[c] = '0; end
    for (int w = 0; w < 2 * NCH; w++) model[w] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    read_all();          // reset contents are zero
    write_all();
    read_all();
    read_all();          // reads do not disturb
    write_all();         // second period overwrites the first
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
