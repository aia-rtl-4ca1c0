// tb_aia_cdc_fifo: pushes a numbered stream through the FIFO between two
// unrelated clocks (7 ns and 11 ns periods) with random stalls on both
// sides; checks order and completeness, that `full` stops writes at
// DEPTH entries, and that `empty` is high once drained.
module tb_aia_cdc_fifo;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr = 0, rd = 0, full, empty;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  int sent = 0, got = 0, max_fill = 0;
  localparam int N = 500;
  always #3.5 wclk = ~wclk;
  always #5.5 rclk = ~rclk;
  aia_cdc_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // writer
  initial begin
    repeat (3) @(negedge wclk); wrst_n = 1;
    while (sent < N) begin
      @(negedge wclk);
      wr = ($urandom % 3) != 0 || sent > N - 40;
      wdata = 16'(sent);
      @(posedge wclk);
      if (wr && !full) sent++;
    end
    @(negedge wclk); wr = 0;
  end
  // reader
  initial begin
    repeat (3) @(negedge rclk); rrst_n = 1;
    // let the writer fill the FIFO first
    repeat (20) @(negedge rclk);
    checks++;
    if (!(dut.wbin - dut.rbin == 4)) begin failures++; $display("FAIL: did not fill to 4"); end
    while (got < N) begin
      @(negedge rclk);
      rd = ($urandom % 4) != 0;
      @(posedge rclk);
      if (rd && !empty) begin
        checks++;
        if (rdata != 16'(got)) begin failures++; $display("FAIL: got %0d exp %0d", rdata, got); end
        got++;
      end
    end
    @(negedge rclk); rd = 0;
    repeat (4) @(negedge rclk);
    checks++;
    if (!empty) begin failures++; $display("FAIL: not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
