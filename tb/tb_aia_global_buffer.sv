// tb_aia_global_buffer: writes a pattern into every bank (small banks) and
// reads it back, with all banks accessed in parallel each cycle.
module tb_aia_global_buffer;
  localparam int B = 16, WDS = 64;
  logic clk = 0;
  logic [B-1:0] en = '0, we = '0;
  logic [B-1:0][5:0] addr = '0;
  logic [B-1:0][31:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  aia_global_buffer #(.N_BANKS(B), .BANK_WORDS(WDS)) dut (.*);
  function automatic logic [31:0] pat(input int b, input int a);
    return 32'(b * 1000003 + a * 7919) ^ 32'h5A5A_0000;
  endfunction
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < WDS; a++) begin
      @(negedge clk);
      en = '1; we = '1;
      for (int b = 0; b < B; b++) begin addr[b] = 6'(a); wdata[b] = pat(b, a); end
    end
    for (int a = 0; a < WDS; a++) begin
      @(negedge clk);
      en = '1; we = '0;
      for (int b = 0; b < B; b++) addr[b] = 6'((a + b) % WDS);
      @(negedge clk);
      en = '0;
      for (int b = 0; b < B; b++) begin
        checks++;
        if (rdata[b] != pat(b, (a + b) % WDS)) begin failures++; $display("FAIL bank %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
