// tb_aia_sram: random reads and writes on both ports of a small memory,
// checked against a model, including one-cycle read latency and the output
// holding its value while the port is idle.
module tb_aia_sram;
  localparam int W = 64;
  logic clk = 1'b0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [5:0] a_addr = '0, b_addr = '0;
  logic [31:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [31:0] model [W];
  logic [31:0] exp_a, exp_b;
  logic chk_a = 0, chk_b = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  aia_sram #(.WORDS(W)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < W; i++) begin
      @(negedge clk); a_en = 1; a_we = 1; a_addr = 6'(i); a_wdata = $urandom; model[i] = a_wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (chk_a) begin checks++; if (a_rdata != exp_a) begin failures++; $display("FAIL a %0d", t); end end
      if (chk_b) begin checks++; if (b_rdata != exp_b) begin failures++; $display("FAIL b %0d", t); end end
      a_en = $urandom % 2; a_we = $urandom % 2; a_addr = 6'($urandom); a_wdata = $urandom;
      b_en = $urandom % 2; b_we = $urandom % 2; b_addr = 6'($urandom); b_wdata = $urandom;
      if (b_en && b_we && a_en && a_we && a_addr == b_addr) b_en = 0;
      if (a_en && !a_we) exp_a = model[a_addr];
      if (b_en && !b_we) exp_b = model[b_addr];
      // a read of a word written on the other port this cycle returns the old value
      chk_a = (a_en && !a_we) || chk_a;
      chk_b = (b_en && !b_we) || chk_b;
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
