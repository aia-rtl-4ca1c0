// tb_aia_lfsr: checks the sampler's LFSR against a bit-by-bit model of the
// same polynomial: reset value, seed load (and zero-seed substitution),
// stepping only when asked, and a long random run.
module tb_aia_lfsr;
  import aia_asm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0, rbit;
  logic [31:0] seed = '0, model;
  int checks = 0, failures = 0, ones = 0, nstep = 0;
  always #5 clk = ~clk;
  aia_lfsr dut (.*);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    model = 32'd1;
    check(dut.state == model, "reset value");
    @(negedge clk); seed = 32'hDEAD_BEEF; load = 1'b1;
    @(negedge clk); load = 1'b0; model = 32'hDEAD_BEEF;
    repeat (3) @(negedge clk);
    check(dut.state == model, "holds without step");
    for (int i = 0; i < 2000; i++) begin
      check(rbit == model[0], $sformatf("bit %0d", i));
      step = ($urandom % 4) != 0;
      if (step) begin ones += int'(rbit); nstep++; end
      @(negedge clk);
      if (step) model = lfsr_next(model);
    end
    step = 1'b0;
    check(ones * 10 > nstep * 4 && ones * 10 < nstep * 6, $sformatf("balance %0d", ones));
    seed = '0; load = 1'b1; step = 1'b1;
    @(negedge clk); load = 1'b0; step = 1'b0;
    check(dut.state == 32'd1, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
