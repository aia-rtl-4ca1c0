// tb_aia_regfile: checks the 64-word register file: writes and reads on all
// indexes with x0 fixed at zero, write-first bypass, the neighbour port's
// priority decoder (N > S > W > E, one grant per cycle, reads of the shared
// half only), and the sampler row/column and interpolation ports.
module tb_aia_regfile;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [5:0]  ra_addr = '0, rb_addr = '0, waddr = '0;
  logic [31:0] ra_data, rb_data, wdata = '0;
  logic        we = 1'b0;
  logic [3:0]       sh_req = '0;
  logic [3:0][4:0]  sh_addr = '0;
  logic [3:0]       sh_gnt;
  logic [31:0]      sh_rdata;
  logic [4:0]  su_row_addr = '0, su_col_bit = '0, iu_addr_a = '0, iu_addr_b = '0;
  logic [31:0] su_row_data, su_col_data, iu_data_a, iu_data_b;
  logic [31:0] model [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  aia_regfile dut (.*);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 64; i++) model[i] = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 6'(i); wdata = $urandom;
      if (i != 0) model[i] = wdata;
      ra_addr = 6'(i);
      #1 check(ra_data == model[i], $sformatf("bypass r%0d", i));
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 64; i++) begin
      ra_addr = 6'(i); rb_addr = 6'(63 - i);
      #1 check(ra_data == model[i] && rb_data == model[63 - i], $sformatf("read r%0d", i));
    end
    // neighbour port: every request pattern
    for (int pat = 0; pat < 16; pat++) begin
      int w;
      for (int d = 0; d < 4; d++) sh_addr[d] = 5'($urandom);
      sh_req = 4'(pat);
      w = -1;
      for (int d = 3; d >= 0; d--) if (pat[d]) w = d;
      #1;
      check(sh_gnt == ((w < 0) ? 4'd0 : 4'(1 << w)), $sformatf("grant pattern %0d", pat));
      if (w >= 0) check(sh_rdata == model[sh_addr[w]], "neighbour data");
    end
    sh_req = '0;
    // sampler and interpolation ports on the private half
    for (int t = 0; t < 64; t++) begin
      logic [31:0] col;
      su_row_addr = 5'($urandom); su_col_bit = 5'($urandom);
      iu_addr_a = 5'($urandom); iu_addr_b = 5'($urandom);
      for (int i = 0; i < 32; i++) col[i] = model[32 + i][su_col_bit];
      #1;
      check(su_row_data == model[32 + su_row_addr], "row port");
      check(su_col_data == col, "column port");
      check(iu_data_a == model[32 + iu_addr_a] && iu_data_b == model[32 + iu_addr_b], "iu ports");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
