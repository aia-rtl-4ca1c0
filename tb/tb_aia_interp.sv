// tb_aia_interp: checks the interpolation unit against a direct model of
// the table lookup and linear interpolation for all four precisions, random
// fraction widths, random tables and operands, including the table end
// (wrap to entry 0) and the published example setting (8-bit entries, 8
// fraction bits).
module tb_aia_interp;
  logic [31:0] rs1, data_a, data_b, result;
  logic [1:0]  prec_code;
  logic [4:0]  frac_bits, addr_a, addr_b;
  logic [31:0] table_q [32];
  int checks = 0, failures = 0;

  aia_interp dut (.*);
  assign data_a = table_q[addr_a];
  assign data_b = table_q[addr_b];

  function automatic longint entry(input int k, input int p);
    logic [1023:0] flat;
    for (int i = 0; i < 32; i++) flat[i*32 +: 32] = table_q[i];
    k = k % (1024 / p);
    return longint'((flat >> (k * p)) & ((1024'(1) << p) - 1));
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int p, f, idx;
      longint y0, y1, fr, exp;
      for (int i = 0; i < 32; i++) table_q[i] = $urandom;
      prec_code = 2'($urandom);
      p = 4 << prec_code;
      f = (t < 200) ? 8 : int'($urandom % 16);
      frac_bits = 5'(f);
      idx = (t % 50 == 0) ? (1024 / p - 1) : int'($urandom % (1024 / p));
      fr  = longint'($urandom) & ((64'd1 << f) - 1);
      rs1 = 32'((longint'(idx) << f) | fr);
      if (t < 200) prec_code = 2'd1;
      p = 4 << prec_code;
      idx = int'(rs1 >> f);
      y0 = entry(idx, p);
      y1 = entry(idx + 1, p);
      fr = longint'(rs1) & ((64'd1 << f) - 1);
      exp = y0 + ((fr * (y1 - y0)) >>> f);
      #1;
      checks++;
      if (result !== 32'(exp)) begin
        failures++;
        if (failures < 10) $display("FAIL: p=%0d f=%0d rs1=%h got %h exp %h", p, f, rs1, result, 32'(exp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
