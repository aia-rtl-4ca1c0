// tb_aia_ky_sampler: self-checking testbench of the Knuth-Yao sampler.
//
// A behavioural register file feeds the row and column ports. Every sample
// is compared with a software walk of the same tree (aia_asm_pkg::ky_ref)
// driven by a software copy of the LFSR, including the number of random
// bits, the rejections, and the latency N + bits (cycles from the start
// edge to the edge that sees `done`). Cases: the published example
// (three equal weights, random bits 0,0 -> reject, then 1,0 -> item 1),
// random distributions of 1..31 items, a power-of-two total (no rejection
// weight), and the zero cases.
module tb_aia_ky_sampler;
  import aia_asm_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        start = 1'b0;
  logic [4:0]  size = '0;
  logic        seed_load = 1'b0;
  logic [31:0] seed = '0;
  logic [4:0]  row_addr, col_bit, result;
  logic [31:0] row_data, col_data;
  logic        busy, done, reject, rbit_used;
  logic [31:0] priv [32];
  int checks = 0, failures = 0;
  int n_rej = 0;
  logic [31:0] sw_state;
  logic [4:0]  last_result;

  always #5 clk = ~clk;

  aia_ky_sampler dut (.*);

  assign row_data = priv[row_addr];
  always_comb for (int i = 0; i < 32; i++) col_data[i] = priv[i][col_bit];

  always @(posedge clk) if (reject) n_rej++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_seed(input logic [31:0] s);
    @(negedge clk); seed = s; seed_load = 1'b1;
    @(negedge clk); seed_load = 1'b0;
    sw_state = (s == 0) ? 32'd1 : s;
  endtask

  task automatic run_one(input int n);
    int unsigned w[32];
    int exp, bits, rej, cyc, rej0;
    for (int i = 0; i < 32; i++) w[i] = priv[i][15:0];
    exp = ky_ref(w, n, sw_state, bits, rej);
    rej0 = n_rej;
    @(negedge clk); size = 5'(n); start = 1'b1;
    @(posedge clk); cyc = 0;
    @(negedge clk); start = 1'b0;
    forever begin
      @(posedge clk); cyc++;
      if (done) break;
      if (cyc > 5000) break;
    end
    last_result = result;
    check(done && int'(result) == exp, $sformatf("n=%0d result %0d expected %0d", n, result, exp));
    // an empty distribution takes one extra cycle and draws no bits
    check(cyc == n + ((bits == 0) ? 1 : bits),
          $sformatf("n=%0d latency %0d expected %0d", n, cyc, n + bits));
    @(negedge clk);
    check(n_rej - rej0 == rej, $sformatf("rejections %0d expected %0d", n_rej - rej0, rej));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist[4];
    int totbits;
    for (int i = 0; i < 32; i++) priv[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Published example: weights 1,1,1, rejection weight 1.
    priv[0] = 1; priv[1] = 1; priv[2] = 1;
    // a seed whose first bits are 0,0,1,0: reject, then item 1
    load_seed(32'd12);
    run_one(3);
    check(last_result == 5'd1 && n_rej == 1, $sformatf("published example: reject then P1 (got %0d, %0d rejections)", last_result, n_rej));
    // many samples: all results match the model, every item drawn
    hist = '{default: 0};
    totbits = 0;
    load_seed(32'hACE1_2345);
    for (int k = 0; k < 300; k++) begin
      run_one(3);
      if (last_result < 4) hist[last_result]++;
    end
    check(hist[0] > 60 && hist[1] > 60 && hist[2] > 60 && hist[3] == 0,
          $sformatf("histogram %0d %0d %0d", hist[0], hist[1], hist[2]));

    // random distributions
    for (int t = 0; t < 60; t++) begin
      int n;
      n = 1 + ($urandom % 31);
      for (int i = 0; i < 32; i++) priv[i] = (i < n) ? ($urandom % ((t % 3 == 0) ? 4 : 300)) : $urandom;
      priv[$urandom % n] = 1 + $urandom % 50;   // never all zero
      load_seed($urandom);
      run_one(n);
    end

    // power-of-two total: no rejection weight
    for (int i = 0; i < 32; i++) priv[i] = '0;
    priv[0] = 3; priv[1] = 5;
    load_seed(32'h1234_5678);
    for (int k = 0; k < 20; k++) run_one(2);

    // zero size and an all-zero distribution return 0
    for (int i = 0; i < 32; i++) priv[i] = '0;
    run_one(0);
    run_one(4);
    check(last_result == 0, "all-zero distribution");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
