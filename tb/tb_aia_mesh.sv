// tb_aia_mesh: end-to-end run of a 2x2 accelerator mesh with small
// scratchpads, driven directly at the mesh interconnect's FIFO ports.
//
// A queue stands in for the request FIFO (show-ahead: in_valid/in_req are
// the head, in_pop removes it) and the response FIFO is modelled as a
// queue whose "full" flag is raised at random. The host loads the common
// program (aia_asm_pkg::e2e_program) into the four cores, starts them through
// the FETCH register, waits for DONE and then reads back and checks the
// neighbour sums (edges included), Knuth-Yao samples, interpolation
// results, global-buffer accesses (top row written, bottom row refused) and
// the barrier count. The DMA port writes and reads the global buffer while
// the cores run, which also provokes bank arbitration.
module tb_aia_mesh;
  import aia_pkg::*;
  import aia_asm_pkg::*;

  localparam int ROWS = 2, COLS = 2, NC = 4, NSAMP = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_pop, out_push, out_full;
  host_req_t in_req;
  logic [31:0] out_rdata;
  mem_req_t dma_req = '0;
  mem_rsp_t dma_rsp;
  logic [NC-1:0] core_done;
  int checks = 0, failures = 0;

  host_req_t   reqq[$];
  logic [31:0] rspq[$];

  always #5 clk = ~clk;

  aia_mesh #(.ROWS(ROWS), .COLS(COLS), .IMEM_WORDS(256), .DMEM_WORDS(256),
             .GB_BANKS(4), .GB_WORDS(256)) dut (
    .clk, .rst_n, .in_valid, .in_req, .in_pop, .out_push, .out_rdata, .out_full,
    .dma_req, .dma_rsp, .core_done);

  initial begin in_valid = 0; in_req = '0; out_full = 0; end
  always @(negedge clk) begin
    in_valid = reqq.size() > 0;
    in_req   = (reqq.size() > 0) ? reqq[0] : '0;
  end

  always @(posedge clk) begin
    if (rst_n && in_pop) void'(reqq.pop_front());
    if (rst_n && out_push) rspq.push_back(out_rdata);
    out_full <= ($urandom_range(3) == 0);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  task automatic hw(input logic [31:0] a, input logic [31:0] d);
    reqq.push_back('{we: 1, addr: a, wdata: d});
  endtask
  task automatic hr(input logic [31:0] a, output logic [31:0] d);
    while (reqq.size() > 0) @(posedge clk);
    rspq.delete();
    reqq.push_back('{we: 0, addr: a, wdata: 0});
    while (rspq.size() == 0) @(posedge clk);
    d = rspq.pop_front();
  endtask

  int n_done_polls = 0, n_dma = 0;

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] v;
    int unsigned w[32];
    e2e_program(NSAMP, 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < prog.size(); i++) hw(32'h1000_0000 | 32'(c << 16) | 32'(4 * i), prog[i]);
    hr(32'h1002_0008, v);
    check(v == prog[2], "instruction memory read back");
    hr({REGION_EVENT, 20'd0, CTRL_FETCH}, v);
    check(v == 0, "cores idle after reset");
    hw({REGION_EVENT, 20'd0, CTRL_FETCH}, 32'hF);
    // DMA traffic to the global buffer while the cores run
    fork
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        dma_req = '{req: 1, we: 1, addr: 32'h2000_0400 + 32'(4 * k), wdata: 32'hD0D0_0000 + 32'(k)};
        do @(posedge clk); while (!dma_rsp.gnt);
        @(negedge clk);
        dma_req = '0;
        n_dma++;
      end
    join_none
    for (int t = 0; t < 2000; t++) begin
      hr({REGION_EVENT, 20'd0, CTRL_DONE}, v);
      n_done_polls++;
      if (v[NC-1:0] == '1) break;
    end
    check(v[NC-1:0] == '1, "all cores halted");
    check(core_done == '1, "done outputs");
    wait (n_dma == 40);
    for (int c = 0; c < NC; c++) begin
      logic [31:0] base, st;
      base = 32'h1000_8000 | 32'(c << 16);
      hr(base, v);
      check(v == 32'(e2e_nb_sum(c, ROWS, COLS)), $sformatf("core %0d neighbour sum %0d", c, v));
      w = '{default: 0};
      w[0] = c + 1; w[1] = 2; w[2] = 3;
      st = 32'(c * 12345 + 1);
      for (int k = 0; k < NSAMP; k++) begin
        int bits, rej, e;
        e = ky_ref(w, 3, st, bits, rej);
        hr(base + 32'(4 + 4 * k), v);
        check(v == 32'(e), $sformatf("core %0d sample %0d = %0d expected %0d", c, k, v, e));
      end
      hr(base + 80, v);
      check(v == e2e_lut(c), $sformatf("core %0d lut %h", c, v));
      hr(base + 84, v);
      check(v == ((c < COLS) ? 32'(e2e_nb_sum(c, ROWS, COLS)) : 32'd0), $sformatf("core %0d global buffer %h", c, v));
      hr(base + 88, v);
      check(v == 32'd2, $sformatf("core %0d barrier count %0d", c, v));
    end
    for (int k = 0; k < 40; k++) begin
      hr(32'h2000_0400 + 32'(4 * k), v);
      check(v == 32'hD0D0_0000 + 32'(k), "DMA write to global buffer");
    end
    // stopping a core returns it to reset: DONE drops
    hw({REGION_EVENT, 20'd0, CTRL_FETCH}, 32'h0);
    hr({REGION_EVENT, 20'd0, CTRL_DONE}, v);
    check(v[NC-1:0] == '0, "done cleared when fetch disabled");
    hr(32'h5000_0000, v);
    check(v == 0, "unmapped read returns 0");
    $display("polls=%0d", n_done_polls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
