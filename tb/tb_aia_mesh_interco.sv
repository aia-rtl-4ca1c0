// tb_aia_mesh_interco: checks the host-side mesh interconnect on its own.
//
// Four core scratchpads, the global buffer behind a TCDM port that grants at
// random and an event-unit register file are modelled here as simple
// memories with one cycle of read latency. A random stream of reads and
// writes to all regions (cores, global buffer, event unit, control
// registers, unmapped space) goes through the request port; the response
// port raises "full" at random. Every read is checked against a reference
// memory, writes against the model memories, and the cycle counts of a
// single write (2 cycles: accept, issue) and a single read (4 cycles:
// accept, issue, capture, push) are checked with an always-ready target.
module tb_aia_mesh_interco;
  import aia_pkg::*;

  localparam int NC = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_pop, out_push, out_full = 0;
  host_req_t in_req = '0;
  logic [31:0] out_rdata;
  mem_req_t core_req [NC];
  logic [31:0] core_rdata [NC];
  mem_req_t tcdm_req;
  mem_rsp_t tcdm_rsp;
  logic ev_en, ev_we;
  logic [7:0] ev_addr;
  logic [31:0] ev_wdata, ev_rdata;
  logic [NC-1:0] fetch_en, core_done;
  int checks = 0, failures = 0;
  bit rnd_gnt = 0, rnd_full = 0;

  always #5 clk = ~clk;

  aia_mesh_interco #(.N_CORES(NC)) dut (.*);

  // ------------------------------------------------------------ models
  logic [31:0] cmem [NC][64];
  logic [31:0] gmem [64];
  logic [31:0] evreg [4];
  logic        gnt_q;
  initial begin
    for (int c = 0; c < NC; c++) for (int i = 0; i < 64; i++) cmem[c][i] = 0;
    for (int i = 0; i < 64; i++) gmem[i] = 0;
    for (int i = 0; i < 4; i++) evreg[i] = 0;
    gnt_q = 1; tcdm_rsp = '0; ev_rdata = 0; core_done = 4'b0101;
    for (int c = 0; c < NC; c++) core_rdata[c] = 0;
  end
  always_comb begin
    tcdm_rsp.gnt = tcdm_req.req && gnt_q;
  end
  always @(posedge clk) begin
    gnt_q <= rnd_gnt ? ($urandom_range(2) == 0) : 1'b1;
    out_full <= rnd_full ? ($urandom_range(2) == 0) : 1'b0;
    tcdm_rsp.rvalid <= tcdm_rsp.gnt && !tcdm_req.we;
    for (int c = 0; c < NC; c++) if (core_req[c].req) begin
      if (core_req[c].we) cmem[c][core_req[c].addr[7:2]] <= core_req[c].wdata;
      else core_rdata[c] <= cmem[c][core_req[c].addr[7:2]];
    end
    if (tcdm_rsp.gnt) begin
      if (tcdm_req.we) gmem[tcdm_req.addr[7:2]] <= tcdm_req.wdata;
      else tcdm_rsp.rdata <= gmem[tcdm_req.addr[7:2]];
    end
    if (ev_en) begin
      if (ev_we) evreg[ev_addr[3:2]] <= ev_wdata;
      else ev_rdata <= evreg[ev_addr[3:2]];
    end
  end

  // request / response queues
  host_req_t   reqq[$];
  logic [31:0] rspq[$];
  always @(negedge clk) begin
    in_valid = reqq.size() > 0;
    in_req   = (reqq.size() > 0) ? reqq[0] : '0;
  end
  int cyc = 0, pop_n = 0, push_cyc = 0;
  int pop_cyc [4];
  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_pop) begin
      void'(reqq.pop_front());
      if (pop_n < 4) pop_cyc[pop_n] = cyc;
      pop_n++;
    end
    if (rst_n && out_push) begin
      rspq.push_back(out_rdata);
      push_cyc = cyc;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference state
  logic [31:0] rc [NC][64];
  logic [31:0] rg [64];
  logic [31:0] re [4];
  logic [NC-1:0] rfetch;

  function automatic logic [31:0] rand_addr(output int kind);
    kind = $urandom_range(5);
    case (kind)
      0, 1: return {4'h1, 8'h00, 4'($urandom_range(NC - 1)), 1'($urandom_range(1)), 7'd0, 6'($urandom), 2'b00};
      2:    return {4'h2, 20'd0, 6'($urandom), 2'b00};
      3:    return {4'h3, 20'd0, 2'b00, 4'($urandom_range(3)), 2'b00};
      4:    return {4'h3, 20'd0, ($urandom_range(1) == 0) ? CTRL_FETCH : CTRL_DONE};
      default: return 32'h7000_0000 | 32'($urandom);
    endcase
  endfunction

  function automatic logic [31:0] ref_read(input logic [31:0] a);
    case (a[31:28])
      4'h1: return ({28'd0, a[19:16]} < NC) ? rc[a[17:16]][a[7:2]] : 32'd0;
      4'h2: return rg[a[7:2]];
      4'h3: return (a[7:0] == CTRL_FETCH) ? 32'(rfetch) :
                   (a[7:0] == CTRL_DONE)  ? 32'(core_done) : re[a[3:2]];
      default: return 32'd0;
    endcase
  endfunction

  task automatic ref_write(input logic [31:0] a, input logic [31:0] d);
    case (a[31:28])
      4'h1: if ({28'd0, a[19:16]} < NC) rc[a[17:16]][a[7:2]] = d;
      4'h2: rg[a[7:2]] = d;
      4'h3: if (a[7:0] == CTRL_FETCH) rfetch = d[NC-1:0];
            else if (a[7:0] < CTRL_FETCH) re[a[3:2]] = d;
      default: ;
    endcase
  endtask

  initial begin
    logic [31:0] exp_q[$];
    int kind;
    for (int c = 0; c < NC; c++) for (int i = 0; i < 64; i++) rc[c][i] = 0;
    for (int i = 0; i < 64; i++) rg[i] = 0;
    for (int i = 0; i < 4; i++) re[i] = 0;
    rfetch = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // ---- latency with always-ready targets (cycles counted on the clock)
    @(negedge clk);
    reqq.push_back('{we: 1, addr: 32'h1001_0000, wdata: 32'h1234});
    reqq.push_back('{we: 1, addr: 32'h1001_0004, wdata: 32'h5678});
    ref_write(32'h1001_0000, 32'h1234);
    ref_write(32'h1001_0004, 32'h5678);
    wait (pop_n == 2);
    check(pop_cyc[1] - pop_cyc[0] == 2, $sformatf("a write takes 2 cycles (%0d)", pop_cyc[1] - pop_cyc[0]));
    @(negedge clk);
    reqq.push_back('{we: 0, addr: 32'h1001_0004, wdata: 0});
    while (rspq.size() == 0) @(posedge clk);
    check(push_cyc - pop_cyc[2] + 1 == 4, $sformatf("a read takes 4 cycles (%0d)", push_cyc - pop_cyc[2] + 1));
    check(rspq.pop_front() == 32'h5678, "read data");
    // ---- random traffic
    rnd_gnt = 1; rnd_full = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] a, d;
      bit we;
      a = rand_addr(kind);
      we = 1'($urandom_range(1));
      d = $urandom;
      reqq.push_back('{we: we, addr: a, wdata: d});
      if (we) ref_write(a, d);
      else exp_q.push_back(ref_read(a));
      if ($urandom_range(3) == 0) @(posedge clk);
      while (reqq.size() > 4) @(posedge clk);
    end
    while (reqq.size() > 0 || dut.state != 2'd0) @(posedge clk);
    repeat (3) @(posedge clk);
    check(rspq.size() == exp_q.size(), $sformatf("response count %0d vs %0d", rspq.size(), exp_q.size()));
    while (rspq.size() > 0 && exp_q.size() > 0) begin
      logic [31:0] g, e;
      g = rspq.pop_front(); e = exp_q.pop_front();
      check(g == e, $sformatf("read data %h expected %h", g, e));
    end
    for (int c = 0; c < NC; c++) for (int i = 0; i < 64; i++)
      check(cmem[c][i] == rc[c][i], "core memory contents");
    for (int i = 0; i < 64; i++) check(gmem[i] == rg[i], "global buffer contents");
    check(fetch_en == rfetch, "fetch-enable register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
