// tb_aia_tcdm_interco: six masters issue random reads and writes to a small
// banked buffer; every master's reads are checked against a model, each
// bank is checked to serve at most one master per cycle, conflicts are
// counted (and must occur), and the round robin must let every master
// through (no request waits more than N_MASTERS cycles, and under full
// load on one bank every master gets the same share).
module tb_aia_tcdm_interco;
  import aia_pkg::*;
  localparam int M = 6, B = 16, WDS = 16;
  logic clk = 0, rst_n = 0;
  mem_req_t m_req [M];
  mem_rsp_t m_rsp [M];
  logic [B-1:0] b_en, b_we, conflict;
  logic [B-1:0][3:0] b_addr;
  logic [B-1:0][31:0] b_wdata, b_rdata;
  logic [31:0] model [B*WDS];
  int checks = 0, failures = 0, conflicts = 0;
  always #5 clk = ~clk;
  aia_tcdm_interco #(.N_MASTERS(M), .N_BANKS(B), .BANK_WORDS(WDS)) dut (.*);
  aia_global_buffer #(.N_BANKS(B), .BANK_WORDS(WDS)) u_gb (
    .clk, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata));
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] exp_q [M];
    logic        pend [M];
    int          wait_c [M];
    for (int m = 0; m < M; m++) begin m_req[m] = '0; pend[m] = 0; wait_c[m] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // initialise through master 0
    for (int w = 0; w < B * WDS; w++) begin
      m_req[0] = '{req: 1, we: 1, addr: 32'(w * 4), wdata: 32'(w * 3 + 1)};
      model[w] = 32'(w * 3 + 1);
      @(negedge clk);
    end
    m_req[0] = '0;
    for (int t = 0; t < 3000; t++) begin
      // new requests where idle
      for (int m = 0; m < M; m++)
        if (!m_req[m].req && ($urandom % 3) != 0) begin
          m_req[m].req   = 1;
          m_req[m].we    = ($urandom % 3) == 0;
          m_req[m].addr  = 32'(($urandom % (B * WDS / 4)) * 4);  // a few hot banks
          m_req[m].wdata = $urandom;
          wait_c[m] = 0;
        end
      #1;
      for (int b = 0; b < B; b++) conflicts += int'(conflict[b]);
      begin
        int served [B];
        for (int b = 0; b < B; b++) served[b] = 0;
        for (int m = 0; m < M; m++) if (m_rsp[m].gnt) served[m_req[m].addr[5:2]]++;
        for (int b = 0; b < B; b++) check(served[b] <= 1, "one grant per bank");
      end
      begin
      logic [M-1:0] g;
      for (int m = 0; m < M; m++) g[m] = m_rsp[m].gnt;
      @(posedge clk); #1;
      for (int m = 0; m < M; m++) begin
        if (m_req[m].req && g[m]) begin
          if (m_req[m].we) model[m_req[m].addr[9:2]] = m_req[m].wdata;
          else begin exp_q[m] = model[m_req[m].addr[9:2]]; pend[m] = 1; end
          m_req[m] = '0;
        end else if (m_req[m].req) begin
          wait_c[m]++;
          check(wait_c[m] <= M, $sformatf("master %0d starved", m));
        end
      end
      end
      @(negedge clk);
      for (int m = 0; m < M; m++) if (pend[m]) begin
        check(m_rsp[m].rvalid && m_rsp[m].rdata == exp_q[m], $sformatf("read data master %0d", m));
        pend[m] = 0;
      end
    end
    check(conflicts > 100, $sformatf("conflicts seen: %0d", conflicts));
    // all masters keep reading the same bank: the round robin serves one
    // per cycle in turn, so in 6*10 cycles each master is served 10 times
    begin
      int got [M];
      for (int m = 0; m < M; m++) begin
        got[m] = 0;
        m_req[m] = '{req: 1, we: 0, addr: 32'(3 * 4 + m * B * 4), wdata: 0};
      end
      for (int t = 0; t < 10 * M; t++) begin
        #1;
        for (int m = 0; m < M; m++) got[m] += int'(m_rsp[m].gnt);
        @(negedge clk);
      end
      for (int m = 0; m < M; m++) check(got[m] == 10, $sformatf("master %0d served %0d of 10", m, got[m]));
      for (int m = 0; m < M; m++) m_req[m] = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
