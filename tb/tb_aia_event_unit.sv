// tb_aia_event_unit: cores arrive at a barrier at random times; checks
// that none is granted before the last core of the mask arrives, that all
// are granted in that cycle, that the counter counts barriers, that cores
// outside the mask pass at once, and the host MASK/COUNT registers.
module tb_aia_event_unit;
  import aia_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  mem_req_t core_req [N];
  mem_rsp_t core_rsp [N];
  logic host_en = 0, host_we = 0, release_o;
  logic [7:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  aia_event_unit #(.N_CORES(N)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int arrive [N];
    for (int c = 0; c < N; c++) core_req[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      logic [N-1:0] mask;
      int last;
      mask = (round < 3) ? '1 : N'($urandom) | 16'h1;
      @(negedge clk); host_en = 1; host_we = 1; host_addr = EV_MASK; host_wdata = 32'(mask);
      @(negedge clk); host_en = 0; host_we = 0;
      last = 0;
      for (int c = 0; c < N; c++) begin
        arrive[c] = $urandom % 20;
        if (mask[c] && arrive[c] > last) last = arrive[c];
      end
      for (int t = 0; t <= 25; t++) begin
        @(negedge clk);
        for (int c = 0; c < N; c++)
          if (t == arrive[c]) begin
            core_req[c].req = 1; core_req[c].we = 1; core_req[c].addr = {24'h300000, EV_BARRIER};
          end
        #1;
        for (int c = 0; c < N; c++) if (core_req[c].req) begin
          if (!mask[c]) check(core_rsp[c].gnt, "unmasked core passes");
          else check(core_rsp[c].gnt == (t == last), $sformatf("round %0d core %0d t %0d", round, c, t));
        end
        begin
          logic [N-1:0] g;
          for (int c = 0; c < N; c++) g[c] = core_rsp[c].gnt;
          @(posedge clk); #1;
          for (int c = 0; c < N; c++) if (g[c]) core_req[c] = '0;
        end
      end
      for (int c = 0; c < N; c++) core_req[c] = '0;
    end
    // count: every round released exactly once
    @(negedge clk); host_en = 1; host_addr = EV_COUNT;
    @(negedge clk); host_en = 0;
    check(host_rdata == 32'd6, $sformatf("count %0d", host_rdata));
    // a core reading the counter
    core_req[5].req = 1; core_req[5].addr = {24'h300000, EV_COUNT};
    #1 check(core_rsp[5].gnt, "read granted");
    @(negedge clk); core_req[5] = '0;
    check(core_rsp[5].rvalid && core_rsp[5].rdata == 32'd6, "core reads count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
