// tb_aia_top: end-to-end run of the full accelerator (16 cores, full-size
// memories, default parameters) from the SoC clock domain.
//
// The host loads the same program (aia_asm_pkg::e2e_program) into all 16
// instruction memories through the clock-domain-crossing FIFOs and the mesh
// interconnect, writes and reads a global-buffer word, starts all cores,
// polls the DONE register until every core has halted, then reads back each
// core's results and checks them against values computed here:
// neighbour-register sums over all four links, Knuth-Yao samples (software
// walk with the same LFSR bits), interpolation results, global-buffer
// write/read for the top row and refusal for the others, and the barrier
// count. It also counts the mechanisms the design has and fails if one
// never happened: request-FIFO back-pressure, barrier waits, neighbour-port
// priority losses, neighbour reads at the array edge, global-buffer bank
// conflicts, sampler rejections and sampler stalls, interpolation lookups,
// branch flushes and cores refused by the global buffer.
module tb_aia_top;
  import aia_pkg::*;
  import aia_asm_pkg::*;

  localparam int NC = 16, ROWS = 4, COLS = 4, NSAMP = 16;

  logic soc_clk = 0, mesh_clk = 0, soc_rst_n = 0, mesh_rst_n = 0;
  logic host_req_valid = 0, host_req_ready, host_rsp_valid;
  host_req_t host_req = '0;
  logic [31:0] host_rsp_rdata;
  mem_req_t dma_req = '0;
  mem_rsp_t dma_rsp;
  logic [NC-1:0] core_done;
  int checks = 0, failures = 0;

  always #5 soc_clk = ~soc_clk;
  always #3.5 mesh_clk = ~mesh_clk;

  aia_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ mechanism counters
  int n_backpressure = 0, n_barrier_wait = 0, n_nb_lost = 0, n_nb_edge = 0;
  int n_bank_conflict = 0, n_reject = 0, n_su_stall = 0, n_lut = 0, n_flush = 0;
  int n_gb_refused = 0;

  always @(posedge soc_clk) if (soc_rst_n && host_req_valid && !host_req_ready) n_backpressure++;
  always @(posedge mesh_clk) if (mesh_rst_n && dut.u_mesh.u_tcdm.conflict != '0) n_bank_conflict++;

  for (genvar i = 0; i < NC; i++) begin : g_mon
    always @(posedge mesh_clk) if (mesh_rst_n) begin
      if (dut.u_mesh.g_core[i].u_ac.nb_wait) n_nb_lost++;
      if (dut.u_mesh.g_core[i].u_ac.u_su.reject) n_reject++;
      if (dut.u_mesh.g_core[i].u_ac.u_su.busy) n_su_stall++;
      if (dut.u_mesh.g_core[i].u_ac.flush) n_flush++;
      if (dut.u_mesh.g_core[i].u_ac.valid_e && dut.u_mesh.g_core[i].u_ac.ctrl_e.iu) n_lut++;
      if (dut.u_mesh.ev_req[i].req && !dut.u_mesh.ev_rsp[i].gnt) n_barrier_wait++;
      if (dut.u_mesh.ext_req[i].req && dut.u_mesh.to_err[i]) n_gb_refused++;
    end
    for (genvar d = 0; d < 4; d++) begin : g_d
      if (dut.u_mesh.neighbour(i, d) < 0) begin : g_e
        always @(posedge mesh_clk) if (mesh_rst_n && dut.u_mesh.g_core[i].u_ac.nb_req[d]) n_nb_edge++;
      end
    end
  end

  // ------------------------------------------------------- host access
  task automatic hw(input logic [31:0] a, input logic [31:0] d);
    @(negedge soc_clk);
    host_req_valid = 1; host_req = '{we: 1, addr: a, wdata: d};
    do @(posedge soc_clk); while (!host_req_ready);
    @(negedge soc_clk);
    host_req_valid = 0;
  endtask
  // back-to-back writes (the request FIFO fills up)
  task automatic hw_burst(input logic [31:0] base, input int n);
    int i;
    i = 0;
    @(negedge soc_clk);
    while (i < n) begin
      host_req_valid = 1; host_req = '{we: 1, addr: base + 32'(4 * i), wdata: prog[i]};
      @(posedge soc_clk);
      if (host_req_ready) i++;
      @(negedge soc_clk);
    end
    host_req_valid = 0;
  endtask
  task automatic hr(input logic [31:0] a, output logic [31:0] d);
    @(negedge soc_clk);
    host_req_valid = 1; host_req = '{we: 0, addr: a, wdata: 0};
    do @(posedge soc_clk); while (!host_req_ready);
    @(negedge soc_clk);
    host_req_valid = 0;
    while (!host_rsp_valid) @(negedge soc_clk);
    d = host_rsp_rdata;
  endtask

  initial begin
    #3000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] v;
    int unsigned w[32];
    e2e_program(NSAMP, 2);
    repeat (4) @(negedge soc_clk);
    soc_rst_n = 1; mesh_rst_n = 1;
    // load the program into every core
    for (int c = 0; c < NC; c++) hw_burst(32'h1000_0000 | 32'(c << 16), prog.size());
    // host path to the global buffer
    hw(32'h2000_1000, 32'hFEED_0001);
    hr(32'h2000_1000, v);
    check(v == 32'hFEED_0001, "host global-buffer access");
    hr(32'h1003_0004, v);
    check(v == prog[1], "instruction memory read back");
    // start all cores
    hw({REGION_EVENT, 20'd0, CTRL_FETCH}, 32'h0000_FFFF);
    for (int t = 0; t < 2000; t++) begin
      hr({REGION_EVENT, 20'd0, CTRL_DONE}, v);
      if (v[15:0] == 16'hFFFF) break;
    end
    check(v[15:0] == 16'hFFFF, "all cores halted");
    // results
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
    for (int c = 0; c < COLS; c++) begin
      hr(32'h2000_0000 + 32'(64 * c), v);
      check(v == 32'(e2e_nb_sum(c, ROWS, COLS)), "global buffer written by top-row core");
    end
    $display("mechanisms: backpressure=%0d barrier_wait=%0d nb_lost=%0d nb_edge=%0d bank_conflict=%0d",
             n_backpressure, n_barrier_wait, n_nb_lost, n_nb_edge, n_bank_conflict);
    $display("            reject=%0d su_stall=%0d lut=%0d flush=%0d gb_refused=%0d",
             n_reject, n_su_stall, n_lut, n_flush, n_gb_refused);
    check(n_backpressure > 0, "request FIFO back-pressure happened");
    check(n_barrier_wait > 0, "barrier wait happened");
    check(n_nb_lost > 0, "neighbour-port priority loss happened");
    check(n_nb_edge > 0, "edge neighbour read happened");
    check(n_bank_conflict > 0, "global-buffer bank conflict happened");
    check(n_reject > 0, "sampler rejection happened");
    check(n_su_stall > 0, "sampler stall happened");
    check(n_lut == NC, "one lookup per core");
    check(n_flush > 0, "branch flush happened");
    check(n_gb_refused > 0, "global-buffer refusal happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
