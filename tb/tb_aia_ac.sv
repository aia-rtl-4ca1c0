// tb_aia_ac: runs one program on a single accelerator core and checks its
// results, read back from the data scratchpad through the host port.
// The program covers the base arithmetic, loops, jumps, local and external
// loads and stores (with a randomly stalling external memory), arithmetic
// on the private registers R32..R63 through the custom six-bit indexes,
// neighbour-register operands in all four directions (the modelled
// neighbours refuse the grant at random), the core-id CSR, 20 `sample`
// instructions on the published three-item example (checked sample by
// sample against a software Knuth-Yao walk with the same random bits, and
// the execute-stage stall checked to last 1 + N + bits cycles per sample),
// two `lut` interpolations, and a neighbour reading this core's shared
// registers after the program halts.
module tb_aia_ac;
  import aia_pkg::*;
  import aia_asm_pkg::*;

  logic clk = 0, rst_n = 0, fetch_en = 0, done;
  logic [3:0] core_id = 4'd5;
  mem_req_t host_req = '0;
  logic [31:0] host_rdata;
  mem_req_t ext_req;
  mem_rsp_t ext_rsp = '0;
  logic [3:0] nb_req, nb_gnt, sh_req = '0, sh_gnt;
  logic [3:0][4:0] nb_addr, sh_addr = '0;
  logic [3:0][31:0] nb_rdata;
  logic [31:0] sh_rdata;
  int checks = 0, failures = 0;
  int su_cycles = 0, nb_stalls = 0, ext_stalls = 0, flushes = 0;
  logic [31:0] ext_mem [logic [31:0]];

  always #5 clk = ~clk;

  aia_ac #(.IMEM_WORDS(512), .DMEM_WORDS(512)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // neighbours: fixed contents, random refusals
  function automatic logic [31:0] nb_val(input int d, input int a);
    return 32'hA000_0000 | 32'(d << 8) | 32'(a);
  endfunction
  always_comb for (int d = 0; d < 4; d++) nb_rdata[d] = nb_val(d, int'(nb_addr[d]));
  always @(negedge clk) nb_gnt <= 4'($urandom);

  // external memory: random grant, read data one cycle after the grant
  always @(negedge clk) ext_rsp.gnt <= ($urandom % 3) == 0;
  always @(posedge clk) begin
    ext_rsp.rvalid <= 1'b0;
    if (ext_req.req && ext_rsp.gnt) begin
      if (ext_req.we) ext_mem[ext_req.addr] = ext_req.wdata;
      else begin
        ext_rsp.rvalid <= 1'b1;
        ext_rsp.rdata  <= ext_mem.exists(ext_req.addr) ? ext_mem[ext_req.addr] : 32'hBAD0BAD0;
      end
    end
    if (ext_req.req && !ext_rsp.gnt) ext_stalls++;
    if (rst_n && dut.valid_e && dut.ctrl_e.su) su_cycles++;
    if (rst_n && dut.nb_wait) nb_stalls++;
    if (rst_n && dut.flush) flushes++;
  end

  task automatic host_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    host_req = '{req: 1, we: 1, addr: a, wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask
  task automatic host_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    host_req = '{req: 1, we: 0, addr: a, wdata: 0};
    @(negedge clk);
    host_req = '0;
    d = host_rdata;
  endtask

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int J, exp_su_cycles, nsamp;
    int unsigned w[32];
    logic [31:0] st, v, exp_slot [32];
    int samples [20];

    // -------------------------------------------------- build the program
    prog.delete();
    li(31, 32'h1000_0000);
    li(1, 32'd1234567);
    li(2, -32'sd89);
    emit(add(3, 1, 2));  emit(sw(3, 31, 0));
    emit(sub(3, 1, 2));  emit(sw(3, 31, 4));
    emit(mul(3, 1, 2));  emit(sw(3, 31, 8));
    emit(slli(3, 1, 5)); emit(sw(3, 31, 12));
    emit(addi(5, 0, 3));
    emit(cpriv(ALU_ADD, 40, 1, 2));
    emit(cpriv(ALU_MUL, 41, 40, 2));
    emit(cpriv(ALU_SRA, 42, 2, 5));
    emit(cpriv(ALU_XOR, 4, 41, 42));  emit(sw(4, 31, 16));
    emit(cpriv(ALU_SLT, 43, 2, 1));
    emit(cpriv(ALU_ADD, 6, 43, 0));   emit(sw(6, 31, 20));
    emit(addi(7, 0, 0)); emit(addi(8, 0, 10));
    emit(add(7, 7, 8)); emit(addi(8, 8, -1)); emit(bne(8, 0, -8));
    emit(sw(7, 31, 24));
    J = prog.size();
    emit(jal(9, 8));                  // J
    emit(addi(10, 0, 999));           // J+1 skipped
    emit(addi(10, 10, 5));            // J+2
    emit(jalr(13, 9, 16));            // J+3 -> J+5
    emit(addi(10, 10, 100));          // J+4 skipped
    emit(sw(9, 31, 28));              // J+5
    emit(sw(10, 31, 32));
    emit(sw(13, 31, 76));
    emit(lw(14, 31, 0));
    emit(add(15, 14, 14));            // load-use
    emit(sw(14, 31, 36)); emit(sw(15, 31, 40));
    li(16, 32'h2000_0040);
    emit(sw(1, 16, 0)); emit(sw(2, 16, 4));
    emit(lw(17, 16, 0)); emit(lw(18, 16, 4));
    emit(add(19, 17, 18)); emit(sw(19, 31, 44));
    for (int f = 0; f < 4; f++) begin
      emit(cshared(ALU_ADD, f, 20, 3 + f, 0));
      emit(sw(20, 31, 48 + 4 * f));
    end
    emit(csrrs(21, CSR_MHARTID, 0)); emit(sw(21, 31, 64));
    // sampler: published example, 20 samples
    emit(addi(22, 0, 1));
    emit(cpriv(ALU_ADD, 32, 22, 0)); emit(cpriv(ALU_ADD, 33, 22, 0)); emit(cpriv(ALU_ADD, 34, 22, 0));
    emit(addi(23, 0, 3)); emit(csrrw(0, CSR_SU_SIZE, 23));
    li(24, 32'h0BAD_5EED); emit(csrrw(0, CSR_SU_SEED, 24));
    emit(addi(26, 31, 400)); emit(addi(27, 0, 20));
    emit(sample(25)); emit(sw(25, 26, 0)); emit(addi(26, 26, 4)); emit(addi(27, 27, -1));
    emit(bne(27, 0, -16));
    // interpolation: 8-bit entries, 8 fraction bits
    li(6, 32'h4030_2010); emit(cpriv(ALU_ADD, 32, 6, 0));
    li(6, 32'h8070_6050); emit(cpriv(ALU_ADD, 33, 6, 0));
    li(28, (32'd8 << 24) | (32'd1 << 5)); emit(csrrw(0, CSR_IU_CFG, 28));
    li(29, 32'h0000_0180); emit(lut(30, 29)); emit(sw(30, 31, 68));
    li(29, 32'h0000_0340); emit(lut(30, 29)); emit(sw(30, 31, 72));
    emit(csrrs(5, CSR_IU_CFG, 0)); emit(sw(5, 31, 80));
    emit(ecall());
    emit(addi(7, 0, 1));              // must not execute

    // ------------------------------------------------- expected results
    exp_slot[0]  = 32'd1234567 - 32'd89;
    exp_slot[1]  = 32'd1234567 + 32'd89;
    exp_slot[2]  = 32'd1234567 * (-32'sd89);
    exp_slot[3]  = 32'd1234567 << 5;
    exp_slot[4]  = (exp_slot[0] * (-32'sd89)) ^ 32'($signed(-32'sd89) >>> 3);
    exp_slot[5]  = 32'd1;
    exp_slot[6]  = 32'd55;
    exp_slot[7]  = 32'(4 * J + 4);
    exp_slot[8]  = 32'd5;
    exp_slot[9]  = exp_slot[0];
    exp_slot[10] = 2 * exp_slot[0];
    exp_slot[11] = exp_slot[0];
    exp_slot[12] = nb_val(int'(DIR_W), 3);
    exp_slot[13] = nb_val(int'(DIR_E), 4);
    exp_slot[14] = nb_val(int'(DIR_N), 5);
    exp_slot[15] = nb_val(int'(DIR_S), 6);
    exp_slot[16] = 32'd5;
    exp_slot[17] = 32'h28;
    exp_slot[18] = 32'h44;
    exp_slot[19] = 32'(4 * J + 16);
    exp_slot[20] = (32'd8 << 24) | (32'd1 << 5);
    w = '{default: 0};
    w[0] = 1; w[1] = 1; w[2] = 1;
    st = 32'h0BAD_5EED;
    exp_su_cycles = 0;
    for (int k = 0; k < 20; k++) begin
      int bits, rej;
      samples[k] = ky_ref(w, 3, st, bits, rej);
      exp_su_cycles += 1 + 3 + bits;
    end

    // --------------------------------------------------------------- run
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) host_write(32'(4 * i), prog[i]);
    @(negedge clk); fetch_en = 1;
    for (int t = 0; t < 20000 && !done; t++) @(negedge clk);
    check(done, "core halted");
    check(dut.u_rf.regs[7] == 32'd55, "instruction after ecall not executed");
    for (int k = 0; k <= 20; k++) begin
      host_read(32'h8000 + 32'(4 * k), v);
      check(v == exp_slot[k], $sformatf("slot %0d = %h, expected %h", k, v, exp_slot[k]));
    end
    for (int k = 0; k < 20; k++) begin
      host_read(32'h8000 + 32'(400 + 4 * k), v);
      check(v == 32'(samples[k]), $sformatf("sample %0d = %0d, expected %0d", k, v, samples[k]));
    end
    check(su_cycles == exp_su_cycles, $sformatf("sampler stall %0d cycles, expected %0d", su_cycles, exp_su_cycles));
    check(nb_stalls > 0 && ext_stalls > 0 && flushes > 0,
          $sformatf("stalls seen: neighbour %0d external %0d flushes %0d", nb_stalls, ext_stalls, flushes));
    // a neighbour reads this core's shared register x7 (= 55) from the west side
    @(negedge clk); sh_req = 4'b0100; sh_addr[DIR_W] = 5'd7;
    #1 check(sh_gnt == 4'b0100 && sh_rdata == 32'd55, "shared register read by a neighbour");
    @(negedge clk); sh_req = '0;
    // clearing fetch_en resets the core
    fetch_en = 0;
    @(negedge clk);
    check(!done && dut.pc_f == 0, "fetch_en low resets the core");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
