// tb_aia_mrf_workload: Markov-random-field labelling by Gibbs sampling on
// the full 16-core accelerator, the kind of workload the design targets
// (image segmentation with 2 labels, stereo-style labelling with 16).
//
// One core holds one pixel of a 4x4 image. The pixels are coloured like a
// checkerboard; in each sweep the cores of one colour update while those of
// the other wait at a barrier, so a core never reads a label that is being
// rewritten. To update, a core:
//   * reads its four neighbours' labels from their shared register x5
//     (label + 1, so 0 means "no neighbour" at the image edge),
//   * for every label l computes the energy, in half units,
//       E(l) = |obs - l*step| + beta2 * (neighbours whose label is not l),
//     clamped to 124,
//   * turns it into an unnormalized weight with the interpolation unit:
//     8-bit table t[k] = max(1, 255 >> (k/4)) in R48..R63 (entries 64..127),
//     one fraction bit, so odd energies interpolate between two entries,
//   * writes the weights to R32..R(32+L-1) and draws the new label with the
//     Knuth-Yao sampler (SU.size = L, seed per core).
// Every label a core draws is stored in its data scratchpad. The testbench
// runs the same algorithm in software, with the same table arithmetic and
// the same random bits (LFSR model and software Knuth-Yao walk), and checks
// every label of every sweep on every core. It prints the number of mesh
// cycles per sweep and how many pixels end on their true label.
// Two runs: L = 2 labels (segmentation), then L = 16 labels.
module tb_aia_mrf_workload;
  import aia_pkg::*;
  import aia_asm_pkg::*;

  localparam int NC = 16, ROWS = 4, COLS = 4, SWEEPS = 6;

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

  int mesh_cycles = 0;
  always @(posedge mesh_clk) mesh_cycles++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  task automatic hw(input logic [31:0] a, input logic [31:0] d);
    @(negedge soc_clk);
    host_req_valid = 1; host_req = '{we: 1, addr: a, wdata: d};
    do @(posedge soc_clk); while (!host_req_ready);
    @(negedge soc_clk);
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

  // ------------------------------------------------------------ model
  function automatic int table_entry(input int k);
    int v;
    v = 255 >> (k / 4);
    return (v < 1) ? 1 : v;
  endfunction

  // interpolation of the table at half-unit energy e (one fraction bit)
  function automatic int weight_of(input int e);
    int i, y0, y1;
    i  = e >> 1;
    y0 = table_entry(i);
    y1 = table_entry(i + 1);
    return y0 + (((e & 1) * (y1 - y0)) >>> 1);
  endfunction

  function automatic int nb_of(input int id, input int d);
    int r, c;
    r = id / COLS; c = id % COLS;
    case (d)
      0: return (c > 0)        ? id - 1    : -1;  // W
      1: return (c < COLS - 1) ? id + 1    : -1;  // E
      2: return (r > 0)        ? id - COLS : -1;  // N
      default: return (r < ROWS - 1) ? id + COLS : -1;  // S
    endcase
  endfunction

  // ------------------------------------------------------- the program
  // dmem word 64: obs, 65: step, 66: beta2, 67: initial label
  function automatic void mrf_program(input int L);
    int skip_at;
    int ph_top, sweep_top;
    prog.delete();
    li(31, 32'h1000_0000);
    li(30, 32'h3000_0000);
    emit(csrrs(1, CSR_MHARTID, 0));
    // colour = (row + col) & 1
    emit(srli(19, 1, 2)); emit(andi(7, 1, 3)); emit(add(19, 19, 7)); emit(andi(19, 19, 1));
    emit(lw(24, 31, 256)); emit(lw(16, 31, 260)); emit(lw(15, 31, 264)); emit(lw(5, 31, 268));
    emit(addi(5, 5, 1));
    emit(addi(14, 0, 125)); emit(addi(28, 0, 31));
    // table entries 64..127 in R48..R63
    for (int j = 0; j < 16; j++) begin
      logic [31:0] wd;
      for (int b = 0; b < 4; b++) wd[8*b +: 8] = 8'(table_entry(4 * j + b));
      li(6, wd); emit(cpriv(ALU_ADD, 48 + j, 6, 0));
    end
    li(6, (32'd1 << 24) | (32'd1 << 5)); emit(csrrw(0, CSR_IU_CFG, 6));
    emit(addi(7, 0, L)); emit(csrrw(0, CSR_SU_SIZE, 7));
    li(8, 32'd7919); emit(mul(8, 1, 8)); emit(addi(8, 8, 1)); emit(csrrw(0, CSR_SU_SEED, 8));
    emit(addi(17, 31, 0));
    emit(addi(18, 0, SWEEPS));
    sweep_top = prog.size();
    emit(addi(4, 0, 0));                               // phase
    ph_top = prog.size();
    skip_at = prog.size();
    emit(32'h0);                                       // patched: bne x19, x4, skip
    for (int f = 0; f < 4; f++) emit(cshared(ALU_ADD, f, 20 + f, 5, 0));
    emit(addi(11, 0, 0));                              // mu
    for (int l = 0; l < L; l++) begin
      emit(sub(12, 24, 11));
      emit(cpriv(ALU_SRA, 13, 12, 28));
      emit(cpriv(ALU_XOR, 12, 12, 13)); emit(sub(12, 12, 13));
      emit(addi(9, 0, l + 1));
      for (int f = 0; f < 4; f++) begin
        emit(beq(20 + f, 0, 12)); emit(beq(20 + f, 9, 8)); emit(add(12, 12, 15));
      end
      emit(cpriv(ALU_SLT, 13, 12, 14));
      emit(bne(13, 0, 8)); emit(addi(12, 0, 124));
      emit(addi(12, 12, 128));
      emit(lut(13, 12));
      emit(cpriv(ALU_ADD, 32 + l, 13, 0));
      emit(add(11, 11, 16));
    end
    emit(sample(25));
    emit(addi(5, 25, 1));
    emit(sw(25, 17, 0)); emit(addi(17, 17, 4));
    prog[skip_at] = bne(19, 4, 4 * (prog.size() - skip_at));
    emit(sw(0, 30, 0));                                // barrier
    emit(addi(4, 4, 1)); emit(addi(7, 0, 2));
    emit(bne(4, 7, 4 * (ph_top - prog.size())));
    emit(addi(18, 18, -1));
    emit(bne(18, 0, 4 * (sweep_top - prog.size())));
    emit(ecall());
  endfunction

  initial begin
    #20000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int L, input int step, input int beta2);
    int obs [NC], truth [NC], lab [NC], lab0 [NC], exp_lab [NC][SWEEPS];
    logic [31:0] st [NC];
    logic [31:0] v;
    int t0, t1, correct;
    mrf_program(L);
    // image: true label from a diagonal split (2 labels) or a ramp (16),
    // observation = true level + noise, in half units
    for (int c = 0; c < NC; c++) begin
      int r, cc, noise;
      r = c / COLS; cc = c % COLS;
      truth[c] = (L == 2) ? ((r + cc >= 3) ? 1 : 0) : (r * 4 + cc) % L;
      noise = int'($urandom_range(2 * step / 3)) - step / 3;
      obs[c] = truth[c] * step + noise;
      if (obs[c] < 0) obs[c] = 0;
      lab[c] = $urandom_range(L - 1);
      lab0[c] = lab[c];
      st[c] = 32'(c * 7919 + 1);
    end
    // software Gibbs sweeps
    for (int s = 0; s < SWEEPS; s++)
      for (int p = 0; p < 2; p++)
        for (int c = 0; c < NC; c++) if (((c / COLS + c % COLS) & 1) == p) begin
          int unsigned w [32];
          int bits, rej;
          w = '{default: 0};
          for (int l = 0; l < L; l++) begin
            int e, d;
            e = obs[c] - l * step;
            if (e < 0) e = -e;
            for (int k = 0; k < 4; k++) begin
              d = nb_of(c, k);
              if (d >= 0 && lab[d] != l) e += beta2;
            end
            if (e >= 125) e = 124;
            w[l] = weight_of(e);
          end
          lab[c] = ky_ref(w, L, st[c], bits, rej);
          exp_lab[c][s] = lab[c];
        end
    // load and run the hardware
    hw({REGION_EVENT, 20'd0, CTRL_FETCH}, 32'h0);
    for (int c = 0; c < NC; c++) begin
      logic [31:0] base;
      base = 32'h1000_0000 | 32'(c << 16);
      for (int i = 0; i < prog.size(); i++) hw(base + 32'(4 * i), prog[i]);
      hw(base + 32'h8100, 32'(obs[c]));
      hw(base + 32'h8104, 32'(step));
      hw(base + 32'h8108, 32'(beta2));
      hw(base + 32'h810C, 32'(lab0[c]));
    end
    t0 = mesh_cycles;
    hw({REGION_EVENT, 20'd0, CTRL_FETCH}, 32'h0000_FFFF);
    for (int t = 0; t < 100000; t++) begin
      hr({REGION_EVENT, 20'd0, CTRL_DONE}, v);
      if (v[15:0] == 16'hFFFF) break;
    end
    t1 = mesh_cycles;
    check(v[15:0] == 16'hFFFF, $sformatf("L=%0d: all cores halted", L));
    correct = 0;
    for (int c = 0; c < NC; c++) begin
      for (int s = 0; s < SWEEPS; s++) begin
        hr(32'h1000_8000 | 32'(c << 16) | 32'(4 * s), v);
        check(v == 32'(exp_lab[c][s]),
              $sformatf("L=%0d core %0d sweep %0d label %0d expected %0d", L, c, s, v, exp_lab[c][s]));
      end
      if (exp_lab[c][SWEEPS-1] == truth[c]) correct++;
    end
    $display("L=%0d: %0d sweeps in about %0d mesh cycles (%0d per sweep incl. host polling), %0d of %0d pixels on their true label",
             L, SWEEPS, t1 - t0, (t1 - t0) / SWEEPS, correct, NC);
  endtask

  initial begin
    repeat (4) @(negedge soc_clk);
    soc_rst_n = 1; mesh_rst_n = 1;
    run(2, 40, 12);    // two-label segmentation
    run(16, 8, 6);     // sixteen labels
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
