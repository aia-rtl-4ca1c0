// aia_asm_pkg: a small assembler for the accelerator-core testbenches.
//
// Each function returns one 32-bit instruction word of the base RV32I
// subset the core executes or of the custom extension (see aia_pkg for the
// custom field layout). `li` needs two words and appends them to `prog`;
// `emit` appends any word. Register indexes of the custom private-RF
// operations are six bits wide (0..63).
package aia_asm_pkg;
  import aia_pkg::*;

  logic [31:0] prog [$];

  function automatic void emit(input logic [31:0] w);
    prog.push_back(w);
  endfunction

  function automatic logic [31:0] r_type(input logic [6:0] f7, input int rs2, input int rs1,
                                         input logic [2:0] f3, input int rd, input logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input int rs1, input logic [2:0] f3,
                                         input int rd, input logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction

  function automatic logic [31:0] addi(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, OPC_OPIMM);
  endfunction
  function automatic logic [31:0] slli(input int rd, input int rs1, input int sh);
    return i_type(sh & 31, rs1, 3'b001, rd, OPC_OPIMM);
  endfunction
  function automatic logic [31:0] srli(input int rd, input int rs1, input int sh);
    return i_type(sh & 31, rs1, 3'b101, rd, OPC_OPIMM);
  endfunction
  function automatic logic [31:0] andi(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b111, rd, OPC_OPIMM);
  endfunction
  function automatic logic [31:0] add(input int rd, input int rs1, input int rs2);
    return r_type(7'd0, rs2, rs1, 3'b000, rd, OPC_OP);
  endfunction
  function automatic logic [31:0] sub(input int rd, input int rs1, input int rs2);
    return r_type(7'b0100000, rs2, rs1, 3'b000, rd, OPC_OP);
  endfunction
  function automatic logic [31:0] mul(input int rd, input int rs1, input int rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b000, rd, OPC_OP);
  endfunction
  function automatic logic [31:0] lui(input int rd, input logic [19:0] imm20);
    return {imm20, 5'(rd), OPC_LUI};
  endfunction
  function automatic logic [31:0] lw(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b010, rd, OPC_LOAD);
  endfunction
  function automatic logic [31:0] sw(input int rs2, input int rs1, input int imm);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b010, i[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] branch(input logic [2:0] f3, input int rs1, input int rs2,
                                         input int off);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), f3, o[4:1], o[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] beq(input int rs1, input int rs2, input int off);
    return branch(3'b000, rs1, rs2, off);
  endfunction
  function automatic logic [31:0] bne(input int rs1, input int rs2, input int off);
    return branch(3'b001, rs1, rs2, off);
  endfunction
  function automatic logic [31:0] blt(input int rs1, input int rs2, input int off);
    return branch(3'b100, rs1, rs2, off);
  endfunction
  function automatic logic [31:0] jal(input int rd, input int off);
    logic [20:0] o;
    o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), OPC_JAL};
  endfunction
  function automatic logic [31:0] jalr(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, OPC_JALR);
  endfunction
  function automatic logic [31:0] csrrw(input int rd, input logic [11:0] csr, input int rs1);
    return {csr, 5'(rs1), 3'b001, 5'(rd), OPC_SYSTEM};
  endfunction
  function automatic logic [31:0] csrrs(input int rd, input logic [11:0] csr, input int rs1);
    return {csr, 5'(rs1), 3'b010, 5'(rd), OPC_SYSTEM};
  endfunction
  function automatic logic [31:0] ecall();
    return {25'd0, OPC_SYSTEM};
  endfunction

  // custom: arithmetic on the 64-word RF (6-bit indexes)
  function automatic logic [31:0] cpriv(input alu_op_e op, input int rd, input int rs1,
                                        input int rs2);
    logic [5:0] d, a, b;
    d = 6'(rd); a = 6'(rs1); b = 6'(rs2);
    return {F8_PRIV, 4'(op), b[4:0], a[4:0], d[5], a[5], b[5], d[4:0], OPC_CUSTOM};
  endfunction
  // custom: rs1 from the neighbour in direction code f3 (0 W, 1 E, 2 N, 3 S)
  function automatic logic [31:0] cshared(input alu_op_e op, input int f3, input int rd,
                                          input int rs1, input int rs2);
    return {F8_SHRD, 4'(op), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), OPC_CUSTOM};
  endfunction
  function automatic logic [31:0] sample(input int rd);
    return {F8_SU, 4'd0, 5'd0, 5'd0, 3'd0, 5'(rd), OPC_CUSTOM};
  endfunction
  function automatic logic [31:0] lut(input int rd, input int rs1);
    return {F8_IU, 4'd0, 5'd0, 5'(rs1), 3'd0, 5'(rd), OPC_CUSTOM};
  endfunction

  // load a 32-bit constant (two words)
  function automatic void li(input int rd, input logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    emit(lui(rd, hi[31:12]));
    emit(addi(rd, rd, int'({{20{v[11]}}, v[11:0]})));
  endfunction

  // Reference model of the sampler's random source: one Galois LFSR step
  // (x^32 + x^22 + x^2 + x + 1), written bit by bit.
  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    logic [31:0] n;
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = s[0];
    n[21] = s[22] ^ s[0];
    n[1]  = s[2]  ^ s[0];
    n[0]  = s[1]  ^ s[0];
    return n;
  endfunction

  // Reference model of the non-normalized Knuth-Yao sampler. Walks the
  // distribution-generating tree of weights w[0..n-1] plus the rejection
  // weight, drawing bits from `st`. Returns the sample; `bits` counts the
  // random bits drawn and `rej` the rejections.
  function automatic int ky_ref(input int unsigned w[32], input int n, inout logic [31:0] st,
                                output int bits, output int rej);
    longint unsigned total, lvl, mrej;
    int d;
    bits = 0; rej = 0;
    total = 0;
    for (int i = 0; i < n; i++) total += 64'(w[i]);
    if (n == 0 || total == 0) return 0;
    lvl = 1;
    while ((64'd1 << lvl) < total) lvl++;
    mrej = (64'd1 << lvl) - total;
    forever begin
      d = 0;
      for (int j = int'(lvl) - 1; j >= 0; j--) begin
        logic rb;
        rb = st[0];
        st = lfsr_next(st);
        bits++;
        d = 2 * d + (rb ? 0 : 1);
        // subtract rows from row 0 upwards (rejection row last) until d < 0
        for (int i = 0; i <= n; i++) begin
          longint unsigned v;
          v = (i == n) ? mrej : longint'(w[i]);
          d -= int'((v >> j) & 1);
          if (d < 0) begin
            if (i == n) begin
              rej++;
              break;
            end
            return i;
          end
        end
        if (d < 0) break;
      end
    end
  endfunction

  // ------------------------------------------------------------------
  // End-to-end program run by every core of the mesh (same binary; the
  // core id comes from the mhartid CSR). Results go to the data
  // scratchpad, word offsets:
  //   0       sum of the neighbours' shared x2 (= id*id + 7), read after a
  //           barrier, all four directions (0 beyond the array edge)
  //   1..n    n samples of weights (id+1, 2, 3), seed id*12345 + 1
  //   20      lut of (id + 0.5) in the 8-bit table e[k] = 16k + 16 (mod 256)
  //   21      global-buffer word id*64 read back after writing word 0 to it
  //           (only the top-row cores reach the global buffer; others read 0)
  //   22      event-unit barrier count after the second barrier (2)
  function automatic void e2e_program(input int nsamp, input int col_shift);
    prog.delete();
    li(31, 32'h1000_0000);
    li(30, 32'h3000_0000);
    emit(csrrs(1, CSR_MHARTID, 0));
    emit(mul(2, 1, 1)); emit(addi(2, 2, 7));
    li(10, 32'h2000_0000);
    emit(slli(11, 1, 6)); emit(add(11, 10, 11));
    emit(srli(3, 1, col_shift)); emit(andi(3, 3, 1));
    emit(sw(0, 30, 0));                              // barrier 1
    // a taken branch to the next instruction costs two bubbles: cores of
    // even rows fall one read step behind those of odd rows, so that two
    // neighbours read the same core's shared port in the same cycle
    emit(beq(3, 0, 4));
    emit(addi(5, 0, 0));
    for (int f = 0; f < 4; f++) begin
      emit(cshared(ALU_ADD, f, 6, 2, 0));
      emit(add(5, 5, 6));
    end
    emit(sw(5, 31, 0));
    // global buffer: the top-row cores hit bank 0 at about the same time
    emit(sw(5, 11, 0)); emit(lw(12, 11, 0)); emit(sw(12, 31, 84));
    // sampler
    emit(addi(7, 1, 1)); emit(cpriv(ALU_ADD, 32, 7, 0));
    emit(addi(7, 0, 2)); emit(cpriv(ALU_ADD, 33, 7, 0));
    emit(addi(7, 0, 3)); emit(cpriv(ALU_ADD, 34, 7, 0));
    emit(csrrw(0, CSR_SU_SIZE, 7));
    li(8, 32'd12345); emit(mul(8, 1, 8)); emit(addi(8, 8, 1));
    emit(csrrw(0, CSR_SU_SEED, 8));
    emit(addi(26, 31, 4)); emit(addi(27, 0, nsamp));
    emit(sample(25)); emit(sw(25, 26, 0)); emit(addi(26, 26, 4)); emit(addi(27, 27, -1));
    emit(bne(27, 0, -16));
    // interpolation table e[k] = 16k + 16, 8-bit entries, 8 fraction bits
    li(6, 32'h4030_2010); emit(cpriv(ALU_ADD, 32, 6, 0));
    li(6, 32'h8070_6050); emit(cpriv(ALU_ADD, 33, 6, 0));
    li(6, 32'hC0B0_A090); emit(cpriv(ALU_ADD, 34, 6, 0));
    li(6, 32'h00F0_E0D0); emit(cpriv(ALU_ADD, 35, 6, 0));
    emit(cpriv(ALU_ADD, 36, 0, 0));
    li(28, (32'd8 << 24) | (32'd1 << 5)); emit(csrrw(0, CSR_IU_CFG, 28));
    emit(slli(29, 1, 8)); emit(addi(29, 29, 128));
    emit(lut(9, 29)); emit(sw(9, 31, 80));
    emit(sw(0, 30, 0));                              // barrier 2
    emit(lw(13, 30, 8)); emit(sw(13, 31, 88));
    emit(ecall());
  endfunction

  function automatic int e2e_nb_sum(input int id, input int rows, input int cols);
    int r, c, s;
    r = id / cols; c = id % cols; s = 0;
    if (r > 0)        s += (id - cols) * (id - cols) + 7;
    if (r < rows - 1) s += (id + cols) * (id + cols) + 7;
    if (c > 0)        s += (id - 1) * (id - 1) + 7;
    if (c < cols - 1) s += (id + 1) * (id + 1) + 7;
    return s;
  endfunction

  function automatic logic [31:0] e2e_lut(input int id);
    int y0, y1;
    y0 = (16 * id + 16) % 256;
    y1 = (id + 1 < 16) ? (16 * (id + 1) + 16) % 256 : 0;
    return 32'(y0 + ((128 * (y1 - y0)) >>> 8));
  endfunction

endpackage
