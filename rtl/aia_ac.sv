// aia_ac: accelerator core (AC) of the mesh, with its two scratchpads.
//
// A three-stage in-order RISC-V pipeline (fetch, decode, execute) with a
// 64-word register file, extended for probabilistic inference:
//  * custom R-type arithmetic whose f3 field carries a sixth register-index
//    bit for rd, rs1 and rs2, reaching the private registers R32..R63;
//  * the same arithmetic with rs1 read from the shared register of the N, S,
//    W or E neighbour in one cycle (request/grant, see aia_regfile);
//  * `sample rd`: Knuth-Yao sampling (aia_ky_sampler) from the distribution in
//    R32.., size in CSR SU.size; the pipeline stalls while it runs;
//  * `lut rd, rs1`: single-cycle linear interpolation (aia_interp) from the
//    table in R32..R63, format in CSR 0x7D0.
// Base instructions: LUI, AUIPC, JAL, JALR, branches, LW/SW (every load or
// store is a 32-bit word access), OP-IMM, OP (+ MUL), CSRRW/S/C(I), ECALL.
// ECALL halts the core (`done`); clearing `fetch_en` resets the pipeline
// and the PC to 0. Anything else executes as a no-op.
// Memory: 8 KB instruction memory fetched from address 0; data accesses to
// region 0x1xxx_xxxx go to the 32 KB local scratchpad (one cycle, never
// blocked), all others to `ext_*` (request held until granted, read data one
// cycle after the grant). The host reaches both scratchpads through `host_*`
// (window bit 15: 0 instruction, 1 data memory; read data one cycle later).
// Timing: fetch reads the instruction memory synchronously, decode reads the
// RF (write-first bypass from execute) and the neighbour port, execute
// computes, accesses memory and writes back. Taken branches and jumps are
// resolved in execute and flush the two younger instructions. Loads take two
// execute cycles.
// Published: the 64-word RF with shared neighbour access, SU in decode and
// execute with pipeline stall, IU in execute fed by RS1, CSR addresses, the
// custom ISA fields, 8 KB/32 KB scratchpads, IF/ID and ID/EX registers.
// This design's own: pipeline depth and hazard handling, the address map,
// the halt mechanism, the opcode and the encoding details noted in aia_pkg.
module aia_ac
  import aia_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 2048,   // 8 KB
  parameter int unsigned DMEM_WORDS = 8192    // 32 KB
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [3:0]       core_id,
  input  logic             fetch_en,
  output logic             done,
  // host access to the scratchpads
  input  mem_req_t         host_req,
  output logic [31:0]      host_rdata,
  // data accesses outside the local scratchpad
  output mem_req_t         ext_req,
  input  mem_rsp_t         ext_rsp,
  // reading a neighbour's shared registers (index dir_e)
  output logic [3:0]       nb_req,
  output logic [3:0][4:0]  nb_addr,
  input  logic [3:0]       nb_gnt,
  input  logic [3:0][31:0] nb_rdata,
  // neighbours reading this core's shared registers (index: requester side)
  input  logic [3:0]       sh_req,
  input  logic [3:0][4:0]  sh_addr,
  output logic [3:0]       sh_gnt,
  output logic [31:0]      sh_rdata
);

  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);

  typedef enum logic [1:0] {A_RS1, A_PC, A_ZERO, A_NB} srca_e;
  typedef enum logic [2:0] {W_ALU, W_PC4, W_MEM, W_CSR, W_SU, W_IU} wsel_e;
  typedef enum logic [1:0] {PH_FIRST, PH_MEM, PH_SU} phase_e;

  typedef struct packed {
    alu_op_e     op;
    srca_e       srca;
    logic        b_imm;
    logic [5:0]  rd;
    logic        rd_we;
    wsel_e       wsel;
    logic        load;
    logic        store;
    logic        branch;
    logic [2:0]  f3;
    logic        jal;
    logic        jalr;
    logic        csr;
    logic [11:0] csr_addr;
    logic        su;
    logic        iu;
    logic        ecall;
    logic [31:0] imm;
  } ctrl_t;

  // ------------------------------------------------------------------ state
  logic [31:0] pc_f, pc_d, pc_e;
  logic        valid_d, valid_e, halted;
  ctrl_t       ctrl_d, ctrl_e;
  logic [31:0] opa_e, opb_e;
  phase_e      phase;
  logic        stall_ex, stall_id, nb_wait, flush, ex_done, fetch_go;
  logic [31:0] flush_pc;

  // CSRs
  logic [1:0]  iu_prec;
  logic [4:0]  iu_frac;
  logic [31:0] su_seed;
  logic [4:0]  su_size;

  // ------------------------------------------------------------- memories
  logic [31:0] instr_d;
  logic [31:0] imem_hrdata, dmem_hrdata;
  logic        host_sel_dmem_q;
  logic        host_imem, host_dmem;

  assign host_imem = host_req.req && !host_req.addr[15];
  assign host_dmem = host_req.req &&  host_req.addr[15];

  aia_sram #(.WORDS(IMEM_WORDS)) u_imem (
    .clk,
    .a_en(fetch_go), .a_we(1'b0), .a_addr(pc_f[IAW+1:2]), .a_wdata('0),
    .a_rdata(instr_d),
    .b_en(host_imem), .b_we(host_req.we), .b_addr(host_req.addr[IAW+1:2]),
    .b_wdata(host_req.wdata), .b_rdata(imem_hrdata)
  );

  logic        dm_en, dm_we;
  logic [31:0] dm_rdata;
  logic [31:0] mem_addr;

  aia_sram #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk,
    .a_en(dm_en), .a_we(dm_we), .a_addr(mem_addr[DAW+1:2]), .a_wdata(opb_e),
    .a_rdata(dm_rdata),
    .b_en(host_dmem), .b_we(host_req.we), .b_addr(host_req.addr[DAW+1:2]),
    .b_wdata(host_req.wdata), .b_rdata(dmem_hrdata)
  );

  always_ff @(posedge clk) if (host_req.req) host_sel_dmem_q <= host_req.addr[15];
  assign host_rdata = host_sel_dmem_q ? dmem_hrdata : imem_hrdata;

  // ------------------------------------------------------- register file
  logic [5:0]  rs1_d, rs2_d;
  logic [31:0] rs1_val, rs2_val;
  logic        rf_we;
  logic [31:0] rf_wdata;
  logic [4:0]  su_row_addr, su_col_bit, iu_addr_a, iu_addr_b;
  logic [31:0] su_row_data, su_col_data, iu_data_a, iu_data_b;

  aia_regfile u_rf (
    .clk, .rst_n,
    .ra_addr(rs1_d), .ra_data(rs1_val),
    .rb_addr(rs2_d), .rb_data(rs2_val),
    .we(rf_we), .waddr(ctrl_e.rd), .wdata(rf_wdata),
    .sh_req, .sh_addr, .sh_gnt, .sh_rdata,
    .su_row_addr, .su_row_data, .su_col_bit, .su_col_data,
    .iu_addr_a, .iu_data_a, .iu_addr_b, .iu_data_b
  );

  // ---------------------------------------------------------------- decode
  logic [6:0] opc;
  logic [2:0] f3;
  logic [2:0] f8;
  logic [3:0] f7c;
  dir_e       nb_dir;

  always_comb begin
    opc  = instr_d[6:0];
    f3   = instr_d[14:12];
    f8   = instr_d[31:29];
    f7c  = instr_d[28:25];
    nb_dir = f3_to_dir(f3);
    rs1_d = {1'b0, instr_d[19:15]};
    rs2_d = {1'b0, instr_d[24:20]};
    ctrl_d = '0;
    ctrl_d.op   = ALU_ADD;
    ctrl_d.srca = A_RS1;
    ctrl_d.wsel = W_ALU;
    ctrl_d.rd   = {1'b0, instr_d[11:7]};
    ctrl_d.f3   = f3;
    case (opc)
      OPC_LUI: begin
        ctrl_d.srca = A_ZERO; ctrl_d.b_imm = 1'b1; ctrl_d.rd_we = 1'b1;
        ctrl_d.imm  = {instr_d[31:12], 12'd0};
      end
      OPC_AUIPC: begin
        ctrl_d.srca = A_PC; ctrl_d.b_imm = 1'b1; ctrl_d.rd_we = 1'b1;
        ctrl_d.imm  = {instr_d[31:12], 12'd0};
      end
      OPC_JAL: begin
        ctrl_d.jal = 1'b1; ctrl_d.rd_we = 1'b1; ctrl_d.wsel = W_PC4;
        ctrl_d.imm = {{12{instr_d[31]}}, instr_d[19:12], instr_d[20], instr_d[30:21], 1'b0};
      end
      OPC_JALR: begin
        ctrl_d.jalr = 1'b1; ctrl_d.rd_we = 1'b1; ctrl_d.wsel = W_PC4;
        ctrl_d.imm  = {{20{instr_d[31]}}, instr_d[31:20]};
      end
      OPC_BRANCH: begin
        ctrl_d.branch = 1'b1;
        ctrl_d.imm = {{20{instr_d[31]}}, instr_d[7], instr_d[30:25], instr_d[11:8], 1'b0};
      end
      OPC_LOAD: begin
        ctrl_d.load = 1'b1; ctrl_d.rd_we = 1'b1; ctrl_d.wsel = W_MEM;
        ctrl_d.imm  = {{20{instr_d[31]}}, instr_d[31:20]};
      end
      OPC_STORE: begin
        ctrl_d.store = 1'b1;
        ctrl_d.imm = {{20{instr_d[31]}}, instr_d[31:25], instr_d[11:7]};
      end
      OPC_OPIMM: begin
        ctrl_d.b_imm = 1'b1; ctrl_d.rd_we = 1'b1;
        ctrl_d.imm   = {{20{instr_d[31]}}, instr_d[31:20]};
        case (f3)
          3'b000: ctrl_d.op = ALU_ADD;
          3'b010: ctrl_d.op = ALU_SLT;
          3'b011: ctrl_d.op = ALU_SLTU;
          3'b100: ctrl_d.op = ALU_XOR;
          3'b110: ctrl_d.op = ALU_OR;
          3'b111: ctrl_d.op = ALU_AND;
          3'b001: ctrl_d.op = ALU_SLL;
          default: ctrl_d.op = instr_d[30] ? ALU_SRA : ALU_SRL;
        endcase
      end
      OPC_OP: begin
        ctrl_d.rd_we = 1'b1;
        if (instr_d[31:25] == 7'b0000001) begin
          ctrl_d.op    = ALU_MUL;
          ctrl_d.rd_we = (f3 == 3'b000);
        end else begin
          case (f3)
            3'b000: ctrl_d.op = instr_d[30] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl_d.op = ALU_SLL;
            3'b010: ctrl_d.op = ALU_SLT;
            3'b011: ctrl_d.op = ALU_SLTU;
            3'b100: ctrl_d.op = ALU_XOR;
            3'b101: ctrl_d.op = instr_d[30] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl_d.op = ALU_OR;
            default: ctrl_d.op = ALU_AND;
          endcase
        end
      end
      OPC_SYSTEM: begin
        if (f3 == 3'b000) begin
          ctrl_d.ecall = (instr_d[31:20] == 12'h000);
        end else begin
          ctrl_d.csr      = 1'b1;
          ctrl_d.rd_we    = 1'b1;
          ctrl_d.wsel     = W_CSR;
          ctrl_d.csr_addr = instr_d[31:20];
          ctrl_d.imm      = {27'd0, instr_d[19:15]};
        end
      end
      OPC_CUSTOM: begin
        case (f8)
          F8_PRIV: begin
            ctrl_d.rd    = {f3[2], instr_d[11:7]};
            rs1_d        = {f3[1], instr_d[19:15]};
            rs2_d        = {f3[0], instr_d[24:20]};
            ctrl_d.op    = alu_op_e'(f7c);
            ctrl_d.rd_we = (f7c <= 4'd9);
          end
          F8_SHRD: begin
            ctrl_d.srca  = A_NB;
            ctrl_d.op    = alu_op_e'(f7c);
            ctrl_d.rd_we = (f7c <= 4'd9);
          end
          F8_SU: begin
            ctrl_d.su = 1'b1; ctrl_d.rd_we = 1'b1; ctrl_d.wsel = W_SU;
          end
          F8_IU: begin
            ctrl_d.iu = 1'b1; ctrl_d.rd_we = 1'b1; ctrl_d.wsel = W_IU;
          end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

  // neighbour register request, single cycle, priority-granted at the target
  always_comb begin
    nb_req  = '0;
    nb_addr = '0;
    nb_wait = 1'b0;
    if (valid_d && ctrl_d.srca == A_NB && !stall_ex) begin
      nb_req[nb_dir]  = 1'b1;
      nb_addr[nb_dir] = instr_d[19:15];
      nb_wait         = !nb_gnt[nb_dir];
    end
  end

  assign stall_id = stall_ex || nb_wait;

  // --------------------------------------------------------------- execute
  logic [31:0] a_op, b_op, alu_res, csr_rdata, csr_src, csr_new;
  logic        taken, is_local;
  logic        su_done, su_busy, su_reject, su_rbit;
  logic [4:0]  su_result;
  logic [31:0] iu_result;

  always_comb begin
    case (ctrl_e.srca)
      A_PC:    a_op = pc_e;
      A_ZERO:  a_op = '0;
      default: a_op = opa_e;
    endcase
    b_op    = ctrl_e.b_imm ? ctrl_e.imm : opb_e;
    alu_res = alu(ctrl_e.op, a_op, b_op);
    case (ctrl_e.f3)
      3'b000:  taken = (opa_e == opb_e);
      3'b001:  taken = (opa_e != opb_e);
      3'b100:  taken = ($signed(opa_e) <  $signed(opb_e));
      3'b101:  taken = ($signed(opa_e) >= $signed(opb_e));
      3'b110:  taken = (opa_e <  opb_e);
      3'b111:  taken = (opa_e >= opb_e);
      default: taken = 1'b0;
    endcase
    mem_addr = opa_e + ctrl_e.imm;
    is_local = (mem_addr[31:28] == REGION_CORE);
  end

  // CSR file
  always_comb begin
    case (ctrl_e.csr_addr)
      CSR_IU_CFG:  csr_rdata = {3'd0, iu_frac, 17'd0, iu_prec, 5'd0};
      CSR_SU_SEED: csr_rdata = su_seed;
      CSR_SU_SIZE: csr_rdata = {27'd0, su_size};
      CSR_MHARTID: csr_rdata = {28'd0, core_id};
      default:     csr_rdata = '0;
    endcase
    csr_src = ctrl_e.f3[2] ? ctrl_e.imm : opa_e;
    case (ctrl_e.f3[1:0])
      2'b01:   csr_new = csr_src;
      2'b10:   csr_new = csr_rdata | csr_src;
      default: csr_new = csr_rdata & ~csr_src;
    endcase
  end

  logic csr_we;
  assign csr_we = ex_done && ctrl_e.csr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iu_prec <= 2'd1;
      iu_frac <= 5'd8;
      su_seed <= 32'd1;
      su_size <= '0;
    end else if (csr_we) begin
      case (ctrl_e.csr_addr)
        CSR_IU_CFG:  begin iu_prec <= csr_new[6:5]; iu_frac <= csr_new[28:24]; end
        CSR_SU_SEED: su_seed <= csr_new;
        CSR_SU_SIZE: su_size <= csr_new[4:0];
        default: ;
      endcase
    end
  end

  // sampler unit
  aia_ky_sampler u_su (
    .clk, .rst_n,
    .start(valid_e && ctrl_e.su && phase == PH_FIRST),
    .size(su_size),
    .seed_load(csr_we && ctrl_e.csr_addr == CSR_SU_SEED),
    .seed(csr_new),
    .row_addr(su_row_addr), .row_data(su_row_data),
    .col_bit(su_col_bit), .col_data(su_col_data),
    .busy(su_busy), .done(su_done), .result(su_result),
    .reject(su_reject), .rbit_used(su_rbit)
  );

  // interpolation unit
  aia_interp u_iu (
    .rs1(opa_e), .prec_code(iu_prec), .frac_bits(iu_frac),
    .addr_a(iu_addr_a), .data_a(iu_data_a),
    .addr_b(iu_addr_b), .data_b(iu_data_b),
    .result(iu_result)
  );

  // memory access
  logic mem_first;
  assign mem_first = valid_e && phase == PH_FIRST && (ctrl_e.load || ctrl_e.store);
  assign dm_en     = mem_first && is_local;
  assign dm_we     = ctrl_e.store;

  always_comb begin
    ext_req       = '0;
    ext_req.req   = mem_first && !is_local;
    ext_req.we    = ctrl_e.store;
    ext_req.addr  = mem_addr;
    ext_req.wdata = opb_e;
  end

  logic mem_local_q;
  always_ff @(posedge clk) if (mem_first) mem_local_q <= is_local;

  // completion of the instruction in execute
  always_comb begin
    ex_done = 1'b0;
    if (valid_e) begin
      case (phase)
        PH_FIRST: begin
          if (ctrl_e.su)         ex_done = 1'b0;
          else if (ctrl_e.store) ex_done = is_local || ext_rsp.gnt;
          else if (ctrl_e.load)  ex_done = 1'b0;
          else                   ex_done = 1'b1;
        end
        PH_MEM:  ex_done = mem_local_q || ext_rsp.rvalid;
        default: ex_done = su_done;
      endcase
    end
  end
  assign stall_ex = valid_e && !ex_done;

  always_comb begin
    case (ctrl_e.wsel)
      W_PC4:   rf_wdata = pc_e + 32'd4;
      W_MEM:   rf_wdata = mem_local_q ? dm_rdata : ext_rsp.rdata;
      W_CSR:   rf_wdata = csr_rdata;
      W_SU:    rf_wdata = {27'd0, su_result};
      W_IU:    rf_wdata = iu_result;
      default: rf_wdata = alu_res;
    endcase
  end
  assign rf_we = ex_done && ctrl_e.rd_we;

  always_comb begin
    flush    = 1'b0;
    flush_pc = pc_e + ctrl_e.imm;
    if (ex_done) begin
      if (ctrl_e.jal || (ctrl_e.branch && taken)) flush = 1'b1;
      if (ctrl_e.jalr) begin
        flush    = 1'b1;
        flush_pc = (opa_e + ctrl_e.imm) & ~32'd1;
      end
      if (ctrl_e.ecall) flush = 1'b1;
    end
  end

  // ------------------------------------------------------- pipeline control
  assign fetch_go = fetch_en && !halted && !stall_id && !flush && !(ex_done && ctrl_e.ecall);
  assign done     = halted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_f    <= '0;
      pc_d    <= '0;
      pc_e    <= '0;
      valid_d <= 1'b0;
      valid_e <= 1'b0;
      halted  <= 1'b0;
      phase   <= PH_FIRST;
      ctrl_e  <= '0;
      opa_e   <= '0;
      opb_e   <= '0;
    end else if (!fetch_en) begin
      pc_f    <= '0;
      valid_d <= 1'b0;
      valid_e <= 1'b0;
      halted  <= 1'b0;
      phase   <= PH_FIRST;
    end else begin
      // fetch / IF-ID
      if (flush) begin
        pc_f    <= flush_pc;
        valid_d <= 1'b0;
      end else if (!stall_id) begin
        valid_d <= fetch_go;
        pc_d    <= pc_f;
        if (fetch_go) pc_f <= pc_f + 32'd4;
      end
      if (ex_done && ctrl_e.ecall) halted <= 1'b1;
      // ID-EX
      if (!stall_ex) begin
        valid_e <= valid_d && !nb_wait && !flush && !halted;
        ctrl_e  <= ctrl_d;
        pc_e    <= pc_d;
        opa_e   <= (ctrl_d.srca == A_NB) ? nb_rdata[nb_dir] : rs1_val;
        opb_e   <= rs2_val;
      end
      // execute phase
      if (ex_done || !valid_e) begin
        phase <= PH_FIRST;
      end else if (phase == PH_FIRST) begin
        if (ctrl_e.su)                                  phase <= PH_SU;
        else if (ctrl_e.load && (is_local || ext_rsp.gnt)) phase <= PH_MEM;
      end
    end
  end

  // A request to the external bus is held until it is granted
  property p_ext_hold;
    @(posedge clk) disable iff (!rst_n)
      (ext_req.req && !ext_rsp.gnt && fetch_en) |=> ext_req.req;
  endproperty
  a_ext_hold: assert property (p_ext_hold);

endmodule
