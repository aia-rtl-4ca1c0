// aia_pkg: types and constants shared by the accelerator-mesh RTL.
//
// Holds the encodings of the custom instructions, the CSR addresses of the
// sampler (SU) and interpolation (IU) units, the ALU operation set, the
// neighbour directions of the register-sharing links and the request and
// response structs of the word-wide memory buses.
//
// Custom instruction layout (R-type on the custom-0 major opcode):
//   [31:29] f8  : 0 private-RF arithmetic, 1 arithmetic with a neighbour's
//                 shared register as first operand, 2 SU sample, 3 IU lookup
//   [28:25] f7  : arithmetic operation 0..9
//   [24:20] rs2, [19:15] rs1, [11:7] rd (low five index bits)
//   [14:12] f3  : private RF -> {rd[5], rs1[5], rs2[5]} (sixth index bits)
//                 shared RF  -> neighbour direction
// The field positions and values follow the published ISA table; the choice
// of major opcode, the order of the ten operations and the numbering of the
// directions are this design's own.
package aia_pkg;

  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_CUSTOM = 7'b0001011;

  // f8 field of the custom instructions
  localparam logic [2:0] F8_PRIV = 3'd0;
  localparam logic [2:0] F8_SHRD = 3'd1;
  localparam logic [2:0] F8_SU   = 3'd2;
  localparam logic [2:0] F8_IU   = 3'd3;

  // CSR addresses (published): IU config, SU seed, SU size; core id
  localparam logic [11:0] CSR_IU_CFG  = 12'h7D0;  // precision [6:5], fraction [28:24]
  localparam logic [11:0] CSR_SU_SEED = 12'h7D1;  // [31:0]
  localparam logic [11:0] CSR_SU_SIZE = 12'h7D2;  // [4:0]
  localparam logic [11:0] CSR_MHARTID = 12'hF14;

  // ALU operations; custom f7 values 0..9 select the first ten
  typedef enum logic [3:0] {
    ALU_ADD  = 4'd0,
    ALU_SUB  = 4'd1,
    ALU_MUL  = 4'd2,
    ALU_SLL  = 4'd3,
    ALU_SRL  = 4'd4,
    ALU_SRA  = 4'd5,
    ALU_AND  = 4'd6,
    ALU_OR   = 4'd7,
    ALU_XOR  = 4'd8,
    ALU_SLT  = 4'd9,
    ALU_SLTU = 4'd10
  } alu_op_e;

  // Neighbour directions, in the order the core figure prints them
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_S = 2'd1,
    DIR_W = 2'd2,
    DIR_E = 2'd3
  } dir_e;

  // Direction selected by f3 of a shared-RF instruction: 0 = left (W)
  // as published, then right, up, down.
  function automatic dir_e f3_to_dir(input logic [2:0] f3);
    case (f3[1:0])
      2'd0:    return DIR_W;
      2'd1:    return DIR_E;
      2'd2:    return DIR_N;
      default: return DIR_S;
    endcase
  endfunction

  // Direction seen from the other side of a link
  function automatic dir_e opposite(input dir_e d);
    case (d)
      DIR_N:   return DIR_S;
      DIR_S:   return DIR_N;
      DIR_W:   return DIR_E;
      default: return DIR_W;
    endcase
  endfunction

  function automatic logic [31:0] alu(input alu_op_e op, input logic [31:0] a,
                                      input logic [31:0] b);
    case (op)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_MUL:  return a * b;
      ALU_SLL:  return a << b[4:0];
      ALU_SRL:  return a >> b[4:0];
      ALU_SRA:  return $unsigned($signed(a) >>> b[4:0]);
      ALU_AND:  return a & b;
      ALU_OR:   return a | b;
      ALU_XOR:  return a ^ b;
      ALU_SLT:  return {31'd0, $signed(a) < $signed(b)};
      default:  return {31'd0, a < b};
    endcase
  endfunction

  // Word-wide memory bus: request, and grant / read response.
  // A request is held until granted; read data return one cycle after grant.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // Host-side request carried through the clock-domain crossing
  typedef struct packed {
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } host_req_t;

  // Mesh address map (host view and core data view)
  localparam logic [3:0] REGION_CORE  = 4'h1;  // 0x1cc0_0000: core cc, [15]=0 imem, 1 dmem
  localparam logic [3:0] REGION_GBUF  = 4'h2;  // 0x2000_0000: global buffer
  localparam logic [3:0] REGION_EVENT = 4'h3;  // 0x3000_0000: event unit / control

  // Event unit and control register offsets (addr[7:0])
  localparam logic [7:0] EV_BARRIER = 8'h00;   // core: write = arrive and wait
  localparam logic [7:0] EV_MASK    = 8'h04;   // host: cores taking part
  localparam logic [7:0] EV_COUNT   = 8'h08;   // barriers completed
  localparam logic [7:0] CTRL_FETCH = 8'h10;   // host: fetch-enable mask
  localparam logic [7:0] CTRL_DONE  = 8'h14;   // host: halted-core mask

endpackage
