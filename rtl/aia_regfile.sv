// aia_regfile: 64-word register file of an accelerator core.
//
// Registers 0..31 are the shared half (the ordinary RISC-V x0..x31; x0 reads
// zero), which the four N/S/W/E neighbours can read; registers 32..63 are the
// private half that holds the sampler's distribution and the interpolation
// table. Read ports:
//   ra/rb    : pipeline operands (6-bit index), write-first bypass
//   sh_*     : one port on the shared half for the four neighbours; a
//              priority decoder grants one request per cycle, N > S > W > E,
//              and the losers must hold their request (sh_gnt low)
//   su_row   : sampler row port, private word su_row_addr
//   su_col   : sampler column port, bit su_col_bit of every private word
//   iu_a/iu_b: interpolation ports, private words iu_addr_a / iu_addr_b
// One write port. All reads are combinational (single-cycle neighbour
// access); the write lands at the clock edge.
// Published: 64 words, 32 shared, neighbour read of the shared words, a
// muxed neighbour port with a priority decoder, the row-wise and column-wise
// sampler ports and two IU ports. This design's choice: which half is shared,
// the priority order, the grant signal and a single write port (the figure
// draws two write inputs; no instruction here writes two results).
module aia_regfile
  import aia_pkg::*;
#(
  parameter int unsigned NREG    = 64,
  parameter int unsigned NSHARED = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // pipeline ports
  input  logic [5:0]  ra_addr,
  output logic [31:0] ra_data,
  input  logic [5:0]  rb_addr,
  output logic [31:0] rb_data,
  input  logic        we,
  input  logic [5:0]  waddr,
  input  logic [31:0] wdata,
  // neighbour port, indexed by dir_e of the requesting neighbour
  input  logic [3:0]       sh_req,
  input  logic [3:0][4:0]  sh_addr,
  output logic [3:0]       sh_gnt,
  output logic [31:0]      sh_rdata,
  // sampler ports
  input  logic [4:0]  su_row_addr,
  output logic [31:0] su_row_data,
  input  logic [4:0]  su_col_bit,
  output logic [31:0] su_col_data,
  // interpolation ports
  input  logic [4:0]  iu_addr_a,
  output logic [31:0] iu_data_a,
  input  logic [4:0]  iu_addr_b,
  output logic [31:0] iu_data_b
);

  localparam int unsigned NPRIV = NREG - NSHARED;

  logic [31:0] regs [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
    end else if (we && waddr != 6'd0) begin
      regs[waddr] <= wdata;
    end
  end

  function automatic logic [31:0] rd_bypass(input logic [5:0] a);
    if (a == 6'd0)             return '0;
    else if (we && waddr == a) return wdata;
    else                       return regs[a];
  endfunction

  assign ra_data = rd_bypass(ra_addr);
  assign rb_data = rd_bypass(rb_addr);

  // Priority decoder for the neighbour port
  logic [4:0] sh_sel_addr;
  always_comb begin
    sh_gnt      = '0;
    sh_sel_addr = '0;
    for (int d = 3; d >= 0; d--) begin
      if (sh_req[d]) begin
        sh_gnt      = '0;
        sh_gnt[d]   = 1'b1;
        sh_sel_addr = sh_addr[d];
      end
    end
  end
  assign sh_rdata = rd_bypass({1'b0, sh_sel_addr});

  assign su_row_data = regs[NSHARED + int'(su_row_addr)];
  assign iu_data_a   = regs[NSHARED + int'(iu_addr_a)];
  assign iu_data_b   = regs[NSHARED + int'(iu_addr_b)];

  always_comb begin
    su_col_data = '0;
    for (int i = 0; i < NPRIV; i++) su_col_data[i] = regs[NSHARED + i][su_col_bit];
  end

endmodule
