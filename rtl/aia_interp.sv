// aia_interp: single-cycle LUT linear-interpolation unit (IU).
//
// The table lives in the private half of the register file (R32..R63, 1024
// bits) as packed unsigned entries of P = 4, 8, 16 or 32 bits, entry k at
// bits [k*P +: P] (entry 0 in the low bits of R32). The operand RS1 is a
// fixed-point number with F fraction bits: int = RS1 >> F, frac = the low F
// bits. The address generator turns int into a bit offset (offset = int*P)
// and the two register indexes holding entries int and int+1, read through
// the two IU ports; then
//     y0 = (table >> offset) & mask,  y1 = (table >> (offset + P)) & mask,
//     result = y0 + (frac * (y1 - y0)) >>> F      (signed, truncated to 32b)
// Entry indexes wrap modulo the 1024/P entries the table holds.
// CSR IU config (0x7D0): precision code [6:5] (0:4b 1:8b 2:16b 3:32b),
// fraction bits F [28:24]. Purely combinational: result in the EX cycle.
// Published: the offset/y0/result formulas, the table in the RF, two RF
// ports, CSR fields and the four precisions. The published y1 formula adds
// IU.fraction to the offset; with the published example (precision 8,
// fraction 8) that equals offset + P, and offset + P (the next entry) is
// what linear interpolation needs, so that is used. The precision code
// values, table placement and scaling of frac are this design's choice.
module aia_interp (
  input  logic [31:0] rs1,
  input  logic [1:0]  prec_code,
  input  logic [4:0]  frac_bits,
  output logic [4:0]  addr_a,
  input  logic [31:0] data_a,
  output logic [4:0]  addr_b,
  input  logic [31:0] data_b,
  output logic [31:0] result
);

  logic [5:0]  p;          // entry width in bits
  logic [31:0] mask;
  logic [31:0] int_part;
  logic [31:0] frac_part;
  logic [9:0]  off0, off1;
  logic [31:0] y0, y1;
  logic signed [33:0] diff;
  logic signed [66:0] prod;

  always_comb begin
    p         = 6'd4 << prec_code;
    mask      = (prec_code == 2'd3) ? 32'hFFFF_FFFF : ((32'd1 << p) - 32'd1);
    int_part  = rs1 >> frac_bits;
    frac_part = rs1 & ((32'd1 << frac_bits) - 32'd1);
    off0      = 10'(int_part * 32'(p));   // modulo 1024 bits
    off1      = off0 + 10'(p);
    addr_a    = off0[9:5];
    addr_b    = off1[9:5];
    y0        = (data_a >> off0[4:0]) & mask;
    y1        = (data_b >> off1[4:0]) & mask;
    diff      = $signed({2'b00, y1}) - $signed({2'b00, y0});
    prod      = $signed({1'b0, frac_part}) * diff;
    result    = y0 + 32'(prod >>> frac_bits);
  end

endmodule
